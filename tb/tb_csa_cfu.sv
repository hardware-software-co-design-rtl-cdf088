// tb_csa_cfu -- the combined unit through its CPU handshake: both
// instructions, values and latencies (max(n, 1) for csa_vcmac, one cycle for
// csa_inc_indvar), with lookahead-encoded weights built by the reference
// encoder. Inputs change on the falling clock edge.
module tb_csa_cfu;
  import tb_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0;
  logic [9:0]  cmd_function_id = '0;
  logic [31:0] cmd_rs1 = '0, cmd_rs2 = '0, rsp_rd;
  int checks = 0, failures = 0;

  csa_cfu dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // CPU side of the CFU handshake.
  //
  // issue() is entered and left on a falling clock edge. It offers one command,
  // waits for it to be accepted, measures the latency as the number of rising
  // edges from the accepting edge's cycle to the first cycle with rsp_valid
  // (1 = response in the cycle after the accept), optionally withholds
  // rsp_ready for `hold` cycles while checking that the response stays put, and
  // takes the response.
  task automatic issue(input logic [9:0] fid, input logic [31:0] a, input logic [31:0] b,
                       input int hold, output logic [31:0] rd, output int lat);
    cmd_function_id = fid;
    cmd_rs1         = a;
    cmd_rs2         = b;
    cmd_valid       = 1'b1;
    #1;
    while (!cmd_ready) begin
      @(negedge clk);
      #1;
    end
    lat = 0;
    do begin
      @(negedge clk);
      cmd_valid = 1'b0;
      lat++;
      #1;
    end while (!rsp_valid && lat < 20);
    rd = rsp_rd;
    for (int c = 0; c < hold; c++) begin
      @(negedge clk);
      #1;
      checks++;
      if (!rsp_valid || rsp_rd !== rd || cmd_ready) begin
        failures++;
        $display("FAIL response not held under backpressure at %0t", $time);
      end
    end
    rsp_ready = 1'b1;
    @(negedge clk);
    rsp_ready = 1'b0;
  endtask

  // function id with funct7[0] = f0 and random other bits
  function automatic logic [9:0] fid_of(input bit f0);
    logic [9:0] f;
    f    = 10'($urandom);
    f[3] = f0;
    return f;
  endfunction

  task automatic expect_(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // csa_vcmac on encoded blocks with every zero pattern and random lookahead
  // counts (a set lookahead bit on a zero weight must not cost a cycle), and
  // csa_inc_indvar for every count.
  initial begin
    blk_t w;
    logic [31:0] x, rd;
    int unsigned skip;
    int lat, n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 400; r++) begin
      for (int k = 0; k < 4; k++) begin
        w[k] = ($urandom_range(0, 1) == 0) ? 8'sd0 : rand_w7_nz();
        x[8*k +: 8] = rand_b();
      end
      if (r < 16) for (int k = 0; k < 4; k++) if (!r[k]) w[k] = 0;
      n    = nonzeros(w);
      skip = (r < 16) ? 15 : $urandom_range(0, 15);
      issue(fid_of(0), encode_last_bits(w, skip), x, $urandom_range(0, 2), rd, lat);
      expect_($signed(rd) == dot4(w, x), "csa_vcmac value");
      expect_(lat == ((n == 0) ? 1 : n), "csa_vcmac cycles = non-zero weights");
    end
    for (int r = 0; r < 64; r++) begin
      for (int k = 0; k < 4; k++) w[k] = ($urandom_range(0, 1) == 0) ? 8'sd0 : rand_w7_nz();
      skip = r % 16;
      x    = $urandom_range(0, 1 << 16);
      issue(fid_of(1), encode_last_bits(w, skip), x, $urandom_range(0, 1), rd, lat);
      expect_(rd == x + 4 * (skip + 1), "csa_inc_indvar value");
      expect_(lat == 1, "csa_inc_indvar one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
