// tb_sssa_cfu -- the semi-structured unit through its CPU handshake:
// sssa_mac and sssa_inc_indvar one at a time (values, one-cycle latency,
// response held under backpressure), then whole rows of a kernel run the way
// the specialised software loop runs them.
module tb_sssa_cfu;
  import tb_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0;
  logic [9:0]  cmd_function_id = '0;
  logic [31:0] cmd_rs1 = '0, cmd_rs2 = '0, rsp_rd;
  int checks = 0, failures = 0;

  sssa_cfu dut (.*);

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

  // Random single instructions, then Listing-2 style rows: i = 0; while
  // (i < C) { acc += sssa_mac(w[i], x[i]); i = sssa_inc_indvar(w[i], i); }
  // over rows with runs of zero blocks, compared with the dense dot product.
  localparam int C = 96;   // weights per row, 24 blocks
  initial begin
    blk_t w;
    blk_t row [C/4];
    int unsigned skip;
    logic [31:0] x, rd, xrow [C/4];
    int lat, acc, exp, i, calls, run;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // sssa_mac vs. dot product, one cycle
    for (int n = 0; n < 300; n++) begin
      for (int k = 0; k < 4; k++) begin
        w[k] = ($urandom_range(0, 3) == 0) ? 8'sd0 : rand_w7_nz();
        x[8*k +: 8] = rand_b();
      end
      issue(fid_of(0), encode_last_bits(w, $urandom_range(0, 15)), x, $urandom_range(0, 2), rd, lat);
      expect_($signed(rd) == dot4(w, x), "sssa_mac value");
      expect_(lat == 1, "sssa_mac one cycle");
    end
    // sssa_inc_indvar, one cycle
    for (int n = 0; n < 200; n++) begin
      for (int k = 0; k < 4; k++) w[k] = rand_w7_nz();
      skip = $urandom_range(0, 15);
      x    = $urandom_range(0, 1 << 20);
      issue(fid_of(1), encode_last_bits(w, skip), x, 0, rd, lat);
      expect_(rd == x + 4 * (skip + 1), "sssa_inc_indvar value");
      expect_(lat == 1, "sssa_inc_indvar one cycle");
    end
    // kernel rows
    for (int r = 0; r < 30; r++) begin
      exp = 0;
      for (int b = 0; b < C/4; b++) begin
        bit zb;
        zb = (b > 0) && ($urandom_range(0, 99) < 60);
        for (int k = 0; k < 4; k++) begin
          row[b][k] = zb ? 8'sd0 : rand_w7_nz();
          xrow[b][8*k +: 8] = rand_b();
        end
        exp += dot4(row[b], xrow[b]);
      end
      acc = 0; i = 0; calls = 0;
      while (i < C) begin
        // lookahead count of block i/4 (at most 15)
        run = 0;
        while (i/4 + run + 1 < C/4 && run < 15 && nonzeros(row[i/4 + run + 1]) == 0) run++;
        issue(fid_of(0), encode_last_bits(row[i/4], run), xrow[i/4], 0, rd, lat);
        acc += int'($signed(rd));
        issue(fid_of(1), encode_last_bits(row[i/4], run), 32'(i), 0, rd, lat);
        i = int'(rd);
        calls++;
      end
      expect_(acc == exp, "sssa kernel row result");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
