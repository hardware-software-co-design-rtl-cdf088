// tb_ussa_cfu -- the unstructured unit through its CPU handshake: usss_vcmac
// on random INT8 blocks covering all 16 zero patterns, checking the value
// against the dot product, the latency max(n, 1) and the held response under
// backpressure. Inputs change on the falling clock edge.
module tb_ussa_cfu;
  import tb_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0;
  logic [9:0]  cmd_function_id = '0;
  logic [31:0] cmd_rs1 = '0, cmd_rs2 = '0, rsp_rd;
  int checks = 0, failures = 0;

  ussa_cfu dut (.*);

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

  // usss_vcmac on random INT8 blocks with every zero pattern: value against
  // the dot product and latency max(n, 1) for n non-zero weights, against 4
  // cycles for a plain sequential MAC. Also sums the cycles of a run.
  initial begin
    blk_t w;
    logic [31:0] x, rd;
    int lat, n, cyc_vc, cyc_base;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cyc_vc = 0; cyc_base = 0;
    for (int r = 0; r < 400; r++) begin
      for (int k = 0; k < 4; k++) begin
        w[k] = ($urandom_range(0, 1) == 0) ? 8'sd0 : rand_b();
        x[8*k +: 8] = rand_b();
      end
      if (r < 16) for (int k = 0; k < 4; k++) if (!r[k]) w[k] = 0;
      n = nonzeros(w);
      issue(fid_of(r[0]), pack8(w), x, $urandom_range(0, 2), rd, lat);
      expect_($signed(rd) == dot4(w, x), "usss_vcmac value");
      expect_(lat == ((n == 0) ? 1 : n), "usss_vcmac cycles = non-zero weights");
      cyc_vc += lat; cyc_base += 4;
    end
    $display("MAC cycles %0d against %0d for the four-cycle sequential MAC", cyc_vc, cyc_base);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
