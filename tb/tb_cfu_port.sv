// tb_cfu_port -- the CPU-CFU handshake with a scripted datapath. Part 1: one
// command at a time, with the datapath finishing 0..4 cycles after the accept
// and the CPU holding off the response for 0..3 cycles; checks cmd_ready while
// busy, the response delay (finish delay + 1), the value, and that the value
// and rsp_valid stay put under backpressure. Part 2: single-cycle commands
// back to back with rsp_ready held high must give one response per cycle, in
// order. Inputs change on the falling clock edge.
module tb_cfu_port;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0, accept, core_done = 0;
  logic [31:0] rsp_rd, core_result = 0;
  int checks = 0, failures = 0;

  cfu_port dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .rsp_valid, .rsp_ready, .rsp_rd,
                .accept, .core_done, .core_result);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    logic [31:0] r;
    int d, hold;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // ---- part 1
    for (int n = 0; n < 200; n++) begin
      d    = $urandom_range(0, 4);
      hold = $urandom_range(0, 3);
      r    = $urandom;
      cmd_valid = 1;
      #1 expect_(cmd_ready && accept, "idle port takes a command");
      if (d == 0) begin core_done = 1; core_result = r; end
      for (int c = 1; c <= d; c++) begin
        @(negedge clk);
        cmd_valid = 0;
        #1 expect_(!cmd_ready && !rsp_valid, "busy: no ready, no response");
        if (c == d) begin core_done = 1; core_result = r; end
      end
      @(negedge clk);
      cmd_valid = 0; core_done = 0; core_result = ~r;
      #1 expect_(rsp_valid && rsp_rd == r, "response one cycle after done");
      for (int c = 0; c < hold; c++) begin
        @(negedge clk);
        #1 expect_(rsp_valid && rsp_rd == r && !cmd_ready, "response held under backpressure");
      end
      rsp_ready = 1;
      #1 expect_(cmd_ready, "ready while the response is taken");
      @(negedge clk);
      rsp_ready = 0;
      #1 expect_(!rsp_valid && cmd_ready, "idle after response taken");
    end
    // ---- part 2: back to back
    rsp_ready = 1;
    for (int n = 0; n < 50; n++) begin
      cmd_valid = 1; core_done = 1; core_result = 32'(n * 7 + 1);
      #1 expect_(accept, "back-to-back accept");
      if (n > 0) expect_(rsp_valid && rsp_rd == 32'((n - 1) * 7 + 1), "one response per cycle");
      @(negedge clk);
    end
    cmd_valid = 0; core_done = 0;
    #1 expect_(rsp_valid && rsp_rd == 32'(49 * 7 + 1), "last back-to-back response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
