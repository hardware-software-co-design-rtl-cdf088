// tb_seq_mac -- drives packed blocks with nnz = 0..4 and checks the sum of the
// first nnz products and the cycle count: done comes max(nnz, 1) cycles after
// (and including) the start cycle. Lanes past nnz carry random garbage that
// must not enter the sum. Inputs change on the falling clock edge.
module tb_seq_mac;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] w [4], x [4];
  logic [2:0] nnz;
  logic busy, done;
  logic [31:0] result;
  int checks = 0, failures = 0;

  seq_mac dut (.clk, .rst_n, .start, .w, .x, .nnz, .busy, .done, .result);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 400; n++) begin
      int exp, cyc, want;
      logic [31:0] got;
      exp = 0;
      cyc = 0;
      got = '0;
      nnz = 3'($urandom_range(0, 4));
      for (int k = 0; k < 4; k++) begin
        w[k] = 8'($urandom);
        x[k] = 8'($urandom);
        if (k < int'(nnz)) exp += int'($signed(w[k])) * int'($signed(x[k]));
      end
      want  = (nnz == 0) ? 1 : int'(nnz);
      start = 1;
      // count the cycles up to and including the one that raises done
      forever begin
        #1;
        cyc++;
        if (done) begin
          got = result;
          break;
        end
        @(negedge clk);
        start = 0;
        if (cyc > 10) break;
      end
      @(negedge clk);
      start = 0;
      checks += 2;
      if ($signed(got) != exp) begin
        failures++;
        $display("FAIL nnz=%0d got %0d exp %0d", nnz, $signed(got), exp);
      end
      if (cyc != want) begin
        failures++;
        $display("FAIL nnz=%0d took %0d cycles, want %0d", nnz, cyc, want);
      end
      if ($urandom_range(0, 1)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
