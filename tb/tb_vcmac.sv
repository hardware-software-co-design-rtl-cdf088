// tb_vcmac -- the variable-cycle MAC in both weight formats. For random
// blocks with random zero positions it checks the result against the dot
// product of the original weights and the cycle count max(n, 1), n the number
// of non-zero weights. The INT8 instance (ENCODED = 0) gets plain bytes; the
// 7-bit instance (ENCODED = 1) gets lookahead-encoded blocks with random
// counts, so a set lookahead bit on a zero weight must not count as non-zero.
module tb_vcmac;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start8 = 0, start7 = 0;
  logic [31:0] rs1_8, rs2_8, rs1_7, rs2_7, res8, res7;
  logic busy8, done8, busy7, done7;
  logic [2:0] nnz8, nnz7;
  int checks = 0, failures = 0;

  vcmac #(.ENCODED(1'b0)) dut8 (.clk, .rst_n, .start(start8), .rs1(rs1_8), .rs2(rs2_8),
                                .busy(busy8), .done(done8), .result(res8), .nnz(nnz8));
  vcmac #(.ENCODED(1'b1)) dut7 (.clk, .rst_n, .start(start7), .rs1(rs1_7), .rs2(rs2_7),
                                .busy(busy7), .done(done7), .result(res7), .nnz(nnz7));

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one block on one instance, return result and cycle count;
  // called and returning at a falling clock edge
  task automatic run(input bit enc, input logic [31:0] a, input logic [31:0] b,
                     output int res, output int cyc);
    cyc = 0;
    if (enc) begin rs1_7 = a; rs2_7 = b; start7 = 1; end
    else     begin rs1_8 = a; rs2_8 = b; start8 = 1; end
    forever begin
      #1;
      cyc++;
      if (enc ? done7 : done8) begin
        res = enc ? int'($signed(res7)) : int'($signed(res8));
        break;
      end
      @(negedge clk);
      start7 = 0; start8 = 0;
      if (cyc > 10) begin res = 'x; break; end
    end
    @(negedge clk);
    start7 = 0; start8 = 0;
  endtask

  initial begin
    blk_t w;
    logic [31:0] x;
    int res, cyc, n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int rep = 0; rep < 300; rep++) begin
      for (int enc = 0; enc < 2; enc++) begin
        for (int k = 0; k < 4; k++) begin
          w[k] = ($urandom_range(0, 1) == 0) ? 8'sd0 : (enc ? rand_w7_nz() : rand_b());
          x[8*k +: 8] = rand_b();
        end
        if (rep < 16) for (int k = 0; k < 4; k++) if (!rep[k]) w[k] = 0;  // every zero pattern
        n = nonzeros(w);
        run(enc[0], enc ? encode_last_bits(w, $urandom_range(0, 15)) : pack8(w), x, res, cyc);
        checks += 2;
        if (res != dot4(w, x)) begin
          failures++;
          $display("FAIL enc=%0d w=%p got %0d exp %0d", enc, w, res, dot4(w, x));
        end
        if (cyc != ((n == 0) ? 1 : n)) begin
          failures++;
          $display("FAIL enc=%0d n=%0d took %0d cycles", enc, n, cyc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
