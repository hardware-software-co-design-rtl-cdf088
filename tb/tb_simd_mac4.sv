// tb_simd_mac4 -- checks the four-lane MAC of sssa_mac against the dot
// product of the original (unencoded) weights with the inputs, for random
// blocks with random lookahead counts, plus the extreme values -64/63 x
// -128/127.
module tb_simd_mac4;
  import tb_ref_pkg::*;

  logic [31:0] rs1, rs2, acc;
  int checks = 0, failures = 0;

  simd_mac4 dut (.rs1, .rs2, .acc);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input blk_t w, input logic [31:0] x, input int unsigned skip);
    int exp;
    rs1 = encode_last_bits(w, skip);
    rs2 = x;
    #1;
    exp = dot4(w, x);
    checks++;
    if ($signed(acc) != exp) begin
      failures++;
      $display("FAIL w=%p x=%h got %0d exp %0d", w, x, $signed(acc), exp);
    end
  endtask

  initial begin
    blk_t w;
    logic [31:0] x;
    for (int n = 0; n < 500; n++) begin
      for (int k = 0; k < 4; k++) begin
        w[k] = ($urandom_range(0, 3) == 0) ? 8'sd0 : rand_w7_nz();
        x[8*k +: 8] = rand_b();
      end
      check(w, x, $urandom_range(0, 15));
    end
    w = '{-64, -64, -64, -64}; check(w, 32'h80808080, 15);
    w = '{63, 63, 63, 63};     check(w, 32'h7f7f7f7f, 0);
    w = '{-64, 63, -64, 63};   check(w, 32'h7f807f80, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
