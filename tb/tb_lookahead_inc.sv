// tb_lookahead_inc -- checks the induction-variable update: for every
// lookahead count 0..15, with random weights around it, the result must be
// i + 4 * (count + 1) and the increment 4 * (count + 1). Blocks are built with
// the reference encoder, so the test also checks which bits carry the count.
// A worked example (weights 4, 7, 3, 1 followed by two zero blocks) is checked
// bit for bit.
module tb_lookahead_inc;
  import tb_ref_pkg::*;

  logic [31:0] rs1, i_in, i_out;
  logic [6:0]  incr;
  int checks = 0, failures = 0;

  lookahead_inc dut (.rs1, .i_in, .i_out, .incr);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_t w;
    // worked example: weights 4, 7, 3, 1 (lanes 3..0) followed by two zero
    // blocks encode to bytes 00001000 00001110 00000111 00000010
    w = '{1, 3, 7, 4};
    checks++;
    if (encode_last_bits(w, 2) !== 32'h080E_0702) failures++;
    rs1 = 32'h080E_0702; i_in = 32'd8;
    #1;
    checks++;
    if (i_out !== 32'd20 || incr !== 7'd12) begin
      failures++;
      $display("FAIL worked example: got %0d", i_out);
    end
    for (int rep = 0; rep < 40; rep++) begin
      for (int unsigned skip = 0; skip < 16; skip++) begin
        for (int k = 0; k < 4; k++) w[k] = ($urandom_range(0, 3) == 0) ? 8'sd0 : rand_w7_nz();
        rs1  = encode_last_bits(w, skip);
        i_in = (rep == 0) ? 32'd0 : $urandom_range(0, 100000);
        #1;
        checks++;
        if (i_out !== i_in + 4 * (skip + 1) || incr !== 7'(4 * (skip + 1))) begin
          failures++;
          $display("FAIL skip=%0d i=%0d got %0d incr %0d", skip, i_in, i_out, incr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
