// tb_case_ctrl -- for all 16 zero patterns, with random non-zero values:
// the case signal marks exactly the zero weights, nnz counts the others, the
// first nnz selects name the non-zero lanes in ascending order, and the
// remaining selects point at a zero weight.
module tb_case_ctrl;
  import tb_ref_pkg::*;

  logic [7:0] w  [4];
  logic [3:0] c;
  logic [1:0] cl [4];
  logic [2:0] nnz;
  int checks = 0, failures = 0;

  case_ctrl dut (.w, .c, .cl, .nnz);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int pat = 0; pat < 16; pat++) begin
        int n;
        int lanes [$];
        bit ok;
        ok = 1;
        lanes.delete();
        for (int k = 0; k < 4; k++) begin
          w[k] = pat[k] ? 8'(rand_w7_nz()) : 8'd0;
          if (pat[k]) lanes.push_back(k);
        end
        n = lanes.size();
        #1;
        checks++;
        if (c !== ~4'(pat) || nnz !== 3'(n)) ok = 0;
        for (int j = 0; j < 4; j++) begin
          if (j < n) begin
            if (int'(cl[j]) != lanes[j]) ok = 0;
          end else if (w[cl[j]] != 8'd0) ok = 0;
        end
        if (!ok) begin
          failures++;
          $display("FAIL pat=%b c=%b nnz=%0d cl=%p", pat[3:0], c, nnz, cl);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
