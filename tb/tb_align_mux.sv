// tb_align_mux -- random data and every select per output: q[j] = d[sel[j]].
module tb_align_mux;
  logic [7:0] d [4], q [4];
  logic [1:0] sel [4];
  int checks = 0, failures = 0;

  align_mux #(.W(8)) dut (.d, .sel, .q);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int k = 0; k < 4; k++) begin
        d[k]   = 8'($urandom);
        sel[k] = 2'($urandom);
      end
      #1;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (q[j] !== d[sel[j]]) begin
          failures++;
          $display("FAIL j=%0d sel=%0d q=%h d=%h", j, sel[j], q[j], d[sel[j]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
