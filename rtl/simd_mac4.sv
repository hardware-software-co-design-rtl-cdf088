// simd_mac4 -- four-lane multiply-accumulate of the sssa_mac instruction.
//
// rs1 holds four lookahead-encoded weights; bits [8k+7:8k+1] of lane k are a
// 7-bit two's-complement weight w_k (the lane's bit 8k is lookahead data and
// is ignored here). rs2 holds four signed 8-bit inputs x_k. Four multipliers
// form the 15-bit products w_k * x_k in parallel and an adder sums them into a
// sign-extended 32-bit result:  acc = w0*x0 + w1*x1 + w2*x2 + w3*x3.
//
// Purely combinational (one CFU cycle). Lane widths (7, 8, 15, 32 bits) follow
// the paper's SSSA datapath figure. That the inputs are signed and that the
// result is the sum of the four products of this one block (the software
// keeps the running sum) are this design's choices.
module simd_mac4 #(
  parameter int unsigned XLEN = cfu_pkg::XLEN
) (
  input  logic [XLEN-1:0] rs1,   // encoded weights w3..w0
  input  logic [XLEN-1:0] rs2,   // inputs x3..x0
  output logic [XLEN-1:0] acc
);

  logic signed [14:0]     wk, xk;
  logic signed [14:0]     prod [cfu_pkg::LANES];
  logic signed [XLEN-1:0] sum;

  always_comb begin
    sum = '0;
    for (int k = 0; k < cfu_pkg::LANES; k++) begin
      wk      = {{8{rs1[8*k+7]}}, rs1[8*k+1 +: 7]};  // 7-bit weight, sign-extended
      xk      = {{7{rs2[8*k+7]}}, rs2[8*k +: 8]};    // 8-bit input, sign-extended
      prod[k] = wk * xk;
      sum     = sum + {{(XLEN-15){prod[k][14]}}, prod[k]};
    end
    acc = sum;
  end

endmodule
