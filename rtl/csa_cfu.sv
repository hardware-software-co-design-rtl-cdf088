// csa_cfu -- Combined Sparsity Accelerator custom functional unit.
//
// Joins the two sparsity mechanisms. Weights are lookahead-encoded bytes
// (7-bit weight in bits [7:1], one lookahead bit in bit 0). Two instructions,
// told apart by funct7[0]:
//   funct7[0] = 0  csa_vcmac:       variable-cycle MAC on the 7-bit weights of
//                                   rs1 and the signed bytes of rs2 (vcmac with
//                                   ENCODED = 1): n cycles for n non-zero
//                                   weights, one for an all-zero block.
//   funct7[0] = 1  csa_inc_indvar:  rd = rs2 + 4 * (skip + 1), skip from the
//                                   lookahead bits (lookahead_inc), one cycle.
// The lookahead skips whole zero blocks in the software loop; inside the
// blocks that remain, the variable-cycle MAC skips the single zero weights.
//
// Timing: accept in cycle t -> rsp_valid in cycle t+1 for csa_inc_indvar and
// t + max(n, 1) for csa_vcmac. cmd_ready is low while the MAC works.
// The two instructions and their behaviour follow the paper; the polarity of
// funct7[0] and the handshake are this design's choices.
module csa_cfu #(
  parameter int unsigned XLEN = cfu_pkg::XLEN
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // command from the CPU
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  logic [cfu_pkg::FUNC_ID_W-1:0] cmd_function_id,  // {funct7, funct3}
  input  logic [XLEN-1:0]               cmd_rs1,
  input  logic [XLEN-1:0]               cmd_rs2,
  // response to the CPU
  output logic                          rsp_valid,
  input  logic                          rsp_ready,
  output logic [XLEN-1:0]               rsp_rd
);

  logic            accept, is_inc, mac_start, done;
  logic            mac_done;
  logic [XLEN-1:0] mac_out, inc_out, result;

  assign is_inc    = cfu_pkg::is_inc_indvar(cmd_function_id);
  assign mac_start = accept && !is_inc;

  vcmac #(.ENCODED(1'b1), .XLEN(XLEN)) u_vcmac (
    .clk, .rst_n, .start(mac_start), .rs1(cmd_rs1), .rs2(cmd_rs2),
    .busy(), .done(mac_done), .result(mac_out), .nnz()
  );

  lookahead_inc #(.XLEN(XLEN)) u_inc (.rs1(cmd_rs1), .i_in(cmd_rs2), .i_out(inc_out), .incr());

  assign done   = mac_done || (accept && is_inc);
  assign result = mac_done ? mac_out : inc_out;

  cfu_port #(.XLEN(XLEN)) u_port (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .rsp_valid, .rsp_ready, .rsp_rd,
    .accept, .core_done(done), .core_result(result)
  );

endmodule
