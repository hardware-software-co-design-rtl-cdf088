// sssa_cfu -- Semi-Structured Sparsity Accelerator custom functional unit.
//
// Two single-cycle instructions, told apart by funct7[0]:
//   funct7[0] = 0  sssa_mac:        rd = sum of w_k * x_k over the four lanes,
//                                   w_k the 7-bit weights in rs1[8k+7:8k+1],
//                                   x_k the signed bytes of rs2 (simd_mac4).
//   funct7[0] = 1  sssa_inc_indvar: rd = rs2 + 4 * (skip + 1), skip the
//                                   lookahead count in rs1 bits 24,16,8,0
//                                   (lookahead_inc).
// The software loop calls both per block of four weights and so jumps over
// the all-zero blocks that the lookahead count announces.
//
// Timing: the datapath is combinational; the result is registered in cfu_port,
// so rsp_valid follows one cycle after the command is accepted, and commands
// can be accepted every cycle while the CPU takes responses at once.
// The datapath follows the paper's SSSA figure; the polarity of funct7[0] and
// the handshake details are this design's choices.
module sssa_cfu #(
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

  logic            accept;
  logic [XLEN-1:0] mac_out, inc_out, result;

  simd_mac4     #(.XLEN(XLEN)) u_mac (.rs1(cmd_rs1), .rs2(cmd_rs2), .acc(mac_out));
  lookahead_inc #(.XLEN(XLEN)) u_inc (.rs1(cmd_rs1), .i_in(cmd_rs2), .i_out(inc_out), .incr());

  // output multiplexer steered by funct7[0]
  assign result = cfu_pkg::is_inc_indvar(cmd_function_id) ? inc_out : mac_out;

  cfu_port #(.XLEN(XLEN)) u_port (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .rsp_valid, .rsp_ready, .rsp_rd,
    .accept, .core_done(accept), .core_result(result)
  );

endmodule
