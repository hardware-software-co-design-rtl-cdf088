// ussa_cfu -- Unstructured Sparsity Accelerator custom functional unit.
//
// One instruction, usss_vcmac: rd = sum of w_k * x_k over the four lanes, with
// w_k the signed INT8 weights in rs1 and x_k the signed INT8 inputs in rs2.
// The variable-cycle MAC (vcmac) multiplies only the non-zero weights, one per
// cycle, so the instruction takes n cycles for a block with n non-zero
// weights and one cycle for an all-zero block. The function id is not decoded.
//
// Timing: command accepted in cycle t  ->  rsp_valid in cycle t + max(n, 1).
// cmd_ready is low while the MAC works. Structure per the paper's USSA
// figure; handshake details are this design's choices.
module ussa_cfu #(
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

  logic            accept, done;
  logic [XLEN-1:0] result;

  vcmac #(.ENCODED(1'b0), .XLEN(XLEN)) u_vcmac (
    .clk, .rst_n, .start(accept), .rs1(cmd_rs1), .rs2(cmd_rs2),
    .busy(), .done, .result, .nnz()
  );

  cfu_port #(.XLEN(XLEN)) u_port (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .rsp_valid, .rsp_ready, .rsp_rd,
    .accept, .core_done(done), .core_result(result)
  );

endmodule
