// sparse_cfu -- top level: the sparse-DNN custom functional unit as seen by
// the RISC-V core.
//
// The core forwards every custom-0 R-type instruction over a valid/ready
// command channel (10-bit function id = {funct7, funct3}, the values of rs1
// and rs2) and takes the 32-bit rd value from a valid/ready response channel.
// VARIANT chooses which of the three units sits behind that interface:
//   VAR_CSA  (default) combined unit: csa_vcmac + csa_inc_indvar
//   VAR_SSSA semi-structured unit:    sssa_mac  + sssa_inc_indvar
//   VAR_USSA unstructured unit:       usss_vcmac
// Timing and instruction encodings are those of the chosen unit. The three
// units are the paper's; gathering them behind one parameter is this design's
// choice.
module sparse_cfu #(
  parameter cfu_pkg::variant_e VARIANT = cfu_pkg::VAR_CSA,
  parameter int unsigned       XLEN    = cfu_pkg::XLEN
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

  generate
    case (VARIANT)
      cfu_pkg::VAR_SSSA: begin : g_sssa
        sssa_cfu #(.XLEN(XLEN)) u_cfu (.*);
      end
      cfu_pkg::VAR_USSA: begin : g_ussa
        ussa_cfu #(.XLEN(XLEN)) u_cfu (.*);
      end
      default: begin : g_csa
        csa_cfu #(.XLEN(XLEN)) u_cfu (.*);
      end
    endcase
  endgenerate

endmodule
