// cfu_pkg -- types and helpers shared by the sparse-DNN custom functional units.
//
// The CPU hands a custom-0 R-type instruction to the CFU as a 10-bit function
// id {funct7, funct3} plus the two 32-bit source operands rs1 and rs2, and gets
// one 32-bit result back for rd. Bit 0 of funct7 (bit 3 of the function id)
// picks between the two instructions of each unit: 0 = multiply-accumulate,
// 1 = increment the induction variable. The polarity of that bit is this
// design's choice; funct3 and the other funct7 bits are ignored.
//
// Weight encoding (lookahead): a weight limited to [-64, 63] is stored as the
// byte {w[7], w[5:0], skip_bit}, so bits [7:1] of the byte are the weight as a
// 7-bit two's-complement number and bit 0 carries one bit of the 4-bit count of
// all-zero blocks that follow. In a 32-bit block of four weights, bit 8k holds
// bit k of that count.
package cfu_pkg;

  localparam int unsigned FUNC_ID_W = 10;  // funct7 (7) + funct3 (3)
  localparam int unsigned XLEN      = 32;  // register width of the CPU
  localparam int unsigned LANES     = 4;   // weights (or inputs) per operand
  localparam int unsigned SKIP_W    = 4;   // lookahead count width
  localparam int unsigned F7_LSB    = 3;   // position of funct7[0] in the function id

  // Which of the paper's three units the top builds.
  typedef enum logic [1:0] {
    VAR_SSSA = 2'd0,   // semi-structured only
    VAR_USSA = 2'd1,   // unstructured only
    VAR_CSA  = 2'd2    // combined
  } variant_e;

  // Command from CPU to CFU (payload of the cmd valid/ready channel).
  typedef struct packed {
    logic [FUNC_ID_W-1:0] function_id;  // {funct7, funct3}
    logic [XLEN-1:0]      rs1;          // packed weights
    logic [XLEN-1:0]      rs2;          // packed inputs or induction variable
  } cfu_cmd_t;

  // funct7[0] of a command: 1 selects inc_indvar.
  function automatic logic is_inc_indvar(input logic [FUNC_ID_W-1:0] fid);
    return fid[F7_LSB];
  endfunction

  // Lookahead count carried in the LSB of each weight byte (b24, b16, b8, b0).
  function automatic logic [SKIP_W-1:0] skip_bits(input logic [XLEN-1:0] rs1);
    return {rs1[24], rs1[16], rs1[8], rs1[0]};
  endfunction

  // 7-bit signed weight k of an encoded block, sign-extended to 8 bits.
  function automatic logic signed [7:0] weight7(input logic [XLEN-1:0] rs1, input int unsigned k);
    logic [6:0] w;
    w = rs1[8*k+1 +: 7];
    return {w[6], w};
  endfunction

endpackage
