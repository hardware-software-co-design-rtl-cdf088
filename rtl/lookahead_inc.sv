// lookahead_inc -- induction-variable update of the inc_indvar instruction.
//
// rs1 carries a block of four lookahead-encoded weights. Their least
// significant bits (b24, b16, b8, b0) form the 4-bit count of all-zero blocks
// that follow this block. The unit adds one to the count (5 bits, a4..a0),
// shifts it left by two to get a 7-bit increment in units of weights
// (a4 a3 a2 a1 a0 0 0 = 4 * (count + 1)) and adds that to the induction
// variable i in rs2. The returned i therefore points at the next block that
// holds a non-zero weight, skipping up to 15 zero blocks.
//
// Purely combinational. The structure (bit gather, +1, shift by two, 32-bit
// add) follows the paper's SSSA datapath figure; the 32-bit wrap-around of the
// final add is this design's choice.
module lookahead_inc #(
  parameter int unsigned XLEN = cfu_pkg::XLEN
) (
  input  logic [XLEN-1:0] rs1,     // encoded weight block
  input  logic [XLEN-1:0] i_in,    // current induction variable
  output logic [XLEN-1:0] i_out,   // i + 4 * (skip + 1)
  output logic [6:0]      incr     // the 7-bit increment, for observation
);

  logic [cfu_pkg::SKIP_W-1:0] skip;
  logic [4:0]                 skip_p1;

  always_comb begin
    skip    = cfu_pkg::skip_bits(rs1);
    skip_p1 = 5'(skip) + 5'd1;
    incr    = {skip_p1, 2'b00};
    i_out   = i_in + XLEN'(incr);
  end

endmodule
