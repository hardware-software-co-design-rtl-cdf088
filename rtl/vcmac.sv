// vcmac -- variable-cycle multiply-accumulate (usss_vcmac / csa_vcmac).
//
// rs1 holds four weights, rs2 four signed 8-bit inputs. The weights are
// compared with zero (case_ctrl), the non-zero ones and their inputs are
// packed into the low lanes by two sets of multiplexers (align_mux), and the
// sequential MAC (seq_mac) multiplies only those lanes, one per cycle. A block
// with n non-zero weights therefore takes n cycles, and one cycle when all four
// are zero, against four cycles for a plain sequential MAC.
//
// ENCODED = 0 (USSA): the weights are plain INT8 bytes.
// ENCODED = 1 (CSA):  the weights are lookahead-encoded bytes whose bits
//                     [7:1] are a 7-bit weight; bit 0 (lookahead data) is
//                     ignored, so it never makes a zero weight look non-zero.
//
// Timing is that of seq_mac: start is a strobe, done/result come in the
// start cycle for n <= 1 and n-1 cycles later otherwise. The structure follows
// the paper's USSA figure; the 7-bit weight view for the combined unit follows
// the paper's text.
module vcmac #(
  parameter bit          ENCODED = 1'b0,
  parameter int unsigned XLEN    = cfu_pkg::XLEN
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [XLEN-1:0] rs1,
  input  logic [XLEN-1:0] rs2,
  output logic            busy,
  output logic            done,
  output logic [XLEN-1:0] result,
  output logic [2:0]      nnz      // non-zero weights of the block at rs1
);

  logic [7:0] w     [cfu_pkg::LANES];
  logic [7:0] x     [cfu_pkg::LANES];
  logic [7:0] w_al  [cfu_pkg::LANES];
  logic [7:0] x_al  [cfu_pkg::LANES];
  logic [1:0] cl    [cfu_pkg::LANES];

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      w[k] = ENCODED ? cfu_pkg::weight7(rs1, k) : rs1[8*k +: 8];
      x[k] = rs2[8*k +: 8];
    end
  end

  case_ctrl u_ctrl (.w(w), .c(), .cl(cl), .nnz(nnz));

  align_mux #(.W(8)) u_wmux (.d(w), .sel(cl), .q(w_al));
  align_mux #(.W(8)) u_xmux (.d(x), .sel(cl), .q(x_al));

  seq_mac #(.XLEN(XLEN)) u_mac (
    .clk, .rst_n, .start,
    .w(w_al), .x(x_al), .nnz(nnz),
    .busy, .done, .result
  );

endmodule
