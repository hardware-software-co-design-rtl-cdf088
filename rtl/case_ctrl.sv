// case_ctrl -- zero comparators and case-signal control logic of the
// variable-cycle MAC.
//
// Each of the four weights is compared with zero in parallel, giving the 4-bit
// case signal c (c[k] = 1 when weight k is zero). The control logic turns c
// into four 2-bit multiplexer selects cl[0..3] that pack the non-zero lanes,
// in ascending lane order, into the low positions: cl[j] is the lane of the
// j-th non-zero weight. Positions past the last non-zero weight select a lane
// whose weight is zero, so the packed weight word reads zero there (the paper's
// example [w3,0,w1,0] -> [0,0,w3,w1]). nnz is the number of non-zero weights,
// which is the number of cycles the sequential MAC spends on the block.
//
// Purely combinational. The comparators, the 4-bit case signal and the 2-bit
// selects follow the paper's USSA figure; the exact mapping from case signal to
// selects, including what the unused positions select, is this design's choice.
module case_ctrl (
  input  logic [7:0] w   [cfu_pkg::LANES],  // weights, sign-extended to 8 bits
  output logic [3:0] c,                     // case signal, 1 = zero weight
  output logic [1:0] cl  [cfu_pkg::LANES],  // mux select of each packed position
  output logic [2:0] nnz                    // number of non-zero weights, 0..4
);

  logic [1:0] zero_lane;
  logic [2:0] pos;

  always_comb begin
    for (int k = 0; k < 4; k++) c[k] = (w[k] == 8'd0);

    // a lane holding a zero weight (the highest one); unused when c == 0
    zero_lane = 2'd0;
    for (int k = 0; k < 4; k++) if (c[k]) zero_lane = 2'(k);

    for (int j = 0; j < 4; j++) cl[j] = zero_lane;
    pos = 3'd0;
    for (int k = 0; k < 4; k++) begin
      if (!c[k]) begin
        cl[pos[1:0]] = 2'(k);
        pos          = pos + 3'd1;
      end
    end
    nnz = pos;
  end

endmodule
