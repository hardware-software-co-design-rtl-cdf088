// align_mux -- one set of four 4:1 multiplexers of the variable-cycle MAC.
//
// Output position j carries input lane sel[j]: q[j] = d[sel[j]]. The
// variable-cycle MAC uses two of these, one for the weights and one for the
// inputs, both steered by the same selects from case_ctrl, so that each packed
// weight stays paired with its input.
//
// Purely combinational. Four 4:1 multiplexers with 2-bit selects per set, as in
// the paper's USSA figure.
module align_mux #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] d   [cfu_pkg::LANES],
  input  logic [1:0]   sel [cfu_pkg::LANES],
  output logic [W-1:0] q   [cfu_pkg::LANES]
);

  always_comb begin
    for (int j = 0; j < 4; j++) q[j] = d[sel[j]];
  end

endmodule
