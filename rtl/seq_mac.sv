// seq_mac -- sequential multiply-accumulate with a single multiplier.
//
// Works on a block that case_ctrl and align_mux have packed: the first nnz
// lanes of w/x hold the non-zero weights and their inputs. One product is
// formed per clock cycle, so a block takes nnz cycles, and one cycle when
// nnz = 0 (the result is then zero). The result is the sum of the nnz products
// as a sign-extended 32-bit value.
//
// Timing: `start` is a one-cycle strobe with w, x and nnz valid in that cycle.
// Lane 0 is multiplied in the start cycle itself, straight from the inputs;
// lanes 1..nnz-1 follow in the next cycles from registered copies. `done` is
// high, with `result` valid, in the last of these cycles: the start cycle when
// nnz <= 1, cycle start+nnz-1 otherwise. `busy` is high in the cycles after
// start until done. A start while busy is not allowed.
//
// The single multiplier and the cycle count (nnz, one for an all-zero block)
// follow the paper; signed operands and the per-block sum (the software keeps
// the running sum) are this design's choices. Synchronous active-low reset.
module seq_mac #(
  parameter int unsigned XLEN = cfu_pkg::XLEN
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [7:0]      w   [cfu_pkg::LANES],  // packed weights (signed)
  input  logic [7:0]      x   [cfu_pkg::LANES],  // packed inputs (signed)
  input  logic [2:0]      nnz,
  output logic            busy,
  output logic            done,
  output logic [XLEN-1:0] result
);

  logic [7:0]             w_q [cfu_pkg::LANES];
  logic [7:0]             x_q [cfu_pkg::LANES];
  logic [2:0]             nnz_q;
  logic [1:0]             idx_q;
  logic signed [XLEN-1:0] acc_q;

  logic signed [7:0]      mul_a, mul_b;
  logic signed [15:0]     prod;
  logic signed [XLEN-1:0] sum;

  // the one multiplier, fed from the inputs in the start cycle and from the
  // registered lanes afterwards
  always_comb begin
    if (busy) begin
      mul_a = w_q[idx_q];
      mul_b = x_q[idx_q];
    end else begin
      mul_a = (nnz != 3'd0) ? w[0] : 8'sd0;
      mul_b = x[0];
    end
    prod = mul_a * mul_b;
    sum  = {{(XLEN-16){prod[15]}}, prod};
    if (busy) sum = sum + acc_q;
  end

  always_comb begin
    if (busy) done = (3'(idx_q) == nnz_q - 3'd1);
    else      done = start && (nnz <= 3'd1);
    result = sum;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      idx_q <= '0;
      nnz_q <= '0;
      acc_q <= '0;
      for (int k = 0; k < 4; k++) begin
        w_q[k] <= '0;
        x_q[k] <= '0;
      end
    end else if (start && !busy) begin
      w_q   <= w;
      x_q   <= x;
      nnz_q <= nnz;
      acc_q <= sum;
      idx_q <= 2'd1;
      busy  <= (nnz > 3'd1);
    end else if (busy) begin
      acc_q <= sum;
      idx_q <= idx_q + 2'd1;
      if (done) busy <= 1'b0;
    end
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy));
  a_nnz_range:     assert property (@(posedge clk) disable iff (!rst_n) start |-> nnz <= 3'd4);

endmodule
