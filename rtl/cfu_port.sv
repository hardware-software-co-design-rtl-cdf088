// cfu_port -- CPU-side valid/ready handshake of a custom functional unit.
//
// The CPU offers a command with cmd_valid; the port takes it when cmd_ready is
// high (cmd_valid && cmd_ready is the one-cycle `accept` strobe for the unit's
// datapath). The datapath raises core_done with core_result when it has
// finished, which may be in the accept cycle itself (single-cycle
// instructions) or some cycles later (variable-cycle MAC). The result is
// registered: rsp_valid rises on the clock edge after core_done and rsp_rd
// holds the value until the CPU takes it with rsp_ready. A new command may be
// accepted in the same cycle the previous response is taken, so single-cycle
// instructions run back to back at one per clock.
//
// Timing: accept in cycle t, core_done in cycle t+n-1  ->  rsp_valid in cycle t+n.
// The paper states only that the CPU and CFU use valid and ready signals and
// that a CFU may take one or more cycles; the state machine, the registered
// response and the back-to-back rule are this design's choices. Reset is
// active low and synchronous.
module cfu_port #(
  parameter int unsigned XLEN = cfu_pkg::XLEN
) (
  input  logic            clk,
  input  logic            rst_n,
  // CPU side
  input  logic            cmd_valid,
  output logic            cmd_ready,
  output logic            rsp_valid,
  input  logic            rsp_ready,
  output logic [XLEN-1:0] rsp_rd,
  // datapath side
  output logic            accept,
  input  logic            core_done,
  input  logic [XLEN-1:0] core_result
);

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_RESP} state_e;
  state_e state_q;

  assign cmd_ready = (state_q == S_IDLE) || (state_q == S_RESP && rsp_ready);
  assign accept    = cmd_valid && cmd_ready;
  assign rsp_valid = (state_q == S_RESP);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      rsp_rd  <= '0;
    end else begin
      if (core_done) begin
        state_q <= S_RESP;
        rsp_rd  <= core_result;
      end else if (accept) begin
        state_q <= S_BUSY;
      end else if (state_q == S_RESP && rsp_ready) begin
        state_q <= S_IDLE;
      end
    end
  end

  // The datapath may finish only an instruction that is in flight.
  a_done_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
    core_done |-> (accept || state_q == S_BUSY));
  // A response is held stable until the CPU takes it.
  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (rsp_valid && !rsp_ready) |=> (rsp_valid && $stable(rsp_rd)));

endmodule
