// black_hole_fsm: the trap states h0 .. h(H-1) of the dummy FSM.
//
// A dummy state that sees a wrong transition code sends the lock into one of
// the H black hole states. Nothing leads out of them again: once trapped, the
// FSM only moves from one black hole to another and ignores every input
// until the next reset (a new power-up of the device). The moves inside the
// black hole group are the ring h0 -> h1 -> ... -> h(H-1) -> h0, one step per
// clock, so the state keeps changing but never leaves the group.
//
// Interface: enter (one-cycle request from the dummy FSM) with entry, the
// index of the black hole to enter; trapped (level, stays 1) and hole (the
// current black hole). trapped and hole change on the clock edge after enter.
// An enter while already trapped is ignored. rst_n is active low and
// synchronous.
//
// That black holes exist, that no path leaves them and that there are
// H = 2**b - 1 of them follows the scheme; the scheme lets them connect "in
// any way", and the ring used here is this design's choice.
module black_hole_fsm #(
  parameter int unsigned H  = bfsm_pkg::num_holes(bfsm_pkg::opt_b(bfsm_pkg::EXAMPLE_L)),
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enter,
  input  logic [HW-1:0] entry,
  output logic          trapped,
  output logic [HW-1:0] hole
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trapped <= 1'b0;
      hole    <= '0;
    end else if (trapped) begin
      hole <= (hole == HW'(H - 1)) ? '0 : hole + 1'b1;
    end else if (enter) begin
      trapped <= 1'b1;
      hole    <= entry;
    end
  end

  // Once trapped, always trapped (until reset).
  assert property (@(posedge clk) disable iff (!rst_n) trapped |=> trapped);
  assert property (@(posedge clk) disable iff (!rst_n) hole < HW'(H) || !trapped);

endmodule
