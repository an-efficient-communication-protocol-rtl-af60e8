// bfsm: boosted FSM - an IP's own FSM locked behind a PUF-steered dummy FSM.
//
// The lock binds an IP core to one FPGA. In front of the IP's original FSM
// sits a dummy FSM (dummy_fsm) whose transitions are decided by the FPGA's
// PUF response and by a licence the IP vendor issues for that FPGA. After
// reset the BFSM walks the dummy states S_n0 .. S_n(N-1), one per clock; on
// the right device with the right licence the last of them leads to the
// original FSM's first state S0 and from then on the original FSM runs as if
// the lock were not there. On any other device, or with a wrong licence, a
// dummy state sends the BFSM into a black hole, which it never leaves, and
// the original FSM never starts.
//
// The original FSM's next-state logic is the protected IP and stays outside
// this module: it reads orig_state and returns orig_next. The state register
// of the original FSM is kept here, held at ORIG_RESET (S0) while the lock is
// closed and loaded from orig_next on every clock once unlocked is 1. The
// PUF is the FPGA's own and also outside: its response arrives on puf_resp
// and must be stable from reset release until unlocked or trapped is set.
//
// Timing: unlocked rises on the N-th clock edge after reset is released
// (N = 2L/B, 6 for the worked example); that edge is the transition
// S_n(N-1) -> S0, so orig_state is S0 in the first unlocked cycle and
// follows orig_next from the next edge on. rst_n is active low, synchronous.
//
// Parameters: L licence and PUF response length (6, the scheme's worked
// example; the evaluation also uses 4, and 128 for brute-force security),
// B bits per transition (from Eq. 5), KEY_CODES the per-device correct codes
// (bfsm_pkg::key_codes), ORIG_W and ORIG_RESET the original FSM's state
// width and first state (3 bits and S0 for a 7-state FSM as in the scheme's
// example).
//
// Following the scheme: the dummy FSM in front of S0, the unlock on the last
// dummy state, the black holes. This design's choices: keeping the original
// FSM's state in a register of its own next to the dummy FSM's, holding it at
// S0 while locked, and the status outputs.
module bfsm #(
  parameter int unsigned      L          = bfsm_pkg::EXAMPLE_L,
  parameter int unsigned      B          = bfsm_pkg::opt_b(L),
  parameter logic [2*L-1:0]   KEY_CODES  = bfsm_pkg::EXAMPLE_KEY,
  parameter int unsigned      ORIG_W     = 3,
  parameter logic [ORIG_W-1:0] ORIG_RESET = '0,
  localparam int unsigned N  = bfsm_pkg::num_dummy(L, B),
  localparam int unsigned H  = bfsm_pkg::num_holes(B),
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [L-1:0]      puf_resp,
  input  logic [L-1:0]      license,
  input  logic [ORIG_W-1:0] orig_next,
  output logic [ORIG_W-1:0] orig_state,
  output logic              unlocked,
  output logic              in_chain,
  output logic [IW-1:0]     dummy_state,
  output logic              trapped,
  output logic [HW-1:0]     hole
);

  dummy_fsm #(.L(L), .B(B), .KEY_CODES(KEY_CODES)) u_dummy (
    .clk      (clk),
    .rst_n    (rst_n),
    .puf_resp (puf_resp),
    .license  (license),
    .state    (dummy_state),
    .in_chain (in_chain),
    .unlocked (unlocked),
    .trapped  (trapped),
    .hole     (hole)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      orig_state <= ORIG_RESET;
    end else if (unlocked) begin
      orig_state <= orig_next;
    end
  end

  // The original FSM never leaves S0 while the lock is closed.
  assert property (@(posedge clk) disable iff (!rst_n)
                   !unlocked |-> orig_state == ORIG_RESET);

endmodule
