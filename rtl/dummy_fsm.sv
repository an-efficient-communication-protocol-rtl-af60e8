// dummy_fsm: the chain of dummy states that must be walked to unlock the IP.
//
// The dummy FSM has N = 2L/B normal states S_n0 .. S_n(N-1) and H = 2**B - 1
// black hole states. Every normal state has exactly 2**B exits: one to the
// next normal state (S_n(N-1) leads on to the original FSM's first state S0)
// and one to each black hole. Which exit is taken is decided by the B-bit
// transition determiner of the state, built from the device's PUF response
// and the licence (see transition_determiner). The IP vendor has fixed, per
// device, the one code that leads on: KEY_CODES holds it for every state, at
// bits [i*B +: B] for S_ni (see bfsm_pkg::key_codes). Only the FPGA whose
// PUF gives the right response, used with the right licence, walks the whole
// chain; any other device falls into a black hole and stays there.
//
// A wrong code c of state S_ni leads to black hole number c when c is below
// the correct code and to c - 1 when it is above, so the H wrong codes reach
// the H black holes in order. For the worked example (L = 6) this sends the
// wrong codes 00, 01, 10 of S_n0 (correct code 11) to h0, h1, h2.
//
// Timing: after reset the FSM is in S_n0 and takes one transition per clock,
// so with the right PUF response and licence unlocked rises N clock edges
// after reset is released; a wrong code sets trapped on the edge that leaves
// that state. puf_resp and license must be stable from reset release until
// unlocked or trapped is set. rst_n is active low and synchronous.
//
// Interface: puf_resp, license (L bits); state (index of the current normal
// state), in_chain (the FSM is in a normal state), unlocked (level: the chain
// has been passed), trapped and hole (black hole state).
//
// Following the scheme: the state counts, the one-correct-exit structure,
// the determiner rule and the black holes. This design's choices: the
// assignment of wrong codes to black holes, one transition per clock, and
// keeping the normal-state index and the black hole state in two registers
// rather than one merged state code.
module dummy_fsm #(
  parameter int unsigned      L         = bfsm_pkg::EXAMPLE_L,
  parameter int unsigned      B         = bfsm_pkg::opt_b(L),
  parameter logic [2*L-1:0]   KEY_CODES = bfsm_pkg::EXAMPLE_KEY,
  localparam int unsigned N  = bfsm_pkg::num_dummy(L, B),
  localparam int unsigned H  = bfsm_pkg::num_holes(B),
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned HW = (H > 1) ? $clog2(H) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [L-1:0]  puf_resp,
  input  logic [L-1:0]  license,
  output logic [IW-1:0] state,
  output logic          in_chain,
  output logic          unlocked,
  output logic          trapped,
  output logic [HW-1:0] hole
);

  logic [B-1:0]  sel;
  logic [B-1:0]  good;
  logic          hit;
  logic          enter;
  logic [HW-1:0] entry;

  transition_determiner #(.L(L), .B(B)) u_det (
    .puf_resp (puf_resp),
    .license  (license),
    .idx      (state),
    .sel      (sel)
  );

  // Correct code of the current state.
  always_comb begin
    good = '0;
    for (int unsigned i = 0; i < N; i++) begin
      if (state == IW'(i)) good = KEY_CODES[i*B +: B];
    end
  end

  assign hit   = (sel == good);
  assign enter = in_chain && !hit;
  assign entry = (sel > good) ? HW'(sel - 1'b1) : HW'(sel);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= '0;
      in_chain <= 1'b1;
      unlocked <= 1'b0;
    end else if (in_chain) begin
      if (!hit) begin
        in_chain <= 1'b0;
      end else if (state == IW'(N - 1)) begin
        in_chain <= 1'b0;
        unlocked <= 1'b1;
      end else begin
        state <= state + 1'b1;
      end
    end
  end

  black_hole_fsm #(.H(H)) u_holes (
    .clk     (clk),
    .rst_n   (rst_n),
    .enter   (enter),
    .entry   (entry),
    .trapped (trapped),
    .hole    (hole)
  );

  // Exactly one of: walking the chain, unlocked, trapped.
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot({in_chain, unlocked, trapped}));

endmodule
