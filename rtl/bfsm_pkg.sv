// bfsm_pkg: sizes and key derivation shared by the boosted-FSM (BFSM) lock.
//
// A licence of L bits and a PUF response of L bits together steer a chain of
// n dummy states; every dummy state has h + 1 = 2**b exits, one correct and h
// into black holes. The sizes follow from L alone:
//   b  = the value that minimises SN = (2**b - 1) + 2L/b   (Eq. 5 of the scheme)
//   n  = 2L/b                                              (Eq. 3)
//   h  = 2**b - 1                                          (Eq. 1)
// The continuous optimum of Eq. 5 is replaced here by a search over the whole
// numbers b that divide L, so that n is a whole, even number; this gives
// b = 2 for L = 4 and L = 6 and b = 4 for L = 128, as the scheme's own
// examples do.
//
// key_codes() is what the IP vendor runs when locking an IP for one device:
// from the device's PUF response and the licence it computes the one correct
// b-bit code of every dummy state, packed with state i at bits [i*b +: b].
// Those codes are the only secret that ends up inside the locked netlist.
package bfsm_pkg;

  // Largest licence the helper functions below accept.
  localparam int unsigned MAX_L = 256;

  // Number of dummy states and black holes, Eq. 4.
  function automatic int unsigned state_count(int unsigned l, int unsigned b);
    return ((1 << b) - 1) + (2 * l) / b;
  endfunction

  // b minimising the state count, Eq. 5, over the divisors of L (b <= 8).
  function automatic int unsigned opt_b(int unsigned l);
    int unsigned best_b;
    int unsigned best_sn;
    best_b  = 1;
    best_sn = state_count(l, 1);
    for (int unsigned b = 2; b <= 8; b++) begin
      if (b <= l && (l % b) == 0 && state_count(l, b) < best_sn) begin
        best_b  = b;
        best_sn = state_count(l, b);
      end
    end
    return best_b;
  endfunction

  // Dummy normal states, Eq. 3.
  function automatic int unsigned num_dummy(int unsigned l, int unsigned b);
    return (2 * l) / b;
  endfunction

  // Black hole states, Eq. 1.
  function automatic int unsigned num_holes(int unsigned b);
    return (1 << b) - 1;
  endfunction

  // Correct exit code of every dummy state for one device and licence.
  // State i uses PUF group k = i/2 (bits [k*b +: b]); odd states also XOR
  // in the licence group of the same position.
  function automatic logic [2*MAX_L-1:0] key_codes(int unsigned l, int unsigned b,
                                                   logic [MAX_L-1:0] puf,
                                                   logic [MAX_L-1:0] lic);
    logic [2*MAX_L-1:0] codes;
    codes = '0;
    for (int unsigned i = 0; i < num_dummy(l, b); i++) begin
      for (int unsigned j = 0; j < b; j++) begin
        codes[i*b + j] = puf[(i/2)*b + j] ^ ((i % 2 == 1) ? lic[(i/2)*b + j] : 1'b0);
      end
    end
    return codes;
  endfunction

  // Worked example of the scheme: L = 6, PUF response 001011, licence 111011
  // (r5..r0 and l5..l0, most significant bit first).
  localparam int unsigned    EXAMPLE_L       = 6;
  localparam logic [5:0]     EXAMPLE_PUF     = 6'b001011;
  localparam logic [5:0]     EXAMPLE_LICENSE = 6'b111011;
  // Correct codes of the example, S_n5..S_n0 = 11 00 00 10 00 11.
  localparam logic [2*MAX_L-1:0] EXAMPLE_KEY_FULL =
    key_codes(EXAMPLE_L, opt_b(EXAMPLE_L), MAX_L'(EXAMPLE_PUF), MAX_L'(EXAMPLE_LICENSE));
  localparam logic [2*EXAMPLE_L-1:0] EXAMPLE_KEY = EXAMPLE_KEY_FULL[2*EXAMPLE_L-1:0];

endpackage
