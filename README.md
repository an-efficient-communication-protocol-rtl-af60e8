# Boosted-FSM lock: binding an FPGA IP core to one device

A soft IP core that is sold per device should only work on the FPGA it was
licensed for. This design locks the IP's own finite state machine behind a
short chain of extra "dummy" states. After reset the FSM must walk that chain
before it reaches the IP's first real state. Each step of the chain is
decided by bits of the FPGA's physical unclonable function (PUF) response and
of a licence string that the IP vendor issues for that one device. On the
licensed FPGA, with its licence, the walk succeeds and the IP runs normally.
Anywhere else, the first wrong step drops the FSM into a *black hole*: a group
of states with no way out, so the IP never starts.

The extended machine (dummy states + black holes + the original FSM) is
called the boosted FSM, or BFSM.

## How the lock is used

Three parties are involved:

1. The FPGA vendor gives every device an ID and a PUF. It passes the
   challenge-response pairs of each device to the IP vendor.
2. A system designer who buys an FPGA asks the IP vendor for an IP core and
   sends the IP's ID and the FPGA's ID.
3. The IP vendor looks up that FPGA's PUF response. It picks a licence,
   computes from the two the one correct code for each dummy state, and builds
   those codes into the IP (`KEY_CODES`). It then ships the locked IP and the
   licence.

On the device, the PUF response and the licence arrive as the ports
`puf_resp` and `license`. The PUF itself, and the non-volatile memory that
holds its challenges, belong to the FPGA and are not part of this RTL.

## The dummy chain

For a licence of `L` bits the chain has `N` normal dummy states
`S_n0 .. S_n(N-1)` and `H` black holes `h0 .. h(H-1)`. Each normal state has
exactly `2**B` exits:

- one to the next normal state (from `S_n(N-1)` the exit is the original
  FSM's first state `S0`);
- one to each of the `H = 2**B - 1` black holes.

So a `B`-bit value, the *transition determiner*, picks the exit of every
state.

### The transition determiner

The PUF response `r` and the licence `l` are both `L` bits long. Both are cut
into groups of `B` bits. Dummy states are used in pairs, and the two states of
a pair read the same PUF group `k`:

| state | determiner |
|---|---|
| `S_n(2k)` (even) | `r[k*B +: B]` |
| `S_n(2k+1)` (odd) | `r[k*B +: B] ^ l[k*B +: B]` |

For `B = 2` this means: state `i` uses `r(i+1) r(i)` when `i` is even and
`r(i) r(i-1) XOR l(i) l(i-1)` when `i` is odd. The PUF decides the even steps
alone. The odd steps need the PUF and the licence together. Neither a licence
without the device nor the device without the licence passes the chain.

### The correct code and the wrong codes

The vendor's tool (`bfsm_pkg::key_codes`) evaluates the table above once,
with the licensed device's PUF response and the licence. The result is the
one correct code per state, packed as `KEY_CODES[i*B +: B]` for `S_ni`. In
hardware, state `S_ni` compares its determiner with that code:

- **equal:** go to `S_n(i+1)`. From `S_n(N-1)`, go to `S0` and set `unlocked`.
- **different, value `c`:** go to black hole `h_c` if `c` is below the
  correct code, or `h_(c-1)` if it is above. The `H` wrong codes therefore
  reach the `H` black holes in order.

Only one path runs from `S_n0` to `S0`. For a given licence, exactly one PUF
response of the `2**L` possible ones unlocks. This is the point of the
scheme: an unauthorised device has zero chance even when the licence is
known. The end-to-end testbench checks this exhaustively for `L = 6`.

### Black holes

Once in a black hole, the BFSM moves only among the black holes, one step per
clock around the ring `h0 -> h1 -> ... -> h(H-1) -> h0`. It ignores every
input until the next reset. The only requirement is that no path leads out;
the ring is one choice among many. An assertion in `black_hole_fsm` states
that a trap lasts.

## Sizing from the licence length

Given `L`, the sizes are chosen to keep the number of added states small:

- `N = 2L/B`
- `H = 2**B - 1`
- added states `SN = (2**B - 1) + 2L/B`

`B` is the whole number that divides `L` and gives the smallest `SN`
(`bfsm_pkg::opt_b`). The original derivation sets `dSN/dB = 0`, giving
`2**B * B**2 = 2L / ln 2`. Using whole divisors instead keeps `N` an even
whole number. It gives the same answers for the lengths that matter:

| L | B | N | H | added states |
|---|---|---|---|---|
| 4 | 2 | 4 | 3 | 7 |
| 6 (default) | 2 | 6 | 3 | 9 |
| 128 | 4 | 64 | 15 | 79 |

A licence of at least 128 bits is the length considered safe against
brute-force guessing.

## Worked example (the default configuration)

- PUF response `r5..r0 = 001011`
- licence `l5..l0 = 111011`
- `L = 6`, `B = 2`

| state | determiner | correct code |
|---|---|---|
| S_n0 | r1 r0 | 11 |
| S_n1 | r1 r0 ^ l1 l0 | 00 |
| S_n2 | r3 r2 | 10 |
| S_n3 | r3 r2 ^ l3 l2 | 00 |
| S_n4 | r5 r4 | 00 |
| S_n5 | r5 r4 ^ l5 l4 | 11 |

So `KEY_CODES = 12'b11_00_00_10_00_11` (S_n5 first). In `S_n0` the wrong
codes `00`, `01`, `10` lead to `h0`, `h1`, `h2`.

## Attaching the protected FSM (`bfsm`)

`bfsm` holds the state register of the IP's original FSM. The IP's
next-state logic stays outside:

- it reads `orig_state` and returns `orig_next`;
- while the lock is closed, `orig_state` is held at `ORIG_RESET` (S0);
- once `unlocked` is 1, `orig_state` loads `orig_next` on every clock.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (restarts the walk at `S_n0`) |
| `puf_resp` | in | L | PUF response of this device |
| `license` | in | L | licence |
| `orig_next` | in | ORIG_W | next state from the IP's FSM logic |
| `orig_state` | out | ORIG_W | state of the IP's FSM |
| `unlocked` | out | 1 | chain passed |
| `in_chain`, `dummy_state` | out | 1, clog2(N) | walking the chain, and where |
| `trapped`, `hole` | out | 1, clog2(H) | in a black hole, and which |

**Timing:**

- One dummy transition per clock.
- With the right inputs, `unlocked` rises on the `N`-th clock edge after
  reset is released (6 by default, 64 for `L = 128`). That edge is the step
  `S_n(N-1) -> S0`.
- The first unlocked cycle is in `S0`. The IP's FSM takes its first step on
  the following edge.
- A wrong code sets `trapped` on the edge that leaves the failing state.
- `puf_resp` and `license` must be stable from reset release until
  `unlocked` or `trapped` is set. Hold reset until the PUF response is ready.

The status outputs (`in_chain`, `dummy_state`, `trapped`, `hole`) are there
for testing and observation. A product would leave them unconnected, so that
nothing outside shows how far an attempt got.

## Module structure

```
bfsm                      original-FSM state register, unlock gating
└── dummy_fsm             chain index register, compare with KEY_CODES
    ├── transition_determiner   B-bit determiner of the current state
    └── black_hole_fsm          trap register and ring
bfsm_pkg                  size functions (Eqs. for B, N, H), key_codes(), the worked example
```

To lock an IP for another device, set:

- `L`;
- `KEY_CODES = bfsm_pkg::key_codes(L, bfsm_pkg::opt_b(L), puf, lic)`, cut to
  `2L` bits;
- `ORIG_W` and `ORIG_RESET` to fit the IP's FSM.

`B` follows from `L` unless it is overridden.

## Where this RTL goes beyond, or differs from, the scheme

The scheme fixes these points:

- the chain structure;
- the determiner rule;
- the equations for `B`, `N` and `H`;
- that black holes cannot be left;
- that the last dummy state leads to `S0`.

This implementation chooses the following:

- **Separate registers.** The chain index, the black-hole state and the
  original FSM's state are three registers, not one merged state code.
  Behaviour is the same. A merged, scrambled encoding would make the added
  states harder to spot in a netlist, which is a concern of the scheme's
  security argument.
- **Wrong-code mapping.** Which wrong code leads to which black hole follows
  the rule above. It matches the drawn example for `S_n0` but is otherwise a
  choice.
- **Black-hole ring.** The ring inside the black holes is a choice.
- **No handshake.** Reset, one step per clock, and the absence of a
  PUF-ready handshake are choices.
- **Whole divisors for `B`.** `B` is searched over whole divisors of `L`
  rather than taken from the real-valued optimum.
- **Original FSM outside.** The original FSM's next-state logic is not part
  of the RTL. The scheme was evaluated on the MCNC'91 benchmark FSMs (dk16,
  s298, s1488 and others), which need 5 to 8 state bits. Set `ORIG_W`
  accordingly; the default of 3 bits fits a 7-state FSM.

The area, delay and power figures reported for the scheme came from FPGA
synthesis of those benchmarks. This RTL does not reproduce them.

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_bfsm -y rtl -y tb +libext+.sv \
          rtl/bfsm_pkg.sv tb/tb_bfsm.sv
./obj_dir/Vtb_bfsm
```

| testbench | what it covers |
|---|---|
| `tb_transition_determiner` | the worked example's codes; all 64 PUF responses for `L = 6` against the bit formula; `L = 128` against a shift-and-mask reference |
| `tb_black_hole_fsm` | entering each black hole (H = 3 and 15); never leaving under random inputs; the ring order |
| `tb_dummy_fsm` | all 64 PUF responses and all 64 licences from reset, against a reference walk: state per clock, unlock on edge 6, black hole and edge of each trap, exactly one unlocking response and licence |
| `tb_bfsm` | end to end at the default size with a 7-state test FSM. Authorised unlock and then normal operation. The 6-bit counter sweep of all PUF responses with the licence known (exactly one unlocks). Every wrong licence. It counts each mechanism: unlock, IP FSM stepping, IP FSM held while locked, a trap from each dummy state, each black hole |
| `tb_bfsm_license_sizes` | `L = 4` (16-response sweep) and `L = 128`: derived sizes, unlock on edge 4 / 64, every single-bit change of the 128-bit PUF response or licence ends trapped |
