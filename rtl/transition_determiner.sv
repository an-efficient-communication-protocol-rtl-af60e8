// transition_determiner: the b-bit value that decides where dummy state S_ni goes.
//
// The PUF response r and the licence l are both L bits wide and cut into
// groups of B bits. Dummy states are taken in pairs: states 2k and 2k+1 both
// use PUF group k = r[k*B +: B]. The even state of the pair uses that group
// as it is; the odd state uses it XORed with licence group k = l[k*B +: B].
// For B = 2 this is exactly the scheme's rule: S_ni is steered by r(i+1) r(i)
// for even i and by r(i) r(i-1) XOR l(i) l(i-1) for odd i.
//
// Interface: puf_resp and license (L bits each), idx (index i of the current
// dummy state, 0 .. 2L/B - 1), sel (B bits). Purely combinational.
//
// The rule and the pairing follow the scheme; the index port and the packing
// of r and l with bit 0 as r0 / l0 are this design's choices.
module transition_determiner #(
  parameter int unsigned L  = bfsm_pkg::EXAMPLE_L,
  parameter int unsigned B  = bfsm_pkg::opt_b(L),
  localparam int unsigned N  = bfsm_pkg::num_dummy(L, B),
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [L-1:0]  puf_resp,
  input  logic [L-1:0]  license,
  input  logic [IW-1:0] idx,
  output logic [B-1:0]  sel
);

  logic [IW-1:0] group;
  logic [B-1:0]  r_grp;
  logic [B-1:0]  l_grp;

  always_comb begin
    group = idx >> 1;
    r_grp = '0;
    l_grp = '0;
    for (int unsigned k = 0; k < L / B; k++) begin
      if (group == IW'(k)) begin
        r_grp = puf_resp[k*B +: B];
        l_grp = license[k*B +: B];
      end
    end
    sel = idx[0] ? (r_grp ^ l_grp) : r_grp;
  end

endmodule
