// tb_bfsm: end-to-end test of the boosted FSM at its default size.
//
// The BFSM is built as for the worked example: L = 6, B = 2, six dummy states,
// three black holes, locked to PUF response 001011 with licence 111011. The
// protected IP is stood in for by a small 7-state test FSM (S0..S6, 3 bits):
// on input x = 1 it steps S(k) -> S(k+1 mod 7), on x = 0 it stays. It is
// only a test load, not part of the lock.
//
// Phase 1: the authorised device and licence. Checks that unlocked rises on
// the 6th clock edge, that S0 is the first original state and that the
// original FSM then follows a reference model under random inputs.
// Phase 2: the licence is known, the device is not (the scheme's
// "unauthorised FPGA" experiment): a 6-bit counter supplies every PUF
// response in turn and valid_puf_num counts those that unlock. Exactly one
// may. Every other response must end in a black hole with the original FSM
// held in S0 although its next-state logic asks to move.
// Phase 3: the right device with every wrong licence.
// Each mechanism is counted: unlock, original FSM stepping, original FSM held
// while locked, a trap from each of the six dummy states and entry into each
// of the three black holes. One that never happens counts as a failure.
module tb_bfsm;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  localparam logic [5:0] PUF = 6'b001011;
  localparam logic [5:0] LIC = 6'b111011;

  logic [5:0] puf_res, license;
  logic [2:0] orig_next, orig_state;
  logic       unlocked, in_chain, trapped;
  logic [2:0] dummy_state;
  logic [1:0] hole;
  logic       x;

  bfsm dut (
    .clk(clk), .rst_n(rst_n), .puf_resp(puf_res), .license(license),
    .orig_next(orig_next), .orig_state(orig_state), .unlocked(unlocked),
    .in_chain(in_chain), .dummy_state(dummy_state), .trapped(trapped), .hole(hole)
  );

  // Test load: next-state logic of the 7-state original FSM.
  always_comb orig_next = x ? ((orig_state == 3'd6) ? 3'd0 : orig_state + 3'd1) : orig_state;

  int n_unlock, n_orig_step, n_held;
  int n_trap_at [6];
  int n_hole [3];

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic do_reset(logic [5:0] r, logic [5:0] l);
    puf_res = r; license = l; x = 1'b1;
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
  endtask

  // Runs 6 + extra clocks from reset; returns whether it unlocked.
  task automatic run(logic [5:0] r, logic [5:0] l, int extra, output bit ok);
    int model;
    int last_state;
    do_reset(r, l);
    last_state = 0;
    for (int k = 1; k <= 6; k++) begin
      if (in_chain) last_state = int'(dummy_state);
      x = 1'b1;
      @(negedge clk);
      check($sformatf("r=%b l=%b k=%0d orig held at S0", r, l, k), int'(orig_state), 0);
    end
    ok = unlocked;
    if (ok) begin
      n_unlock++;
      model = 0;
      for (int k = 0; k < extra; k++) begin
        x = 1'($urandom);
        if (x) model = (model + 1) % 7;
        if (x) n_orig_step++;
        @(negedge clk);
        check("original FSM state", int'(orig_state), model);
      end
    end else begin
      check($sformatf("r=%b l=%b trapped", r, l), int'(trapped), 1);
      n_trap_at[last_state]++;
      n_hole[hole]++;
      for (int k = 0; k < extra; k++) begin
        x = 1'b1;
        if (orig_next != 3'd0) n_held++;
        n_hole[hole]++;
        @(negedge clk);
        check("locked: orig stays S0", int'(orig_state), 0);
        check("locked: stays trapped", int'(trapped), 1);
        check("locked: never unlocks", int'(unlocked), 0);
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    logic [5:0] count_res;
    logic [7:0] valid_puf_num;
    int valid_lic_num;
    n_unlock = 0; n_orig_step = 0; n_held = 0;
    foreach (n_trap_at[i]) n_trap_at[i] = 0;
    foreach (n_hole[i]) n_hole[i] = 0;

    // Phase 1: authorised device.
    do_reset(PUF, LIC);
    for (int k = 1; k <= 6; k++) begin
      check("unlock not before edge 6", int'(unlocked), 0);
      check("dummy state order", int'(dummy_state), k - 1);
      @(negedge clk);
    end
    check("unlocked on edge 6", int'(unlocked), 1);
    check("first original state is S0", int'(orig_state), 0);
    run(PUF, LIC, 40, ok);
    check("authorised device unlocks", int'(ok), 1);

    // Phase 2: sweep all PUF responses, licence known.
    valid_puf_num = '0;
    count_res = '0;
    do begin
      run(count_res, LIC, 8, ok);
      if (ok) begin
        valid_puf_num++;
        check("the unlocking response", int'(count_res), int'(PUF));
      end
      count_res++;
    end while (count_res != 6'h00);
    check("valid_puf_num", int'(valid_puf_num), 1);

    // Phase 3: right device, every licence.
    valid_lic_num = 0;
    for (int l = 0; l < 64; l++) begin
      run(PUF, 6'(l), 4, ok);
      if (ok) valid_lic_num++;
    end
    check("valid licences", valid_lic_num, 1);

    $display("mechanisms: unlock=%0d orig_step=%0d held=%0d trap_at=%p holes=%p",
             n_unlock, n_orig_step, n_held, n_trap_at, n_hole);
    check("unlock happened", int'(n_unlock > 0), 1);
    check("original FSM stepped", int'(n_orig_step > 0), 1);
    check("original FSM held while locked", int'(n_held > 0), 1);
    foreach (n_trap_at[i]) check($sformatf("trap from S_n%0d", i), int'(n_trap_at[i] > 0), 1);
    foreach (n_hole[i]) check($sformatf("black hole h%0d used", i), int'(n_hole[i] > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
