// tb_dummy_fsm: walks the dummy FSM with every PUF response and licence.
//
// Default instance: L = 6, locked for the worked example (PUF 001011,
// licence 111011). The test resets the FSM once for every one of the 64 PUF
// responses with the example licence, and once for every licence with the
// example PUF response. A reference model written from the scheme's bit
// formula (not from the RTL) predicts for each run whether the chain is
// passed, or else the state in which it fails and the black hole entered.
// Checked: the state index on every clock, unlocked exactly N = 6 clock
// edges after reset, the black hole and the clock edge of the trap, that a
// trap lasts, and that exactly one PUF response (and one licence) unlocks.
module tb_dummy_fsm;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  localparam logic [5:0] PUF = 6'b001011;
  localparam logic [5:0] LIC = 6'b111011;

  logic [5:0] puf, lic;
  logic [2:0] st;
  logic       in_chain, unlocked, trapped;
  logic [1:0] hole;

  dummy_fsm dut (
    .clk(clk), .rst_n(rst_n), .puf_resp(puf), .license(lic),
    .state(st), .in_chain(in_chain), .unlocked(unlocked), .trapped(trapped), .hole(hole)
  );

  // Reference: determiner of S_ni for b = 2 as the scheme writes it.
  function automatic logic [1:0] det(logic [5:0] r, logic [5:0] l, int i);
    if (i % 2 == 0) return {r[i+1], r[i]};
    else            return {r[i], r[i-1]} ^ {l[i], l[i-1]};
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int valid_puf_num;
  int valid_lic_num;

  // One run from reset; returns 1 if it unlocked.
  task automatic run(logic [5:0] r, logic [5:0] l, output bit ok);
    int fail_at;
    int exp_hole;
    logic [1:0] c, g;
    fail_at = -1;
    exp_hole = 0;
    for (int i = 0; i < 6 && fail_at < 0; i++) begin
      c = det(r, l, i);
      g = det(PUF, LIC, i);
      if (c != g) begin
        fail_at = i;
        exp_hole = (c < g) ? int'(c) : int'(c) - 1;
      end
    end
    puf = r; lic = l;
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Clock edge k (k = 1..) after reset release.
    for (int k = 0; k <= 10; k++) begin
      string tag;
      tag = $sformatf("r=%b l=%b k=%0d", r, l, k);
      if (fail_at < 0) begin
        check({tag, " unlocked"}, int'(unlocked), (k >= 6) ? 1 : 0);
        check({tag, " trapped"}, int'(trapped), 0);
        if (k < 6) check({tag, " state"}, int'(st), k);
      end else begin
        check({tag, " unlocked"}, int'(unlocked), 0);
        check({tag, " trapped"}, int'(trapped), (k > fail_at) ? 1 : 0);
        if (k <= fail_at) check({tag, " state"}, int'(st), k);
        if (k > fail_at) check({tag, " hole"}, int'(hole), (exp_hole + (k - fail_at - 1)) % 3);
      end
      @(negedge clk);
    end
    ok = (unlocked == 1'b1);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    valid_puf_num = 0;
    valid_lic_num = 0;
    for (int r = 0; r < 64; r++) begin
      run(6'(r), LIC, ok);
      if (ok) begin
        valid_puf_num++;
        check("unlocking PUF response", r, int'(PUF));
      end
    end
    check("valid_puf_num", valid_puf_num, 1);
    for (int l = 0; l < 64; l++) begin
      run(PUF, 6'(l), ok);
      if (ok) begin
        valid_lic_num++;
        check("unlocking licence", l, int'(LIC));
      end
    end
    check("valid_lic_num", valid_lic_num, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
