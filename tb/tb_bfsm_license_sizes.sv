// tb_bfsm_license_sizes: the BFSM at the other licence lengths evaluated.
//
// L = 4 (b = 2, n = 4 dummy states, h = 3 black holes, 7 added states) and
// L = 128 (b = 4, n = 64, h = 15, 79 added states, the brute-force-secure
// length). Each instance is locked with key codes computed by
// bfsm_pkg::key_codes from a fixed PUF response and licence. Checked: the
// derived sizes, unlock exactly n clock edges after reset with the right
// response and licence, the original FSM starting in S0; for L = 4 that
// exactly one of the 16 PUF responses unlocks; for L = 128 that every
// single-bit change of the PUF response or of the licence, and random
// responses, end trapped with the original FSM held in S0.
module tb_bfsm_license_sizes;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  localparam logic [3:0]   P4 = 4'b1001;
  localparam logic [3:0]   L4 = 4'b0110;
  localparam logic [127:0] P128 = 128'h3c5a_9e01_77f2_c4d8_0b6e_1a93_ee45_7d20;
  localparam logic [127:0] L128 = 128'hd1f0_2b8c_6a47_93e5_58c1_0fa2_b736_4e9d;
  localparam logic [2*bfsm_pkg::MAX_L-1:0] K4_FULL =
    bfsm_pkg::key_codes(4, 2, bfsm_pkg::MAX_L'(P4), bfsm_pkg::MAX_L'(L4));
  localparam logic [2*bfsm_pkg::MAX_L-1:0] K128_FULL =
    bfsm_pkg::key_codes(128, 4, bfsm_pkg::MAX_L'(P128), bfsm_pkg::MAX_L'(L128));

  logic [3:0]   p4, l4;
  logic [127:0] p128, l128;
  logic [2:0]   o4, o128;
  logic         u4, u128, t4, t128;

  bfsm #(.L(4), .KEY_CODES(K4_FULL[7:0])) dut4 (
    .clk(clk), .rst_n(rst_n), .puf_resp(p4), .license(l4),
    .orig_next(3'd5), .orig_state(o4), .unlocked(u4),
    .in_chain(), .dummy_state(), .trapped(t4), .hole()
  );

  bfsm #(.L(128), .KEY_CODES(K128_FULL[255:0])) dut128 (
    .clk(clk), .rst_n(rst_n), .puf_resp(p128), .license(l128),
    .orig_next(3'd5), .orig_state(o128), .unlocked(u128),
    .in_chain(), .dummy_state(), .trapped(t128), .hole()
  );

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic do_reset();
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int valid;
    check("L=4 B", int'(dut4.B), 2);
    check("L=4 N", int'(dut4.N), 4);
    check("L=4 H", int'(dut4.H), 3);
    check("L=128 B", int'(dut128.B), 4);
    check("L=128 N", int'(dut128.N), 64);
    check("L=128 H", int'(dut128.H), 15);
    check("L=4 added states", int'(dut4.N + dut4.H), 7);
    check("L=6 added states", int'(bfsm_pkg::state_count(6, bfsm_pkg::opt_b(6))), 9);
    check("L=128 added states", int'(dut128.N + dut128.H), 79);

    // Authorised unlock, both sizes, with cycle counts.
    p4 = P4; l4 = L4; p128 = P128; l128 = L128;
    do_reset();
    for (int k = 1; k <= 64; k++) begin
      @(negedge clk);
      check($sformatf("L=4 unlocked at edge %0d", k), int'(u4), (k >= 4) ? 1 : 0);
      check($sformatf("L=128 unlocked at edge %0d", k), int'(u128), (k >= 64) ? 1 : 0);
    end
    check("L=128 first original state", int'(o128), 0);
    @(negedge clk);
    check("L=128 original FSM runs", int'(o128), 5);
    check("L=4 original FSM runs", int'(o4), 5);

    // L = 4: all PUF responses, licence known.
    valid = 0;
    for (int r = 0; r < 16; r++) begin
      p4 = 4'(r);
      do_reset();
      repeat (6) @(negedge clk);
      if (u4) begin
        valid++;
        check("L=4 unlocking response", r, int'(P4));
      end else begin
        check("L=4 trapped", int'(t4), 1);
        check("L=4 held in S0", int'(o4), 0);
      end
    end
    check("L=4 valid PUF responses", valid, 1);

    // L = 128: single-bit changes of PUF response and licence, random responses.
    for (int t = 0; t < 256 + 40; t++) begin
      p128 = P128; l128 = L128;
      if (t < 128)      p128[t] = ~p128[t];
      else if (t < 256) l128[t-128] = ~l128[t-128];
      else              p128 = {$urandom, $urandom, $urandom, $urandom};
      do_reset();
      repeat (66) @(negedge clk);
      check($sformatf("L=128 try %0d not unlocked", t), int'(u128), 0);
      check($sformatf("L=128 try %0d trapped", t), int'(t128), 1);
      check($sformatf("L=128 try %0d held in S0", t), int'(o128), 0);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
