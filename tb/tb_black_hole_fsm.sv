// tb_black_hole_fsm: checks that a black hole, once entered, is never left.
//
// For the default size (H = 3) and for H = 15 (L = 128) the test enters each
// black hole in turn, then drives random enter requests and entries for 40
// clocks and checks every clock that trapped stays 1 and that the state
// follows the ring h0 -> h1 -> ... -> h(H-1) -> h0. Without an enter request
// the FSM must stay untrapped.
module tb_black_hole_fsm;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic       en3, tr3;
  logic [1:0] e3, h3;
  black_hole_fsm u3 (.clk(clk), .rst_n(rst_n), .enter(en3), .entry(e3), .trapped(tr3), .hole(h3));

  logic       en15, tr15;
  logic [3:0] e15, h15;
  black_hole_fsm #(.H(15)) u15 (.clk(clk), .rst_n(rst_n), .enter(en15), .entry(e15), .trapped(tr15), .hole(h15));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic do_reset();
    rst_n = 1'b0; en3 = 1'b0; en15 = 1'b0; e3 = '0; e15 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // No request: stays out of the black holes.
    do_reset();
    repeat (10) @(negedge clk);
    check("idle trapped3", int'(tr3), 0);
    check("idle trapped15", int'(tr15), 0);

    for (int e = 0; e < 15; e++) begin
      int exp3, exp15;
      do_reset();
      @(negedge clk);
      en3 = (e < 3); e3 = 2'(e % 3);
      en15 = 1'b1;   e15 = 4'(e);
      @(negedge clk);
      en3 = 1'b0; en15 = 1'b0;
      exp3 = e % 3; exp15 = e;
      if (e < 3) begin
        check($sformatf("enter3 %0d trapped", e), int'(tr3), 1);
        check($sformatf("enter3 %0d hole", e), int'(h3), exp3);
      end
      check($sformatf("enter15 %0d trapped", e), int'(tr15), 1);
      check($sformatf("enter15 %0d hole", e), int'(h15), exp15);
      for (int c = 0; c < 40; c++) begin
        en3 = 1'($urandom); e3 = 2'($urandom % 3);
        en15 = 1'($urandom); e15 = 4'($urandom % 15);
        @(negedge clk);
        exp3 = (exp3 + 1) % 3;
        exp15 = (exp15 + 1) % 15;
        if (e < 3) begin
          check("ring3 trapped", int'(tr3), 1);
          check("ring3 hole", int'(h3), exp3);
        end
        check("ring15 trapped", int'(tr15), 1);
        check("ring15 hole", int'(h15), exp15);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
