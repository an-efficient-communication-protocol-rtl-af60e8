// tb_transition_determiner: checks the determiner of every dummy state.
//
// Instance a is the default (L = 6, B = 2) and is checked against the
// scheme's own bit formula: r(i+1) r(i) for even i, r(i) r(i-1) XOR
// l(i) l(i-1) for odd i, including the worked example (PUF 001011, licence
// 111011, whose codes are 11 00 10 00 00 11 for S_n0..S_n5). Instance b
// (L = 128, B = 4) is checked against a shift-and-mask reference on random
// PUF responses and licences. Purely combinational; a short delay separates
// the vectors.
module tb_transition_determiner;

  int checks = 0;
  int failures = 0;

  // Default instance, L = 6, B = 2, N = 6.
  logic [5:0] ra, la;
  logic [2:0] ia;
  logic [1:0] sa;
  transition_determiner u_a (.puf_resp(ra), .license(la), .idx(ia), .sel(sa));

  // High-security size, L = 128, B = 4, N = 64.
  logic [127:0] rb, lb;
  logic [5:0]   ib;
  logic [3:0]   sb;
  transition_determiner #(.L(128), .B(4)) u_b (.puf_resp(rb), .license(lb), .idx(ib), .sel(sb));

  function automatic logic [1:0] paper_rule(logic [5:0] r, logic [5:0] l, int i);
    if (i % 2 == 0) return {r[i+1], r[i]};
    else            return {r[i], r[i-1]} ^ {l[i], l[i-1]};
  endfunction

  task automatic check(string what, logic [3:0] got, logic [3:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] example [6];
    example = '{2'b11, 2'b00, 2'b10, 2'b00, 2'b00, 2'b11};
    rb = '0; lb = '0; ib = '0;
    // Worked example.
    ra = 6'b001011; la = 6'b111011;
    for (int i = 0; i < 6; i++) begin
      ia = 3'(i); #1;
      check($sformatf("example S_n%0d", i), 4'(sa), 4'(example[i]));
    end
    // Every PUF response, licences at random, every state.
    for (int r = 0; r < 64; r++) begin
      ra = 6'(r); la = 6'($urandom);
      for (int i = 0; i < 6; i++) begin
        ia = 3'(i); #1;
        check($sformatf("L6 r=%h l=%h i=%0d", ra, la, i), 4'(sa), 4'(paper_rule(ra, la, i)));
      end
    end
    // L = 128.
    for (int t = 0; t < 20; t++) begin
      rb = {$urandom, $urandom, $urandom, $urandom};
      lb = {$urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < 64; i++) begin
        logic [3:0] exp;
        exp = 4'((rb >> ((i / 2) * 4)) & 128'hF);
        if (i % 2 == 1) exp ^= 4'((lb >> ((i / 2) * 4)) & 128'hF);
        ib = 6'(i); #1;
        check($sformatf("L128 i=%0d", i), sb, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
