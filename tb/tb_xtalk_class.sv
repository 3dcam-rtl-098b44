// tb_xtalk_class -- self-checking testbench for xtalk_class.
//
// The reference model works in a different way from the design: it places the
// nine TSVs on a 3x3 grid, takes a neighbour as direct when its squared
// distance from the centre is 1 and as diagonal when it is 2, sums the coupling
// in units of C_beta as a real number (1.5 per direct, 1.0 per diagonal
// neighbour, times |dV0 - dVi|) and maps C_eff = C_G + x C_beta to class 0 for
// x = 0 and to class 2x - 1 otherwise. It checks
//   * the printed patterns of the class table (classes 0, 1 and 39),
//   * the five arrow patterns of the two worked-example tables, before and
//     after the victim's transition is removed (24->12, 24->8, 31->11,
//     39->19, 5->19),
//   * every one of the 2^18 (prev, next) pairs against the reference.
module tb_xtalk_class;
  import cam_pkg::*;

  cluster_t prev, next;
  xclass_t  cls;
  int       checks   = 0;
  int       failures = 0;

  xtalk_class dut (.prev_i(prev), .next_i(next), .class_o(cls));

  function automatic int ref_class(cluster_t p, cluster_t n);
    real x = 0.0;
    int  d0 = int'(n[4]) - int'(p[4]);
    for (int k = 0; k < 9; k++) begin
      int r2 = (k / 3 - 1) * (k / 3 - 1) + (k % 3 - 1) * (k % 3 - 1);
      int dk = int'(n[k]) - int'(p[k]);
      int t  = (d0 > dk) ? d0 - dk : dk - d0;
      if (r2 == 1) x += 1.5 * t;
      if (r2 == 2) x += 1.0 * t;
    end
    if (x == 0.0) return 0;
    return int'(2.0 * x) - 1;
  endfunction

  // Arrow pattern, row by row from I-4: "u" rises, "d" falls, "-" stays at 0.
  task automatic arrows(input string s, output cluster_t p, output cluster_t n);
    for (int k = 0; k < 9; k++) begin
      p[k] = (s[k] == "d");
      n[k] = (s[k] == "u");
    end
  endtask

  task automatic expect_class(input cluster_t p, input cluster_t n, input int exp, input string what);
    prev = p;
    next = n;
    #1;
    checks++;
    if (int'(cls) != exp) begin
      failures++;
      $display("FAIL %s: prev=%b next=%b class=%0d expected %0d", what, p, n, cls, exp);
    end
  endtask

  task automatic expect_arrows(input string s, input int exp);
    cluster_t p, n;
    arrows(s, p, n);
    expect_class(p, n, exp, s);
  endtask

  // Table bit strings are written T(i-4) first, i.e. cluster bit 0 first.
  function automatic cluster_t bits(input string s);
    cluster_t c;
    for (int k = 0; k < 9; k++) c[k] = (s[k] == "1");
    return c;
  endfunction

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Class table rows whose printed patterns agree with the C_eff column.
    expect_class(bits("000000000"), bits("111111111"), 0,  "table class 0");
    expect_class(bits("000000000"), bits("011111111"), 1,  "table class 1");
    expect_class(bits("000010000"), bits("111101111"), 39, "table class 39");
    // Worked examples (victim transition kept, then removed).
    expect_arrows("-ud-du-ud", 24);  expect_arrows("-ud--u-ud", 12);
    expect_arrows("dd--u-u-d", 24);  expect_arrows("dd----u-d", 8);
    expect_arrows("-d-dud-d-", 31);  expect_arrows("-d-d-d-d-", 11);
    expect_arrows("ddddudddd", 39);  expect_arrows("dddd-dddd", 19);
    expect_arrows("ddduddddd", 5);   expect_arrows("dddu-dddd", 19);
    $display("examples done: checks=%0d failures=%0d", checks, failures);
    // Exhaustive comparison with the reference model.
    for (int p = 0; p < 512; p++)
      for (int n = 0; n < 512; n++)
        expect_class(cluster_t'(p), cluster_t'(n), ref_class(cluster_t'(p), cluster_t'(n)), "exhaustive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
