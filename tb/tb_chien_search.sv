// Testbench of the Chien search. Error locator polynomials are built directly
// from chosen error positions, lambda(x) = c (1 + X1 x)(1 + X2 x) with
// X = alpha^p and a random nonzero scale c (or c (1 + X1 x) for one error),
// using the reference multiplier. The search must flag exactly those positions,
// on the steps j = 63 - p, with `valid` high for 63 cycles starting the cycle
// after `load` and `last` on the 63rd. With enable low nothing may be flagged,
// and a locator with no roots in the field must flag nothing either.
module tb_chien_search;
  import tb_bch_ref_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       load = 0, enable = 0;
  gf_t        lambda0 = 0, lambda1 = 0, lambda2 = 0;
  logic       valid, err, last;
  logic [5:0] position;
  int checks = 0, failures = 0;

  chien_search dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Runs one search; expect[p] = 1 where an error at bit p must be reported.
  task automatic search(gf_t l0, gf_t l1, gf_t l2, logic en, logic [62:0] expect_pos);
    logic [62:0] seen;
    int steps;
    seen = '0;
    steps = 0;
    lambda0 <= l0; lambda1 <= l1; lambda2 <= l2; enable <= en; load <= 1;
    @(posedge clk);
    load <= 0;
    lambda0 <= $urandom(); lambda1 <= $urandom(); lambda2 <= $urandom();
    enable <= $urandom();
    #1;
    for (int j = 1; j <= 63; j++) begin
      check("valid on each step", valid);
      check("position follows step", position == 6'((63 - j) % 63));
      check("last only on step 63", last == (j == 63));
      if (err) seen[position] = 1'b1;
      steps++;
      @(posedge clk);
      #1;
    end
    check("valid drops after 63 steps", !valid && !err);
    check("flagged positions", seen === expect_pos);
    if (seen !== expect_pos) $display("  seen %h expected %h", seen, expect_pos);
  endtask

  initial begin
    int unsigned p1, p2;
    gf_t c, x1, x2;
    logic [62:0] e;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    check("idle after reset", !valid && !err);
    // every single position
    for (int p = 0; p < 63; p++) begin
      do c = $urandom(); while (c == 0);
      x1 = ref_pow(p);
      e = '0; e[p] = 1;
      search(c, ref_mul(c, x1), 0, 1, e);
    end
    // random pairs
    for (int t = 0; t < 150; t++) begin
      rand_two_pos(p1, p2);
      do c = $urandom(); while (c == 0);
      x1 = ref_pow(p1); x2 = ref_pow(p2);
      e = '0; e[p1] = 1; e[p2] = 1;
      search(c, ref_mul(c, x1 ^ x2), ref_mul(c, ref_mul(x1, x2)), 1, e);
    end
    // disabled: no flags even though lambda = 0 makes every sum zero
    search(0, 0, 0, 0, '0);
    // no roots: a nonzero constant locator
    search(6'd5, 0, 0, 1, '0);
    // back-to-back load restarts the search
    x1 = ref_pow(10);
    e = '0; e[10] = 1;
    search(6'd1, x1, 0, 1, e);
    search(6'd1, x1, 0, 1, e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
