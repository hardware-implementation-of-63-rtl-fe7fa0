// Testbench of the key equation solver. For random syndrome triples the
// registered coefficients are compared with the t = 2 closed form computed with
// the reference multiplier. For syndromes of real 1- and 2-error patterns the
// resulting lambda(x) must vanish exactly at the inverses of the error
// locations, and for zero syndromes err_detected must stay low.
module tb_key_equation_solver;
  import tb_bch_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  gf_t  s1, s2, s3;
  logic done, err_detected;
  gf_t  lambda0, lambda1, lambda2;
  int checks = 0, failures = 0;

  key_equation_solver dut (.*);

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

  function automatic gf_t eval_lambda(gf_t x);
    return lambda0 ^ ref_mul(lambda1, x) ^ ref_mul(lambda2, ref_mul(x, x));
  endfunction

  task automatic run_solver(gf_t a, gf_t b, gf_t c);
    s1 <= a; s2 <= b; s3 <= c; start <= 1;
    @(posedge clk);
    start <= 0;
    s1 <= $urandom(); s2 <= $urandom(); s3 <= $urandom();   // must not matter now
    #1;
    check("done one cycle after start", done == 1);
    @(posedge clk);
    #1;
    check("done is a single pulse", done == 0);
  endtask

  initial begin
    logic [62:0] e;
    int unsigned p1, p2;
    int roots;
    s1 = 0; s2 = 0; s3 = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // random syndromes against the closed form
    for (int t = 0; t < 500; t++) begin
      gf_t a, b, c;
      a = $urandom(); b = $urandom(); c = $urandom();
      run_solver(a, b, c);
      check("lambda0", lambda0 === a);
      check("lambda1", lambda1 === ref_mul(a, a));
      check("lambda2", lambda2 === (c ^ ref_mul(a, b)));
      check("err_detected", err_detected === ((a | b | c) != 0));
    end
    // syndromes of actual error patterns
    for (int t = 0; t < 200; t++) begin
      e = '0;
      if (t % 2 == 0) begin p1 = $urandom_range(62); p2 = p1; e[p1] = 1; end
      else begin rand_two_pos(p1, p2); e[p1] = 1; e[p2] = 1; end
      run_solver(ref_syndrome(e, 1), ref_syndrome(e, 2), ref_syndrome(e, 3));
      check("errors detected", err_detected);
      roots = 0;
      for (int j = 1; j <= 63; j++)
        if (eval_lambda(ref_pow(j)) == 0) begin
          roots++;
          check("root is an inverse error location",
                ((63 - j) % 63 == p1) || ((63 - j) % 63 == p2));
        end
      check("number of roots", roots == ((p1 == p2) ? 1 : 2));
    end
    run_solver(0, 0, 0);
    check("no error: nothing detected", !err_detected);
    check("no error: zero locator", lambda0 == 0 && lambda1 == 0 && lambda2 == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
