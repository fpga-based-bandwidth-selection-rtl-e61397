// tb_cordic_lnexp: self-checking test of the CORDIC ln / exp unit.
// Compares ln a and exp a with the real-number values for fixed and random
// operands (exp results above the Q32.32 range must saturate), and checks
// the latency from start to done: NIT + 3 repeated iterations + 4 clocks.
module tb_cordic_lnexp;
  import plugin_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  mfn_e fn;
  fix_t a, y;
  logic busy, done;
  int checks = 0, failures = 0;

  cordic_lnexp dut (.clk, .rst_n, .start, .fn, .a, .busy, .done, .y);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real to_r(fix_t v);
    return real'(v) / 4294967296.0;
  endfunction

  task automatic run(mfn_e f, real av);
    real expv, got, err, tol;
    int cyc;
    a = fix_t'(av * 4294967296.0);
    fn = f;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    got = to_r(y);
    if (f == MF_LN) begin
      expv = $ln(to_r(a));
      tol  = 3e-9;
    end else begin
      expv = $exp(to_r(a));
      if (expv > 2147483647.0) expv = to_r(64'sh7fff_ffff_ffff_ffff);
      tol  = 3e-9 + 1e-9 * expv;
    end
    err = got - expv; if (err < 0) err = -err;
    checks++;
    if (err > tol) begin
      failures++;
      $display("FAIL %s(%f) = %.12f expected %.12f", f == MF_LN ? "ln" : "exp", to_r(a), got, expv);
    end
    checks++;
    if (cyc != 40 + 3 + 4) begin
      failures++;
      $display("FAIL latency %0d", cyc);
    end
  endtask

  initial begin
    a = '0; fn = MF_EXP;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(MF_EXP, 0.0); run(MF_EXP, 1.0); run(MF_EXP, -1.0); run(MF_EXP, 0.6931471805);
    run(MF_EXP, 10.5); run(MF_EXP, -20.0); run(MF_EXP, 21.4); run(MF_EXP, 30.0);
    run(MF_LN, 1.0); run(MF_LN, 2.0); run(MF_LN, 0.5); run(MF_LN, 1000000.0);
    run(MF_LN, 0.0001); run(MF_LN, 2.718281828);
    for (int t = 0; t < 150; t++) begin
      run(MF_EXP, (real'($urandom_range(0, 40000)) - 20000.0) / 1000.0);
      run(MF_LN, real'($urandom_range(1, 2000000)) / 1000.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
