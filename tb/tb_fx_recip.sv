// tb_fx_recip: self-checking test of the Newton reciprocal.
// Drives a list of positive, negative, tiny and large Q32.32 operands plus
// random ones, compares 1/a against the real-number value (relative error
// below 1e-8, or 2 LSB for small results), and checks the fixed latency
// of 2*ITER+4 clocks from start to done.
module tb_fx_recip;
  import plugin_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  fix_t a, y;
  logic busy, done;
  int checks = 0, failures = 0;

  fx_recip dut (.clk, .rst_n, .start, .a, .busy, .done, .y);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real to_r(fix_t v);
    return real'(v) / 4294967296.0;
  endfunction

  task automatic run(real av);
    real expv, got, err;
    int cyc;
    a = fix_t'(av * 4294967296.0);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    expv = 1.0 / to_r(a);
    got  = to_r(y);
    err  = (got - expv); if (err < 0) err = -err;
    checks++;
    if (err > 1e-8 * (expv < 0 ? -expv : expv) && err > 4.7e-10) begin
      failures++;
      $display("FAIL recip(%f) = %.12f expected %.12f", to_r(a), got, expv);
    end
    checks++;
    if (cyc != 2 * 4 + 4) begin
      failures++;
      $display("FAIL latency %0d", cyc);
    end
  endtask

  initial begin
    a = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1.0); run(2.0); run(0.5); run(3.0); run(-7.25); run(1023.0);
    run(1048576.0); run(0.001); run(0.30490); run(-2.3936536824); run(123456.789);
    run(1.0e-5);
    for (int t = 0; t < 200; t++) begin
      real v;
      v = real'($urandom_range(1, 1000000)) / 1000.0;
      if ($urandom_range(0, 1)) v = -v;
      run(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
