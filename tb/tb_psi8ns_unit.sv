// tb_psi8ns_unit: self-checking test of Step II,
// Psi8NS = 105 / (32 sqrt(pi) sigma^9), against the double-precision value
// (relative error below 1e-7 plus four LSB of sigma^9 and two of the
// result, relative), including sigma = 1 (the z-score case),
// where the result must be the constant 105/(32 sqrt(pi)).
module tb_psi8ns_unit;
  import plugin_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  fix_t sigma = '0, psi8;
  math_req_t mreq;
  math_rsp_t mrsp;
  logic busy, done;
  int checks = 0, failures = 0;

  math_model u_math (.clk, .mreq, .mrsp);
  psi8ns_unit dut (.clk, .rst_n, .start, .sigma, .mreq, .mrsp, .busy, .done, .psi8);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic real to_r(fix_t x); return real'(x) / 4294967296.0; endfunction

  task automatic run(real s);
    real e, r;
    sigma = fix_t'(s * 4294967296.0);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    e = 105.0 / (32.0 * $sqrt(3.14159265358979323846) * (to_r(sigma) ** 9.0));
    r = (to_r(psi8) - e) / e; if (r < 0) r = -r;
    checks++;
    if (r > 1e-7 + 4.0 * 2.33e-10 / (to_r(sigma) ** 9.0) + 2.0 * 2.33e-10 / e) begin failures++; $display("FAIL sigma=%f psi8=%.10f expected %.10f", s, to_r(psi8), e); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(1.0);
    checks++;
    if (psi8 !== PSI8_C) begin failures++; $display("FAIL sigma=1 result not the constant"); end
    run(0.5); run(0.8); run(1.3); run(2.0); run(3.0);
    for (int t = 0; t < 20; t++) run(0.3 + real'($urandom_range(0, 2500)) / 1000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
