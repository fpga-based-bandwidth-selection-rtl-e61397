// tb_stddev_unit: self-checking test of sigma = sqrt(V) through ln and exp.
// Uses the behavioural ln/exp server and checks sigma against $sqrt and
// that exactly one ln and one exp request are made per value.
module tb_stddev_unit;
  import plugin_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  fix_t v = '0, sigma;
  math_req_t mreq;
  math_rsp_t mrsp;
  logic busy, done;
  int checks = 0, failures = 0;

  math_model u_math (.clk, .mreq, .mrsp);
  stddev_unit dut (.clk, .rst_n, .start, .v, .mreq, .mrsp, .busy, .done, .sigma);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic real to_r(fix_t x); return real'(x) / 4294967296.0; endfunction

  task automatic run(real vv);
    real e, r;
    int l0, e0;
    l0 = u_math.n_ln; e0 = u_math.n_exp;
    v = fix_t'(vv * 4294967296.0);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    e = $sqrt(to_r(v));
    r = (to_r(sigma) - e) / e; if (r < 0) r = -r;
    checks++;
    if (r > 1e-8) begin failures++; $display("FAIL sqrt(%f) = %.10f expected %.10f", vv, to_r(sigma), e); end
    checks++;
    if (u_math.n_ln != l0 + 1 || u_math.n_exp != e0 + 1) begin failures++; $display("FAIL request count"); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(1.0); run(4.0); run(0.25); run(2.0); run(107.4); run(0.001);
    for (int t = 0; t < 30; t++) run(real'($urandom_range(1, 10000000)) / 10000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
