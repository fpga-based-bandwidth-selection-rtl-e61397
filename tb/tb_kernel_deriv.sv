// tb_kernel_deriv: self-checking test of the K4 and K6 routines.
// Instantiates both orders, streams the same random arguments (including
// 0, large |u| and the |u| >= 16 cut-off) one per clock, compares against
// the real-number kernel derivatives (absolute error below 2e-8) and checks
// the 14-clock latency.
module tb_kernel_deriv;
  import plugin_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0;
  fix_t u, k4, k6;
  logic v4, v6;
  int checks = 0, failures = 0;
  int cyc = 0;
  real q_u [$];
  int  q_t [$];

  kernel_deriv #(.ORDER(4)) dut4 (.clk, .rst_n, .in_valid, .u, .out_valid(v4), .k(k4));
  kernel_deriv #(.ORDER(6)) dut6 (.clk, .rst_n, .in_valid, .u, .out_valid(v6), .k(k6));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real to_r(fix_t v);
    return real'(v) / 4294967296.0;
  endfunction

  always @(negedge clk) if (rst_n && v4) begin
    real x, x2, ph, e4, e6, d;
    int t0;
    x  = q_u.pop_front();
    t0 = q_t.pop_front();
    x2 = x * x;
    ph = $exp(-x2 / 2.0) / $sqrt(2.0 * 3.14159265358979323846);
    e4 = (x2 * x2 - 6.0 * x2 + 3.0) * ph;
    e6 = (x2 * x2 * x2 - 15.0 * x2 * x2 + 45.0 * x2 - 15.0) * ph;
    d = to_r(k4) - e4; if (d < 0) d = -d;
    checks++;
    if (d > 2e-8) begin failures++; $display("FAIL K4(%f)=%.10f exp %.10f", x, to_r(k4), e4); end
    d = to_r(k6) - e6; if (d < 0) d = -d;
    checks++;
    if (d > 2e-8) begin failures++; $display("FAIL K6(%f)=%.10f exp %.10f", x, to_r(k6), e6); end
    checks++;
    if (!v6 || cyc - t0 != 14) begin failures++; $display("FAIL latency %0d", cyc - t0); end
  end

  initial begin
    u = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 800; t++) begin
      real x;
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      if (t == 0) x = 0.0;
      else if (t == 1) x = 16.5;
      else if (t == 2) x = -40.0;
      else if (t == 3) x = 15.9;
      else x = (real'($urandom_range(0, 24000000)) - 12000000.0) / 1000000.0;
      u = fix_t'(x * 4294967296.0);
      if (in_valid) begin q_u.push_back(to_r(u)); q_t.push_back(cyc); end
    end
    @(negedge clk); in_valid = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (q_u.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
