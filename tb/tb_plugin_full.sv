// tb_plugin_full: the selector at its default size (1024-sample memory,
// two lanes), run on data sets of n = 128, 256, ..., 1024 samples, the
// sizes of the published measurements, with z-score preprocessing, and on
// n = 1024 raw data. Each h is compared with the double-precision
// reference (relative error below 1e-5). The run length in clocks is
// printed with the time it takes at 200 MHz, and the two pair loops are
// checked to take exactly 2 * sum_{i=0}^{n-2} (1 + ceil((n-1-i)/2)) clocks.
module tb_plugin_full;
  import plugin_pkg::*;
  import plugin_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  fix_t A = '0, RSLT;
  logic [7:0] op = OP_NOP;
  logic busy, done;
  int checks = 0, failures = 0;
  int loopcyc = 0;

  plugin_top dut (.clk, .rst_n, .A, .op, .RSLT, .busy, .done);

  always #5 clk = ~clk;
  // state 7 of a psi unit controller is its pair loop
  always @(posedge clk) if (4'(dut.u_p6.state) == 4'd7 || 4'(dut.u_p4.state) == 4'd7) loopcyc <= loopcyc + 1;

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real to_r(fix_t v);
    return real'(v) / 4294967296.0;
  endfunction

  real xs [];

  task automatic load_run(int n, bit z, real spread, real offset);
    real hr, hg, rel;
    int cyc, expc;
    xs = new[n];
    @(negedge clk); op = OP_CLEAR;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      op = OP_LOAD; A = fix_t'(gen_sample(spread, offset) * 4294967296.0); xs[i] = to_r(A);
    end
    @(negedge clk); op = z ? OP_RUN_Z : OP_RUN;
    loopcyc = 0;
    @(negedge clk); op = OP_NOP;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    hr = ref_h(xs, n, z);
    hg = to_r(RSLT);
    rel = (hg - hr) / hr; if (rel < 0) rel = -rel;
    checks++;
    if (rel > 1e-5) begin failures++; $display("FAIL n=%0d z=%0d h=%.12f ref %.12f", n, z, hg, hr); end
    expc = 0;
    for (int a = 0; a < n - 1; a++) expc += 1 + (n - 1 - a + 1) / 2;
    checks++;
    if (loopcyc != 2 * expc) begin failures++; $display("FAIL loop clocks %0d expected %0d", loopcyc, 2 * expc); end
    $display("n=%4d z=%0d h=%.12f ref %.12f rel %.2e clocks %0d (%.6f s at 200 MHz)",
             n, z, hg, hr, rel, cyc, real'(cyc) * 5.0e-9);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 1; k <= 8; k++) load_run(128 * k, 1, 2.0, 10.0);
    load_run(1024, 0, 0.6, 0.5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
