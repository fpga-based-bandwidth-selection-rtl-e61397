// tb_plugin_top: end-to-end test of the PLUGIN bandwidth selector at a
// reduced memory depth (DEPTH = 128). Loads data sets through A/op, runs
// them without and with z-score preprocessing and compares RSLT with the
// double-precision reference (relative error below 1e-4). It also makes
// each mechanism of the design happen and counts it: raw and standardised
// runs, masked lanes at the end of odd rows, the kernel cut-off for far
// outliers (raw data with one sample 25 spreads away), OP_CLEAR, loads beyond the memory depth (dropped) and ops sent
// while busy (ignored). The run length is checked against the pair-loop
// clock count plus a bounded fixed overhead.
module tb_plugin_top;
  import plugin_pkg::*;
  import plugin_ref_pkg::*;

  localparam int DEPTH = 128;
  localparam int LANES = 2;

  logic clk = 0, rst_n = 0;
  fix_t A = '0, RSLT;
  logic [7:0] op = OP_NOP;
  logic busy, done;
  int checks = 0, failures = 0;
  int n_raw = 0, n_z = 0, n_mask = 0, n_kill = 0, n_clear = 0, n_drop = 0, n_ign = 0;

  plugin_top #(.DEPTH(DEPTH), .LANES(LANES)) dut (.clk, .rst_n, .A, .op, .RSLT, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if ((dut.u_p4.t_pair && !(&dut.u_p4.t_ok)) || (dut.u_p6.t_pair && !(&dut.u_p6.t_ok))) n_mask++;
  end
  for (genvar l = 0; l < LANES; l++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.u_p6.g_lane[l].u_k.v0 && dut.u_p6.g_lane[l].u_k.kill0) n_kill++;
      if (dut.u_p4.g_lane[l].u_k.v0 && dut.u_p4.g_lane[l].u_k.kill0) n_kill++;
    end
  end

  function automatic real to_r(fix_t v);
    return real'(v) / 4294967296.0;
  endfunction
  function automatic fix_t to_f(real v);
    return fix_t'(v * 4294967296.0);
  endfunction

  real xs [];

  task automatic load(int n, real spread, real offset, bit outlier);
    xs = new[n];
    @(negedge clk); op = OP_CLEAR; @(negedge clk);
    n_clear++;
    for (int i = 0; i < n; i++) begin
      real v;
      v = gen_sample(spread, offset);
      if (outlier && i == n / 2) v = offset + 25.0 * spread;
      op = OP_LOAD; A = to_f(v); xs[i] = to_r(A);
      @(negedge clk);
    end
    op = OP_NOP;
  endtask

  task automatic run(int n, bit z);
    real hr, hg, rel;
    int cyc, loopc;
    @(negedge clk); op = z ? OP_RUN_Z : OP_RUN;
    @(negedge clk); op = OP_LOAD; A = '0;     // sent while busy: must be ignored
    @(negedge clk); op = OP_NOP;
    cyc = 2;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (32'(dut.n) != n) begin failures++; $display("FAIL n changed while busy"); end
    else n_ign++;
    hr = ref_h(xs, n, z);
    hg = to_r(RSLT);
    rel = (hg - hr) / hr; if (rel < 0) rel = -rel;
    checks++;
    if (rel > 1e-4) begin
      failures++;
      $display("FAIL n=%0d z=%0d h=%.9f ref %.9f", n, z, hg, hr);
      $display("  V=%f sd=%f p8=%g g1=%f p6=%g g2=%f p4=%g", to_r(dut.v_hat), to_r(dut.sigma), to_r(dut.psi8), to_r(dut.g1), to_r(dut.psi6), to_r(dut.g2), to_r(dut.psi4));
    end else
      $display("ok   n=%0d z=%0d h=%.9f ref %.9f rel %.2e  clocks %0d", n, z, hg, hr, rel, cyc);
    loopc = 0;
    for (int a = 0; a < n - 1; a++) loopc += 1 + (n - 1 - a + LANES - 1) / LANES;
    checks++;
    if (cyc < 2 * loopc || cyc > 2 * loopc + 3 * n + 1200) begin
      failures++;
      $display("FAIL run clocks %0d, pair loops %0d", cyc, 2 * loopc);
    end
    if (z) n_z++; else n_raw++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(40, 1.0, 0.0, 0);   run(40, 0);
    load(37, 0.8, 1.5, 0);   run(37, 1);
    load(64, 3.0, 5.0, 0);   run(64, 1);
    load(121, 0.5, 0.0, 1);  run(121, 0);
        load(25, 0.5, -2.0, 0);  run(25, 1);
    // overflow: more loads than the memory holds are dropped
    load(DEPTH + 3, 1.0, 0.0, 0);
    checks++;
    if (32'(dut.n) != DEPTH) begin failures++; $display("FAIL n=%0d after overflow", dut.n); end
    else n_drop++;
    xs = new[DEPTH](xs);
    run(DEPTH, 1);
    // every mechanism must have happened
    checks++; if (n_raw == 0)   begin failures++; $display("FAIL no raw run"); end
    checks++; if (n_z == 0)     begin failures++; $display("FAIL no z-score run"); end
    checks++; if (n_mask == 0)  begin failures++; $display("FAIL no masked lane"); end
    checks++; if (n_kill == 0)  begin failures++; $display("FAIL no kernel cut-off"); end
    checks++; if (n_clear == 0) begin failures++; $display("FAIL no clear"); end
    checks++; if (n_drop == 0)  begin failures++; $display("FAIL no dropped load"); end
    checks++; if (n_ign == 0)   begin failures++; $display("FAIL no ignored op"); end
    $display("mechanisms: raw=%0d zscore=%0d masked_lane=%0d kernel_cutoff=%0d clear=%0d dropped_load=%0d ignored_op=%0d",
             n_raw, n_z, n_mask, n_kill, n_clear, n_drop, n_ign);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
