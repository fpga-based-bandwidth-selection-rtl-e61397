// tb_remez_exp: self-checking test of the pipelined exp(-w).
// Streams one operand per clock (with gaps), checks every result against
// $exp(-w) (absolute error below 1e-9) and checks that each result appears
// exactly 10 clocks after its operand.
module tb_remez_exp;
  import plugin_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0;
  fix_t w, y;
  logic out_valid;
  int checks = 0, failures = 0;
  int cyc = 0;
  real  q_w [$];
  int   q_t [$];

  remez_exp dut (.clk, .rst_n, .in_valid, .w, .out_valid, .y);

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

  // checker
  always @(negedge clk) if (rst_n && out_valid) begin
    real wv, e, err;
    int  t0;
    wv = q_w.pop_front();
    t0 = q_t.pop_front();
    e  = $exp(-wv);
    err = to_r(y) - e; if (err < 0) err = -err;
    checks++;
    if (err > 1e-9) begin
      failures++;
      $display("FAIL exp(-%f) = %.12f expected %.12f", wv, to_r(y), e);
    end
    checks++;
    if (cyc - t0 != 10) begin
      failures++;
      $display("FAIL latency %0d", cyc - t0);
    end
  end

  initial begin
    w = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      if (t < 8) w = fix_t'(real'(t) * 0.25 * 4294967296.0);
      else if (t < 12) w = fix_t'(real'(t) * 3.0 * 4294967296.0);
      else w = fix_t'(real'($urandom_range(0, 30000000)) / 1000000.0 * 4294967296.0);
      if (in_valid) begin q_w.push_back(to_r(w)); q_t.push_back(cyc); end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (q_w.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
