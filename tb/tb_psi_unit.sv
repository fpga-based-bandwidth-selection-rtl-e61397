// tb_psi_unit: self-checking test of the Psi6 / Psi4 pair-sum unit.
// A Psi4 unit (two lanes) and a Psi6 unit (three lanes) read the same
// sample memory. The testbench answers their reciprocal requests itself in
// real arithmetic (after a few clocks), so only the unit is under test. For
// several n, including n = 2 and odd n that leave a lane masked, it
// compares Psi with a real-number evaluation of the full double sum
// (relative error below 2e-5) and checks the number of pair-loop clocks
// against sum_{i=0}^{n-2} (1 + ceil((n-1-i)/LANES)).
module tb_psi_unit;
  import plugin_pkg::*;

  localparam int DEPTH = 1024;
  localparam int AW = $clog2(DEPTH);
  localparam int NW = AW + 1;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // memory written by the testbench, read by both units (one at a time)
  logic we = 0;
  logic [AW-1:0] waddr = '0;
  fix_t wdata = '0;
  logic [AW-1:0] raddr [3];
  fix_t rdata [3];
  data_bram #(.DEPTH(DEPTH), .NRD(3)) u_mem (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  logic start4 = 0, start6 = 0;
  fix_t g = '0, nk0 = '0;
  logic [NW-1:0] n = '0;
  math_req_t req4, req6;
  math_rsp_t rsp;
  logic [AW-1:0] a4 [2];
  logic [AW-1:0] a6 [3];
  fix_t d4 [2];
  fix_t d6 [3];
  logic busy4, busy6, done4, done6;
  fix_t psi4, psi6;
  logic sel6 = 0;

  assign d4[0] = rdata[0]; assign d4[1] = rdata[1];
  assign d6[0] = rdata[0]; assign d6[1] = rdata[1]; assign d6[2] = rdata[2];
  always_comb begin
    if (sel6) begin raddr[0] = a6[0]; raddr[1] = a6[1]; raddr[2] = a6[2]; end
    else      begin raddr[0] = a4[0]; raddr[1] = a4[1]; raddr[2] = '0;    end
  end

  psi_unit #(.ORDER(4)) dut4 (
    .clk, .rst_n, .start(start4), .g, .n, .nk0, .mreq(req4), .mrsp(rsp),
    .rd_addr(a4), .rd_data(d4), .busy(busy4), .done(done4), .psi(psi4));
  psi_unit #(.ORDER(6), .LANES(3), .DEPTH(DEPTH)) dut6 (
    .clk, .rst_n, .start(start6), .g, .n, .nk0, .mreq(req6), .mrsp(rsp),
    .rd_addr(a6), .rd_data(d6), .busy(busy6), .done(done6), .psi(psi6));

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real to_r(fix_t v);
    return real'(v) / 4294967296.0;
  endfunction
  function automatic fix_t to_f(real v);
    return fix_t'(v * 4294967296.0);
  endfunction

  // behavioural reciprocal server
  initial begin
    rsp = '0;
    forever begin
      @(posedge clk);
      if (req4.valid || req6.valid) begin
        real av;
        av = to_r(req4.valid ? req4.a : req6.a);
        repeat (5) @(posedge clk);
        rsp.y <= to_f(1.0 / av);
        rsp.done <= 1'b1;
        @(posedge clk);
        rsp.done <= 1'b0;
      end
    end
  end

  real xs [DEPTH];
  int  loopcyc;
  // S_LOOP is state 7 of the unit controller
  always @(posedge clk) if (4'(dut4.state) == 4'd7 || 4'(dut6.state) == 4'd7) loopcyc <= loopcyc + 1;

  task automatic run(int nn, real gv, int order);
    real s, ref_v, got, rel, k0, u, u2, ph;
    int lanes, expc;
    // load data
    for (int t = 0; t < nn; t++) begin
      real v;
      v = 0.0;
      for (int q = 0; q < 4; q++) v += real'($urandom_range(0, 1000000)) / 1000000.0;
      v = (v - 2.0) * 1.7;
      @(negedge clk);
      we = 1; waddr = AW'(t); wdata = to_f(v); xs[t] = to_r(to_f(v));
    end
    @(negedge clk); we = 0;
    // reference
    s = 0.0;
    for (int a = 0; a < nn; a++)
      for (int b = a + 1; b < nn; b++) begin
        u = (xs[a] - xs[b]) / gv; u2 = u * u;
        ph = $exp(-u2 / 2.0) / $sqrt(2.0 * 3.14159265358979323846);
        if (order == 4) s += (u2 * u2 - 6.0 * u2 + 3.0) * ph;
        else            s += (u2 * u2 * u2 - 15.0 * u2 * u2 + 45.0 * u2 - 15.0) * ph;
      end
    k0 = (order == 4 ? 3.0 : -15.0) / $sqrt(2.0 * 3.14159265358979323846);
    ref_v = (2.0 * s + nn * k0) / (real'(nn) * nn * (gv ** real'(order + 1)));
    // run
    g = to_f(gv); n = NW'(nn); nk0 = to_f(nn * k0);
    sel6 = (order == 6);
    loopcyc = 0;
    @(negedge clk);
    if (order == 4) start4 = 1; else start6 = 1;
    @(negedge clk); start4 = 0; start6 = 0;
    while (!(order == 4 ? done4 : done6)) @(negedge clk);
    got = to_r(order == 4 ? psi4 : psi6);
    rel = (got - ref_v) / ref_v; if (rel < 0) rel = -rel;
    checks++;
    if (rel > 2e-5) begin
      failures++;
      $display("FAIL psi%0d n=%0d g=%f: %.9f expected %.9f", order, nn, gv, got, ref_v);
    end
    lanes = (order == 4) ? 2 : 3;
    expc = 0;
    for (int a = 0; a < nn - 1; a++) expc += 1 + (nn - 1 - a + lanes - 1) / lanes;
    checks++;
    if (loopcyc != expc) begin
      failures++;
      $display("FAIL psi%0d n=%0d loop clocks %0d expected %0d", order, nn, loopcyc, expc);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(2, 0.6, 4);   run(2, 0.6, 6);
    run(3, 0.5, 4);   run(3, 0.5, 6);
    run(17, 0.45, 4); run(17, 0.55, 6);
    run(64, 0.35, 4); run(64, 0.5, 6);
    run(101, 0.3, 4); run(100, 0.6, 6);
    run(300, 0.25, 4); run(257, 0.5, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
