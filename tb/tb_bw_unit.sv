// tb_bw_unit: self-checking test of the bandwidth steps. Three instances
// with the constants of g1, g2 and h compute (C / (psi n))^(1/K) * scale;
// the results are compared with double precision (relative error below
// 1e-7 plus four LSB of the reciprocal, relative, divided by K), for positive and (g2) negative psi and for scale = sigma.
module tb_bw_unit;
  import plugin_pkg::*;
  localparam int NW = 11;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  logic st [3];
  fix_t psi = '0, scale = '0;
  logic [NW-1:0] n = '0;
  math_req_t rq [3];
  math_req_t mreq;
  math_rsp_t mrsp;
  logic bz [3];
  logic dn [3];
  fix_t b [3];
  int checks = 0, failures = 0;

  assign mreq = rq[0].valid ? rq[0] : rq[1].valid ? rq[1] : rq[2];
  math_model u_math (.clk, .mreq, .mrsp);
  bw_unit #(.C(C_G1), .INV_K(ONE_NINTH),   .NW(NW)) dut_g1 (.clk, .rst_n, .start(st[0]), .psi, .n, .scale,
    .mreq(rq[0]), .mrsp, .busy(bz[0]), .done(dn[0]), .b(b[0]));
  bw_unit #(.C(C_G2), .INV_K(ONE_SEVENTH), .NW(NW)) dut_g2 (.clk, .rst_n, .start(st[1]), .psi, .n, .scale,
    .mreq(rq[1]), .mrsp, .busy(bz[1]), .done(dn[1]), .b(b[1]));
  bw_unit #(.C(C_H),  .INV_K(ONE_FIFTH),   .NW(NW)) dut_h  (.clk, .rst_n, .start(st[2]), .psi, .n, .scale,
    .mreq(rq[2]), .mrsp, .busy(bz[2]), .done(dn[2]), .b(b[2]));

  always #5 clk = ~clk;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic real to_r(fix_t x); return real'(x) / 4294967296.0; endfunction

  task automatic run(int which, real p, int nn, real sc);
    real c, k, e, r;
    psi = fix_t'(p * 4294967296.0); n = NW'(nn); scale = fix_t'(sc * 4294967296.0);
    @(negedge clk); st[which] = 1; @(negedge clk); st[which] = 0;
    while (!dn[which]) @(negedge clk);
    c = (which == 0) ? 30.0 / $sqrt(2.0 * PI) : (which == 1) ? -6.0 / $sqrt(2.0 * PI) : 1.0 / (2.0 * $sqrt(PI));
    k = (which == 0) ? 9.0 : (which == 1) ? 7.0 : 5.0;
    e = ((c / (to_r(psi) * nn)) ** (1.0 / k)) * to_r(scale);
    r = (to_r(b[which]) - e) / e; if (r < 0) r = -r;
    checks++;
    if (r > 1e-7 + (4.0 * 2.33e-10 * (to_r(psi) < 0 ? -to_r(psi) : to_r(psi)) * nn / (c < 0 ? -c : c)) / k) begin failures++; $display("FAIL unit %0d psi=%g n=%0d: %.10f expected %.10f", which, p, nn, to_r(b[which]), e); end
  endtask

  initial begin
    st[0] = 0; st[1] = 0; st[2] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(0, 1.8512470710, 1024, 1.0); run(0, 1.8512470710, 128, 1.0); run(0, 0.01, 500, 1.0);
    run(1, -1.3, 1024, 1.0); run(1, -0.05, 64, 1.0); run(1, -25.0, 300, 1.0);
    run(2, 0.8, 1024, 1.0); run(2, 0.3, 128, 2.5); run(2, 5.0, 1000, 0.7);
    for (int t = 0; t < 10; t++) begin
      run(0, real'($urandom_range(100, 100000)) / 10000.0, $urandom_range(2, 1024), 1.0);
      run(1, -real'($urandom_range(100, 100000)) / 10000.0, $urandom_range(2, 1024), 1.0);
      run(2, real'($urandom_range(100, 100000)) / 10000.0, $urandom_range(2, 1024), real'($urandom_range(1, 100)) / 10.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
