// tb_variance_unit: self-checking test of Step I (variance and mean).
// Loads random data sets into a sample memory, runs the unit with a
// behavioural reciprocal, and compares V and mu with double-precision
// values (relative error below 1e-7); checks that the unit streams the
// data in n + 2 clocks before its first reciprocal request.
module tb_variance_unit;
  import plugin_pkg::*;
  localparam int DEPTH = 1024, AW = 10, NW = 11;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NW-1:0] n = '0;
  logic we = 0;
  logic [AW-1:0] waddr = '0;
  fix_t wdata = '0;
  logic [AW-1:0] raddr [1];
  fix_t rdata [1];
  logic [AW-1:0] ra;
  math_req_t mreq;
  math_rsp_t mrsp;
  logic busy, done;
  fix_t v, mu;
  int checks = 0, failures = 0;

  assign raddr[0] = ra;
  data_bram #(.DEPTH(DEPTH), .NRD(1)) u_mem (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  math_model u_math (.clk, .mreq, .mrsp);
  variance_unit dut (.clk, .rst_n, .start, .n, .rd_addr(ra), .rd_data(rdata[0]),
    .mreq, .mrsp, .busy, .done, .var_o(v), .mean_o(mu));

  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic real to_r(fix_t x); return real'(x) / 4294967296.0; endfunction

  task automatic run(int nn, real spread, real off);
    real sx = 0, sxx = 0, ev, em, r1, r2;
    int cyc;
    for (int i = 0; i < nn; i++) begin
      real x;
      x = off + spread * (real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0);
      @(negedge clk); we = 1; waddr = AW'(i); wdata = fix_t'(x * 4294967296.0);
      x = to_r(wdata); sx += x; sxx += x * x;
    end
    @(negedge clk); we = 0;
    em = sx / nn;
    ev = (sxx - sx * sx / nn) / (nn - 1);
    n = NW'(nn);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!mreq.valid) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != nn + 2) begin failures++; $display("FAIL stream clocks %0d", cyc); end
    while (!done) @(negedge clk);
    r1 = (to_r(v) - ev) / ev; if (r1 < 0) r1 = -r1;
    r2 = to_r(mu) - em; if (r2 < 0) r2 = -r2;
    checks++;
    if (r1 > 1e-7) begin failures++; $display("FAIL V %.10f expected %.10f", to_r(v), ev); end
    checks++;
    if (r2 > 1e-8 * (1.0 + (em < 0 ? -em : em))) begin failures++; $display("FAIL mu %.10f expected %.10f", to_r(mu), em); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(2, 1.0, 0.0); run(10, 2.0, 3.0); run(100, 0.5, -1.0); run(256, 5.0, 10.0); run(1024, 2.0, -3.0); run(77, 1.0, 0.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
