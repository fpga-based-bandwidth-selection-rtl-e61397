// tb_zscore_unit: self-checking test of the z-score standardisation.
// Loads data, runs the unit with given mu and sigma and a behavioural
// reciprocal, then reads the memory back and compares every word with
// (X - mu) / sigma (absolute error below 1e-8); words beyond n must be
// untouched. Also checks the n + 2 clocks from the reciprocal answer to done.
module tb_zscore_unit;
  import plugin_pkg::*;
  localparam int DEPTH = 1024, AW = 10, NW = 11;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NW-1:0] n = '0;
  fix_t mu = '0, sigma = '0;
  math_req_t mreq;
  math_rsp_t mrsp;
  logic [AW-1:0] ra, zwa, twa;
  fix_t zwd, twd;
  logic zwe, twe;
  logic busy, done;
  logic [AW-1:0] raddr [1];
  fix_t rdata [1];
  logic [AW-1:0] tra;
  logic tb_rd;
  int checks = 0, failures = 0;
  real xs [DEPTH];

  always_comb begin
    raddr[0] = tb_rd ? tra : ra;
  end
  data_bram #(.DEPTH(DEPTH), .NRD(1)) u_mem (.clk, .we(busy ? zwe : twe), .waddr(busy ? zwa : twa),
    .wdata(busy ? zwd : twd), .raddr, .rdata);
  math_model u_math (.clk, .mreq, .mrsp);
  zscore_unit dut (.clk, .rst_n, .start, .n, .mu, .sigma, .mreq, .mrsp,
    .rd_addr(ra), .rd_data(rdata[0]), .we(zwe), .waddr(zwa), .wdata(zwd), .busy, .done);

  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic real to_r(fix_t x); return real'(x) / 4294967296.0; endfunction

  task automatic run(int nn, real m, real s);
    int cyc;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); twe = 1; twa = AW'(i); twd = fix_t'((m + s * (real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0)) * 4294967296.0);
      xs[i] = to_r(twd);
    end
    @(negedge clk); twe = 0;
    n = NW'(nn); mu = fix_t'(m * 4294967296.0); sigma = fix_t'(s * 4294967296.0);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!mrsp.done) @(negedge clk);
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != nn + 2) begin failures++; $display("FAIL clocks %0d for n=%0d", cyc, nn); end
    tb_rd = 1;
    for (int i = 0; i < DEPTH; i++) begin
      real e, d;
      @(negedge clk); tra = AW'(i);
      @(negedge clk);
      e = (i < nn) ? (xs[i] - to_r(mu)) / to_r(sigma) : xs[i];
      d = to_r(rdata[0]) - e; if (d < 0) d = -d;
      checks++;
      if (d > 1e-8) begin failures++; $display("FAIL word %0d = %.10f expected %.10f", i, to_r(rdata[0]), e); end
    end
    tb_rd = 0;
  endtask

  initial begin
    tb_rd = 0; tra = '0; twe = 0; twa = '0; twd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(10, 2.0, 0.5); run(200, -1.0, 3.0); run(1, 0.0, 1.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
