// tb_data_bram: self-checking test of the sample memory. Writes random
// words to random addresses while all read ports read random addresses,
// and compares each read (one clock later) with a model array, including
// read-during-write of the same address (old data).
module tb_data_bram;
  import plugin_pkg::*;
  localparam int DEPTH = 1024, NRD = 2, AW = 10;
  logic clk = 0;
  logic we = 0;
  logic [AW-1:0] waddr = '0;
  fix_t wdata = '0;
  logic [AW-1:0] raddr [NRD];
  fix_t rdata [NRD];
  fix_t model [DEPTH];
  fix_t expq [NRD];
  int checks = 0, failures = 0;

  data_bram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < NRD; p++) raddr[p] = '0;
    // initialise every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      waddr = AW'($urandom_range(0, DEPTH - 1));
      wdata = {$urandom, $urandom};
      for (int p = 0; p < NRD; p++) begin
        raddr[p] = (t % 7 == 0) ? waddr : AW'($urandom_range(0, DEPTH - 1));
        expq[p] = model[raddr[p]];
      end
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rdata[p] !== expq[p]) begin
          failures++; $display("FAIL port %0d addr %0d", p, raddr[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
