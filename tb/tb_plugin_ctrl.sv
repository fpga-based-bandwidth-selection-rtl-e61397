// tb_plugin_ctrl: self-checking test of the sequencing state machine.
// Loads samples through op codes (counting n, dropping loads beyond
// DEPTH), clears, and runs both step orders, answering each step_start
// with step_done after a random delay. Checks the phase order, one
// step_start per phase, the done pulse, and that ops are ignored while busy.
module tb_plugin_ctrl;
  import plugin_pkg::*;
  localparam int DEPTH = 16, NW = 5;
  logic clk = 0, rst_n = 0;
  logic [7:0] op = OP_NOP;
  logic step_done = 0;
  phase_e phase;
  logic step_start, zmode, load_we, busy, done;
  logic [NW-1:0] n;
  logic [3:0] load_addr;
  int checks = 0, failures = 0;

  plugin_ctrl #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .op, .step_done, .phase, .step_start, .zmode, .n,
    .load_we, .load_addr, .busy, .done);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(bit z);
    phase_e expect_seq [$];
    int k;
    if (z) expect_seq = '{PH_VAR, PH_SD, PH_ZS, PH_P8, PH_G1, PH_P6, PH_G2, PH_P4, PH_H};
    else   expect_seq = '{PH_VAR, PH_SD, PH_P8, PH_G1, PH_P6, PH_G2, PH_P4, PH_H};
    @(negedge clk); op = z ? OP_RUN_Z : OP_RUN;
    @(negedge clk); op = OP_NOP;
    k = 0;
    while (k < expect_seq.size()) begin
      chk(step_start == 1'b1, "step_start on phase entry");
      chk(phase == expect_seq[k], $sformatf("phase %0d is %s", k, phase.name()));
      chk(zmode == z, "zmode");
      repeat ($urandom_range(0, 5)) begin
        op = OP_LOAD;             // must be ignored while busy
        @(negedge clk);
        chk(step_start == 1'b0, "single step_start");
      end
      op = OP_CLEAR;
      step_done = 1; @(negedge clk); step_done = 0; op = OP_NOP;
      k++;
    end
    chk(done == 1'b1 && phase == PH_IDLE, "done at the end");
    chk(n == NW'(5), "n unchanged by ops while busy");
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 5; i++) begin
      op = OP_LOAD; #1;
      chk(load_we && load_addr == 4'(i), "load address");
      @(negedge clk);
    end
    op = OP_NOP;
    chk(n == NW'(5), "n after 5 loads");
    run(0);
    run(1);
    @(negedge clk); op = OP_CLEAR; @(negedge clk); op = OP_NOP;
    chk(n == '0, "clear");
    for (int i = 0; i < DEPTH + 4; i++) begin @(negedge clk); op = OP_LOAD; end
    @(negedge clk); op = OP_NOP;
    chk(n == NW'(DEPTH), "loads beyond DEPTH dropped");
    #1 chk(!load_we, "no write when full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
