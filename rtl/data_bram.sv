// data_bram: on-chip sample memory, DEPTH words of Q32.32, one write port
// and NRD read ports with a registered (one-clock) read.
//
// The paper keeps the whole data set in FPGA block RAM. The unrolled pair
// loop of the Psi units reads LANES samples X[j..j+LANES-1] per clock, so the
// memory has one read port per lane (two, as a true dual-port block RAM,
// for the two-lane configuration). The depth default is the largest data set
// size the paper measures (n = 1024). A write and a read of the same
// address in one clock return the old word.
module data_bram
  import plugin_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int NRD   = 2,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fix_t          wdata,
  input  logic [AW-1:0] raddr [NRD],
  output fix_t          rdata [NRD]
);

  fix_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int p = 0; p < NRD; p++)
      rdata[p] <= mem[raddr[p]];
  end

endmodule
