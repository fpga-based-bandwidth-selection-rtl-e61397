// plugin_top: PLUGIN bandwidth selector for Gaussian kernel density
// estimation, in Q32.32 fixed point.
//
// A data set of n samples is loaded through the 64-bit port A (op =
// OP_LOAD, one sample per clock) into the sample memory. op = OP_RUN or
// OP_RUN_Z then computes the asymptotically optimal bandwidth h by the
// seven steps of the plug-in method (variance and sigma, Psi8NS, g1,
// Psi6(g1), g2, Psi4(g2), h), without or with z-score standardisation of
// the data (then h is scaled back by sigma). RSLT holds h once done has
// pulsed; busy is high during a run.
//
// The units follow the paper's overview: one unit per step, the sample
// block RAM, the shared CORDIC (ln, exp) with a shared Newton reciprocal
// (math_unit), and the controlling state machine. The two O(n^2) steps
// (psi_unit) each use LANES parallel kernel pipelines. Ports A, op and
// RSLT are the paper's; clk, rst_n (asynchronous, active low), busy and
// done are this design's additions.
module plugin_top
  import plugin_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int LANES = 2,
  localparam int AW   = $clog2(DEPTH),
  localparam int NW   = AW + 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  fix_t       A,
  input  logic [7:0] op,
  output fix_t       RSLT,
  output logic       busy,
  output logic       done
);

  // ------------------------------------------------------------ control
  phase_e        phase;
  logic          step_start, step_done, zmode, load_we;
  logic [NW-1:0] n;
  logic [AW-1:0] load_addr;

  plugin_ctrl #(.DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .op, .step_done, .phase, .step_start, .zmode, .n,
    .load_we, .load_addr, .busy, .done);

  // ------------------------------------------------------ shared math
  math_req_t mreq, rq_var, rq_sd, rq_zs, rq_p8, rq_g1, rq_p6, rq_g2, rq_p4, rq_h;
  math_rsp_t mrsp;

  always_comb begin
    unique case (phase)
      PH_VAR:  mreq = rq_var;
      PH_SD:   mreq = rq_sd;
      PH_ZS:   mreq = rq_zs;
      PH_P8:   mreq = rq_p8;
      PH_G1:   mreq = rq_g1;
      PH_P6:   mreq = rq_p6;
      PH_G2:   mreq = rq_g2;
      PH_P4:   mreq = rq_p4;
      PH_H:    mreq = rq_h;
      default: mreq = '0;
    endcase
  end

  math_unit u_math (.clk, .rst_n, .mreq, .mrsp, .busy());

  // ------------------------------------------------------ sample memory
  logic          we;
  logic [AW-1:0] waddr;
  fix_t          wdata;
  logic [AW-1:0] raddr [LANES];
  fix_t          rdata [LANES];

  data_bram #(.DEPTH(DEPTH), .NRD(LANES)) u_bram (
    .clk, .we, .waddr, .wdata, .raddr, .rdata);

  // ------------------------------------------------------------- steps
  logic st_var, st_sd, st_zs, st_p8, st_g1, st_p6, st_g2, st_p4, st_h;
  logic dn_var, dn_sd, dn_zs, dn_p8, dn_g1, dn_p6, dn_g2, dn_p4, dn_h;
  assign st_var = step_start && phase == PH_VAR;
  assign st_sd  = step_start && phase == PH_SD;
  assign st_zs  = step_start && phase == PH_ZS;
  assign st_p8  = step_start && phase == PH_P8;
  assign st_g1  = step_start && phase == PH_G1;
  assign st_p6  = step_start && phase == PH_P6;
  assign st_g2  = step_start && phase == PH_G2;
  assign st_p4  = step_start && phase == PH_P4;
  assign st_h   = step_start && phase == PH_H;
  assign step_done = dn_var | dn_sd | dn_zs | dn_p8 | dn_g1 | dn_p6 | dn_g2 | dn_p4 | dn_h;

  fix_t v_hat, mean, sigma, psi8, g1, psi6, g2, psi4, h;
  logic [AW-1:0] ra_var, ra_zs, zs_waddr;
  logic [AW-1:0] ra_p6 [LANES];
  logic [AW-1:0] ra_p4 [LANES];
  logic          zs_we;
  fix_t          zs_wdata;
  logic          b_var, b_sd, b_zs, b_p8, b_g1, b_p6, b_g2, b_p4, b_h;

  // Step I
  variance_unit #(.DEPTH(DEPTH)) u_var (
    .clk, .rst_n, .start(st_var), .n, .rd_addr(ra_var), .rd_data(rdata[0]),
    .mreq(rq_var), .mrsp, .busy(b_var), .done(dn_var), .var_o(v_hat), .mean_o(mean));

  stddev_unit u_sd (
    .clk, .rst_n, .start(st_sd), .v(v_hat), .mreq(rq_sd), .mrsp,
    .busy(b_sd), .done(dn_sd), .sigma);

  // optional preprocessing
  zscore_unit #(.DEPTH(DEPTH)) u_zs (
    .clk, .rst_n, .start(st_zs), .n, .mu(mean), .sigma, .mreq(rq_zs), .mrsp,
    .rd_addr(ra_zs), .rd_data(rdata[0]), .we(zs_we), .waddr(zs_waddr), .wdata(zs_wdata),
    .busy(b_zs), .done(dn_zs));

  // Step II: with standardised data sigma = 1
  psi8ns_unit u_p8 (
    .clk, .rst_n, .start(st_p8), .sigma(zmode ? FX_ONE : sigma), .mreq(rq_p8), .mrsp,
    .busy(b_p8), .done(dn_p8), .psi8);

  // Step III
  bw_unit #(.C(C_G1), .INV_K(ONE_NINTH), .NW(NW)) u_g1 (
    .clk, .rst_n, .start(st_g1), .psi(psi8), .n, .scale(FX_ONE), .mreq(rq_g1), .mrsp,
    .busy(b_g1), .done(dn_g1), .b(g1));

  // Step IV
  fix_t nk6, nk4;
  assign nk6 = fx_mul(fx_from_int(32'(n)), K6_0);
  assign nk4 = fx_mul(fx_from_int(32'(n)), K4_0);

  psi_unit #(.ORDER(6), .LANES(LANES), .DEPTH(DEPTH)) u_p6 (
    .clk, .rst_n, .start(st_p6), .g(g1), .n, .nk0(nk6), .mreq(rq_p6), .mrsp,
    .rd_addr(ra_p6), .rd_data(rdata), .busy(b_p6), .done(dn_p6), .psi(psi6));

  // Step V
  bw_unit #(.C(C_G2), .INV_K(ONE_SEVENTH), .NW(NW)) u_g2 (
    .clk, .rst_n, .start(st_g2), .psi(psi6), .n, .scale(FX_ONE), .mreq(rq_g2), .mrsp,
    .busy(b_g2), .done(dn_g2), .b(g2));

  // Step VI
  psi_unit #(.ORDER(4), .LANES(LANES), .DEPTH(DEPTH)) u_p4 (
    .clk, .rst_n, .start(st_p4), .g(g2), .n, .nk0(nk4), .mreq(rq_p4), .mrsp,
    .rd_addr(ra_p4), .rd_data(rdata), .busy(b_p4), .done(dn_p4), .psi(psi4));

  // Step VII, h_final = h sigma after standardisation
  bw_unit #(.C(C_H), .INV_K(ONE_FIFTH), .NW(NW)) u_h (
    .clk, .rst_n, .start(st_h), .psi(psi4), .n, .scale(zmode ? sigma : FX_ONE), .mreq(rq_h), .mrsp,
    .busy(b_h), .done(dn_h), .b(h));

  assign RSLT = h;

  // ----------------------------------------------------- memory ports
  always_comb begin
    for (int l = 0; l < LANES; l++) raddr[l] = '0;
    unique case (phase)
      PH_VAR: raddr[0] = ra_var;
      PH_ZS:  raddr[0] = ra_zs;
      PH_P6:  raddr = ra_p6;
      PH_P4:  raddr = ra_p4;
      default: ;
    endcase
    if (phase == PH_ZS) begin
      we = zs_we; waddr = zs_waddr; wdata = zs_wdata;
    end else begin
      we = load_we; waddr = load_addr; wdata = A;
    end
  end

  // only the unit of the current phase may be busy
  assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({b_var, b_sd, b_zs, b_p8, b_g1, b_p6, b_g2, b_p4, b_h}));

endmodule
