// math_unit: the shared scalar arithmetic resource of the selector, one
// Newton reciprocal (fx_recip) and one CORDIC ln/exp (cordic_lnexp) behind a
// single request/response port.
//
// The steps of the PLUGIN algorithm run strictly one after another, so one
// copy of each slow operator serves all step units; the controller hands
// the port to the unit whose step is active. A request (mreq.valid for one
// clock with fn and a) is answered by a one-clock mrsp.done with y; only one
// request may be outstanding. The sharing is this design's choice; the
// paper's overview shows a single CORDIC block next to the step units.
module math_unit
  import plugin_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  math_req_t mreq,
  output math_rsp_t mrsp,
  output logic      busy
);

  logic r_busy, r_done, c_busy, c_done;
  fix_t r_y, c_y;

  fx_recip u_rcp (
    .clk, .rst_n,
    .start(mreq.valid && mreq.fn == MF_RCP),
    .a    (mreq.a),
    .busy (r_busy),
    .done (r_done),
    .y    (r_y)
  );

  cordic_lnexp u_cordic (
    .clk, .rst_n,
    .start(mreq.valid && mreq.fn != MF_RCP),
    .fn   (mreq.fn),
    .a    (mreq.a),
    .busy (c_busy),
    .done (c_done),
    .y    (c_y)
  );

  assign mrsp.done = r_done | c_done;
  assign mrsp.y    = r_done ? r_y : c_y;
  assign busy      = r_busy | c_busy;

  // one request at a time
  assert property (@(posedge clk) disable iff (!rst_n) mreq.valid |-> !busy);

endmodule
