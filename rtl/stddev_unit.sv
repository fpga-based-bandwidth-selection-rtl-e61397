// stddev_unit: Step I of the PLUGIN selector, sigma = sqrt(V).
//
// The paper takes roots through logarithm and exponential,
// x^y = exp(y ln x); here sigma = exp(ln(V) / 2) with both functions from
// the shared CORDIC. V must be positive.
//
// Timing: pulse start with v; two CORDIC requests; done pulses with sigma.
module stddev_unit
  import plugin_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  fix_t      v,
  output math_req_t mreq,
  input  math_rsp_t mrsp,
  output logic      busy,
  output logic      done,
  output fix_t      sigma
);

  typedef enum logic [2:0] {S_IDLE, S_LN_REQ, S_LN_WAIT, S_EXP_REQ, S_EXP_WAIT} state_e;
  state_e state;
  fix_t v_q, half_ln;

  always_comb begin
    mreq.valid = (state == S_LN_REQ) || (state == S_EXP_REQ);
    mreq.fn    = (state == S_LN_REQ) ? MF_LN : MF_EXP;
    mreq.a     = (state == S_LN_REQ) ? v_q : half_ln;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; sigma <= '0; v_q <= '0; half_ln <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin v_q <= v; state <= S_LN_REQ; end
        S_LN_REQ: state <= S_LN_WAIT;
        S_LN_WAIT: if (mrsp.done) begin
          half_ln <= mrsp.y >>> 1;
          state   <= S_EXP_REQ;
        end
        S_EXP_REQ: state <= S_EXP_WAIT;
        S_EXP_WAIT: if (mrsp.done) begin
          sigma <= mrsp.y;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
