// psi8ns_unit: Step II of the PLUGIN selector, the normal-scale estimate
//
//   Psi8NS = 105 / (32 sqrt(pi) sigma^9).
//
// sigma^9 is formed by four multiplications (sigma^2, sigma^4, sigma^8,
// sigma^9), one per clock, then its reciprocal is taken from the shared
// Newton reciprocal and multiplied by the constant 105/(32 sqrt(pi)). With
// z-score preprocessing the unit is given sigma = 1 and the result is that
// constant. sigma^9 must fit Q32.32, i.e. sigma < 10.9; large sigma is the
// overflow the paper's standardisation avoids.
//
// Timing: pulse start with sigma; 4 clocks, one reciprocal; done pulses
// with psi8.
module psi8ns_unit
  import plugin_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  fix_t      sigma,
  output math_req_t mreq,
  input  math_rsp_t mrsp,
  output logic      busy,
  output logic      done,
  output fix_t      psi8
);

  typedef enum logic [2:0] {S_IDLE, S_P2, S_P4, S_P8, S_P9, S_RQ, S_RW} state_e;
  state_e state;
  fix_t s_q, p;

  always_comb begin
    mreq.valid = (state == S_RQ);
    mreq.fn    = MF_RCP;
    mreq.a     = p;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; psi8 <= '0; s_q <= '0; p <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin s_q <= sigma; state <= S_P2; end
        S_P2: begin p <= fx_mul(s_q, s_q); state <= S_P4; end
        S_P4: begin p <= fx_mul(p, p);     state <= S_P8; end
        S_P8: begin p <= fx_mul(p, p);     state <= S_P9; end
        S_P9: begin p <= fx_mul(p, s_q);   state <= S_RQ; end
        S_RQ: state <= S_RW;
        S_RW: if (mrsp.done) begin
          psi8  <= fx_mul(PSI8_C, mrsp.y);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
