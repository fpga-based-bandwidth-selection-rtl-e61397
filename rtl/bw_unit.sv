// bw_unit: a bandwidth step of the PLUGIN selector,
//
//   b = scale * ( C / (psi * n) )^(1/K).
//
// One module serves the three bandwidth steps, each instance with its own
// constants (all from the paper's Algorithm 1 with the Gaussian kernel):
//   g1 (Step III):  C = -2 K6(0)/mu2 = 30/sqrt(2 pi),  K = 9, psi = Psi8NS
//   g2 (Step V):    C = -2 K4(0)/mu2 = -6/sqrt(2 pi),  K = 7, psi = Psi6(g1)
//   h  (Step VII):  C = R(K)/mu2^2   = 1/(2 sqrt(pi)), K = 5, psi = Psi4(g2)
// and scale = 1, except for h after z-score preprocessing, where
// scale = sigma of the raw data gives h_final = h sigma.
//
// The division is a multiplication by the reciprocal of psi*n, and the K-th
// root is exp(ln(x) / K), both from the shared arithmetic resource, as the
// paper computes higher-order roots. The sequencing is this design's own.
//
// Timing: pulse start; one reciprocal, one ln and one exp request; done
// pulses with b.
module bw_unit
  import plugin_pkg::*;
#(
  parameter fix_t C     = C_H,
  parameter fix_t INV_K = ONE_FIFTH,
  parameter int   NW    = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  fix_t          psi,
  input  logic [NW-1:0] n,
  input  fix_t          scale,
  output math_req_t     mreq,
  input  math_rsp_t     mrsp,
  output logic          busy,
  output logic          done,
  output fix_t          b
);

  typedef enum logic [3:0] {
    S_IDLE, S_PN, S_RQ, S_RW, S_LQ, S_LW, S_EQ, S_EW, S_SC
  } state_e;
  state_e state;
  fix_t t, scale_q, root;

  always_comb begin
    mreq.valid = (state == S_RQ) || (state == S_LQ) || (state == S_EQ);
    unique case (state)
      S_LQ:    mreq.fn = MF_LN;
      S_EQ:    mreq.fn = MF_EXP;
      default: mreq.fn = MF_RCP;
    endcase
    mreq.a = t;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; b <= '0; t <= '0; scale_q <= '0; root <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          t       <= psi;
          scale_q <= scale;
          state   <= S_PN;
        end
        S_PN: begin t <= fx_mul(t, fx_from_int(32'(n))); state <= S_RQ; end
        S_RQ: state <= S_RW;
        S_RW: if (mrsp.done) begin t <= fx_mul(C, mrsp.y); state <= S_LQ; end
        S_LQ: state <= S_LW;
        S_LW: if (mrsp.done) begin t <= fx_mul(mrsp.y, INV_K); state <= S_EQ; end
        S_EQ: state <= S_EW;
        S_EW: if (mrsp.done) begin root <= mrsp.y; state <= S_SC; end
        S_SC: begin
          b     <= fx_mul(root, scale_q);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
