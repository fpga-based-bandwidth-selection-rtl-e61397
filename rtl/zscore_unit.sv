// zscore_unit: optional preprocessing of the PLUGIN selector, the z-score
// standardisation Z_i = (X_i - mu) / sigma, written back over X_i in the
// sample memory.
//
// With standardised data sigma = 1 in Step II, so Psi8NS becomes a constant
// and the raised power sigma^9 cannot overflow the fixed-point range; the
// bandwidth found for Z is scaled back by sigma at the end (bw_unit). The
// division by sigma is a multiplication by its reciprocal. The in-place
// rewrite, one sample per clock (read at k, write at k one clock later), is
// this design's choice.
//
// Timing: pulse start with n, mu and sigma; one reciprocal request; done
// pulses n + 2 clocks after its answer, with the last write.
module zscore_unit
  import plugin_pkg::*;
#(
  parameter int DEPTH = 1024,
  localparam int AW   = $clog2(DEPTH),
  localparam int NW   = AW + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] n,
  input  fix_t          mu,
  input  fix_t          sigma,
  output math_req_t     mreq,
  input  math_rsp_t     mrsp,
  output logic [AW-1:0] rd_addr,
  input  fix_t          rd_data,
  output logic          we,
  output logic [AW-1:0] waddr,
  output fix_t          wdata,
  output logic          busy,
  output logic          done
);

  typedef enum logic [2:0] {S_IDLE, S_RQ, S_RW, S_RUN, S_LAST} state_e;
  state_e state;
  logic [NW-1:0] k, n_q;
  fix_t mu_q, sg_q, rs;
  logic          dv;
  logic [AW-1:0] ka;

  assign rd_addr = AW'(k);

  always_comb begin
    mreq.valid = (state == S_RQ);
    mreq.fn    = MF_RCP;
    mreq.a     = sg_q;
  end

  assign we    = dv;
  assign waddr = ka;
  assign wdata = fx_mul(fx_add(rd_data, -mu_q), rs);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      k <= '0; n_q <= '0; mu_q <= '0; sg_q <= '0; rs <= '0; dv <= 1'b0; ka <= '0;
    end else begin
      done <= 1'b0;
      dv   <= (state == S_RUN);
      ka   <= AW'(k);
      unique case (state)
        S_IDLE: if (start) begin
          n_q <= n; mu_q <= mu; sg_q <= sigma; k <= '0;
          state <= S_RQ;
        end
        S_RQ: state <= S_RW;
        S_RW: if (mrsp.done) begin
          rs    <= mrsp.y;
          state <= (n_q == '0) ? S_LAST : S_RUN;
        end
        S_RUN: begin
          if (k == n_q - 1'b1) state <= S_LAST;
          else                 k <= k + 1'b1;
        end
        S_LAST: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
