// variance_unit: Step I of the PLUGIN selector, the sample variance
//
//   V = 1/(n-1) sum X_i^2 - 1/(n(n-1)) (sum X_i)^2,
//
// and, as a by-product for the z-score standardisation, the mean
// mu = (1/n) sum X_i.
//
// The unit streams the n samples from the sample memory (one address per
// clock, one-clock read latency), accumulating sum X and sum X^2 in Q32.32.
// It then takes 1/n and 1/(n-1) from the shared reciprocal and forms
// mu = sum X / n and V = (sum X^2 - mu sum X) / (n-1), which is the paper's
// formula rearranged so that no reciprocal as small as 1/(n(n-1)) appears.
// The rearrangement is this design's choice.
//
// Timing: pulse start; the first reciprocal request comes n + 2 clocks
// later (streaming), the second after its answer; done pulses with var_o and mean_o.
module variance_unit
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
  output logic [AW-1:0] rd_addr,
  input  fix_t          rd_data,
  output math_req_t     mreq,
  input  math_rsp_t     mrsp,
  output logic          busy,
  output logic          done,
  output fix_t          var_o,
  output fix_t          mean_o
);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_LAST, S_RN_REQ, S_RN_WAIT, S_RN1_REQ, S_RN1_WAIT} state_e;
  state_e state;

  logic [NW-1:0] k, n_q;
  logic          dv;
  fix_t          sx, sxx;

  assign rd_addr = AW'(k);

  always_comb begin
    mreq.valid = (state == S_RN_REQ) || (state == S_RN1_REQ);
    mreq.fn    = MF_RCP;
    mreq.a     = (state == S_RN_REQ) ? fx_from_int(32'(n_q)) : fx_from_int(32'(n_q) - 32'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      var_o <= '0; mean_o <= '0;
      k <= '0; n_q <= '0; dv <= 1'b0; sx <= '0; sxx <= '0;
    end else begin
      done <= 1'b0;
      dv   <= (state == S_READ);
      if (dv) begin
        sx  <= fx_add(sx, rd_data);
        sxx <= fx_add(sxx, fx_mul(rd_data, rd_data));
      end
      unique case (state)
        S_IDLE: if (start) begin
          n_q   <= n;
          k     <= '0;
          sx    <= '0;
          sxx   <= '0;
          state <= S_READ;
        end
        S_READ: begin
          if (k == n_q - 1'b1) state <= S_LAST;
          else                 k <= k + 1'b1;
        end
        S_LAST: state <= S_RN_REQ;       // last sample is being added
        S_RN_REQ: state <= S_RN_WAIT;
        S_RN_WAIT: if (mrsp.done) begin
          mean_o <= fx_mul(sx, mrsp.y);
          state  <= S_RN1_REQ;
        end
        S_RN1_REQ: state <= S_RN1_WAIT;
        S_RN1_WAIT: if (mrsp.done) begin
          var_o <= fx_mul(fx_add(sxx, -fx_mul(mean_o, sx)), mrsp.y);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
