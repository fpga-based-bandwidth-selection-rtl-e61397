// fx_recip: reciprocal y = 1/a of a signed Q32.32 number by Newton iteration.
//
// Every division of the PLUGIN algorithm is done as a multiplication by a
// reciprocal, and the reciprocal is computed with Newton's method, as the
// paper describes. The details are this design's own: |a| is normalised to
// m in [0.5, 1) with a leading-one search, the start value is the usual
// linear estimate y0 = 48/17 - 32/17 m (error below 1/17), and ITER Newton
// steps y <- y (2 - m y) follow in Q3.60, one multiplication per clock, so the
// error after 4 steps is far below one Q32.32 LSB. The result is shifted back
// by the exponent, rounded and given the sign of a. a = 0, or a result that
// does not fit Q32.32 (|a| < 2^-31), saturates to the largest magnitude.
//
// Interface: pulse start with a; done pulses with y valid 2*ITER+4 clocks
// later. busy is high in between; a start while busy is ignored.
module fx_recip
  import plugin_pkg::*;
#(
  parameter int ITER = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fix_t a,
  output logic busy,
  output logic done,
  output fix_t y
);

  localparam logic signed [63:0] C48_17 = 64'sh2d2d_2d2d_2d2d_2d2d;
  localparam logic signed [63:0] C32_17 = 64'sh1e1e_1e1e_1e1e_1e1e;
  localparam logic signed [63:0] TWO_Q60 = 64'sh2000_0000_0000_0000;
  localparam fix_t FX_MAX = 64'sh7fff_ffff_ffff_ffff;

  typedef enum logic [2:0] {S_IDLE, S_NORM, S_INIT, S_MUL1, S_MUL2, S_OUT} state_e;
  state_e state;

  logic              neg;
  logic [63:0]       mag;
  logic [5:0]        msb;        // position of the leading one of |a|
  logic signed [63:0] m, yq, e;
  logic [$clog2(ITER+1)-1:0] it;

  // leading-one position of the registered magnitude
  logic [5:0] lead;
  always_comb begin
    lead = '0;
    for (int b = 0; b < 64; b++)
      if (mag[b]) lead = 6'(b);
  end

  // result in Q32.32: y_q60 * 2^(3 - msb)
  fix_t yout;
  logic signed [63:0] ysh;
  always_comb begin
    if (msb < 6'd1) begin
      ysh = FX_MAX;
    end else if (msb <= 6'd3) begin
      ysh = yq <<< (3 - msb);
    end else begin
      ysh = (yq + (64'sd1 <<< (msb - 6'd4))) >>> (msb - 6'd3);
    end
    yout = neg ? -ysh : ysh;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      y     <= '0;
      neg   <= 1'b0;
      mag   <= '0;
      msb   <= '0;
      m     <= '0;
      yq    <= '0;
      e     <= '0;
      it    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          neg   <= a[63];
          mag   <= a[63] ? 64'(-a) : 64'(a);
          state <= S_NORM;
        end
        S_NORM: begin
          if (mag == '0) begin
            y     <= FX_MAX;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            msb <= lead;
            // m = |a| with its leading one at bit 59 (value in [0.5, 1))
            if (lead <= 6'd59) m <= $signed(mag << (6'd59 - lead));
            else               m <= $signed(mag >> (lead - 6'd59));
            it    <= '0;
            state <= S_INIT;
          end
        end
        S_INIT: begin
          yq    <= C48_17 - q60_mul(C32_17, m);   // start value
          state <= S_MUL1;
        end
        S_MUL1: begin
          e     <= TWO_Q60 - q60_mul(m, yq);
          state <= S_MUL2;
        end
        S_MUL2: begin
          yq <= q60_mul(yq, e);
          it <= it + 1'b1;
          state <= (32'(it) == ITER - 1) ? S_OUT : S_MUL1;
        end
        S_OUT: begin
          y     <= yout;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
