// kernel_deriv: pipelined r-th derivative of the Gaussian kernel,
// K4(u) = (u^4 - 6u^2 + 3) phi(u) or K6(u) = (u^6 - 15u^4 + 45u^2 - 15) phi(u),
// phi(u) = exp(-u^2/2) / sqrt(2 pi), in Q32.32. ORDER selects 4 or 6.
//
// The formulas are the paper's (Algorithm 1, Steps IV and VI); the paper
// shows this as the "K^4 routine" of the Psi4 unit and uses its pipelined
// Remez exponential inside. The pipeline is this design's: u^2 is formed
// once and drives both the polynomial (u^4, u^6 and small integer
// multiples, which are exact) and exp(-u^2/2) from remez_exp (taken with 60
// fraction bits); the two meet in two final multiplications. For |u| >= 16 the kernel value is below
// 1e-48 and the output is forced to zero, which also keeps u^6 inside the
// Q32.32 range.
//
// Timing: one input per clock, result LAT = 14 clocks after in_valid.
module kernel_deriv
  import plugin_pkg::*;
#(
  parameter int ORDER = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fix_t u,
  output logic out_valid,
  output fix_t k
);

  localparam int EXP_LAT = 10;

  // stage 0: register input, range test
  logic v0, kill0;
  fix_t u0;
  // stage 1: u^2
  logic v1, kill1;
  fix_t u2_1;
  // polynomial delay line, aligned with remez_exp
  fix_t poly [EXP_LAT];
  logic kill [EXP_LAT];
  fix_t u2_p, u4_p;      // helper registers for the polynomial
  logic ev;
  logic signed [63:0] ey60;
  // final stages
  logic vf1, kf1, vf2;
  fix_t pe, kout;

  logic [63:0] mag;
  assign mag = u[63] ? 64'(-u) : 64'(u);

  remez_exp u_exp (
    .clk, .rst_n,
    .in_valid (v1),
    .w        (kill1 ? '0 : (u2_1 >>> 1)),
    .out_valid(ev),
    .y        (),
    .y_q60    (ey60)
  );

  // polynomial value from u^2 (stage 2..3 of the delay line)
  fix_t poly_new;
  always_comb begin
    if (ORDER == 6)
      poly_new = fx_mul(u4_p, u2_p) - 15 * u4_p + 45 * u2_p - (64'sd15 <<< FRAC);
    else
      poly_new = u4_p - 6 * u2_p + (64'sd3 <<< FRAC);
  end

  // Q32.32 polynomial times the Q3.60 exponential, result Q32.32
  fix_t pe_new;
  always_comb begin
    logic signed [127:0] pr;
    pr     = poly[EXP_LAT-1] * ey60;
    pr     = pr + (128'sd1 <<< 59);
    pe_new = pr[60 +: 64];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; kill0 <= 1'b0; u0 <= '0;
      v1 <= 1'b0; kill1 <= 1'b0; u2_1 <= '0;
      u2_p <= '0; u4_p <= '0;
      for (int s = 0; s < EXP_LAT; s++) begin poly[s] <= '0; kill[s] <= 1'b0; end
      vf1 <= 1'b0; kf1 <= 1'b0; pe <= '0;
      vf2 <= 1'b0; kout <= '0;
    end else begin
      v0    <= in_valid;
      u0    <= u;
      kill0 <= (mag >= (64'd16 << FRAC));
      v1    <= v0;
      kill1 <= kill0;
      u2_1  <= kill0 ? '0 : fx_mul(u0, u0);
      // polynomial path: u2 -> u4 -> poly, then delayed
      u2_p  <= u2_1;
      u4_p  <= fx_mul(u2_1, u2_1);
      kill[0] <= kill1;
      kill[1] <= kill[0];
      poly[0] <= '0;
      poly[1] <= poly_new;
      for (int s = 2; s < EXP_LAT; s++) begin
        poly[s] <= poly[s-1];
        kill[s] <= kill[s-1];
      end
      // final: poly * exp(-u^2/2) * 1/sqrt(2 pi)
      vf1  <= ev;
      kf1  <= kill[EXP_LAT-1];
      pe   <= pe_new;
      vf2  <= vf1;
      kout <= kf1 ? '0 : fx_mul(pe, INV_SQRT_2PI);
    end
  end

  assign out_valid = vf2;
  assign k         = kout;

endmodule
