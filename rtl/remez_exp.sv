// remez_exp: fully pipelined exp(-w) for w >= 0 in Q32.32, one result per
// clock.
//
// The paper evaluates the exponential inside the kernel routines with a
// Remez (minimax) approximation that can be pipelined, separate from the
// CORDIC used elsewhere. This implementation reduces the argument,
// w = k ln2 + r with r in [0, ln2), evaluates exp(-r) with a degree-7
// polynomial whose coefficients minimise the largest absolute error on
// [0, ln2] (Remez exchange; error 2.9e-11), and shifts the result right by
// k. The result is given twice: y in Q32.32 and y_q60 with 60 fraction
// bits, which the kernel routines use so that the large polynomial factor
// does not magnify the rounding of a Q32.32 exponential. The polynomial degree, the Q3.60 Horner datapath and the argument
// reduction are this design's choices. Coefficients are stored as
// round(c_j * 2^60).
//
// Timing: in_valid/w enter at a clock edge; out_valid/y leave LAT = 10
// clocks later. No stall: the pipeline advances every clock.
module remez_exp
  import plugin_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fix_t w,
  output logic out_valid,
  output fix_t y,
  output logic signed [63:0] y_q60
);

  localparam int DEG = 7;
  localparam logic signed [63:0] C [DEG+1] = '{
    64'sh0ffffffffe087180, 64'shf00000016ecc3d00, 64'sh07ffffd425148000,
    64'shfd5557557ad23fc0, 64'sh00aa9f287f2feb60, 64'shffde02081707cb0a,
    64'sh0005709df87b18d7, 64'shffff6c456d101440
  };

  // stage A: k = floor(w / ln2)
  logic               va;
  fix_t               wa;
  logic [31:0]        ka;
  // stage B: r in Q3.60
  logic               vb;
  logic signed [63:0] rb;
  logic [31:0]        kb;
  // Horner stages
  logic               vh [DEG];
  logic signed [63:0] ph [DEG];
  logic signed [63:0] rh [DEG];
  logic [31:0]        kh [DEG];

  fix_t t_div;
  logic signed [95:0] r_wide;
  always_comb begin
    t_div  = fx_mul(w, INV_LN2);
    r_wide = (96'(wa) <<< 28) - $signed({64'd0, ka}) * $signed({32'd0, LN2_Q60});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va <= 1'b0; wa <= '0; ka <= '0;
      vb <= 1'b0; rb <= '0; kb <= '0;
      for (int s = 0; s < DEG; s++) begin
        vh[s] <= 1'b0; ph[s] <= '0; rh[s] <= '0; kh[s] <= '0;
      end
      out_valid <= 1'b0;
      y         <= '0;
      y_q60     <= '0;
    end else begin
      va <= in_valid;
      wa <= w;
      ka <= 32'(t_div >>> FRAC);
      vb <= va;
      rb <= 64'(r_wide);
      kb <= ka;
      // Horner: p_{s} = p_{s-1} * r + C[DEG-1-s], starting from C[DEG]
      vh[0] <= vb;
      ph[0] <= q60_mul(C[DEG], rb) + C[DEG-1];
      rh[0] <= rb;
      kh[0] <= kb;
      for (int s = 1; s < DEG; s++) begin
        vh[s] <= vh[s-1];
        ph[s] <= q60_mul(ph[s-1], rh[s-1]) + C[DEG-1-s];
        rh[s] <= rh[s-1];
        kh[s] <= kh[s-1];
      end
      out_valid <= vh[DEG-1];
      // Q3.60 -> Q32.32 and * 2^-k, rounded
      if (kh[DEG-1] >= 32'd34) y <= '0;
      else y <= (ph[DEG-1] + (64'sd1 <<< (27 + kh[DEG-1]))) >>> (28 + kh[DEG-1]);
      if (kh[DEG-1] >= 32'd62) y_q60 <= '0;
      else if (kh[DEG-1] == 32'd0) y_q60 <= ph[DEG-1];
      else y_q60 <= (ph[DEG-1] + (64'sd1 <<< (kh[DEG-1] - 1))) >>> kh[DEG-1];
    end
  end

endmodule
