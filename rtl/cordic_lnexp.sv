// cordic_lnexp: natural logarithm and exponential of a Q32.32 number by
// hyperbolic CORDIC.
//
// The paper computes exponents and logarithms with CORDIC, and roots and
// powers from them as x^y = exp(y ln x). How the CORDIC is built is this
// design's own: one shift-add iteration per clock in a Q3.60 datapath, with
// the iteration indices 1..NIT and the indices 4, 13 and 40 done twice, as
// hyperbolic CORDIC needs to converge. The table atanh(2^-i) is stored as
// round(atanh(2^-i) * 2^60).
//
//  exp a: a = k ln2 + r with k = floor(a / ln2) and r in [0, ln2). Rotation
//         mode from x = 1/K_h, y = 0, z = r gives x + y = e^r, then
//         shifted by k. Results above the Q32.32 range saturate.
//  ln a:  a > 0 is normalised to a = m 2^e, m in [0.5, 1). Vectoring mode
//         from x = m + 1, y = m - 1 drives z to atanh((m-1)/(m+1)) = ln(m)/2;
//         ln a = 2 z + e ln2. a <= 0 returns the most negative number.
//
// Interface: pulse start with fn (MF_LN or MF_EXP) and a; done pulses with y
// after NIT + 3 + 4 clocks (the repeats included). Start while busy is
// ignored.
module cordic_lnexp
  import plugin_pkg::*;
#(
  parameter int NIT = 40
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  mfn_e fn,
  input  fix_t a,
  output logic busy,
  output logic done,
  output fix_t y
);

  // 1/K_h for the iteration sequence with repeats at 4, 13 and 40
  localparam logic signed [63:0] INV_KH = 64'sh1351_e872_00ee_c200;
  localparam fix_t FX_MAX = 64'sh7fff_ffff_ffff_ffff;
  localparam fix_t FX_MIN = 64'sh8000_0000_0000_0000;

  function automatic logic signed [63:0] atanh_tab(int i);
    unique case (i)
      1:  return 64'sh08c9f53d56818500;  2:  return 64'sh04162bbea0451480;
      3:  return 64'sh0202b12393d5dee0;  4:  return 64'sh01005588ad375ad0;
      5:  return 64'sh00800aac448d7710;  6:  return 64'sh004001556222b470;
      7:  return 64'sh0020002aab111236;  8:  return 64'sh001000055558888b;
      9:  return 64'sh00080000aaaac444;  10: return 64'sh0004000015555622;
      11: return 64'sh0002000002aaaab1;  12: return 64'sh0001000000555556;
      13: return 64'sh00008000000aaaab;  14: return 64'sh0000400000015555;
      15: return 64'sh0000200000002aab;  16: return 64'sh0000100000000555;
      17: return 64'sh00000800000000ab;  18: return 64'sh0000040000000015;
      19: return 64'sh0000020000000003;
      // beyond i = 19, atanh(2^-i) = 2^-i to 60 fraction bits
      default: return (i >= 20 && i <= 60) ? (64'sh1 <<< (60 - i)) : 64'sh0;
    endcase
  endfunction

  typedef enum logic [2:0] {S_IDLE, S_PREP, S_ITER, S_POST, S_OUT} state_e;
  state_e state;

  mfn_e               fn_q;
  fix_t               a_q;
  logic signed [63:0] x, yv, z;
  logic [5:0]         i;          // current iteration index
  logic               rep_done;   // the second pass of a repeated index is done
  logic signed [31:0] k;          // exponent (exp: power of two; ln: e)
  fix_t               res;

  // leading one of a (ln)
  logic [5:0] lead;
  always_comb begin
    lead = '0;
    for (int b = 0; b < 64; b++)
      if (a_q[b]) lead = 6'(b);
  end

  // exp range reduction
  fix_t               t_div;
  logic signed [31:0] k_exp;
  logic signed [95:0] r_wide;
  always_comb begin
    t_div  = fx_mul(a_q, INV_LN2);
    k_exp  = 32'(t_div >>> FRAC);        // floor
    r_wide = (96'(a_q) <<< 28) - 96'(k_exp) * $signed({32'd0, LN2_Q60});
  end

  // direction and step
  logic dir_pos;  // d = +1
  always_comb begin
    if (fn_q == MF_EXP) dir_pos = !z[63];    // rotate z toward 0
    else                dir_pos = yv[63];    // vector y toward 0
  end

  logic repeat_idx;
  assign repeat_idx = (i == 6'd4) || (i == 6'd13) || (i == 6'd40);

  // output conversion
  logic signed [71:0] ln_q60;
  logic signed [63:0] e_q60;
  always_comb begin
    ln_q60 = (72'(z) <<< 1) + 72'(k) * $signed({8'd0, LN2_Q60});
    e_q60  = x + yv;
    res    = '0;
    if (fn_q == MF_LN) begin
      res = 64'((ln_q60 + 72'sd134217728) >>> 28);
    end else begin
      if (k >= 32'sd31)                     res = FX_MAX;
      else if (k >= 32'sd28)                res = e_q60 <<< (k - 32'sd28);
      else if (k <= -32'sd36)               res = '0;
      else                                  res = (e_q60 + (64'sd1 <<< (27 - k))) >>> (28 - k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      y        <= '0;
      fn_q     <= MF_EXP;
      a_q      <= '0;
      x        <= '0;
      yv       <= '0;
      z        <= '0;
      i        <= '0;
      rep_done <= 1'b0;
      k        <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          fn_q  <= fn;
          a_q   <= a;
          state <= S_PREP;
        end
        S_PREP: begin
          i        <= 6'd1;
          rep_done <= 1'b0;
          if (fn_q == MF_EXP) begin
            k     <= k_exp;
            x     <= INV_KH;
            yv    <= '0;
            z     <= 64'(r_wide);
            state <= S_ITER;
          end else if (a_q <= 0) begin
            y     <= FX_MIN;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            logic signed [63:0] mn;
            if (lead <= 6'd59) mn = $signed(a_q << (6'd59 - lead));
            else               mn = $signed(a_q >> (lead - 6'd59));
            k     <= 32'(lead) - 32'sd31;
            x     <= mn + (64'sh1 <<< 60);
            yv    <= mn - (64'sh1 <<< 60);
            z     <= '0;
            state <= S_ITER;
          end
        end
        S_ITER: begin
          if (dir_pos) begin
            x  <= x + (yv >>> i);
            yv <= yv + (x >>> i);
            z  <= z - atanh_tab(int'(i));
          end else begin
            x  <= x - (yv >>> i);
            yv <= yv - (x >>> i);
            z  <= z + atanh_tab(int'(i));
          end
          if (repeat_idx && !rep_done) begin
            rep_done <= 1'b1;
          end else begin
            rep_done <= 1'b0;
            if (32'(i) == NIT) state <= S_POST;
            else               i <= i + 1'b1;
          end
        end
        S_POST: state <= S_OUT;
        S_OUT: begin
          y     <= res;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
