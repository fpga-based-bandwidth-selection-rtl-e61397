// plugin_pkg: types, arithmetic helpers and constants shared by the PLUGIN
// bandwidth selector.
//
// All data are signed Q32.32 fixed point (64-bit word, 32 fraction bits),
// the single number format the design uses end to end. fx_add and fx_mul are
// the plain adder and multiplier (fADD / fMUL); fx_mul keeps the middle 64
// bits of the 128-bit product, rounded to nearest. A few internal datapaths
// (CORDIC, reciprocal, Remez exponent) carry 60 fraction bits (Q3.60) for
// guard precision; q60_mul is their multiplier.
//
// The constants are those of the PLUGIN algorithm with the Gaussian kernel:
// K6(0) = -15/sqrt(2 pi), K4(0) = 3/sqrt(2 pi), R(K) = 1/(2 sqrt(pi)),
// mu2(K) = 1, Psi8NS numerator 105/(32 sqrt(pi)). Each is the nearest Q32.32
// value, round(c * 2^32). The op codes on the 8-bit op port are this design's
// own encoding.
package plugin_pkg;

  localparam int FRAC  = 32;
  localparam int W     = 64;

  typedef logic signed [W-1:0] fix_t;

  localparam fix_t FX_ONE        = 64'sh0000_0001_0000_0000;
  localparam fix_t INV_SQRT_2PI  = 64'sh0000_0000_6621_14cf;  // 1/sqrt(2 pi)
  localparam fix_t INV_LN2       = 64'sh0000_0001_7154_7653;  // 1/ln 2
  localparam fix_t PSI8_C        = 64'sh0000_0001_d9eb_53fb;  // 105/(32 sqrt(pi))
  localparam fix_t C_G1          = 64'sh0000_000b_f7e0_704b;  // -2 K6(0)/mu2 = 30/sqrt(2 pi)
  localparam fix_t C_G2          = 64'shffff_fffd_9b39_8324;  // -2 K4(0)/mu2 = -6/sqrt(2 pi)
  localparam fix_t C_H           = 64'sh0000_0000_4837_5d41;  // R(K)/mu2^2 = 1/(2 sqrt(pi))
  localparam fix_t K6_0          = 64'shffff_fffa_040f_c7da;  // K6(0) = -15/sqrt(2 pi)
  localparam fix_t K4_0          = 64'sh0000_0001_3263_3e6e;  // K4(0) = 3/sqrt(2 pi)
  localparam fix_t ONE_NINTH     = 64'sh0000_0000_1c71_c71c;
  localparam fix_t ONE_SEVENTH   = 64'sh0000_0000_2492_4925;
  localparam fix_t ONE_FIFTH     = 64'sh0000_0000_3333_3333;
  localparam logic [63:0] LN2_Q60 = 64'h0b17_217f_7d1c_f780;  // ln 2 * 2^60

  // op port codes
  typedef enum logic [7:0] {
    OP_NOP   = 8'h00,
    OP_CLEAR = 8'h01,   // forget the loaded data set (n := 0)
    OP_LOAD  = 8'h02,   // store A as the next sample X[n], n := n + 1
    OP_RUN   = 8'h03,   // compute h on the raw data
    OP_RUN_Z = 8'h04    // compute h with z-score preprocessing
  } op_e;

  // requests to the shared reciprocal / CORDIC resource
  typedef enum logic [1:0] {
    MF_RCP = 2'd0,      // 1/a
    MF_LN  = 2'd1,      // ln a   (a > 0)
    MF_EXP = 2'd2       // exp a
  } mfn_e;

  typedef struct packed {
    logic valid;
    mfn_e fn;
    fix_t a;
  } math_req_t;

  typedef struct packed {
    logic done;         // one-cycle pulse with the result
    fix_t y;
  } math_rsp_t;

  // Step of the algorithm the controller is in; selects who owns the shared
  // resources.
  typedef enum logic [3:0] {
    PH_IDLE, PH_VAR, PH_SD, PH_ZS, PH_P8, PH_G1, PH_P6, PH_G2, PH_P4, PH_H
  } phase_e;

  function automatic fix_t fx_add(fix_t a, fix_t b);
    return a + b;
  endfunction

  function automatic fix_t fx_mul(fix_t a, fix_t b);
    logic signed [2*W-1:0] p;
    p = a * b;
    p = p + (128'sd1 <<< (FRAC-1));
    return p[FRAC +: W];
  endfunction

  function automatic logic signed [63:0] q60_mul(logic signed [63:0] a, logic signed [63:0] b);
    logic signed [127:0] p;
    p = a * b;
    p = p + (128'sd1 <<< 59);
    return p[60 +: 64];
  endfunction

  // integer n as Q32.32
  function automatic fix_t fx_from_int(logic [31:0] n);
    return fix_t'({32'd0, n}) <<< FRAC;
  endfunction

endpackage
