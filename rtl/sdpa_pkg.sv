// sdpa_pkg: number format and arithmetic shared by every node of the
// memory-free attention pipeline.
//
// All values are signed fixed point, DATA_W bits wide with FRAC_W fraction
// bits (Q16.16 by default). The pipeline needs four operations on them:
// multiply, divide, maximum and the exponential of a non-positive number.
// The exponential is only ever taken of a difference "value minus running
// maximum", which is <= 0, so its result lies in (0, 1]. It is computed as
// 2^(x*log2 e): the integer part of the exponent becomes a right shift and
// the fraction f goes through the cubic 1 + C1 f + C2 f^2 + C3 f^3, fitted by
// least squares to 2^f on [0,1) with the end points fixed; absolute error is
// about 1.3e-4 over the whole range. Every function here is combinational.
//
// The number format, the exponential approximation and the saturation of the
// divider are this design's own choices; the paper works with abstract real
// numbers.
package sdpa_pkg;

  parameter int unsigned DATA_W = 32;
  parameter int unsigned FRAC_W = 16;

  typedef logic signed [DATA_W-1:0] fx_t;

  // Pair (s, x) carried from the Scan node to both reductions:
  // delta = e^(m_old - m_new) rescales the past, e = e^(s - m_new) is new.
  typedef struct packed {
    fx_t delta;
    fx_t e;
  } scan_pair_t;

  localparam fx_t FX_ONE = fx_t'(1) <<< FRAC_W;
  localparam fx_t FX_MIN = {1'b1, {(DATA_W-1){1'b0}}};
  localparam fx_t FX_MAX = {1'b0, {(DATA_W-1){1'b1}}};

  // log2(e) and the 2^f polynomial coefficients, scaled by 2^16.
  localparam logic [16:0] LOG2E_Q16 = 17'd94548;
  localparam logic [16:0] EXP_C1    = 17'd45576;
  localparam logic [16:0] EXP_C2    = 17'd14872;
  localparam logic [16:0] EXP_C3    = 17'd5072;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FRAC_W);
  endfunction

  function automatic fx_t fx_max(fx_t a, fx_t b);
    return (a > b) ? a : b;
  endfunction

  // a / b with the quotient saturated to the range of fx_t; b == 0 gives
  // the largest magnitude of the sign of a.
  function automatic fx_t fx_div(fx_t a, fx_t b);
    logic signed [DATA_W+FRAC_W-1:0] num;
    logic signed [DATA_W+FRAC_W-1:0] den;
    logic signed [DATA_W+FRAC_W-1:0] q;
    num = (DATA_W+FRAC_W)'(a) <<< FRAC_W;
    den = (DATA_W+FRAC_W)'(b);
    if (b == '0) return a[DATA_W-1] ? FX_MIN : FX_MAX;
    q = num / den;
    if (q > (DATA_W+FRAC_W)'(FX_MAX)) return FX_MAX;
    if (q < (DATA_W+FRAC_W)'(FX_MIN)) return FX_MIN;
    return fx_t'(q);
  endfunction

  // e^x for x <= 0 (a positive x is treated as 0). Result in (0, 1].
  function automatic fx_t fx_exp_neg(fx_t x);
    logic signed [DATA_W+17:0] y_full;
    logic signed [DATA_W+1:0]  y;      // x * log2(e), FRAC_W fraction bits
    logic        [15:0]        f;      // fraction of the exponent, Q0.16
    logic        [DATA_W+1:0]  sh;     // -floor(y)
    logic        [33:0]        t;
    logic        [16:0]        p;      // 2^f in Q1.16
    logic        [DATA_W-1:0]  mant;
    if (x >= 0) return FX_ONE;
    y_full = x * $signed({1'b0, LOG2E_Q16});
    y      = (DATA_W+2)'(y_full >>> 16);
    // Re-align the fraction to 16 bits whatever FRAC_W is.
    if (FRAC_W >= 16) f = 16'(y >> (FRAC_W - 16));
    else              f = 16'(y << (16 - FRAC_W));
    sh = (DATA_W+2)'(-(y >>> FRAC_W));
    t  = 34'(f) * 34'(EXP_C3);
    t  = 34'(f) * (34'(EXP_C2) + (t >> 16));
    t  = 34'(f) * (34'(EXP_C1) + (t >> 16));
    p  = 17'(34'h10000 + (t >> 16));
    if (FRAC_W >= 16) mant = DATA_W'(p) << (FRAC_W - 16);
    else              mant = DATA_W'(p) >> (16 - FRAC_W);
    if (sh >= (DATA_W+2)'(DATA_W)) return '0;
    return fx_t'(mant >> sh);
  endfunction

endpackage
