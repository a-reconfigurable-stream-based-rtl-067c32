// bcpnn_pkg -- shared types, sizes and fixed-point arithmetic of the BCPNN kernel.
//
// Number format. Every value that travels on a stream is a 32-bit word, so one
// 512-bit HBM beat carries 16 values and four merged channels carry 64, as in the
// original accelerator. The original uses IEEE single precision; this RTL uses
// signed fixed point instead:
//   fx_t  : Q8.24  (probabilities, activities, weights, biases, logarithms)
//   sup_t : Q12.20 (support values, which are sums over many weighted inputs)
// The natural logarithm and the exponential are built from a leading-one detector,
// a shift and a quadratic correction of the mantissa (a Mitchell-style
// approximation): log2(1+f) ~ f + 0.3465 f(1-f) and 2^f ~ 1 + f - 0.3445 f(1-f),
// for 0 <= f < 1. Absolute error of fx_ln is below 0.006, relative error of
// fx_exp below 0.4 %. These functions are combinational; the modules that use
// them register their results.
package bcpnn_pkg;

  // ---------------------------------------------------------------- formats
  localparam int unsigned DW     = 32;            // word width on every stream
  localparam int unsigned FRAC   = 24;            // fraction bits of fx_t
  localparam int unsigned SFRAC  = 20;            // fraction bits of sup_t
  localparam int unsigned HBM_W  = 512;           // AXI burst width per channel
  localparam int unsigned WPB    = HBM_W / DW;    // 16 words per beat
  localparam int unsigned NCH    = 4;             // HBM channels merged per packet
  localparam int unsigned PKT    = NCH * WPB;     // 64 words per merged packet

  typedef logic signed [DW-1:0] fx_t;
  typedef logic signed [DW-1:0] sup_t;
  typedef logic [HBM_W-1:0]     beat_t;
  typedef logic [PKT-1:0][DW-1:0] pkt_t;          // merged 64-word packet

  localparam fx_t FX_ONE  = fx_t'(32'sd1 <<< FRAC);
  localparam fx_t FX_HALF = fx_t'(32'sd1 <<< (FRAC - 1));
  localparam fx_t FX_EPS  = fx_t'(1);               // smallest positive value
  localparam fx_t FX_LN2  = fx_t'(11629080);        // ln 2      in Q8.24
  localparam fx_t FX_LOG2E= fx_t'(24204406);        // log2(e)   in Q8.24
  localparam fx_t C_LN    = fx_t'(5813305);         // 0.3465    in Q8.24
  localparam fx_t C_EXP   = fx_t'(5779751);         // 0.3445    in Q8.24
  localparam fx_t FX_LN_MIN = fx_t'(-279097920);    // ln(2^-24) in Q8.24

  // ---------------------------------------------------------------- modes
  typedef enum logic [1:0] {
    MODE_INFER = 2'd0,   // inference: no plasticity
    MODE_UNSUP = 2'd1,   // unsupervised training of the input-hidden projection
    MODE_SUP   = 2'd2    // supervised training of the hidden-output projection
  } mode_e;

  // Constants word, the first 32 bits of the constants beat.
  typedef struct packed {
    logic [7:0] reserved;
    logic [7:0] label;       // class label for supervised training
    logic [4:0] alpha_sh;    // trace rate alpha = 2^-alpha_sh
    logic       init;        // reset all on-chip traces to their priors first
    logic       struct_en;   // apply the receptive-field (sparsity) mask
    mode_e      mode;        // [1:0]
    logic [6:0] pad;
  } consts_t;

  // ---------------------------------------------------------------- arithmetic
  // Q8.24 product, truncated toward minus infinity.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FRAC);
  endfunction

  // Trace update p + (target - p) * 2^-sh, the exponential moving average of BCPNN.
  function automatic fx_t fx_ema(input fx_t p, input fx_t target, input logic [4:0] sh);
    fx_t d, r;
    d = target - p;
    r = p + (d >>> sh);
    if (r < FX_EPS) r = FX_EPS;        // keep traces strictly positive for the log
    return r;
  endfunction

  // Natural logarithm of a positive Q8.24 value; non-positive input gives ln(2^-24).
  function automatic fx_t fx_ln(input fx_t x);
    int               m;
    logic [31:0]      norm;
    logic [63:0]      f, fq, corr;
    logic signed [63:0] l2, ln;
    if (x <= 0) return FX_LN_MIN;
    m = 0;
    for (int i = 0; i < 31; i++) if (x[i]) m = i;
    norm = 32'(x) << (31 - m);                        // leading one at bit 31
    f    = {40'd0, norm[30:7]};                       // mantissa fraction, Q0.24
    fq   = (f * ((64'd1 << FRAC) - f)) >> FRAC;       // f(1-f)
    corr = (fq * 64'(C_LN)) >> FRAC;
    l2   = (64'(signed'(m - int'(FRAC))) <<< FRAC) + signed'(f + corr);
    ln   = (l2 * 64'(FX_LN2)) >>> FRAC;
    return fx_t'(ln);
  endfunction

  // Exponential of a non-positive value given in Q.24 (40 bits); positive input
  // is clamped to 0 (result 1.0). Result in Q8.24.
  function automatic fx_t fx_exp(input logic signed [39:0] x);
    logic signed [79:0] y;
    logic signed [39:0] n;
    logic [63:0]        f, fq, corr, r;
    if (x > 0) x = '0;
    y    = (80'(x) * 80'(FX_LOG2E)) >>> FRAC;          // x * log2(e), Q.24
    n    = 40'(y >>> FRAC);                            // floor, <= 0
    f    = {40'd0, y[FRAC-1:0]};
    fq   = (f * ((64'd1 << FRAC) - f)) >> FRAC;
    corr = (fq * 64'(C_EXP)) >> FRAC;
    r    = (64'd1 << FRAC) + f - corr;                 // 2^f in [1,2)
    if (n < -40'sd31) return '0;
    return fx_t'(r >> (-n));
  endfunction

endpackage
