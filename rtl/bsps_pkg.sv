// bsps_pkg: shared types, constants and fixed-point arithmetic for the
// background subtraction parallel system (BSPS).
//
// Every real-valued quantity of the algorithm (mixing weights, means,
// variances, probabilities, the variational hyper-parameters) is carried as
// a signed fixed-point number with FX_FRAC fractional bits. Inside the units
// the working width is FX_W (Q31.32); the per-pixel model that travels to
// and from external memory uses 32-bit fields (Q15.16) to keep it compact.
//
// The functions below are combinational and are called from the unit state
// machines, at most a few per clock cycle:
//   fx_mul / fx_div        product (saturating) and quotient with rescaling
//   fx_sqrt                square root (shift-subtract, one step per result bit)
//   fx_exp_neg(u)          exp(-u), u >= 0, via 2^-(u*log2 e) and a Taylor tail
//   fx_ln(x)               natural log, leading-one split plus a 5th-order fit
//   fx_phi(z)              standard normal CDF from the erf fit of
//                          Abramowitz & Stegun 7.1.26 (error 1.5e-7)
//   fx_digamma(x)          digamma by upward recurrence to x >= 6 followed
//                          by the asymptotic series
// The source design was produced by high-level synthesis with floating point;
// the fixed-point formats and these function approximations are choices of
// this implementation.
package bsps_pkg;

  localparam int FX_FRAC = 32;
  localparam int FX_W    = 64;
  localparam int M_W     = 32;  // width of one stored model field (Q15.16)
  localparam int M_FRAC  = 16;

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic signed [M_W-1:0]  mfx_t;

  localparam fx_t FX_ONE  = fx_t'(64'sh1_0000_0000);
  localparam fx_t FX_HALF = fx_t'(64'sh8000_0000);
  localparam fx_t FX_MAX  = fx_t'(64'sh3FFF_FFFF_FFFF_FFFF);
  localparam fx_t FX_LN2        = fx_t'(64'sd2977044472);   // ln 2
  localparam fx_t FX_LOG2E      = fx_t'(64'sd6196328019);   // 1/ln 2
  localparam fx_t FX_INV_SQRT2PI = fx_t'(64'sd1713444047);  // 1/sqrt(2*pi)
  localparam fx_t FX_INV_SQRT2  = fx_t'(64'sd3037000500);   // 1/sqrt(2)
  localparam fx_t FX_INV256     = fx_t'(64'sd16777216); // p(x|fg) = 1/256

  // Maximum number of Gaussian components stored per pixel.
  localparam int K_MAX = 8;

  // One Gaussian component of a pixel model: weight, mean, variance.
  typedef struct packed {
    logic valid;
    mfx_t w;
    mfx_t mu;
    mfx_t sigma2;
  } comp_t;

  typedef comp_t [K_MAX-1:0] gmm_t;

  localparam int COMP_W = $bits(comp_t);
  localparam int GMM_W  = $bits(gmm_t);

  // Result of one pixel classification plus the updated model.
  typedef struct packed {
    gmm_t       model;
    mfx_t       p_bg;      // posterior p(bg|x), Q16
    logic       fg;        // 1: foreground
    logic       new_comp;  // 1: a new component was created
  } bsu_result_t;

  // One pixel job as read from external memory: the new intensity and the
  // stored model of that pixel.
  typedef struct packed {
    logic [7:0] x;
    gmm_t       model;
  } job_t;

  localparam int JOB_W = $bits(job_t);

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = (2*FX_W)'(a) * (2*FX_W)'(b);
    p = p >>> FX_FRAC;
    // saturate instead of wrapping
    if (p >  (2*FX_W)'(FX_MAX)) return FX_MAX;
    if (p < -(2*FX_W)'(FX_MAX)) return -FX_MAX;
    return fx_t'(p);
  endfunction

  function automatic fx_t fx_div(input fx_t a, input fx_t b);
    logic signed [FX_W+FX_FRAC-1:0] n;
    logic signed [FX_W+FX_FRAC-1:0] q;
    if (b == 0) return (a < 0) ? -FX_MAX : FX_MAX;
    n = (FX_W+FX_FRAC)'(a) <<< FX_FRAC;
    q = n / (FX_W+FX_FRAC)'(b);
    return fx_t'(q);
  endfunction

  // conversions between the stored Q15.16 fields and the working format
  function automatic fx_t fx_from_m(input mfx_t v);
    return fx_t'(v) <<< (FX_FRAC - M_FRAC);
  endfunction

  function automatic mfx_t fx_to_m(input fx_t v);
    return mfx_t'(v >>> (FX_FRAC - M_FRAC));
  endfunction

  function automatic fx_t fx_from_int(input int v);
    return fx_t'(v) <<< FX_FRAC;
  endfunction

  function automatic fx_t fx_sqrt(input fx_t a);
    logic [FX_W+FX_FRAC-1:0] rem, res, bitv;
    if (a <= 0) return '0;
    rem = (FX_W+FX_FRAC)'(a) << FX_FRAC;
    res = '0;
    for (int i = (FX_W+FX_FRAC)/2 - 1; i >= 0; i--) begin
      bitv = (FX_W+FX_FRAC)'(1) << (2*i);
      if (rem >= res + bitv) begin
        rem = rem - (res + bitv);
        res = (res >> 1) + bitv;
      end else begin
        res = res >> 1;
      end
    end
    return fx_t'(res);
  endfunction

  // exp(-u) for u >= 0 (u < 0 is treated as 0)
  function automatic fx_t fx_exp_neg(input fx_t u);
    fx_t v, y, t;
    int  ip;
    if (u <= 0) return FX_ONE;
    v  = fx_mul(u, FX_LOG2E);
    if ((v >>> FX_FRAC) >= 62) return '0;
    ip = int'(v >>> FX_FRAC);
    y  = fx_mul(v & fx_t'(64'hFFFF_FFFF), FX_LN2);   // fractional part times ln 2
    t  = FX_ONE;
    for (int j = 7; j >= 1; j--) t = FX_ONE - fx_mul(y, t) / j;
    return t >>> ip;
  endfunction

  // natural logarithm of x > 0 (x <= 0 returns a large negative number)
  function automatic fx_t fx_ln(input fx_t x);
    int  p;
    fx_t m, f, r;
    if (x <= 0) return -FX_MAX;
    p = 0;
    for (int i = 0; i < FX_W; i++) if (x[i]) p = i;
    if (p >= FX_FRAC) m = x >>> (p - FX_FRAC);
    else              m = x <<< (FX_FRAC - p);
    f = m - FX_ONE;
    r = fx_t'(64'sd138119491);                         //  0.03215845
    r = fx_t'(-64'sd584385061)  + fx_mul(f, r);        // -0.13606275
    r = fx_t'(64'sd1243284713)  + fx_mul(f, r);        //  0.28947478
    r = fx_t'(-64'sd2112732896) + fx_mul(f, r);        // -0.49190896
    r = fx_t'(64'sd4292800743)  + fx_mul(f, r);        //  0.99949556
    return fx_t'(p - FX_FRAC) * FX_LN2 + fx_mul(f, r);
  endfunction

  // standard normal cumulative distribution Phi(z)
  function automatic fx_t fx_phi(input fx_t z);
    fx_t x, t, poly, erfv;
    x    = fx_mul((z < 0) ? -z : z, FX_INV_SQRT2);
    t    = fx_div(FX_ONE, FX_ONE + fx_mul(fx_t'(64'sd1406993061), x));   // p = 0.3275911
    poly = fx_t'(64'sd4558701605);                                       //  1.061405429
    poly = fx_t'(-64'sd6241240432) + fx_mul(t, poly);                    // -1.453152027
    poly = fx_t'(64'sd6104925532)  + fx_mul(t, poly);                    //  1.421413741
    poly = fx_t'(-64'sd1221904177) + fx_mul(t, poly);                    // -0.284496736
    poly = fx_t'(64'sd1094484764)  + fx_mul(t, poly);                    //  0.254829592
    poly = fx_mul(t, poly);
    erfv = FX_ONE - fx_mul(poly, fx_exp_neg(fx_mul(x, x)));
    return (z < 0) ? (FX_ONE - erfv) >>> 1 : (FX_ONE + erfv) >>> 1;
  endfunction

  // digamma psi(x) for x > 0
  function automatic fx_t fx_digamma(input fx_t x_in);
    fx_t x, acc, inv, inv2;
    x   = (x_in < (fx_t'(1) <<< 12)) ? (fx_t'(1) <<< 12) : x_in;
    acc = '0;
    for (int i = 0; i < 6; i++) begin
      if (x < fx_from_int(6)) begin
        acc = acc - fx_div(FX_ONE, x);
        x   = x + FX_ONE;
      end
    end
    inv  = fx_div(FX_ONE, x);
    inv2 = fx_mul(inv, inv);
    return acc + fx_ln(x) - (inv >>> 1) - inv2 / 12 + fx_mul(inv2, inv2) / 120;
  endfunction

endpackage
