// stac_a2_pkg: types, sizes and arithmetic shared by every block of the
// streaming STAC-A2 (Heston QE + Longstaff-Schwartz path reduction) engine.
//
// Numbers: every real quantity is a 64-bit signed fixed-point value with
// FX_F = 40 fraction bits (Q24.40: range about +/-8.4e6, resolution 9.1e-13).
// The published design computes in IEEE double (or single) precision; this
// RTL uses fixed point instead so that every operator is plain integer
// logic. Words stay 64 bits wide, so the memory layout (two 64-bit data
// points per element, eight data points per 512-bit memory word) is the
// same as with doubles.
//
// The functions below are combinational and synthesizable (fixed loop
// bounds). They are written for clarity, not timing: a production build
// would pipeline each operator, which changes latency but not the streaming
// rate of one element per cycle.
//   fx_mul  : a*b, product truncated toward minus infinity
//   fx_div  : a/b, quotient truncated toward zero; b == 0 saturates
//   fx_sqrt : digit-by-digit square root, 0 for a <= 0
//   fx_exp  : 2^n * e^r range reduction, Horner Taylor series (14 terms)
//   fx_ln   : ln(2^n * m) = n ln2 + 2 atanh((m-1)/(m+1)), 12 odd terms
//   fx_ncdf : standard normal CDF, Abramowitz & Stegun 26.2.17 (|err| < 7.5e-8)
package stac_a2_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned FX_W      = 64;   // one data point
  localparam int unsigned FX_F      = 40;   // fraction bits
  localparam int unsigned MEM_W     = 512;  // memory word (HBM port width)
  localparam int unsigned PTS_PER_WORD  = MEM_W / FX_W;  // 8 data points
  localparam int unsigned ELEMS_PER_WORD = PTS_PER_WORD / 2; // 4 elements
  localparam int unsigned ADDR_W    = 28;   // 512-bit word address (16 GiB)
  localparam int unsigned CNT_W     = 32;   // loop counters / run-time sizes

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic [MEM_W-1:0]       mem_word_t;
  typedef logic [ADDR_W-1:0]      mem_addr_t;

  localparam fx_t FX_ONE  = fx_t'(64'sd1 <<< FX_F);
  localparam fx_t FX_MAX  = fx_t'({1'b0, {(FX_W-1){1'b1}}});
  localparam fx_t FX_MIN  = fx_t'({1'b1, {(FX_W-1){1'b0}}});
  localparam real FX_SCALE = 1099511627776.0;  // 2**FX_F

  localparam fx_t FX_LN2         = fx_t'(longint'(0.693147180559945309 * FX_SCALE));
  localparam fx_t FX_LOG2E       = fx_t'(longint'(1.442695040888963407 * FX_SCALE));
  localparam fx_t FX_INV_SQRT2PI = fx_t'(longint'(0.398942280401432678 * FX_SCALE));
  localparam fx_t FX_PSI_C       = fx_t'(longint'(1.5 * FX_SCALE));  // Andersen's psi_c
  // Abramowitz & Stegun 26.2.17 coefficients
  localparam fx_t NC_P  = fx_t'(longint'(0.2316419 * FX_SCALE));
  localparam fx_t NC_B1 = fx_t'(longint'(0.319381530 * FX_SCALE));
  localparam fx_t NC_B2 = fx_t'(longint'(-0.356563782 * FX_SCALE));
  localparam fx_t NC_B3 = fx_t'(longint'(1.781477937 * FX_SCALE));
  localparam fx_t NC_B4 = fx_t'(longint'(-1.821255978 * FX_SCALE));
  localparam fx_t NC_B5 = fx_t'(longint'(1.330274429 * FX_SCALE));

  // ------------------------------------------------- per-asset Heston set
  // Pre-computed by the host from (kappa, theta, xi, rho, r, dt, S0, V0):
  //   e_kdt = exp(-kappa dt)
  //   c1    = xi^2 e_kdt (1 - e_kdt) / kappa
  //   c2    = theta xi^2 (1 - e_kdt)^2 / (2 kappa)
  //   k0..k4: Andersen's log-price constants with gamma1 = gamma2 = 1/2,
  //           k0 also carrying the drift r dt
  typedef struct packed {
    fx_t theta;
    fx_t e_kdt;
    fx_t c1;
    fx_t c2;
    fx_t k0;
    fx_t k1;
    fx_t k2;
    fx_t k3;
    fx_t k4;
    fx_t v0;      // initial variance
    fx_t lns0;    // initial log price
  } heston_cfg_t;

  // Position of one element in the loop nest group > asset > timestep > path.
  typedef struct packed {
    logic [CNT_W-1:0] group;       // path group (batch) index
    logic [15:0]      asset;
    logic [15:0]      step;        // timestep
    logic [15:0]      path;        // path within the group
    logic [15:0]      group_paths; // number of paths in this group
    logic             first_asset; // asset == 0
    logic             first_step;  // step == 0
    logic             group_end;   // last element of the group
    logic             run_end;     // last element of the run
  } tag_t;

  // One input element: two data points, in memory as {zx, zv}.
  typedef struct packed {
    fx_t zx;   // normal draw for the log price
    fx_t zv;   // normal draw for the variance
  } elem_t;

  // ------------------------------------------------------------ arithmetic
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = 128'(signed'(a)) * 128'(signed'(b));
    p = p >>> FX_F;
    return fx_t'(p);
  endfunction

  function automatic fx_t fx_div(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] n, q;
    if (b == '0) return (a < 0) ? FX_MIN : FX_MAX;
    n = 128'(signed'(a)) <<< FX_F;
    q = n / 128'(signed'(b));
    if (q > 128'(signed'(FX_MAX))) return FX_MAX;
    if (q < 128'(signed'(FX_MIN))) return FX_MIN;
    return fx_t'(q);
  endfunction

  function automatic fx_t fx_sqrt(fx_t a);
    logic [2*FX_W-1:0] rem, root, trial, x;
    if (a <= 0) return '0;
    x    = 128'(a) << FX_F;
    rem  = '0;
    root = '0;
    for (int i = FX_W - 1; i >= 0; i--) begin
      rem   = (rem << 2) | ((x >> (2*i)) & 128'd3);
      trial = (root << 2) | 128'd1;
      root  = root << 1;
      if (rem >= trial) begin
        rem  = rem - trial;
        root = root | 128'd1;
      end
    end
    return fx_t'(root);
  endfunction

  function automatic fx_t fx_exp(fx_t x);
    fx_t y, f, r, acc;
    logic signed [FX_W-1:0] n;
    if (x < -fx_t'(28 <<< FX_F)) return '0;
    if (x >  fx_t'(15 <<< FX_F)) return FX_MAX;
    y = fx_mul(x, FX_LOG2E);
    n = y >>> FX_F;                 // floor
    f = y - (n <<< FX_F);           // [0, 1)
    r = fx_mul(f, FX_LN2);          // [0, ln 2)
    acc = FX_ONE;
    for (int k = 14; k >= 1; k--)
      acc = FX_ONE + fx_mul(r, acc) / fx_t'(k);
    if (n >= 0) return acc <<< n;
    return acc >>> (-n);
  endfunction

  function automatic fx_t fx_ln(fx_t x);
    int  msb;
    fx_t m, t, t2, acc, n;
    if (x <= 0) return FX_MIN;
    msb = 0;
    for (int i = 0; i < FX_W - 1; i++)
      if (x[i]) msb = i;
    if (msb >= int'(FX_F)) m = x >>> (msb - int'(FX_F));
    else                   m = x <<< (int'(FX_F) - msb);
    n   = fx_t'(msb) - fx_t'(FX_F);
    t   = fx_div(m - FX_ONE, m + FX_ONE);
    t2  = fx_mul(t, t);
    acc = FX_ONE / fx_t'(23);
    for (int k = 10; k >= 0; k--)
      acc = FX_ONE / fx_t'(2*k + 1) + fx_mul(t2, acc);
    return n * FX_LN2 + fx_mul(t <<< 1, acc);
  endfunction

  function automatic fx_t fx_ncdf(fx_t z);
    fx_t az, t, poly, pdf, tail;
    az   = (z < 0) ? -z : z;
    t    = fx_div(FX_ONE, FX_ONE + fx_mul(NC_P, az));
    poly = fx_mul(t, NC_B5);
    poly = fx_mul(t, NC_B4 + poly);
    poly = fx_mul(t, NC_B3 + poly);
    poly = fx_mul(t, NC_B2 + poly);
    poly = fx_mul(t, NC_B1 + poly);
    pdf  = fx_mul(FX_INV_SQRT2PI, fx_exp(-(fx_mul(az, az) >>> 1)));
    tail = fx_mul(pdf, poly);          // 1 - Phi(|z|)
    return (z < 0) ? tail : FX_ONE - tail;
  endfunction

  // Ratio of two Q80 quantities (full-width products of Q40 values) as a
  // Q40 value, saturating; used where both operands are small and rounding
  // them to Q40 first would lose most of their significant bits.
  function automatic fx_t fx_ratio_q80(logic signed [2*FX_W-1:0] num,
                                       logic signed [2*FX_W-1:0] den);
    logic signed [3*FX_W-1:0] q;
    if (den == '0) return (num < 0) ? FX_MIN : FX_MAX;
    q = (192'(num) <<< FX_F) / 192'(den);
    if (q > 192'(signed'(FX_MAX))) return FX_MAX;
    if (q < 192'(signed'(FX_MIN))) return FX_MIN;
    return fx_t'(q);
  endfunction

  // Andersen QE variance step: next variance from the current one, the
  // asset's constants and one standard normal draw zv (uniform U = Phi(zv)
  // in the exponential branch).
  function automatic fx_t qe_variance(fx_t v, fx_t zv, heston_cfg_t c);
    fx_t m, psi, inv, b2, b, p, u, zb;
    logic signed [2*FX_W-1:0] s2_w, m2_w;   // Q80
    m    = c.theta + fx_mul(v - c.theta, c.e_kdt);
    s2_w = 128'(signed'(v)) * 128'(signed'(c.c1)) + (128'(signed'(c.c2)) <<< FX_F);
    m2_w = 128'(signed'(m)) * 128'(signed'(m));
    psi  = fx_ratio_q80(s2_w, m2_w);                 // s^2 / m^2
    if (psi <= FX_PSI_C) begin
      inv = fx_ratio_q80(m2_w <<< 1, s2_w);         // 2 / psi
      b2  = inv - FX_ONE + fx_mul(fx_sqrt(inv), fx_sqrt(inv - FX_ONE));
      b   = fx_sqrt(b2);
      zb  = b + zv;
      // a (b + zv)^2 with a = m / (1 + b^2), multiplied before dividing so
      // that the small factor a is never rounded on its own
      return fx_div(fx_mul(m, fx_mul(zb, zb)), FX_ONE + b2);
    end else begin
      p = fx_div(psi - FX_ONE, psi + FX_ONE);
      u = fx_ncdf(zv);
      if (u <= p) return '0;
      // ln((1-p)/(1-u)) / beta with beta = (1-p)/m
      return fx_div(fx_mul(m, fx_ln(fx_div(FX_ONE - p, FX_ONE - u))), FX_ONE - p);
    end
  endfunction

  // Andersen QE log-price step (gamma1 = gamma2 = 1/2).
  function automatic fx_t qe_log_price(fx_t lnx, fx_t v, fx_t v_next, fx_t zx,
                                       heston_cfg_t c);
    fx_t drift, var_term;
    drift    = c.k0 + fx_mul(c.k1, v) + fx_mul(c.k2, v_next);
    var_term = fx_mul(c.k3, v) + fx_mul(c.k4, v_next);
    return lnx + drift + fx_mul(fx_sqrt(var_term), zx);
  endfunction

endpackage
