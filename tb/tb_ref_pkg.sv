// tb_ref_pkg: reference model used by the testbenches.
//
// Double-precision (SystemVerilog real) versions of the Andersen QE variance
// and log-price steps, the normal CDF approximation and the exponential,
// written from the formulas rather than from the RTL, plus helpers to
// convert between real and the 64-bit Q24.40 fixed-point format, to build
// a Heston record from model parameters, and to draw standard normals
// (Box-Muller on $urandom).
package tb_ref_pkg;
  import stac_a2_pkg::*;

  localparam real SCALE = 1099511627776.0;  // 2**40

  typedef struct {
    real kappa, theta, xi, rho, r, dt, s0, v0;
  } heston_t;

  function automatic real fx2r(fx_t x);
    return real'(longint'(x)) / SCALE;
  endfunction

  function automatic fx_t r2fx(real r);
    return fx_t'(longint'(r * SCALE));
  endfunction

  function automatic heston_cfg_t make_cfg(heston_t h);
    heston_cfg_t c;
    real e, k0, k1, k2, k3, k4;
    e  = $exp(-h.kappa * h.dt);
    k0 = -h.rho * h.kappa * h.theta * h.dt / h.xi + h.r * h.dt;
    k1 = 0.5 * h.dt * (h.kappa * h.rho / h.xi - 0.5) - h.rho / h.xi;
    k2 = 0.5 * h.dt * (h.kappa * h.rho / h.xi - 0.5) + h.rho / h.xi;
    k3 = 0.5 * h.dt * (1.0 - h.rho * h.rho);
    k4 = k3;
    c.theta = r2fx(h.theta);
    c.e_kdt = r2fx(e);
    c.c1    = r2fx(h.xi * h.xi * e * (1.0 - e) / h.kappa);
    c.c2    = r2fx(h.theta * h.xi * h.xi * (1.0 - e) * (1.0 - e) / (2.0 * h.kappa));
    c.k0 = r2fx(k0); c.k1 = r2fx(k1); c.k2 = r2fx(k2);
    c.k3 = r2fx(k3); c.k4 = r2fx(k4);
    c.v0   = r2fx(h.v0);
    c.lns0 = r2fx($ln(h.s0));
    return c;
  endfunction

  // Random but plausible Heston parameters; a large vol-of-vol makes the
  // exponential branch of the QE scheme frequent.
  function automatic heston_t rand_heston();
    heston_t h;
    h.kappa = 0.5 + 3.0 * ($urandom % 1000) / 1000.0;
    h.theta = 0.01 + 0.09 * ($urandom % 1000) / 1000.0;
    h.xi    = 0.2 + 1.8 * ($urandom % 1000) / 1000.0;
    h.rho   = -0.9 + 1.2 * ($urandom % 1000) / 1000.0;
    h.r     = 0.01 + 0.04 * ($urandom % 1000) / 1000.0;
    h.dt    = 1.0 / 252.0;
    h.s0    = 50.0 + 100.0 * ($urandom % 1000) / 1000.0;
    h.v0    = 0.005 + 0.1 * ($urandom % 1000) / 1000.0;
    return h;
  endfunction

  function automatic real randn();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic real ref_ncdf(real z);
    real az, t, poly, pdf, tail;
    az   = (z < 0.0) ? -z : z;
    t    = 1.0 / (1.0 + 0.2316419 * az);
    poly = t * (0.319381530 + t * (-0.356563782 + t * (1.781477937
           + t * (-1.821255978 + t * 1.330274429))));
    pdf  = 0.398942280401432678 * $exp(-0.5 * az * az);
    tail = pdf * poly;
    return (z < 0.0) ? tail : 1.0 - tail;
  endfunction

  // Andersen QE variance step; branch: 0 quadratic, 1 exponential.
  function automatic real ref_variance(real v, real zv, heston_cfg_t c,
                                       output int branch);
    real th, e, m, s2, psi, inv, b2, a, b, p, beta, u;
    th  = fx2r(c.theta);
    e   = fx2r(c.e_kdt);
    m   = th + (v - th) * e;
    s2  = v * fx2r(c.c1) + fx2r(c.c2);
    psi = s2 / (m * m);
    if (psi <= 1.5) begin
      branch = 0;
      inv = 2.0 / psi;
      b2  = inv - 1.0 + $sqrt(inv) * $sqrt(inv - 1.0);
      a   = m / (1.0 + b2);
      b   = $sqrt(b2);
      return a * (b + zv) * (b + zv);
    end
    branch = 1;
    p    = (psi - 1.0) / (psi + 1.0);
    beta = (1.0 - p) / m;
    u    = ref_ncdf(zv);
    if (u <= p) return 0.0;
    return $ln((1.0 - p) / (1.0 - u)) / beta;
  endfunction

  function automatic real ref_log_price(real lnx, real v, real vn, real zx,
                                        heston_cfg_t c);
    real w;
    w = fx2r(c.k3) * v + fx2r(c.k4) * vn;
    if (w < 0.0) w = 0.0;
    return lnx + fx2r(c.k0) + fx2r(c.k1) * v + fx2r(c.k2) * vn + $sqrt(w) * zx;
  endfunction

  function automatic bit close(real got, real want, real tol);
    real d;
    d = got - want;
    if (d < 0.0) d = -d;
    return d <= tol * (1.0 + ((want < 0.0) ? -want : want));
  endfunction

  // Whole-run reference. el[(a*nt + t)*np + p] holds the draws of global
  // path p, asset a, timestep t. Returns the kernel's input stream order
  // (group > asset > timestep > path) in stream[] and its output order
  // (group > timestep > path, max over assets of the price) in res[].
  // n_exp counts elements that took the exponential QE branch.
  function automatic void ref_run(heston_cfg_t cfg[], elem_t el[], int na, int nt,
                                  int np, int g, output elem_t stream[$],
                                  output real res[$], output int n_exp);
    real v [], lnx [], mx [];
    int  br, ng, sz, p;
    real vn;
    v   = new[np * na];
    lnx = new[np * na];
    mx  = new[np * nt];
    n_exp = 0;
    stream.delete();
    res.delete();
    for (int a = 0; a < na; a++)
      for (int pp = 0; pp < np; pp++) begin
        v[a*np + pp] = fx2r(cfg[a].v0);
        lnx[a*np + pp] = fx2r(cfg[a].lns0);
      end
    for (int a = 0; a < na; a++)
      for (int t = 0; t < nt; t++)
        for (int pp = 0; pp < np; pp++) begin
          elem_t e;
          real s;
          e  = el[(a*nt + t)*np + pp];
          vn = ref_variance(v[a*np + pp], fx2r(e.zv), cfg[a], br);
          n_exp += br;
          lnx[a*np + pp] = ref_log_price(lnx[a*np + pp], v[a*np + pp], vn, fx2r(e.zx), cfg[a]);
          v[a*np + pp] = vn;
          s = $exp(lnx[a*np + pp]);
          if (a == 0 || s > mx[pp*nt + t]) mx[pp*nt + t] = s;
        end
    ng = (np + g - 1) / g;
    for (int gi = 0; gi < ng; gi++) begin
      sz = (gi == ng - 1) ? np - gi * g : g;
      for (int a = 0; a < na; a++)
        for (int t = 0; t < nt; t++)
          for (int k = 0; k < sz; k++) begin
            p = gi * g + k;
            stream.push_back(el[(a*nt + t)*np + p]);
          end
      for (int t = 0; t < nt; t++)
        for (int k = 0; k < sz; k++) begin
          p = gi * g + k;
          res.push_back(mx[p*nt + t]);
        end
    end
  endfunction

endpackage
