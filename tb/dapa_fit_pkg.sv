// dapa_fit_pkg: testbench-side generation of DAPA tables, in real arithmetic.
//
// For a function (GELU, exp, GELU derivative) and an assumed input density it
// places the N-1 knots at the quantiles F^-1(n/N) and fits one line per
// segment by density-weighted least squares on 256 points, the outer
// segments limited to [-4, 4] (GELU, GELU') or [-12, 0] (exp). Results are
// rounded to a 16-bit format with fq fraction bits. Assumed densities, a
// stand-in for ones measured on a network: Normal(-0.5, 1) for GELU inputs,
// half-normal with sigma 2.5 for the softmax differences x - x_max <= 0.
package dapa_fit_pkg;
  import dapa_pkg::*;

  localparam int NSEG = 16;
  localparam real GMU  = -0.5;
  localparam real GSIG = 1.0;
  localparam real ESIG = 2.5;

  typedef int knots_t [NSEG-1];
  typedef int coefs_t [NSEG];

  function automatic real gelu(real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction

  function automatic real dgelu(real x);
    real u, t;
    u = 0.7978845608 * (x + 0.044715 * x * x * x);
    t = $tanh(u);
    return 0.5 * (1.0 + t) + 0.5 * x * (1.0 - t * t) * 0.7978845608 * (1.0 + 0.134145 * x * x);
  endfunction

  function automatic real fref(func_e f, real x);
    case (f)
      FN_GELU:  return gelu(x);
      FN_DGELU: return dgelu(x);
      default:  return $exp(x);
    endcase
  endfunction

  // standard normal CDF (Abramowitz-Stegun 7.1.26 for erf)
  function automatic real phi(real z);
    real x, t, y;
    x = (z < 0.0 ? -z : z) / 1.4142135624;
    t = 1.0 / (1.0 + 0.3275911 * x);
    y = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t
               - 0.284496736) * t + 0.254829592) * t * $exp(-x * x);
    return (z < 0.0) ? 0.5 * (1.0 - y) : 0.5 * (1.0 + y);
  endfunction

  function automatic real pdf(int d, real x);
    if (d == 0) return $exp(-0.5 * ((x - GMU) / GSIG) ** 2) / (GSIG * 2.5066282746);
    if (x > 0.0) return 0.0;
    return 2.0 * $exp(-0.5 * (x / ESIG) ** 2) / (ESIG * 2.5066282746);
  endfunction

  function automatic real cdf(int d, real x);
    if (d == 0) return phi((x - GMU) / GSIG);
    if (x > 0.0) return 1.0;
    return 2.0 * phi(x / ESIG);
  endfunction

  function automatic real inv_cdf(int d, real p);
    real lo, hi, mid;
    lo = -40.0; hi = 5.0;
    for (int i = 0; i < 80; i++) begin
      mid = 0.5 * (lo + hi);
      if (cdf(d, mid) < p) lo = mid; else hi = mid;
    end
    return 0.5 * (lo + hi);
  endfunction

  function automatic int qfix(real v, int fq);
    int r;
    r = int'($floor(v * real'(1 << fq) + 0.5));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  // Standard normal sample from twelve uniforms.
  function automatic real gauss();
    real g;
    g = 0.0;
    for (int j = 0; j < 12; j++) g += real'($urandom_range(1000000)) / 1000000.0;
    return g - 6.0;
  endfunction

  function automatic void fit(func_e f, int fq, output knots_t k, output coefs_t a, output coefs_t b);
    int  d;
    real lo_lim, hi_lim, lo, hi, sw, sx, sxx, sy, sxy, det, x, w, y, ar, br;
    real kr [NSEG+1];
    d = (f == FN_EXP) ? 1 : 0;
    lo_lim = (f == FN_EXP) ? -12.0 : -4.0;
    hi_lim = (f == FN_EXP) ? 0.0 : 4.0;
    for (int n = 1; n < NSEG; n++) begin
      kr[n] = inv_cdf(d, real'(n) / real'(NSEG));
      k[n-1] = qfix(kr[n], fq);
    end
    kr[0] = lo_lim; kr[NSEG] = hi_lim;
    for (int n = 0; n < NSEG; n++) begin
      lo = kr[n] < lo_lim ? lo_lim : kr[n];
      hi = kr[n+1] > hi_lim ? hi_lim : kr[n+1];
      sw = 0; sx = 0; sxx = 0; sy = 0; sxy = 0;
      for (int i = 0; i < 256; i++) begin
        x = lo + (hi - lo) * (real'(i) + 0.5) / 256.0;
        w = pdf(d, x);
        y = fref(f, x);
        sw += w; sx += w * x; sxx += w * x * x; sy += w * y; sxy += w * x * y;
      end
      det = sw * sxx - sx * sx;
      ar = (sw * sxy - sx * sy) / det;
      br = (sxx * sy - sx * sxy) / det;
      a[n] = qfix(ar, fq);
      b[n] = qfix(br, fq);
    end
  endfunction

  // Bit-exact reference of the engine for one table.
  function automatic int eval_table(const ref knots_t k, const ref coefs_t a,
                                    const ref coefs_t b, int x, int fq);
    int seg;
    longint p, q;
    seg = 0;
    for (int i = 0; i < NSEG - 1; i++) if (x > k[i]) seg++;
    p = longint'(x) * longint'(a[seg]);
    q = p / (64'sd1 <<< fq);
    if (p < 0 && q * (64'sd1 <<< fq) != p) q--;
    q += longint'(b[seg]);
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

endpackage
