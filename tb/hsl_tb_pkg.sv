// hsl_tb_pkg: reference models shared by the emulator testbenches.
//
// step_resp() is a synthetic channel-plus-CTLE step response: zero before a
// flight delay TD, then a smooth second-order rise
// r(x) = 1 - (1 + x/TAU1) exp(-x/TAU1) to a DC gain that grows with the CTLE
// setting, plus a peaking term r(x) exp(-x/TAU2) that is strongest for low
// settings. Its shape
// resembles a lossy backplane channel followed by a CTLE with an adjustable
// zero; measured channel data are not used.
//
// tap_domain() gives the trimmed window of ADE tap k (0-based) for a TX clock
// of period T and peak jitter J: k*(T-J) <= t - t_k <= (k+1)*(T+J), and the
// smallest power-of-two segment width that covers it with nseg segments.
// coef() returns the offset (value at the segment start, Q2.16) and the chord
// slope (Q2.16 per fs, scaled by 2^slope_frac) of segment j; the offset is
// lowered by half the chord's sag at the segment midpoint.
//
// pwl_eval() is an integer model of one PWL table lookup, written from the
// formula, used to predict the RTL bit for bit.
//
// dco_period_fs() is the DCO transfer function T = 1/(alpha + beta*n) with
// f(1000) = 7.6 GHz and f(8192) = 8.0 GHz.
package hsl_tb_pkg;

  localparam real TD   = 4000.0;   // ps
  localparam real TAU1 = 30.0;     // ps
  localparam real TAU2 = 180.0;    // ps

  function automatic real step_resp(int s, real t_fs);
    real x, dc, pk, r;
    x  = (t_fs / 1000.0) - TD;
    if (x <= 0.0) return 0.0;
    dc = 0.17 + 0.052 * s;
    pk = 0.45 * (1.0 - dc);
    r  = 1.0 - (1.0 + x / TAU1) * $exp(-x / TAU1);
    return dc * r + pk * r * $exp(-x / TAU2);
  endfunction

  function automatic void tap_domain(int k, longint T, longint J, int nseg,
                                     output longint tau0, output int shift);
    longint lo, hi, w;
    lo = k * (T - J);
    hi = (k + 1) * (T + J);
    shift = 0;
    w = 1;
    while (w * nseg < hi - lo) begin
      w = w * 2;
      shift++;
    end
    tau0 = lo;
  endfunction

  function automatic void coef(int s, longint tau0, int shift, int j, int slope_frac,
                               output longint a, output longint b);
    real t0, t1, f0, f1, w;
    w  = real'(longint'(1) << shift);
    t0 = real'(tau0) + j * w;
    t1 = t0 + w;
    f0 = step_resp(s, t0);
    f1 = step_resp(s, t1);
    // lower the chord by half its sag at the midpoint, which splits the
    // approximation error evenly between the ends and the middle
    f0 = f0 - 0.5 * ((f0 + f1) / 2.0 - step_resp(s, (t0 + t1) / 2.0));
    a  = longint'($floor(f0 * 65536.0 + 0.5));
    b  = longint'($floor((f1 - f0) * 65536.0 / w * real'(longint'(1) << slope_frac) + 0.5));
  endfunction

  // Integer model of one table evaluation (before output saturation).
  function automatic longint pwl_eval(longint x, longint tau0, int shift, int nseg,
                                      longint a[], longint b[], int slope_frac);
    longint d, k, f;
    d = x - tau0;
    if (d < 0) begin
      k = 0; f = 0;
    end else begin
      k = d >>> shift;
      if (k >= nseg) begin
        k = nseg - 1;
        f = longint'(1) << shift;
      end else
        f = d - (k << shift);
    end
    return a[k] + ((b[k] * f) >>> slope_frac);
  endfunction

  function automatic real dco_freq_ghz(real n);
    return 7.6 + (n - 1000.0) * 0.4 / 7192.0;
  endfunction

  function automatic real dco_period_fs(real n);
    return 1.0e6 / dco_freq_ghz(n);
  endfunction

endpackage
