// plugin_ref_pkg: real-number (double precision) reference of the PLUGIN
// bandwidth selector, used by the testbenches to check the hardware.
// ref_h follows Algorithm 1 of the plug-in method literally, with the full
// double sums over all (i, j); with zscore set the data are first
// standardised and h is scaled back by sigma. gen_sample draws a sample of
// a two-component normal mixture (approximated by sums of uniforms).
package plugin_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic real k6(real x);
    real x2 = x * x;
    return (x2 * x2 * x2 - 15.0 * x2 * x2 + 45.0 * x2 - 15.0) * $exp(-x2 / 2.0) / $sqrt(2.0 * PI);
  endfunction

  function automatic real k4(real x);
    real x2 = x * x;
    return (x2 * x2 - 6.0 * x2 + 3.0) * $exp(-x2 / 2.0) / $sqrt(2.0 * PI);
  endfunction

  function automatic real ref_h(real xs[], int n, bit zscore);
    real sx = 0.0, sxx = 0.0, v, sd, mu, p8, g1, p6, g2, p4, h, s;
    real z[];
    z = new[n];
    for (int i = 0; i < n; i++) begin sx += xs[i]; sxx += xs[i] * xs[i]; end
    v  = sxx / (n - 1) - sx * sx / (real'(n) * (n - 1));
    sd = $sqrt(v);
    mu = sx / n;
    for (int i = 0; i < n; i++) z[i] = zscore ? (xs[i] - mu) / sd : xs[i];
    p8 = 105.0 / (32.0 * $sqrt(PI) * ((zscore ? 1.0 : sd) ** 9.0));
    g1 = ((30.0 / $sqrt(2.0 * PI)) / (p8 * n)) ** (1.0 / 9.0);
    s = 0.0;
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) s += k6((z[i] - z[j]) / g1);
    p6 = s / (real'(n) * n * (g1 ** 7.0));
    g2 = ((-6.0 / $sqrt(2.0 * PI)) / (p6 * n)) ** (1.0 / 7.0);
    s = 0.0;
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) s += k4((z[i] - z[j]) / g2);
    p4 = s / (real'(n) * n * (g2 ** 5.0));
    h  = ((1.0 / (2.0 * $sqrt(PI))) / (p4 * n)) ** 0.2;
    return zscore ? h * sd : h;
  endfunction

  // approx. normal: 0.6 N(0, 1) + 0.4 N(2.5, 0.5^2), times spread, plus offset
  function automatic real gen_sample(real spread, real offset);
    real u = 0.0;
    for (int q = 0; q < 12; q++) u += real'($urandom_range(0, 1000000)) / 1000000.0;
    u -= 6.0;
    if ($urandom_range(0, 9) < 6) return offset + spread * u;
    else return offset + spread * (2.5 + 0.5 * u);
  endfunction

endpackage
