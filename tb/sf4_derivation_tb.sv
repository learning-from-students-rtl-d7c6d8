// sf4_derivation_tb: recomputes the SF4 values from their definition and
// compares them with what sf4_lut stores, for nu = 3, 4, 5 and 6.
//
// The definition: with delta = (1/32 + 1/30) / 2, take eight evenly spaced
// probabilities from delta to 1/2 and eight more from 1/2 to 1 - delta
// (1/2 shared), 16 in all. Map each through the quantile function of the
// Student's t-distribution with nu degrees of freedom, and divide by the
// largest magnitude. Here the t-distribution CDF is integrated numerically
// (composite Simpson rule on the density) and inverted by bisection, all
// in real arithmetic, so the check is independent of the stored table.
// A stored value passes if it lies within 0.001 of the derived one: the
// table holds three decimals, and Q2.14 adds at most 0.00004.
module sf4_derivation_tb;
  int checks = 0, failures = 0;
  logic [3:0] code;
  logic signed [15:0] scale = 16'sd1;
  logic signed [15:0] v [4];
  logic signed [31:0] d [4];

  sf4_lut #(.NU(3)) u3 (.code, .scale, .value(v[0]), .deq(d[0]));
  sf4_lut #(.NU(4)) u4 (.code, .scale, .value(v[1]), .deq(d[1]));
  sf4_lut #(.NU(5)) u5 (.code, .scale, .value(v[2]), .deq(d[2]));
  sf4_lut #(.NU(6)) u6 (.code, .scale, .value(v[3]), .deq(d[3]));

  localparam real PI = 3.14159265358979323846;

  // Gamma(n/2) for a positive integer n.
  function automatic real gamma_half(int n);
    real g = (n % 2 == 0) ? 1.0 : $sqrt(PI);
    for (int k = (n % 2 == 0) ? 2 : 1; k < n; k += 2) g = g * (k / 2.0);
    return g;
  endfunction

  function automatic real pdf(real t, int nu);
    real c = gamma_half(nu + 1) / ($sqrt(nu * PI) * gamma_half(nu));
    return c * $pow(1.0 + t * t / nu, -(nu + 1) / 2.0);
  endfunction

  // P(X <= x) for x >= 0, Simpson's rule on [0, x].
  function automatic real cdf_pos(real x, int nu);
    int  n = 2000;
    real h = x / n;
    real s = pdf(0.0, nu) + pdf(x, nu);
    for (int i = 1; i < n; i++) s += ((i % 2) ? 4.0 : 2.0) * pdf(i * h, nu);
    return 0.5 + s * h / 3.0;
  endfunction

  // Quantile for p >= 1/2 by bisection; symmetric for p < 1/2.
  function automatic real quantile(real p, int nu);
    real lo = 0.0, hi = 50.0, q;
    bit  neg = (p < 0.5);
    q = neg ? 1.0 - p : p;
    if (q == 0.5) return 0.0;
    repeat (50) begin
      real mid = (lo + hi) / 2.0;
      if (cdf_pos(mid, nu) < q) lo = mid; else hi = mid;
    end
    return neg ? -(lo + hi) / 2.0 : (lo + hi) / 2.0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real delta, p [16], s [16], smax, worst;
    delta = (1.0 / 32.0 + 1.0 / 30.0) / 2.0;
    for (int i = 0; i < 8; i++) p[i] = delta + i * (0.5 - delta) / 7.0;
    for (int i = 0; i < 9; i++) p[7 + i] = 0.5 + i * (0.5 - delta) / 8.0;
    for (int k = 0; k < 4; k++) begin
      int nu;
      nu = k + 3;
      worst = 0.0;
      for (int i = 0; i < 16; i++) s[i] = quantile(p[i], nu);
      smax = 0.0;
      for (int i = 0; i < 16; i++) if ((s[i] < 0 ? -s[i] : s[i]) > smax) smax = (s[i] < 0 ? -s[i] : s[i]);
      for (int i = 0; i < 16; i++) begin
        real want, got, err;
        code = 4'(i);
        #1;
        want = s[i] / smax;
        got  = v[k] / 16384.0;
        err  = (got > want) ? got - want : want - got;
        if (err > worst) worst = err;
        checks++;
        if (err > 0.001) begin
          failures++;
          $display("nu=%0d code %0d: stored %f, derived %f", nu, i, got, want);
        end
      end
      $display("nu=%0d: largest difference stored vs derived %f", nu, worst);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
