// grng_polar_stats_tb: statistical run of the polar Gaussian generator at its
// default parameters: 1,000,000 alpha and 1,000,000 beta samples, the
// sample size used for evaluating the generator.
//
// For each set it computes mean, variance, skewness and kurtosis and a
// chi-square goodness-of-fit statistic against the standard normal over 18
// bins (16 bins of width 0.5 on [-4, 4] plus two tails; expected counts from
// the normal CDF, integrated numerically here). The verdict at the 5%
// significance level (critical value 27.587 for 17 degrees of freedom) is
// printed for each set; a set is counted as a failure only when it is
// rejected at the 0.1% level (40.790), i.e. when the distribution is
// grossly wrong, since even an ideal source is rejected at 5% in one run of
// twenty. It also estimates the Kolmogorov-Smirnov distance D between each
// set and the normal CDF on a grid of 4800 bins of width 0.0025 over
// [-6, 6] (a binned estimate, slightly below the exact D); the 5% critical
// value for n = 1,000,000 is 1.358/sqrt(n) = 0.001358, and a set is counted
// as a failure above the 0.1% value 1.949/sqrt(n) = 0.001949. On the same
// grid it estimates the Anderson-Darling statistic A2 against the fully
// specified N(0, 1) (5% critical value 2.492, failure above the 0.1% value
// 5.97). The run also
// counts accepted and rejected pairs and checks that fp_error never rises.
module grng_polar_stats_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;

  localparam int  SAMPLES = 1000000;
  localparam int  NBINS   = 18;
  localparam real CHI2_5PCT_17   = 27.587;
  localparam real CHI2_0P1PCT_17 = 40.790;
  localparam int  KBINS = 4800;            // KS grid: width 0.0025 on [-6, 6]
  localparam real KS_5PCT   = 0.001358;
  localparam real KS_0P1PCT = 0.001949;
  localparam real AD_5PCT   = 2.492;       // N(0,1) fully specified
  localparam real AD_0P1PCT = 5.97;

  logic clock = 0, clk_en = 1, aclr = 1;
  fp32_t alpha, beta;
  logic valid, fp_error;
  int checks = 0, failures = 0;

  grng_polar dut (.clock, .clk_en, .aclr, .coeff(MSRG_POLY32_COEFF), .alpha, .beta, .valid, .fp_error);
  always #5 clock = ~clock;

  initial begin
    repeat (2 * SAMPLES) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // standard normal density and CDF (Simpson's rule from 0)
  function automatic real pdf(input real x);
    return $exp(-0.5 * x * x) / $sqrt(2.0 * 3.14159265358979);
  endfunction
  function automatic real cdf(input real x);
    real h, s, ax;
    int  n;
    ax = x < 0 ? -x : x;
    n  = 2000;
    h  = ax / n;
    s  = pdf(0.0) + pdf(ax);
    for (int i = 1; i < n; i++) s += ((i % 2) ? 4.0 : 2.0) * pdf(i * h);
    s = s * h / 3.0;
    return x < 0 ? 0.5 - s : 0.5 + s;
  endfunction

  function automatic int bin_of(input real x);
    if (x < -4.0) return 0;
    if (x >= 4.0) return NBINS - 1;
    return 1 + int'($floor((x + 4.0) / 0.5));
  endfunction

  longint cnt_a [NBINS], cnt_b [NBINS];
  int     fine_a [KBINS + 2], fine_b [KBINS + 2];   // [0] below -6, [KBINS+1] above 6
  real    phi_edge [KBINS + 1];                     // normal CDF at the grid edges
  real    s1a = 0, s2a = 0, s3a = 0, s4a = 0, s1b = 0, s2b = 0, s3b = 0, s4b = 0;
  longint n = 0, n_rej = 0, n_err = 0;
  real    expect_p [NBINS];

  function automatic int fine_of(input real x);
    if (x < -6.0) return 0;
    if (x >= 6.0) return KBINS + 1;
    return 1 + int'($floor((x + 6.0) / 0.0025));
  endfunction

  task automatic ks(input string name, input int fine [KBINS + 2]);
    real    d, f, a2;
    longint c;
    d = 0;
    c = fine[0];
    for (int i = 0; i <= KBINS; i++) begin
      if (i > 0) c += fine[i];
      f = real'(c) / n - phi_edge[i];
      if (f < 0) f = -f;
      if (f > d) d = f;
    end
    $display("%s: Kolmogorov-Smirnov D (binned) %f, at 5%%: %s", name, d, d > KS_5PCT ? "rejected" : "not rejected");
    // Anderson-Darling: n * sum over bins of (Fn - F)^2 / (F (1 - F)) dF
    a2 = 0;
    c  = fine[0];
    for (int i = 1; i < KBINS; i++) begin
      c += fine[i];
      f  = real'(c) / n - phi_edge[i];
      a2 += f * f / (phi_edge[i] * (1.0 - phi_edge[i])) * (phi_edge[i+1] - phi_edge[i-1]) / 2.0;
    end
    a2 = a2 * n;
    $display("%s: Anderson-Darling A2 (binned) %f, at 5%%: %s", name, a2, a2 > AD_5PCT ? "rejected" : "not rejected");
    checks++; if (a2 > AD_0P1PCT) begin failures++; $display("FAIL %s Anderson-Darling rejects normality at 0.1%%", name); end
    checks++; if (d > KS_0P1PCT) begin failures++; $display("FAIL %s KS rejects normality at 0.1%%", name); end
  endtask

  task automatic report(input string name, input longint cnt [NBINS], input real s1, s2, s3, s4);
    real m, v, sk, ku, chi2, e;
    m  = s1 / n;
    v  = s2 / n - m * m;
    sk = (s3 / n - 3 * m * v - m * m * m) / (v * $sqrt(v));
    ku = (s4 / n - 4 * m * s3 / n + 6 * m * m * s2 / n - 3 * m * m * m * m) / (v * v);
    chi2 = 0;
    for (int i = 0; i < NBINS; i++) begin
      e = expect_p[i] * n;
      chi2 += (cnt[i] - e) * (cnt[i] - e) / e;
    end
    $display("%s: n=%0d mean %f var %f skew %f kurtosis %f chi2(17) %f", name, n, m, v, sk, ku, chi2);
    checks++; if (m > 0.005 || m < -0.005)  begin failures++; $display("FAIL %s mean", name); end
    checks++; if (v > 1.01 || v < 0.99)     begin failures++; $display("FAIL %s variance", name); end
    checks++; if (sk > 0.02 || sk < -0.02)  begin failures++; $display("FAIL %s skewness", name); end
    checks++; if (ku > 3.05 || ku < 2.95)   begin failures++; $display("FAIL %s kurtosis", name); end
    $display("%s: chi-square at 5%%: %s", name, chi2 > CHI2_5PCT_17 ? "rejected" : "not rejected");
    checks++; if (chi2 > CHI2_0P1PCT_17)    begin failures++; $display("FAIL %s chi-square rejects normality at 0.1%%", name); end
  endtask

  initial begin
    real a, b;
    for (int i = 0; i < NBINS; i++) begin
      cnt_a[i] = 0; cnt_b[i] = 0;
      expect_p[i] = (i == 0) ? cdf(-4.0) : (i == NBINS - 1) ? 1.0 - cdf(4.0)
                  : cdf(-4.0 + 0.5 * i) - cdf(-4.0 + 0.5 * (i - 1));
    end
    phi_edge[0] = cdf(-6.0);
    for (int i = 1; i <= KBINS; i++) begin
      real lo, h;
      lo = -6.0 + 0.0025 * (i - 1);
      h  = 0.0025 / 8;
      phi_edge[i] = phi_edge[i-1] + h / 3.0 * (pdf(lo) + 4 * pdf(lo + h) + 2 * pdf(lo + 2 * h) + 4 * pdf(lo + 3 * h)
                    + 2 * pdf(lo + 4 * h) + 4 * pdf(lo + 5 * h) + 2 * pdf(lo + 6 * h) + 4 * pdf(lo + 7 * h) + pdf(lo + 8 * h));
    end
    for (int i = 0; i < KBINS + 2; i++) begin
      fine_a[i] = 0; fine_b[i] = 0;
    end
    repeat (2) @(posedge clock);
    #1 aclr = 0;
    repeat (8) @(posedge clock);
    while (n < SAMPLES) begin
      @(posedge clock); #1;
      if (!valid) begin
        n_rej++;
        continue;
      end
      if (fp_error) n_err++;
      a = fp32_to_real(alpha);
      b = fp32_to_real(beta);
      cnt_a[bin_of(a)]++;
      cnt_b[bin_of(b)]++;
      fine_a[fine_of(a)]++;
      fine_b[fine_of(b)]++;
      s1a += a; s2a += a * a; s3a += a * a * a; s4a += a * a * a * a;
      s1b += b; s2b += b * b; s3b += b * b * b; s4b += b * b * b * b;
      n++;
    end
    $display("accepted %0d rejected %0d (rate %f)", n, n_rej, real'(n) / real'(n + n_rej));
    report("alpha", cnt_a, s1a, s2a, s3a, s4a);
    report("beta",  cnt_b, s1b, s2b, s3b, s4b);
    ks("alpha", fine_a);
    ks("beta",  fine_b);
    checks++; if (n_err != 0) begin failures++; $display("FAIL %0d fp_error", n_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
