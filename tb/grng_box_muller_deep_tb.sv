// grng_box_muller_deep_tb: the end-to-end test of grng_box_muller_tb
// repeated with deeper units: L_CONV = 2, L_MUL = 3, L_LOG = 5, L_SQRT = 2,
// L_SC = 12. The angle branch (3 + 12 = 15 clocks) is then longer than the
// radius branch (5 + 3 + 2 = 10), the opposite of the default, so the
// radius must be the one delayed; the latency is 2 + 15 + 3 = 20 clocks.
// Everything below is as in grng_box_muller_tb.
//
//
// A cycle-level reference model runs beside the design: two software shift
// registers, U = k/(2^32-1) rounded to binary32, theta = 2*pi*U2 rounded to
// binary32 as the design's correctly rounded multiplier gives it, and
// alpha, beta = sqrt(-2 ln U1) * cos, sin(theta) in double precision. Every
// output must match within the logarithm and sine/cosine units' accuracy.
// clk_en is dropped at random (outputs must hold), aclr is pulsed in mid-run
// (the sequence must restart from the seeds), valid must stay low for the
// fill and high afterwards, and fp_error must never rise. At the end
// it checks the mean, variance, skewness, kurtosis and the alpha-beta
// correlation, and reports a chi-square over the same 18 bins as the polar
// statistics test, and binned Kolmogorov-Smirnov and Anderson-Darling
// statistics on a 0.0025-wide grid; for each test the 5% verdict is printed
// and only a rejection at the 0.1% level counts as a failure.
module grng_box_muller_deep_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;

  localparam int  LATENCY = 20;
  localparam int  SAMPLES = 1000000;
  localparam int  NBINS   = 18;
  localparam real CHI2_5PCT_17   = 27.587;
  localparam real CHI2_0P1PCT_17 = 40.790;
  localparam int  KBINS     = 4800;       // EDF grid: width 0.0025 on [-6, 6]
  localparam real KS_5PCT   = 0.001358;   // 1.358/sqrt(n), n = 1,000,000
  localparam real KS_0P1PCT = 0.001949;
  localparam real AD_5PCT   = 2.492;      // N(0,1) fully specified
  localparam real AD_0P1PCT = 5.97;
  real phi_edge [KBINS + 1];              // normal CDF at the grid edges

  function automatic real npdf(input real x);
    return $exp(-0.5 * x * x) / $sqrt(2.0 * 3.14159265358979);
  endfunction

  function automatic int fine_of(input real x);
    if (x < -6.0) return 0;
    if (x >= 6.0) return KBINS + 1;
    return 1 + int'($floor((x + 6.0) / 0.0025));
  endfunction

  task automatic init_edges();
    phi_edge[0] = 9.8659e-10;             // Phi(-6)
    for (int i = 1; i <= KBINS; i++) begin
      real lo, h, acc;
      lo  = -6.0 + 0.0025 * (i - 1);
      h   = 0.0025 / 8;
      acc = npdf(lo) + npdf(lo + 8 * h);
      for (int k = 1; k < 8; k++) acc += (k % 2 == 1 ? 4 : 2) * npdf(lo + k * h);
      phi_edge[i] = phi_edge[i-1] + h / 3.0 * acc;
    end
  endtask

  // Kolmogorov-Smirnov D and Anderson-Darling A2 from the binned counts;
  // both slightly underestimate the exact statistics
  task automatic edf_tests(input string name, input int fine [KBINS + 2], input longint total, input bit counted);
    real    d, f, a2;
    longint c;
    d  = 0;
    a2 = 0;
    c  = fine[0];
    for (int i = 0; i <= KBINS; i++) begin
      if (i > 0) c += fine[i];
      f = real'(c) / total - phi_edge[i];
      if (i > 0 && i < KBINS)
        a2 += f * f / (phi_edge[i] * (1.0 - phi_edge[i])) * (phi_edge[i+1] - phi_edge[i-1]) / 2.0;
      if (f < 0) f = -f;
      if (f > d) d = f;
    end
    a2 = a2 * total;
    $display("%s: Kolmogorov-Smirnov D (binned) %f, at 5%%: %s", name, d, d > KS_5PCT ? "rejected" : "not rejected");
    $display("%s: Anderson-Darling A2 (binned) %f, at 5%%: %s", name, a2, a2 > AD_5PCT ? "rejected" : "not rejected");
    if (counted) begin
      checks++; if (d > KS_0P1PCT) begin failures++; $display("FAIL %s KS rejects normality at 0.1%%", name); end
      checks++; if (a2 > AD_0P1PCT) begin failures++; $display("FAIL %s Anderson-Darling rejects normality at 0.1%%", name); end
    end
  endtask

  logic clock = 0, clk_en = 0, aclr = 1;
  fp32_t alpha, beta;
  logic valid, fp_error;
  int checks = 0, failures = 0;

  grng_box_muller #(.L_CONV(2), .L_MUL(3), .L_LOG(5), .L_SQRT(2), .L_SC(12)) dut (.clock, .clk_en, .aclr, .coeff(MSRG_POLY32_COEFF), .alpha, .beta, .valid, .fp_error);
  always #5 clock = ~clock;

  initial begin
    repeat (SAMPLES * 3) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { real a, b; } pair_t;

  function automatic logic [31:0] mulx(input logic [31:0] v);
    return {v[30:0], 1'b0} ^ (v[31] ? 32'h0000_0125 : 32'h0);
  endfunction

  function automatic real uni(input logic [31:0] k);
    return fp32_to_real(real_to_fp32(real'(k) / 4294967295.0));
  endfunction

  function automatic pair_t candidate(input logic [31:0] k1, k2);
    pair_t p;
    real r, th;
    r   = $sqrt(-2.0 * $ln(uni(k1)));
    th  = fp32_to_real(real_to_fp32(fp32_to_real(32'h40C9_0FDB) * uni(k2)));
    p.a = r * $cos(th);
    p.b = r * $sin(th);
    return p;
  endfunction

  function automatic logic close(input real got, input real want);
    real err;
    err = got - want;
    if (err < 0) err = -err;
    return err <= 1.0e-6 + 2.0e-6 * (want < 0 ? -want : want);
  endfunction

  function automatic real cdf(input real x);
    real h, acc, t;
    t = x < 0 ? -x : x;
    h = t / 400;
    acc = 0;
    for (int i = 0; i <= 400; i++) begin
      real w;
      w = (i == 0 || i == 400) ? 1 : (i % 2 == 1 ? 4 : 2);
      acc += w * $exp(-0.5 * (i * h) * (i * h));
    end
    acc = acc * h / 3.0 / $sqrt(2.0 * 3.14159265358979);
    return x < 0 ? 0.5 - acc : 0.5 + acc;
  endfunction

  logic [31:0] m1, m2;
  int          n;
  pair_t       q[$];

  task automatic model_reset();
    m1 = 32'h2545_F491; m2 = 32'h9E37_79B9;
    n = 0;
    q.delete();
  endtask

  longint n_out = 0, n_stall = 0, n_reset = 0, cnt_a [NBINS], cnt_b [NBINS];
  real sa [5], sb [5], s_ab = 0;
  int  fine_a [KBINS + 2], fine_b [KBINS + 2];
  fp32_t hold_a, hold_b;
  logic  hold_v;

  function automatic int bin_of(input real x);
    if (x < -4.0) return 0;
    if (x >= 4.0) return NBINS - 1;
    return 1 + int'($floor((x + 4.0) / 0.5));
  endfunction

  task automatic report(input string name, input longint cnt [NBINS], input real s [5]);
    real mean, var_, skew, kurt, chi2, e, lo, hi;
    mean = s[1] / n_out;
    var_ = s[2] / n_out - mean * mean;
    skew = (s[3] / n_out - 3 * mean * s[2] / n_out + 2 * mean * mean * mean) / (var_ * $sqrt(var_));
    kurt = (s[4] / n_out - 4 * mean * s[3] / n_out + 6 * mean * mean * s[2] / n_out - 3 * mean ** 4) / (var_ * var_);
    chi2 = 0;
    for (int i = 0; i < NBINS; i++) begin
      lo = (i == 0) ? -9.0 : -4.0 + 0.5 * (i - 1);
      hi = (i == NBINS - 1) ? 9.0 : -4.0 + 0.5 * i;
      e  = n_out * (cdf(hi) - cdf(lo));
      chi2 += (cnt[i] - e) * (cnt[i] - e) / e;
    end
    $display("%s: mean %f var %f skew %f kurtosis %f chi2(17) %f", name, mean, var_, skew, kurt, chi2);
    $display("%s: chi-square at 5%%: %s", name, chi2 > CHI2_5PCT_17 ? "rejected" : "not rejected");
    checks++; if (mean > 0.01 || mean < -0.01) begin failures++; $display("FAIL %s mean", name); end
    checks++; if (var_ < 0.98 || var_ > 1.02) begin failures++; $display("FAIL %s variance", name); end
    checks++; if (skew > 0.02 || skew < -0.02) begin failures++; $display("FAIL %s skewness", name); end
    checks++; if (kurt < 2.95 || kurt > 3.05) begin failures++; $display("FAIL %s kurtosis", name); end
    checks++; if (chi2 > CHI2_0P1PCT_17) begin failures++; $display("FAIL %s chi-square at 0.1%%", name); end
  endtask

  initial begin
    for (int i = 0; i < NBINS; i++) begin cnt_a[i] = 0; cnt_b[i] = 0; end
    for (int i = 0; i < 5; i++) begin sa[i] = 0; sb[i] = 0; end
    for (int i = 0; i < KBINS + 2; i++) begin fine_a[i] = 0; fine_b[i] = 0; end
    init_edges();
    model_reset();
    repeat (2) @(posedge clock);
    #1 aclr = 0;
    for (int cyc = 0; n_out < SAMPLES; cyc++) begin
      clk_en = ($urandom % 10) != 0;
      hold_a = alpha; hold_b = beta; hold_v = valid;
      if (cyc == 20000) begin
        aclr = 1; #1 aclr = 0;
        model_reset();
        n_reset++;
        checks++;
        if (valid) begin failures++; $display("FAIL valid right after aclr"); end
      end
      @(posedge clock); #1;
      if (!clk_en) begin
        n_stall++;
        checks++;
        if (alpha != hold_a || beta != hold_b || valid != hold_v) begin
          failures++;
          if (failures < 10) $display("FAIL output moved during stall");
        end
        continue;
      end
      q.push_back(candidate(m1, m2));
      m1 = mulx(m1); m2 = mulx(m2);
      n++;
      checks++;
      if (valid != (n >= LATENCY)) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d valid=%b after %0d clocks", cyc, valid, n);
      end
      if (n < LATENCY) continue;
      begin
        pair_t p;
        real ga, gb, pa, pb;
        p  = q.pop_front();
        ga = fp32_to_real(alpha);
        gb = fp32_to_real(beta);
        checks++;
        if (!close(ga, p.a) || !close(gb, p.b)) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d alpha %f want %f beta %f want %f", cyc, ga, p.a, gb, p.b);
        end
        checks++;
        if (fp_error) begin
          failures++;
          if (failures < 10) $display("FAIL fp_error at cycle %0d", cyc);
        end
        n_out++;
        pa = 1; pb = 1;
        for (int i = 1; i < 5; i++) begin pa *= ga; pb *= gb; sa[i] += pa; sb[i] += pb; end
        s_ab += ga * gb;
        cnt_a[bin_of(ga)]++;
        cnt_b[bin_of(gb)]++;
        fine_a[fine_of(ga)]++;
        fine_b[fine_of(gb)]++;
      end
    end
    begin
      real cab;
      cab = s_ab / n_out - (sa[1] / n_out) * (sb[1] / n_out);
      $display("samples %0d per set, stalls %0d, resets %0d, alpha-beta covariance %f", n_out, n_stall, n_reset, cab);
      report("alpha", cnt_a, sa);
      report("beta",  cnt_b, sb);
      edf_tests("alpha", fine_a, n_out, 1'b1);
      edf_tests("beta",  fine_b, n_out, 1'b1);
      checks++; if (cab > 0.01 || cab < -0.01) begin failures++; $display("FAIL alpha-beta correlated"); end
      checks++; if (n_stall == 0 || n_reset == 0) begin failures++; $display("FAIL stall or restart not exercised"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
