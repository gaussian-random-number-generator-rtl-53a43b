// grng_clt_tb: end-to-end test of the central limit Gaussian generator at
// its default parameters (NSUM = 12 generators, x^32+x^8+x^5+x^2+1), over
// 1,000,000 output samples.
//
// A cycle-level reference model runs beside the design: twelve software
// shift registers with the design's seeds, U = k/(2^32-1) rounded to
// binary32, the adder tree summed pairwise in the design's order with every
// sum rounded to binary32, and the division by the rounded sqrt(12 * 1/12).
// All of these are correctly rounded operations, so the design must match the
// model bit for bit. clk_en is dropped at random (outputs must hold), aclr
// is pulsed in mid-run (the sequence must restart from the seeds), valid
// must stay low for the 6-clock fill and high afterwards, and fp_error must
// never rise. At the end it reports the mean, variance, skewness, kurtosis
// (3 - 1.2/12 = 2.9 for a sum of twelve independent uniforms; the twelve
// streams here are phases of one m-sequence and measure about 2.94, so the
// check accepts 2.85 to 3.0), the largest |x|
// (at most 6), the lag-1 autocorrelation, and a chi-square over the same
// 18 bins as the polar statistics test and binned Kolmogorov-Smirnov and
// Anderson-Darling statistics. Their verdicts are printed, not counted: this
// method is known to fail them.
module grng_clt_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;

  localparam int LATENCY = 6;
  localparam int NSUM    = 12;
  localparam int SAMPLES = 1000000;
  localparam int NBINS   = 18;
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
  fp32_t alpha;
  logic valid, fp_error;
  int checks = 0, failures = 0;

  grng_clt dut (.clock, .clk_en, .aclr, .coeff(MSRG_POLY32_COEFF), .alpha, .valid, .fp_error);
  always #5 clock = ~clock;

  initial begin
    repeat (SAMPLES * 3) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] mulx(input logic [31:0] v);
    return {v[30:0], 1'b0} ^ (v[31] ? 32'h0000_0125 : 32'h0);
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, b);
    return real_to_fp32(fp32_to_real(a) + fp32_to_real(b));
  endfunction

  logic [31:0] m [NSUM];
  logic [31:0] sd;
  int          n;
  logic [31:0] q[$];

  task automatic model_reset();
    for (int i = 0; i < NSUM; i++) m[i] = ((i + 1) * 32'h9E37_79B9) | 32'h1;
    n = 0;
    q.delete();
  endtask

  function automatic logic [31:0] sample();
    logic [31:0] leaf [16];
    for (int i = 0; i < 16; i++) leaf[i] = 32'h0;
    for (int i = 0; i < NSUM; i++) leaf[i] = real_to_fp32(real'(m[i]) / 4294967295.0);
    leaf[NSUM] = real_to_fp32(-0.5 * NSUM);
    for (int w = 8; w >= 1; w /= 2)
      for (int i = 0; i < w; i++) leaf[i] = fadd(leaf[2*i], leaf[2*i+1]);
    return real_to_fp32(fp32_to_real(leaf[0]) / fp32_to_real(sd));
  endfunction

  function automatic real cdf(input real x);
    real h, acc, t;
    // Simpson's rule from 0 to |x|
    t = x < 0 ? -x : x;
    h = t / 400;
    acc = 0;
    for (int i = 0; i <= 400; i++) begin
      real v, w;
      v = $exp(-0.5 * (i * h) * (i * h));
      w = (i == 0 || i == 400) ? 1 : (i % 2 == 1 ? 4 : 2);
      acc += w * v;
    end
    acc = acc * h / 3.0 / $sqrt(2.0 * 3.14159265358979);
    return x < 0 ? 0.5 - acc : 0.5 + acc;
  endfunction

  longint n_out = 0, n_stall = 0, n_reset = 0, cnt [NBINS];
  real s1 = 0, s2 = 0, s3 = 0, s4 = 0, s_lag = 0, prev = 0, amax = 0;
  int  fine [KBINS + 2];
  fp32_t hold_a;
  logic  hold_v;

  initial begin
    for (int i = 0; i < NBINS; i++) cnt[i] = 0;
    for (int i = 0; i < KBINS + 2; i++) fine[i] = 0;
    init_edges();
    sd = real_to_fp32($sqrt(fp32_to_real(real_to_fp32(NSUM * fp32_to_real(32'h3DAA_AAAB)))));
    model_reset();
    repeat (2) @(posedge clock);
    #1 aclr = 0;
    for (int cyc = 0; n_out < SAMPLES; cyc++) begin
      clk_en = ($urandom % 10) != 0;
      hold_a = alpha; hold_v = valid;
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
        if (alpha != hold_a || valid != hold_v) begin
          failures++;
          if (failures < 10) $display("FAIL output moved during stall");
        end
        continue;
      end
      q.push_back(sample());
      for (int i = 0; i < NSUM; i++) m[i] = mulx(m[i]);
      n++;
      checks++;
      if (valid != (n >= LATENCY)) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d valid=%b after %0d clocks", cyc, valid, n);
      end
      if (n < LATENCY) continue;
      begin
        logic [31:0] want;
        real x;
        int b;
        want = q.pop_front();
        checks++;
        if (alpha !== want) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d alpha %h want %h", cyc, alpha, want);
        end
        checks++;
        if (fp_error) begin
          failures++;
          if (failures < 10) $display("FAIL fp_error at cycle %0d", cyc);
        end
        x = fp32_to_real(alpha);
        n_out++;
        s1 += x; s2 += x * x; s3 += x * x * x; s4 += x * x * x * x;
        s_lag += x * prev; prev = x;
        if ((x < 0 ? -x : x) > amax) amax = x < 0 ? -x : x;
        b = (x < -4.0) ? 0 : (x >= 4.0) ? NBINS - 1 : 1 + int'($floor((x + 4.0) / 0.5));
        cnt[b]++;
        fine[fine_of(x)]++;
      end
    end
    begin
      real mean, var_, skew, kurt, rho, chi2, e, lo, hi;
      mean = s1 / n_out;
      var_ = s2 / n_out - mean * mean;
      skew = (s3 / n_out - 3 * mean * s2 / n_out + 2 * mean * mean * mean) / (var_ * $sqrt(var_));
      kurt = (s4 / n_out - 4 * mean * s3 / n_out + 6 * mean * mean * s2 / n_out - 3 * mean ** 4) / (var_ * var_);
      rho  = (s_lag / n_out - mean * mean) / var_;
      chi2 = 0;
      for (int i = 0; i < NBINS; i++) begin
        lo = (i == 0) ? -1.0e9 : -4.0 + 0.5 * (i - 1);
        hi = (i == NBINS - 1) ? 1.0e9 : -4.0 + 0.5 * i;
        e  = n_out * (cdf(hi > 9 ? 9.0 : hi) - cdf(lo < -9 ? -9.0 : lo));
        chi2 += (cnt[i] - e) * (cnt[i] - e) / e;
      end
      $display("samples %0d, stalls %0d, resets %0d", n_out, n_stall, n_reset);
      $display("alpha: mean %f var %f skew %f kurtosis %f max|x| %f lag-1 corr %f chi2(17) %f",
               mean, var_, skew, kurt, amax, rho, chi2);
      $display("alpha: chi-square at 5%%: %s", chi2 > 27.587 ? "rejected" : "not rejected");
      edf_tests("alpha", fine, n_out, 1'b0);
      checks++; if (mean > 0.01 || mean < -0.01) begin failures++; $display("FAIL mean"); end
      checks++; if (var_ < 0.98 || var_ > 1.02) begin failures++; $display("FAIL variance"); end
      checks++; if (skew > 0.02 || skew < -0.02) begin failures++; $display("FAIL skewness"); end
      checks++; if (kurt < 2.85 || kurt > 3.0) begin failures++; $display("FAIL kurtosis"); end
      checks++; if (amax > 6.0) begin failures++; $display("FAIL sample beyond sqrt(3*12)"); end
      checks++; if (n_stall == 0 || n_reset == 0) begin failures++; $display("FAIL stall or restart not exercised"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
