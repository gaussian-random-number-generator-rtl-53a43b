// fp_log_tb: checks the natural logarithm against the language's $ln.
// The design computes log2 with FRAC = 28 fraction bits, so its absolute
// error is bounded by about 2^-26; the test accepts a result within
// max(2 ulp, 2^-25) of the rounded true value. Inputs cover the whole
// exponent range, the interval (0, 1) the polar method feeds it, values just
// either side of 1, exact powers of two (ln = e*ln2), and the exception cases:
// 1 (zero flag), negative and NaN (nan flag), 0 and +inf. Latency one clock.
module fp_log_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;
  logic clock = 0, clk_en = 1, aclr = 1;
  fp32_t data, result;
  logic zero, nan;
  int checks = 0, failures = 0;
  real worst = 0.0;

  fp_log dut (.clock, .clk_en, .aclr, .data, .result, .zero, .nan);
  always #5 clock = ~clock;

  initial begin
    repeat (200000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string what);
    failures++;
    if (failures < 10) $display("FAIL %s x=%h got %h", what, data, result);
  endtask

  task automatic one(input fp32_t x);
    real want, got, err, tol;
    data = x;
    want = $ln(fp32_to_real(x));
    @(posedge clock); #1;
    got = fp32_to_real(result);
    err = got - want;
    if (err < 0) err = -err;
    tol = (want < 0 ? -want : want) * 2.0 / 8388608.0;
    if (tol < 1.0 / 33554432.0) tol = 1.0 / 33554432.0;
    if (err > worst) worst = err;
    checks++;
    if (err > tol || nan || zero) fail($sformatf("want %f got %f", want, got));
    // the sign must always be right
    checks++;
    if (x != FP_ONE && ((want < 0) != result[31])) fail("sign");
  endtask

  task automatic special(input fp32_t x, input fp32_t want, input logic wz, input logic wn);
    data = x;
    @(posedge clock); #1;
    checks++;
    if ((!wn && result != want) || zero != wz || nan != wn) fail("special");
  endtask

  initial begin
    data = 0;
    @(posedge clock); #1 aclr = 0;
    for (int i = 0; i < 20000; i++) one(rand_fp(1, 254) & 32'h7FFF_FFFF);
    for (int i = 0; i < 20000; i++) one(rand_fp(96, 126) & 32'h7FFF_FFFF);   // (0,1)
    for (int i = 1; i < 300; i++) begin
      one(FP_ONE + 32'(i));               // just above 1
      one(32'h3F7F_FFFF - 32'(i));        // just below 1
    end
    for (int e = 1; e < 255; e++) if (e != 127) one({1'b0, 8'(e), 23'd0});   // powers of two
    special(FP_ONE, FP_ZERO, 1, 0);
    special(FP_NEG_TWO, FP_QNAN, 0, 1);
    special(FP_QNAN, FP_QNAN, 0, 1);
    special(FP_ZERO, FP_NEG_INF, 0, 0);
    special(FP_POS_INF, FP_POS_INF, 0, 0);
    $display("worst absolute error %e", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
