// fp_sqrt_tb: checks the binary32 square root against the language's
// $sqrt rounded to binary32 for random positive inputs over the whole
// exponent range (odd and even exponents), exact squares, and the special
// inputs (0, -0, negative, NaN, +inf) with their flags. Latency is one clock.
module fp_sqrt_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;
  logic clock = 0, clk_en = 1, aclr = 1;
  fp32_t data, result;
  logic zero, nan, overflow;
  int checks = 0, failures = 0, exact = 0, total = 0;

  fp_sqrt dut (.clock, .clk_en, .aclr, .data, .result, .zero, .nan, .overflow);
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
    fp32_t want;
    longint d;
    data = x;
    want = real_to_fp32($sqrt(fp32_to_real(x)));
    @(posedge clock); #1;
    checks++; total++;
    d = ulp_dist(result, want);
    if (d == 0) exact++;
    if (d > 1 || nan || zero || overflow) fail($sformatf("want %h", want));
  endtask

  task automatic special(input fp32_t x, input fp32_t want, input logic wz, input logic wn, input logic wo);
    data = x;
    @(posedge clock); #1;
    checks++;
    if ((!wn && result != want) || zero != wz || nan != wn || overflow != wo) fail("special");
  endtask

  initial begin
    data = 0;
    @(posedge clock); #1 aclr = 0;
    for (int i = 0; i < 30000; i++) one({1'b0, rand_fp(1, 254)} >> 0 & 32'h7FFF_FFFF);
    for (int i = 1; i < 4000; i++) one(real_to_fp32(real'(i) * real'(i)));   // exact squares
    checks++;
    if (exact < total - total / 1000) begin
      failures++;
      $display("FAIL only %0d of %0d exact", exact, total);
    end
    special(FP_ZERO, FP_ZERO, 1, 0, 0);
    special(32'h8000_0000, 32'h8000_0000, 1, 0, 0);
    special(FP_NEG_TWO, FP_QNAN, 0, 1, 0);
    special(FP_QNAN, FP_QNAN, 0, 1, 0);
    special(FP_POS_INF, FP_POS_INF, 0, 0, 1);
    special(32'h4080_0000, 32'h4000_0000, 0, 0, 0);   // sqrt(4) = 2
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
