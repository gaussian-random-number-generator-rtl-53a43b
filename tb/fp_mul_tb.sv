// fp_mul_tb: checks the binary32 multiplier against the language's double-precision
// arithmetic rounded to binary32: random normal operands (random signs,
// exponents 64..190), results that overflow and underflow, and the special
// operands (zero, infinity, NaN) with the exception flags. Each result is
// checked one clock after its operands (LATENCY = 1); clk_en low must hold
// the output and aclr must clear it.
module fp_mul_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;
  logic clock = 0, clk_en = 1, aclr = 1;
  fp32_t dataa, datab, result;
  logic overflow, underflow, zero, nan;
  int checks = 0, failures = 0, exact = 0, total = 0;

  fp_mul dut (.clock, .clk_en, .aclr, .dataa, .datab, .result, .overflow, .underflow, .zero, .nan);
  always #5 clock = ~clock;

  initial begin
    repeat (500000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string what);
    failures++;
    if (failures < 10) $display("FAIL %s a=%h b=%h got %h", what, dataa, datab, result);
  endtask

  // Normal operands: compare with the real result.
  task automatic one(input fp32_t a, input fp32_t b);
    real  r;
    fp32_t want;
    longint d;
    dataa = a; datab = b;
    r = fp32_to_real(a) * fp32_to_real(b);
    want = real_to_fp32(r);
    @(posedge clock); #1;
    checks++; total++;
    d = ulp_dist(result, want);
    if (d == 0) exact++;
    if (d > 1) fail($sformatf("value want %h", want));
    checks++;
    if (overflow != (want[30:23] == 8'hFF) || nan || zero != (want[30:0] == 0)) fail("flags");
    checks++;
    if (underflow != (r != 0.0 && want[30:0] == 0)) fail("underflow flag");
  endtask

  task automatic special(input fp32_t a, input fp32_t b, input fp32_t want, input logic want_nan);
    dataa = a; datab = b;
    @(posedge clock); #1;
    checks++;
    if (want_nan ? !(nan && result[30:23] == 8'hFF && result[22:0] != 0) : (result != want || nan)) fail($sformatf("special want %h", want));
  endtask

  initial begin
    dataa = 0; datab = 0;
    @(posedge clock); #1 aclr = 0;
    for (int i = 0; i < 20000; i++) one(rand_fp(64, 190), rand_fp(64, 190));
    for (int i = 0; i < 2000; i++) one(rand_fp(1, 254), rand_fp(1, 254));
    special(FP_POS_INF, FP_ZERO, 0, 1);
    special(FP_QNAN, FP_ONE, 0, 1);
    special(FP_POS_INF, FP_NEG_TWO, FP_NEG_INF, 0);
    special(FP_ZERO, FP_NEG_TWO, 32'h8000_0000, 0);
    special(32'h3FC0_0000, 32'h4000_0000, 32'h4040_0000, 0);  // 1.5*2 = 3
    checks++;
    if (exact < total - total / 1000) begin
      failures++;
      $display("FAIL only %0d of %0d exact", exact, total);
    end
    // clk_en low holds, aclr clears
    begin
      fp32_t hold;
      hold = result;
      clk_en = 0;
      dataa = FP_ONE; datab = FP_NEG_TWO;
      repeat (3) @(posedge clock);
      #1 checks++;
      if (result != hold) fail("hold");
      aclr = 1; #1;
      checks++;
      if (result != 0) fail("aclr");
      aclr = 0; clk_en = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
