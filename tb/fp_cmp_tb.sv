// fp_cmp_tb: checks the less-than comparator against real comparison for
// random operand pairs of all signs and magnitudes, near-equal values, the
// 1.0 bound used by the polar method, signed zeros and NaN (unordered).
module fp_cmp_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;
  fp32_t dataa, datab;
  logic alb, unordered;
  int checks = 0, failures = 0;
  logic clock = 0;

  fp_cmp dut (.dataa, .datab, .alb, .unordered);
  always #5 clock = ~clock;

  initial begin
    repeat (100000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input fp32_t a, input fp32_t b, input logic want_unord);
    logic want;
    dataa = a; datab = b;
    #1;
    want = !want_unord && (fp32_to_real(a) < fp32_to_real(b));
    checks++;
    if (alb != want || unordered != want_unord) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h alb=%b", a, b, alb);
    end
  endtask

  initial begin
    for (int i = 0; i < 20000; i++) one(rand_fp(1, 254), rand_fp(1, 254), 0);
    for (int i = 0; i < 20000; i++) begin
      fp32_t a;
      a = rand_fp(120, 130);
      one(a, a + 32'($urandom % 3) - 32'd1, 0);
    end
    for (int i = 0; i < 20000; i++) one(rand_fp(120, 127) & 32'h7FFF_FFFF, FP_ONE, 0);
    one(FP_ONE, FP_ONE, 0);
    one(32'h3F7F_FFFF, FP_ONE, 0);
    one(32'h8000_0000, FP_ZERO, 0);
    one(FP_ZERO, 32'h8000_0000, 0);
    one(FP_NEG_TWO, FP_ZERO, 0);
    one(FP_QNAN, FP_ONE, 1);
    one(FP_ONE, FP_QNAN, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
