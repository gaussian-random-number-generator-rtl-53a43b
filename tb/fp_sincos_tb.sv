// fp_sincos_tb: checks a sine and a cosine instance against the language's
// $sin and $cos rounded to binary32. Random angles cover every exponent the
// reduction handles (2^-12 to 2^20, both signs), plus a dense sweep of
// [0, 2*pi] where the Gaussian generator uses the unit. A result passes if it
// is within one unit in the last place, or within 2^-36 absolute where the
// true value is near zero. Also checked: tiny inputs (sin x = x, cos x = 1),
// signed zeros, NaN, infinities and the |x| >= 2^20 limit, the fraction of
// correctly rounded results, and that the output holds while clk_en is low.
// Latency is one clock.
module fp_sincos_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;
  logic clock = 0, clk_en = 1, aclr = 1;
  fp32_t data, s_res, c_res;
  int checks = 0, failures = 0, exact = 0, total = 0;

  fp_sincos #(.FUNC(1'b0)) dut_sin (.clock, .clk_en, .aclr, .data, .result(s_res));
  fp_sincos #(.FUNC(1'b1)) dut_cos (.clock, .clk_en, .aclr, .data, .result(c_res));
  always #5 clock = ~clock;

  initial begin
    repeat (200000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic good(input fp32_t got, input real want);
    fp32_t w;
    real   err;
    w   = real_to_fp32(want);
    err = fp32_to_real(got) - want;
    if (err < 0) err = -err;
    return ulp_dist(got, w) <= 1 || err <= 1.0 / 68719476736.0;
  endfunction

  task automatic one(input fp32_t x);
    real xr;
    data = x;
    xr   = fp32_to_real(x);
    @(posedge clock); #1;
    checks += 2; total += 2;
    if (s_res == real_to_fp32($sin(xr))) exact++;
    if (c_res == real_to_fp32($cos(xr))) exact++;
    if (!good(s_res, $sin(xr)) || !good(c_res, $cos(xr))) begin
      failures++;
      if (failures < 10) $display("FAIL x=%h (%g) sin %h want %h, cos %h want %h", x, xr, s_res,
                                   real_to_fp32($sin(xr)), c_res, real_to_fp32($cos(xr)));
    end
  endtask

  task automatic special(input fp32_t x, input fp32_t ws, input fp32_t wc);
    data = x;
    @(posedge clock); #1;
    checks++;
    if (!((s_res == ws || (fp_is_nan(ws) && fp_is_nan(s_res))) && (c_res == wc || (fp_is_nan(wc) && fp_is_nan(c_res))))) begin
      failures++;
      $display("FAIL special x=%h sin %h want %h, cos %h want %h", x, s_res, ws, c_res, wc);
    end
  endtask

  initial begin
    fp32_t hold_s, hold_c;
    data = 0;
    @(posedge clock); #1 aclr = 0;
    for (int i = 0; i < 40000; i++) one(rand_fp(115, 146) ^ {$urandom % 2, 31'd0});
    for (int i = 0; i < 40000; i++) one(real_to_fp32(6.283185307179586 * ($urandom % 1000000) / 1000000.0));
    checks++;
    if (exact < total * 9 / 10) begin
      failures++;
      $display("FAIL only %0d of %0d correctly rounded", exact, total);
    end
    $display("%0d of %0d results correctly rounded", exact, total);
    special(32'h3800_0000, 32'h3800_0000, FP_ONE);          // 2^-15
    special(32'hB800_0000, 32'hB800_0000, FP_ONE);
    special(FP_ZERO, FP_ZERO, FP_ONE);
    special(32'h8000_0000, 32'h8000_0000, FP_ONE);
    special(FP_QNAN, FP_QNAN, FP_QNAN);
    special(FP_POS_INF, FP_QNAN, FP_QNAN);
    special(FP_NEG_INF, FP_QNAN, FP_QNAN);
    special(32'h4980_0000, FP_QNAN, FP_QNAN);                // 2^20
    // stall: outputs hold
    data = 32'h3F80_0000;
    @(posedge clock); #1;
    hold_s = s_res; hold_c = c_res;
    clk_en = 0; data = 32'h4000_0000;
    repeat (3) @(posedge clock); #1;
    checks++;
    if (s_res != hold_s || c_res != hold_c) begin failures++; $display("FAIL output moved during stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
