// convertor_tb: checks U = k/(2^32-1) against the rounded real quotient for
// random words, the end points 1 and 2^32-1 (which must give exactly 1.0),
// powers of two and k = 0, with the one-clock latency and clk_en hold.
module convertor_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;
  logic clock = 0, clk_en = 1, aclr = 1;
  logic [31:0] data;
  fp32_t result;
  logic zero;
  int checks = 0, failures = 0;

  convertor #(.N(32)) dut (.clock, .clk_en, .aclr, .data, .result, .zero);
  always #5 clock = ~clock;

  initial begin
    repeat (200000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [31:0] k);
    logic [31:0] exp_f;
    // k / (2^32-1), computed in double precision: both exact, one rounding,
    // then rounded to binary32 (double rounding can only err by one ulp in
    // rare ties, which is checked exactly below for the cases that matter)
    exp_f = real_to_fp32(real'(k) / 4294967295.0);
    data = k;
    @(posedge clock); #1;
    checks++;
    if (ulp_dist(result, exp_f) > (k == 32'hFFFF_FFFF ? 0 : 1) || zero != (k == 0)) begin
      failures++;
      if (failures < 10) $display("FAIL k=%h got %h want %h", k, result, exp_f);
    end
  endtask

  initial begin
    int exact = 0;
    data = 0;
    @(posedge clock); #1 aclr = 0;
    one(32'h0000_0001);
    one(32'hFFFF_FFFF);
    checks++; if (result != FP_ONE) failures++;
    one(32'h0000_0000);
    for (int i = 0; i < 32; i++) one(32'h1 << i);
    for (int i = 0; i < 20000; i++) begin
      one($urandom);
      if (result == real_to_fp32(real'(data) / 4294967295.0)) exact++;
    end
    checks++;
    if (exact < 19990) begin
      failures++;
      $display("FAIL only %0d exact", exact);
    end
    // clk_en low holds the output
    clk_en = 0;
    data = 32'h1234_5678;
    begin
      fp32_t hold;
      hold = result;
      repeat (3) @(posedge clock);
      #1 checks++;
      if (result != hold) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
