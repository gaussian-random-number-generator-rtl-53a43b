// sign_combiner_tb: checks the quadrant sequence (U1,U2), (-U3,U2),
// (U1,-U4), (-U3,-U4) against a counter kept by the testbench, with random
// inputs, and that clk_en low holds the quadrant and aclr restarts it.
module sign_combiner_tb;
  import fp32_pkg::*;
  logic clock = 0, clk_en = 1, aclr = 1;
  fp32_t u1, u2, u3, u4, x, y;
  logic [1:0] quadrant;
  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};

  sign_combiner dut (.clock, .clk_en, .aclr, .u1, .u2, .u3, .u4, .x, .y, .quadrant);
  always #5 clock = ~clock;

  initial begin
    repeat (100000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q;
    u1 = 0; u2 = 0; u3 = 0; u4 = 0;
    @(posedge clock); #1 aclr = 0;
    q = 0;
    for (int i = 0; i < 4000; i++) begin
      u1 = {1'b0, 31'($urandom)}; u2 = {1'b0, 31'($urandom)};
      u3 = {1'b0, 31'($urandom)}; u4 = {1'b0, 31'($urandom)};
      clk_en = ($urandom % 4) != 0;
      #1;
      checks++;
      if (x != (q[0] ? {1'b1, u3[30:0]} : u1) || y != (q[1] ? {1'b1, u4[30:0]} : u2) || quadrant != 2'(q)) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d q=%0d x=%h y=%h", i, q, x, y);
      end
      seen[q]++;
      @(posedge clock);
      if (clk_en) q = (q + 1) % 4;
      #1;
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (seen[i] < 500) failures++;
    end
    aclr = 1; #1;
    checks++;
    if (quadrant != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
