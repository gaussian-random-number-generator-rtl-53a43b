// msrg_tb: checks the shift register generator against a software model of
// multiplication by x modulo the characteristic polynomial, for the
// polynomial x^32+x^8+x^5+x^2+1, with one and with several steps per clock.
// Also checks that the state never becomes zero, that clk_en holds it and
// that aclr reloads the seed, and that a small (8-bit, primitive
// x^8+x^4+x^3+x^2+1) instance has the full period 255.
module msrg_tb;
  import fp32_pkg::*;
  logic clock = 0, clk_en = 0, aclr = 1;
  logic [31:0] state1, state4;
  logic [7:0]  state8;
  int checks = 0, failures = 0;

  msrg #(.N(32), .SEED(32'h0000_0001), .SHIFTS(1)) dut1 (.clock, .clk_en, .aclr, .coeff(MSRG_POLY32_COEFF), .state(state1));
  msrg #(.N(32), .SEED(32'hFFFF_FFFE), .SHIFTS(4)) dut4 (.clock, .clk_en, .aclr, .coeff(MSRG_POLY32_COEFF), .state(state4));
  msrg #(.N(8),  .SEED(8'h01),         .SHIFTS(1)) dut8 (.clock, .clk_en, .aclr, .coeff(8'h1D), .state(state8));

  always #5 clock = ~clock;

  // x * a(x) mod g(x), g = x^32 + x^8 + x^5 + x^2 + 1
  function automatic logic [31:0] mulx(input logic [31:0] a);
    return {a[30:0], 1'b0} ^ (a[31] ? 32'h0000_0125 : 32'h0);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] m1, m4, hold;
    int period;
    repeat (2) @(posedge clock);
    #1 aclr = 0;
    check(state1 == 32'h1 && state4 == 32'hFFFF_FFFE && state8 == 8'h01, "seed after aclr");
    m1 = 32'h1;
    m4 = 32'hFFFF_FFFE;
    clk_en = 1;
    for (int i = 0; i < 2000; i++) begin
      @(posedge clock); #1;
      m1 = mulx(m1);
      m4 = mulx(mulx(mulx(mulx(m4))));
      check(state1 == m1, $sformatf("step %0d: got %h want %h", i, state1, m1));
      check(state4 == m4, $sformatf("4-step %0d: got %h want %h", i, state4, m4));
      check(state1 != 0, "state zero");
    end
    // clk_en low holds the register
    clk_en = 0;
    hold = state1;
    repeat (5) @(posedge clock);
    #1 check(state1 == hold, "hold while clk_en low");
    // period of the 8-bit instance
    aclr = 1; #1 aclr = 0;
    clk_en = 1;
    period = 0;
    do begin
      @(posedge clock); #1;
      period++;
    end while (state8 != 8'h01 && period < 1000);
    check(period == 255, $sformatf("8-bit period %0d", period));
    // aclr reloads the seed
    aclr = 1; #1;
    check(state1 == 32'h1, "aclr reload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
