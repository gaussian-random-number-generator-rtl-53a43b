// fp_add: single-precision floating-point adder.
//
// The operand with the larger magnitude is taken as x; the other's
// significand is shifted right by the exponent difference, keeping guard,
// round and a sticky bit. Like signs add (a carry shifts the sum right one
// place); unlike signs subtract and the difference is normalised by a
// leading-zero shift. The result is rounded to nearest even. An exact zero
// difference gives +0. inf-inf and NaN operands give a quiet NaN;
// subnormals are treated as zero.
//
// Interface: dataa + datab -> result, overflow, underflow, zero, nan after
// LATENCY enabled clocks. The paper only states that an adder is used; the
// internals are this design's.
module fp_add
  import fp32_pkg::*;
#(
  parameter int unsigned LATENCY = 1
) (
  input  logic  clock,
  input  logic  clk_en,
  input  logic  aclr,
  input  fp32_t dataa,
  input  fp32_t datab,
  output fp32_t result,
  output logic  overflow,
  output logic  underflow,
  output logic  zero,
  output logic  nan
);
  fp32_t              x, y, res_c;
  logic               ovf_c, unf_c, nan_c;
  logic [7:0]         d;
  logic [26:0]        mx, my, mys, diff;
  logic [27:0]        sum;
  logic [26:0]        sig;
  logic signed [11:0] e;
  int unsigned        lz;
  fp_rnd_t            rnd;

  always_comb begin
    if ({datab.exp, datab.man} > {dataa.exp, dataa.man}) begin
      x = datab; y = dataa;
    end else begin
      x = dataa; y = datab;
    end
    d    = x.exp - y.exp;
    mx   = {1'b1, x.man, 3'b000};
    my   = {1'b1, y.man, 3'b000};
    mys  = (d >= 8'd27) ? 27'd1 : ((my >> d) | 27'(|(my & ~(27'h7FF_FFFF << d))));
    sum  = {1'b0, mx} + {1'b0, mys};
    diff = mx - mys;
    lz   = 0;
    for (int i = 0; i < 27; i++) if (diff[i]) lz = 26 - i;
    sig  = '0;
    e    = 12'(x.exp);
    if (x.sign == y.sign) begin
      if (sum[27]) begin
        sig = {sum[27:2], sum[1] | sum[0]};
        e   = e + 12'sd1;
      end else begin
        sig = sum[26:0];
      end
    end else begin
      sig = diff << lz;
      e   = e - 12'(lz);
    end
    rnd   = fp_round(x.sign, e, {sig[26:3], sig[2], |sig[1:0]});
    res_c = rnd.value;
    ovf_c = rnd.overflow;
    unf_c = rnd.underflow;
    nan_c = 1'b0;
    if (fp_is_nan(dataa) || fp_is_nan(datab) ||
        (fp_is_inf(dataa) && fp_is_inf(datab) && (dataa.sign != datab.sign))) begin
      res_c = FP_QNAN; nan_c = 1'b1; ovf_c = 1'b0; unf_c = 1'b0;
    end else if (fp_is_inf(x)) begin
      res_c = x; ovf_c = 1'b0; unf_c = 1'b0;
    end else if (fp_is_zero(y)) begin
      ovf_c = 1'b0; unf_c = 1'b0;
      res_c = fp_is_zero(x) ? {x.sign & y.sign, 31'd0} : x;
    end else if (x.sign != y.sign && diff == '0) begin
      res_c = FP_ZERO; ovf_c = 1'b0; unf_c = 1'b0;
    end
  end

  pipe_reg #(.WIDTH(36), .DEPTH(LATENCY)) u_out (
    .clock, .clk_en, .aclr,
    .d({res_c, ovf_c, unf_c, fp_is_zero(res_c), nan_c}),
    .q({result, overflow, underflow, zero, nan})
  );
endmodule
