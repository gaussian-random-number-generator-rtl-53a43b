// fp_mul: single-precision floating-point multiplier.
//
// Multiplies the two 24-bit significands (hidden one included), keeps the
// top 24 bits of the 48-bit product plus a guard and a sticky bit, and rounds
// to nearest even. Exponents add (minus the bias). NaN operands and
// infinity*0 give a quiet NaN; subnormals are treated as zero.
//
// Interface and flags follow the floating-point IP-core style: operands
// dataa, datab; result, overflow, underflow, zero, nan appear LATENCY
// enabled clocks later; aclr clears the output registers. The paper only
// states that multipliers are used; the internals are this design's.
module fp_mul
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
  fp32_t              res_c;
  logic               ovf_c, unf_c, nan_c;
  logic               s;
  logic [47:0]        p;
  logic signed [11:0] e;
  fp_rnd_t            rnd;

  always_comb begin
    s     = dataa.sign ^ datab.sign;
    p     = {1'b1, dataa.man} * {1'b1, datab.man};
    e     = 12'(dataa.exp) + 12'(datab.exp) - 12'sd127;
    res_c = FP_ZERO;
    ovf_c = 1'b0;
    unf_c = 1'b0;
    nan_c = 1'b0;
    rnd   = '0;
    if (fp_is_nan(dataa) || fp_is_nan(datab) ||
        (fp_is_inf(dataa) && fp_is_zero(datab)) || (fp_is_zero(dataa) && fp_is_inf(datab))) begin
      res_c = FP_QNAN;
      nan_c = 1'b1;
    end else if (fp_is_inf(dataa) || fp_is_inf(datab)) begin
      res_c = {s, 8'hFF, 23'd0};
    end else if (fp_is_zero(dataa) || fp_is_zero(datab)) begin
      res_c = {s, 31'd0};
    end else begin
      if (p[47]) rnd = fp_round(s, e + 12'sd1, {p[47:24], p[23], |p[22:0]});
      else       rnd = fp_round(s, e,          {p[46:23], p[22], |p[21:0]});
      res_c = rnd.value;
      ovf_c = rnd.overflow;
      unf_c = rnd.underflow;
    end
  end

  pipe_reg #(.WIDTH(36), .DEPTH(LATENCY)) u_out (
    .clock, .clk_en, .aclr,
    .d({res_c, ovf_c, unf_c, fp_is_zero(res_c), nan_c}),
    .q({result, overflow, underflow, zero, nan})
  );
endmodule
