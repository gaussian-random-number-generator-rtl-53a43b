// fp_div: single-precision floating-point divider (dataa / datab).
//
// The quotient of the two 24-bit significands lies in (1/2, 2). A 27-step
// restoring division produces one quotient bit per step, starting with the
// integer bit; the final remainder becomes the sticky bit. The quotient is
// normalised (one place left when the integer bit is 0), the exponents are
// subtracted and the result is rounded to nearest even.
//
// Flags as the divider IP core the design is modelled on defines them:
// overflow when the result reaches infinity (including x/0), underflow when
// a non-zero quotient is flushed to zero, zero when the result is zero, nan
// for 0/0, inf/inf or a NaN operand. Subnormals are treated as zero.
//
// Interface: result and flags LATENCY enabled clocks after the operands.
// The ports and flags are the paper's; the division method is this design's.
module fp_div
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
  logic               ovf_c, unf_c, nan_c, s;
  logic [25:0]        rem;
  logic [23:0]        mb;
  logic [26:0]        q;
  logic signed [11:0] e;
  fp_rnd_t            rnd;

  always_comb begin
    s   = dataa.sign ^ datab.sign;
    mb  = {1'b1, datab.man};
    rem = {2'b00, 1'b1, dataa.man};
    q   = '0;
    for (int i = 26; i >= 0; i--) begin
      if (rem >= {2'b00, mb}) begin
        q[i] = 1'b1;
        rem  = rem - {2'b00, mb};
      end
      rem = rem << 1;
    end
    e = 12'(dataa.exp) - 12'(datab.exp) + 12'sd127;
    if (q[26]) rnd = fp_round(s, e,          {q[26:3], q[2], |q[1:0] | (rem != '0)});
    else       rnd = fp_round(s, e - 12'sd1, {q[25:2], q[1], q[0]    | (rem != '0)});
    res_c = rnd.value;
    ovf_c = rnd.overflow;
    unf_c = rnd.underflow;
    nan_c = 1'b0;
    if (fp_is_nan(dataa) || fp_is_nan(datab) ||
        (fp_is_zero(dataa) && fp_is_zero(datab)) || (fp_is_inf(dataa) && fp_is_inf(datab))) begin
      res_c = FP_QNAN; nan_c = 1'b1; ovf_c = 1'b0; unf_c = 1'b0;
    end else if (fp_is_inf(dataa)) begin
      res_c = {s, 8'hFF, 23'd0}; ovf_c = 1'b1; unf_c = 1'b0;
    end else if (fp_is_zero(datab)) begin
      res_c = {s, 8'hFF, 23'd0}; ovf_c = 1'b1; unf_c = 1'b0;
    end else if (fp_is_inf(datab) || fp_is_zero(dataa)) begin
      res_c = {s, 31'd0}; ovf_c = 1'b0; unf_c = 1'b0;
    end
  end

  pipe_reg #(.WIDTH(36), .DEPTH(LATENCY)) u_out (
    .clock, .clk_en, .aclr,
    .d({res_c, ovf_c, unf_c, fp_is_zero(res_c), nan_c}),
    .q({result, overflow, underflow, zero, nan})
  );
endmodule
