// fp32_pkg: types, constants and the shared rounding step of the
// single-precision (IEEE-754 binary32) arithmetic used by the Gaussian
// generator.
//
// Every floating-point core in this design works on binary32 values with
// round-to-nearest-even. Subnormal numbers are not supported: they are read
// as zero and results that would be subnormal are flushed to zero (and flagged
// as underflow). The cores build a normalised significand with a guard and a
// sticky bit and hand it to fp_round(), which rounds, handles the carry out of
// the significand and detects exponent overflow and underflow.
package fp32_pkg;

  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] man;
  } fp32_t;

  // Rounded result together with the two range flags.
  typedef struct packed {
    fp32_t value;
    logic  overflow;
    logic  underflow;
  } fp_rnd_t;

  localparam fp32_t FP_ZERO    = 32'h0000_0000;
  localparam fp32_t FP_ONE     = 32'h3F80_0000;
  localparam fp32_t FP_NEG_TWO = 32'hC000_0000;
  localparam fp32_t FP_QNAN    = 32'h7FC0_0000;
  localparam fp32_t FP_POS_INF = 32'h7F80_0000;
  localparam fp32_t FP_NEG_INF = 32'hFF80_0000;

  // Feedback coefficients c_31..c_0 of f(x)=x^32+x^8+x^5+x^2+1 (bit i is c_i;
  // c_32=1 is implied by the register length).
  localparam logic [31:0] MSRG_POLY32_COEFF = 32'h0000_0125;

  function automatic logic fp_is_nan(input fp32_t a);
    return (a.exp == 8'hFF) && (a.man != '0);
  endfunction

  function automatic logic fp_is_inf(input fp32_t a);
    return (a.exp == 8'hFF) && (a.man == '0);
  endfunction

  // Zero and subnormal inputs both count as zero.
  function automatic logic fp_is_zero(input fp32_t a);
    return a.exp == 8'h00;
  endfunction

  // Round and pack. 'exp' is the biased exponent belonging to sig[25] (the
  // leading one); sig = {24 significand bits, guard, sticky}.
  function automatic fp_rnd_t fp_round(input logic sign, input logic signed [11:0] exp,
                                       input logic [25:0] sig);
    fp_rnd_t r;
    logic [24:0] m;
    logic signed [11:0] e;
    logic up;
    up = sig[1] & (sig[0] | sig[2]);
    m  = {1'b0, sig[25:2]} + 25'(up);
    e  = exp;
    if (m[24]) begin
      m = m >> 1;
      e = e + 12'sd1;
    end
    r = '0;
    if (e >= 12'sd255) begin
      r.value    = {sign, 8'hFF, 23'd0};
      r.overflow = 1'b1;
    end else if (e <= 12'sd0) begin
      r.value     = {sign, 31'd0};
      r.underflow = 1'b1;
    end else begin
      r.value = {sign, e[7:0], m[22:0]};
    end
    return r;
  endfunction

endpackage
