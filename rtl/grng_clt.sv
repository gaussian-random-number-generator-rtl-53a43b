// grng_clt: Gaussian random number generator, central limit method.
//
// NSUM multi-return shift register generators (MSRG) produce 32-bit words
// that the convertors turn into uniforms U_i = k/(2^32-1) in (0, 1]. Their
// sum has mean NSUM/2 and variance NSUM/12, so
//   alpha = (U_1 + ... + U_NSUM - NSUM/2) / sqrt(NSUM/12)
// is approximately standard normal; it is bounded by sqrt(3*NSUM) (6 for the
// default NSUM = 12), so the tails are wrong beyond a few sigma. All
// arithmetic is IEEE-754 single precision:
//
//   MSRG x NSUM -> CONVERTOR -> adder tree (with -NSUM/2) -> DIV -> alpha
//   constants:  NSUM * (-1/2) -> -NSUM/2,   NSUM * (1/12) -> SQRT -> divisor
//
// The adder tree has 2^LEVELS leaves, LEVELS = clog2(NSUM+1): U_1..U_NSUM,
// then -NSUM/2, then +0 for the unused leaves; level l adds neighbours
// (leaf 2i + leaf 2i+1). The constant branch is built from the same units
// as the data path and settles during the pipeline fill.
//
// Timing: one sample per enabled clock, LATENCY = L_CONV + LEVELS*L_ADD +
// L_DIV enabled clocks (6 by default) after its MSRG words. valid rises once
// the pipeline and the constant branch have filled and then stays high.
// clk_en stalls the whole pipeline; aclr clears it and reloads the seeds.
// fp_error reports a floating-point exception for a valid sample.
//
// From the paper's central limit architecture figure: NSUM uniform sources,
// the -1/2, 1/12 and n constants, one multiplier forming -n/2, a summing
// adder, a SQRT, a second multiplier and the DIV; n = 12 is the paper's
// choice. The figure divides by sqrt(n)*(1/12), which does not give unit
// variance; this design divides by sqrt(n*(1/12)), the standard deviation
// of the sum, with the same units in a different order. The seeds, the
// adder-tree shape and the register placement are this design's choices.
module grng_clt
  import fp32_pkg::*;
#(
  parameter int unsigned  N      = 32,
  parameter int unsigned  NSUM   = 12,
  parameter int unsigned  SHIFTS = 1,
  parameter int unsigned  L_CONV = 1,
  parameter int unsigned  L_MUL  = 1,
  parameter int unsigned  L_ADD  = 1,
  parameter int unsigned  L_DIV  = 1,
  parameter int unsigned  L_SQRT = 1
) (
  input  logic         clock,
  input  logic         clk_en,
  input  logic         aclr,
  input  logic [N-1:0] coeff,
  output fp32_t        alpha,
  output logic         valid,
  output logic         fp_error
);
  localparam int unsigned LEVELS  = $clog2(NSUM + 1);
  localparam int unsigned LEAVES  = 1 << LEVELS;
  localparam int unsigned LATENCY = L_CONV + LEVELS * L_ADD + L_DIV;
  // the constant branch (multiplier, then SQRT or the tree) may be slower
  localparam int unsigned C_LAT   = L_MUL + ((L_SQRT > LEVELS * L_ADD) ? L_SQRT : LEVELS * L_ADD) + L_DIV;
  localparam int unsigned FILL    = (C_LAT > LATENCY) ? C_LAT : LATENCY;
  localparam int unsigned FILL_W  = $clog2(FILL + 1);

  // seed of generator i: an odd multiple of the golden-ratio constant
  function automatic logic [N-1:0] seed_of(input int unsigned i);
    logic [31:0] s;
    s = (i + 1) * 32'h9E37_79B9;
    return N'(s) | N'(1);
  endfunction

  // exact binary32 value of a small unsigned integer (below 2^24)
  function automatic fp32_t uint_to_fp(input int unsigned v);
    fp32_t f;
    int    msb;
    logic [31:0] m;
    f   = FP_ZERO;
    msb = -1;
    for (int b = 0; b < 24; b++) if (v[b]) msb = b;
    if (msb >= 0) begin
      m     = 32'(v) << (23 - msb);
      f.exp = 8'(127 + msb);
      f.man = m[22:0];
    end
    return f;
  endfunction

  localparam fp32_t C_NEG_HALF = '{sign: 1'b1, exp: 8'd126, man: 23'd0};    // -0.5
  localparam fp32_t C_TWELFTH  = '{sign: 1'b0, exp: 8'd123, man: 23'h2AAAAB}; // 1/12 rounded
  localparam fp32_t C_NSUM     = uint_to_fp(NSUM);

  // ---- uniform sources ---------------------------------------------------
  fp32_t             node [LEVELS+1][LEAVES];
  logic [NSUM-1:0]   conv_zero;

  for (genvar i = 0; i < NSUM; i++) begin : g_src
    logic [N-1:0] k;
    msrg #(.N(N), .SEED(seed_of(i)), .SHIFTS(SHIFTS)) u_msrg (.clock, .clk_en, .aclr, .coeff, .state(k));
    convertor #(.N(N), .LATENCY(L_CONV)) u_conv (.clock, .clk_en, .aclr, .data(k), .result(node[0][i]),
                                                  .zero(conv_zero[i]));
  end

  // ---- constants: -NSUM/2 and sqrt(NSUM/12) -------------------------------
  fp32_t neg_half_n, var_sum, sd_sum;
  logic  c1_ovf, c1_unf, c1_zero, c1_nan, c2_ovf, c2_unf, c2_zero, c2_nan, sd_zero, sd_nan, sd_ovf;
  fp_mul #(.LATENCY(L_MUL)) u_mul_half (.clock, .clk_en, .aclr, .dataa(C_NSUM), .datab(C_NEG_HALF),
                   .result(neg_half_n), .overflow(c1_ovf), .underflow(c1_unf), .zero(c1_zero), .nan(c1_nan));
  fp_mul #(.LATENCY(L_MUL)) u_mul_var  (.clock, .clk_en, .aclr, .dataa(C_NSUM), .datab(C_TWELFTH),
                   .result(var_sum), .overflow(c2_ovf), .underflow(c2_unf), .zero(c2_zero), .nan(c2_nan));
  fp_sqrt #(.LATENCY(L_SQRT)) u_sqrt (.clock, .clk_en, .aclr, .data(var_sum), .result(sd_sum),
                   .zero(sd_zero), .nan(sd_nan), .overflow(sd_ovf));

  assign node[0][NSUM] = neg_half_n;
  for (genvar i = NSUM + 1; i < LEAVES; i++) begin : g_pad
    assign node[0][i] = FP_ZERO;
  end

  // ---- adder tree ---------------------------------------------------------
  logic [LEVELS-1:0] lvl_err;
  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    localparam int unsigned W = LEAVES >> (l + 1);
    logic [W-1:0] ovf, unf, zero, nan;
    for (genvar i = 0; i < W; i++) begin : g_add
      fp_add #(.LATENCY(L_ADD)) u_add (.clock, .clk_en, .aclr, .dataa(node[l][2*i]), .datab(node[l][2*i+1]),
                   .result(node[l+1][i]), .overflow(ovf[i]), .underflow(unf[i]), .zero(zero[i]), .nan(nan[i]));
    end
    for (genvar i = W; i < LEAVES; i++) begin : g_unused
      assign node[l+1][i] = FP_ZERO;
    end
    // an exception anywhere in this level, delayed to the output
    pipe_reg #(.WIDTH(1), .DEPTH((LEVELS - 1 - l) * L_ADD + L_DIV)) u_dly_err (.clock, .clk_en, .aclr,
                   .d(|ovf | |nan), .q(lvl_err[l]));
  end

  // ---- normalisation ------------------------------------------------------
  logic q_ovf, q_unf, q_zero, q_nan, conv_err;
  fp_div #(.LATENCY(L_DIV)) u_div (.clock, .clk_en, .aclr, .dataa(node[LEVELS][0]), .datab(sd_sum),
                  .result(alpha), .overflow(q_ovf), .underflow(q_unf), .zero(q_zero), .nan(q_nan));
  pipe_reg #(.WIDTH(1), .DEPTH(LEVELS * L_ADD + L_DIV)) u_dly_conv (.clock, .clk_en, .aclr,
                  .d(|conv_zero), .q(conv_err));

  // After aclr the registers hold zeros; the output is valid once the first
  // sample and the constants have reached the end.
  logic [FILL_W-1:0] fill;
  always_ff @(posedge clock or posedge aclr) begin
    if (aclr)                                 fill <= '0;
    else if (clk_en && fill != FILL_W'(FILL)) fill <= fill + FILL_W'(1);
  end

  assign valid    = (fill == FILL_W'(FILL));
  assign fp_error = valid && (|lvl_err | conv_err | q_ovf | q_nan | sd_nan | sd_ovf | c1_ovf | c2_ovf);
endmodule
