// grng_box_muller: Gaussian random number generator, Box-Muller method.
//
// Two multi-return shift register generators (MSRG) produce 32-bit words
// that the convertors turn into uniforms U1, U2 = k/(2^32-1) in (0, 1].
// With the radius R = sqrt(-2 ln U1) and the angle theta = 2*pi*U2,
//   alpha = R * cos(theta),   beta = R * sin(theta)
// are two independent standard normal samples. All arithmetic is IEEE-754
// single precision:
//
//   U1 -> LOG -> *(-2) -> SQRT --------------------> R
//   U2 -> *(2*pi) -> COS, SIN -> (delay to match) -> *R -> alpha, beta
//
// Timing: one pair per enabled clock, every clock (no rejection). The two
// branches are balanced with delay registers: the radius branch takes
// L_LOG + L_MUL + L_SQRT clocks, the angle branch L_MUL + L_SC, and the
// shorter is delayed by the difference. A pair appears LATENCY = L_CONV +
// max(both) + L_MUL enabled clocks (5 by default) after its MSRG words;
// valid rises once the pipeline has filled and then stays high. clk_en
// stalls the whole pipeline; aclr clears it and reloads the seeds. fp_error
// reports a floating-point exception for a valid pair.
//
// From the paper's Box-Muller architecture figure: the two generators, the
// -2 and 2*pi constants, LOG, SQRT, COS and SIN units and four multipliers,
// with alpha taken from the cosine and beta from the sine (the paper's
// equations name them the other way round; both are standard normal). The
// seeds, the branch balancing and the exception reporting are this design's.
// Both generators use one polynomial, so U1 and U2 are two phases of one
// m-sequence and the seeds choose the distance between them. That distance
// matters far more here than in the polar method: with seeds 1 and FFFFFFFE
// the alpha histogram is grossly wrong (chi-square near 4000 over a million
// samples), while the default seeds 2545F491 and 9E3779B9 pass.
module grng_box_muller
  import fp32_pkg::*;
#(
  parameter int unsigned  N      = 32,
  parameter logic [N-1:0] SEED1  = N'(32'h2545_F491),
  parameter logic [N-1:0] SEED2  = N'(32'h9E37_79B9),
  parameter int unsigned  SHIFTS = 1,
  parameter int unsigned  L_CONV = 1,
  parameter int unsigned  L_MUL  = 1,
  parameter int unsigned  L_LOG  = 1,
  parameter int unsigned  L_SQRT = 1,
  parameter int unsigned  L_SC   = 1
) (
  input  logic         clock,
  input  logic         clk_en,
  input  logic         aclr,
  input  logic [N-1:0] coeff,
  output fp32_t        alpha,
  output fp32_t        beta,
  output logic         valid,
  output logic         fp_error
);
  localparam int unsigned D_RAD   = L_LOG + L_MUL + L_SQRT;
  localparam int unsigned D_ANG   = L_MUL + L_SC;
  localparam int unsigned D_MAX   = (D_RAD > D_ANG) ? D_RAD : D_ANG;
  localparam int unsigned LATENCY = L_CONV + D_MAX + L_MUL;
  localparam int unsigned FILL_W  = $clog2(LATENCY + 1);
  localparam fp32_t       FP_TWO_PI = 32'h40C9_0FDB;   // 2*pi rounded to binary32

  // ---- uniform sources ---------------------------------------------------
  logic [N-1:0] k1, k2;
  fp32_t        u1, u2;
  logic [1:0]   conv_zero;
  msrg #(.N(N), .SEED(SEED1), .SHIFTS(SHIFTS)) u_msrg1 (.clock, .clk_en, .aclr, .coeff, .state(k1));
  msrg #(.N(N), .SEED(SEED2), .SHIFTS(SHIFTS)) u_msrg2 (.clock, .clk_en, .aclr, .coeff, .state(k2));
  convertor #(.N(N), .LATENCY(L_CONV)) u_conv1 (.clock, .clk_en, .aclr, .data(k1), .result(u1), .zero(conv_zero[0]));
  convertor #(.N(N), .LATENCY(L_CONV)) u_conv2 (.clock, .clk_en, .aclr, .data(k2), .result(u2), .zero(conv_zero[1]));

  // ---- radius R = sqrt(-2 ln U1) -------------------------------------------
  fp32_t ln_u, t, rad, rad_d;
  logic  ln_zero, ln_nan, t_ovf, t_unf, t_zero, t_nan, r_zero, r_nan, r_ovf;
  fp_log  #(.LATENCY(L_LOG))  u_log  (.clock, .clk_en, .aclr, .data(u1), .result(ln_u), .zero(ln_zero), .nan(ln_nan));
  fp_mul  #(.LATENCY(L_MUL))  u_mul_m2 (.clock, .clk_en, .aclr, .dataa(ln_u), .datab(FP_NEG_TWO), .result(t),
                     .overflow(t_ovf), .underflow(t_unf), .zero(t_zero), .nan(t_nan));
  fp_sqrt #(.LATENCY(L_SQRT)) u_sqrt (.clock, .clk_en, .aclr, .data(t), .result(rad), .zero(r_zero), .nan(r_nan), .overflow(r_ovf));
  pipe_reg #(.WIDTH(32), .DEPTH(D_MAX - D_RAD)) u_dly_rad (.clock, .clk_en, .aclr, .d(rad), .q(rad_d));

  // ---- angle theta = 2*pi*U2, its cosine and sine -------------------------
  fp32_t theta, cos_t, sin_t, cos_d, sin_d;
  logic  th_ovf, th_unf, th_zero, th_nan;
  fp_mul #(.LATENCY(L_MUL)) u_mul_2pi (.clock, .clk_en, .aclr, .dataa(u2), .datab(FP_TWO_PI), .result(theta),
                   .overflow(th_ovf), .underflow(th_unf), .zero(th_zero), .nan(th_nan));
  fp_sincos #(.FUNC(1'b1), .LATENCY(L_SC)) u_cos (.clock, .clk_en, .aclr, .data(theta), .result(cos_t));
  fp_sincos #(.FUNC(1'b0), .LATENCY(L_SC)) u_sin (.clock, .clk_en, .aclr, .data(theta), .result(sin_t));
  pipe_reg #(.WIDTH(64), .DEPTH(D_MAX - D_ANG)) u_dly_ang (.clock, .clk_en, .aclr, .d({cos_t, sin_t}), .q({cos_d, sin_d}));

  // ---- outputs ------------------------------------------------------------
  logic a_ovf, a_unf, a_zero, a_nan, b_ovf, b_unf, b_zero, b_nan;
  fp_mul #(.LATENCY(L_MUL)) u_mul_a (.clock, .clk_en, .aclr, .dataa(rad_d), .datab(cos_d), .result(alpha),
                  .overflow(a_ovf), .underflow(a_unf), .zero(a_zero), .nan(a_nan));
  fp_mul #(.LATENCY(L_MUL)) u_mul_b (.clock, .clk_en, .aclr, .dataa(rad_d), .datab(sin_d), .result(beta),
                  .overflow(b_ovf), .underflow(b_unf), .zero(b_zero), .nan(b_nan));

  // Exception flags, each delayed to the clock its pair leaves the pipeline.
  logic err_l_d, err_t_d, err_r_d, err_th_d, err_c_d;
  pipe_reg #(.WIDTH(1), .DEPTH(D_MAX - L_LOG + L_MUL)) u_dly_el  (.clock, .clk_en, .aclr, .d(ln_nan), .q(err_l_d));
  pipe_reg #(.WIDTH(1), .DEPTH(D_MAX - L_LOG)) u_dly_et  (.clock, .clk_en, .aclr, .d(t_ovf | t_nan), .q(err_t_d));
  pipe_reg #(.WIDTH(1), .DEPTH(D_MAX - D_RAD + L_MUL)) u_dly_er  (.clock, .clk_en, .aclr, .d(r_nan | r_ovf), .q(err_r_d));
  pipe_reg #(.WIDTH(1), .DEPTH(D_MAX)) u_dly_eth (.clock, .clk_en, .aclr, .d(th_ovf | th_nan), .q(err_th_d));
  pipe_reg #(.WIDTH(1), .DEPTH(D_MAX + L_MUL)) u_dly_ec  (.clock, .clk_en, .aclr, .d(|conv_zero), .q(err_c_d));

  // After aclr the registers hold zeros; outputs are valid once the first
  // pair (the seeds) has reached the end.
  logic [FILL_W-1:0] fill;
  always_ff @(posedge clock or posedge aclr) begin
    if (aclr)                                    fill <= '0;
    else if (clk_en && fill != FILL_W'(LATENCY)) fill <= fill + FILL_W'(1);
  end

  assign valid    = (fill == FILL_W'(LATENCY));
  assign fp_error = valid && (err_l_d | err_t_d | err_r_d | err_th_d | err_c_d |
                              a_ovf | a_nan | b_ovf | b_nan);
endmodule
