// grng_polar: Gaussian random number generator, polar (polarization
// decision) method, for the modulation of a continuous-variable QKD
// transmitter.
//
// Four multi-return shift register generators (MSRG) produce 32-bit words
// that the convertors turn into uniforms U = k/(2^32-1) in (0, 1]. The sign
// combiner forms a candidate point (x, y) in the square (-1, 1]^2 from them.
// The point is accepted only if s = x^2 + y^2 < 1; then
//   alpha = x * sqrt(-2 ln(s) / s),   beta = y * sqrt(-2 ln(s) / s)
// are two independent standard normal samples. All arithmetic is IEEE-754
// single precision:
//
//   MSRG -> CONVERTOR -> sign -> x*x, y*y -> ADD -> s <1? -> LOG -> *(-2)
//        -> DIV (by s) -> SQRT -> *x, *y -> alpha, beta
//
// Timing: one candidate pair enters the pipeline per enabled clock. Every
// arithmetic unit has L_* register stages (default 1); x, y, s, the
// acceptance bit and the error flags travel down delay registers whose
// depths are derived from those parameters. A pair's outputs appear
// LATENCY = L_CONV + 3*L_MUL + L_ADD + L_LOG + L_DIV + L_SQRT (8 by default)
// enabled clocks after its MSRG words, with valid high if the pair was
// accepted (about pi/4 of the time), so the long-run output rate is about
// 0.785 pairs per clock.
// clk_en stalls the whole pipeline; aclr clears it and reloads the seeds.
// fp_error reports any floating-point exception raised for an accepted pair.
//
// The data path (units, their order, the -2 constant, the acceptance test)
// follows the paper's architecture figure and text, and the four generators
// with negated U3/U4 follow its footnote. The register placement, the
// quadrant counter, the seeds of U3/U4 and the exception reporting are this
// design's choices.
module grng_polar
  import fp32_pkg::*;
#(
  parameter int unsigned  N      = 32,
  parameter logic [N-1:0] SEED1  = N'(32'h0000_0001),
  parameter logic [N-1:0] SEED2  = N'(32'hFFFF_FFFE),
  parameter logic [N-1:0] SEED3  = N'(32'h2545_F491),
  parameter logic [N-1:0] SEED4  = N'(32'h9E37_79B9),
  parameter int unsigned  SHIFTS = 1,
  // register stages of each arithmetic unit; the alignment delays follow
  parameter int unsigned  L_CONV = 1,
  parameter int unsigned  L_MUL  = 1,
  parameter int unsigned  L_ADD  = 1,
  parameter int unsigned  L_LOG  = 1,
  parameter int unsigned  L_DIV  = 1,
  parameter int unsigned  L_SQRT = 1
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
  // clocks from the start of the squaring to the output multipliers' inputs
  localparam int unsigned D_XY    = L_MUL + L_ADD + L_LOG + L_MUL + L_DIV + L_SQRT;
  localparam int unsigned D_ACC   = L_LOG + L_MUL + L_DIV + L_SQRT + L_MUL;
  localparam int unsigned LATENCY = L_CONV + L_MUL + L_ADD + D_ACC;
  localparam int unsigned FILL_W  = $clog2(LATENCY + 1);

  // ---- uniform sources ---------------------------------------------------
  logic [N-1:0] k1, k2, k3, k4;
  fp32_t        u1, u2, u3, u4;
  logic [3:0]   conv_zero;

  msrg #(.N(N), .SEED(SEED1), .SHIFTS(SHIFTS)) u_msrg1 (.clock, .clk_en, .aclr, .coeff, .state(k1));
  msrg #(.N(N), .SEED(SEED2), .SHIFTS(SHIFTS)) u_msrg2 (.clock, .clk_en, .aclr, .coeff, .state(k2));
  msrg #(.N(N), .SEED(SEED3), .SHIFTS(SHIFTS)) u_msrg3 (.clock, .clk_en, .aclr, .coeff, .state(k3));
  msrg #(.N(N), .SEED(SEED4), .SHIFTS(SHIFTS)) u_msrg4 (.clock, .clk_en, .aclr, .coeff, .state(k4));

  convertor #(.N(N), .LATENCY(L_CONV)) u_conv1 (.clock, .clk_en, .aclr, .data(k1), .result(u1), .zero(conv_zero[0]));
  convertor #(.N(N), .LATENCY(L_CONV)) u_conv2 (.clock, .clk_en, .aclr, .data(k2), .result(u2), .zero(conv_zero[1]));
  convertor #(.N(N), .LATENCY(L_CONV)) u_conv3 (.clock, .clk_en, .aclr, .data(k3), .result(u3), .zero(conv_zero[2]));
  convertor #(.N(N), .LATENCY(L_CONV)) u_conv4 (.clock, .clk_en, .aclr, .data(k4), .result(u4), .zero(conv_zero[3]));

  // ---- candidate point (stage 0 of the arithmetic pipeline) --------------
  fp32_t      x, y;
  logic [1:0] quadrant;
  sign_combiner u_sign (.clock, .clk_en, .aclr, .u1, .u2, .u3, .u4, .x, .y, .quadrant);

  // ---- s = x^2 + y^2 and the acceptance test ----------------------------
  fp32_t xx, yy, s;
  logic  xx_ovf, xx_unf, xx_zero, xx_nan, yy_ovf, yy_unf, yy_zero, yy_nan;
  logic  s_ovf, s_unf, s_zero, s_nan;
  logic  accept, cmp_unordered;

  fp_mul #(.LATENCY(L_MUL)) u_mul_xx (.clock, .clk_en, .aclr, .dataa(x), .datab(x), .result(xx),
                   .overflow(xx_ovf), .underflow(xx_unf), .zero(xx_zero), .nan(xx_nan));
  fp_mul #(.LATENCY(L_MUL)) u_mul_yy (.clock, .clk_en, .aclr, .dataa(y), .datab(y), .result(yy),
                   .overflow(yy_ovf), .underflow(yy_unf), .zero(yy_zero), .nan(yy_nan));
  fp_add #(.LATENCY(L_ADD)) u_add_s  (.clock, .clk_en, .aclr, .dataa(xx), .datab(yy), .result(s),
                   .overflow(s_ovf), .underflow(s_unf), .zero(s_zero), .nan(s_nan));
  fp_cmp u_lt_one (.dataa(s), .datab(FP_ONE), .alb(accept), .unordered(cmp_unordered));

  // ---- sqrt(-2 ln(s) / s) -------------------------------------------------
  fp32_t ln_s, t, q, r, s_d;
  logic  ln_zero, ln_nan, t_ovf, t_unf, t_zero, t_nan;
  logic  q_ovf, q_unf, q_zero, q_nan, r_zero, r_nan, r_ovf;

  fp_log  #(.LATENCY(L_LOG)) u_log  (.clock, .clk_en, .aclr, .data(s), .result(ln_s), .zero(ln_zero), .nan(ln_nan));
  fp_mul  #(.LATENCY(L_MUL)) u_mul_m2 (.clock, .clk_en, .aclr, .dataa(ln_s), .datab(FP_NEG_TWO), .result(t),
                    .overflow(t_ovf), .underflow(t_unf), .zero(t_zero), .nan(t_nan));
  pipe_reg #(.WIDTH(32), .DEPTH(L_LOG + L_MUL)) u_dly_s (.clock, .clk_en, .aclr, .d(s), .q(s_d));
  fp_div  #(.LATENCY(L_DIV)) u_div  (.clock, .clk_en, .aclr, .dataa(t), .datab(s_d), .result(q),
                  .overflow(q_ovf), .underflow(q_unf), .zero(q_zero), .nan(q_nan));
  fp_sqrt #(.LATENCY(L_SQRT)) u_sqrt (.clock, .clk_en, .aclr, .data(q), .result(r), .zero(r_zero), .nan(r_nan), .overflow(r_ovf));

  // ---- outputs ------------------------------------------------------------
  fp32_t x_d, y_d;
  logic  a_ovf, a_unf, a_zero, a_nan, b_ovf, b_unf, b_zero, b_nan;
  pipe_reg #(.WIDTH(64), .DEPTH(D_XY)) u_dly_xy (.clock, .clk_en, .aclr, .d({x, y}), .q({x_d, y_d}));
  fp_mul #(.LATENCY(L_MUL)) u_mul_a (.clock, .clk_en, .aclr, .dataa(x_d), .datab(r), .result(alpha),
                  .overflow(a_ovf), .underflow(a_unf), .zero(a_zero), .nan(a_nan));
  fp_mul #(.LATENCY(L_MUL)) u_mul_b (.clock, .clk_en, .aclr, .dataa(y_d), .datab(r), .result(beta),
                  .overflow(b_ovf), .underflow(b_unf), .zero(b_zero), .nan(b_nan));

  // Exception flags, each delayed to the clock its pair leaves the pipeline.
  logic err_s, err_t, err_q, err_r, err_out;
  logic err_s_d, err_t_d, err_q_d, err_r_d, err_l_d, err_c_d;
  logic acc_d;
  assign err_s   = s_ovf | s_nan | cmp_unordered | xx_ovf | yy_ovf | xx_nan | yy_nan;
  assign err_t   = t_ovf | t_nan;
  assign err_q   = q_ovf | q_nan;
  assign err_r   = r_nan | r_ovf;
  assign err_out = a_ovf | a_nan | b_ovf | b_nan;
  pipe_reg #(.WIDTH(2), .DEPTH(D_ACC)) u_dly_acc (.clock, .clk_en, .aclr, .d({accept, err_s}), .q({acc_d, err_s_d}));
  pipe_reg #(.WIDTH(1), .DEPTH(L_DIV + L_SQRT + L_MUL)) u_dly_et  (.clock, .clk_en, .aclr, .d(err_t), .q(err_t_d));
  pipe_reg #(.WIDTH(1), .DEPTH(L_MUL + L_DIV + L_SQRT + L_MUL)) u_dly_el  (.clock, .clk_en, .aclr, .d(ln_nan), .q(err_l_d));
  pipe_reg #(.WIDTH(1), .DEPTH(L_MUL + L_ADD + D_ACC)) u_dly_ec  (.clock, .clk_en, .aclr, .d(|conv_zero), .q(err_c_d));
  pipe_reg #(.WIDTH(1), .DEPTH(L_SQRT + L_MUL)) u_dly_eq  (.clock, .clk_en, .aclr, .d(err_q), .q(err_q_d));
  pipe_reg #(.WIDTH(1), .DEPTH(L_MUL)) u_dly_er  (.clock, .clk_en, .aclr, .d(err_r), .q(err_r_d));

  // After aclr the pipeline registers hold zeros, not pairs; outputs become
  // valid once the first real pair (the seeds) has reached the end.
  logic [FILL_W-1:0] fill;
  always_ff @(posedge clock or posedge aclr) begin
    if (aclr)                                        fill <= '0;
    else if (clk_en && fill != FILL_W'(LATENCY))     fill <= fill + FILL_W'(1);
  end

  assign valid    = acc_d && (fill == FILL_W'(LATENCY));
  assign fp_error = valid && (err_s_d | err_l_d | err_t_d | err_q_d | err_r_d | err_c_d | err_out);
endmodule
