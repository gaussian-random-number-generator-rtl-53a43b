// fp_sqrt: single-precision floating-point square root.
//
// The unbiased exponent is made even (an odd exponent moves one factor of 2
// into the significand), halved, and the significand scaled to a 50-bit
// integer whose integer square root has 25 bits: 24 significand bits plus a
// guard bit. That root is found digit by digit (one bit per step, 25 steps);
// a non-zero remainder is the sticky bit. Rounding is to nearest even.
//
// Flags as the square-root IP core the design is modelled on defines them:
// zero when the result is 0, nan for a negative or NaN input, overflow when
// the result is infinite (only for an input of +inf). -0 gives -0.
// Subnormals are treated as zero.
//
// Interface: result and flags LATENCY enabled clocks after data. The ports
// and flags are the paper's; the root algorithm is this design's.
module fp_sqrt
  import fp32_pkg::*;
#(
  parameter int unsigned LATENCY = 1
) (
  input  logic  clock,
  input  logic  clk_en,
  input  logic  aclr,
  input  fp32_t data,
  output fp32_t result,
  output logic  zero,
  output logic  nan,
  output logic  overflow
);
  fp32_t              res_c;
  logic               nan_c, ovf_c;
  logic signed [11:0] eu, eh;
  logic [49:0]        rad;
  logic [27:0]        rem, trial;
  logic [24:0]        root;
  fp_rnd_t            rnd;

  always_comb begin
    eu = 12'(data.exp) - 12'sd127;
    if (eu[0]) begin
      rad = {1'b1, data.man} << 26;
      eh  = (eu - 12'sd1) >>> 1;
    end else begin
      rad = 50'({1'b1, data.man}) << 25;
      eh  = eu >>> 1;
    end
    rem  = '0;
    root = '0;
    for (int i = 24; i >= 0; i--) begin
      rem   = {rem[25:0], rad[2*i+1], rad[2*i]};
      trial = {1'b0, root, 2'b01};
      if (rem >= trial) begin
        rem  = rem - trial;
        root = {root[23:0], 1'b1};
      end else begin
        root = {root[23:0], 1'b0};
      end
    end
    rnd   = fp_round(1'b0, eh + 12'sd127, {root, rem != '0});
    res_c = rnd.value;
    nan_c = 1'b0;
    ovf_c = 1'b0;
    if (fp_is_nan(data) || (data.sign && !fp_is_zero(data))) begin
      res_c = FP_QNAN; nan_c = 1'b1;
    end else if (fp_is_zero(data)) begin
      res_c = {data.sign, 31'd0};
    end else if (fp_is_inf(data)) begin
      res_c = FP_POS_INF; ovf_c = 1'b1;
    end
  end

  pipe_reg #(.WIDTH(35), .DEPTH(LATENCY)) u_out (
    .clock, .clk_en, .aclr,
    .d({res_c, fp_is_zero(res_c), nan_c, ovf_c}),
    .q({result, zero, nan, overflow})
  );
endmodule
