// fp_sincos: single-precision floating-point sine or cosine (FUNC = 0 for
// sine, 1 for cosine) of an angle in radians.
//
// Range reduction: |x| = m * 2^E with a 24-bit integer m is multiplied by
// 1/(2*pi) held as a 72-bit fraction (C72 = floor(2^72/(2*pi))), and a
// variable shift extracts 40 bits of the fractional number of turns. The two
// top bits give the quadrant; the remaining 38 bits, times 2*pi, give an
// angle phi in [0, pi/2) with 44 fraction bits. A 44-step CORDIC in rotation
// mode, started at (K, 0) with K = prod 1/sqrt(1 + 2^-2i) so that the gain
// cancels, turns phi into cos(phi) and sin(phi); the step angles
// atan(2^-i) * 2^44 are listed for i < 15 and equal 2^(44-i) after rounding
// for i >= 15. The quadrant then picks and negates one of them, and the
// fixed-point value is normalised and rounded to nearest even.
//
// Accuracy: the fixed-point result has an absolute error of a few 2^-40, so
// results of magnitude above about 2^-12 are within one unit in the last
// place; very close to a zero of the function (x near a multiple of pi for
// the sine) only the absolute error holds. Inputs below 2^-12 in magnitude
// are answered directly: sin(x) = x and cos(x) = 1, exact to rounding.
// Subnormal inputs count as zero. NaN, infinite and |x| >= 2^20 inputs give
// a quiet NaN (the reduction constant covers 2^20 radians).
//
// Interface: result LATENCY enabled clocks after data. The ports (clock,
// clk_en, aclr, data, result) and the one-function-per-instance use follow
// the paper's description of its trigonometric IP core; the algorithm,
// the input range and the accuracy are this design's.
module fp_sincos
  import fp32_pkg::*;
#(
  parameter bit          FUNC    = 1'b0,
  parameter int unsigned LATENCY = 1
) (
  input  logic  clock,
  input  logic  clk_en,
  input  logic  aclr,
  input  fp32_t data,
  output fp32_t result
);
  localparam int ITER = 44;
  localparam logic [69:0] C72    = 70'h28BE60DB9391054A7F;   // floor(2^72 / (2*pi))
  localparam logic [46:0] TWO_PI = 47'h6487ED5110B4;         // round(2*pi * 2^44)
  localparam logic [43:0] K_GAIN = 44'h9B74EDA8436;          // round(K * 2^44)

  function automatic logic signed [47:0] atan_step(input int i);
    case (i)
      0:  return 48'h0C90FDAA2217;
      1:  return 48'h076B19C1586F;
      2:  return 48'h03EB6EBF2590;
      3:  return 48'h01FD5BA9AAC3;
      4:  return 48'h00FFAADDB968;
      5:  return 48'h007FF556EEA6;
      6:  return 48'h003FFEAAB777;
      7:  return 48'h001FFFD555BC;
      8:  return 48'h000FFFFAAAAE;
      9:  return 48'h0007FFFF5555;
      10: return 48'h0003FFFFEAAB;
      11: return 48'h0001FFFFFD55;
      12: return 48'h0000FFFFFFAB;
      13: return 48'h00007FFFFFF5;
      14: return 48'h00003FFFFFFF;
      default: return 48'sd1 <<< (44 - i);
    endcase
  endfunction

  fp32_t               res_c;
  logic [93:0]         prod;
  logic [7:0]          sh;
  logic [39:0]         turns;
  logic [1:0]          quad;
  logic [84:0]         phi_full;
  logic signed [47:0]  cx, cy, cz, tx;
  logic signed [47:0]  v;
  logic [46:0]         mag;
  logic [72:0]         ext;
  logic                neg;
  int                  lead;
  fp_rnd_t             rnd;

  always_comb begin
    // fractional turns of |x|: (m * C72) * 2^(e-150-72), keep 40 bits
    prod     = {1'b1, data.man} * C72;
    sh       = 8'd182 - data.exp;                // 36 .. 67 on the reduced path
    turns    = 40'(prod >> sh);
    quad     = turns[39:38];
    phi_full = turns[37:0] * TWO_PI;             // angle * 2^84
    cx       = 48'(K_GAIN);
    cy       = '0;
    cz       = 48'(phi_full >> 40);
    for (int i = 0; i < ITER; i++) begin
      tx = cx;
      if (!cz[47]) begin
        cx = cx - (cy >>> i);
        cy = cy + (tx >>> i);
        cz = cz - atan_step(i);
      end else begin
        cx = cx + (cy >>> i);
        cy = cy - (tx >>> i);
        cz = cz + atan_step(i);
      end
    end
    // cx = cos(phi), cy = sin(phi); move to the quadrant
    case ({FUNC, quad})
      3'b000: v = cy;
      3'b001: v = cx;
      3'b010: v = -cy;
      3'b011: v = -cx;
      3'b100: v = cx;
      3'b101: v = -cy;
      3'b110: v = -cx;
      default: v = cy;
    endcase
    neg = v[47] ^ (!FUNC & data.sign);          // sine is odd, cosine even
    mag = v[47] ? 47'(-v) : 47'(v);
    lead = 0;
    for (int b = 0; b < 47; b++) if (mag[b]) lead = b;
    ext = {mag, 26'd0} << (46 - lead);
    rnd = fp_round(neg, 12'(lead) - 12'sd44 + 12'sd127, {ext[72:49], ext[48], |ext[47:0]});
    res_c = (mag == '0) ? FP_ZERO : rnd.value;

    if (fp_is_nan(data) || fp_is_inf(data) || data.exp >= 8'd147) begin
      res_c = FP_QNAN;
    end else if (data.exp < 8'd115) begin       // |x| < 2^-12, zero and subnormals
      if (FUNC) res_c = FP_ONE;
      else      res_c = fp_is_zero(data) ? {data.sign, 31'd0} : data;
    end
  end

  pipe_reg #(.WIDTH(32), .DEPTH(LATENCY)) u_out (
    .clock, .clk_en, .aclr,
    .d(res_c),
    .q(result)
  );
endmodule
