// fp_log: natural logarithm of a single-precision number.
//
// Splits x = 2^e * m with m in [1, 2), so ln(x) = ln2 * (e + log2 m).
// The FRAC fraction bits of log2 m are found one per step by repeated
// squaring: square m; if the square reaches 2, the next bit is 1 and the
// square is halved. m is carried with FRAC+2 fraction bits so the truncation
// of each square stays below the last result bit. The fixed-point sum
// e + log2 m (FRAC fraction bits) is multiplied by ln2 (a 32-bit constant)
// and the 68-bit product is normalised and rounded once to binary32.
// The absolute error is about 2^-(FRAC-1); for x close to 1 the result is
// small and its relative error larger.
//
// Exceptions as the logarithm IP core the design is modelled on defines
// them: zero when the input is exactly 1 (result 0), nan when the input is
// negative or NaN. ln(+-0) = -inf and ln(+inf) = +inf, without a flag.
// Subnormals are treated as zero.
//
// Interface: result, zero and nan LATENCY enabled clocks after data.
// The ports and exceptions are the paper's; the squaring algorithm is this
// design's.
module fp_log
  import fp32_pkg::*;
#(
  parameter int unsigned FRAC    = 28,
  parameter int unsigned LATENCY = 1
) (
  input  logic  clock,
  input  logic  clk_en,
  input  logic  aclr,
  input  fp32_t data,
  output fp32_t result,
  output logic  zero,
  output logic  nan
);
  localparam int unsigned W = FRAC + 2;          // fraction bits of m
  localparam logic [31:0] LN2_Q32 = 32'hB172_17F8; // round(ln2 * 2^32)

  fp32_t                  res_c;
  logic                   zero_c, nan_c;
  logic [W:0]             m;          // 1 integer bit, W fraction bits
  logic [2*W+1:0]         sq;
  logic [FRAC-1:0]        f;
  logic signed [FRAC+8:0] l;          // e + log2(m), FRAC fraction bits
  logic [FRAC+7:0]        la;
  logic [FRAC+39:0]       p, pn;
  int unsigned            lead;
  fp_rnd_t                rnd;

  always_comb begin
    m = {1'b1, data.man, (W-23)'(0)};
    for (int i = FRAC - 1; i >= 0; i--) begin
      sq = m * m;                               // 2 integer bits, 2W fraction bits
      if (sq[2*W+1]) begin
        f[i] = 1'b1;
        m    = sq[2*W+1 -: W+1];                // halve: keep bits [2W+1:W+1]
      end else begin
        f[i] = 1'b0;
        m    = sq[2*W -: W+1];
      end
    end
    l    = ((FRAC+9)'(signed'({1'b0, data.exp}) - 10'sd127) <<< FRAC) + (FRAC+9)'({1'b0, f});
    la   = l[FRAC+8] ? (FRAC+8)'(-l) : (FRAC+8)'(l);
    p    = la * LN2_Q32;                        // value = p * 2^-(FRAC+32)
    lead = 0;
    for (int i = 0; i < FRAC + 40; i++) if (p[i]) lead = i;
    pn   = p << (FRAC + 39 - lead);
    rnd  = fp_round(l[FRAC+8], 12'(signed'(lead)) - 12'(FRAC + 32) + 12'sd127,
                    {pn[FRAC+39 -: 25], |pn[FRAC+14:0]});
    res_c  = (p == '0) ? FP_ZERO : rnd.value;
    zero_c = 1'b0;
    nan_c  = 1'b0;
    if (fp_is_nan(data) || (data.sign && !fp_is_zero(data))) begin
      res_c = FP_QNAN; nan_c = 1'b1;
    end else if (fp_is_zero(data)) begin
      res_c = FP_NEG_INF;
    end else if (fp_is_inf(data)) begin
      res_c = FP_POS_INF;
    end else if (data == FP_ONE) begin
      res_c = FP_ZERO; zero_c = 1'b1;
    end
  end

  pipe_reg #(.WIDTH(34), .DEPTH(LATENCY)) u_out (
    .clock, .clk_en, .aclr,
    .d({res_c, zero_c, nan_c}),
    .q({result, zero, nan})
  );
endmodule
