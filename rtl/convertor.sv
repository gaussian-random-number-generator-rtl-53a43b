// convertor: MSRG word to single-precision uniform number.
//
// Computes U = k / (2^N - 1) for the N-bit generator word k, rounded to the
// nearest binary32 value (ties to even), so the m-sequence values 1..2^N-1
// map onto (0, 1]. Instead of a general divider it uses the series
//   k/(2^N-1) = k*2^-N + k*2^-2N + k*2^-3N + ...
// The first two terms are the 2N-bit word W = k*2^N + k; the rest is a small
// positive tail that only ever sets the sticky bit. Normalising W and
// rounding therefore yields the exactly rounded quotient (k = 2^N-1 gives
// exactly 1.0).
//
// Interface: data -> result after LATENCY enabled clocks; zero flags k = 0,
// which a running MSRG never produces. The division by 2^N-1 is the paper's;
// doing it by the series above is this design's choice.
module convertor
  import fp32_pkg::*;
#(
  parameter int unsigned N       = 32,
  parameter int unsigned LATENCY = 1
) (
  input  logic         clock,
  input  logic         clk_en,
  input  logic         aclr,
  input  logic [N-1:0] data,
  output fp32_t        result,
  output logic         zero
);
  logic [2*N-1:0] w, wn;
  int unsigned    lead;
  fp_rnd_t        rnd;
  fp32_t          res_c;

  always_comb begin
    w    = {data, data};            // k*2^N + k
    lead = 0;
    for (int i = 0; i < 2*N; i++) if (w[i]) lead = i;
    wn   = w << (2*N - 1 - lead);   // leading one at the top bit
    // significand, guard, sticky (the tail beyond W is > 0 for k > 0)
    rnd  = fp_round(1'b0, 12'(signed'(lead)) - 12'(2*N) + 12'sd127,
                    {wn[2*N-1 -: 25], 1'b1});
    res_c = (data == '0) ? FP_ZERO : rnd.value;
  end

  pipe_reg #(.WIDTH(33), .DEPTH(LATENCY)) u_out (
    .clock, .clk_en, .aclr,
    .d({res_c, data == '0}),
    .q({result, zero})
  );
endmodule
