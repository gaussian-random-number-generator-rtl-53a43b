// sign_combiner: makes the polar method two-sided.
//
// The convertor's uniforms lie in (0, 1], so on their own they only sample
// the first quadrant of the unit disc and every Gaussian output would be
// positive. Two further uniforms U3 and U4 are given a negative sign bit,
// and each clock one of four coordinate pairs is passed on:
//   quadrant 0: ( U1,  U2)   quadrant 1: (-U3,  U2)
//   quadrant 2: ( U1, -U4)   quadrant 3: (-U3, -U4)
// A 2-bit counter stepping on every enabled clock chooses the pair. Since the
// acceptance test later drops about 21% of pairs, the quadrants of
// consecutive accepted outputs do not follow a fixed pattern; over many
// outputs each quadrant carries exactly a quarter of the candidate pairs.
//
// Interface: x, y and quadrant are combinational from the inputs and the
// counter; the counter is cleared by aclr and steps when clk_en is high.
// Negating U3 and U4 by their sign bit is the paper's; how the four
// uniforms are combined (the counter) is this design's choice.
module sign_combiner
  import fp32_pkg::*;
(
  input  logic       clock,
  input  logic       clk_en,
  input  logic       aclr,
  input  fp32_t      u1,
  input  fp32_t      u2,
  input  fp32_t      u3,
  input  fp32_t      u4,
  output fp32_t      x,
  output fp32_t      y,
  output logic [1:0] quadrant
);
  always_ff @(posedge clock or posedge aclr) begin
    if (aclr)        quadrant <= 2'd0;
    else if (clk_en) quadrant <= quadrant + 2'd1;
  end

  always_comb begin
    x = quadrant[0] ? {1'b1, u3[30:0]} : u1;
    y = quadrant[1] ? {1'b1, u4[30:0]} : u2;
  end
endmodule
