// fp_cmp: single-precision "less than" comparator, the acceptance test of the
// polar method (is s = U1^2 + U2^2 below 1?).
//
// Binary32 values order like sign-magnitude integers, so the comparison is
// done on the bit patterns: for two non-negative numbers the larger pattern
// is the larger number, for two negative ones the order is reversed, and a
// negative number is below a non-negative one. +0 and -0 compare equal.
// A NaN operand makes the result unordered and alb low.
//
// Interface: purely combinational, alb = dataa < datab.
// The paper gives the test (s < 1); the comparator's construction is this
// design's.
module fp_cmp
  import fp32_pkg::*;
(
  input  fp32_t dataa,
  input  fp32_t datab,
  output logic  alb,
  output logic  unordered
);
  logic both_zero;
  always_comb begin
    unordered = fp_is_nan(dataa) || fp_is_nan(datab);
    both_zero = (dataa[30:0] == '0) && (datab[30:0] == '0);
    if (unordered || both_zero)           alb = 1'b0;
    else if (dataa.sign != datab.sign)    alb = dataa.sign;
    else if (!dataa.sign)                 alb = dataa[30:0] < datab[30:0];
    else                                  alb = dataa[30:0] > datab[30:0];
  end
endmodule
