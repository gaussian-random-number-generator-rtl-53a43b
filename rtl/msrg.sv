// msrg: multi-return shift register generator, the uniform random source.
//
// An N-stage shift register a_1..a_N. Each enabled clock, stage 1 takes the
// last stage a_N, and every later stage i+1 takes either a_i or a_i XOR a_N,
// chosen by a multiplexer under the coefficient bit c_i (coeff[i]). This is
// the internal-feedback ("Galois") form of an LFSR; its characteristic
// polynomial is x^N + c_{N-1} x^(N-1) + ... + c_1 x + c_0. With a primitive
// polynomial, such as the x^32+x^8+x^5+x^2+1 the generator is built for
// (coeff = MSRG_POLY32_COEFF), the register runs through all 2^N-1 non-zero
// states before repeating.
//
// Interface: state is the whole register, bit i-1 = a_i, updated one clock
// after each clk_en. aclr loads SEED (which must be non-zero).
// The stage/XOR/multiplexer structure and the polynomial follow the paper;
// the seed, the asynchronous load of it and the SHIFTS option (several
// register steps per clock, default 1 as in the paper's figure) are choices
// of this design.
module msrg #(
  parameter int unsigned     N      = 32,
  parameter logic [N-1:0]    SEED   = N'(1),
  parameter int unsigned     SHIFTS = 1
) (
  input  logic         clock,
  input  logic         clk_en,
  input  logic         aclr,
  input  logic [N-1:0] coeff,
  output logic [N-1:0] state
);
  logic [N-1:0] nxt;

  // One step: a_1 <= c_0 & a_N ; a_{i+1} <= c_i ? a_i ^ a_N : a_i.
  function automatic logic [N-1:0] step(input logic [N-1:0] a, input logic [N-1:0] c);
    logic [N-1:0] r;
    r[0] = c[0] & a[N-1];
    for (int i = 1; i < N; i++) r[i] = c[i] ? (a[i-1] ^ a[N-1]) : a[i-1];
    return r;
  endfunction

  always_comb begin
    nxt = state;
    for (int s = 0; s < SHIFTS; s++) nxt = step(nxt, coeff);
  end

  always_ff @(posedge clock or posedge aclr) begin
    if (aclr)        state <= SEED;
    else if (clk_en) state <= nxt;
  end

  initial assert (SEED != '0) else $error("msrg: SEED must be non-zero");
endmodule
