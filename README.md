# Gaussian random number generators in single-precision RTL: polar, Box–Muller and central limit

A continuous-variable quantum key distribution transmitter modulates each
coherent-state pulse with two independent zero-mean Gaussian numbers, one for
each quadrature. This design produces those numbers in hardware. It builds a
stream of pseudo-random uniform numbers with shift-register generators and
turns pairs of them into pairs of standard normal samples by the *polar*
(Marsaglia–Bell rejection) method. All arithmetic is IEEE-754 single
precision. The design follows the FPGA architecture described by Hu, Wu,
Chen, Wan and Tong in "Gaussian Random Number Generator: Implemented in FPGA
for Quantum Key Distribution". That work compares three algorithms and
recommends the polar method. All three are built here from one set of units:
`grng_polar` is the main generator, and `grng_box_muller` and `grng_clt` are
the two it is compared with. The vendor floating-point cores the original
relies on are replaced with portable SystemVerilog.

## The polar method in one paragraph

Pick a point (x, y) uniformly in the square (-1, 1]². If it falls outside the
unit disc (s = x² + y² ≥ 1), discard it. Otherwise the angle of the point is
uniform and s itself is uniform on (0, 1), so

    alpha = x · sqrt(-2 ln s / s),    beta = y · sqrt(-2 ln s / s)

are two independent N(0, 1) samples. Unlike the Box–Muller transform, no
sine or cosine is needed; the cost is that π/4 ≈ 78.5 % of the candidate
points are used and the rest are thrown away.

## Polar data path and timing

Delays shown for the default of one register stage per unit:

```
 MSRG1 ─ CONV ─┐                       ┌──────────── x, y delayed 6 clocks ───────────┐
 MSRG2 ─ CONV ─┤   sign     x ─ x*x ─┐ │                                              ▼
 MSRG3 ─ CONV ─┼─ combiner ─┤        ADD ─ s ─┬─ <1? ─ valid (delayed 5) ──────────► valid
 MSRG4 ─ CONV ─┘            y ─ y*y ─┘        ├─ LOG ─ *(-2) ─ DIV ─ SQRT ─ *x, *y ─► alpha, beta
                                              └─ s delayed 2 ──┘
```

By default every arithmetic unit (convertor, multiplier, adder, logarithm,
divider, square root) has one register stage; see "Changing it" for deeper
settings. The sign combiner and the `<1?`
comparator are combinational. A new candidate pair enters on every clock with
`clk_en` high. The pair built from the generator words of clock *n* leaves
the output multipliers 8 enabled clocks later. `valid` is then high if the
pair passed the `s < 1` test. On average 0.785 output pairs appear per
clock, and each pair gives two samples. Rejected pairs are not removed from
the pipeline: they travel through it with their valid bit low. So the timing
is fixed and there is no back-pressure. Dropping `clk_en` freezes every
register, including the generators and the sign counter, so a stall never
changes the sequence of numbers. `aclr` (asynchronous, active high) reloads
the seeds and clears the pipeline. A fill counter keeps `valid` low
until the first real pair, the seeds, reaches the output, 8 clocks after
reset.

`fp_error` rises when any unit raises an overflow or NaN flag (or a convertor
sees a zero word) for a pair that is being output. In a correct run it never
rises. The unused `zero`/`underflow` outputs of the internal units are left
unconnected on purpose.

## Uniform source: the multi-return shift register generator

`msrg` is an LFSR in the internal-feedback ("Galois", multi-return) form.
Each clock, stage 1 takes the last stage a_N. Every later stage i+1 takes
either a_i or a_i ⊕ a_N; a multiplexer chooses between them under the
coefficient bit c_i. The coefficients arrive on a port (`coeff`, bit i = c_i),
so the characteristic polynomial

    f(x) = x^N + c_{N-1} x^{N-1} + … + c_1 x + c_0

can be changed while the design runs. The generator is built for
f(x) = x³² + x⁸ + x⁵ + x² + 1 (`fp32_pkg::MSRG_POLY32_COEFF = 32'h125`). This
polynomial is primitive, so each generator runs through all 2³² − 1 non-zero
states before it repeats. Each register step multiplies the state polynomial
by x modulo f; the testbenches use exactly that as their reference.

The whole register is read as the uniform word each clock. The register
advances by one bit per clock. Two consecutive words are therefore almost the
same number, shifted by one place. The `SHIFTS` parameter (default 1) lets
the register take several steps per clock; with `SHIFTS = N` consecutive
words share no bits.

All four generators use the same polynomial and differ only in their seeds:
1 and 0xFFFFFFFE for U1 and U2, 0x2545F491 and 0x9E3779B9 for U3 and U4. So
the four streams are the same m-sequence at four different phases.

## From generator word to uniform number

`convertor` maps a word k (1 … 2³² − 1) to U = k / (2³² − 1), rounded to
binary32, so U lies in (0, 1] and k = 2³² − 1 gives exactly 1.0. There is no
general divider. The quotient is the series k·2⁻³² + k·2⁻⁶⁴ + k·2⁻⁹⁶ + …. The
first two terms together are the 64-bit word {k, k}. Everything after them is
positive and far below the rounding position, so it only sets the sticky
bit. Normalising {k, k} and rounding once gives the correctly rounded
quotient.

## Making the polar samples two-sided

Uniforms in (0, 1] only cover one quadrant of the disc, so alpha and beta
would always be positive. Two more uniforms, U3 and U4, are given a negative
sign bit. `sign_combiner` then steps a 2-bit counter every enabled clock and
passes (U1, U2), (−U3, U2), (U1, −U4), (−U3, −U4) in turn. Each quadrant gets
exactly a quarter of the candidate points. The rejection test then skips
about one pair in five, so the signs of successive *outputs* are not a fixed
pattern. They are not independent random bits either. This counter is this
design's own choice: the published description says only that negated U3 and
U4 are "combined" with U1 and U2. An application that needs unpredictable
signs should take the sign from an independent random bit instead.

## The floating-point units

All units share the conventions in `fp32_pkg`:

- binary32 format and round-to-nearest-even;
- subnormal inputs count as zero, and subnormal results are flushed to zero
  and flagged as underflow;
- one shared routine, `fp_round`, does the rounding, the carry out of the
  significand, and the overflow and underflow detection.

The ports copy the style of common FPGA floating-point cores: `clock`,
`clk_en`, `aclr`, `data`/`dataa`/`datab`, `result`, and the exception flags.
Each unit has a `LATENCY` parameter, the number of output registers
(default 1).

| unit | method | accuracy (tested) |
|---|---|---|
| `fp_mul` | 24×24-bit significand product, guard and sticky bits | correctly rounded |
| `fp_add` | swap by magnitude, align with guard/round/sticky, add or subtract, leading-zero normalise | correctly rounded |
| `fp_div` | 27-step restoring division of the significands | correctly rounded |
| `fp_sqrt` | exponent made even, 25-step digit-by-digit root of a 50-bit integer | correctly rounded |
| `fp_cmp` | compares bit patterns as sign-magnitude integers | exact |
| `fp_log` | log₂ by repeated squaring, then × ln 2 in fixed point | absolute error ≤ 2⁻²⁵ (within 2 ulp away from 1) |
| `fp_sincos` | range reduction to turns, 44-step CORDIC | within 1 ulp, or 2⁻³⁶ absolute near a zero; 99.8 % correctly rounded |

Exception flags:

| unit | flags |
|---|---|
| `fp_mul`, `fp_add` | `overflow`, `underflow`, `zero`, `nan` |
| `fp_div` | `overflow` (also for x/0), `underflow`, `zero`, `nan` (0/0, ∞/∞) |
| `fp_sqrt` | `zero`, `nan` (negative input), `overflow` (input +∞) |
| `fp_log` | `zero` (input exactly 1), `nan` (negative or NaN input) |
| `fp_cmp` | `unordered` (a NaN operand) |
| `fp_sincos` | none; NaN, ±∞ and \|x\| ≥ 2²⁰ give a quiet NaN |

**The logarithm** is the unit that needs the most explanation. Write
x = 2^e · m with m in [1, 2), so that ln x = ln 2 · (e + log₂ m). The bits of
log₂ m are found one at a time. Square m. If the square is 2 or more, the
next bit is 1 and the square is halved; otherwise the bit is 0. Then square
again. After `FRAC` = 28 steps, the fixed-point number e + log₂ m has 28
fraction bits. m is carried with two extra fraction bits, so the truncation of
each square stays below the last result bit. That number is multiplied by a
32-bit ln 2 constant and rounded to binary32 once.

The error is therefore absolute, about 2⁻²⁶. For large |ln x| it is far below
one ulp. For x very close to 1 the result is tiny and only its first few bits
are right. In the polar method this costs nothing: s near 1 gives
sqrt(−2 ln s / s) near 0, and a sample that small is well inside the bulk of
the distribution. The end-to-end test bounds the effect on alpha and beta at
10⁻⁴ absolute. As written, the 28 squarers form one combinational chain
behind one register. For a fast clock, raise `LATENCY` and let retiming
spread the chain, or put a register after every few squarers.

**The sine and cosine** (`fp_sincos`, used only by Box–Muller) work in
fixed point. One instance computes one function; `FUNC` = 0 gives the sine
and 1 the cosine.

1. *Reduce to turns.* Write |x| = m · 2^E with a 24-bit integer m. Multiply
   m by 1/(2π) held as a 72-bit fraction. A shift by E then leaves 40 bits
   of the fractional number of turns; the whole turns fall away. This is
   exact enough up to |x| < 2²⁰ radians. Larger inputs give NaN.
2. *Split off the quadrant.* The top two of those 40 bits are the quadrant.
   The other 38 bits, multiplied by 2π, give an angle φ in [0, π/2) with 44
   fraction bits.
3. *Rotate.* A CORDIC starts at the point (K, 0) and turns it by ±atan(2⁻ⁱ)
   in step i, for 44 steps, always towards φ. K is the product of
   1/√(1 + 2⁻²ⁱ) and cancels the growth of the steps, so the point ends at
   (cos φ, sin φ). Each step is two shifted additions and a table constant.
   For i ≥ 15, atan(2⁻ⁱ) rounds to exactly 2⁻ⁱ at 44 bits, so only fifteen
   constants are listed.
4. *Back to floating point.* The quadrant selects cos φ or sin φ and its
   sign. The value is normalised and rounded once. The sine takes the sign
   of x; the cosine ignores it.

The error is a few units of 2⁻⁴⁰, absolute. Every result above about 2⁻¹²
is therefore within one ulp. Close to a zero of the function, only the
absolute bound holds. Inputs below 2⁻¹² skip the CORDIC: sin x = x and
cos x = 1, which is exact after rounding. Like the logarithm, the 44 steps
form one combinational chain behind the output register.

## The two comparison generators

Both reuse the polar generator's units. Neither rejects anything, so each
gives one result every enabled clock, and `valid` stays high once the
pipeline has filled.

**Box–Muller** (`grng_box_muller`). Two generators give U1 and U2. Then the
radius R = sqrt(−2 ln U1) and the angle θ = 2π · U2 give
alpha = R · cos θ and beta = R · sin θ. The radius branch (log, ×−2, root)
is one clock longer than the angle branch (×2π, sine/cosine), so the
sine and cosine are delayed one clock to meet it. Latency:
L_CONV + max(L_LOG + L_MUL + L_SQRT, L_MUL + L_SC) + L_MUL, 5 clocks by
default.

    U1 ─ LOG ─ ×(−2) ─ SQRT ─────────────────┐ R
    U2 ─ ×2π ─┬─ COS ─ delay ──── × R ──── alpha
              └─ SIN ─ delay ──── × R ──── beta

The seeds matter far more here than in the polar method. Both generators
use the same polynomial, so U1 and U2 are two phases of one m-sequence, and
the seeds fix the distance between them. With seeds 1 and 0xFFFFFFFE the
pairs are so dependent that the alpha histogram is grossly wrong (χ² near
4000 over a million samples). The defaults 0x2545F491 and 0x9E3779B9 pass.

**Central limit** (`grng_clt`). `NSUM` = 12 generators give U1 … U12. A sum
of n uniforms has mean n/2 and variance n/12, so

    alpha = (U1 + … + Un − n/2) / sqrt(n/12)

is close to N(0, 1) in the middle. It can never exceed sqrt(3n) = 6 in
magnitude, and its tails are too thin well before that. The sum is a tree of
two-input adders: sixteen leaves (the twelve uniforms, −n/2 and three
zeros) in four levels. The constants −n/2 and sqrt(n/12) come from the same
multiplier and square-root units, fed with constant operands. Synthesis
reduces them to constants; in simulation they settle during the pipeline
fill. Latency: L_CONV + 4·L_ADD + L_DIV, 6 clocks by default.

Every operation here is correctly rounded, so the testbench's model
reproduces the output bit for bit.

## Measured behaviour

One million accepted pairs from the polar generator at its defaults
(`tb/grng_polar_stats_tb.sv`, about 1.27 million clocks):

| set | mean | variance | skewness | kurtosis | χ² (18 bins, 17 d.o.f.) |
|---|---|---|---|---|---|
| alpha | 0.00034 | 0.9997 | 0.0004 | 2.999 | 25.9 |
| beta | −0.00030 | 0.9979 | −0.0006 | 3.013 | 35.0 |

- **Kolmogorov–Smirnov:** D = 0.00071 for alpha and 0.00082 for beta,
  estimated from the counts in 4800 bins of width 0.0025, so it sits
  slightly below the exact value. The 5 % critical value for a million
  samples is 1.358/√n = 0.00136, so neither set is rejected. The published
  figures for this method are 0.0012 and 0.0010.
- **Anderson–Darling:** A² = 0.32 for alpha and 0.83 for beta, against the
  fully specified N(0, 1), estimated on the same grid. The 5 % critical
  value is 2.49, so neither set is rejected.
- **Acceptance rate:** 0.7855 (π/4 = 0.7854).
- **Moments:** the mean, variance, skewness and kurtosis are those of a
  standard normal to within the sampling noise.
- **Chi-square, 5 % level:** the critical value is 27.6. alpha passes. beta
  is rejected.
- **Where the χ² excess comes from:** mostly |x| > 4. beta has 47 samples
  above +4 where 31.7 are expected, and both sets have 44 below −4.
- **More shifts per clock:** with `SHIFTS = 32` the statistics become 30.6
  and 24.2. A borderline excess remains.
- **Likely cause:** the source itself. The four streams are phases of one
  m-sequence, and consecutive words are shifted copies of each other.
- **Short runs:** over shorter windows the sample variance wanders
  more than sampling noise alone explains. A 50,000-clock run with
  a different sign assignment gave 1.045 for beta.
- **How the test counts it:** a failure only at the 0.1 % level (40.8). The
  5 % verdicts above are printed.
- **Advice:** treat the tails of this generator with care. A better uniform
  source would have independent polynomials per stream or several register
  steps per word.

The two comparison generators, one million outputs each
(`tb/grng_box_muller_tb.sv`, `tb/grng_clt_tb.sv`):

| set | mean | variance | skewness | kurtosis | χ² (18 bins) |
|---|---|---|---|---|---|
| Box–Muller alpha | 0.00003 | 0.9958 | 0.0020 | 3.005 | 26.3 |
| Box–Muller beta | 0.00042 | 0.9962 | −0.0033 | 2.996 | 20.8 |
| central limit | −0.0014 | 1.0020 | −0.0011 | 2.942 | 139 |

| set | Kolmogorov–Smirnov D | Anderson–Darling A² |
|---|---|---|
| Box–Muller alpha | 0.00098 | 1.76 |
| Box–Muller beta | 0.00085 | 1.19 |
| central limit | 0.00203 | 7.32 |

- **Box–Muller** passes all three tests at the 5 % level for both sets.
- **Central limit** is rejected by all three, as expected for this method:
  the kurtosis is below 3, and the largest sample of the million is 4.77.
- **Kurtosis of the central-limit output:** for twelve independent
  uniforms it would be 3 − 1.2/12 = 2.90. The measured 2.94 reflects
  the dependence between the twelve phases of one m-sequence.
- **Correlation in time:** every word is its predecessor shifted by one
  bit, so each uniform is about half the previous one plus a new top
  bit. The central-limit output inherits this: its lag-1 autocorrelation
  is 0.50. Set `SHIFTS` to 32 if consecutive samples must be
  uncorrelated.

## Where this RTL departs from or adds to the published design

- **Vendor cores replaced.** The vendor's logarithm, divider and square-root
  cores are replaced by the units above. They keep the documented port names
  and exception meanings. Their internals and latencies are this design's own.
- **Register placement added.** The published block diagram draws plain
  wires. Here every unit has one register, and x, y and s are delayed so they
  meet the later units at the right clock.
- **Four generators.** The published diagram shows two MSRGs. The two-sided
  output needs U3 and U4 as well, so four are built.
- **Seeds.** In the polar generator, 1 and 0xFFFFFFFE for U1 and U2 follow the original authors'
  notes. The U3 and U4 seeds are arbitrary non-zero values.
- **Division by 2³² − 1.** It is done by the series trick above, not by a
  general divider.
- **Sign combiner.** The quadrant counter is this design's own.
- **Rejected pairs and errors.** Rejected pairs are handled with a valid bit.
  The `fp_error` summary output is added.
- **Central-limit scaling.** The published figure and formula divide
  (sum − n/2) by sqrt(n) · (1/12). That does not give unit variance: for
  n = 12 the standard deviation would be 3.46. Here the divisor is
  sqrt(n · (1/12)), the true standard deviation of the sum. The units are
  the same; only their order differs.
- **Central-limit adder.** The figure's single n-input adder is a tree of
  two-input adders.
- **Box–Muller naming.** The published equations put the sine in alpha and
  the cosine in beta. Its block diagram does the opposite, and the diagram is
  followed. Both sets are standard normal either way.
- **Box–Muller seeds.** These are not the original 1 and 0xFFFFFFFE, for the
  reason given above.
- **Sine/cosine range.** The vendor core's input range is not documented.
  This one accepts |x| < 2²⁰ radians, far more than the 2π it is given.
- **Pin count.** The top has 101 signal pins: clock, enable, clear, 32
  coefficient bits, two 32-bit samples, valid and error. The original FPGA
  build reports 131 I/O pins for this generator. What the other pins carried
  is not documented, so no attempt is made to match that number.

## Not built

- **Resource comparison.** The original reports FPGA logic-element, LUT and
  fan-out counts for the three generators. Those depend on the vendor's
  tools and cores, so they are not reproduced.
- **The electrical modulator.** It would turn alpha and beta into the phase
  and amplitude of the optical signal. It is outside the digital design;
  `alpha`, `beta` and `valid` are where it would connect.

## Files

| file | contents |
|---|---|
| `rtl/fp32_pkg.sv` | binary32 struct, constants, the MSRG polynomial, `fp_round` |
| `rtl/pipe_reg.sv` | enabled delay line used for unit outputs and operand alignment |
| `rtl/msrg.sv` | shift-register generator |
| `rtl/convertor.sv` | word → U = k/(2^N − 1) |
| `rtl/sign_combiner.sv` | quadrant selection with negated U3, U4 |
| `rtl/fp_mul.sv`, `fp_add.sv`, `fp_div.sv`, `fp_sqrt.sv`, `fp_log.sv`, `fp_cmp.sv` | floating-point units |
| `rtl/fp_sincos.sv` | sine or cosine, for Box–Muller |
| `rtl/grng_polar.sv` | polar generator, the main top level |
| `rtl/grng_box_muller.sv` | Box–Muller generator |
| `rtl/grng_clt.sv` | central-limit generator |
| `tb/fp_ref_pkg.sv` | binary32 ↔ real conversion for reference models |
| `tb/<unit>_tb.sv` | self-checking test of each unit against real arithmetic |
| `tb/grng_polar_deep_tb.sv` | the same end-to-end test with deeper units (latency 25) |
| `tb/grng_polar_tb.sv` | end-to-end test against a cycle-level reference model (200,000 clocks, random stalls, mid-run reset, latency, statistics) |
| `tb/grng_polar_stats_tb.sv` | the one-million-sample statistical run |
| `tb/grng_box_muller_tb.sv`, `tb/grng_clt_tb.sv` | end-to-end tests of the comparison generators over a million samples each |
| `tb/grng_box_muller_deep_tb.sv`, `tb/grng_clt_deep_tb.sv` | the same with deeper units: Box–Muller at latency 20 with the angle branch the longer one, central limit at latency 14 with a 16-clock fill |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends itself. For
example, the end-to-end test:

```sh
verilator --binary --timing --assert -Wno-fatal \
  rtl/fp32_pkg.sv tb/fp_ref_pkg.sv rtl/pipe_reg.sv rtl/msrg.sv rtl/convertor.sv \
  rtl/sign_combiner.sv rtl/fp_mul.sv rtl/fp_add.sv rtl/fp_cmp.sv rtl/fp_log.sv \
  rtl/fp_div.sv rtl/fp_sqrt.sv rtl/grng_polar.sv tb/grng_polar_tb.sv \
  --top-module grng_polar_tb -Mdir obj_top -o sim && obj_top/sim
```

A unit test needs only the two packages, `pipe_reg.sv`, the unit and its
testbench. For the Box–Muller top, replace the polar-only files
(`sign_combiner`, `fp_add`, `fp_cmp`, `fp_div`) with `rtl/fp_sincos.sv`. The
central-limit top needs `msrg`, `convertor`, `fp_mul`, `fp_add`, `fp_div` and
`fp_sqrt`. The end-to-end run takes a few seconds and the million-sample run
about ten.

## Changing it

- **Different polynomial:** drive `coeff` with another coefficient word; it
  must be primitive for the full period. A different register length needs
  `N` and matching seeds. The convertor scales by 2^N − 1 automatically.
- **Decorrelating consecutive words:** set `SHIFTS` (for example to 32).
  The combinational step logic grows linearly with it.
- **Deeper pipelining:** the top's `L_CONV`, `L_MUL`, `L_ADD`, `L_LOG`,
  `L_DIV` and `L_SQRT` set the register stages of each unit (the unit's
  `LATENCY`). The alignment delays and the fill counter follow
  automatically. The total latency is
  L_CONV + 3·L_MUL + L_ADD + L_LOG + L_DIV + L_SQRT. The extra stages are
  plain output registers, meant to be spread by retiming.
  `tb/grng_polar_deep_tb.sv` runs the end-to-end check at latency 25.
- **The comparison generators:** `grng_clt` takes `NSUM` for the number of
  uniforms; the adder tree grows to the next power of two above `NSUM`, and
  the latency becomes L_CONV + clog2(NSUM+1)·L_ADD + L_DIV.
  `grng_box_muller` adds `L_SC` for the sine/cosine stages; the branch
  balancing follows its latency parameters. The `_deep_tb` testbenches
  exercise both at deeper settings.
