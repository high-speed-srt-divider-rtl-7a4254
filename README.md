# Radix-4 SRT divider with predicted-and-corrected quotient digits

This is synthesizable SystemVerilog for an IEEE-754 double-precision divider.
It is built around a radix-4 SRT significand divider. The design follows the
method of B. Mehta, J. Talukdar and S. Gajjar, "High Speed SRT Divider for
Intelligent Embedded System". That paper gives the digit-selection equations,
the two parallel remainders and the on-the-fly conversion table. It does not
give the floating-point wrapper, the widths, the schedule or the interfaces;
those are choices made here, and each one is marked as such below.

An SRT divider retires one quotient digit per step. Each step subtracts a
multiple of the divisor from the shifted remainder:

    p[j+1] = 4 p[j] - q[j+1] D,      q in {-2, -1, 0, 1, 2}

The digit set is redundant. In some regions of the (remainder, divisor) plane
two digits are both correct, so the digit can be picked from a few leading
bits and no full comparison is needed. In a classic radix-4 SRT divider that
choice comes from a quotient-selection table (QST). The table is indexed by
several remainder bits and several divisor bits, and its staircase
boundaries (the P-D plot) get harder to build as the radix grows.

This design splits the choice into two small decisions:

1. An **interim digit** q# in {-2,-1,0,1} is read from only four bits of the
   shifted remainder. The divisor is not used. The true digit is then known
   to be q# or q#+1.
2. A **correction bit** q* in {0,1} is read from five bits of the candidate
   remainder P - q#D and one divisor bit. The digit is q = q# + q*.

Both candidate next remainders, P - q#D and P - (q#+1)D, are formed side by
side. Once q* is known, only a 2:1 multiplexer remains between it and the
next remainder.

## Number formats and scaling

| quantity | range | format in the RTL |
|---|---|---|
| significands x, y | [1, 2) | MANT_W = 53 bits, hidden bit included |
| divisor D = y/2 | [1/2, 1) | 58-bit two's complement: 3 integer bits (sign included), 55 fraction bits |
| first remainder p[0] = x/8 | [1/8, 1/4) | same |
| shifted remainder P = 4p | \|P\| <= 8D/3 < 8/3 | same (a 2-bit wire shift) |
| quotient x/(4y) | (1/8, 1/2) | 56 bits, the weight of bit i is 2^(i-56) |

The dividend is divided by 8 so that |p[0]| <= 2D/3 for every pair of
significands. That bound is the SRT convergence condition for digit set
{-2..2}. It then holds after every step: |p[j]| <= 2D/3. Three integer bits
are enough for P and for every candidate P - kD.

The quotient has its leading one at weight 2^-2 when x >= y and at 2^-3 when
x < y. Below that leading one, 52 more bits and a guard bit are needed. The
last digit must therefore reach weight 2^-56. That takes
ITER = (MANT_W+4)/2 = 28 radix-4 steps.

## Digit selection: why two small decisions are enough

For a digit q to be correct, the next remainder must stay within +-2D/3.
So q is allowed when

    (q - 2/3) D  <=  P  <=  (q + 2/3) D.

The intervals of neighbouring digits overlap by D/3. Look only at the pairs
{q#, q#+1}, for q# from -2 to 1. Each pair has an interval where one of its
two digits is correct. The interim decision splits the P axis at three
fixed lines, -1/2, 0 and +1/2:

| P | q# | the true digit is |
|---|---|---|
| P >= 1/2 (000.1) | 1 | 1 or 2 |
| 0 <= P < 1/2 | 0 | 0 or 1 |
| -1/2 (111.1) <= P < 0 | -1 | -1 or 0 |
| P < -1/2 | -2 | -2 or -1 |

These tests need only the sign, the two integer bits and the first fraction
bit of P (`srt_interim_q`). The last column holds for every divisor in
[1/2, 1). For example, with P >= 1/2 >= D/3, digit 1 is never too large.
The testbench checks this numerically over the whole plane.

Inside a pair, the decision between q# and q#+1 is the same for every pair
once the candidate remainder P^0 = P - q#D is used. Digit q#+1 is allowed
when P^0 >= D/3. Digit q# is allowed when P^0 <= 2D/3. Any threshold t(D)
between those two lines separates the pair. A step function is enough:

| divisor | threshold on P^0 | t lies in [D/3, 2D/3] because |
|---|---|---|
| D in [0.10, 0.11) binary, i.e. [1/2, 3/4) | 0.01 = 1/4 | D/3 < 1/4 and 2D/3 >= 1/3 |
| D in [0.11, 1.00) binary, i.e. [3/4, 1) | 0.10 = 1/2 | D/3 < 1/3 and 2D/3 >= 1/2 |

The paper arrives at this step through a Mamdani fuzzy inference over the
overlap region. As logic it reduces to a single sum of products
(`srt_correction_q`):

    q* = S' (P_int + P_-1 + P_-2 d'_-2)

Here S is the sign of P^0, P_int is the OR of its two integer bits, and
P_-1 and P_-2 are its first two fraction bits. d_-2 is the divisor bit of
weight 1/4: D = 0.1 d_-2 ... The two comparison constants fall on exact bit
boundaries, and P^0 is an exact (non-redundant) number. So the five top bits
decide the comparison exactly, with no estimation error to allow for.

The critical path of one step is:

- a 4-bit decode (q#);
- a 58-bit subtraction P - q#D;
- a 5-bit AND-OR (q*);
- a 2:1 multiplexer.

The second subtraction, P - (q#+1)D, runs beside the first (`srt_partrem`).

## On-the-fly conversion

The digits are signed, so the quotient could be converted to binary with one
final subtraction of its negative digits from its positive ones. Instead,
`srt_otf` keeps two registers:

- A, the quotient so far;
- B = A minus one unit in the last place.

Each digit appends two bits to both registers. The new value of each register
takes either A or B as its prefix, so no carry ever propagates:

| digit q | A[k+1] | B[k+1] |
|---|---|---|
| 2 | A[k], 10 | A[k], 01 |
| 1 | A[k], 01 | A[k], 00 |
| 0 | A[k], 00 | B[k], 11 |
| -1 | B[k], 11 | B[k], 10 |
| -2 | B[k], 10 | B[k], 01 |

A starts at 0 and B at all ones (-1 ulp, modulo 2^56). After the last digit,
A is the truncated quotient if the final remainder is >= 0. If the final
remainder is negative, the true quotient lies one ulp lower and B is used.
The remainder being non-zero is the sticky bit for rounding.

The paper's reduced table agrees with this table in the whole A column and in
the B entries for digits 0, 1 and 2. It prints the B pairs for digits -1 and
-2 as 00 and 11, and it shows only A[k] as the prefix of A and B[k] as the
prefix of B. Taken literally, that does not give a correct quotient. The
standard conversion shown above is used instead. The fault-injection copy of
`srt_otf` that uses the printed prefixes fails almost every check.

## Floating-point wrapper (`fp_div64`)

Around the significand divider, `fp_div64` does the following:

- **Unpack and classify** each operand as zero, normal, infinity or NaN.
  Subnormal operands are read as zeros of the same sign.
- **Sign and exponent:** the sign is sa xor sb and the exponent is
  ea - eb + 1023. Both are held in a 13-bit signed register so that overflow
  and underflow can be seen.
- **Normalise:** bit 2^-2 of the quotient tells whether x >= y. If it is
  clear, the quotient is shifted left one place and the exponent is
  decremented.
- **Round** to nearest, ties to even:
  - guard bit = the first bit below the 53 kept bits;
  - sticky = the bits below the guard bit ORed with "remainder non-zero".

  An exact tie cannot happen in division, and neither can a carry out of the
  rounding increment. Both cases are handled anyway.
- **Pack:**
  - a biased exponent >= 2047 gives a signed infinity;
  - an exponent <= 0 gives a signed zero (subnormal results are flushed).
- **Special operands**, decided when the operands are taken:
  - NaN operands, 0/0 and inf/inf give the quiet NaN 0x7FF8_0000_0000_0000;
  - x/0 and inf/x give a signed infinity;
  - 0/x and x/inf give a signed zero.

No exception flags are produced.

Only the sign, the exponent and a 2-bit special code are registered in the
wrapper. The result is formed combinationally from the core's held quotient
and remainder registers. The whole divider has about 250 flip-flops. The
paper reports 283 for its FPGA build.

## Interface and timing

`fp_div64` (default binary64; `EXP_W` and `FRAC_W` select another binary
format):

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous reset, active low |
| in_valid / in_ready | in / out | 1 | operand handshake; in_ready is high only when idle |
| a, b | in | 64 | dividend and divisor |
| out_valid / out_ready | out / in | 1 | result handshake; the result is held until taken |
| result | out | 64 | a / b |

One division is in flight at a time. The operands are taken on a clock edge
where in_valid and in_ready are both high. out_valid rises 29 edges later:
one edge loads the core, and 28 edges each retire one radix-4 digit. If
out_ready is already high in that cycle, the divider is idle again on the
next edge. Special operands take the same 29 cycles.

`srt_mant_div` has a start/busy/done interface. start is taken when busy is
low. done is a one-cycle pulse ITER+1 edges after start. quot and sticky
stay valid until the next start.

The paper quotes an execution time of 281 ns, a "critical time" of 210 ns
and about 1.5 GHz, all on a Virtex UltraScale FPGA. These figures do not agree
with each other. They are not targets of this RTL, which retires one digit
per clock. The paper also calls its design "super pipelined", but it gives no
stage boundaries. Its flip-flop count is that of one iterative divider, which
is the form built here.

## Files

| file | contents |
|---|---|
| rtl/srt_pkg.sv | digit type, remainder width and iteration-count rules |
| rtl/fp_pkg.sv | operand classes and special-result codes |
| rtl/srt_interim_q.sv | interim digit q# from 4 remainder bits |
| rtl/srt_correction_q.sv | correction bit q* (the threshold step) |
| rtl/srt_partrem.sv | the two candidate remainders |
| rtl/srt_otf.sv | on-the-fly conversion registers A and B |
| rtl/srt_mant_div.sv | iterative radix-4 significand divider |
| rtl/fp_div64.sv | binary64 divider (top) |
| tb/tb_*.sv | one self-checking testbench per module |

## Verification

Each testbench checks its module against values it works out independently.
Each one ends by printing `TB_RESULT checks=N failures=M`:

- `tb_srt_interim_q`: all 16 inputs against the partition lines. It also
  samples the P-D plane to check that q# or q#+1 is always a correct digit.
- `tb_srt_correction_q`: all 64 inputs against the numeric thresholds. It also
  checks that each threshold lies between D/3 and 2D/3 over its divisor range.
- `tb_srt_partrem`: random remainders and divisors against 64-bit integer
  arithmetic.
- `tb_srt_otf`: random digit strings. After every digit, A and B are compared
  with the running integer value V and with V-1.
- `tb_srt_mant_div`: 3000 random and 9 corner significand pairs against
  exact 128-bit integer division, for both the quotient and the sticky bit.
  It also checks the 29-cycle latency. Every digit value, every interim digit,
  both correction values and a negative final remainder must occur.
- `tb_fp_div64`: the full binary64 divider at its default parameters. Over
  4000 random pairs, corner significands, special operands, overflow and
  underflow, each result is compared bit for bit with the simulator's own
  double division. Results are taken under random back-pressure, and each
  must arrive after exactly 29 cycles. The test counts every mechanism and
  fails if one is never used: each digit, both correction values, the B
  selection, both normalisation cases, rounding up and down, each special
  result, overflow and underflow.

To simulate with Verilator, for example the top:

    verilator --binary --timing --assert -y rtl +libext+.sv \
        rtl/srt_pkg.sv rtl/fp_pkg.sv tb/tb_fp_div64.sv --top-module tb_fp_div64
    ./obj_dir/Vtb_fp_div64

For the other testbenches, replace the testbench file and top-module name.
Each testbench runs in well under a second. The testbenches of
`srt_mant_div` and `fp_div64` read internal signals by hierarchical name to
count the mechanisms.

## Where this departs from the paper, and what it leaves out

- **Which remainders are computed.** Equations (7) and (8) of the paper print
  the candidates as P + q*D and P - (q*+1)D. Its text describes remainders
  for "the interim quotient and the same incremented", with P0 used when the
  correction is 0. The text is followed here: P - q#D and P - (q#+1)D.
- **On-the-fly table.** The table above is used instead of the printed one
  (see "On-the-fly conversion").
- **When q\* is known.** The paper says the correction quotient is found in
  parallel with the new remainders. Its equation uses bits of P - q#D, and
  the 1/4 threshold has no slack at D = 3/4, so those bits must be exact.
  Here q\* therefore follows the subtraction P - q#D, and only the second
  candidate, P - (q#+1)D, runs in parallel with it.
- **Correction step for all digit pairs.** The paper draws the correction
  step only for the {0, 1} pair, against P^0. Applying the same step to
  P - q#D for every pair is this design's reading. The testbenches confirm
  that the remainder stays in bounds under it, and an assertion in
  `srt_mant_div` checks the bound on every step.
- **Choices of this design:**
  - operand scaling (x/8, y/2);
  - the number of steps;
  - one digit per clock;
  - the floating-point wrapper, including round-to-nearest-even,
    flush-to-zero for subnormals and the single quiet NaN;
  - the handshakes and the asynchronous reset.
- **Not built:**
  - The Mamdani fuzzy inference is how the paper finds the threshold step, not
    a circuit. Only its outcome, the step, is built.
  - The 64-bit RISC processor the paper attached the divider to is not
    described there. Its connection is the operand/result handshake of
    `fp_div64`.

## Changing the design

- `fp_div64 #(.EXP_W(8), .FRAC_W(23))` gives a binary32 divider. The core
  then takes (24+4)/2 = 14 steps and has a 29-bit remainder. The testbenches
  cover only binary64.
- The digit selection does not depend on the width. `srt_mant_div` works for
  any `MANT_W` >= 3.
- A pipelined (unrolled) version would chain ITER copies of the step formed
  by `srt_interim_q`, `srt_partrem`, `srt_correction_q` and the remainder
  multiplexer. The on-the-fly registers would then become per-stage quotient
  registers.
