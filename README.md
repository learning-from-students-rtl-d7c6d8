# Exact 4-bit MAC units for E2M1, APoT4 and their supernormal extensions

Four-bit number formats for LLM weights and activations trade accuracy
against hardware cost. A 4-bit floating-point code with a sign bit (E2M1)
has only 15 distinct values, because `+0` and `-0` are the same number.
The design here gives that wasted negative-zero code a real value, either
one step beyond the largest magnitude (*super-range*, SR) or one extra
point between two existing values (*super-precision*, SP). It applies the
same idea to APoT4, a format whose magnitudes are sums of two powers of two.

The hardware is one multiply-accumulate (MAC) unit per format. Each unit
multiplies two 4-bit codes exactly. It then adds the product, as a plain
two's-complement integer, into an accumulator wide enough that 256 products
can never overflow it. No rounding happens anywhere. The accumulator width
therefore depends only on the format's largest product. Making a format
"bigger" (SR) or "finer" (SP) costs accumulator bits, and that cost can be
read straight off the RTL.

A small lookup decoder for Student Float (SF4) is also included. SF4 is a
16-entry lookup format for weight-only quantization; its values are
quantiles of a Student's t-distribution.

## The formats and their codes

All MAC formats use a 4-bit code whose top bit is the sign. The values are
listed below in the natural units of each format (E2M1 in units of 1,
APoT4 in units of 1/16).

| code (3 low bits) | 000 | 001 | 010 | 011 | 100 | 101 | 110 | 111 |
|---|---|---|---|---|---|---|---|---|
| E2M1 magnitude | 0 | 0.5 | 1 | 1.5 | 2 | 3 | 4 | 6 |
| APoT4 magnitude (x 1/16) | 0 | 2 | 8 | 10 | 4 | 6 | 1 | 3 |

**E2M1** is `{sign, exponent[1:0], mantissa}` with exponent bias 1.
Exponent 0 is subnormal (`0.m`) and exponents 1 to 3 are normal
(`1.m x 2^(e-1)`). This is the usual FP4 layout. It gives the magnitude set
{0, 0.5, 1, 1.5, 2, 3, 4, 6}.

**APoT4** is `{sign, i1[1:0], i2}`. The magnitude is `S1[i1] + S2[i2]`,
with `S1 = {0, 2^-1, 2^-2, 2^-4}` and `S2 = {0, 2^-3}`. That gives
{0, 1, 2, 3, 4, 6, 8, 10}/16. Divided by the largest value (10/16), these
are 0, 0.1, 0.2, 0.3, 0.4, 0.6, 0.8 and 1.0. The sets are taken from the
APoT literature. The index-to-bit assignment is this design's choice; it
keeps each code a direct pair of set indices.

### Supernormal codes

In both families, code `4'b1000` is negative zero. The variants reassign it:

| variant | code 1000 means | resulting value set |
|---|---|---|
| E2M1 | -0 (= 0) | ±{0, 0.5, 1, 1.5, 2, 3, 4, 6} |
| E2M1 + SR | **+8.0** | adds +8, one step past the range |
| E2M1 + SP | **+5.0** | adds +5, between 4 and 6 |
| APoT4 | -0 | ±{0..10}/16 as above |
| APoT4 + SP | **+5/16** (= 2^-2 + 2^-4) | adds +0.5 normalized |

The extra value is always positive. The formats therefore become
asymmetric: eight positive values, seven negative ones and zero. This has
the same shape as SF4, which puts more values on the positive side because
modern activation functions skew activations positive.

## Exact products

### E2M1 multiplier (`e2m1_mult`)

Each operand is decoded to `(sign, sig, lsh)` with
`value = sig x 2^lsh x 2^-F`:

* `sig` is the significand with its hidden bit. The hidden bit is 0 for
  exponent 0 and 1 otherwise.
* `lsh = max(e, 1) - 1`. This is 0 to 2 for ordinary codes and 3 for the
  SR value `+8 = 1.0b x 2^3`.
* `F` is the number of mantissa fraction bits. It is 1 for E2M1 and SR.
  It is 2 for SP, because `5 = 1.01b x 2^2` needs a second mantissa bit.
  In SP every other code is widened with a zero mantissa LSB.

The product is `(sig_a x sig_b) << (lsh_a + lsh_b)`, negated if the signs
differ. Its LSB weighs `2^-2F`, so the result is exact:

| variant | product LSB | largest magnitude | product width |
|---|---|---|---|
| E2M1 | 1/4 | 6 x 6 = 36 -> 144 | 8 + sign = 9 |
| E2M1 + SR | 1/4 | 8 x 8 = 64 -> 256 | 9 + sign = 10 |
| E2M1 + SP | 1/16 | 6 x 6 = 36 -> 576 | 10 + sign = 11 |

The second mantissa bit is the real cost of super-precision. It does not
raise the largest value, but it makes every product two bits finer.

### APoT4 multiplier (`apot4_mult`)

Each operand is at most two powers of two. The product is therefore at
most four powers of two: `2^(i+j)` for each pair of terms. Each cross term
is a one-hot shift, and a four-input adder sums them, so no array
multiplier is needed. The product LSB is 1/256 and the largest magnitude is
(10/16)^2 = 100/256. That makes 7 magnitude bits plus sign for both APoT4
and APoT4+SP: the SP point (5/16) does not raise the maximum.

## Lossless accumulation: where the widths come from

`mac_accumulator` adds one product per cycle. Its width is

    ACC_W = (product magnitude bits) + clog2(DOT_LEN) + 1 sign bit

With `DOT_LEN = 256` this gives:

| unit | product magnitude bits | ACC_W | worst-case 256-term sum |
|---|---|---|---|
| E2M1 | 8 | 17 | 256 x 144 = 36 864 |
| E2M1 + SR | 9 | 18 | 256 x 256 = 65 536 |
| E2M1 + SP | 10 | 19 | 256 x 576 = 147 456 |
| APoT4 | 7 | 16 | 256 x 100 = 25 600 |
| APoT4 + SP | 7 | 16 | 256 x 100 = 25 600 |

These are the accumulator widths reported in the published synthesis
results for the same formats. The simple rule above, with the product
scaling described in the previous section, reproduces all five of them. An
assertion in the accumulator checks that the guard bit always equals the
sign bit, i.e. that no sum ever overflows.

## Dot-product framing and timing

The MAC units (`e2m1_mac`, `apot4_mac`) are a combinational multiplier
followed by the registered accumulator.

* One `(a, b)` pair is accepted per cycle while `in_valid` is high.
  Idle cycles are allowed.
* A dot product ends after `DOT_LEN` (256) terms. It also ends early on a
  term with `in_last` high. A quantization block of 128 weights is a
  128-term dot product ended by `in_last`.
* One cycle after the final term, `out_valid` pulses for one cycle and
  `acc` holds the finished sum. The sum stays there until the next term
  arrives.
* The first term of a dot product loads the register instead of adding to
  it. Dot products can therefore follow each other with no gap. A 256-term
  dot product occupies 256 cycles, and its result is visible on the 257th.
* `term_cnt` counts the terms already in the current dot product.
  `rst_n` is an asynchronous active-low reset.

The sum is an integer in units of the product LSB: 2^-2 (E2M1, SR),
2^-4 (SP) or 2^-8 (APoT4). Per-block scale factors are applied outside
the unit.

## The combined top (`lowbit_mac_top`)

The top puts the five MAC units behind one operand port:

* `fmt_sel` (type `lowbit_pkg::fmt_e`) chooses the format. It is sampled
  with the first term of a dot product and held (`busy` high) until that
  dot product ends. Changes in between are ignored.
* Only the selected unit receives terms; the others hold their state.
* `result` is the finished sum, sign-extended to 19 bits. `result_frac`
  gives its fraction bits (2, 4 or 8) and `result_fmt` the format that
  produced it. Both come with `out_valid`.
* Independently, `sf4_code`/`sf4_scale` are decoded combinationally to
  `sf4_value` (Q2.14) and `sf4_deq = value x scale`.

The multi-format wrapper is this design's own. The formats are meant to be
compared side by side, so each unit is meant to stand alone; the wrapper
only lets one top exercise them all.

## SF4 lookup (`sf4_lut`)

SF4 puts the same probability mass on every code. Take
`delta = (1/32 + 1/30)/2`. Then take eight evenly spaced probabilities
from `delta` to 1/2, and eight more from 1/2 to `1 - delta`, sharing the
point 1/2. That is 16 probabilities `p_1 .. p_16`. Map each through the
quantile function of a Student's t-distribution with `nu` degrees of
freedom, and divide by the largest magnitude. Code 7 (`p = 1/2`) is then
an exact zero, codes 8 to 15 are positive, and codes 0 and 15 are -1 and +1.

The module stores the resulting values for `nu = 3..6`, to three decimals.
`nu = 5` is the default and the recommended setting. Each value is stored
as Q2.14 (`round(v x 16384)`). The block-scale multiply uses a signed
fixed-point scale of `SCALE_W` bits. The value of `nu = 5`, in code order:

    -1.000 -0.628 -0.455 -0.334 -0.237 -0.153 -0.075 0.000
     0.066  0.133  0.205  0.284  0.376  0.491  0.657 1.000

## How far this follows the published design

Taken from the published work:

* the value sets of every format, including the SR (+8), SP (+5) and
  APoT4+SP (+0.5 normalized) points;
* the APoT sets S1 and S2;
* the MAC structure: an exact multiplier plus an accumulator that adds
  256 terms without loss;
* the resulting accumulator widths;
* the SF4 derivation and values.

This design's own choices:

* the bit layout of the codes, and putting the extra value on code 1000;
* the decoder/shift structure of the E2M1 multiplier and the second
  mantissa bit for SP;
* the shift-and-add APoT multiplier;
* one term per cycle with a combinational multiplier;
* `in_last` framing, back-to-back dot products and the reset style;
* the multi-format top;
* Q2.14 storage for SF4 and the fixed-point scale.

Not reproduced:

* Area and power figures. These come from a commercial 28 nm flow, and no
  clock target is known, so the single-cycle multiplier may need a
  pipeline stage at speed.
* The baseline formats the supernormal variants are compared against
  (INT4, INT5, the Intel and bitsandbytes E2M1 variants, E3M0).
* Conversion from FP32/BF16 into the 4-bit formats, and the
  high-precision MAC that a weight-only lookup format feeds.
* The SF4 values are stored as the rounded three-decimal figures rather
  than computed during elaboration. `sf4_derivation_tb` recomputes them
  from the t-distribution and finds them correct to within 0.0005.

## What the units can run

* A 128-weight quantization block with 4-bit weights and 4-bit
  activations is one 128-term dot product. It fits, exactly.
  `w4a4_block_tb` runs this case end to end (see below).
* Channel-wise quantization of real layers needs longer reductions. An
  example is 3x3x512 = 4608 terms in a ResNet-18 convolution. These must be
  split into partial sums of at most 256 terms, combined outside the unit.
* Weight-only quantization (4-bit weights, high-precision activations)
  does not use these two-operand 4-bit units. `sf4_lut` covers only the
  weight decode of that flow.
* 3-bit formats are not supported.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|---|---|
| `e2m1_mult_tb` | all 256 code pairs of E2M1, SR and SP against the value lists |
| `apot4_mult_tb` | the APoT4 magnitude set, then all 256 pairs of APoT4 and APoT4+SP |
| `mac_accumulator_tb` | cycle-exact `out_valid`; sums of random, short, back-to-back and worst-case (±144 x 256) dot products; 257-cycle latency of a 256-term product |
| `e2m1_mac_tb` | three variants side by side: worst-case sums (6x6, 8x8, 5x5, 6x-6, 8x-6, 256 times), random 256- and 128-term and short dot products, accumulator widths 17/18/19 |
| `apot4_mac_tb` | both APoT units: worst-case ±100 x 256, SP point, random dot products |
| `sf4_lut_tb` | Q2.14 values for nu = 5 and nu = 3 (rounding computed in real arithmetic), monotonicity, zero at code 7, scaled output |
| `sf4_derivation_tb` | recomputes SF4 for nu = 3..6 from its definition (numerically integrated t-distribution CDF, inverted by bisection) and holds every stored value to it within 0.001; the largest difference found is below 0.0005 |
| `lowbit_mac_top_tb` | the whole design at default parameters (see below) |
| `w4a4_block_tb` | the 4-bit-weight, 4-bit-activation block workload on the top (see below) |

`lowbit_mac_top_tb` runs random-format dot products through the top and
checks every result against a reference model. The model uses only the
value lists, not the RTL's decoding. The testbench also counts each
mechanism and fails if one never happens:

* format switches between dot products;
* dot products ended by `in_last`, including 128-term ones;
* dot products ended automatically at 256 terms;
* back-to-back dot products;
* `fmt_sel` changing mid-product and being ignored;
* the SR and SP codes in their own formats;
* E2M1 subnormals;
* a full-scale 256-term product in every format.

`w4a4_block_tb` quantizes data the way a W4A4 layer would be quantized.
It draws blocks of 128 weights and 128 activations from a Student's
t-distribution with 5 degrees of freedom. Each block is scaled
symmetrically by its own largest magnitude and rounded to the nearest
value of the format. There are 100 blocks per format. The testbench checks
that each unit's sum exactly equals the sum of the quantized products. It
also dequantizes the sum with both block scales and compares it with the
unquantized real dot product. It prints the relative RMS error for each
format and fails only if that error exceeds 0.45, far above the 0.15 to
0.3 that all five formats reach. This check is for sanity only. The order
of the formats changes with the random seed, so it is no accuracy ranking.
Real model accuracy depends on real weight and activation statistics.

To run one with Verilator:

    verilator --binary --timing --assert -Irtl -y rtl \
        rtl/lowbit_pkg.sv tb/lowbit_mac_top_tb.sv --top-module lowbit_mac_top_tb
    ./obj_dir/Vlowbit_mac_top_tb

Use the same command with another testbench name. All of them finish in
well under a second. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/lowbit_pkg.sv rtl/<module>.sv`.
The remaining lint warnings are harmless:

* unused package constants;
* unused upper bits of `int` loop variables in the SF4 table builder;
* `rst_n` used both as an asynchronous reset and in an assertion's
  `disable iff`.

## Changing it

* `DOT_LEN` (on the MAC units and the top) sets the dot-product length.
  The accumulator widths follow through `lowbit_pkg::acc_width`.
* To add a format, give its product LSB and largest product magnitude in
  `lowbit_pkg`, write a multiplier that produces the exact integer
  product, and pair it with `mac_accumulator`.
* `NU` on `sf4_lut` selects among the stored SF4 tables (3 to 6).

## Files

`rtl/lowbit_pkg.sv` (types, width rules), `rtl/e2m1_mult.sv`,
`rtl/apot4_mult.sv`, `rtl/mac_accumulator.sv`, `rtl/e2m1_mac.sv`,
`rtl/apot4_mac.sv`, `rtl/sf4_lut.sv`, `rtl/lowbit_mac_top.sv`; one
testbench per module in `tb/`, plus `tb/sf4_derivation_tb.sv` and
`tb/w4a4_block_tb.sv`.
