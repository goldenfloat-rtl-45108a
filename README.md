# GoldenFloat arithmetic in SystemVerilog

GoldenFloat (GF) is a family of binary floating-point formats in which one
closed rule decides, for every total width N, how many bits go to the exponent
and how many to the fraction:

    E = round((N - 1) / phi^2),   M = N - 1 - E,   phi = (1 + sqrt 5) / 2

One bit is the sign. Because 1/phi^2 = 0.381966..., a little under two fifths
of the non-sign bits go to range and the rest to precision, at every width.
The split is *static*: unlike posits or takums it does not depend on the value
being stored. A GF word therefore looks exactly like an IEEE 754 word with
unusual field widths, and one width-generic arithmetic template serves the
whole ladder.

This RTL provides that template: an adder and a multiplier that take N as
their only parameter. Around them sit a GF16 four-term dot product with a
power-on self-test, a GF16 to IEEE binary32 codec, and an integer
accumulator for sums of powers of phi^2 based on the Lucas numbers. A
portfolio top instantiates an adder and a multiplier at ten rungs (GF4, GF8,
GF12, GF16, GF20, GF24, GF32, GF64, GF128, GF256) next to the GF16 units and
the accumulator.

## The ladder

| N | E | M | bias | N | E | M |
|---|---|---|------|---|---|---|
| 4 | 1 | 2 | 0 | 6 | 2 | 3 |
| 8 | 3 | 4 | 3 | 10 | 3 | 6 |
| 12 | 4 | 7 | 7 | 14 | 5 | 8 |
| 16 | 6 | 9 | 31 | 48 | 18 | 29 |
| 20 | 7 | 12 | 63 | 96 | 36 | 59 |
| 24 | 9 | 14 | 255 | 128 | 49 | 78 |
| 32 | 12 | 19 | 2047 | 512 | 195 | 316 |
| 64 | 24 | 39 | 2^23-1 | 1024 | 391 | 632 |
| 256 | 97 | 158 | 2^96-1 | | | |

`gf_pkg::gf_exp_bits(N)` evaluates the rule at elaboration time in 64-bit
integer arithmetic, using 1/phi^2 scaled by 10^16. (N-1)/phi^2 is irrational,
so it is never exactly half-way between integers. The choice between
round-half-even and round-half-up therefore never matters. The function is
exact up to N = 1024. `gf_frac_bits(N)` gives M. `tb_gf_ladder` compares both
functions with the table above for all seventeen widths.

GF4 is a degenerate rung. With E = 1 its only exponent codes are the reserved
ones, so every GF4 word is a zero, an infinity or a NaN. It is kept because
the template covers it without special-casing.

## Encoding

Every unit uses the same conventions:

* word = `{sign, exponent[E-1:0], fraction[M-1:0]}`. A normal value is
  (-1)^s x 1.f x 2^(exp - bias), with bias = 2^(E-1) - 1.
* exponent field 0: signed zero. There are no subnormals. A zero-exponent
  input is read as zero whatever its fraction. A result below the smallest
  normal becomes a signed zero ("flush to zero", underflow flag set).
* exponent field all ones: infinity if the fraction is 0, otherwise NaN.
  Every unit produces one canonical NaN, `{0, 1...1, 1, 0...0}`.
* rounding is *round-half-up on the magnitude*. The result is the nearest
  representable value, and an exact tie goes away from zero. In hardware this
  means adding the first discarded bit at the LSB position. A carry out of
  the fraction bumps the exponent.
* a finite result past the largest normal becomes infinity (overflow and
  inexact flags set).

Each arithmetic unit also reports `gf_flags_t {invalid, overflow, underflow,
inexact}`.

A worked GF16 example: 30 = 1.875 x 2^4. The exponent field is 4 + 31 = 35 =
`100011` and the fraction is 0.875 x 512 = 448 = `111000000`. The word is
therefore `0x47C0`. This is the expected result of the dot4 power-on check
(1,2,3,4).(1,2,3,4) = 30.

## The multiplier template (`gf_mul`)

This is the unit whose details matter most. The two significands, with their
hidden ones, are (M+1)-bit integers in [2^M, 2^(M+1)). Their product is
therefore in [2^2M, 2^(2M+2)) and needs a **2M+2-bit product register,
`prod[2M+1:0]`**:

* if `prod[2M+1]` is set, the product is in [2, 4). The fraction is
  `prod[2M:M+1]`, the rounding bit is `prod[M]`, and the exponent gains one.
* otherwise the product is in [1, 2). The fraction is `prod[2M-1:M]` and the
  rounding bit is `prod[M-1]`.
* the rounding bit is added to an (M+1)-bit copy of the fraction. If that
  addition carries out, the fraction is zero and the exponent gains one more.
  For GF16 this means a 10-bit rounded-fraction register. A 9-bit register
  would lose this carry.
* result exponent = ea + eb - bias + norm + carry. It is computed in E+2
  signed bits and then tested for overflow (>= all ones) and underflow
  (<= 0).

A product register two bits narrower is a tempting mistake, and it breaks
every multiply: 1.0 x 1.0 = 2^2M loses its leading one and reads as 0.5.
Injecting exactly that error into the multiplier makes about 11,000 of the
38,795 checks in its testbench fail. The directed checks
1.0 x 1.0 and 1.5 x 1.5 exist at every rung for this reason.

Special cases are resolved in priority order:

1. NaN: either input is NaN, or 0 x inf.
2. Infinity: either input is infinite.
3. Zero: either input is zero.
4. Overflow, then underflow.
5. Otherwise the normal result.

## The adder (`gf_add`)

The adder is a conventional single-path floating-point adder with the same
encoding and rounding:

1. Order the operands so |x| >= |y|. Because the encoding is sign-magnitude
   with the exponent above the fraction, this is an unsigned compare of
   `{exp, frac}`.
2. Shift y's significand right by the exponent difference. The datapath is
   `M+5` bits wide: a carry bit, the hidden one, M fraction bits and three
   bits below the LSB (guard, round, sticky). Bits shifted past the bottom are
   ORed into the sticky bit.
3. Add, or subtract if the signs differ.
4. Normalise. After a carry, shift right by one and add one to the exponent.
   Otherwise shift left by the leading-zero count.
5. Round half-up on the guard bit, with carry into the exponent. Then apply
   the overflow and underflow tests.

An exact cancellation gives +0. (-0) + (-0) gives -0. inf + (-inf) gives NaN.
The widest rung, GF256, has a 163-bit significand path. The leading-zero
count is a plain priority loop, which synthesis turns into a priority encoder.

## GF16 dot product (`gf_dot4`)

    y = (a0*b0 + a1*b1) + (a2*b2 + a3*b3)

The dot product uses four `gf_mul` units and a two-level tree of `gf_add`
units, all at GF16. Each operation rounds, so the result is what GF16
arithmetic computes in that order, not an exactly rounded dot product. The
flags of all seven units are ORed together.

## Power-on self-test (`gf16_post`)

The GF16 kernel has one canonical acceptance check: (1,2,3,4).(1,2,3,4) must
give `0x47C0`. `gf16_post` runs that check on the real dot-product unit:

* In the first cycle after reset, and in the cycle after a `start` pulse, it
  raises `busy`. The top then feeds the dot4 unit the anchor vectors instead
  of the request operands.
* At the end of that cycle it compares the dot4 result with `0x47C0`. It then
  sets `done` and latches the comparison into `pass`.
* `start` is ignored while a test is running.

The check exercises every multiplier and adder in the dot4 tree. It includes
a product that needs the normalising shift (1.5 x 1.5 = 2.25 in 3 x 3 = 9) and
sums that cross a power of two (9 + 16 = 25, 5 + 25 = 30). All of them are
exact, so the anchor tests the datapath rather than the rounding.

## GF16 codec (`gf_codec`, `gf_reformat`)

The codec has two independent combinational paths between GF16 and IEEE
binary32:

* **decode** (GF16 to binary32) is exact for every GF16 value. The GF16
  exponent range (2^-30 to 2^31) lies well inside binary32, and 9 fraction
  bits fit in 23.
* **encode** (binary32 to GF16) rounds half-up to 9 fraction bits. Values past
  about 2^32 saturate to infinity. Values below 2^-30 flush to zero. Binary32
  subnormals are read as zero.

Both directions are instances of `gf_reformat`. It re-encodes between any two
formats that follow the conventions above: it rebiases the exponent, then
rounds or zero-pads the fraction. The codec's N parameter accepts rungs up to
GF64, because exponent arithmetic is done in 32-bit integers.

## Lucas accumulator (`lucas_accumulator`)

The Lucas numbers are L_0 = 2, L_1 = 1, L_k = L_(k-1) + L_(k-2). For every n,

    phi^(2n) + phi^(-2n) = L_(2n)            (for example phi^2 + phi^-2 = 3)

As a result, the sum S = sum_i phi^(2 n_i) can be carried exactly in an
integer A = sum_i L_(2 n_i). The difference A - S = sum_i phi^(-2 n_i) is
positive. For n_i >= 1 it is at most count/phi^2 = 0.382 x count. Together,
A and the term count therefore pin S down, with no wide fixed-point register
and no fraction bits.

The unit accepts one index n at a time (0 <= n <= 256) on a valid/ready
handshake. It produces L_(2n) with the even-index recurrence

    L_(2k+2) = 3 L_(2k) - L_(2k-2)       (because phi^4 = 3 phi^2 - 1)

It starts from (L_0, L_2) = (2, 3) and takes one step per clock. The factor
3x is formed as x + 2x, so the unit uses only adders and registers. After
n - 1 steps it adds L_(2n) into the accumulator. Widths are sized for the
whole range:

* L_512 is about 1.004 x 10^107, a 356-bit integer.
* `term` is 357 bits wide.
* `acc` has 16 more bits, enough for 65,535 terms of the largest size.

The overflow flag is sticky and is set when the accumulator or the 16-bit
count wraps.

Timing: an index accepted at the clock edge ending cycle t is added at the
edge ending cycle t + max(n, 1). `term_valid` pulses in the following cycle.
`in_ready` is low in between, so the unit takes a new index every max(n,1)+1
cycles. `clear` zeroes the sum and the count while the unit is idle.

## The portfolio top (`gf_portfolio`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `req_valid` | in | 1 | a request this cycle (one per clock) |
| `req_ready` | out | 1 | low only in the self-test cycle; do not issue then |
| `req_op` | in | 3 | `gf_op_e`: `OP_ADD`, `OP_MUL`, `OP_DOT4`, `OP_ENC`, `OP_DEC` |
| `req_fmt` | in | 4 | `gf_fmt_e`: rung for `OP_ADD`/`OP_MUL`, 0 = GF4 ... 9 = GF256 |
| `req_a`, `req_b` | in | 256 | operands, right-aligned |
| `resp_valid` | out | 1 | the response, one clock after the request |
| `resp_y` | out | 256 | result, zero-extended |
| `resp_flags` | out | 4 | invalid, overflow, underflow, inexact |
| `post_start` | in | 1 | re-run the GF16 self-test |
| `post_done`, `post_pass` | out | 1, 1 | a self-test has finished; it gave 0x47C0 |
| `luc_clear`, `luc_valid`, `luc_n` | in | 1, 1, 9 | Lucas accumulator controls |
| `luc_ready` | out | 1 | Lucas unit idle |
| `luc_acc`, `luc_count`, `luc_term`, `luc_term_valid`, `luc_overflow` | out | 373, 16, 357, 1, 1 | Lucas results |

How `OP_DOT4` and the codec operations read the operand buses:

* `OP_DOT4` reads four GF16 words from `req_a[63:0]` and four from
  `req_b[63:0]`, with element 0 in bits 15:0.
* `OP_ENC` reads a binary32 word from `req_a[31:0]`.
* `OP_DEC` reads a GF16 word from `req_a[15:0]`.

A format index above 9 returns 0 with the invalid flag set.

`req_ready` is low for exactly one cycle after reset and one cycle after each
`post_start` pulse, while the self-test owns the dot4 unit. An assertion
flags a request issued in that cycle, and the top drops such a request.

All arithmetic is combinational between the operand ports and the single
result register, so the critical path is the GF256 multiplier (a 159 x 159
product) or the GF16 dot product. A faster design would add pipeline stages;
none is specified here.

## What follows the source and what does not

These parts follow the published description of the GoldenFloat family:

* the ladder rule;
* the field layout with a hidden one;
* the IEEE-style bias at every rung;
* the multiplier template, with its 2M+2-bit product, its normalisation
  choice, its fraction fields and half-up rounding with carry-out;
* the set of rungs;
* the GF16 dot4 anchor `0x47C0`;
* the Lucas identity and its use as an integer-backed accumulator.

These are this implementation's own choices:

* **No subnormals, IEEE-style specials.** The source only implies reserved
  all-zeros and all-ones exponents, by calling GF4 "no normal exponents".
* **Bias at GF256.** 2^96 - 1 is used, the same 2^(E-1) - 1 rule as every
  other rung. It is also the rule behind the biases quoted for the GF512 and
  GF1024 extensions (2^194 - 1 and 2^390 - 1). A stored GF256 bias of about
  2^71 has also been reported for this family, without a derivation; it is
  not followed.
* **Lucas index 0.** The identity is stated for n >= 1. The unit also
  accepts n = 0 and adds L_0 = 2 (= phi^0 + phi^0), which is exact too.
* **Adder internals and rounding.** Only the adder's function is known; its
  rounding follows the multiplier.
* **Dot-product tree order** and the absence of a wider internal sum.
* **The self-test's sequencing.** The anchor and its expected word are
  given. The single test cycle after reset, the start input and the sharing
  of the dot4 unit are this implementation's own. A pass bit replaces the
  FPGA bring-up's console message.
* **Codec partner format.** Binary32 is used, because it is the format the
  family's conformance checking converts to. The codec's clock rate (323 MHz
  on an Artix-7 FPGA) is a place-and-route result and was not reproduced.
* **Everything about the Lucas accumulator's hardware form:** recurrence
  unit, widths, handshake and latency. The identity is established, but no
  accumulator design is given.
* **The portfolio top and its port map.** The published chip puts these units
  on a Tiny Tapeout tile, but its pinout is not described.

Not built:

* the companion format-conformance ROM (80 format records) and its decoders
  for other format families;
* the mesh of dot4 elements on the earlier GF16 shuttle, whose size and
  wiring are not described (its element, `gf_dot4`, is built);
* the FPGA bring-up top;
* the shuttle pad ring.

## Verification

Each testbench prints `TB_RESULT checks=N failures=F` and has a watchdog.

| testbench | what it does |
|-----------|--------------|
| `tb_gf_mul`, `tb_gf_add` | every rung of the portfolio; directed cases (1.0x1.0, 1.5x1.5, 0.25+0.25, 1-1, ...) then 4,000 random pairs (1,000 at GF64 and wider) compared with `gf_ref_model`; the adder also gets every operand pair at GF4 and GF8, where narrow-format normalisation bugs show up |
| `tb_gf_mul_sweep` | the multiplier audit at full size: GF8 exhaustive (all 65,536 pairs, a superset of the 26,360-point sweep used to qualify the GF8 multiplier), GF12 109,576, GF16 262,144, GF20 and GF24 100,000 each, GF32 200,000 random pairs, plus directed and random cases at GF64/128/256 (about 1.03 M checks, about 20 s) |
| `tb_gf_ladder` | the ladder rule at all 17 rungs; adder and multiplier at GF6, GF10, GF14, GF48, GF96, GF512 and GF1024 |
| `tb_gf_dot4` | the 0x47C0 anchor, exact integer dot products, random vectors against a chain of reference operations |
| `tb_gf16_post` | the self-test on a real dot4 unit, with a switch that flips each result bit in turn; busy lasts one cycle, a corrupted result fails, a clean re-run passes |
| `tb_gf_codec` | all 65,536 GF16 codes decoded and re-encoded; directed and 30,000 random binary32 encodes |
| `tb_lucas_accumulator` | every n = 1 ... 256, plus published Lucas values, latency per term, clear, overflow on a small instance |
| `tb_gf_portfolio` | the top at default parameters, end to end (see below) |

`gf_ref_model` is the reference for addition and multiplication. It is
deliberately unlike the hardware:

* operands become (sign, integer significand, power-of-two scale);
* a sum is formed exactly in a wide Kulisch-style integer;
* the exact result is then rounded by searching for its leading one.

Wide rungs keep random exponents within +-200, so that the exact sum fits the
reference's integer. Rungs with E <= 9 draw every exponent code, so overflow,
underflow and specials all occur.

`tb_gf_portfolio` issues back-to-back requests on every clock:

* 60 random adds and multiplies per rung;
* overflow, flush-to-zero and NaN cases;
* a rounding carry into the exponent;
* GF256 1.0 x 1.0;
* an invalid format index;
* dot products;
* encodes and decodes;
* the self-test after reset and again on request, followed by a dot product
  on the shared unit.

At the same time it streams Lucas indices with `luc_valid` held high, so the
unit stalls the stream. The testbench counts each of these mechanisms and
fails if any of them never occurred.

To simulate with plain Verilator, for example the top:

    verilator --binary --timing --assert -Irtl -Itb rtl/gf_pkg.sv \
        -y rtl -y tb tb/tb_gf_portfolio.sv --top-module tb_gf_portfolio
    ./obj_dir/Vtb_gf_portfolio

Replace the testbench name to run any other. Every module is in a file of its
own name, so `-y rtl -y tb` finds the rest.

## Changing it

* **A new rung.** Instantiate `gf_add`/`gf_mul` with `.N(width)`. The split
  follows automatically. To add it to the top, extend `gf_pkg::WIDTHS`,
  `NUM_WIDTHS` and `gf_fmt_e`.
* **A different ratio.** Change `INV_PHI2_Q16` in `gf_pkg`. Every unit and
  testbench derives its widths from it.
* **A different GF rung for the dot product or the codec.** Both take N. The
  codec is limited to exponents narrower than 31 bits.
* **Lucas range.** Change `LUCAS_N_MAX` on the top. The register widths
  follow from it.

Lint notes:

* `gf_add` leaves the top two bits of its normalised significand unused. They
  are the always-zero carry position and the hidden one.
* The assertions in the Lucas unit and the top are disabled during reset,
  so they sample `rst_n` synchronously while the registers reset
  asynchronously. Verilator notes this mix; it does not reach synthesis.
* `gf16_post` drives its anchor outputs from constants, which is intended.
