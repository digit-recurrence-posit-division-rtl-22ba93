# Radix-4 SRT divider for Posit<N,2>

This is a pipelined hardware divider for posit numbers with a 2-bit exponent
field (the Posit Standard's `es = 2`). It divides the significands with a
radix-4 digit recurrence, two quotient bits per cycle. Four standard
techniques keep each iteration short:

* the partial remainder stays in carry-save form;
* the signed quotient digits become binary through on-the-fly conversion;
* the sign and zero of the final remainder are found without a full add;
* both operands are first scaled so the divisor is close to 1, so the digit
  choice looks only at six bits of the remainder, never at the divisor.

The default is Posit32: 16 iterations, a 20-cycle latency and one new
division per cycle. `N = 16` and `N = 64` give Posit16 (12 cycles) and
Posit64 (36 cycles). `PIPELINED = 0` removes every stage register and turns
the same datapath into one combinational circuit.

## The posit division problem

A posit `p` of `N` bits is either zero (`0...0`), NaR ("not a real",
`10...0`) or `(-1)^s * 2^(4k+e) * (1.f)`. A negative posit is stored as the
two's complement of its absolute value. After the sign comes the regime: a
run of `l` equal bits ended by the opposite bit. It gives `k = -l` for a run of
zeros and `k = l-1` for a run of ones. Next come up to two exponent bits `e`,
then the fraction `f`, which is at most `N-5` bits long. Because the regime
has no fixed length, the fraction's position, and even how many exponent bits
there are, depend on the value.

Division therefore splits into three parts:

* sign: `sQ = sX xor sD`;
* scale: `T = (4kX+eX) - (4kD+eD)`, carried as a single signed number, whose
  two low bits are the result exponent and whose upper bits are the result
  regime;
* significand quotient: `x/d`, which lies in `(1/2, 2)`. When it is below 1,
  one left shift normalizes it and `T` drops by 1.

The result is NaR if the divisor is 0 or NaR, or if the dividend is NaR. It
is 0 if the dividend is 0. Every other result is rounded to nearest, ties to
even, on the final bit string. It never rounds to 0 or NaR: it saturates at
minpos or maxpos.

## Pipeline

| stage | module(s) | work |
|---|---|---|
| 1 | `posit_decoder` x2, `sign_scale_unit` | two's complement of negative operands, regime/exponent/fraction extraction, `sQ`, `T`, special cases |
| 2 | `operand_scaler` | `z = M*d`, `M*x`; initial residual `w(0) = M*x/4`, `Q = QD = 0` |
| 3 .. IT+2 | `recurrence_stage` (= `qsel_r4` + `divisor_multiple` + `residual_csa` + `otf_converter` + register) | one radix-4 iteration each |
| IT+3 | `rem_sign_zero`, `termination_unit` | final residual sign and zero test, Q/QD choice, normalization, sticky |
| IT+4 | `posit_encoder` | regime/exponent/fraction packing, rounding, saturation, sign |

`IT = N/2 = ceil((N-1)/2)`: the quotient needs `N-1` bits. These are the
`N-4` bits of the significand, one guard bit and one round bit, and one bit
for the initial division by 4. That last bit is always 0, and the hardware
drops it. The latency is one cycle per stage:

| format | iterations | latency (cycles) |
|---|---|---|
| Posit16 | 8 | 12 |
| Posit32 | 16 | 20 |
| Posit64 | 32 | 36 |

Without operand scaling these latencies would be one cycle less (11, 19
and 35).

### Interface of `posit_div_r4`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, all registers on the rising edge |
| `rst_n` | in | 1 | asynchronous active-low reset of the valid bits only |
| `in_valid` | in | 1 | `x` and `d` are sampled on this edge |
| `x`, `d` | in | N | dividend and divisor posits |
| parameter `N` | | | posit width, default 32 |
| parameter `IT` | | | iterations, default `N/2`; do not override |
| parameter `PIPELINED` | | | 1 (default): registered stages; 0: combinational |
| `out_valid` | out | 1 | `q` holds a result; exactly `IT+4` edges after the sampling edge |
| `q` | out | N | quotient posit |

There is no back-pressure and no stall. A result is presented for one cycle
and must be taken. Operations are never reordered.

## The recurrence, in detail

Significands are handled as fractions in `[1/2, 1)`: `x = (1.fX)/2` and
`d = (1.fD)/2`. The quotient is the same as for `[1,2)` significands.

**Operand scaling.** The three bits of `d` right after its leading 1 select
the factor `M` below. `M` is a sum of 1 and one or two powers of two, so
each product is two shifts and a three-operand add. The scaled divisor
`z = M*d` always falls in `[1 - 1/64, 1 + 1/8]`.

| d | M | terms |
|---|---|---|
| 0.1000.. | 2 | 1 + 1/2 + 1/2 |
| 0.1001.. | 1.75 | 1 + 1/4 + 1/2 |
| 0.1010.. | 1.625 | 1 + 1/2 + 1/8 |
| 0.1011.. | 1.5 | 1 + 1/2 |
| 0.1100.. | 1.375 | 1 + 1/4 + 1/8 |
| 0.1101.. | 1.25 | 1 + 1/4 |
| 0.1110.. | 1.125 | 1 + 1/8 |
| 0.1111.. | 1.125 | 1 + 1/8 |

The dividend gets the same factor. Three extra fraction bits make both
products exact: the operands have `N-4` fraction bits and the scaled values
have `N-1`.

**Residual and digits.** The design uses the digit set `{-2,-1,0,1,2}`. Its
redundancy factor is `rho = 2/3`, and the recurrence keeps
`|w(i)| <= (2/3) z`. The start value `w(0) = M*x/4` is below 1/2, so it
satisfies this bound. Each iteration computes

    w(i+1) = 4 w(i) - q(i+1) z

The residual is `N+4` bits of two's complement. It has 3 integer bits,
because `4w` lies in `[-4, 4)`, and `N+1` fraction bits. It is held as a sum
word and a carry word, and `w` is their sum modulo `2^(N+4)`; the carry word
is stored already weighted. The multiple `q*z` is `0`, `z` or `2z`, made by
wiring. For `q > 0` it is inverted, and the `+1` of the two's complement
goes into the free LSB of the new carry word. One row of full adders does
the subtraction, so the cycle time does not depend on `N`.

**Digit selection.** The design adds the top six bits of the shifted sum and
carry words, bits `N+1 .. N-4` of each. The 6-bit result, read as signed
eighths, is an estimate `est` of `4w`. It is never above the true value and
less than 1/4 below it. The digit is chosen from `est` alone:

| est (in eighths) | digit |
|---|---|
| 12 .. 24 | +2 |
| 4 .. 11 | +1 |
| -4 .. 3 | 0 |
| -13 .. -5 | -1 |
| -26 .. -14 | -2 |

These intervals keep `|w| <= (2/3) z` for every `z` in
`[63/64, 9/8]`, which is why the divisor must be scaled.
`tb_recurrence_stage` checks this bound on random residuals.

**On-the-fly conversion.** Two binary words are updated each cycle: `Q(i)`
and `QD(i) = Q(i) - 4^-i`. A digit `q >= 0` is appended to `Q`, and `4-|q|`
to `QD`. The rule for the new `QD` is analogous (see `otf_converter.sv`).
Every update is a 2-bit shift with a 2-bit append, so no carry propagates.
If the final residual is negative, `QD` is already the corrected quotient.

**Termination.** `rem_sign_zero` finds the sign of the final `ws + wc` with
a Kogge-Stone carry tree, so the depth is log2 of the width. It finds zero
with the carry-free identity `ws + wc == 0  <=>  ws ^ wc == (ws | wc) << 1`.
The corrected quotient `Qc` (`Q` or `QD`) equals `x/(4d)`, truncated. The
bit of weight 1/4 is therefore the integer bit of `x/d`, and the bit above
it is always 0. When the integer bit is 0, a one-bit left shift normalizes
the quotient and `T` is decremented. The sticky bit is "remainder non-zero".
A negative remainder can never be zero, because `|w| < z`.

**Encoding and rounding.** With `k = T >>> 2` and `e = T[1:0]`, the encoder
places `10` (for `k >= 0`) or `01` (for `k < 0`) in front of `e` and the
fraction. It then shifts the whole string right arithmetically by `k` or
`-k-1`, which replicates the regime bit the right number of times. The top
`N-1` bits form the body and the next bit is the round bit. The bits below
it, together with the remainder's sticky bit, form the sticky bit. The body
is incremented when `round & (lsb | sticky)`. A carry out of the fraction
moves into the exponent and the regime by itself. For example, in Posit10,
`X = 0011010111` divided by `D = 0000100110` gives `0111010000`: the
rounding carry raises the exponent from 1 to 2. `k >= N-2` saturates to
maxpos and `k <= -(N-1)` saturates to minpos. A negative result is two's
complemented.

## Where this design departs from, or adds to, the published algorithm

* Only the pipelined radix-4 divider with all four techniques and operand
  scaling is built. Radix-2, non-restoring, unscaled radix-4 and the purely
  combinational variants are not included. For the unscaled radix-4 divider,
  the digit-selection constants depend on the divisor and are not given
  here.
* The divider is fully unrolled: one register stage per iteration, with a
  new division accepted every cycle. The combinational form
  (`PIPELINED = 0`) uses the same stages with the registers, all of them
  `stage_reg` instances, left out. A smaller iterative unit reusing one
  stage would need a small controller and is not provided.
* Design choices:
  * the valid-bit handshake, the asynchronous reset of the valid bits only,
    and no back-pressure;
  * the internal widths: scale width `$clog2(N)+4`, residual width `N+4`,
    3 guard bits for scaling;
  * the pre-weighted carry word;
  * the Kogge-Stone sign tree and the carry-free zero test;
  * round to nearest with ties to even, and saturation to minpos/maxpos,
    both as in the Posit Standard.
* Only `es = 2` is supported. `N` must be at least 8, because the scaler
  reads three divisor fraction bits. The iteration count is `N/2`, which
  equals `ceil((N-1)/2)`. Only `N` = 16, 32 and 64 have been simulated.
* The extra cycles around the iterations are counted as in the latency
  table above: one each for decoding, termination and encoding, plus one
  for scaling. A shorter count of "two additional cycles for
  initialization and termination" would merge decoding into
  initialization and encoding into termination; this design does not
  merge them.

## Files

`rtl/`:

* `posit_div_pkg.sv`: widths and the digit type;
* `posit_decoder.sv`, `sign_scale_unit.sv`, `operand_scaler.sv`,
  `qsel_r4.sv`, `divisor_multiple.sv`, `residual_csa.sv`,
  `otf_converter.sv`, `recurrence_stage.sv`, `rem_sign_zero.sv`,
  `termination_unit.sv`, `posit_encoder.sv`: the blocks described above;
* `stage_reg.sv`: the pipeline register; in the combinational form it is a
  wire;
* `posit_div_r4.sv`: the top level.

`tb/`:

* `posit_ref_pkg.sv`: a bit-serial reference model. It decodes bit by bit,
  divides with a restoring long division and rounds a bit list.
* `tb_<module>.sv`: one self-checking testbench per module.
* `tb_posit_div_r4.sv`: the end-to-end test at the default Posit32 size. It
  runs 20,000 divisions with random gaps and back-to-back issue, and checks
  every result and its 20-cycle latency. It also counts the following
  mechanisms, and fails if any of them never occurs:
  * each digit value;
  * the QD correction;
  * the normalization shift;
  * round-up;
  * a zero remainder;
  * saturation to maxpos and to minpos;
  * NaR and zero results;
  * back-to-back issue.
* `tb_posit_div_workloads.sv`: Posit16 and Posit64 instances, 4,000 random
  divisions each, checked against the reference model along with their 12-
  and 36-cycle latencies. A combinational Posit16 instance gets the same
  operands and is checked in the same cycle.

Every testbench prints one line `TB_RESULT checks=<n> failures=<m>`. To run
one with Verilator:

    verilator --binary --timing -y rtl -y tb rtl/posit_div_pkg.sv tb/posit_ref_pkg.sv \
        tb/tb_posit_div_r4.sv --top-module tb_posit_div_r4 -o sim
    ./obj_dir/sim

`-y` lets Verilator find each module in the file of the same name. The two
packages must be listed first.

## How far it has been checked

All testbenches pass with Verilator 5. The divider gives bit-exact results
against the reference model:

* Posit32: 20,000 divisions;
* Posit16 and Posit64: 4,000 divisions each.

The decoder is tested on all 65,536 Posit16 patterns. The digit selection is
tested on all 4,096 pairs of estimate bits. Verilator lint and the Yosys
front end accept every file.

In simulation, an assertion in each `recurrence_stage` checks every valid
operation: the residual estimate must stay inside the selection table's
range. This shows at once if the residual has left its bound.

The design has not been run through timing-driven synthesis, so its cycle
time is unknown. It has been tested only on random and directed vectors,
not by exhaustive or formal proof. An exhaustive Posit16 run, 2^32
operand pairs, has not been done.
