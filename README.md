# Pipelined online multiplier with reduced working precision

This is a radix-2 online multiplier for streams of operand pairs. Inner-product
arrays such as CNN accelerators need one. Online arithmetic takes its operands and delivers its
result one digit per cycle, most significant digit first (MSDF). The first
product digit therefore appears after a small fixed *online delay* (δ = 3),
not after the whole operand has arrived. A following online operator can start
on those digits at once, and narrow digit-serial links replace full-width
buses.

The design rests on three ideas:

1. **Unrolled and pipelined.** The n+δ iterations of the online multiplication
   recurrence become n+δ pipeline stages. A new operand pair can enter every
   clock cycle, so k multiplications take (n+δ+1)+(k−1) cycles.
2. **Reduced working precision.** A conventional online multiplier carries an
   n-bit-wide residual through every iteration. This one keeps no more than
   p + t fractional bits, with p = ⌈(2n+δ+t)/3⌉ (p = 7 for n = 8) and t = 2.
   The product is still correct to within one unit in its last place.
3. **Gradual activation and deactivation of bit slices.** Early on, only a few
   operand digits have arrived, so few slices are needed. Near the end, the
   low residual bits can no longer reach the selection window before the
   computation ends. Because every iteration is its own pipeline stage, each
   stage is built with exactly the slices it needs. Nothing is built and then
   left unused.

The RTL is parameterised by the operand length `N` (default 8; 16, 24 and 32
are also tested).

## Number format

Operands and product are n-digit signed-digit fractions:
x = Σ xᵢ 2⁻ⁱ with xᵢ ∈ {−1, 0, 1}, so |x| < 1. A digit is a `(pos, neg)` bit
pair with value pos − neg (`olm_pkg::sd_digit_t`). The code (1,1) is accepted as
zero on the inputs and is never produced on the output. Digit i of a vector
port sits at index i−1, so `x_in[0]` is the most significant digit.

## The recurrence

Let x[j] and y[j] be the operand prefixes available at iteration j. Each holds
j+δ digits. z[j] is the product prefix and w[j] = 2ʲ(x[j]·y[j] − z[j]) is the
scaled residual. Iterations j = −3 … n−1 compute

    v[j]    = 2·w[j] + (x[j]·y_{j+4} + y[j+1]·x_{j+4})·2⁻³
    z_{j+1} = SELM(v̂[j])          (only for j ≥ 0)
    w[j+1]  = v[j] − z_{j+1}

with w[−3] = x[−3] = y[−3] = 0. The selection looks at an estimate v̂. This
estimate is the sum of the top 4 bits (2 integer, 2 fractional) of the
carry-save v:

    z = +1  if  1/2 ≤ v̂ ≤ 7/4
    z =  0  if −1/2 ≤ v̂ ≤ 1/4
    z = −1  if  −2  ≤ v̂ ≤ −3/4

The residual stays within |w| ≤ 3/4. After the last iteration,
x·y − z = 2⁻ⁿ·w[n] plus the truncation error.

## Stage anatomy (`olm_stage`)

Stage j receives 2w[j] as two carry-save vectors (WS, WC). It also receives
the prefixes x[j] and y[j] in two's complement, and the new digits x_{j+4} and
y_{j+4}. What it contains depends on j:

| kind | stages | contents |
|---|---|---|
| initialization | j = −3, −2, −1 | append units, selectors, [4:2] adder; no estimate, no selection, no output digit |
| recurrence | 0 ≤ j ≤ n−4 | append units, selectors, [4:2] adder, V, SELM, M, Zout register |
| last δ | n−3 ≤ j ≤ n−1 | the input digits are zero, so v = 2w; only V, SELM, M and the registers remain |

The parts are:

* **CA-REG append (`olm_ca_append`).** This is on-the-fly conversion. Each
  prefix Q is carried together with QM = Q − ulp. Appending digit d is then
  pure wiring with no carry: (+1: Q.1 / Q.0), (0: Q.0 / QM.1),
  (−1: QM.1 / QM.0). QM is stored only while a later stage still appends.
* **SELECTOR (`olm_selector`).** This is a 4-to-1 multiplexer on the digit
  bits. It selects 0, the prefix, or the prefix's complement. For a negative
  digit it also raises a carry-in, which completes the negation inside the
  adder (cx, cy).
* **[4:2] adder (`olm_adder42`).** Two rows of full adders. It adds WS, WC and
  the two selected terms, and places the two carry-ins in the free LSB
  positions of the two carry rows. It works modulo 2^W. This is safe because
  the true v stays in (−7/4, 7/4), and the 4-bit estimate never wraps.
* **V (`olm_v_cpa`), SELM (`olm_selm`), M (`olm_m_sub`).** V is a 4-bit
  carry-propagate adder giving v̂. SELM needs only v̂[3:1]. M subtracts z,
  which is 4 quarters, from v̂. After the doubling only v̂[2:0] survive, so M
  reduces to toggling bit 2 when z ≠ 0.

**Residual register formats.** This is the least obvious part of the design.
After a selecting stage, v̂ − z replaces the top of the sum vector and the
carry vector's top bits become zero. The register pair therefore holds:

* **WS:** 2 integer bits plus RF fractional bits. Its top 3 bits come from M.
* **WC:** only RF − 1 fractional bits, from 2⁻² downwards. It is 3 bits
  narrower than WS.

After an initialization stage there is no selection, so both vectors keep the
full width. The next stage re-aligns them to its own precision by appending
zeros at the bottom. If a vector must lose bits, it is floored.

## Width schedule

All widths come from constant functions in `olm_pkg`, evaluated per stage:

* v[j] keeps **F(j) = min(j+7, p+t, t+(n−1−j)+g)** fractional bits.
  * j+7 is the exact width while operand digits arrive: x[j] has j+3 digits,
    y[j+1] has j+4, and both are scaled by 2⁻³. Once the inputs stop, the
    width drops by one bit per stage.
  * p+t is the cap set by the reduced working precision. At the cap, new
    operand digits are no longer appended to the prefixes. They still act as
    multiplier digits.
  * t+(n−1−j)+g is the tail. Bits below this never reach the selection window
    in the remaining iterations, apart from a guard of g bits.
* The residual register written by stage j keeps
  RF(j) = min(F(j)−1, F(j+1)) fractional bits.
* The operand prefixes keep at most F−3 fractional bits.
* Truncation always floors each vector. The error this adds to the product
  is positive and below 2^−(j+1+RF(j)) per stage.

The guard is g = 3 + ⌈log₂(n/8)⌉, which gives 3, 4, 5 and 5 for n = 8, 16, 24
and 32. It was sized with a bit-accurate model so that |x·y − z| < 2⁻ⁿ for
random operands and for the extreme ones (x = y = ±(1 − 2⁻ⁿ)). With g = 3 at
n = 24 and 32, x = y = 1 − 2⁻ⁿ misses that bound by 2⁻²ⁿ.

For n = 8 (p = 7, g = 3):

| stage j | kind | F(j) | WS bits | WC bits | x[j], y[j] fraction bits in | appends digit j+4 |
|---|---|---|---|---|---|---|
| −3 | init | 4 | 5 | 5 | 0 | yes |
| −2 | init | 5 | 6 | 6 | 1 | yes |
| −1 | init | 6 | 7 | 7 | 2 | yes |
| 0 | recurrence | 7 | 8 | 5 | 3 | yes |
| 1 | recurrence | 8 | 9 | 6 | 4 | yes |
| 2 | recurrence | 9 | 10 | 7 | 5 | yes |
| 3 | recurrence | 9 (cap) | 10 | 7 | 6 | no |
| 4 | recurrence | 8 | 9 | 6 | 5 | no |
| 5 | last δ | 7 | 8 | 5 | – | – |
| 6 | last δ | 6 | 7 | 4 | – | – |
| 7 | last δ | 5 | – | – | – | – |

WS and WC are the widths of the registers the stage writes. The full-precision
pipeline would need up to 11 fractional bits here. A full-precision version
for comparison is the same RTL with `P = N+1` and `G = N`.

## Interface and timing (`olm_mult_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (resets only the valid bits) |
| `in_valid` | in | 1 | an operand pair is present this cycle |
| `x_in`, `y_in` | in | N digits | operands, `x_in[i-1]` = xᵢ |
| `prec_in` | in | ⌈log₂(N+1)⌉ | product digits wanted, m = 1…N (0 or > N mean N) |
| `out_valid` | out | 1 | `z_out` holds a product |
| `z_out` | out | N digits | product, `z_out[i-1]` = zᵢ |
| `z_msdf`, `z_msdf_valid` | out | N digits, N | online product stream |

An operation presented in cycle c behaves as follows:

* Operand digit i is delayed i cycles on the way to its stage, j = i−4.
* Stage j works in cycle c+j+4.
* Product digit zᵢ is on `z_msdf[i-1]` in cycle c+i+4 and is final when it
  appears. A consumer can start on it, or stop after as many digits as it
  needs.
* The whole product is on `z_out` in cycle **c+n+δ+1** (c+12 for n = 8).
* A burst of k = 8 operations takes 19, 27, 35 and 43 cycles for n = 8, 16, 24
  and 32, from the first input to the last product.

**Variable precision.** An online multiplier can be stopped once it has
produced as many digits as the consumer needs. Here `prec_in` = m travels down
the pipeline with the operation. Stages j ≥ m do not load any register for
that operation: its remaining iterations are skipped and cause no switching.
Product digits beyond m read as 0, and their `z_msdf_valid` bits stay low.
The error bound becomes |x·y − z| < 2⁻ᵐ + 2⁻ⁿ. Two terms make it up:

* the residual bound 2⁻ᵐ·3/4;
* at most 2⁻ᵐ/4 for the operand digits the first m iterations never saw.

`out_valid` keeps its fixed latency. The m digits themselves are final on
`z_msdf` from cycle c+m+4.

`in_valid` may drop at any time. The bubble travels down the pipeline, and
every stage register it passes holds its value. There is no back-pressure.

## How far this follows the published design

These parts follow the published description:

* the recurrence, δ = 3, t = 2 and ib = 2;
* the selection function;
* the [4:2] carry-save residual, 4-bit estimate, 3-bit selection input and
  3-bit M output;
* the three stage kinds and the modules each one keeps;
* the formula for p;
* the n+δ+1 latency and the one-per-cycle throughput.

These are this design's own choices:

* **Exact widths of each stage.** The source gives the shape of the pattern
  (growth, a cap after p slices, shrinking towards t bits at the end). Its
  width labels are in terms of a per-stage count that it never defines. The
  schedule above is a reconstruction. The tail keeps g guard bits more than
  the bare t, because without them the product error exceeds one unit in the
  last place.
* **Operand interface.** Whole signed-digit vectors enter with a valid bit.
  Per-digit shift registers skew them, and a second set aligns the product.
  In a chain of online operators, these skew registers would be replaced by
  the neighbouring operators' digit streams.
* **Clock enable on bubbles**, floor truncation, and the (1,1) zero code.
* **The variable-precision port.** The source states only that operations
  can be stopped once the desired precision is reached. The per-operation
  `prec_in`, the gating of the stages beyond it and the zeroed digits are
  this design's own choices.

Size after generic synthesis at n = 8:

* 265 flip-flop bits;
* 306 further bits in register arrays: the operand skew and product
  alignment shift registers, and the per-operation precision pipeline;
* 454 word-level cells.

The source reports 315 latches for its n = 8 design under a different flow and
cell library, so the figures are not directly comparable.

## Files

`rtl/`:

* `olm_pkg.sv`: types, constants, width functions.
* The leaf blocks `olm_ca_append`, `olm_selector`, `olm_adder42`,
  `olm_v_cpa`, `olm_selm` and `olm_m_sub`.
* `olm_stage.sv`: one pipeline stage.
* `olm_delay_line.sv`: the skew shift registers.
* `olm_mult_top.sv`: the top.

`tb/` has one self-checking testbench per module. Each prints
`TB_RESULT checks=… failures=…`.

* **Leaf testbenches:** exhaustive or random comparisons against integer
  arithmetic.
* **`tb_olm_stage`:** tests eight stages of the n = 8 pipeline, covering every
  stage kind and the capped stages. The checks are:
  * the selected digit against the exact v;
  * the carry-save residual against 2(v − z), allowing only the floor
    truncation;
  * the operand prefixes;
  * hold on a bubble and on a skipped iteration.
* **`tb_olm_mult_top`:** runs the default n = 8 design end to end, using
  `olm_tb_harness`. The harness checks:
  * every product against |x·y − z| < 2⁻ⁿ;
  * the latency and the MSDF stream;
  * the 19-cycle k = 8 burst.

  It also counts each mechanism that must occur: negative digits on either
  operand, each selected digit value, the (1,1) code, bubbles,
  back-to-back issue and reduced-precision operations. About one random
  operation in five is reduced-precision, and these are checked against the
  2⁻ᵐ + 2⁻ⁿ bound.
* **`tb_olm_workloads`:** does the same for n = 16, 24 and 32.

To run a testbench with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/olm_pkg.sv \
        tb/tb_olm_mult_top.sv --top-module tb_olm_mult_top -o sim
    ./obj_dir/sim

To change the operand length, set `N` on `olm_mult_top`. `P` and `G` follow
from it by default.
