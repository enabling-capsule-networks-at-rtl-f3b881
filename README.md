# Approximate softmax and squash units for capsule networks

Capsule networks spend much of their inference time in two nonlinear
functions that ordinary CNN accelerators do not have:

* **softmax**, which turns the routing logits of a lower-level capsule into
  coupling coefficients, y_i = e^x_i / sum_j e^x_j;
* **squash**, the capsule activation, y = ||x||^2/(1+||x||^2) * x/||x||,
  which shrinks a vector to a length below 1 and keeps its direction.

Both are expensive in hardware: exponentials, a division, squares and a
square root. The units in this repository trade a small, bounded error for
much simpler arithmetic:

* the softmax is evaluated **with powers of two instead of e** and in the
  **base-2 log domain**, so that the division becomes a subtraction and
  every exponential and logarithm collapses to a leading-one detector, a
  shifter and a re-wiring of bits (no multiplier at all);
* the squash is rewritten as y = c(||x||) * x with the coefficient
  c(n) = n/(1+n^2), which is approximated **piecewise**: by 1 - e^-n (or
  1 - 2^-n) for small norms and by a table for large ones; the norm itself
  comes from a multiply-accumulate followed by a two-range square-root table.

The RTL is SystemVerilog (IEEE 1800-2017), synthesizable, with one module
per file in `rtl/` and a self-checking testbench per module in `tb/`.

## The two arithmetic tricks

### 2^a without a multiplier (`pow2u`)

Write a = u + v with u = floor(a) an integer and v in [0,1). Then
2^a = 2^u * 2^v, and 2^v is replaced by its chord 1 + v (largest error 0.086
at v ~ 0.53). In fixed point the bits of v are already the fraction of a, so
the mantissa 1 + v is just the word `{1'b1, v}`; multiplying by 2^u is a
shift. All arguments used here are <= 0, so the shift is to the right and a
result smaller than one LSB becomes 0.

### log2 F without a multiplier (`log2u`, `lod`)

Write F = 2^w * k with k in [1,2). A leading-one detector gives w (the
position of the top 1 minus the number of fraction bits); shifting F by w
gives k; log2 k is replaced by its chord k - 1, which is simply the fraction
bits of k. The result w + (k - 1) is formed by placing w in the integer field
and those bits in the fraction field.

The natural-exponential unit `expu` is the same `pow2u` preceded by a
constant multiplier by log2 e (369/256 = 1.4414). It is only used by the
squash-exp coefficient; the softmax avoids it entirely by working in base 2.

## Softmax in base 2 (`softmax_b2`)

The unit computes the softmax-like function with base 2,

    y_i = 2^x_i / sum_j 2^x_j
        = pow2( (x_i - m) - log2( sum_j 2^(x_j - m) ) ),    m = max_j x_j.

Subtracting the maximum first keeps every term in (0,1]; the term of the
maximum is exactly 1.0, so the sum lies in [1, n] and its logarithm is
never undefined. Base 2 changes the function itself (it equals an
e-based softmax of x*ln 2), which the networks tolerate; what it buys is
that neither the log2 e multiplier in front of the exponential nor the ln 2
multiplier after the logarithm is needed.

Datapath, per element: subtract the maximum register; a mux chooses either
that value or that value minus log2u(sum); pow2u; in the sum pass the result
is added into the exponential-sum register, in the output pass it is the
output.

Operation. The host streams the same vector three times, one element per
clock while `in_valid` is high and `in_ready` is set; output `pass` says which
pass is running:

| pass       | what happens                                   |
|------------|------------------------------------------------|
| `PASS_MAX` | m = max x_i                                    |
| `PASS_ACC` | sum += pow2u(x_i - m)                          |
| `PASS_OUT` | y_i = pow2u(x_i - m - log2u(sum)), registered  |

`start` together with `size` (`SM_N10`, `SM_N32`, `SM_N128`) opens a vector and
may be given in any state, which abandons the vector in progress. Each output
appears one clock after its input is accepted (`out_valid`); `done` pulses with
the last output. With an uninterrupted stream a vector of n elements takes 3n
clocks from the `start` edge to the last output: 31, 97 and 385 clocks.

## Squash (`squash`, `squash_norm_unit`, `squashing_unit`)

Because y = c(n) * x with c(n) = n/(1+n^2), the unit needs only the norm and
one coefficient per vector, then one multiplication per component.

**Norm unit** (`squash_norm_unit`, `sqrt_lut`). Each component is squared
and accumulated into a 20-bit register (10 fraction bits; 32 full-scale
components fit). The root is read from two 128-entry tables:

| squared norm S | table index   | step of S | norm error |
|----------------|---------------|-----------|------------|
| [0, 4)         | bits 11..5    | 1/32      | fine where sqrt is steep |
| [4, 64)        | bits 15..9    | 1/2       | < 0.1 |
| >= 64          | —             | —         | saturates at 7.97 |

Each entry is round(32 * sqrt(centre of its step)), computed at elaboration by
an integer square root, so no data file is needed.

**Squashing unit** (`squashing_unit`, `squash_coeff_lut`, `expu`/`pow2u`).
Two ways of getting c(n), selected by comparing n with a breakpoint:

| variant       | n below breakpoint                 | breakpoint | n at or above |
|---------------|------------------------------------|------------|---------------|
| `SQUASH_EXP`  | 1 - e^-n  (negate, expu, 1 - .)    | 0.75       | table         |
| `SQUASH_POW2` | 1 - 2^-n  (negate, pow2u, 1 - .)   | 1.0        | table         |

1 - e^-n follows n/(1+n^2) closely up to about 0.75 (both start with slope 1);
1 - 2^-n starts with slope ln 2 and so is less accurate at small norms, but
drops the log2 e multiplier and meets the exact curve at n = 1, where its
range ends. The table holds round(256 * n/(1+n^2)) for every norm code from
the breakpoint to 255. The product c * x_i is truncated and saturated to the
8-bit output.

**Operation.** `start` with `size` (`SQ_N4` … `SQ_N32`) opens a vector. The
host streams the components twice: the norm pass (`PASS_ACC`), then, after one
clock in which the norm is latched into a register (`in_ready` low), the
output pass (`PASS_OUT`). Outputs are registered, one clock after each input;
`done` pulses with the last. A vector of n components takes 2n + 1 clocks from
the `start` edge to the last output. The latched norm is visible on `norm`.

## Word formats

The formats are a choice of this implementation (parameters and constants
in `capsnet_nl_pkg`):

| signal                              | format                  |
|-------------------------------------|-------------------------|
| softmax input x                     | signed Q4.4 (8 bits)    |
| exponential terms, softmax output y | unsigned, 8 fraction bits, value <= 1.0 (9 bits) |
| exponential sum                     | unsigned Q8.8 (16 bits) |
| log2 of the sum                     | signed, 4 fraction bits |
| squash input x                      | signed Q3.5 (8 bits, [-4, 4)) |
| squared norm                        | unsigned, 10 fraction bits (20 bits) |
| norm                                | unsigned Q3.5 (8 bits)  |
| squashing coefficient               | unsigned Q0.8           |
| squash output y                     | signed Q1.7 (8 bits)    |

## Accuracy the testbenches hold the units to

Every testbench compares the RTL bit for bit with a model written with real
arithmetic (`tb/capsnet_ref_pkg.sv`), and additionally bounds the error
against the exact function:

* `pow2u`: within +0.09/-0.01 of 2^a; `expu`: within +0.1/-0.05 of e^a;
  `log2u`: at most 0.15 below log2 F (0.086 from the chord plus truncation).
* softmax: every output within 0.15 of the exact base-2 softmax, and the
  outputs of a vector add up to between 0.8 and 1.2.
* squash coefficient: squash-exp within 0.06 of n/(1+n^2) below 0.75,
  squash-pow2 within 0.17 below 1.0 (the chord of 2^v adds to the
  1 - 2^-n error), table within one LSB.
* squash-exp outputs within 0.12 of the exact squash while the norm is below 4.

## A full routing layer as a workload

`tb/tb_workload_routing.sv` runs three iterations of routing-by-agreement for
a class-capsule layer of the size of the original MNIST capsule network:
1152 primary capsules, 10 class capsules of 16 dimensions, so 3456 ten-way
softmaxes and 30 squashes of 16 components. The testbench plays the part of
the surrounding accelerator (weighted sums and agreement dot products, in
real arithmetic) and sends every softmax and squash through the top level.
The predictions are synthetic: one class receives mutually agreeing
predictions, the others noise. Weighted sums are divided by 1152/10 to fit
the squash input format. Besides checking all 35,000 unit outputs bit for
bit, it requires the hardware path to pick the agreeing class and to agree
with the same routing done with the exact e-based softmax and squash in
floating point. In a typical run the winning capsule has length 0.88 in
hardware against 0.94 in floating point, and the other classes stay below
0.02. It simulates in a few seconds.

## Top level (`capsnet_nl_top`)

The top places one softmax_b2 and one squash unit side by side with
independent streams (ports prefixed `sm_` and `sq_`), sharing clock and
asynchronous active-low reset. Parameter `SQUASH_VARIANT` selects
`SQUASH_EXP` (default, the more accurate of the two) or `SQUASH_POW2`.

## Where this implementation fills in details

The structure of every unit — the mux/pow2/sum/log2 loop of the softmax, the
square-accumulate-table norm, the branch-and-table coefficient with its
multiplier — follows the published architecture. The following are this
implementation's own choices:

* all word widths and the rounding (truncation in the shifters and the
  output multiplier, round-to-nearest in the tables);
* the streaming interface, re-streaming of the vector for every pass instead
  of an internal buffer, and the separate pass that finds the softmax maximum;
* the ranges and resolutions of the two square-root tables, and saturation
  of the norm above 7.97;
* the squash-exp breakpoint 0.75 (read off a plot, not stated as a number);
  1.0 for squash-pow2 is where 1 - 2^-n meets the exact curve;
* the output registers and the one-clock norm register of the squash unit;
* the top level, which is only a container: the two units were designed and
  evaluated separately.

Not included are the two softmax designs and the norm-approximation squash
that the proposed units were compared against, and the network-level
accuracy evaluation.

## Files

| file | contents |
|------|----------|
| `rtl/capsnet_nl_pkg.sv` | formats, size and variant enums, pass encoding |
| `rtl/pow2u.sv`, `rtl/log2u.sv`, `rtl/lod.sv`, `rtl/expu.sv` | arithmetic units |
| `rtl/softmax_b2.sv` | base-2 softmax |
| `rtl/sqrt_lut.sv`, `rtl/squash_norm_unit.sv` | norm unit |
| `rtl/squash_coeff_lut.sv`, `rtl/squashing_unit.sv` | coefficient and output |
| `rtl/squash.sv` | squash unit with its controller |
| `rtl/capsnet_nl_top.sv` | top level |
| `tb/capsnet_ref_pkg.sv` | real-arithmetic reference models |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_workload_routing.sv` | three routing iterations of a 1152 x 10 capsule layer |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and finishes; it also
has a watchdog. With Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_softmax_b2 \
        -Irtl -Itb -y rtl -y tb rtl/capsnet_nl_pkg.sv tb/capsnet_ref_pkg.sv \
        tb/tb_softmax_b2.sv -o sim
    ./obj_dir/sim

Replace `tb_softmax_b2` by any other testbench. `tb_capsnet_nl_top` runs the
whole design at its default parameters, with both streams active at once,
and reports how often each mechanism occurred (every vector length, both
coefficient branches, both square-root tables, norm saturation, outputs
flushed to zero, restarts in mid-vector); one that never occurs counts as a
failure. Reset is asynchronous: testbenches must give `rst_n` a falling
edge, since an initial low level alone does not trigger it.

Lint: `verilator --lint-only -Wall -Wno-fatal rtl/*.sv --top-module capsnet_nl_top`
(the remaining warnings are unused package constants, unused low bits of
shifter words, and the reset being used both as an asynchronous reset and
in the assertions' `disable iff`).

## Changing the design

* Word widths of the arithmetic units are module parameters; the unit-level
  formats live in `capsnet_nl_pkg`. The softmax log2 output uses the input's
  fraction bits so that the subtraction needs no alignment; keep
  `OUT_FRAC <= IN_FRAC` in `log2u`.
* The breakpoints are `THR_EXP` and `THR_POW2` (norm codes, Q3.5) in the
  package; the coefficient table resizes itself.
* New vector lengths: extend `sm_size_e`/`sq_size_e` and `sm_len`/`sq_len`,
  and the accumulator widths (`SM_SUM_W`, `SQ_S_W`) if the sum can grow.
