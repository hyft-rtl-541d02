# Hyft softmax accelerator in SystemVerilog

Softmax, `s_i = e^(z_i - z_max) / sum_j e^(z_j - z_max)`, is costly in hardware
for two reasons. It needs exponentials and a division, and it has a chain of
data dependencies: the maximum has to be known before any exponential, and the
sum before any division. Hyft answers the first problem with **hybrid number
formats**. Every intermediate result is held in whichever format makes the next
operation cheap:

* additions and subtractions are done in **fixed point**, where they are plain
  integer adds;
* exponentials, divisions and multiplications are done on **floating-point
  fields**, where they become additions and subtractions of exponents and
  mantissas (a logarithmic domain).

The conversions between the two formats are placed so that almost no barrel
shifters and leading-one detectors are needed. Hyft answers the second problem
with a **vector-wise pipeline**. A single vector cannot be pipelined, but
attention layers produce many independent vectors, so each of the three softmax
steps works on a different vector at the same time.

The same hardware also serves training. The backward pass of softmax needs
the products `s_i * s_j` (the Jacobian is `diag(s) - s s^T`). The division unit
is built so that it can also multiply, at little extra cost.

This RTL follows the architecture of the Hyft paper (T. Xia and S. Q. Zhang,
"Hyft: A Reconfigurable Softmax Accelerator with Hybrid Numeric Format for both
Training and Inference"). The paper gives the blocks, the formats and the
arithmetic. It does not give the cycle-level control, the interfaces or most
bit widths; those are choices made here and are listed in
[Departures and choices](#departures-and-choices).

## Data flow of one softmax

Default configuration: vectors of N = 8 elements, FP16 in and out.

| stage | block | in | out |
|---|---|---|---|
| 1 | input pre-processor (`hyft_input_preproc`) | N x FP16 | N x fixed 8.10 and z_max in fixed 8.10 |
| 2 | hybrid exponent unit (`hyft_exp_unit`) | fixed 8.10 | N x FP16 `e^(z-z_max)` |
| 2 | hybrid adder tree (`hyft_adder_tree`) | N x FP16 | fixed 4.16 sum, then FP16 |
| 3 | N x division/multiplication unit (`hyft_divmul`) | FP16 / FP16 | N x FP16 `s_i` |

"8.10" means a signed number with 8 integer bits (sign included) and 10 fraction
bits. Two runtime inputs set the fraction bits. *Precision* (`cfg_prec`, 0..10)
sets them for the pre-processor's fixed point. `cfg_sum_prec` (0..16) sets
them for the exponentials inside the adder tree. Fewer bits make the results
coarser. The width of the datapath stays the same, so this trades accuracy only.

## The arithmetic, step by step

This is the part to understand before changing anything.

### Float to fixed (FP2FX, `hyft_fp2fx`)

The significand `1.m` is placed by a single barrel shift at the right position
for the exponent. Then the fraction bits below the selected precision are
cleared. Negative numbers are truncated toward zero. Anything too large for
the format saturates, and so do Inf and NaN. Zeros and subnormals become 0.
One converter sits on every element and one on the maximum. The adder tree
has another one on each of its inputs. There the format is unsigned 1.16,
because `e^(z')` lies in (0, 1].

### Exponential (`hyft_exp_unit`)

With `z' = z - z_max <= 0` computed in fixed point:

1. `e^z' = 2^(z' * log2 e)`. The factor log2 e = 1.4427 is approximated as
   `1.0111b` = 1.4375, computed as `t = z' + (z' >>> 1) - (z' >>> 4)`: two
   shifts by constants and two adds.
2. Split `t` at the binary point into `U = floor(t)` and `F = t - U`, with
   0 <= F < 1. No hardware is needed for this: in two's complement the integer
   bits are `U` and the fraction bits are `F`.
3. Approximate `2^t ~ 2^U * (1 + F)`. This is a first-order fit of 2^F that is
   exact at F = 0 and F = 1 and at most 6.1 % high in between. The
   floating-point result therefore has **exponent U and mantissa F**, and no
   shift is needed.

The paper states step 3 as `2^u (1 + v/2)` with `u <= 0`, `-1 < v <= 0`. It
then renormalises this to exponent `u-1` and mantissa `1+v`. With `u = U+1` and
`v = F-1` this is the same number; the RTL uses the non-negative split directly.
Results below the smallest normal FP16 number (2^-14) are flushed to zero.

### Sum (`hyft_adder_tree`, `hyft_lod`)

Each exponential is converted to unsigned fixed point with 1 integer bit and
`cfg_sum_prec` fraction bits. The values are added by a binary tree that grows
one bit per level, so there is no overflow for N inputs. The sum is turned back
into a float by a leading-one detector. Its mantissa is truncated.

### Division in the log domain (`hyft_divmul`, OP_DIV)

For `a = 2^ea (1+ma)` and `b = 2^eb (1+mb)`, use `log2(1+x) ~ x`:

    log2(a/b) ~ (ea + ma) - (eb + mb)        a/b ~ 2^(ea-eb) * (1 + ma - mb)

The unit therefore only subtracts the exponent fields and the mantissa fields.
If `ma < mb` the mantissa term is negative. The FX2FP block (`hyft_fx2fp`) then
applies the rule the exponent unit uses: exponent minus one, mantissa `1 + m`.
The result is the same piecewise-linear antilog as above, `2^floor(x) (1 +
frac(x))`. No leading-one detector or variable shift is needed. The
division error stays within 13 % of the exact quotient in the tests. Within one
softmax vector the errors are strongly correlated, because every element is
divided by the same sum.

### Multiplication for the backward pass (`hyft_divmul`, OP_MUL)

    a * b = 2^(ea+eb) * (1 + ma + mb + ma*mb)

Compared with the division, only `ma*mb` is new. To halve the multiplier, only
the upper half of `mb`'s bits (5 of 10 in FP16) enter it, so the
"simplified multiplier" is 10 x 5 bits. This costs at most 2^-5 in the mantissa
term, about 3 % of the product. The mantissa term can now reach 3, so FX2FP has
a third case: when `m >= 1`, the exponent goes up by one and the mantissa
becomes `(m-1)/2`. The control input `op` picks the exponent result and the
mantissa result of one path. Both paths share the FX2FP block.

### Accuracy in numbers

The end-to-end tests use inputs in [-4, 4], STEP = 1 and full precision. The
outputs stay within 15 % (+0.002) of the exact softmax. They match a
real-number model of the approximations above to 2 %. The paper reports that
BERT accuracy on GLUE and SQuAD is unchanged with these approximations. That
claim is about a software emulation and is not reproduced here.

## Maximum search and STEP

The pre-processor keeps one vector in its data buffer. The search runs for
`K = ceil(N / (CMP * STEP))` cycles. On each cycle the buffer is read at
`CMP = 4` addresses `base, base+STEP, ..., base+3*STEP`. A comparator tree picks
the largest of these, and a last comparator merges it into the max buffer. The
base comes from a multiplexer (SEL): the external start address on the first
cycle, then the address register, which advances by `CMP*STEP`. Comparisons
use the float bit patterns, remapped so that unsigned order equals numeric
order.

`STEP = 2` looks at every other element only. This halves the search time,
and the paper argues that transformers tolerate the occasional missed maximum.
When the true maximum is skipped, `z'` can be positive. The exponent unit then
returns values above 1, and the adder tree saturates any value of 2 or more
to just under 2. Outputs are still produced but may exceed 1. The tests
check these cases against a model that saturates in the same way.

## Pipeline, timing and backward jobs (`hyft_top`)

    stage 1: data buffer + max search  ->  r12  ->  stage 2: exp + adder tree  ->  r23  ->  stage 3: N div-mul  ->  out

`r12` and `r23` are the stage registers. A vector moves forward when the next
register is free, or is being freed on the same cycle. A new job can enter
stage 1 on the cycle its previous job moves to stage 2.

* **Latency** of a forward job, from the accepting clock edge to `out_valid`:
  `K + 3` cycles. That is 5 cycles for N = 8 and STEP = 1.
* **Throughput**: one vector every `K + 1` cycles when back to back. That is
  3 cycles for N = 8, STEP = 1, and 33 cycles for N = 128.
* **Backward job** (`in_mode = MODE_BWD`): the vector `s` skips the maximum
  search and the exponent stage. In stage 3 the N units multiply `s_i * s_j`
  for one `j` per cycle. The job therefore produces N output beats, with
  `out_row = j` and `out_last` on the last beat. The consumer has to form
  `diag(s) - s s^T` from these products.
* **Stalls**: while `out_valid && !out_ready` the output holds. An assertion in
  `hyft_top` checks this. The stall backs up through `r23` and `r12` to
  `in_ready`.

For comparison, the paper's FPGA build of the N = 8 FP16 configuration reports
15.5 ns at 645 MHz, about 10 cycles. Its internal schedule is not published, so
the cycle counts here are this design's own.

### Top-level ports

| port | dir | width (default) | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset, all registers to 0 |
| `in_valid` / `in_ready` | in / out | 1 | job handshake |
| `in_vec` | in | N x 16 | `z` (forward) or `s` (backward), element 0 in the low bits |
| `in_mode` | in | 1 | `MODE_FWD` or `MODE_BWD` (`hyft_pkg::job_mode_e`) |
| `cfg_step` | in | 4 | STEP of the maximum search (0 is taken as 1) |
| `cfg_prec` | in | 4 | fraction bits of the 8.10 fixed point (0..10) |
| `cfg_sum_prec` | in | 5 | fraction bits of the adder tree (0..16) |
| `out_valid` / `out_ready` | out / in | 1 | result handshake |
| `out_vec` | out | N x 16 | softmax vector, or row `out_row` of `s s^T` |
| `out_mode`, `out_row`, `out_last` | out | 1, log2 N, 1 | job kind, backward row index, last beat of the job |

`in_mode` and the three `cfg_*` inputs are sampled with the job and travel with
it through the pipeline. Jobs with different settings can therefore follow
each other without draining the pipeline.

## Parameters and configurations

| parameter | default | meaning |
|---|---|---|
| `N` | 8 | vector length (the paper evaluates 8 and 128) |
| `EXP_W`, `MAN_W` | 5, 10 | float format: FP16; use 8, 23 for FP32 |
| `FXI`, `FXF` | 8, 10 | integer and maximum fraction bits of the pre-processor fixed point |
| `ACCF` | 16 | maximum fraction bits inside the adder tree |
| `CMP` | 4 | elements compared per search cycle |

The paper's Hyft32 configuration, with FP32 in and out, is the same RTL with
`EXP_W=8, MAN_W=23`. Its FP16 and FP32 versions are separate builds, not a
runtime mode. The internal fixed-point widths keep their defaults in both
formats. Inputs must lie in (-128, 128); larger ones saturate.

The defaults cannot run the paper's other configurations, which need 128
elements per vector or FP32 data, until these parameters are overridden. BERT
workloads need softmax rows as long as the sequence: typically 128 tokens for
GLUE and 384 for SQuAD. One job holds exactly N elements, and a longer row
cannot be split across jobs, because the maximum and the sum are computed per
job.

## Departures and choices

These follow the paper:

* the four blocks and their order;
* the format of every link (Fig. 2 of the paper);
* the log2 e constant and its shift-and-add form;
* the exponent/mantissa split;
* the `u-1`, `1+v` normalisation;
* the log-subtract division;
* the half-range multiplier;
* STEP and Precision;
* the three-stage vector pipeline.

These are choices of this implementation, where the paper is silent:

* all bit widths of the internal fixed-point formats (8.10 and 1.16);
* four comparator inputs per cycle (as drawn in the paper's figure), and
  advancing the address by `CMP*STEP` per cycle;
* saturation, flush-to-zero, truncation instead of rounding, and treating a
  zero divisor as 1;
* which half of which multiplicand the simplified multiplier keeps (the upper
  half of B);
* normalisation of mantissa terms of 1 or more in the multiplication;
* the valid/ready interfaces, the stage registers, the configuration carried
  with each job, and the row-per-cycle backward schedule;
* the exponent, adder-tree and div-mul blocks are combinational. The
  `En` inputs drawn for them in the paper are replaced by the enables of the
  pipeline registers;
* the subtraction `diag(s) - s s^T` is not built. Only the products are.
* one pre-processor with N converter lanes stands for the N per-element
  pre-processors drawn in the paper's overview figure.

The paper also names the approximations it compares against, and evaluates
against Xilinx floating-point IP. Neither of these is part of this design.

## Files

| file | contents |
|---|---|
| `rtl/hyft_pkg.sv` | default sizes, `divmul_op_e`, `job_mode_e` |
| `rtl/hyft_fp2fx.sv` | float to fixed converter with Precision |
| `rtl/hyft_fx2fp.sv` | exponent + mantissa term to float (three-case normaliser) |
| `rtl/hyft_lod.sv` | leading-one detector, fixed to float |
| `rtl/hyft_input_preproc.sv` | data buffer, strided maximum search, converters |
| `rtl/hyft_exp_unit.sv` | N-lane hybrid exponent unit |
| `rtl/hyft_adder_tree.sv` | hybrid adder tree |
| `rtl/hyft_divmul.sv` | division/multiplication unit |
| `rtl/hyft_top.sv` | three-stage vector pipeline, top level |
| `tb/hyft_tb_pkg.sv` | real <-> float helpers for the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_hyft_workloads.sv`, `tb/hyft_wl_driver.sv` | N = 128 FP16, N = 8 FP32 and N = 128 FP32 configurations |

## Simulating

Every testbench checks against expected values computed with `real` arithmetic.
It does not reuse the design's bit manipulations. Each testbench has a
watchdog and ends with a line `TB_RESULT checks=<n> failures=<n>`. With
Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_hyft_top \
        -y rtl -y tb +libext+.sv rtl/hyft_pkg.sv tb/hyft_tb_pkg.sv tb/tb_hyft_top.sv
    ./obj_dir/Vtb_hyft_top

Replace `tb_hyft_top` with any other testbench name. `tb_hyft_top` runs the
default configuration end to end, in about 5 seconds. It checks:

* the 5-cycle latency and the 3-cycle job interval;
* about 400 mixed forward and backward jobs, half of them under random output
  back-pressure.

It counts each mechanism, and fails if one never occurs: output stall, input
back-pressure, STEP 2 and 3, backward job, forward/backward switch, reduced
precision, exponent underflow, and all three stages busy at once.
`tb_hyft_workloads` runs the 128-element and FP32 configurations, in about
30 seconds.

Verilator lints every module cleanly apart from unused-signal and unused-parameter notes. The
`SYNCASYNCNET` note on `rst_n` in `hyft_top` comes from the `disable iff` of
the output-hold assertion and is harmless.
