# Multi-term floating-point adder with online alignment and addition

This is the RTL for a pipelined N-term fused floating-point adder. It adds N
floating-point numbers of one format and rounds the sum once. It follows the
architecture of "Online Alignment and Addition in Multi-Term Floating-Point
Adders" by K. Alexandridis and G. Dimitrakopoulos. The default build is the
main configuration of that work: 32 BFloat16 terms, radix list 8-2-2, a
4-cycle pipeline.

## The idea: align while you add

A conventional multi-term adder works in two passes. First it finds the
largest exponent `e_max` among all N terms. Only then can it shift each
fraction right by `e_max - e_i` and add all the aligned fractions. The
maximum search is a full N-input reduction, and every shifter waits for it.

The online formulation removes that wait. It carries a pair
`(lambda, o)` through the computation: an exponent and a partial sum already
aligned to that exponent. Two pairs combine with the operator

```
(lambda_i, o_i) (*) (lambda_j, o_j) =
    ( max(lambda_i, lambda_j),
      o_i >>> (max - lambda_i)  +  o_j >>> (max - lambda_j) )
```

When a partial sum meets a larger exponent, it is simply shifted right once
more. The operator is associative. So any tree of operators over the leaves
`(e_k, m_k)` yields the global maximum exponent and the aligned sum. Each
node does max, subtract, shift and add on its own small group. No node waits
for a global result.

A node may take more than two inputs. A radix-R node does, for R inputs,
what the conventional design does for all N: it finds the max of R
exponents, subtracts, shifts and adds. The conventional adder is therefore
the special case of a single radix-N node. A tree is named by its radix per
level, starting at the leaves:

- `2-2-2` (8 terms) is a binary tree.
- `4-2` is radix-4 nodes, then one radix-2 node.
- `8-2-2` (32 terms) is four radix-8 nodes, then two levels of radix-2 nodes.

## Blocks

```
terms_i[0..N-1]
   |  fp_unpack  (x N)      exponent + two's complement fraction, special flags
   v
align_add_tree              LEVELS levels of align_add_op, register after each level
   |  (lambda_root, o_root)
   v
normalize_round             sign/magnitude, LZC, limited shift, RNE, inf/NaN/subnormal
   v
output register -> sum_o
```

The valid bit and three special-value flags (NaN seen, +inf seen, -inf seen)
travel in a delay line beside the tree. The delay line has the same latency
as the tree.

| File | Contents |
|---|---|
| `rtl/fp_pkg.sv` | format widths, radix-list type, width and tree-shape functions |
| `rtl/fp_unpack.sv` | one input word to `(exponent, signed fraction)` |
| `rtl/align_add_op.sv` | radix-R align-and-add operator |
| `rtl/align_add_tree.sv` | mixed-radix tree of operators with optional level registers |
| `rtl/normalize_round.sv` | normalisation and round-to-nearest-even into the input format |
| `rtl/online_fp_adder.sv` | top level |

## Number representation inside the tree

Everything between the unpack and the normaliser is a two's complement
integer of `W = 2 + log2(N) + MW + G` bits. `MW` is the fraction width of the
format and `G` is the number of guard bits (default 3). For 32 BFloat16
terms, `W = 2 + 5 + 7 + 3 = 17`.

- A term enters as its fraction with the hidden bit. This is shifted left by
  `G` and negated when the sign is set.
- Its exponent is the biased exponent field. Zero and subnormals use 1
  instead of 0, so subnormals keep their value.
- Infinity and NaN enter as a zero term and raise a flag.
- A partial sum `o` with exponent `lambda` is worth
  `o * 2^(lambda - bias - MW - G)`.
- The `log2(N)` extra top bits make the sum of all N terms fit. So no node
  needs a wider adder, and no overflow can occur inside the tree.

Each alignment shift is an arithmetic right shift. Shifted-out bits are
dropped, which rounds toward minus infinity. A shift of `W` or more leaves
only the sign (0 or -1). Two consequences matter to anyone using the adder:

1. **The result depends on the radix list.** All trees give the same maximum
   exponent. But which low-order bits are dropped depends on where the shifts
   happen. Different trees can differ in the last bits of the rounded result
   when the exponents are more than `G` apart.
2. **The result is exactly rounded when no bits are dropped.** If all
   exponents lie within `G` of the maximum, no shift loses a bit. The adder
   then returns the correctly rounded (round to nearest, ties to even) sum,
   for every radix list. The testbenches check this case against an exact
   reference.

If exact rounding is required for wider exponent spreads, raise `G`. This
costs `G` bits of width in every shifter and adder. The source work does not
say how many extra bits its designs carried.

## Normalisation and rounding

`normalize_round` receives `(lambda, o)` from the root of the tree. It works
in five steps:

1. Take sign and magnitude of `o`.
2. Count the leading zeros `lzc` of the magnitude.
3. Shift left by `s = min(lzc, lambda + log2 N)`. The limit stops the biased
   exponent from going below 1. When the limit applies, the result is
   subnormal and its top bit is 0.
4. Compute the biased exponent before rounding as `lambda + log2 N - s`, plus
   the top bit after the shift.
5. The top bit is the hidden bit, and the next `MW` bits are the fraction.
   The bit below them is the round bit, and the OR of the rest is the sticky
   bit. Rounding is to nearest, ties to even.

If rounding carries out of the fraction, the exponent goes up by one. This
also turns the largest subnormal into the smallest normal number.

Special results:

| Case | Result |
|---|---|
| exponent reaches the all-ones code | ±infinity |
| exact zero sum | +0 |
| NaN among the inputs, or both +inf and -inf | quiet NaN |
| otherwise any infinity among the inputs | that infinity |

All formats use IEEE-754-style encodings. FP8_e4m3 in the OCP style, which
has no infinity, is not modelled.

## Pipeline and interface

`online_fp_adder` ports:

| Port | Dir | Width | |
|---|---|---|---|
| `clk_i` | in | 1 | clock |
| `rst_ni` | in | 1 | asynchronous, active low; clears the valid pipeline only |
| `valid_i` | in | 1 | `terms_i` holds a set of terms this cycle |
| `terms_i` | in | N x (1+EW+MW) | packed `{sign, exponent, fraction}` words |
| `valid_o` | out | 1 | `sum_o` holds a result |
| `sum_o` | out | 1+EW+MW | rounded sum |

With the defaults, there is a register after each of the three tree levels
and one after rounding. The adder accepts a new set every cycle, and
`valid_o` rises exactly 4 cycles after `valid_i`. The pipeline has no stall
and no back-pressure. Data registers have no reset.

The four stages follow the source's rule for pipeline depth: `log2 N` stages
for FP32, and one fewer for BFloat16 and FP8. In the source, the HLS tool
placed the registers. Here each register sits on a level boundary.

Parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `N` | 32 | number of terms |
| `EW`, `MW` | 8, 7 | exponent and fraction width (BFloat16) |
| `G` | 3 | guard bits below the fraction |
| `RADIX` | `'{0: 8, 1: 2, 2: 2, default: 1}` | radix per level, leaves first; the list ends at the first 1; the product must equal N |
| `LEVEL_REG` | all ones | bit l = 1 puts a register bank after level l |
| `OUT_REG` | 1 | register after rounding |

The latency is the number of existing levels with `LEVEL_REG` set, plus
`OUT_REG`.

`fp_pkg` has constants for the formats: FP32 (8, 23), BFloat16 (8, 7),
FP8_e4m3 (4, 3), FP8_e5m2 (5, 2) and FP8_e6m1 (6, 1).

## Configurations of the evaluation

The source evaluates 16-, 32- and 64-term adders for the five formats. It
also sweeps all mixed-radix trees for 32 BFloat16 terms. Each of these is a
parameter setting of the same RTL. Some examples:

| Configuration | Parameters |
|---|---|
| 32 x BFloat16, 8-2-2 (default; lowest power in the source) | none |
| 32 x BFloat16, 4-4-2 (smallest area in the source) | `RADIX('{0: 4, 1: 4, 2: 2, default: 1})` |
| 32 x BFloat16, conventional single radix-32 node | `RADIX('{0: 32, default: 1})` |
| 16 x FP32, 8-2 | `N(16), EW(8), MW(23), RADIX('{0: 8, 1: 2, default: 1})` |
| 64 x FP8_e5m2, 8-8 | `N(64), EW(5), MW(2), RADIX('{0: 8, 1: 8, default: 1})` |
| 64 x FP32, 2-2-2-2-4 | `N(64), EW(8), MW(23), RADIX('{0: 2, 1: 2, 2: 2, 3: 2, 4: 4, default: 1})` |
| single-cycle variant | `LEVEL_REG('0)` (output register only) |

The default build holds 32 BFloat16 terms. A 16-term BFloat16 sum fits by
zero-padding. The 64-term adders and the other formats need the overrides
above. The area, power and clock-period figures of the source come from a
commercial HLS and 28-nm synthesis flow and cannot be reproduced from this
RTL.

## Verification

Each testbench checks its block against reference models in
`tb/fp_ref_pkg.sv`. The models use plain integer arithmetic with runtime
format widths:

- `ref_tree` evaluates any radix list with floor division by powers of two.
- `ref_round` rounds with an independent quantise-and-compare method.
- `ref_exact` gives the exactly rounded sum when no bits are lost.

| Testbench | What it checks |
|---|---|
| `tb_fp_unpack` | all 65536 BFloat16 and all 256 FP8_e4m3 encodings |
| `tb_align_add_op` | radix-2, 4 and 8 operators on random and extreme exponent differences |
| `tb_align_add_tree` | default registered 8-2-2 tree (3-cycle latency, one set per cycle) and a combinational 2-2-2 tree |
| `tb_normalize_round` | 200k random and directed cases; ties, carry-out, overflow, subnormal, zero and specials must all occur |
| `tb_online_fp_adder` | the default adder end to end; see below |
| `tb_workloads` | 33 configurations through the `adder_check` harness; see below |

`tb_online_fp_adder` streams 4000 cycles of eight stimulus classes, with
idle cycles mixed in. It checks every result bit for bit and checks the
4-cycle latency. It counts these mechanisms and fails if any of them never
occurred:

- realignment of partial sums inside the tree
- shift saturation
- cancellation
- carry-out renormalisation
- rounding up
- subnormal results
- overflow
- NaN/infinity inputs
- zero and negative sums
- pipeline bubbles

`tb_workloads` covers:

- every best configuration of the source's 16/32/64-term table
- all fifteen 32-term BFloat16 radix lists and the radix-32 node
- three single-cycle variants

Every testbench prints `TB_RESULT checks=<n> failures=<n>`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/fp_pkg.sv tb/fp_ref_pkg.sv tb/tb_online_fp_adder.sv \
    --top-module tb_online_fp_adder -o sim && obj_dir/sim
```

To run any other testbench, replace both `tb_online_fp_adder` names with it.
Each one finishes in seconds.

## What follows the source and what does not

Taken from the source:

- the operator and its definition
- mixed-radix trees and how they are named
- conversion of the fractions to two's complement before adding
- the five formats
- the default size and radix list
- the four-stage depth for a 32-term BFloat16 adder

Choices made in this RTL, where the source gives no detail:

- the internal width `W` and the `G = 3` guard bits
- truncating alignment shifts without a sticky bit
- round to nearest even
- IEEE-style subnormal, infinity and NaN handling
- a register on each tree level
- the valid/reset interface

Not built: the one-term-at-a-time form of the recurrence, a linear chain of
radix-2 nodes that folds in one term per step. The source uses it to derive
the operator, but evaluates only trees. A tree whose every level is radix 2
covers the radix-2 case.

The source produced its hardware by HLS from C++. This is hand-written RTL of
the same architecture, not a translation of that code.
