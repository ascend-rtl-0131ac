# Deterministic stochastic-computing softmax and GELU for vision transformers

Vision transformers need two nonlinear functions that stochastic computing
(SC) has traditionally handled badly: GELU, which is not monotone, and
softmax, which needs exponentials and a division. This RTL implements both
as fully parallel, deterministic SC circuits working on *thermometer-coded*
bitstreams, following the ASCEND accelerator (Xie, Hu, Wei et al., "ASCEND:
Accurate yet Efficient End-to-End Stochastic Computing Acceleration of Vision
Transformer"):

* **GELU** by *gate-assisted selective interconnect*: each output bit is an
  inverter and an OR on two wires selected from the input stream. One gate
  level, no clock.
* **Softmax** by an *iterative approximation* that needs only
  multiplications, additions and a division by a constant, all of which are
  cheap in thermometer SC. One combinational block per iteration; `k` blocks
  in a row give the result.

The linear layers, normalization, residual additions and storage of a full
ViT accelerator are not part of this RTL (the source describes none of them
in enough detail); the engine's ports are where they would connect.

## 1. The number format

A value is an `L`-bit vector holding `n` ones, all packed at the top:

    value = alpha * (n - L/2)        x[L-1] is the first bit to turn on, x[0] the last

`alpha`, the scaling factor, exists only on paper: no hardware stores it.
We call the bit at index `L-1-r` the bit of *rank* `r`; in a valid stream it
is 1 exactly when `n >= r+1`. Everything below builds on three facts:

* **Add** by concatenating streams that share one `alpha` and sorting the
  bits (`sc_bsn`, a bitonic sorting network of AND/OR compare-exchanges).
* **Multiply** two streams with a truth table (`sc_mul`): an `La`-bit and an
  `Lb`-bit stream give an exact `La*Lb/2`-bit product with
  `alpha = alpha_a * alpha_b`.
* **Any monotone map is wiring.** Output rank `i` is "the output count
  reaches `i+1`", which for a monotone map is "`n >= t_i`" for some
  threshold `t_i`, i.e. one input wire. Re-scaling by a rational factor,
  sub-sampling and saturation (`sc_rescale`) are all done this way, with the
  thresholds computed at elaboration time. Dividing by a constant needs not
  even that: it is only a change of `alpha`.

Negating a stream is also wiring: invert every bit and reverse the order
(`n` ones become `L-n`).

## 2. GELU by gate-assisted selective interconnect (`gelu_si`)

Plain selective interconnect can only produce monotone functions, because
it forwards input wires. GELU falls from 0 to about -0.17 near x = -0.75 and
then rises. For such a function the set of inputs where output bit `i` must
be 1 is a run at the bottom plus a run at the top, `n < lo_i` or
`n >= hi_i`, so

    y(rank i) = NOT x(n >= lo_i)  OR  x(n >= hi_i)

The default instance is the ternary GELU: an 8-bit input (values -4..4) and
a 2-bit output (values -1, 0, 1):

| selected bits {x[7], x[4], x[3]} | y[1:0] | output |
|---|---|---|
| 000 | 10 | 0 |
| 100 | 00 | -1 |
| 110 | 10 | 0 |
| 111 | 11 | +1 |

so `y[1] = !x[7] | x[4]` and `y[0] = x[3]`. The input values -4, -3..-1, 0,
1..4 give 0, -1, 0, +1. Note that a description of this circuit in the
source text writes the first gate as an AND; the truth table (and the
description of the circuit's behaviour next to it) requires the OR.

For other sizes the module rounds GELU (tanh form) on the grid given by
`ALPHA_IN` and `ALPHA_OUT`, finds `lo_i` and `hi_i` for each output bit,
and stops elaboration with an error if the rounded function cannot be made
with one NOT/OR pair per bit. The default scales 0.35 and 0.24 were chosen so
that this procedure gives exactly the ternary wiring above.

## 3. Iterative approximate softmax

### The algorithm

`y(t) = softmax(t*x)` starts at `y(0) = 1/m` for every element and ends at
`y(1) = softmax(x)`. Its derivative is expressible in `y` alone, so `k`
forward-Euler steps give

    z_i   = x_i * y_i
    y_i  <- y_i + [ z_i - y_i * sum_j(z_j) ] / k        (repeated k times)

Only products, sums and a division by the constant `k` remain.

### One iteration (`softmax_block`, `softmax_unit`)

```
            x_i ─┐
   y_i ──┬──────MUL1── z_i ──────────────────────┬── re-scale (÷k) ──┐
         │                                        │                    │
         │     all z_j ──► BSN1 (global) ──► keep every s1-th bit ──► sum(z)
         │                                                              │
         ├──────────── MUL2 (y_i · sum(z)), negate ─► keep every s2-th ─┴► re-scale (÷k) ─┐
         │                                                                                 │
         └───────────────────────────────────────────────► BSN2 ◄─────────────────────────┘
                                                             │  keep the central B_y bits
                                                             ▼
                                                           y_i (next)
```

`softmax_block` holds `m` units and the global sorting network BSN1, which
adds all `m` products `z_j` (`m*B_z` bits) and sub-samples the sum by `s1`.
Each `softmax_unit` then forms `-y_i*sum(z)`, sub-samples it by `s2`, brings
`z_i/k` and `-y_i*sum(z)/k` onto `y`'s scaling factor with two re-scaling
blocks, adds them to `y_i` in BSN2, and keeps the central `B_y` bits
(saturation).

### Sizes at the defaults

`B_x = 4`, `m = 64`, `[B_y, s1, s2, k] = [8, 32, 8, 3]`, `alpha_x = 1`,
`alpha_y = 1/64`:

| stream | bits | scaling factor |
|---|---|---|
| x_i | 4 | 1 |
| y_i | 8 | 1/64 |
| z_i = x_i*y_i | 16 | 1/64 |
| BSN1 output | 1024 | 1/64 |
| sum(z) after s1 = 32 | 32 | 1/2 |
| y_i*sum(z) | 128 | 1/128 |
| after s2 = 8 | 16 | 1/16 |
| z_i/k re-scaled (ratio 1/3) | 6 | 1/64 |
| -y_i*sum(z)/k re-scaled (ratio 4/3) | 22 | 1/64 |
| BSN2 | 36 (sorted on 64 lanes) | 1/64 |
| y_i next | 8 | 1/64 |

The re-scaling ratios follow from the scaling factors:
`z/k` needs `alpha_x/k`, the product needs `alpha_x*alpha_y*s1*s2/k`
(parameters `AX_NUM/AX_DEN` and `AY_DEN`). Every re-scaling rounds half up.
The stream lengths must divide evenly (`m*B_z` by `s1`, `B_y*len(sum)/2` by
`s2`); the modules stop elaboration otherwise.

With these scales, `y` covers [-1/16, +1/16] in steps of 1/64; larger
softmax outputs saturate. On random 64-element rows with scores in
{-2..2} the three-iteration result is about 0.008 mean absolute error from an
exact softmax. The scaling factors are the main thing to retune for real
attention statistics.

## 4. The engine (`ascend_top`)

* **Softmax path.** `K` `softmax_block`s are chained, one per iteration, so
  the whole softmax is computed in parallel. A register bank follows the
  input and each block. A row accepted with `sm_in_valid` appears on `sm_y`
  with `sm_out_valid` exactly `K+1` cycles later; a new row may enter every
  cycle. `x` travels with `y`. `y0 = 1/m` is a constant
  (`B_y/2 + round(AY_DEN/M)` ones).
* **GELU path.** `N_GELU` (default 64) `gelu_si` lanes between an input
  and an output register: latency 2 cycles, one vector per cycle.
* **Reset.** `rst_n` is synchronous and active low and clears only the
  valid bits; data registers load only on valid.
* An immediate assertion reports any non-thermometer `sm_x` element.

All ports are thermometer streams as in section 1. Attention scores come from
the `Q·K^T` product, softmax rows go to the product with `V`, and GELU sits
between the two MLP weight layers. Those layers are not included.

## 5. Files

| file | contents |
|---|---|
| `rtl/ascend_pkg.sv` | elaboration-time functions: rounding, re-scaling thresholds, GELU thresholds |
| `rtl/sc_mul.sv` | thermometer multiplier |
| `rtl/sc_bsn.sv` | bitonic sorting network (adder) |
| `rtl/sc_rescale.sv` | re-scaling / sub-sampling / saturation by wiring |
| `rtl/gelu_si.sv` | gate-assisted SI GELU |
| `rtl/softmax_unit.sv` | one element of one softmax iteration |
| `rtl/softmax_block.sv` | one iteration over a row (m units + BSN1) |
| `rtl/ascend_top.sv` | the pipelined engine |
| `tb/tb_ref_pkg.sv` | value-level reference arithmetic used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_softmax_configs` |

## 6. Simulating

Each testbench prints `TB_RESULT checks=N failures=F` and stops itself.
With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        tb/tb_ref_pkg.sv rtl/ascend_pkg.sv tb/tb_ascend_top.sv \
        --top-module tb_ascend_top -o sim
    ./obj_dir/sim

Replace `tb_ascend_top` by any other testbench name. What they check:

* `tb_sc_mul`, `tb_sc_rescale`: exhaustive over all input counts.
* `tb_sc_bsn`: random patterns at 16, 36 and 1024 bits.
* `tb_gelu_si`: the ternary table and wiring; an 8-bit-output variant
  against directly evaluated, rounded GELU.
* `tb_softmax_unit`: every combination of input counts against the
  reference update.
* `tb_softmax_block`: random rows, and three chained iterations.
* `tb_softmax_configs`: the alternative configurations [4,128,2,2],
  [16,128,16,4], [32,128,16,4].
* `tb_ascend_top`: the engine at its default sizes: 61 rows streamed with
  gaps and a reset, latency checked, and a count of each mechanism seen
  (back-to-back rows, gaps, rising, falling and saturating updates, each
  GELU level including the falling segment, rows dropped by reset).

The references in `tb_ref_pkg` compute with values and real-number
rounding. They share no code with the threshold wiring in `rtl/`.

Verilator needs about two minutes to build the full-size engine, mostly for
the 1024-bit sorting network of each iteration.

For synthesis, note that `sc_bsn` describes its network with procedural
loops; the 1024-bit global sorter unrolls to 28,160 compare-exchanges, more
than some front ends allow by default (yosys with the slang front end stops at
4,000 unrolled iterations: raise `--unroll-limit`). The 64-element softmax
unit itself synthesizes directly.

## 7. What follows the source and what does not

Taken from the source: the thermometer value definition, multiply by truth
table, add by bitonic sorting, the GELU wiring and truth table, the
iterative softmax algorithm, the unit and block structure (two multipliers,
two sorting networks, two re-scaling blocks, sub-sampling by `s1` and `s2`),
`m = 64`, `B_x = 4`, the recommended `[8, 32, 8, 3]` configuration, and `k`
softmax blocks per accelerator.

Choices made here, where the source is silent:

* bit order (ones enter at the top index), and counting ones rather than
  finding the 0/1 edge in the multiplier;
* the re-scaling block as rational scaling with round-half-up and clipping,
  realised as wiring;
* negation of the second product by inverting and reversing its bits;
* `y` enters the final adder unscaled; its output is cut to the central
  `B_y` bits (saturation);
* all scaling factors (`alpha_x = 1`, `alpha_y = 1/64`, GELU 0.35 / 0.24);
* GELU for sizes other than 8-in/2-out, derived from the tanh form of GELU;
* the default GELU output of 2 bits (ternary, matching 2-bit activations)
  rather than the 8-bit variant used in a standalone comparison;
* pipeline registers, valid signals and reset of the engine, and 64 GELU
  lanes;
* a full bitonic sorter for the global sum even though its inputs are
  already sorted in groups (a merge-only network would be smaller).

Not included: the linear layers, batch normalization, residual additions
(16-bit streams), memories and control of a complete accelerator.
