# OPAL core: an accelerator for outlier-preserving microscaled LLM inference

Activations in transformer LLMs are mostly small, but a few channels are
very large. Plain low-bit integer quantization with one shared scale handles
this badly. If the scale is set by the outlier, every other value rounds to
zero. If the outlier is clipped, the model's accuracy collapses. OPAL handles
it in two parts:

* **The MX-OPAL number format.** Data is cut into blocks of 128 values. In each
  block, the four largest-magnitude values are kept exactly, as bfloat16
  numbers with their positions. The other 124 share one exponent. That
  exponent is the exponent of the *fifth*-largest value, so it is not set by
  the outliers. Each of the 124 values is stored as a short sign-magnitude
  integer: 3 bits (low precision) or 5 bits (high precision).
* **A core built for that format.** Almost all multiplications become tiny
  2-bit × 2-bit integer products, which are then shifted and added. Only
  four pairs per block need a bfloat16 multiplier. The softmax of attention
  is replaced by a base-2 approximation, so attention × V needs only shifts
  and adds.

This repository holds synthesizable SystemVerilog for one OPAL core. It has:

* the eight data distributors and eight compute lanes;
* the lanes' integer multiply units, adder trees, integer-to-float converters
  and outlier FP units;
* the FP adder tree;
* the log2-based softmax unit with its 2 KB buffer;
* the output mux and the MX-OPAL quantizer.

The on-chip global buffer, layer norm, the activation function and the host /
DRAM side are outside the core and not included. Their connections are top-level
ports of `opal_core`.

## 1. The MX-OPAL block

| field | bits | meaning |
|---|---|---|
| `code[128]` | 128 × 5 | sign (top bit) + magnitude; the low format uses only the lowest 2 magnitude bits |
| `offset` | 4 | block exponent offset |
| `ol_idx[4]` | 4 × 7 | positions of the four outliers |
| `ol_val[4]` | 4 × 16 | outliers in bfloat16 |
| `ol_valid[4]` | 4 | outlier slot used |

The block is the packed struct `mx_block_t` in `rtl/opal_pkg.sv`.

### The shared exponent

A tensor has one 8-bit **global scale** `G`. Each block's shared exponent is
`Es = G + offset`, with a biased exponent as in bfloat16.

### Decoding a code

A code with `MB` magnitude bits (2 for low, 4 for high) decodes as:

    value = (-1)^sign × magnitude × 2^(Es − 127 − MB + 1)

So the top magnitude bit weighs `2^(Es−127)`, the implicit leading 1 of a
number whose exponent equals `Es`. Smaller numbers are shifted right by their
exponent difference and truncated.

### Outlier positions

An outlier's position holds code 0, and its value is taken from `ol_val`.

### Choosing the global scale

How `G` is chosen for a tensor is left open. Here it is an input to the core.

### The 4/7-bit variant

`CW` in `opal_pkg` is the chunk width, default 2. Setting it to 3 gives 4-bit
low codes and 7-bit high codes. With `CW = 3`, the testbenches of `int_mu`,
`int_to_fp`, `data_distributor`, `compute_lane`, `mxopal_quantizer` and
`opal_core` pass unchanged.

## 2. INT multiply unit and its three modes

A multiply unit (`int_mu`) holds four `CW`×`CW` unsigned multipliers. The sign
of each product is the XOR of the operand signs. The three modes use the four
multipliers differently:

| mode | operands | per unit and cycle | core MACs / cycle |
|---|---|---|---|
| low-low (LL) | 3-bit × 3-bit | 4 products | 8 × 32 × 4 = 1024 |
| low-high (LH) | 5-bit activation × 3-bit weight | 2 products; the upper 2-bit chunk of the 5-bit operand is shifted left by 2 | 512 |
| high-high (HH) | 5-bit × 5-bit | 1 product from lo·lo + (hi·lo + lo·hi)<<2 + hi·hi<<4 | 256 |

Weights are always low-bit. The high-high mode is used for Q·Kᵀ, where both
operands are activations.

The unit outputs four signed partial products. The lane's 128-input integer
adder tree (`int_adder_tree`) sums them.

## 3. Data distributor and compute lane

### One beat

A beat gives each of the 8 lanes one 128-element activation block and the
matching 128 weights. One beat therefore covers 1024 input channels of one
output element. Longer rows take several beats, and the last beat is marked
`in_last`.

### The data distributor (`data_distributor`)

On each beat the distributor registers the block pair and prepares it for its
lane:

* **INT codes.** Both operands' codes go to the lane's 32 multiply units, with
  every outlier position of either operand zeroed.
* **FP pairs.** For each of the four activation outliers, it forms a bfloat16
  pair: the outlier and the weight of the same input channel. That weight comes
  from the weight's own bfloat16 outlier if it has one there. Otherwise its
  integer code is converted to bfloat16.
* **LSB exponent.** It computes the exponent of one product LSB from the global
  scales and the block offsets.

It then feeds the block in 1, 2 or 4 phases (LL, LH, HH). In the 2- and 4-phase
modes it lowers `in_ready`, and the source stalls. The pairs that multiply unit
`m` receives in phase `ph` are:

    LL: pairs 4m .. 4m+3      LH: 64ph+2m, 64ph+2m+1      HH: 32ph+m

### The compute lane (`compute_lane`)

The lane:

1. accumulates the integer adder tree's output over the phases of a block;
2. converts the sum to bfloat16 with the LSB exponent (`int_to_fp`);
3. adds the sum of its four outlier products (`outlier_fp_units`).

The result is one bfloat16 partial dot product per lane.

### Weight scales

Integer weights need a scale too, and the published description does not give
it. Here each weight slice has a power-of-two scale `b_global + offset`. This
keeps the integer-to-float step a pure exponent add.

### Weight outliers

Weights may carry bfloat16 outliers only at the activation outliers'
positions. There are only four FP units per lane. A weight outlier anywhere
else is dropped, because its code is zero.

## 4. From lanes to output

`fp_adder_tree` adds the eight lane results. `opal_core` accumulates
successive beats until `in_last` and then emits one bfloat16 element. The
element goes one of two ways:

* **Normal results** (`to_softmax = 0`) pass through the output mux to `y_data`.
  If `q_en` is set they also go to the quantizer.
* **Attention scores** (`to_softmax = 1`, i.e. Q·Kᵀ) go to the softmax unit.

## 5. Log2-based softmax and shift-based Attn·V

Attention probabilities are rounded to powers of two,
`p_t ≈ 2^−Aq_t` with `Aq_t = clip(−round(log2 p_t), 0, 15)`. Multiplying V by a
probability then becomes an exponent subtraction.

### Score phase

For each score `s`:

* The exp unit (`exp_unit`) computes `e_t = 2^(s·log2(e)/√d_k)`.
  * The constant `log2(e)/√d_k` is the run-time input `exp_scale`.
  * `2^(I+f)` is approximated by `2^I·(1+f)`, which has a relative error below
    6.2 %.
* `e_t` is stored in the softmax buffer (`softmax_buffer`), which holds 1024
  bfloat16 entries (2 KB), eight per row.
* A running sum `S` is kept.

### Rounding the log ratio

`log2(e_t/S)` is rounded without a logarithm unit. `e_t` and `S` are written as
`1.m·2^E`, and the result is built from:

* the exponent difference `E_t − E_S`;
* a correction of ±1 when the mantissas differ by at least 0.5.

A mantissa comparator produces the correction.

### V phase

Each beat brings eight bfloat16 V values of one output dimension, for eight
consecutive tokens:

* Each value's exponent is lowered by that token's `Aq`.
* The eight results are added.
* The sums are accumulated until `v_last`, which gives one output element.

Tokens beyond the number of stored scores contribute zero.

### Routing the result

The result enters the same output mux as normal results, so it can be
quantized.

### Choices made here

| choice | reason |
|---|---|
| `AQ_W = 4` (Aq clipped to 0..15) | the bit width is left open |
| V in bfloat16, eight per cycle | eight-wide V input |
| Aq recomputed from the buffer for every output dimension | not stored |
| no subtraction of the row maximum before the exponential | scores must stay below about 2^128 after scaling |

## 6. MX-OPAL quantizer

`mxopal_quantizer` turns a stream of 128 bfloat16 values into one block. While
values arrive it keeps a sorted list of the five largest magnitudes. Ties go
to the earlier element.

On the 128th value it builds the block in one cycle:

* The four largest values become outliers.
* The fifth gives the shared exponent. Its offset is `clip(E5 − G, 0, 15)`.
* Every other value is shifted and truncated to a 3- or 5-bit code
  (`q_high`).
* A value too large for a clipped offset saturates.

The block is registered and appears one cycle after the 128th value.

## 7. Top level: `opal_core`

| port | dir | meaning |
|---|---|---|
| `mode` | in | `MODE_LL` / `MODE_LH` / `MODE_HH` |
| `to_softmax` | in | results are attention scores |
| `a_global`, `b_global`, `q_global` | in | global scales of A, B and the output tensor |
| `exp_scale` | in | `log2(e)/√d_k` (bfloat16) |
| `sm_clear` | in | start a new attention row |
| `q_en`, `q_high` | in | send results to the quantizer; 5-bit (1) or 3-bit (0) codes |
| `in_valid`, `in_ready`, `in_last` | in/out/in | beat handshake; `in_last` closes an output element |
| `a_blk[8]`, `b_blk[8]` | in | operand blocks, one pair per lane |
| `v_valid`, `v_last`, `v_data[8]` | in | V stream for Attn·V |
| `y_valid`, `y_data` | out | bfloat16 result (towards layer norm) |
| `q_valid`, `q_blk` | out | quantized block (towards SRAM) |
| `sm_n_tok`, `sm_aq_clip` | out | scores held; which Aq clipped this beat |

### Timing

* A lane result appears one cycle after a block's last phase.
* The element appears one cycle after that.
* A quantized block appears one cycle after its 128th element.
* A beat is accepted every 1, 2 or 4 cycles.
* Configuration inputs must be stable while an operation is in flight.
* `mode` is sampled per beat.
* An assertion flags a cycle in which the softmax output and a normal result
  reach the mux together.

### bfloat16 arithmetic

All bfloat16 arithmetic (`opal_pkg`):

* truncates rather than rounding;
* treats exponent 0 as zero;
* has no infinities or NaN;
* saturates at the largest finite value.

## 8. Where this RTL departs from, or adds to, the published description

* **Precision.** The default build is the 3/5-bit format. The area and power
  figures usually quoted for OPAL refer to a 4/7-bit core.
* **Attn·V.** V is handled in bfloat16 with an exponent subtractor. One
  drawing of the scheme instead shows integer V values shifted right. The
  exponent subtraction is equivalent and matches the block diagram of the
  softmax unit.
* **Choices of this design.** The following were not specified:
  * the phase order inside a block;
  * the handshake;
  * multi-beat accumulation in the core;
  * the weight-scale format;
  * truncation everywhere;
  * the exp approximation;
  * `AQ_W = 4`;
  * the mux priority;
  * that the quantizer has no flush, so a partial block stays pending.
* **Row length.** The softmax buffer limits an attention row to 1024 tokens.
  Perplexity evaluations usually use 2048-token windows, which would need the
  row split. No way of splitting it is defined here.
* **Softmax sum precision.** The running sum of e^x is a truncating bfloat16
  accumulator. Over 1024 tokens it came out about 1 % below the exact sum in
  simulation, and terms below 2^-8 of the sum are lost. Aq is rounded against
  this sum.
* **Datapath depth.** Each lane's datapath is single-cycle combinational, from
  the multiply units to the final bfloat16 add. No clock frequency is
  targeted, and a real implementation would pipeline it.

## 9. Files and simulation

`rtl/` holds the core:

* `opal_pkg.sv`: types, sizes and the bfloat16 functions;
* one file per module.

`tb/` holds the testbenches:

* one self-checking testbench per module, `tb_<module>.sv`;
* the shared helper package `tb_util_pkg.sv`.

Each testbench:

* compares the module against a model written in `real` arithmetic or in
  independent integer code;
* prints `TB_RESULT checks=N failures=M`;
* has a watchdog.

`tb_opal_core` runs the full-size core with no parameter changes. It covers:

* an LL matrix-vector product over 128 outputs with 2-beat rows, quantized
  to 5-bit blocks;
* an LH product fed by the block just produced;
* an HH Q·Kᵀ of 16 tokens into the softmax unit, including a clipped Aq;
* Attn·V over 128 dimensions, quantized to 3-bit.

It counts each mechanism: modes, mode switches, stalls, multi-beat
accumulation, FP outlier pairs, weight outliers, scores, Attn·V outputs, Aq
clipping and quantized blocks.

`tb_workload_llama2` runs the core, also at full size, on Llama2-7B-shaped
work:

* 128 outputs of a linear layer with hidden size 4096 (four beats per
  output, low-high mode), with activation outliers 8 to 128 times above the
  shared scale;
* one attention head with head dimension 128 and 1024 tokens, which fills
  the softmax buffer.

To run a testbench with Verilator 5:

    verilator --binary --timing -Irtl -Itb tb/tb_util_pkg.sv rtl/opal_pkg.sv rtl/*.sv tb/tb_opal_core.sv --top-module tb_opal_core
    ./obj_dir/Vtb_opal_core

Replace `tb_opal_core` with any other testbench to run that one. The full
core takes about half a minute to build and a few seconds to run.
