# VIKIN-style accelerator: one FP16 engine for KAN and MLP layers

A Kolmogorov-Arnold Network (KAN) layer puts a learnable one-dimensional
function on every edge instead of a scalar weight. In the usual form each edge
function is

    phi(x) = w_b * silu(x) + sum_i t_i * B_i(x)

where the B_i are the G+K B-spline basis functions of order K on a grid of G
intervals. A layer output is the sum of phi over all its inputs. Two things make
such a layer awkward for an MLP accelerator:

* **Evaluating the bases.** The B_i(x) come from the Cox-de Boor recursion,
  which is several orders deep.
* **Sparsity.** For any x at most K+1 of the G+K bases are non-zero, so most
  products in the weighted sum are zero.

This RTL builds one engine that runs both KAN and MLP layers, with two
ideas:

1. **Dual-role B-spline units (SPUs).** Sixteen units evaluate the bases of
   sixteen inputs at once (KAN). In MLP layers the same multipliers serve as
   sixteen extra multiply-accumulate units.
2. **A two-stage sparsity encoder (TSE)**, written as `tse`. It turns the
   sparse basis streams into dense (value, offset) lists before they reach the
   processing elements (PEs). Its first stage drops zeros. Its optional second
   stage drops values by a fixed 4-element pattern, which serves structured
   pruning of KAN coefficients or MLP weights.

Every computation is in IEEE half precision (FP16).

## Block map

```
                 host side: instruction push, input-buffer and weight-buffer write ports
                    |                |                                 |
               ins_buffer      act_buffer (input, 2 KB)          weight_buffer (32 KB, 4 banks
                    |                |                            + memory controller)
             main_controller         +--> simd_core (silu) --+            |
                                     +--> spu x16 ----------+|            | weights for
                                     |    (B_i streams)     ||            | PE and SPU lanes
                                     |                      vv            |
                                     +------(MLP)-------> tse (16 slices, |
                                                          2 groups)       |
                                                             | share bus  |
                                                             v            v
                                                     pe_array x16 <-- weights
                                                     spu x16 (accumulate mode, MLP)
                                                             |
                                       relu_unit --> act_buffer (output, 2 KB)
                                       relu_unit --> input buffer (SPU results, MLP)
```

`vikin_top` holds all the blocks. The routing between them, which depends on
the mode, is written as multiplexers inside that module. The host processor,
the off-chip memory and the large global weight store are outside the design.
Their side appears as plain ports:

* an instruction push port;
* whole-word write ports into the input buffer and the weight buffer;
* read ports on both activation buffers.

A buffer word is always 16 FP16 values, one per lane (256 bits).

## The two modes

### Pipeline mode: one KAN output batch

One `OP_KAN` instruction computes 16 output nodes of a KAN layer. Each output
node goes to one PE. The instruction covers `n_words+1` batches of 16 inputs.
For each input batch b:

1. **Stage 1.** The controller reads input word b.
   * The SIMD core computes silu for all 16 inputs (one clock).
   * Each SPU i starts the recursion for input i.
   * The controller waits until stage 2 has released the encoder. It then
     clears the encoder and writes the 16 silu values into it without
     filtering, at offset G+K.
   * It then lets the SPUs emit their final-order bases. SPU i streams
     B_0..B_{G+K-1} into slice i. The slice keeps the non-zero values that
     the pattern mask allows, each with its index (offset).
2. **Stage 2.** The slices form two groups of eight (0-7 and 8-15).
   * A dense pointer walks each group, one entry per clock, and puts the value
     on one lane of a registered share bus.
   * The offset and slice number go to the weight buffer. It returns, for each
     of the 16 PEs, the weight that belongs to that (input, basis) pair for
     that PE's output node.
   * Each PE adds `a0*w0 + a1*w1` per clock, one product per group.

While stage 2 drains batch b, the SPUs already compute orders 0..K-1 of
batch b+1. They then hold before their final order until the encoder is free:
`s1_stall` is high while they wait.

The stage-2 length per batch is the largest dense count of any slice group.
With the mask off that is at most 8·(K+2) entries. Stage 1 takes the SPU busy time given below
(42 clocks at G=4, K=3); only its final order waits for stage 2.

The PE sums are written to `out_addr` of the output buffer without ReLU.

### Parallel mode: one MLP output batch of 32 nodes

In an `OP_MLP` instruction the input buffer feeds the encoder directly. Words
`in_base .. in_base+n_words` (at most 16) enter at one per clock, so slice i
holds lane i of each word, with the word number as offset. Zero activations
(e.g. after a ReLU) and pattern-masked positions are dropped.

The two dense pointers then drive the share bus. All four weight banks are read
at once:

* banks 0 and 1 feed the PE array (16 outputs);
* banks 2 and 3 feed the SPUs in accumulate mode (16 more outputs).

One batch therefore produces 32 output nodes. With `relu` set, ReLU is applied
on write-back:

* PE results go to output-buffer word `out_addr`;
* SPU results go to input-buffer word `spu_addr`.

### Aggregation

`OP_AGG` copies output-buffer word `out_addr` into input-buffer word `in_base`.
That is how a layer's outputs become the next layer's inputs.

## The B-spline unit (`spu`)

The grid is uniform on [-1, 1]:

* the interval width is h = 2/G;
* K extra knots are added on each side: x_j = -1 + (j-K)·h, for j = 0..G+2K.

G is one of {2, 4, 8, 16} and K is one of {1, 2, 3, 4}, so a basis of order k
is divided by k·h, i.e. multiplied by G/(2k). This is a power of two for k = 1,
2 and 4, so the unit adjusts the FP16 exponent instead of dividing. For k = 3
it adjusts the exponent by G/2 and then makes a second pass through a
multiplier with the constant 1/3 (`16'h3555`).

The evaluation runs in this order:

1. **Knot differences.** One knot per clock. The unit computes x−x_j (the
   "positive grid") and x_j−x (the "negative grid"), stores both in the stage
   buffer, and forms the order-0 bases at the same time.
2. **Orders 1..K.** One basis per clock (two clocks per basis at k = 3), each from
   two multiplies and an add: `(x-x_i)·B_{k-1,i} + (x_{i+k+1}-x)·B_{k-1,i+1}`,
   scaled as above. The results overwrite the temporary row in place, in
   ascending i.
3. **Output.** The final order goes out on `b_valid/b_data/b_idx`, gated by
   `out_ready`.

Busy time: (G+2K+1) + Σ_{k=1..K} (G+2K−k)·c_k clocks, where c_k = 2 for k = 3
and 1 otherwise. For example, G=4, K=3 takes 11 + 9 + 8 + 14 = 42 clocks.

Inputs outside the extended knot range give all-zero bases; only the silu branch then
contributes. Accumulate mode shares the two multipliers and the adder:
`acc += a0*w0 + a1*w1`.

## The sparsity encoder (`tse_slice`, `tse`)

Each slice has:

* a dense data scratchpad of 16 × 16 bit;
* a dense offset scratchpad of 16 × 5 bit;
* a 5-bit input counter (InCnt) and a 4-bit dense counter (DnCnt).

An element of the stream is written at DnCnt, with InCnt as its offset, when
both of these hold:

* it is non-zero (stage 1);
* the mask is off, or mask bit `InCnt[1:0]` is set (stage 2).

Mask bit i keeps element i of each group of four. The pattern "1 0 1 0", which
keeps elements 00 and 10, is therefore `mask = 4'b0101`. Masked positions are
never used, so their weights can be pruned.

A 17th write in one slice is dropped and raises `tse_overflow`. This cannot
happen in pipeline mode (at most K+2 entries). In parallel mode it happens only
if an instruction streams more than 16 words, which is a programming error.

## Weight layout

The weight buffer has four banks of 256 words. Each word holds 16 FP16 weights,
one for each PE or SPU lane, i.e. one for each output node.

| mode | banks | word address |
|---|---|---|
| KAN | 0+1 stacked (512 words) for slices 0-7; 2+3 for slices 8-15 | `w_base + b·8·P + slice·P + offset`, P = G+K+1 |
| MLP | bank 0 → PE, group 0; bank 1 → PE, group 1; bank 2 → SPU, group 0; bank 3 → SPU, group 1 | `w_base + offset·8 + slice` |

In both rows "slice" is 0-7 within its group.

* **KAN.** Offsets 0..G+K−1 hold the spline coefficients t_i and offset G+K
  holds w_b. Input n of the instruction is batch b = n/16, group (n%16)/8 and
  slice n%8.
* **MLP.** The offset is the word number within the instruction. Input row
  16·offset + 8·group + slice of the instruction's inputs uses word
  `offset·8 + slice` of its group's bank.

A layer that needs more weight words than fit is split over several
instructions. The first has `clr=1` and the last `wb=1`. The host reloads the
weight buffer between instructions; the design leaves that transfer to the host
side.

## Instructions

`vikin_pkg::instr_t`, 34 bits:

| field | bits | meaning |
|---|---|---|
| op | 2 | `OP_KAN`, `OP_MLP`, `OP_AGG`, `OP_NOP` |
| g_code | 2 | G = 2 << g_code |
| k_code | 2 | K = k_code + 1 |
| mask | 4 | pattern mask |
| mask_en | 1 | second encoder stage on |
| relu | 1 | ReLU on MLP write-back |
| clr | 1 | clear accumulators first |
| wb | 1 | write results back at the end |
| in_base | 6 | first input word (`OP_AGG`: destination) |
| n_words | 5 | input words − 1 (MLP: ≤ 15) |
| w_base | 9 | weight base in each bank (group) |
| out_addr | 6 | output-buffer word (`OP_AGG`: source) |
| spu_addr | 6 | input-buffer word for SPU results (MLP) |

The instruction buffer is a 16-entry queue (`ins_wr_valid` / `ins_wr_ready`).
The core pulses `instr_done` when an instruction finishes and holds `busy`
while one runs.

## Arithmetic

All adders and multipliers use the functions in `vikin_pkg`:

* round to nearest even;
* subnormals flushed to zero, on input and output;
* overflow goes to infinity;
* no NaN handling.

silu is a 16-chord piecewise-linear sigmoid on [0, 8), mirrored for negative x.
Its error is under 4·10⁻³ in the sigmoid. A layer result therefore differs
from an exact computation by FP16 rounding plus this approximation.

## What follows the original design and what is this RTL's own

**Taken from the original design:**

* 16 SPUs, 16 PEs, a 16-lane SIMD silu core;
* a TSE of 16 slices with 16-entry data/offset scratchpads, a 5-bit InCnt
  and a 4-bit DnCnt;
* a non-zero filter followed by a 4-element pattern mask on the low InCnt bits;
* two slice groups of eight with dense pointers that feed a shared input bus
  and send offsets to the weight buffer;
* a 32 KB four-bank weight buffer: two banks stacked per group for KAN, all
  four banks read in parallel for MLP;
* 2 KB input and output buffers;
* two-stage pipelining of SPU and PE work;
* exponent-shift division with a 1/3 constant;
* SPUs reused as MACs, which doubles the MLP output batch to 32;
* ReLU bypassed for KAN;
* aggregation of outputs into the next layer's inputs;
* FP16 arithmetic.

**This RTL's own:**

* the instruction set and controller;
* every address formula and data layout;
* the silu approximation;
* the SPU's clock-by-clock schedule and its stage buffer layout (32 rows);
* the exact overlap scheme, which holds SPUs before their final order instead
  of double-buffering the encoder;
* buffer depths, derived from the byte sizes with 32-byte words;
* the overflow flag;
* reset values and all latencies;
* FP16 rounding details.

**Left out:**

* the host processor, global buffer, host interface module and DRAM, which
  appear only as ports;
* the weight-reload traffic between instructions;
* any FPGA-specific implementation detail.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against a reference written independently in double precision
(`fp16_ref_pkg`), ends with a `TB_RESULT checks=… failures=…` line, and has a
watchdog.

| testbench | what it checks |
|---|---|
| `tb_fp16_arith` | FP16 add/multiply/pack against exact rounding of real results |
| `tb_simd_core` | silu on random and edge inputs, latency |
| `tb_spu` | all 16 (G, K) settings against Cox-de Boor, busy-cycle count, out_ready hold, accumulate mode |
| `tb_tse_slice`, `tb_tse` | filtering, masks, offsets, overflow, pointer order, stage length |
| `tb_pe_array`, `tb_relu_unit`, `tb_act_buffer`, `tb_ins_buffer`, `tb_weight_buffer` | datapath, storage and address mapping |
| `tb_vikin_top` | end to end, at the default sizes (below) |
| `tb_workloads` | one output batch of each layer size of the original evaluation, including split instructions, with a cycle-count check for KAN |

`tb_vikin_top` runs the complete core at its default sizes:

* KAN layers with G = 2, 4, 8, 16 and K = 1..4, with and without the pattern
  mask;
* aggregation;
* MLP layers of 32 outputs with ReLU and a 75 % keep mask;
* a switch back to KAN;
* a deliberate overflow.

It counts zero skips, mask drops, stage-1 stalls, SPU/PE overlap, the 1/3
passes, ReLU clamps, SPU accumulate cycles, aggregations, mode switches and
overflows, and fails if any count is zero.

Running one testbench with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
          rtl/vikin_pkg.sv tb/fp16_ref_pkg.sv tb/tb_vikin_top.sv \
          --top-module tb_vikin_top -o sim
./obj_dir/sim
```

The end-to-end test builds and runs in a little over a minute.

## Sizing against the original workloads

These workloads are the original evaluation's (a 2- or 3-layer KAN of width
[72, 32, 96] with G = 4, K = 3; MLPs [72, 304, 96] and [72, 304, 304, 96]):

* **KAN.** One output batch of a [72 → 96] layer needs 5 input words and
  5·8·8 = 320 of the 512 weight words in each bank pair.
* **KAN at G = 16.** A batch needs 5·8·20 = 800 words, so it is split over two
  instructions.
* **MLP [72 → 304].** Needs 10 batches of 32 outputs.
* **MLP [304 → …].** 304 inputs are 19 words. That is more than the 16 one
  instruction may stream, so these layers take two instructions per batch.

All activations fit in the 64-word buffers. The complete weight sets (e.g. 110
KB for the [72, 96] KAN layer) exceed the 32 KB buffer, as in the original,
where a larger global buffer refills it.
