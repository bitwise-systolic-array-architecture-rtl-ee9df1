# BitSys: a bitwise systolic multiplier for mixed-precision quantised networks

## The idea

A quantised neural network may use 8-bit values in one layer and 1-, 2- or 4-bit values in
the next. A fixed 8x8-bit multiplier wastes most of its hardware on the narrow layers. BitSys
splits each 8-bit operand into 8/w channels of w bits (w = 1, 2, 4 or 8). It then computes all
of those channel products in one pass through the same hardware:

* an 8-bit word pair gives 1 product in 8-bit mode;
* 2 products in 4-bit mode;
* 4 products in 2-bit mode;
* 8 products in 1-bit mode (binarised, XNOR arithmetic).

The trick is to work at the level of single bits. An 8x8 grid of one-bit elements forms every
bit product a_i·b_j. Element (i,j) sees bit i of the activation and bit j of the weight. In
w-bit mode, a_i·b_j is part of a channel product only when i and j lie in the same w-bit
block. The precision therefore only changes which elements are switched on, which of them
are subtracted (for signed numbers), and where carries have to be cut so they do not run into
the next channel.

The bits are streamed through the grid systolically. Activation bits move right and weight
bits move up, one element per cycle. A new pair of 8-bit words can enter every clock cycle.
The logic between registers is a single bit operation or a small adder, so the clock can be
fast. In return the latency is long: 22 cycles for the multiplier, 27 for the
multiply-accumulator.

On top of the multiplier the design builds:

* a multiply-accumulator (MAC);
* an accelerator in which 8x8 such multipliers form a second, word-level systolic array;
* per-multiplier accumulators, and a threshold-based activation that turns each
  accumulated dot product back into a 1- to 8-bit value.

All SystemVerilog is in `rtl/` (one module or package per file) and all testbenches are in
`tb/`.

## Channel formats and arithmetic

Channel c of width w uses bits `a[w*c +: w]` and `b[w*c +: w]`. Its product is 2w bits wide
and is placed at `result[2*w*c +: 2*w]` of a 16-bit result, so the result is packed the same
way as the operands, at twice the width.

* **Unsigned, w = 2/4/8**: ordinary unsigned product.
* **Signed, w = 2/4/8**: two's complement operands and product.
* **1-bit (binarised)**: a bit stands for -1 (0) or +1 (1), so the product is the XNOR of
  the two bits.
  * Unsigned 1-bit mode: a match is stored as `2'b01`.
  * Signed 1-bit mode: the XNOR bit is treated as a signed one-bit number, so a match is
    stored as `2'b11` (-1) and a mismatch as `2'b00`.

  Both follow the paper's rule that the 1-bit sign mode subtracts the diagonal result. The
  accumulator path then adds these channel values like any other precision.

`prec_e` in `bitsys_pkg` encodes the precision (`PREC_1`, `PREC_2`, `PREC_4`, `PREC_8`).
`is_signed` selects signed arithmetic. Both are static: they may change only while no
operand is in flight.

## Multiplier (`bitsys_mul`)

```
a,b ─► input reg ─► input_loader (a) ─► ┐
                    input_loader (b) ─► bitsys_core ─► output reg ─► result
                                        (bitwise_systolic_array
                                         → partial_product_adder
                                         → output_generator)
```

### Input loader (`input_loader`)

The loader is an 8x8-bit shift buffer. A new word is written along the diagonal: bit k goes
into row k. Every cycle all rows move one place towards row 0, and row 0 is the output.

So bit k of a word leaves the loader k cycles after bit 0. This is the staircase ("skew") a
systolic array needs. A new word can still be accepted every cycle.

Each bit carries its own valid flag. An idle cycle therefore moves through the array as a
bubble, and the downstream logic never mistakes it for data. This matters in 1-bit mode:
the XNOR of two empty inputs would read as +1.

### Bitwise systolic array (`bitwise_systolic_array`, `bitwise_pe`)

* Row i receives activation bit a_i from the left and column j receives weight bit b_j from
  the bottom. Each element registers both bits and passes them on.
* Because of the skew, a_i and b_j of the same multiplication meet in element (i,j) i+j
  cycles after bit 0 entered. All elements on one anti-diagonal i+j = k therefore work on
  the same multiplication in the same cycle.
* The bits leave at the right and top edges 8 cycles after they entered. This is what lets
  multipliers be chained in the accelerator.
* Element results are registered.

There are two element types:

* **Diagonal elements (i = j)** compute XNOR in 1-bit mode and AND otherwise.
* **All other elements** compute AND when their precision pattern is on, and 0 when it is
  off.

The pattern of element (i,j) is on when `i/w == j/w`, i.e. when both bits lie in the same
w-bit block. In terms of the paper's regions:

| Region | Which elements | Switched on in |
|---|---|---|
| I | the diagonal | every mode |
| II | same 2-bit block | 2-bit mode and wider |
| III | same 4-bit block | 4-bit mode and wider |
| IV | everything else | 8-bit mode only |

Each element has six inputs: two bits, two valids, the pattern, and on an FPGA a constant.
It fits one dual-output six-input LUT. It is written here as portable logic.

### Partial product adder (`partial_product_adder`)

D_k is the signed sum of the valid element results on anti-diagonal k (k = 0..14). That is
at most 8 terms, so D_k fits in 5 signed bits.

A term is subtracted instead of added in these cases:

* **Signed, w > 1**: exactly one of i and j is the sign bit (top bit) of its w-bit block.
  This is the usual two's complement (Baugh-Wooley style) rule. The term where both bits
  are sign bits is added.
* **Signed 1-bit**: every diagonal term is subtracted.

The sum uses a three-level adder tree with a register after each level, so the latency is
3 cycles. D_k of a multiplication appears k cycles after its D_0.

### Output generator (`output_generator`)

The output generator is a 15-stage shift-and-add pipeline:

* Stage 0 holds D_0.
* Stage k adds `D_k << k` to the previous stage.
* D_k arrives exactly when the running sum of its multiplication reaches stage k, so a new
  multiplication enters every cycle.

A channel boundary at bit position 2w·m would let a borrow from a negative channel run into
the next channel. To stop this, a **carry cutter** sits after the stages of D_1, D_3, …, D_13.
An enabled cutter after D_k keeps bits [k:0] of the running sum and clears the bits above.
The cutters enabled in each mode are:

| Mode | Cutters enabled |
|---|---|
| 1-bit | all |
| 2-bit | after D_3, D_7, D_11 |
| 4-bit | after D_7 |
| 8-bit | none |

Result: each channel's bits are exactly its own product, modulo 2^(2w).

### Latency and throughput

The product appears 22 cycles after the operands are sampled. The cycles are spent as
follows:

| Step | Cycles |
|---|---|
| Input register | 1 |
| Loader | 1 |
| Element register | 1 |
| Adder tree | 3 |
| Output generator | 15 |
| Output register | 1 |

The multiplier accepts one word pair per cycle in every mode. The 22 cycles match the
computation-cycle count the paper reports for its multiplier. `bitsys_core` is the same
datapath without loaders and without the input and output registers: 19 cycles from bit 0
entering.

## Multiply-accumulator (`bitsys_mac`)

`bitsys_mul` → `accu_input_converter` → `accumulator`.

### Accumulator input converter

The converter turns a packed 16-bit product into the signed sum of its channels. It is a
four-layer tree with a register after each layer:

1. `t1[m] = in[2m] ± (in[2m+1] << 1)`. The "Neg." block negates bit 2m+1 when it is the
   sign bit of a signed channel:
   * every odd bit in 1-bit mode;
   * bits 3/7/11/15 in 2-bit mode;
   * bits 7/15 in 4-bit mode;
   * bit 15 in 8-bit mode.
2. `t2[m] = t1[2m] + (t1[2m+1] << 2)`. The shift is applied only when channels are 4 bits
   or wider.
3. `t3[m] = t2[2m] + (t2[2m+1] << 4)`. The shift is applied only when channels are 8 bits
   or wider.
4. `sum = t3[0] + (t3[1] << 8)`. The shift is applied only for the single 16-bit channel.

A shift is kept when both inputs of an adder belong to the same channel. It is dropped when
they belong to different channels. The tree therefore weighs every bit by its place in its
own channel and adds the channels together. The output is 18 bits wide and signed. The
latency is 4 cycles.

### Accumulator

The accumulator is a signed 32-bit running sum. `clear` zeroes it.

### MAC timing

The accumulated value includes an operand pair 27 cycles after the pair was sampled
(22 + 4 + 1), as the paper reports for its MAC. One word pair per cycle means 8/w
multiply-adds per cycle.

## Multi-threshold activation (`mt_activation`, `threshold_control`)

The activation quantises the accumulated value to b output bits (b = 1, 2, 4 or 8). The
output is the number of thresholds, out of 2^b - 1 ascending ones, that are strictly smaller
than the accumulated value. Batch normalisation and the activation function fold into these
thresholds.

Instead of 255 comparators, every activation unit has one comparator:

* `start` latches the accumulated value and clears the count.
* `threshold_control` streams threshold 0, 1, 2, … for all columns, one per cycle.
* The count goes up whenever a threshold is below the value.
* A b-bit sweep takes 2^b - 1 cycles.

`threshold_control` stores up to 255 thresholds per column. The host writes them before the
tile that uses them.

## Accelerator (`bitsys_sa_accel`, top)

### Dataflow

The accelerator computes one tile of a fully connected layer: 8 input frames (rows) against
8 output neurons (columns).

```
cfg FIFO ─► bitsys_ctrl ──────────────── control ───────────────────────────────┐
input FIFO ─► skew delays (8r / 8c) ─► 8x8 array of bitsys_mac cells            │
            (loaders in the edge cells; activations move right, weights move up)│
            ─► per cell: mt_activation ◄──────────────────────────────────────── threshold_control
            ─► output FIFO (one word per row)
```

* The array is a word-level systolic array. Every core (r,c) is a complete BitSys multiplier
  core.
* The activation bit streams of row r pass through cores (r,0)…(r,7), and the weight bit
  streams of column c pass through cores (0,c)…(7,c). Each core forwards its streams after 8
  cycles.
* So the input words of row r and of column c are delayed by 8r and 8c cycles
  (`skew_delay`). The operands of step t then meet in core (r,c).
* There are only 16 loaders for 64 multipliers.

Each cell is a `bitsys_mac`, i.e. multiplier core, converter and accumulator. The same
module serves as the standalone MAC, with three parameters:

* `LOAD_A = 1` gives a cell its own activation loader. This is set only in column 0.
* `LOAD_B = 1` gives a cell its own weight loader. This is set only in row 0.
* All other cells take the bit streams of their neighbour.
* `IO_REGS = 0` removes the standalone multiplier's input and result registers.

Every cell also has its own activation unit. The activation units of
one column share that column's threshold stream.

### Word formats

* **Layer setting** (`layer_cfg_t`):
  * `prec`: the precision;
  * `is_signed`;
  * `out_bits`: 1, 2, 4 or 8, the width of the quantised output;
  * `length`: the number of input steps.
* **Input word**: one packed activation byte per row (`in_act[r]`) and one packed weight
  byte per column (`in_wgt[c]`) for one step. Each byte is 8/w channels of w bits. A step
  therefore adds 8/w products to every one of the 64 dot products.
* **Output word**: a row index (`out_row`) and the 8 quantised outputs of that row
  (`out_q[c]`, 8 bits each, of which `out_bits` are used).

### Control (`bitsys_ctrl`)

One layer setting controls one tile.

* **Settings (3 cycles).** The controller spends three cycles on it: it pops the setting,
  decodes it, then rewrites the multiplier setting registers and clears the accumulators.
  The paper states this three-cycle reconfiguration. Because it happens only between tiles,
  when the array is empty, the precision is constant while data is in flight.
* **Streaming.** The controller pops one input word per cycle. When the input FIFO is empty
  it inserts a bubble instead; the valid flags carry the bubble through, and it is counted
  in `n_stall`.
* **Drain.** The controller waits for the array to drain: 8·(ROWS+COLS-2) + 27 = 139
  cycles.
* **Activation.** It runs the threshold sweep.
* **Write-back.** It writes the 8 output rows into the output FIFO, waiting while the FIFO
  is full (counted in `n_outwait`).

`n_reconfig` counts precision or sign-mode changes. A tile of L steps with b output bits
takes about 3 + L + 139 + 2^b + 8 cycles, plus stalls.

### Parameters

| Parameter | Default | Meaning |
|---|---|---|
| ROWS, COLS | 8, 8 | array size (the paper's 8x8) |
| ACC_W | 32 | accumulator and threshold width |
| CFG_DEPTH, IN_DEPTH, OUT_DEPTH | 4, 16, 4 | FIFO depths |

The bit-level size N = 8 is a package constant (`bitsys_pkg::N`).

### Fitting a network

The network the paper evaluates on the accelerator is a four-layer fully connected MNIST
model with 784-64-64-64-10 neurons, run with uniform and mixed (1/2/4/8-bit) precision. It
fits the defaults:

* **Stream lengths.** With the mixed precisions the layer streams are 98, 16, 32 and 64
  words. Even 8-bit layer 1 needs only 784 words, against a 16-bit length field.
* **Thresholds.** At most 255 thresholds per neuron are needed.
* **Accumulator.** The largest possible sum, about 5·10^7, fits the 32-bit accumulator.
* **Tiling.** The 64-neuron layers take 8 column tiles each and the 10-neuron layer takes 2.
  Frames go in groups of 8.
* **Host side.** The host streams weights and thresholds per tile. Reading them from memory
  is outside this design.

## Where this design departs from, or adds to, the paper

* **Element types.** The paper's text puts the XNOR-capable "Type I" elements on the
  diagonal, but its element figure swaps the two captions. The text is followed here.
* **Converter shifts.** The converter figure shows fixed <<2, <<4, <<8 shifts. They are
  gated by precision here (see above), which is what makes the tree output the sum of all
  channels.
* **Registers and latencies.** Register placement is chosen so that the multiplier and MAC
  latencies equal the paper's 22 and 27 cycles. Where exactly the paper puts its registers
  is not described.
* **Static precision.** Precision is static while data is in flight. The accelerator changes
  it only between tiles.
* **Accelerator organisation.** The tile mapping (rows = frames, columns = neurons), the
  word formats, the skew delays, the FIFO depths and the controller states are this design's
  own. The paper gives the block diagram and the three-cycle reconfiguration.
* **Not built.** The paper's alternative single-layer accelerator, the LUT6_2 packing of an
  element, and the processing system with its DDR memory are not part of this design. The
  top's FIFO and threshold ports are where a host would connect.
* **Carry cutters.** What a cutter does internally (clearing bits above position k of the
  running sum) is this design's reading of the figure.

## Verification

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog. The arithmetic reference is
`tb/bitsys_ref_pkg.sv`. It computes channel by channel with plain integers, independently of
the bit-level structure.

| Testbench | What it checks |
|---|---|
| `tb_bitwise_pe` | exhaustive truth table of both element types |
| `tb_input_loader`, `tb_skew_delay` | exact skew and delay timing, with bubbles |
| `tb_bitwise_systolic_array` | every element's result and the edge outputs, cycle by cycle, in all precisions |
| `tb_partial_product_adder` | every D_k, with sign rules, in all 8 modes |
| `tb_output_generator` | packed products from D_k fed at the right cycles (carry cutting) |
| `tb_bitsys_core` | products at 19 cycles and the forwarded streams |
| `tb_bitsys_mul` | all 8 modes with random and corner operands; checks value and the 22-cycle latency |
| `tb_accu_input_converter` | random words, all modes, 4-cycle latency |
| `tb_accumulator`, `tb_sync_fifo`, `tb_mt_activation`, `tb_threshold_control` | against simple models |
| `tb_bitsys_ctrl` | settings handling, three-cycle reconfiguration, pop counts, drain timing, output order and the counters |
| `tb_bitsys_mac` | running sums at exactly 27 cycles in all modes |
| `tb_bitsys_sa_accel` | end to end, at the default parameters (see below) |

`tb_bitsys_sa_accel` runs eight tiles through the full-size 8x8 accelerator:

* the four layer shapes of the mixed-precision MNIST network (signed, 1/2/4/8-bit);
* four unsigned tiles with other precisions and output widths.

It feeds inputs with random gaps and drains outputs with random back-pressure, and checks
every output against a model. It also requires that each of these actually happened:

* input stalls;
* output waits;
* precision changes;
* all precisions;
* both sign modes;
* 1-bit and 8-bit outputs.

To run one testbench with Verilator from the project root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bitsys_pkg.sv tb/bitsys_ref_pkg.sv \
    tb/tb_bitsys_mul.sv --top-module tb_bitsys_mul
./obj_dir/Vtb_bitsys_mul
```

Use a 1 ns time unit (`--timescale 1ns/1ps`) so the watchdogs count cycles as intended.
