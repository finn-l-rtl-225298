# A variable-precision BiLSTM accelerator for text-line OCR

This RTL recognises one line of printed text from a grey-scale image. It
reads the image one pixel column at a time and runs a single bidirectional LSTM
layer over the columns. An output layer then gives a score for each symbol of
the alphabet at each column, and a greedy decoder turns those scores into the
character string. Everything happens on chip. The weights and activations are
quantized to a few bits each: by default 1-bit weights, 2-bit activations and
8-bit pixels. This keeps the whole network in on-chip memory and lets a single
datapath run at a high clock rate.

The network has these default sizes:

| symbol | meaning | default |
|---|---|---|
| I | pixels per image column (image height) | 32 |
| H | LSTM cells per direction | 128 |
| K | output symbols, the CTC blank included | 82 |
| C | maximum columns per image | 732 |
| WQ / AQ / IQ / RQ | bits of LSTM weights / output activations / pixels / recurrent activations | 1 / 2 / 8 / 2 |
| PE, SIMD_I, SIMD_R | cells computed in parallel, pixels and recurrent values taken per cycle | 1, 32, 128 |

## Dataflow

```
           cfg words ──► array_config ──► (all weight and bias arrays)

 image columns ─► input_buffer ─► bilstm_hidden_layer ─► output_layer ─► concatenator ─► max_per_column ─► final_labeling ─► labels
   (I x IQ bits)    (whole image)   L2R and R2L steps,     per-direction    adds the two      arg-max over K     greedy CTC
                                    interleaved            partial sums     halves of a col.  per column         collapse
                                    H x AQ out, H x RQ recurrent
```

`finnl_bilstm_top` is one complete network instance. The device-level design
scales throughput by placing several such instances, each working on its own
image. Nothing connects the instances to each other, so there is no RTL for
that replication here.

The top works in three phases:

1. Load the weights once through `cfg_*`.
2. For each image, pulse `start` with `num_cols`, then stream the columns on
   `img_*`.
3. The labels come out on `label_valid`/`label`, left to right. `done`
   pulses with `label_count` after the last one.

The top starts the hidden layer once the image is fully loaded. The whole
image must be loaded first because the right-to-left direction begins at the
last column.

## Number formats

The quantizer is the usual fixed-point one: `x_q = clip(round(x·2^f)·2^-f)`.

- **Signed values** (weights, pixels, and `y` after tanh) use `f = k-1`
  fraction bits and cover [-1, 1).
- **Sigmoid outputs** are unsigned with `f = k` and cover [0, 1).
- **1-bit values** are signs: code 0 means -1, code 1 means +1, and zero
  quantizes to +1.
- **Binary weights** also carry the constant scale `1/sqrt(H+I)`. That scale is
  applied once, to the finished dot product, as a 16-fraction-bit
  multiplier (`SCALE_F`). Multi-bit weights get no extra scale.
- **Gate activations** inside the cell are 8 bits (`CQ`): sigmoid is u0.8,
  tanh is s0.7.
- **Output-layer weights** are 8 bits, s0.7.

These formats are fixed in `finnl_pkg`. The following are this design's own
choices and are easy to change there:

- Biases are 16-bit (`BIAS_W`), in accumulator units.
- The cell state is 16-bit with 8 fraction bits and saturates (`CELL_W`, `CELL_F`).
- The activation tables take a 9-bit index with 5 fraction bits. They cover
  [-8, 8) and saturate outside it.
- The output-layer accumulator is 24 bits (`OACC_W`).
- Rounding is half up everywhere.
- The blank symbol is index 0 (`BLANK`).

## The LSTM processing element (`lstm_pe`)

A PE owns the cells `h = j·PE + p` for `j = 0 … H/PE-1`, in both directions.
It has four gate units: cell input, input gate, forget gate and output gate.
Each gate has its own weight array with a left-to-right half and a
right-to-left half, and each half holds H/PE cells × FS rows. One row holds
SIMD_I pixel weights followed by SIMD_R recurrent weights.

Each cycle the controller issues one (direction, cell, fold). Every gate
multiplies its row with SIMD_I pixels and SIMD_R recurrent values and adds the
result to its accumulator. A dot product therefore takes `FS = I/SIMD_I =
H/SIMD_R` cycles. The bias enters on the first fold.

After the last fold, the PE computes:

```
g = tanh(a_c)   i = σ(a_i)   f = σ(a_f)   o = σ(a_o)
c = f·c_prev + i·g           y = o·tanh(c)
```

`y` is quantized twice: once to AQ bits for the output layer and once to RQ
bits for the recurrence. There are no peephole connections. The result
appears exactly **5 cycles** after the last fold was issued. The PE never
stalls; its controller is responsible for not reissuing a cell before it has
retired.

The sigmoid and tanh are ROM tables (`act_lut`) that are computed when the
design is elaborated. No table file is needed.

## Interleaving the two directions (`bilstm_hidden_layer`)

This is the core of the design. One PE array serves both directions. The
recurrence means a direction cannot start step t+1 until step t is finished,
so the two independent directions take turns:

```
L2R col 0, R2L col C-1, L2R col 1, R2L col C-2, …, L2R col C-1, R2L col 0
```

While one direction waits for its cells to retire, the other keeps the
pipeline busy.

A **direction-step** takes one cycle to read its column from the input buffer
and H/PE × FS issue cycles. A column (both directions) therefore costs:

    T_col = 2 · (H/PE · FS + 1) cycles

With the defaults that is 258 cycles per column, or 188 856 cycles for a
732-column image.

The recurrent values `y_{t-1}` of each direction are kept as RQ-bit codes in a
ping-pong buffer: step t reads one bank and writes the other. On the first
step of each direction, the recurrent input and the cell state are zero. The
PE results are gathered into one H × AQ vector per direction-step, tagged with
the direction and column, and queued (QDEPTH entries) for the output layer.

The controller has two stall conditions. A direction-step may start only when
both hold:

- **Dependency**: every cell of that direction's previous step has retired.
  This matters only when a direction-step is shorter than the PE pipeline,
  for example with PE = H.
- **Credit**: a queue slot has been reserved for its output vector. This
  matters when the output layer is slower than the hidden layer, because the
  layer cannot hold a result back once it has been issued.

`stall_dep` and `stall_credit` show each cycle lost to either one. With the
default QDEPTH = 2, a step cannot obtain a slot before its predecessor's
vector is complete, so the credit rule already implies the dependency rule.
A deeper queue lets the dependency stall show itself.

## Output side

**`output_layer`** is the fully connected layer. The training-time batch
normalization is folded into its weights and bias.

- Each unit k sees 2H inputs: H from the left-to-right output and H from the
  right-to-left output of the same column.
- Those two halves arrive far apart in time, so the layer computes each half
  separately as a partial sum. The bias is added to the left-to-right half.
- It computes one unit per cycle, taking all H products of that unit at once.
  That is K = 82 cycles per vector, within the 129 cycles the hidden layer
  needs per vector at the defaults.
- There is no softmax. It would not change the arg-max.

**`concatenator`** brings the two halves of each column together:

- It keeps one slot of K partial sums per column, with a "seen" bit.
- The first half to arrive is stored. When the second half arrives, the
  concatenator outputs the full sums.
- With the interleaved order, the first complete column is the middle one,
  C/2. From there, columns complete two at a time, moving outwards.

**`max_per_column`** streams the K sums of a column and gives the index of the
largest one. Ties go to the lower index.

**`final_labeling`** stores the column symbols at their column address.
Columns arrive middle-first, so they must be re-ordered. It then walks the
columns left to right and applies greedy CTC decoding: it emits a symbol when
that symbol is not blank and differs from the previous column's symbol.

## Loading weights (`array_config`)

Weights and biases live in plain arrays inside the blocks. One stream of
32-bit words loads them all before inference. On an FPGA this lets the arrays
sit in memories that cannot be initialised with the bitstream.

Each row is sent as ceil(bits/32) words, least significant word first.
`cfg_target` and `cfg_row` are sampled with the last word of the row.

| target | rows | row contents |
|---|---|---|
| 0 hidden weights | `(pe·4 + gate)·WDEPTH + (dir·H/PE + j)·FS + fold` | SIMD_I pixel weights then SIMD_R recurrent weights, WQ bits each, lane 0 lowest |
| 1 hidden biases | `(pe·4 + gate)·2H/PE + dir·H/PE + j` | 16-bit bias |
| 2 output weights | `2k + dir` | H weights of 8 bits, h = 0 lowest |
| 3 output biases | `k` | 16-bit bias |

`WDEPTH = 2·H/PE·FS`. The gates are numbered 0 cell input, 1 input,
2 forget, 3 output. Cell `h` of PE `p` at slot `j` is `h = j·PE + p`.

## Throughput at the default sizes

One column costs 258 cycles. Counting operations as the reference design does
gives `[2·4·(H+I)+8]·H·2 + [2·2H+1]·K` operations per column. For the default
network that is 371 794 operations per column, or about 1441 operations per
cycle.

- At 266 MHz, one instance reaches about 383 GOP/s.
- At 100 MHz, it reaches about 144 GOP/s.
- A 520-column image needs about 134 k cycles: 1.34 ms at 100 MHz.

These numbers come from the cycle count of the RTL, not from a placed design.

## Parameters

All parameters of the top have defaults, which give the network described
above.

- **Precision.** `WQ`, `AQ`, `IQ` and `RQ` can each be set from 1 to 8 bits.
- **Parallelism.** `PE` must divide H. `SIMD_I` and `SIMD_R` must divide I
  and H with the same quotient FS.
- **Queue depth.** `QDEPTH` sets the depth of the hidden layer's output queue.
- **Sizes.** `I`, `H`, `K` and `CMAX` set the network dimensions.

## Departures from the reference design and open points

- **Flow control.** The stall rules, the output queue, the one-cycle column
  fetch and the 5-stage PE pipeline are this implementation's own. The
  reference design only states that interleaving keeps the pipeline busy.
  Consequently, at PE = 1 with full SIMD, a column takes 258 cycles here.
- **Arithmetic.** The internal widths and rounding (bias, cell state,
  activation-table resolution, binary-weight scale) are chosen here. The
  reference design fixes only the quantizers. A network trained elsewhere
  must have its biases and formats converted to these units.
- **Decoder.** The greedy CTC collapse (drop blanks and repeats) is an
  assumption. The reference only calls the last block a final labeling step
  after a per-column maximum.
- **Buffering.** The concatenator and the label store are sized for CMAX
  columns, as plain arrays. No attempt is made to share memories.
- **Host side.** Host software and DRAM transfers (reading images, starting
  each image, scoring) are outside this RTL.

## Verification

Each block has a self-checking testbench in `tb/`. The testbenches compare
against `finnl_ref_pkg`, an independent integer model of the whole network:
activation tables, cell update, both directions, output layer, arg-max and
decoding. Each testbench ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `act_lut_tb` | both tables, every index, against real-valued sigmoid/tanh |
| `lstm_pe_tb` | one PE with multi-bit weights (2/3/4, RQ = 1), random cells of both directions, the exact 5-cycle latency |
| `bilstm_hidden_layer_tb` | PE = 4, FS = 2, random back-pressure: every vector, the step order, both stalls, and the cycle count against `T_col` |
| `output_layer_tb`, `concatenator_tb`, `max_per_column_tb`, `final_labeling_tb`, `input_buffer_tb`, `array_config_tb` | the block's function and its latency |
| `finnl_bilstm_top_tb` | the whole chain at a reduced size (I = H = 4, K = 6, PE = 4, QDEPTH = 3) over three images. It loads the weights through the config stream, checks every internal stream and the labels, and fails if either stall type or label emission never happened. |
| `finnl_bilstm_full_tb` | the top at its default parameters, one 732-column image, bit-exact against the model, and the hidden-layer time within 10 cycles of 188 856 |

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/finnl_pkg.sv tb/finnl_ref_pkg.sv tb/finnl_bilstm_top_tb.sv \
    --top-module finnl_bilstm_top_tb
./obj_dir/Vfinnl_bilstm_top_tb
```

The full-size test takes about ten seconds.

Two points are not covered by these tests:

- Agreement with a network trained in a real framework. The tests use random
  weights.
- Timing closure on any device.
