# RNNAccel — a small fused LSTM / GRU / fully-connected accelerator

Recurrent networks on edge devices are small: tens of thousands of weights, run once per
audio or sensor frame. Their cost is in matrix-vector products whose input includes the
previous hidden state. That dependency stops one time step from overlapping the next, so the
MAC array must be kept busy within a step. Their energy goes mostly on fetching weights.
This accelerator takes those problems on with four ideas:

* a modest **array of 32 multiply-accumulate units** (16-bit activation × 8-bit weight). Each
  unit owns one output row, so a matrix-vector product streams one input element per cycle.
  Pairs of units combine into 16 × 16 MACs when 8-bit weights are not precise enough;
* **weights streamed at a fixed compression ratio** (6, 4 or 2 bits per weight, i.e. 5.3×, 8×
  or 16× against 32-bit floats). A simple table decoder sits next to the array, so the
  weights never need to be stored on chip;
* one **pipelined activation unit** for tanh, sigmoid, softsign and relu. It is piecewise
  linear, stores only the positive half of the odd functions, and computes sigmoid from the
  tanh table;
* a **banked local memory** (12 KB) for inputs, hidden state, LSTM cell state and results.
  A sequencer works out the gate equations of GRU and LSTM cells from passes of the array.

The architecture (six units, their connections, the array size and arithmetic widths, the
compression rates, the activation functions and the memory size) follows the RNNAccel paper
(Kao et al., Neuchips / National Tsing Hua University). The paper describes these units by
function only. The register map, the weight-stream layout, the tiling and pass schedule, the
codebook decoder, the fixed-point format and all timing are this implementation's own;
each file's header says which is which.

## Block diagram

```
                 +------------------------- top_ctrl ---------------------------+
  host MMIO <--> |  registers, codebook/local-memory window, layer sequencer,   |
  irq  <-------- |  drain buffer, gate buffer, GRU/LSTM combine stage           |
                 +----+-------------------+--------------+----------------+-----+
                      | pass descriptors  | codebook     | results        | act in/out
                      v                   v              ^                v
  weight port   +------------+  beats  +------------+   |          +----------+
  (system  <--> | mem_access | ------> | decompress |   |          | act_unit |
   memory)      |   _ctrl    | <------ |    or      |   |          +----------+
                +------------+  ready  +------------+   |                |
                  |  ^   x, raw weights      | weights  |                v
                  |  |                       v          |        local memory writes
                  |  |   +------------------------------+--+
                  |  +---|           mac_array (32 MACs)   |
                  |      +---------------------------------+
                  v reads
                +------------------------------+
                | local_mem_pool (6 x 1024 x 16)| <--- writes from top_ctrl
                +------------------------------+
```

`rnn_accel` is the top and only wires the units together.

## Number format

All activations, hidden and cell state, biases and results are signed 16-bit **Q3.12**
(range ±8, resolution 2⁻¹²). Weights are 8-bit or 16-bit two's-complement integers. Their
scale is set per layer by the `shift` field. The array adds `bias << shift` to each row sum,
rounds (half up), shifts right by `shift` and saturates to 16 bits. So `shift` is simply the
number of fraction bits of the weights: 8 in the tests for 8-bit weights in [−0.5, 0.5), 16
for 16-bit weights. Elementwise products in the gate arithmetic are `(a*b) >>> 12` (floor),
saturated to 16 bits.

## The MAC array and 16-bit weights (`mac_unit`, `mac_array`)

Each cycle the array receives one input element `x` (broadcast) and a 256-bit weight vector.
In 8-bit mode lane *i* holds the weight of row *i*, and all 32 rows progress together. In
16-bit mode (`w16`) row *j*'s weight sits in lanes 2*j* and 2*j*+1. Cell 2*j* multiplies by
the **unsigned** low byte and cell 2*j*+1 by the **signed** high byte. The row sum is
`(acc[2j+1] << 8) + acc[2j]`, which equals the full 16 × 16 product sum exactly. Only 16 rows
are produced per pass.

Each cell is two pipeline stages (product register, accumulator). `first` restarts the sum
and `last` latches it. The output stage adds bias and rounds. `out_valid` comes 3 cycles
after the last element, and passes may follow back to back.

## Weight stream and compression (`mem_access_ctrl`, `decompressor`)

Weights are not kept on chip. Each layer's weights lie in system memory as one stream of
256-bit beats starting at `WTBASE`, and the accelerator reads it strictly in order. The
order is by tile, then by pass (see the next section). For each pass:

1. **Bias beats**: the biases of the tile's rows as raw 16-bit words, lane *l* in bits
   `16l+15:16l`. That is 2 beats for 32 rows, 1 beat for 16.
2. **Weights**, one vector per input element in the order the pass reads its input:
   * uncompressed: one beat per element, lane *l* = row `tile*L+l` (8 or 16 bits per lane);
   * compressed: one *k*-bit codebook index per weight (*k* = 6, 4, 2), packed least
     significant bit first, element after element, lanes within an element. The pass is
     padded to a whole beat, so the next pass starts on a beat boundary.

Rows past the end of the layer in the last tile must still be present (any value; they are
ignored). The number of beats of a pass is `nbias + len` uncompressed, and
`nbias + ceil(len·k·L / 256)` compressed.

Since all passes of a layer lie back to back, fetching is not tied to passes. At the start
of a layer the sequencer works out the layer's total beat count from the sizes, the
weight width and the ratio. `mem_access_ctrl` then requests exactly that many beats in
order, keeping up to 8 requested or buffered, and so runs ahead into the next pass while
the current one streams. When a pass starts, its bias beats and first weights are usually
already waiting, and the weight port's latency is paid once per layer rather than once per
pass. For each pass the controller takes its bias beats, then hands weight beats either
straight to the array or to the decompressor. It reads the input vector from local memory
ahead of use, starting during the bias beats. It issues an (element, weight vector) pair
whenever both are present, so a slow weight port only stalls the array.

`decompressor` keeps a 512-bit buffer. It takes a beat whenever the buffer holds at most 256
bits and offers a vector whenever it holds the bits of one (192, 128 or 64 bits for 32
lanes). Each index selects a 16-bit entry of a 64-entry codebook: its low byte in 8-bit mode,
all 16 bits in 16-bit mode. At the end of each pass the leftover padding is flushed. At 8×,
one beat serves two vectors, so the array runs at full rate while the weight port is half
busy.

The codebook is written by the host before the layer. A layer uses one codebook and one
ratio. The decoder form, a table of shared weight values, is this design's reading of
"fixed ratio, simple on-line decompression". How the indices and codebook are chosen
offline is left to software.

## Layer sequencing (`top_ctrl`) — the core of the design

One `CTRL.start` runs one FC layer, or **one time step** of a GRU or LSTM layer. The host
runs time steps by swapping the `h` and `h'` addresses, and chains layers by pointing one
layer's input at the previous layer's output.

A layer is cut into **tiles** of L output rows (L = 32, or 16 with 16-bit weights). For each
tile the sequencer issues **passes**, matrix-vector products over an input vector made of
one or two local-memory segments:

| layer | pass 0 | pass 1 | pass 2 | pass 3 | per-row combine |
|---|---|---|---|---|---|
| FC   | act(W·x + b), act from `MODE` | | | | none, result written directly |
| GRU  | z = σ(W_z·[x;h] + b_z) | r = σ(W_r·[x;h] + b_r) | a = W_n·x + b_n | u = U_n·h + b_u | n = tanh(a + r·u); h' = n + z·(h − n) |
| LSTM | i = σ(W_i·[x;h] + b_i) | f = σ(W_f·[x;h] + b_f) | g = tanh(W_g·[x;h] + b_g) | o = σ(W_o·[x;h] + b_o) | c' = f·c + i·g; h' = o·tanh(c') |

The GRU's candidate needs the input and recurrent parts separately, because the reset gate
multiplies only the recurrent part. This is the cuDNN/PyTorch form of the GRU. Its two parts
are passes 2 and 3, with no activation.

Three activities overlap, and keeping the MAC array busy while they run is what the
sequencer is for:

* **MAC passes.** A pass is issued in the cycle the previous pass's results leave the
  array's output register.
  The passes of all tiles follow each other with only a few cycles between them, because
  the weights are already fetched (previous section).
* **Drain.** When a pass ends, its 32 results are copied into a drain buffer and sent one
  per cycle through the activation unit. FC results go to local memory at `HOADDR + row`;
  GRU/LSTM gate results go to a 4 × L gate buffer. The drain runs while the *next* pass
  accumulates. If the next pass finishes first (a layer with few inputs), its results wait
  in the array's output register until the drain buffer is free. The GRU's two raw sums
  (passes 2 and 3) need no activation. They skip the drain and are copied into the gate
  buffer in a single cycle, so the short `W_n·x` pass never waits.
* **Combine.** When a tile's gates are all in the gate buffer, the combine stage works
  through the tile one row per cycle. It forms the activation argument, sends it through
  the shared activation unit, then forms h' (and c') at the output. It writes h' to
  `HOADDR + row`, and for LSTM c' back to `CADDR + row` in the same cycle. Meanwhile the
  next tile's passes already run. Only the capture of the next tile's first result waits
  for the combine to free the gate buffer, and a pass takes far longer than the ~36-cycle
  combine for any realistic size. The drain and the combine never use the activation unit
  in the same cycle: the combine starts only when no drain is in progress, and no new result
  is captured while it runs.

Where the combine's operands come from:

* **GRU:** h for the tile's rows is not read from memory. It is taken from the input stream
  of pass 3 (`U_n·h` streams all of h, and rows `tile·L … tile·L+L−1` are picked out as they
  go by).
* **LSTM:** c is read from local memory at `CADDR + row`. That read shares the memory with
  the MAC array's reads of x and h, and c' is written in the same cycle as h'. **c must
  therefore lie in a bank of its own, apart from x, h and h'.** (A bank is 1,024 words:
  `addr[12:10]`.)

Because h' goes to a separate address, every tile of the step reads the old h.

## Activation unit (`act_unit`)

Three pipeline stages, one result per cycle, with a tag carried alongside:

1. take |x| (saturated to 32767) and split it into a 9-bit table index and a 7-bit
   interpolation fraction. For tanh/softsign the table step is 1/64; for sigmoid the same
   table is indexed at |x|/2 by moving the split one bit;
2. read the two segment end points from a 513-entry Q1.16 table (tanh or x/(1+x) on
   [0, 8]). The tables are computed at elaboration from `$tanh`, so no data file is needed;
3. interpolate, restore the sign, apply sigmoid = ½ + ½·tanh(x/2), round to Q3.12.
   relu and identity bypass the table.

The measured worst-case error against the exact functions over all 65 536 inputs is 1.5e-4
(sigmoid), 1.6e-4 (tanh) and 1.9e-4 (softsign). Each is within the 2e-4 target, and most of
it is the final rounding to 12 fraction bits.

## Local memory (`local_mem_pool`, `sram_bank`)

Six banks of 1024 × 16-bit words, 12 KB. The bank is `addr[12:10]`. Each bank is a simple
dual-port array (one read, one write per cycle, read data one cycle later, read-old-data on
a same-address collision). It would map to an SRAM macro in an ASIC flow. Two read ports and
two write ports reach all banks through a crossbar. The memory-access controller reads
through one port and the sequencer through the other. Two ports aimed at the same bank in
one cycle are a programming error, flagged by an assertion. In practice: put x, h, h' and c
in different banks.

## Host interface

Word-addressed MMIO, 32-bit data. A request is held until `mmio_gnt`, and read data comes
with `mmio_rvalid` one cycle after the grant. `irq` is high while `STATUS.done` is set.

| address | register | content |
|---|---|---|
| 0x0000 | CTRL | write bit 0 = 1: start the layer |
| 0x0001 | STATUS | bit 0 busy, bit 1 done (cleared by start) |
| 0x0002 | MODE | [1:0] layer type (0 FC, 1 GRU, 2 LSTM), [4:2] FC activation (0 none, 1 sigmoid, 2 tanh, 3 softsign, 4 relu), [6:5] compression (0 off, 1 6-bit, 2 4-bit, 3 2-bit), [7] 16-bit weights, [12:8] shift |
| 0x0003 | INSIZE | input length I (x) |
| 0x0004 | OUTSIZE | output rows (hidden size H for GRU/LSTM) |
| 0x0005–0x0008 | XADDR, HADDR, HOADDR, CADDR | local-memory word addresses of x, h, h' (or FC output), c |
| 0x0009 | WTBASE | byte address of the layer's weight stream |
| 0x000A | CYCLES | cycles of the last layer |
| 0x000B | MACS | cycles in which the array took an input element, last layer |
| 0x0040–0x007F | codebook | entry = address − 0x40 (write only) |
| 0x2000–0x37FF | local memory | word = address − 0x2000 (only while idle) |

Configuration writes are ignored while busy. The weight port is a plain read port: a request
(valid/ready, byte address, aligned to 32 bytes) is answered by one 256-bit beat, in order,
no earlier than the cycle after acceptance.

## Performance

Measured in simulation with a weight memory that refuses a quarter of requests at random
and answers after 2–5 cycles. The keyword-spotting network from the paper is used: a GRU of
154 units on 10 MFCC inputs, then FC 154 → 12, at 8× compression.

* GRU time step: 2,622 cycles, of which the array takes an input element in 2,460 (94%);
* FC layer: 211 cycles (73%; a single pass of 154 elements plus the drain);
* step + FC: 2,833 cycles, about 88,000 per second at 250 MHz.

The paper reports 90% utilisation and up to 91K inferences per second for this network. The
GRU utilisation matches. The remaining ~160 cycles per step are about 8 per pass: the
array's 3-cycle output pipeline and the result capture before the next pass may start,
then its two bias beats (the first inputs are read meanwhile) and the first issue. 2,460
itself is 5 tiles × (164 + 164 + 10 + 154) elements. The last tile holds only 26 of 32 rows, so counted in useful multiply-adds the
array is 82% busy. The paper does not say how it counts, or how many time steps make up one
inference.

A bidirectional LSTM of the size used for ECG atrial-fibrillation detection (about 40K
parameters) was run as well. Its sizes are this design's choice: 12 inputs per step, 64
units per direction, FC 128 → 2, 6 time steps, all at 8×. Each LSTM step takes 738
cycles, of which the array takes input in 608 (82%). The lower figure comes from the
short layer: two tiles per step, so the final drain and combine are a larger share. The
whole sequence, both directions plus FC, takes 9,039 cycles, about 27,700 sequences per
second at 250 MHz. The host runs the backward direction simply as a second LSTM layer,
stepping through the inputs in reverse. It places the two directions' h buffers side by
side so that the FC layer reads their last states as one 128-word vector.

## How far it can be trusted

Every unit has a self-checking testbench (`tb/tb_<unit>.sv`). The whole design has an
end-to-end one, and a second one that runs a complete bidirectional-LSTM workload:

* `tb_mac_array`: random passes in both weight modes against integer sums; 3-cycle latency.
* `tb_act_unit`: every 7th input code in every mode against real-valued functions, 2e-4
  bound, latency.
* `tb_decompressor`: all index widths × weight widths, random gaps and back-pressure,
  flushing, full-rate streaming.
* `tb_local_mem_pool`: fill and random dual-port traffic against a model.
* `tb_mem_access_ctrl`: pass descriptors against a stalling memory model. It checks inputs,
  weights, biases, the decompressor's beat order, the beat count per layer, and that the
  fetch never runs more than a FIFO's depth ahead.
* `tb_top_ctrl`: the sequencer with stand-in neighbours. It checks pass descriptors, the
  layer's beat count for FC/GRU/LSTM, and every written value.
* `tb_rnn_accel`: FC layers with every activation, width and ratio; LSTM and GRU steps with
  partial tiles, down to single-tile layers of one to three rows; the keyword-spotting GRU
  for three steps and its FC layer, with a check that the GRU keeps the array busy at least
  90% of the time. Everything runs at the default size, bit-exact against a reference model
  in the testbench. It also confirms that stalls, drain/pass overlap and results waiting
  for the drain all happened.
* `tb_afib_bilstm`: the bidirectional LSTM above, with each direction's weights kept for
  all its time steps, checked bit-exact after every step.

The reference model in `tb_rnn_accel` re-implements the same fixed-point rules (including
the piecewise-linear tables). It therefore shows the RTL does what is specified here. It
does not show that a trained network keeps its accuracy; accuracy depends on the offline
quantisation and codebook.

Not built, because the paper describes them only by name or they are outside the chip:

* the host processor and its drivers;
* an AMBA bus adapter. The weight port is a plain request/response port, and an AXI or AHB
  master would sit in front of it;
* the instruction set and "loadable" produced by the paper's compiler. Here the host
  programs each layer through registers instead;
* the offline compression software.

Other departures:

* The sequencer, not the memory-access controller, writes results to local memory, as the
  block diagram's activation-to-memory path suggests.
* One codebook serves all layers until rewritten.

## Simulating and changing it

All RTL is SystemVerilog-2017. `rtl/rnn_pkg.sv` holds the shared constants, types and
register map. For example, to build and run the end-to-end test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rnn_pkg.sv tb/tb_rnn_accel.sv --top-module tb_rnn_accel -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself. The block
testbenches build the same way with their own top module (add `-y tb` where the weight
memory model `tb/wt_mem_model.sv` is used).

Things that can be changed by parameter: the array size `N` (even, at least 16 so the bias
fits the beat layout), the bank count and depth of the local memory (`NBANK`, `BANK_DEPTH`;
the word address width `LM_AW` in the package must cover them), and the weight-FIFO depth.
The end-to-end test also passes at N = 16: set its `N` to 16 and pass it to the top as
`rnn_accel #(.N(N))`. A 16-MAC array then takes 5,143 cycles per keyword-spotting GRU
step.
The bus width is tied to 32 × 8-bit lanes; changing it means changing the stream layout
above.
