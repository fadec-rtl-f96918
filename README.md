# FADEC accelerator RTL: programmable-logic half of a HW/SW depth estimator

DeepVideoMVS estimates a depth map for each frame of a video from that frame,
a few earlier frames and their camera poses. It mixes two kinds of work:

- a 96-layer CNN (feature extraction, feature shrinking, cost-volume encoder,
  a ConvLSTM cell and a cost-volume decoder);
- classic image and geometry operations between those layers, such as warping
  earlier feature maps into the current view (grid sampling), cost-volume
  fusion, layer normalisation, bilinear upsampling and hidden-state correction.

The FADEC approach splits the job along that line on a Zynq-class SoC FPGA:

- The regular, multiply-heavy CNN layers run on the FPGA fabric as quantised
  integer pipelines.
- The irregular, memory-bound operations stay on the CPU.
- The two sides exchange tensors through shared DRAM and hand control back and
  forth with a small opcode/flag protocol. That lets CPU work for one part of a
  frame overlap accelerator work for another.

This repository holds SystemVerilog for the fabric side:

- the arithmetic pipelines;
- the on-chip memories that feed them;
- the DMA engine to DRAM;
- the controller that runs the layer sequence;
- the register block that does the CPU hand-off.

Everything runs at one clock. The reference implementation ran at 187.5 MHz on
a ZCU104 board (XCZU7EV). It reached 0.278 s per 96×64 frame, against 16.7 s for
the CPU alone.

## 1. Number format and the requantisation step

All arithmetic is integer, using post-training quantisation with one
power-of-two multiplier per tensor:

| quantity | width |
|---|---|
| weights | 8-bit signed |
| biases | 32-bit signed |
| per-tensor scale | 8-bit signed |
| activations | 16-bit signed |

Every layer ends in the same requantisation step:

```
m1 = Σ W·x + b          (40-bit accumulator)
m2 = m1 · s             (48 bits)
y  = clip16( (m2 + 2^(r-1)) >>> r )        r = sh0, 0..31
```

`rshift` rounds half up: it adds half an LSB before the arithmetic shift.
`clip` saturates to the 16-bit range. Both live in `rshift_clip`, which every
unit instantiates.

All scale factors are powers of two. So two tensors that must be added or
concatenated are brought to the same range by at most one left shift, and no
division is ever needed. The element-wise unit therefore offers separate left
shifts `la`/`lb` for its two operands.

### Sigmoid and ELU look-up tables

Both activations are table look-ups on a grid of 1/16 over [−8, 8], which is
256 points.

- **Sigmoid** (`sigmoid_lut`):
  - The input is first right-shifted, with rounding, by `sh1`, so that it has
    four fractional bits.
  - Only the non-negative half is stored: 128 entries,
    `round(16384/(1+exp(−k/16)))`.
  - Negative inputs use `1 − sigmoid(|x|)`.
  - The output is Q1.14 (16384 = 1.0).
- **ELU** (`elu_lut`):
  - The positive side is the identity.
  - For the negative side, the input (with `sh3` fractional bits) is floored
    onto the grid.
  - It indexes 128 entries, `round(16384·(exp(−8+k/16)−1))`.
  - The result is shifted back, with rounding, to the input's format.
- Inputs outside the table return the nearest end entry.
- The table files `rtl/sigmoid_lut.hex` and `rtl/elu_lut.hex` hold 128 hex words
  each, generated from those formulas. They are read with `$readmemh` by a path
  relative to the repository root.

## 2. Datapath blocks

| module | what it computes | rate |
|---|---|---|
| `conv_unit` ×5 | convolution + bias + scale + rshift/clip + ReLU or sigmoid, one instance per (kernel, stride) ∈ {(1,1),(3,1),(3,2),(5,1),(5,2)} | 2 input × 4 output channels per cycle (2 × 2 for 5×5) |
| `eltwise_unit` | `clip(rshift((a<<la)+(b<<lb), r))` (skip connections) or `clip(rshift(a, r))` (range alignment before concatenation) | 4 channels/cycle |
| `upsample_unit` | nearest-neighbour ×2 | 4 channels/cycle |
| `copy_unit` | copy of channel groups between tensors (concatenation and slicing) | 4 channels/cycle |
| `lstm_cell_unit` | `c' = clip(rshift(rsh(σ(f))·c + rsh(σ(i))·ELU(g), r))` | 4 channels / 2 cycles |
| `lstm_hidden_unit` | `h = clip(rshift(σ(o)·ELU(c'), r))` | 4 channels/cycle |

Each pipeline folds a chain of element-wise operators into one pass over the
data, so no intermediate tensor is written back. One example is
rshift → sigmoid → rshift → multiply → add → rshift → clip in the cell unit.

The ConvLSTM gates come out of an ordinary `conv_unit` stage. Their layer
normalisation runs on the CPU before the cell stage. The candidate gate uses ELU
where a textbook ConvLSTM uses tanh; that is how the network is defined.

### Convolution unit in detail

The convolution unit is the block that matters for throughput. Its work is
split as follows:

- For each output pixel it works through the output channels in *chunks* of
  `OC_PAR` channels.
- Per chunk it:
  1. reads `OC_PAR/2` bias words (two 32-bit biases per word);
  2. streams `K·K·Cin/2` (activation word, weight word) pairs, one pair per
     cycle;
  3. drains for one cycle;
  4. writes its lanes of the output word with a lane-masked write.
- A chunk takes `OC_PAR/2 + K·K·Cin/2 + 2` cycles. The testbench checks this
  count exactly.
- The 64-bit weight word carries `W[o][i]` for `o < OC_PAR` and `i < 2` in byte
  `o·2 + i`.
- Padding is zero "same" padding of `(K−1)/2` pixels.
- Stride 2 reads every second input pixel and produces ⌈H/2⌉×⌈W/2⌉ outputs.

A stage may compute only a slice of the output channels (`oc_first`, `oc_num`).
That is how a layer whose weights do not fit the parameter memory is run: one
slice per stage, with a parameter DMA load before each slice.

## 3. Memories and data layout

| memory | size (default) | organisation |
|---|---|---|
| data memory (`bram_2r1w`) | 65 536 × 64 bit (512 KiB) | activations, 2 read ports + 1 write port with 16-bit lane enables |
| parameter memory (`bram_2r1w`) | 16 384 × 64 bit (128 KiB) | biases and weights of the current layer or slice |
| stage list (inside `stage_sequencer`) | 512 × 256 bit | the layer program |

Layout rules:

- Activations are stored HWC.
- Four channels make one 64-bit word, called a channel group.
- Pixel (y, x), group g of a tensor with G groups at base B is at word
  `B + (y·W + x)·G + g`.
- Channel counts are padded to multiples of four.
- For a conv stage, the parameter block at `paddr` holds first the biases of
  all `oc_num·4` channels of the stage, then the weight words chunk by chunk.
- All memory reads have one cycle of latency.

## 4. Stage descriptors

The accelerator is programmed by a list of 256-bit descriptors
(`fadec_pkg::stage_t`), each describing one *stage*. Fields unused by an opcode
are ignored.

| op | name | fields used |
|---|---|---|
| 0 | END | — (raises STATUS.done) |
| 1 | CONV | conv_sel, act, h, w, cin_g, cout_g, oc_first, oc_num, src0, dst, paddr, scale, sh0, sh1 |
| 2 | ADD | h, w, cin_g, src0 (a), src1 (b), dst, la, lb, sh0 |
| 3 | RSHIFT | h, w, cin_g, src0, dst, sh0 |
| 4 | UPSAMPLE | h, w, cin_g, src0, dst |
| 5 | COPY | h, w, cin_g, cout_g, soff, oc_first, oc_num, src0, dst |
| 6 | LSTM_CELL | h, w, cin_g, src0 (gates i, f, g back to back, n = h·w·cin_g words each), src1 (old c), dst, sh0, sh1, sh2, sh3 |
| 7 | LSTM_HIDDEN | h, w, cin_g, src0 (gate o), src1 (c'), dst, sh0, sh1, sh3 |
| 8 | EXTERN | ext_op |
| 9 | DMA_LOAD | dram_addr (bytes, 8-aligned), len (words), dst (word address), dma_param (1 = parameter memory) |
| 10 | DMA_STORE | dram_addr, len, src0 |

Bit positions, from bit 0 upward:

| field | bits | field | bits |
|---|---|---|---|
| op | 3:0 | soff | 138:129 |
| conv_sel | 6:4 | sh0 | 143:139 |
| act | 8:7 | sh1 | 148:144 |
| src0 | 24:9 | sh2 | 153:149 |
| src1 | 40:25 | sh3 | 158:154 |
| dst | 56:41 | la | 163:159 |
| paddr | 72:57 | lb | 168:164 |
| h | 80:73 | scale | 176:169 |
| w | 88:81 | dram_addr | 208:177 |
| cin_g | 98:89 | len | 228:209 |
| cout_g | 108:99 | dma_param | 229 |
| oc_first | 118:109 | ext_op | 237:230 |
| oc_num | 128:119 | spare | 255:238 |

Heights and widths are 8-bit, so up to 255 pixels. Channel-group fields are
10-bit, so up to 1023 groups or 4092 channels. That covers the ConvLSTM gate
convolution, which reads 1024 channels and writes 2048.

Field encodings:

- `conv_sel`: 0..4 select (1,1), (3,1), (3,2), (5,1), (5,2).
- `act`: 0 none, 1 ReLU, 2 sigmoid.

Building one layer from stages:

- **Concatenation** of two or three tensors is an optional RSHIFT per input to
  align ranges, then one COPY per input into adjacent channel groups of the
  destination.
- **Slicing**, for example splitting the four LSTM gates, is a COPY with `soff`.

## 5. Control: the stage sequencer

`stage_sequencer` holds the descriptor RAM. After the CPU writes CTRL.start it
steps through the list:

1. fetch the entry;
2. latch it as the current configuration, which every unit reads;
3. pulse the selected unit's `start`;
4. wait for that unit's `done`.

Only one stage is active at a time. `fadec_top` switches the memory ports to the
active unit. An assertion checks that no two units are ever busy together.

The control overhead is three cycles per stage (fetch, latch, dispatch) on top
of the unit's own time. Measured from one dispatch to the next, a convolution
stage takes exactly its cycle formula plus 4.

## 6. Hand-off to the CPU (extern stages)

Data moves through DRAM: a DMA_STORE stage writes the tensor the CPU needs, and
after the CPU process a DMA_LOAD stage brings the result back. The control
hand-off in between uses `extern_regs`:

1. The accelerator reaches an EXTERN stage. It writes `ext_op` into OPCODE and
   sets *pending*. `irq` follows pending.
2. The CPU polls OPCODE (or takes the interrupt) and reads the input tensor from
   DRAM. It runs the process the opcode names, such as grid sampling or layer
   normalisation, writes the result to DRAM and writes 1 to ENDFLAG.
3. The sequencer sees the end flag. It acknowledges, which clears both pending
   and the flag, and continues with the next stage.

Writes to ENDFLAG while nothing is pending are ignored, so a stale flag cannot
release a later extern stage.

The CPU is free between hand-offs. It can run work for the next part of the
frame, for example preparing the cost-volume fusion during feature extraction,
while the fabric computes.

Register map (AXI4-Lite, 32-bit):

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0: start the stage list at entry 0 |
| 0x04 | STATUS | R | bit 0 busy, bit 1 done (sticky until the next start), bit 2 pending |
| 0x08 | OPCODE | R | [7:0] requested CPU process, bit 31 pending |
| 0x0C | ENDFLAG | RW | CPU writes bit 0 = 1 when its process is finished |
| 0x10 | DESC_IDX | RW | entry index for the next descriptor write |
| 0x14 | DESC_PUSH | W | copy DESC_DATA0..7 to entry DESC_IDX, then increment DESC_IDX |
| 0x20–0x3C | DESC_DATA0..7 | RW | 256-bit staging register, DATA0 = bits 31:0 |

Each write needs AW and W valid in the same cycle.

## 7. DMA controller

`dma_controller` is an AXI4 master with 64-bit data.

- Bursts are INCR, at most 16 beats, and are split so that none crosses a 4 KiB
  page.
- One burst is in flight at a time.
- Load beats go straight into the target memory, one beat per cycle when DRAM
  streams.
- Store beats take three cycles each.
- Response codes are not checked.

## 8. Departures from the reference design

These parts follow the paper:

- the operator set and the pipelines of each stage kind;
- the five convolution (kernel, stride) variants with folded activations;
- the skip-connection and ConvLSTM arithmetic chains;
- the bit widths and the rounding rshift/clip;
- the LUT sizes and ranges, and the halved sigmoid table;
- the convolution parallelism (2×4, or 2×2 for 5×5 kernels) and 4-way channel
  parallelism elsewhere;
- the extern opcode / end-flag protocol;
- the split of work between fabric and CPU.

These are this design's own:

- **Controller.** The reference generates a hard-wired state machine for one
  trained network. Here a fixed sequencer runs a descriptor list that the CPU
  loads, so the RTL does not depend on a particular model.
- **Memory sizes, data layout, descriptor format, register map and DMA burst
  scheme.** The reference leaves these to its HLS tool and does not report
  them. The 512 KiB + 128 KiB of on-chip RAM is in line with the nearly full
  BRAM use it reports (309 of 312 BRAM36).
- **Concatenation.** It is built from per-input COPY stages at 4-channel
  granularity instead of dedicated 2- and 3-input concatenation operators.
- **Upsampling.** The factor is fixed at ×2, nearest neighbour.
- **ELU table.** It stores only the negative half, because the positive side is
  the identity. Sigmoid output is Q1.14.
- **Depthwise convolution.** It is not a separate operator. The feature
  extractor's depthwise layers would have to run as dense convolutions with
  zero weights.
- **DMA.** Data transfer to and from the CPU is done by explicit DMA stages
  around each extern stage.
- **Timing.** Achieved clock frequency and resource use have not been measured
  for this RTL.

## 9. Sizing against the network

- **Activations.** At the 96×64 input size the largest activation tensors are at
  half resolution (48×32 = 1536 pixels). A 64-channel tensor there, such as the
  cost volume, takes 16 × 1536 = 24 576 words, so a few of them fit in the data
  memory together with the skip-connection tensors that are still live.
- **Weights.** A layer's weights are loaded per output-channel slice.
  - A 3×3 layer with 512 input channels needs 2 306 words per 4-channel chunk,
    counting biases.
  - Up to 7 chunks fit the parameter memory at once.
- **Simulated fragment.** The fragment in `tb_fadec_frame` at 96×64 fills
  words 0–65 023 of the data memory, more than 99 %, when no buffer is
  reused. That is why a full
  network run has to reuse buffers as soon as their last reader has finished.
- **ConvLSTM gate convolution.** This is the largest layer. It needs 171
  slices and 342 stages, and `tb_fadec_convlstm` runs it in full.
- **Stage list.** A whole frame needs more stages than the 512-entry list holds.
  The host therefore runs a frame as several lists: it waits for STATUS.done,
  loads the next list and starts again. The data memory keeps its contents
  between lists.

## 10. Verification and simulation

Every block has a self-checking testbench in `tb/`:

- Each compares against a golden model in `tb/tb_ref_pkg.sv`, written
  independently with real-valued `exp` for the tables. Each checks cycle counts
  where a rate is defined.
- Each prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.
- `tb/axi_mem_model.sv` is a behavioural DRAM with random stalls and a check of
  the AXI handshake rules.

`tb_fadec_top` runs the whole accelerator at its default sizes:

- It runs a 19-stage program: DMA loads of input and parameters, all five
  convolution variants with ReLU, sigmoid and no activation, ADD with lshift,
  RSHIFT, UPSAMPLE, a two-input concatenation, an extern round trip through a
  CPU stand-in, the two ConvLSTM stages and DMA stores.
- It compares the whole data memory and the DRAM result areas with the golden
  model.
- It counts a failure for any mechanism that never occurred: each opcode, the
  extern hand-off, AXI stalls, page-split bursts and lane-masked writes.

`tb_fadec_frame` runs a front end in the style of the feature extractor on a
full 96×64 frame at default sizes:

- The layers are conv 3×3/2 (32 ch, ReLU), conv 1×1 (16 ch), conv 3×3
  (16 ch, ReLU), conv 5×5/2 (16 ch), ×2 upsampling, a skip-connection add and
  a three-input concatenation into 48 channels.
- Each layer's parameters are streamed in by a DMA stage just before it.
- It checks every tensor against the golden model.
- It checks that each convolution stage takes exactly the unit's cycle formula
  plus the same fixed stage overhead, which is 4 cycles.
- The fragment takes 1.55 M cycles, about 8.3 ms at 187.5 MHz. The two 3×3 and
  5×5 layers on 16 channels account for 70 % of that.

`tb_fadec_convlstm` runs the ConvLSTM step at the network's size for a 96×64
frame, with the stage list built by the testbench:

- The cell works on a 3×2 grid, with a 512-channel input and a 512-channel
  hidden state.
- x and h are concatenated.
- The 3×3 gate convolution goes from 1024 to 2048 channels. It runs as 171
  output slices, each with its own 13 830-word parameter load, which streams
  2.36 M words in all.
- Four slices separate the gates, then come the cell and hidden stages and the
  stores. That is 356 stages in all.
- The gates' layer normalisation is left out (identity).
- The whole step takes 17.9 M cycles, about 96 ms at 187.5 MHz. 14.2 M of those
  are the convolution itself, and most of the rest is parameter streaming.
- Every tensor is bit-exact with the golden model.

Run any testbench with plain Verilator 5 from the repository root. The root matters because
of the table paths.

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_fadec_top \
  rtl/fadec_pkg.sv tb/tb_ref_pkg.sv \
  $(ls rtl/*.sv | grep -v fadec_pkg) $(ls tb/*.sv | grep -v tb_ref_pkg)
./obj_dir/Vtb_fadec_top
```

Replace the top module name to run any other testbench, for example
`tb_conv_unit`. The simulator is two-state. Add `+verilator+rand+reset+2` to
start every uninitialised register at a random value.

To change the design:

- Memory sizes are `fadec_top` parameters.
- The convolution parallelism is the `conv_unit` parameters `IC_PAR`/`OC_PAR`.
  The weight-word packing assumes `IC_PAR·OC_PAR ≤ 8`.
- New stage kinds need an opcode in `fadec_pkg::op_e`, a dispatch line in
  `stage_sequencer` and a port-mux entry in `fadec_top`.
