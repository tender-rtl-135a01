# Tender: an INT4/INT8 LLM accelerator with runtime requantization

Large language models are hard to quantize because a few activation
channels carry values far larger than the rest. With one scale factor for the
whole tensor, those outliers force a coarse step on every other channel. With
one scale per channel, every product in a dot product needs its own rescaling,
and integer matrix hardware cannot do that.

Tender sits between these two extremes. Offline calibration sorts the input
channels of an activation tensor into a few **groups** by their absolute
maximum. The group thresholds are `TMax/2, TMax/4, ...`, so the scale factor of
group `g+1` is exactly half that of group `g`. The matrix product is then done
group by group, largest scale first, on one systolic array. Between two groups
every accumulator is **shifted left by one bit**:

    A1 = P1,   A(i+1) = 2 * A(i) + P(i+1),   Y = A(G) * s_w * s_G

Here `P(i)` is the integer partial product of group `i`. The final accumulator
holds the whole product in the scale of the last (smallest) group, and only
one dequantization is left at the end. The hardware cost is a 1-bit shifter
and a 1-bit control signal per PE, plus one idle cycle (a "bubble") per group
boundary.

This repository holds synthesizable SystemVerilog for the accelerator built
around that idea: the multi-scale systolic array, the controllers and buffers
that feed it channels in group order, and a requantization unit. Each block
comes with a self-checking testbench.

## Architecture

```
          +----------+     +--------------+     +----------+
 HBM2 <-->| hbm_ctrl |---->| index_buffer |---->| exe_ctrl |
  (off    +----------+     |  2 banks     |     +----------+
  chip)     |    ^         +--------------+       |  base+index addresses,
            v    |                                |  clear / rescale / drain
     +------------------+   channel vectors   +---v--------------------+
     | scratchpad (in)  |-------------------->|  msa: skew FIFOs +     |
     | scratchpad (w)   |-------------------->|  DIM x DIM pe mesh     |
     +------------------+                     +------------------------+
            ^                                            | INT32 rows
            |   INT4/INT8 words  +-----+   +---------------v-+
            +--------------------| vpu |<--|  output_buffer  |
                                 +-----+   +-----------------+
```

| Block | File | Default size |
|---|---|---|
| Processing element | `rtl/pe.sv` | 4-bit x 4-bit MAC, 32-bit accumulator |
| Skewing FIFO (input and weight) | `rtl/skew_fifo.sv` | 64 lanes |
| Multi-Scale Systolic Array | `rtl/msa.sv` | 64 x 64 PEs |
| Index Buffer | `rtl/index_buffer.sv` | 2 x 16 KB (2 x 8192 16-bit indices) |
| Scratchpad Memory | `rtl/scratchpad.sv` | 2 x 256 KB (inputs, weights), 8192 x 256 bit each |
| Output Buffer | `rtl/output_buffer.sv` | 64 KB (256 rows x 64 x INT32) |
| Execution Controller | `rtl/exe_ctrl.sv` | up to 16 groups per pass |
| HBM Controller | `rtl/hbm_ctrl.sv` | 256-bit beats |
| Vector Processing Unit | `rtl/vpu.sv` | 64 lanes |
| Top | `rtl/tender_top.sv` | all of the above |
| Shared types | `rtl/tender_pkg.sv` | sizes, `tile_cfg_t`, `dma_cmd_t`, `vpu_cmd_t` |

The published configuration sets the array size, operand and accumulator
widths, memory capacities and VPU lane count. These are the defaults here. Word
widths, port counts, encodings and all the control sequencing are choices made
for this implementation. The file headers say which is which.

## The processing element and the rescale bubble

`pe` holds one output element (the array is output stationary). Each cycle it
receives a 4-bit input from the left, a 4-bit weight from above and a rescale
bit from the left. A 2:1 multiplexer chooses the accumulator's next value:

* `rescale = 0`: `acc + input * weight` (the normal MAC);
* `rescale = 1`: `acc << 1` (requantization to the next group's scale).

The PE passes input, weight and rescale on to its neighbours one cycle later.
So a step given to the array at cycle `t` reaches PE `(r, c)` at cycle
`t + r + c`. This is the tricky point of the design. PEs finish a group at
different cycles, so the rescale cannot be one global signal. It goes in with
row `r`'s input through the input skew FIFO, as a fifth bit next to the 4-bit
operand, and then travels along the row with the input. Each PE therefore
shifts exactly between the last channel of one group and the first channel of
the next. The bubble step carries zero operands, so the cycle adds nothing.

Two inputs the published PE does not have are added here: `clear`, which
zeroes the accumulator, and `drain`, which turns each column's accumulators
into a shift register to read the results out. `in_uns`/`w_uns` mark a nibble
as unsigned (see INT8 below).

## The Multi-Scale Systolic Array

`msa` wires `DIM x DIM` PEs into a mesh. An input skew FIFO sits on the left
(lane `r` delayed `r` cycles, rescale included) and a weight skew FIFO on top.
Each cycle the array takes one **reduction step**: one activation channel
(`in_vec`, one element per array row) and the same channel of the weights
(`w_vec`, one element per array column).

**INT8 mode.** Four PEs form one 8-bit multiplier. Element `r` of an 8-bit
vector takes nibble lanes `2r` (low nibble, unsigned) and `2r+1` (high nibble,
signed). This holds for inputs and weights alike, so the bytes are packed
little-endian in the same 256-bit word. PE `(2r+i, 2c+j)` therefore
accumulates `x_i * w_j`, and the drain path recombines the four sums as
`(HH << 8) + ((HL + LH) << 4) + LL`. A left shift distributes over this sum,
so the rescale bubble works unchanged. An INT8 tile is `DIM/2 x DIM/2`. The
2x2 placement and the recombination at the drain are choices of this
implementation. The published design says only that four PEs each take the
upper or lower 4 bits.

**Readout.** `clear` zeroes every accumulator in one cycle. While `drain` is
high, the accumulators shift down one row per cycle, and the bottom row
appears registered on `out_data` with its row index. An INT4 tile takes `DIM`
beats, bottom row first. An INT8 tile takes `DIM/2` beats, one every second
drain cycle.

## Feeding channels in group order: index buffer and execution controller

Group order is not memory order. The data are never reordered in memory.
Instead:

1. The **scratchpads** store one channel per word: 64 4-bit elements, i.e. one
   column of a 64-row activation tile or one row of a 64-column weight tile.
2. The **index buffer** holds the calibrated compute order, as a list of
   channel indices with the largest-scale group first.
3. The **execution controller** reads entry `p` of the list and fetches word
   `base + index` from both scratchpads. It forwards both vectors to the
   array, one channel per cycle.

`exe_ctrl` runs one **pass** described by `tile_cfg_t`: precision, number of
channels, up to 16 split positions, scratchpad bases, output-buffer base row,
and two flags. A split position `p` inserts one bubble (zero operands,
`rescale = 1`) just before the channel at position `p`. Timing of a pass, in
cycles after `start` is accepted:

| phase | cycles |
|---|---|
| clear (if `clear_acc`) | 1 |
| stream | `num_ch + num_splits` |
| index-buffer and scratchpad read pipeline | 2 |
| flush (the wavefront crosses the array) | `2*(DIM-1)` |
| drain (if `drain`) | `DIM + 1` |
| done pulse | 1 |

Each extra channel group costs exactly one cycle.

With `clear_acc = 0` a pass keeps adding to what the previous pass left in the
accumulators. With `drain = 0` it leaves its results there. Together they
split a reduction longer than one index bank (8192 channels) into several
passes. A split at position 0 rescales the carried-over sum before the new
pass adds to it. The **index buffer is double-buffered**. The HBM controller
writes the next pass's list into the shadow bank while the current pass reads
the active one, and a one-cycle `idx_swap` pulse exchanges the two banks.

## HBM controller, output buffer and VPU

`hbm_ctrl` is a DMA engine. It runs one command at a time:

* load into the input or the weight scratchpad;
* load into the index buffer's shadow bank (16 indices per 256-bit beat);
* store words of the input scratchpad back to HBM.

On the memory side it uses a minimal request/response channel: valid/ready
requests, and read data returning in order with any latency. Loads keep
several requests outstanding. HBM2 itself is outside the design: the channel
is brought out as `mem_*` ports on the top.

`output_buffer` takes one INT32 row per cycle from the array drain and gives
one row per cycle to the VPU.

`vpu` requantizes whole rows. Lane `c` (output channel `c`) holds a
calibrated scale (signed 16-bit) and bias (signed 48-bit) and computes

    q = saturate(round((acc * scale + bias [, ReLU]) >>> shift))

to INT4 (64 lanes) or INT8 (32 lanes). It packs the results the same way the
array reads them and writes them into the input scratchpad. The VPU streams
one row per cycle, and row `i` is written 3 cycles after it is read.

## Using the top level

`tender_top` has no sequencer of its own. A host (or a testbench) drives the
command ports:

1. `dma_*` with `DMA_LOAD_IDX`, then pulse `idx_swap`. The compute order is
   now active.
2. `dma_*` with `DMA_LOAD_IN` and `DMA_LOAD_W`. The channel vectors are now in
   the scratchpads.
3. `exe_start` with a `tile_cfg_t`. Wait for `exe_done`; all results are then
   in the output buffer. The next pass's index list may be loaded meanwhile.
4. Write the VPU lane registers (`vpu_cfg_*`), then start a `vpu_cmd_t` job
   and wait for `vpu_done`.
5. `dma_*` with `DMA_STORE_IN` to write the INT4/INT8 results to HBM.

Do not run a VPU job and an input-scratchpad load at the same time, because
they share one write port. An assertion flags it.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Each compares against a reference computed
independently in the testbench: the recurrence above for the array, 64-bit
integer arithmetic for the VPU, and memory models for the controllers. Each
also has a watchdog. `tb/hbm2_model.sv` is a behavioural HBM channel with
random back pressure and fixed latency.

* `tb_pe`, `tb_skew_fifo`, `tb_msa` (8x8; INT4 and INT8, up to five groups,
  back-to-back bubbles, drain beat count), `tb_index_buffer`,
  `tb_scratchpad`, `tb_output_buffer`, `tb_exe_ctrl` (order, bubbles, cycle
  count of a pass), `tb_hbm_ctrl`, `tb_vpu` (rounding, ReLU, saturation,
  latency).
* `tb_tender_top`: end to end at 8x8 with small memories. It runs five cases
  covering INT4 and INT8, 0 to 7 group boundaries, and single and two-pass
  reductions. In the two-pass cases the second index list is loaded during the
  first pass. It checks both the INT32 results and the requantized words
  stored back to HBM. It also counts the rescale bubbles, both precisions,
  bank swaps, index loads overlapping a pass, multi-pass accumulation, HBM
  stalls, VPU saturation and ReLU, and fails if any never happened.
* `tb_tender_quant_flow`: the whole quantization flow around the accelerator
  at 8x8. The testbench plays the role of offline calibration: it subtracts a
  per-channel bias of `(max+min)/2`, assigns channel `i` to group `g` when
  `TMax/2^g < CMax_i <= TMax/2^(g-1)`, quantizes group `g` with scale
  `TMax / (2^(g-1) * (2^(b-1)-1))`, and builds the index list and split
  positions (one bubble per group boundary, including boundaries of empty
  groups). The first case is a textbook example: 3 tokens x 6 channels in
  INT8 with three groups. It checks the bias-subtracted values, the group of
  every channel and the scales `22.4/k, 11.2/k, 5.6/k`. The second case is an
  INT4 tile of 8 tokens x 64 channels with two outlier channels and six
  groups. In both cases the hardware result must equal the integer
  recurrence. After dequantization with the last group's scale it must also
  match the floating-point product within the rounding bound. In the second
  case it must beat per-tensor INT4.
* `tb_tender_top_full`: the same flow on the top with all default parameters
  (64x64 array, full memories). It runs an INT4 and a two-pass INT8 case.

Running one with Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/tender_pkg.sv tb/tb_msa.sv --top-module tb_msa -o sim
./obj_dir/sim
```

The full-size testbench takes a few minutes to build. The reduced ones build
in seconds.

## Where this RTL departs from the published design

* **VPU.** The published VPU is a 64-lane floating-point SIMD unit that also
  runs softmax, LayerNorm and GeLU. Here only the requantization job is built,
  in fixed point, with ReLU as the only activation.
* **Scratchpad split.** The 2 x 256 KB scratchpad is read as one memory for
  inputs and one for weights. It could also be meant as a double buffer.
* **Memories** are plain register arrays, not compiled SRAM macros.
* **Arbitrary rescale factors.** The optional extension that multiplies the
  accumulator by a factor other than 2 over eight cycles is not built. Only
  the power-of-two rescale is.
* **Calibration** is offline software and not part of the hardware. This
  covers per-channel bias, the channel grouping, the scale factors and the
  256-row chunking. The RTL consumes its results as the index list, the split
  positions and the VPU lane constants.
* **Pass overlap.** Consecutive passes do not overlap. The next stream starts
  only after the drain of the previous one.
* **Accumulator overflow.** Like the published design, the 32-bit accumulator
  relies on real data leaving headroom. Every bubble doubles the accumulator
  and nothing saturates it.

## Sizing against the evaluated models

One pass handles up to 8192 channels of reduction. The layer sizes below come
from the public model definitions, not from the evaluation itself. Attention
projections need one pass per 64x64 output tile for models with `d_model`
≤ 8192. OPT-66B (`d_model` 9216) and all FFN down-projections (hidden size
11008 to 36864) need 2 to 5 accumulating passes per tile. A 2048-token
sequence is 32 row tiles, and one 256-row calibration chunk covers four tiles
that share one index list.
