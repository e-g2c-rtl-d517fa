# e-G2C: an EGM-to-ECG neural-network processor in SystemVerilog

A pacemaker senses the heart through its leads as electrograms (EGM), but a physician reading
a remote report wants the 12-lead surface ECG. e-G2C is a small processor that converts EGM into
ECG with convolutional neural networks inside the implant's power budget. The main idea is to
avoid running the expensive network on every heartbeat. A tiny anomaly detector runs on each beat.
When the beat looks normal, a cheap *coarse* convertor runs (1 EGM channel, 4-bit power-of-two
weights). Only an abnormal beat triggers the *precise* convertor (4 EGM channels, 8-bit weights).
The detector's threshold is not fixed. An on-chip adaptation engine keeps a histogram of detector
outputs and moves the threshold to the quietest part of the histogram at regular intervals.

This RTL implements that processor. It has one NN engine, shared in time by the detector and the
two convertors, an adaptation engine, and an instruction-driven controller. It follows the block
structure, memory sizes and bus widths of the published architecture. Where the publication is
silent, this design makes its own choices. The main ones are the instruction set, the index
encoding, the number formats and the pipeline timing. Each is marked below and in the head
comment of each file.

## The per-beat flow

```
  EGM samples ──► Act GB ──► detector (3x3 conv, pooling) ──► score
                                                         │
                        score > threshold ? ─────────────┤
                     yes (normal)            no (abnormal)
                          │                        │
                coarse convertor              precise convertor
             (4-bit power-of-2 weights)     (8-bit integer weights)
                          │                        │
                          └──────► ECG in Act GB ◄─┘
  every `period` scores: histogram ─► Argmin over sensitive range ─► new threshold
```

The detector, the branch and both convertors are one program in the instruction SRAM. The `BRN`
instruction reads the adaptation engine's last decision and jumps to the coarse part of the
program or falls through to the precise part. All three models' weights stay resident in the
32 KB weight GB together (0.09 + 4.38 + 9.13 KB), so no weights are reloaded when the path
changes.

## Architecture

```
                    ┌────────────── NN engine ────────────────────────────────────────┐
 host port ──►      │ Act GB0 (2x12.5KB, 512b) ──┐          ┌──► Act GB1 (2x12.5KB)     │
 (load/read         │         ▲   ping-pong (SWAP)│          │        ▲                 │
  while idle)       │         └───────────────────┼──────────┼────────┘                 │
                    │                   input act buffer      output act buffer          │
                    │ Index SRAM 10KB ─► 2 banks x 16 rows     snapshot, requantize,     │
                    │   (32 x 2b)        x 6 x 8b + crossbar   512b writes, DET pooling  │
                    │                        │ 32 x 6 x 8b             ▲ 32 x 4 x 16b    │
                    │ Weight GB 32KB ─► 32 x weight buffer ─► 32 x MAC lane (4 MACs)   │
                    │   (32 x 4b)         (4b ─► 8b)             │                     │
                    └─────────────────────────────────────────────┼─────────────────────┘
 Instr SRAM 4KB ─► controller ──────── control ──────────────┐     │ 16-bit score
                                                             ▼     ▼
                                    adaptation engine: Cmp ─► histogram counters ─► Argmin
                                                       threshold / interval registers
```

| Block | File | Size (default) |
|---|---|---|
| Act GB0, Act GB1 | `act_gb.sv` | 2 banks x 200 words x 512 b = 25 KB each |
| Weight GB | `sram_1p.sv` | 2048 x 128 b = 32 KB (32 lanes x 4 b per word) |
| Index SRAM | `sram_1p.sv` | 1280 x 64 b = 10 KB (32 lanes x 2 b per word) |
| Instruction SRAM | `sram_1p.sv` | 1024 x 32 b = 4 KB |
| Input act buffer | `input_act_buf.sv`, `act_sel_ctrl.sv` | 2 x 16 rows x 6 x 8 b, 32-lane crossbar |
| Weight buffer (x32) | `weight_buf.sv` | 4 b in, 8 b out |
| MAC lane (x32) | `mac_lane.sv`, `mac_unit.sv` | 6-entry shift row, 4 MACs, 24-bit accumulators |
| Output act buffer | `output_act_buf.sv` | snapshot of 32 x 4 x 16 b |
| Adaptation engine | `adapt_engine.sv`, `adapt_cmp.sv`, `hist_counters.sv`, `argmin_tree.sv` | 16 bins x 8 b, 8-bin Argmin |
| Controller | `controller.sv` | |
| Top | `eg2c_top.sv` | |

The memories are written as register arrays. Synthesis keeps them as memory cells, which stand
in for the SRAM macros. Shared constants and types live in `eg2c_pkg.sv`.

## How a sparse convolution reaches the MAC lanes

The hardest part to follow is how weights, indices and activations line up. This section
describes it in detail.

**Vectors.** Weights are pruned in whole *vectors*. In a normal or depth-wise 3x3 convolution, a
vector is one kernel row (3 weights). In a point-wise (1x1) convolution, a vector is the weights
of three consecutive input channels. A pruned vector is simply not stored, and no cycles are
spent on it.

**Lanes.** Each of the 32 lanes computes four neighbouring outputs of one output row, e.g.
columns x0..x0+3 of row y in output channel o. The program decides which (o, y, x0) each lane
owns. All lanes step through their vector lists in lock step, so a `COMP` runs as many vectors
as the longest list. Shorter lists are padded with zero-weight vectors.

**Temporary rows.** `LDACT` copies up to 16 activation rows into one bank of the temporary act
buffer. Each row is 6 bytes taken from a 512-bit Act GB word at a byte offset. Six activations
are enough for four outputs of a 3-tap row (4 + 3 - 1). Bytes past the end of the word read as
zero.

**Indices.** For every vector, the index SRAM holds 2 bits per lane. A lane adds them to its 4-bit
accumulated index, which restarts at 0 with the first vector of each `COMP`. The accumulated
index names the temporary row that this vector multiplies. An index is therefore the *step* to
the next needed row (0..3). A gap of more than 3 rows needs a zero-weight padding vector. Because
each lane has its own index, lanes with different sparsity patterns, or different output rows,
read different rows through the crossbar in the same cycle. Several lanes may also read the same
row, which the depth-wise mapping below relies on.

**Weights.** The weight GB delivers one 128-bit word per cycle, 4 bits for each lane:

* 4-bit power-of-two format (coarse): each nibble is one weight, `s eee` = ±2^e for e = 0..6,
  with e = 7 meaning zero. A lane receives one weight per cycle, so a vector takes 3 cycles.
* 8-bit integer format (precise): two nibbles, low one first, make one weight. A vector takes
  6 cycles, and the MACs work every other cycle.

**Row-wise reuse in a lane.** On the first weight of a vector, the lane loads the 6-byte row.
MAC i multiplies byte i by the weight. The row register then shifts left by one, so after three
weights MAC i has accumulated `w0*a[i] + w1*a[i+1] + w2*a[i+2]`. Each activation is fetched once
and used by up to three weights. In point-wise mode the lane reloads every cycle instead. The
three weights of a vector then meet rows r, r+1 and r+2 (r = accumulated index), which are three
input channels at the same positions.

**Example.** A lane owns output row y = 0 of a 4-input-channel 3x3 convolution. The 16 temporary
rows hold channels 0..3, rows 0..3 (temp row = 4c + r). After pruning, the lane's kernel keeps
three kernel rows: (c=0, kr=1), (c=1, kr=0) and (c=3, kr=2). They need temp rows 1, 4 and 14,
i.e. steps of 1, 3 and 10. A step of 10 does not fit in 2 bits, so the compiler splits it into
3 + 3 + 3 + 1 with zero-weight padding vectors:

| vector | index step | accumulated row | weights |
|---|---|---|---|
| 0 | 1 | 1 | kernel row (0,1) |
| 1 | 3 | 4 | kernel row (1,0) |
| 2 | 3 | 7 | zeros |
| 3 | 3 | 10 | zeros |
| 4 | 3 | 13 | zeros |
| 5 | 1 | 14 | kernel row (3,2) |

Six vectors are spent instead of the dense twelve. `reach` in `tb/tb_eg2c_top.sv` is a small
compiler that does this split.

A `COMP` with the clear bit starts the lanes' accumulators afresh. Without it, results accumulate
across `COMP`s. This is how a layer with more than 16 input rows (e.g. 64 channels x 3 kernel rows)
is split into passes.

**Getting results out.** `STORE` makes the output act buffer copy all 32 x 4 results. The buffer
then writes one lane per cycle into the *output* Act GB, in one of two forms:

* 8-bit: arithmetic shift right, optional ReLU, saturate; 4 bytes per lane.
* 16-bit: little-endian; 8 bytes per lane.

Lane l goes to word `base + l` at a byte offset. The lanes are free as soon as the copy is taken.
`SWAP` then exchanges the input and output roles of the two Act GBs for the next layer, so
activations never leave the chip.

## Depth-wise convolution

In a depth-wise layer each channel has its own 3x3 kernel, so no activation is shared between
output channels. Reuse has to come from inside one channel. The program maps a channel like this:

* **Deeper row-wise reuse.** Each 8-wide output row is split into two 4-wide sub-rows. Lane y
  computes columns 0..3 and lane 4+y computes columns 4..7. Temporary row 2r holds input row r
  from byte offset 0; temporary row 2r+1 holds the same GB word from byte offset 4.
* **Column-wise reuse.** Vector v delivers input row v to lanes 0..3 at once. Lane y, which owns
  output row y, applies kernel row v-y, or zeros when v-y is outside 0..2. So one input row meets
  three kernel rows in three lanes during the same cycle.
* **Indices.** Every lane uses the same steps: 0 (or 1 for the second half) for the first vector,
  then 2 per vector. The crossbar therefore sends one temporary row to four lanes and its other
  half to four more lanes.

A channel with 6 input rows gives 4 output rows of 8 in one `COMP` of 6 vectors on 8 lanes. The
next channel's 12 temporary rows load into the other bank meanwhile. The top-level testbench runs
this for 4 channels and checks every output.

## The detector on this engine

The detector is a 3x3 convolution from 28 channels to one, followed by 4x4 average pooling.
On a 6x6 input that is a 4x4 map and 4032 multiply-accumulates. `tb/tb_eg2c_detector.sv` runs
it like this:

* Channels go in pairs. GB word 12p + 2r + c' holds row r of channel 2p+c'. One `LDACT` moves
  a pair's 12 rows into a temporary bank.
* Lane 4c'+y owns output row y of one channel of the pair. Vector v gives input row v to the
  four lanes of a channel at once, and each applies kernel row v-y. That is the column-wise
  mapping from the previous section.
* The 14 pairs run as accumulating `COMP`s (clear on the first only), alternating banks while
  the next pair loads.
* Pooling is linear. One `DET` over the 8 lanes, shifted right by 4, therefore gives the
  pooled score of all 28 channels. No separate reduction pass is needed.

A detection takes 362 cycles from `start` to the score. At 2 MHz that is 0.18 ms, inside the
published 0.32 ms per detection.

## Instruction set

All instructions are 32 bits, with the opcode in bits 31:28. The controller fetches from address 0
after `start` and stops at `HALT`. Fetch and execute alternate, so every instruction costs at
least two cycles.

| Op | Code | Fields | Effect |
|---|---|---|---|
| NOP | 0 | | |
| HALT | 1 | | waits for all units, raises `done` |
| SETW | 2 | [10:0] weight word, [21:11] index word | set the stream pointers (they auto-increment) |
| LDACT | 3 | [8:0] GB word, [14:9] byte offset, [18:15] first temp row, [22:19] rows-1, [23] bank | background load of temp rows from the input GB, one per cycle |
| COMP | 4 | [7:0] vectors-1, [8] point-wise, [9] 8-bit weights, [10] clear, [11] bank | stream vectors through the lanes |
| STORE | 5 | [8:0] word of lane 0, [14:9] byte offset, [19:15] lanes-1, [23:20] shift, [24] ReLU, [25] 16-bit | results to the output GB |
| SWAP | 6 | | exchange input and output Act GB |
| DET | 7 | [4:0] lanes-1, [8:5] shift | pooled detector score = (sum of 4 results of lanes 0..n-1) >> shift |
| BRN | 8 | [9:0] target | jump if the last score was above the threshold (normal, coarse path) |
| JMP | 9 | [9:0] target | |
| SETA | 10 | [19:0] data, [24:20] register | adaptation registers: 0..14 bounds, 15 s0, 16 period, 17 threshold |

**Overlap and stalls.** A `LDACT` into one temp bank runs in the background while a `COMP` uses
the other bank. A `COMP` on a bank that is still loading waits. `STORE`/`DET` run in the output
act buffer while the lanes go on. `STORE`, `DET`, `BRN` and `SETA` wait while the output buffer
or the adaptation engine is busy. `SWAP` and `HALT` also wait for a running load. The top exports
`stall_cycles` and `overlap_cycles` so these can be observed.

**Pipeline timing.** A weight read issued in cycle t reaches the lanes in cycle t+1, together
with the index word and a copy of the control bits (`lane_ctrl_t`). The MACs update at the end of
t+1. SRAM reads have one cycle of latency throughout.

## Threshold adaptation

Every `DET` produces a signed 16-bit score. The adaptation engine then does three things:

1. **Decide.** The beat is normal if the score is above the threshold.
2. **Bin.** The comparator walks the ascending bounds Interval_0..Interval_14. The score goes into
   the bin of the first bound it does not exceed, or into bin 15 if it exceeds them all.
3. **Count.** That bin's 8-bit counter is incremented; counters saturate at 255.

After `period` scores, the engine adapts. The Argmin tree (4 + 2 + 1 comparators) looks at the 8
counters of the sensitive range starting at bin s0 and picks the least-populated bin k. Ties go
to the lower bin. The threshold becomes (Interval_{k-1} + Interval_k) / 2, the counters are
cleared, and this costs one extra cycle. The publication counts the period in days (e.g. 3 days).
Here it is counted in detector outputs: 3 days at 80 bpm is about 345,600 beats, which fits the
20-bit period register.

## Number formats

* Activations: signed 8 bits.
* Weights: 4-bit power of two or 8-bit integer, both decoded to signed 8 bits.
* Accumulators: 24 bits, read out saturated to 16 bits.
* Stored outputs: 8 bits (shift, optional ReLU, saturate) or 16 bits.

Signedness, the accumulator width, the rounding (plain arithmetic shift) and the activation
function are this design's choices. The publication gives only the bit widths.

## Departures from the publication and open points

* **Instruction set, index encoding, power-of-two code, register map.** These are all this
  design's. The publication gives only the word width of each memory.
* **Detector pooling.** The detector's 4x4 average pooling has no block of its own in the
  architecture. Here it is the `DET` sum in the output act buffer.
* **8-bit weight rate.** The weight GB word (4 bits per lane) makes 8-bit weights take two cycles
  each, so the precise convertor runs its MACs at half rate. How the publication feeds 8-bit
  weights is not described.
* **Conversion latency.** The publication reports 9.62 ms (coarse) and 13.32 ms (precise) at
  2 MHz. Estimates for this design use the dense MAC counts, the 77% MAC busy time of the
  simulated conv tile, and the measured 1.22 sparsity speed-up. They give about 22,000 cycles
  (11 ms) for the coarse convertor and about 96,000 cycles (48 ms) for the precise one. The
  coarse estimate is close to the published figure; the precise one is about 3.6 times slower.
* **Depth-wise dataflows.** Column-wise reuse and deeper row-wise reuse are expressed by the
  program through per-lane indices and byte offsets. No dedicated hardware is added (see
  *Depth-wise convolution* above). The mapping spends 6 vectors on a 3-row kernel, so each lane
  is busy for half of them. The publication reports near-full utilization; this design does not
  reach it for depth-wise layers.
* **Sparsity speed-up.** All lanes step through their vector lists together, so a `COMP` costs
  as much as its longest list, plus padding vectors for gaps of more than 3 rows. With random
  per-lane pruning of half the kernel rows, a 32-to-24-channel layer runs 1.22 times faster than
  dense. The publication reports 1.7 for vector-wise sparsity in the coarse convertor. It does
  not say how lanes are balanced, and reaching that figure would need pruning that is balanced
  across lanes, or a scheduler that is not described.
* **Memory total.** The macros above add up to 96 KB. The publication's total is 104 KB, and the
  remaining 8 KB is not placed.
* **Not modelled.** The analog front end, the clocking, the pads and the two supply domains
  (0.30 V core, 0.59 V memory).
* **Reset.** Reset is active-low and asynchronous; it clears control state and registers but
  not the memory arrays.

## Fit of the published models

Sizes are those the publication lists. The detector row is simulated; the convertor cycle counts are estimates.

| Model | Weights | MACs | Notes |
|---|---|---|---|
| Detector: conv 3x3, 28→1 channels, 4x4 average pooling | 0.09 KB | 4 K | simulated: 362 cycles per detection (published budget 640) |
| Coarse: conv 3x3x2x32, DW 3x3x32, PW 32→32, conv 3x3x32→24 | 4.38 KB | 2.69 M | ≤ 32 output channels per lane set; about 22 k cycles estimated (published 19.2 k) |
| Precise: conv 3x3x8x16, DW/PW pairs up to 64 ch, conv 3x3x64→24 | 9.13 KB | 5.79 M | 64-channel layers on two lane sets; 8-bit weights at half rate; about 96 k cycles estimated (published 26.6 k) |

All three weight sets together (13.6 KB) fit the 32 KB weight GB. Their index streams
(2 bits per 12 weight bits for 4-bit weights) fit the 10 KB index SRAM. The publication does not
give the EGM segment length, so whether a layer's activations fit in one 25 KB Act GB cannot be
checked.

## Simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/eg2c_pkg.sv tb/tb_eg2c_top.sv \
          --top-module tb_eg2c_top -o sim && ./obj_dir/sim
```

`tb_eg2c_top` runs the whole processor at its default sizes. It acts as host and compiler: it
prunes random dense weight tensors, compiles them into vector/index streams and a program, and
runs six beats and then a depth-wise layer. Each beat is a 3x3 conv layer, a detection, a branch, then a point-wise layer
after the GB swap, on the coarse (4-bit weights, 8-bit output) or precise (8-bit weights, 16-bit
output) path. The threshold adapts every 2 beats. Every stored activation, the score, the
decision and the threshold are checked against a direct convolution and an independent
adaptation model. The bench also counts each mechanism: both weight formats, both lane modes,
skipped rows, padding vectors, stalls, load/compute overlap, both branches, SWAP, both store
widths, adaptation and the two depth-wise reuse patterns. A beat takes about 520 (coarse) and
570 (precise) cycles at these small
layer sizes.

`tb_eg2c_conv_layer` runs one output-row tile of a 3x3 convolution from 32 to 24 channels (the
coarse convertor's last layer) in 7 accumulating passes, dense and with half of the kernel rows
pruned, checks all outputs and compares cycle counts. Dense takes 372 cycles and pruned 303, a
speed-up of 1.22.

`tb_eg2c_detector` runs the detector model above at default sizes and checks the score, the
decision, the lanes' partial sums and the 640-cycle latency budget.

The other testbenches cover the blocks one at a time:

* `tb_controller`: instruction streams, stalls and branches.
* `tb_input_act_buf`, `tb_act_sel_ctrl`: the crossbar and index accumulation.
* `tb_weight_buf`: decoding of both weight formats.
* `tb_mac_lane`, `tb_mac_unit`: row-wise and point-wise accumulation, saturation.
* `tb_output_act_buf`: requantization, byte placement and pooling.
* `tb_adapt_engine`, `tb_adapt_cmp`, `tb_hist_counters`, `tb_argmin_tree`: the adaptation path.
* `tb_sram_1p`, `tb_act_gb`: the memories.

Simulation is two-state. Anything that is read is reset or written first.
