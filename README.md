# FireFly v2 spiking-convolution accelerator in SystemVerilog

A spiking neural network (SNN) layer is a convolution whose inputs are spikes, 0 or 1, repeated
over T time steps, followed by a stateful neuron that integrates the result and fires when its
membrane potential crosses a threshold. A spike times a weight is a gated add. So a DSP slice
used as a multiplier is mostly wasted. Instead, one DSP48E2 in four-lane SIMD mode adds up
the weights selected by two spikes for four output channels at once: it acts as a 2 x 4
synaptic crossbar. The neurons are the awkward part: time step t+1 depends on the reset at
time step t, which makes a naive design serial in time.

This design resolves both problems together:

* **Time is a parallel dimension.** The spike computing engine works on S = 4 time steps of
  the same pixel at once, beside input channels (V = 16), output channels (M = 16) and output
  pixels (N = 8). Every slow clock cycle it takes a tile of V x N x S spikes and M x V
  weights.
* **Neurons update four time steps per cycle** with a look-ahead scheme, much like a
  carry-look-ahead adder.
* **The DSP array runs at twice the fabric clock.** `clk2x` is 500 MHz against 250 MHz for
  `clk` in the reference build. Each DSP therefore handles two spikes per slow cycle, and the
  PE needs only V/4 DSPs per column.
* **Non-spike layers reuse the binary engine.** This covers 8-bit image pixels in the first
  layer, multi-bit spikes after SEW residual additions, and the fractional spikes of average
  pooling. Each is fed bit-serially, as extra "equivalent time steps". A shift-add unit then
  rebuilds the true partial sums.

The RTL computes one convolution layer per start command, out of external memory:

* It reads inputs, shortcut spikes and parameters through two read AXI DataMovers.
* It writes outputs through one write DataMover.
* An AXI4-Lite register file holds the layer description.

## Block diagram and data path

```
 AXI4-Lite ──► ctrl_regs ──► layer_cfg_t (all blocks), start / done / irq
                                                                        ┌────────────────┐
 read DM0 ◄─┐            ┌─ cmdgen_datacache (spikes + shortcut) ───────┤ loader_arbiter │
 read DM1 ◄─┴────────────┴─ cmdgen_datacache (bias, thresholds, weights)┘                │
 spikes : stream_fifo → stream_adapter 128→64 → conv_padding → coalesce_padding → im2col ┐
 weights: stream_fifo → stream_adapter 128→2048 → partial_reuse_fifo ────────────────────┤
                                                                                         ▼
        spike_engine:  gearbox_s2f x2 (clk → clk2x) → systolic_array of PEs (dsp_crossbar)
                       → gather_fast2slow (align, async FIFO, clk2x → clk)
                                                                                         ▼
 psum_proc (bit-plane merge, bias, <<1) ─┬─► [partial sums out]
                                         └─► neuro_dynamic → pooling → sew_res_connect
                                               (shortcut spikes via bit_unpacker) → spike_acc
                                                                                         ▼
 write DM ◄── data_saver (bit_packer, one write command per output-channel tile)
```

`firefly_v2.sv` is the top. The DataMovers, the processor system and the clock generator are
not part of the RTL: their command, data and status streams are the top's ports. `ff2_pkg.sv`
holds the layer configuration struct `layer_cfg_t`, the mode enums and small shared functions.

## The loop nest and what it implies

For each layer the engine executes

```
for o  < Co/M          output-channel tile           (outermost: weights of a tile are fixed)
 for h < Ho            output row
  for wg < ceil(Wo/N)  group of N output pixels
   for t < B*T/S       time tile (B = bit width of the input spikes)
    for kh, kw         kernel position
     for c < Ci/V      input-channel tile            → one engine step per clk
```

The fan-in loop (kh, kw, c) is innermost. So the M x N x S partial sums of one output group are
complete after Kh·Kw·Ci/V steps, and the neuron can update them right away. No membrane
potential leaves the chip. The time tile sits just outside the fan-in. That makes the S time
steps of a pixel arrive one after another, so the neuron keeps its state in a small
per-pixel table. The weights of an output-channel tile are the same for every (h, wg, t):

* the `partial_reuse_fifo` keeps one window of Kh·Kw·Ci/V weight words and replays it
  Ho·Wg·T/S times;
* meanwhile, the next tile's window streams in behind it.

Input spikes are read again from memory for every output-channel tile. This trades memory
bandwidth for on-chip storage.

## Im2col without bank conflicts

At every step the engine needs the same kernel tap (kh, kw) and channel tile for N neighbouring
output pixels. These are N input columns a stride apart.

* `im2col` keeps a ring of Kh+1 input rows in N banks. Column x goes to bank (x / stride) mod N,
  so N pixels at consecutive multiples of the stride always land in N different banks. All N
  can then be read in one cycle.
* Bank b serves pixel (b − kw/stride) mod N. An N-port rotating crossbar puts the bank outputs
  back in pixel order.
* `conv_padding` adds the convolution's zero border on the fly.
* `coalesce_padding` pads every row with zero columns. The row length becomes a multiple of
  N·stride, so a pixel group never wraps into the next row's banks.
* The writer fills row h+Kh while the reader works on rows h..h+Kh−1.

A row is only read when it is complete. A ring slot is only overwritten after the last output
row that needs it.

## The double-rate systolic engine

`spike_engine` joins the two streams and moves them into the `clk2x` domain through two
`gearbox_s2f` units. Each is a 2:1 parallel-to-serial converter: the low half of the input
channels goes first, the high half second. The slow-cycle phase is found with a toggle
flip-flop on `clk`, sampled on `clk2x`.

`systolic_array` is output-stationary:

* Each PE accumulates its own partial sums until the end of the fan-in.
* Weights move down the columns; spikes move right along the rows. Row r is one output pixel.
  Column c is four output channels.
* A PE (`pe`) holds S columns of V/4 cascaded `dsp_crossbar`s, one column per time step.

A `dsp_crossbar` models a DSP48E2 in FOUR12 mode:

* Two spikes select two sets of four signed 8-bit weights.
* The selected weights are sign-extended to four independent 12-bit lanes and added to the
  cascade input.
* The last DSP of the column also adds its own accumulator from the previous step. The first
  step of a fan-in restarts it.

It is written as behavioural RTL of the slice, not as a vendor primitive.

Results come out of the PEs in a staircase: PE (r, c) finishes r + c cycles after PE (0, 0).
`gather_fast2slow` handles this:

* It delays each PE's result so that all N x M/4 results of a group line up.
* It writes the aligned group into a 4-entry Gray-code asynchronous FIFO (`async_fifo`).
* On the `clk` side it hands them out one pixel per cycle.

The engine accepts a new step only while fewer than four groups are in flight. This credit rule
means the FIFO can never overflow. It holds whenever the fan-in is at least N steps, which
covers almost every layer. For shorter fan-ins, such as a 1x1 kernel with few channels, the
engine stalls instead of losing data.

Timing that the testbenches check:

* one engine step per `clk` cycle when both streams are ready;
* the PE latency of V/4 cycles;
* the array latency of r + c + V/4 fast cycles;
* at most 3 fast cycles through the gearbox.

## Multi-bit spikes and the partial-sum processor

`psum_proc` receives, per pixel, M x 4 partial sums of 12 bits. How it uses the four sums
depends on the layer's input spike mode:

| mode | engine input | merge |
| --- | --- | --- |
| 1-bit | 4 time steps | pass through |
| 2-bit | 2 time steps x 2 bit planes | P0 + 2·P1, P2 + 2·P3; two rounds make 4 steps |
| 4-bit | 1 time step x 4 bit planes | (P0 + 2P1) + 4(P2 + 2P3); four rounds |
| 8-bit pixel | 8 bit planes = 2 time tiles | the two 4-plane sums combined with ×16; replicated to all steps |

Bit planes are sent lowest bit first within one engine time tile. The merged value gets its
channel's bias and an optional left shift by one. The shift undoes an average-pooling right
shift in the previous layer. The result leaves as 18 bits.

In partial-sum output mode the 18-bit sums are written to memory directly and no neuron runs.
This is meant for a final classifier.

## The look-ahead neuron

`neuro_dynamic` must produce four spikes per channel per cycle. A plain design would chain four
integrate–compare–reset stages, and each stage's reset feeds the next. Here the work is split in
two phases.

**Phase 1** is registered and needs no state. For every step t, and every possible step j of
the last reset before it, it compares the sum Pj + … + Pt with the threshold. It also prepares
threshold − (P0 + … + Pt) for comparison with the potential carried in from the previous
time tile.

**Phase 2** walks the four steps through a chain of multiplexers. The spikes already chosen
select which candidate applies next. Only comparators and muxes sit on this path, no adders.

The state kept per pixel and channel is the potential carried to the next tile and the last
spike. A neuron fires when its potential is strictly greater than the threshold. Three neuron
models are available, chosen at build time with the top's `NEURON` parameter:

* IF: hard reset to zero.
* LIF: the same, with a leak of v −= v >>> 1 before each integration.
* RMP: soft reset by subtracting the threshold. Its candidates are indexed by how many spikes
  have fired in the tile.

The latency is two cycles.

## After the neuron

* `pooling`: 2x2 stride-2 max pooling (OR of spikes) or average pooling, or bypass. It keeps a
  line buffer of one output row (Wo ≤ 256, at most 2 time tiles). The average is a 3-bit sum.
  It is fitted to two bits either by saturation or by a right shift by 2. With the shift, the
  next layer compensates through `psum_shl`.
* `sew_res_connect`: spike-element-wise residual connection with the shortcut spikes read from
  memory. The shortcut can be 1, 2 or 4 bits wide. IAND gives (not backbone) and shortcut.
  ADD gives backbone + shortcut, kept 4 bits wide or saturated.
* `spike_acc`: optional 16-bit spike count per channel over all time steps. It holds the firing
  rates of the last layer, written once per pixel and output-channel tile.
* `data_saver`: packs the output words into 128-bit beats. It sends one write command per
  output-channel tile. The layer counts as done once the DataMover has returned a status for
  every tile and every unit has gone idle.

## Memory layout and registers

Layouts are this design's own.

* **Input spikes:** pixel-major, `[y][x][ci-tile][time-tile]`. Each word is 64 bits
  (V x S spikes, bit s·V+v), two words per 128-bit beat. The layer's `in_len` must be a
  multiple of 16 bytes.
* **Per output-channel tile, at `prm_base + o·prm_len`:**
  * M signed 32-bit biases, of which the low 18 bits are used;
  * M 32-bit thresholds;
  * the weight window, one word of M x V signed 8-bit weights per fan-in step, in loop order.
* **Outputs and shortcut spikes:** packed in stream order, one region per output-channel tile.

`ctrl_regs` has a control register at 0x00, where writing bit 0 starts a layer. A status
register at 0x04 holds busy in bit 0 and done in bit 1. From 0x08 on, 32-bit words hold the packed
`layer_cfg_t`, bit 0 of the struct in the first word; `ff2_pkg.sv` documents each field. `irq_done` rises when a
layer has finished.

## Parameters

| parameter | default | meaning |
| --- | --- | --- |
| M, V, N, S | 16, 16, 8, 4 | output channels, input channels, pixels, time steps per step (the KV260 build) |
| IM2COL_DEPTH | 2048 | words of V x S spikes per im2col bank |
| WFIFO_DEPTH | 512 | weight words (M x V x 8 bit) in the partial reuse FIFO |
| CACHE_DEPTH | 128 | 128-bit beats of each loader's data cache |
| POOL_MAX_WO, POOL_MAX_TT | 256, 2 | largest pooled row and time-tile count |
| NEURON | NEURON_IF | neuron model |

A layer fits if it meets both of these:

* (Kh+1)·stride·(ceil(Wo/N)+1)·(Ci/V)·(B·T/S) ≤ IM2COL_DEPTH;
* Kh·Kw·Ci/V ≤ WFIFO_DEPTH.

Each of the layers of the CIFAR-style nets and the ResNet-34 stages fits at T = 4 or 8. The
deepest 3x3 ResNet stage with 4-bit ADD spikes fills im2col exactly.

## Where this departs from the published design, or guesses

* **Axis names of the systolic array.** The published dimensions call the array M/4 high and N
  wide. Its flow directions, however (weights down, spikes right), imply N pixel rows and M/4
  channel columns. The RTL follows the flow directions. The PE count and the results are the
  same either way.
* **Blocks known only by name or function.** The publication does not describe the insides of
  these blocks: the command generators, the arbiter policy, the padding units, the
  partial-reuse FIFO, the pooling fit rule, the LIF leak, and all formats and register maps.
  Each is the simplest construction that does the job, and each file's opening comment says so.
* **Pooling.** Only 2x2 pooling exists. The 3x3 stride-2 max pool of a ResNet stem and global
  average pooling are not built in. A classifier can instead run as a 1x1 convolution in
  partial-sum mode, with the average taken outside.
* **DSP modelling.** The DSP48E2 is modelled in plain RTL. A synthesis tool may or may not map
  it onto DSP slices with the cascade, and no timing closure at 500 MHz is claimed for it.
* **Layer sequencing.** One layer is run per start command. Sequencing layers is left to the
  host.

## Verification

Every block in `rtl/` has a self-checking testbench in `tb/` named `tb_<module>`. Each compares
against an independent model and checks cycle counts where a rate or a latency is defined. Each
ends with a line `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

`tb_firefly_v2` runs the top at its default parameters:

* It has behavioural DataMover models with random throttling, plus an AXI4-Lite host.
* It runs six layers:
  * 1-bit 3x3 with padding;
  * an 8-bit direct-input layer with stride 2 and partial-sum output;
  * 2-bit inputs with max pooling;
  * 4-bit 1x1 with average pooling;
  * T = 8 with an ADD residual;
  * IAND residual with spike counting.
* It compares every output word with a reference model of the whole layer.
* It counts padding, coalescing, row waits, weight replays, back-pressure, use of the second
  DataMover and spikes. It fails if any of them never happens.

It finishes in a few seconds.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Irtl rtl/ff2_pkg.sv tb/tb_firefly_v2.sv -y rtl -y tb \
          --top-module tb_firefly_v2
./obj_dir/Vtb_firefly_v2
```
