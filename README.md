# DeCalciOn-style real-time calcium image tracing and decoding in SystemVerilog

A head-mounted miniscope streams 512 x 512 grey-scale frames of calcium
fluorescence from a rat's hippocampus. For closed-loop experiments the
animal's position has to be decoded from every frame in well under a
millisecond, so that feedback stimulation can follow neural activity.
This RTL does that in two steps.

1. **Trace extraction.** Each cell footprint, or each fixed square tile of
   the frame, is a small binary mask. The trace of that footprint for the
   frame is the sum of the pixels under its mask.
2. **Decoding.** The traces go through a small neural network: a fully
   connected ANN, a CNN or a spiking network. Its output is one of 24
   position bins along a linear track.

The hard part is trace extraction. Up to 1024 footprints must each see their
own window of the frame, and a naive pass over all of them costs far too many
cycles. The design solves this with a one-dimensional systolic chain of
*tracing elements* (TEs):

- every pixel is scanned once and flows past all TEs;
- each TE holds eight footprints and adds the pixel into whichever of them
  covers it.

Three scheduling tricks cut the number of scanned pixels and hide the cost of
loading footprints into the chain.

The design follows a published FPGA pipeline (DeCalciOn, a 300 MHz
Ultra96 implementation). The sections below say where this RTL follows that
description and where it had to make its own choices.

## Pipeline and clocking

```
sensor bus --> sensor_rx --raw_*--> [motion correction + enhancement, external]
                                           |
                               enh_* + motion vector (mv_r_off, mv_c_off)
                                           v
                                     image_buffer (512x512x8)
                                           | 2 read ports, shifted by the motion vector
                                           v
        host bus --> acc_trace (2 half chains x 16 TEs x 8 slots, 4 passes)
                                           | 1024 x 16-bit traces
                                           v
                                     trace_buffer --> ann_decoder | cnn_decoder | snn_decoder --> dec_bin, dec_valid
```

Everything runs in one core clock domain, meant for 300 MHz. The sensor's pixel
clock, HSYNC and VSYNC are sampled through a three-flop synchroniser and
edge-detected, so the pixel clock must be at most about a third of the core
clock. The tests use 111 MHz against 500 MHz simulated.

The following parts are not in this RTL:

- motion correction;
- image enhancement;
- the embedded ARM processor that configures the design;
- the PCB and the PC user interface.

Their signals are top-level ports:

- **From sensor_rx:** the raw pixel stream goes out on `raw_*`.
- **Into the frame buffer:** the corrected and enhanced stream comes back on
  `enh_*`.
- **Motion vector:** a per-frame vector `(mv_r_off, mv_c_off)`. Every buffer
  read at `(r, c)` returns the pixel at `(r + mv_r_off, c + mv_c_off)`, or 0
  outside the frame. This is how the rigid motion correction is applied.

A wrapper that has no enhancement stage can simply tie `enh_*` to `raw_*`. The
tests do this.

`decalcion_top` sequences a frame as follows:

1. `enh_frame_end` arrives while `CFG_ENABLE` is set and the pipeline is idle.
2. ACC-Trace runs.
3. ACC-Decode runs, using the decoder chosen by `CFG_DEC_SEL`.
4. The result appears as a one-cycle `dec_valid` with `dec_bin` (0..23). For
   ordinal output the raw 12-bit code also appears on `dec_code`.

`latency_cycles` is the number of core cycles from end of frame to
`dec_valid`. A frame that ends while the previous one is still in process is
dropped and counted in `frame_overruns`. The single frame buffer is being read
at that time, so the next frame must not overwrite it before tracing is done.
The sensor's vertical blanking normally makes this impossible.

## Configuration: the host bus

All tables are written by the host while the pipeline is idle, through one
write port: `host_we`, `host_sel` (region), `host_addr` (20 bits) and
`host_wdata` (64 bits). The regions, defined in `decalcion_pkg`, are:

| region | address | data |
|---|---|---|
| `HR_CFG` | 0 passes, 1 enable, 2 ANN inputs, 3 ordinal(1)/categorical(0), 4 decoder (0 ANN, 1 CNN, 2 SNN), 5 N_P, 6 T_S, 7 V_t | value |
| `HR_CMASK` | `id*25 + row` | 25-bit mask row of contour `id` |
| `HR_CCENTER` | `id` | `{valid, R[8:0], C[8:0]}` centre of the 25x25 window |
| `HR_PASS` | `pass*2 + half` | `{row_start, row_end, ff_base[9:0], ff_count[10:0]}` |
| `HR_FF` | `{half, 1'b0, entry[9:0]}` | `{target_r, target_c, forward_r, forward_c}` |
| `HR_W` | weight index in use order | signed 8-bit weight |
| `HR_B` | node index (layer 1, layer 2, output) | signed 32-bit bias |
| `HR_CW` | bit 19 = 0: CNN/SNN fully connected weight index; bit 19 = 1: table entry (conv weight `f*9+a*3+b`, conv bias `54+f`, output bias `60+o`) | weight or 32-bit entry |

Traces of the current frame can be read back through `trace_rd_addr` and
`trace_rd_data`, with one cycle of latency.

### Contour ids

A contour id fixes both where the contour is traced and where its trace lands:

```
id = ((pass*2 + half)*16 + te)*8 + slot          (te = 0..15 within the half chain)
```

The host therefore does the allocation. It must choose the pass in which
each contour is traced, the half chain, the TE and the slot. The rule it must
respect is that **no two contours in the same TE may overlap**, because a TE
reads its masks through a single memory port. When two windows of one TE do
overlap, the lower slot wins and the other contour loses those pixels.

For cell contours, the original system finds such an allocation with a
randomised swap algorithm, offline. For the 32 x 32 grid of 16 x 16 tiles,
the tests use the fixed mapping of the original work:

- tile `(tr, tc)` goes to pass `tr / 8` and slot `tr % 8`;
- its TE is `tc` on even tile rows and `(tc - 8) mod 32` on odd ones;
- each tile is a 25 x 25 window centred at `(16 tr + 8, 16 tc + 8)`, with its
  central 16 x 16 set.

## ACC-Trace

### The tracing element (`trace_element`)

A TE holds eight slots. For each slot it keeps:

- a centre `(R_k, C_k)` and a valid flag, in registers;
- a 16-bit saturating accumulator;
- 25 mask rows of 25 bits, in a local memory of `8 x 25` words with one read
  port.

Three chains pass through one register per TE: the pixel chain (row, column,
pixel value), the load chain and the trace chain. Each runs in one of three
modes:

- **Load:** the load words shift along the chain. After every 16 shifts a
  `commit` makes every TE write the word it now holds into its next local
  address. The controller sends the words for the last TE first.
- **Compute:** every slot compares the incoming pixel's position with its
  window, using `dr = r - R_k + 12` and `dc = c - C_k + 12`. The matching slot
  (at most one, by the allocation rule) addresses mask row `k*25 + dr`. One
  cycle later, bit `dc` of that row gates the pixel, and one cycle after that
  the pixel is added. So each pixel is handled two cycles after it reaches the
  TE, and a new pixel can enter every cycle.
- **Store:** `capture` copies accumulator `k` of every TE into the trace
  chain, and 16 shifts bring them out of the chain end, one per cycle.

### A half chain and its controller (`trace_ctrl`, `trace_chain`)

A half chain is 16 TEs. Its controller runs every pass through these steps:

| phase | what happens | cycles |
|---|---|---|
| request | wait for the shared load path | 0 or more |
| load | clear, then 8 x 25 x 16 words | 3203 |
| compute | scan the pass's rows with fast forward, then drain the chain | scanned pixels + 20 |
| store | 8 slots x 16 traces to the trace buffer | 129 |

### Region segmentation and fast forward (`scan_gen`)

The frame is traced in several passes, and each pass scans only its own
range of rows, `row_start..row_end`, so the passes share the frame between
them. With the tile mapping, each pass covers 128 rows.

Within a pass, background pixels are skipped. The background is every pixel
that no contour of this half chain covers. The host run-length codes it in
scan order into a table of *target-forward* pairs:

- The target is the first background pixel of a run.
- The forward is the first covered pixel after it.
- When the scan pointer reaches the current target, the forward index is
  issued instead, in the same cycle, so the skipped pixels cost nothing.
- A forward that is not later than its target means the run lasts to the
  end of the pass, and the pass ends at that point.

Each half chain has its own table of 1024 entries and its own read port into
the frame buffer.

### Double buffering (`acc_trace`)

The two half chains share one load path from the contour store, which has a
single read port. An arbiter gives the path to one half chain for a whole
load phase; chain 0 wins when both ask. It is released as soon as the last
word is in. The halves fall into a rhythm: one loads while the other scans, so
after the first load most of the 3203-cycle loads are hidden behind compute.
Both halves write traces to the trace buffer through two write ports. The id
layout keeps their addresses apart.

## ACC-Decode: the ANN decoder (`ann_decoder`)

The network is `n_in` inputs (at most 1024), then 32 ReLU nodes, then 32 ReLU
nodes, then the output layer:

- **Ordinal output:** 12 nodes, each compared with 0.5. The 12 bits are read
  as a Johnson code with 24 states. If the leftmost bit is 1, the bin is the
  number of leading ones. If it is 0, the bin is 12 plus the number of leading
  zeros. All zeros is bin 0.
- **Categorical output:** 24 nodes, and the bin is the arg-max. The lowest
  index wins ties.

There is one multiply-accumulate per cycle. The weights sit in memory in the
order they are used, so their address is just a counter. Number formats:

- traces and activations: unsigned 16-bit;
- weights: signed 8-bit with 6 fraction bits;
- biases and accumulator: signed 32-bit.

A hidden node outputs `sat16(ReLU(acc) >> 6)`. An ordinal bit is
`acc >= 2^21`.

Runtime is `32*n_in + 1562` cycles for ordinal output and `32*n_in + 1970`
for categorical. The original kernels report 9840 / 24981 cycles (ordinal)
for 256 / 729 inputs; this design takes 9754 / 24890.

## ACC-Decode alternatives: the CNN and the spiking decoder

The CNN and the spiking decoder read the traces as an `N_P x N_P` image,
where pixel `(i, j)` is trace id `i*N_P + j`. For cell-based decoding the
host orders the cells by activity and allocates their ids to match. For
tiles, the 32 x 32 id grid is used directly.

**`cnn_decoder`** applies six 3x3 filters without padding. Each output is
ReLU-ed, shifted and saturated as in the ANN. The resulting
`6 x (N_P-2)^2` features feed 24 outputs through one fully connected
layer, and the bin is the arg-max. There is one multiply-accumulate per
cycle, and the fully connected weights are stored in use order.
Runtime is `6*M*M*11 + 24*(6*M*M + 2) + 2` cycles, where `M = N_P - 2`:

| N_P | this design | original HLS kernel |
|---|---|---|
| 16 | 41,210 | 65,936 |
| 27 | 131,300 | 240,089 |

**`snn_decoder`** is the same network, converted to integrate-and-fire
neurons with one threshold `V_t`:

1. The convolution is computed once. Each result, including its bias, is the
   constant input current of one hidden neuron.
2. At each of `T_S` steps, every hidden potential adds its current. When a
   potential reaches `V_t`, that neuron spikes and `V_t` is subtracted.
3. Each output neuron adds its bias plus the weight of every hidden neuron
   that spiked in that step, then fires and resets by the same rule. No
   multiplier is needed here.
4. The bin is the output with the most spikes.

`V_t = 2^22` corresponds to 1.0 in the accumulator scale. Runtime is
`6*M*M*11 + T_S*((6*M*M + 1) + 24*(6*M*M + 2)) + 2` cycles. For N_P = 16
and T_S = 8 that is 248,530 cycles, against 278.9k reported for the
original kernel.

The two decoders share the `HR_CW` parameter region. Each keeps its own
copy of the parameters, because each has its own memories.

## Performance at the default size

The end-to-end test runs the tile workload at the full default size:

- 1024 tiles;
- 4 passes, each half chain with 512 fast-forward entries;
- decoding from all 1024 traces.

From end of frame to decoded position with the ANN takes **182,044 cycles,
607 us at 300 MHz**. About 147.7k of those cycles are trace extraction, the
rest is the ANN. In one frame, the halves spend 44k cycles loading while the
other one computes. On the same 1024 traces seen as a 32 x 32 image:

- the CNN frame takes 336,764 cycles (1.12 ms);
- the SNN with 8 steps takes 1,287,508 cycles (4.3 ms).

Sub-millisecond decoding therefore holds for the ANN path.

The original system reports 589 us for trace extraction alone, on a set of
760 cell contours whose positions are not available here. It also reports
sub-millisecond latency overall.

## Where this RTL departs from, or adds to, the original description

The original description gives the architecture of ACC-Trace: the TE with its
Load / Compute / Store modes, the chain, the offset equation, and the three
optimisations. It also gives the shape of the three decoders:

- the ANN's layer sizes and output encodings;
- the CNN's filters and fully connected layer;
- the SNN's integrate-and-fire rule, threshold and spike counting;
- the runtimes of the original kernels.

This design chose the rest:

- all memory layouts and the host bus;
- the load and store protocol (commit/capture pulses) and the 2-cycle compute
  pipeline;
- the id formula and the arbitration rule;
- the end-of-pass rule of the fast-forward table;
- the ANN number formats, its ReLU and its Johnson reading of the ordinal code;
- the CNN's ReLU, biases and schedule;
- the SNN's use of the conv value as its input current, its output bias per
  step and its zero initial potentials;
- the decoder-select register;
- the frame sequencer and the overrun counter;
- one shared frame buffer rather than double-buffered frames.

The decoders are RTL MAC schedules. The original kernels were built with an
HLS tool. ANN cycle counts differ by about 1%. The CNN here is about 1.6 to
1.8 times faster than the original kernel.

Not provided:

- motion correction and enhancement, which enter as ports;
- the contour-allocation algorithm, which is offline software;
- the processor, board and user interface.

## Files

- `rtl/decalcion_pkg.sv`: constants, types, host-bus regions.
- `rtl/sensor_rx.sv`: sensor bus capture.
- `rtl/image_buffer.sv`: frame buffer with motion-shifted reads.
- `rtl/trace_element.sv`: one TE.
- `rtl/trace_chain.sv`: a chain of TEs.
- `rtl/scan_gen.sv`: the scan pointer with region and fast forward.
- `rtl/trace_ctrl.sv`: one half chain and its pass controller.
- `rtl/acc_trace.sv`: both halves, contour store, load arbiter.
- `rtl/trace_buffer.sv`: trace memory.
- `rtl/ann_decoder.sv`: the ANN decoder.
- `rtl/cnn_decoder.sv`: the CNN decoder.
- `rtl/snn_decoder.sv`: the spiking decoder.
- `rtl/decalcion_top.sv`: the whole pipeline.

Each `tb/tb_<block>.sv` is a self-checking test. It ends with a line
`TB_RESULT checks=N failures=M`. `tb_decalcion_top` is the end-to-end test at
the default size. It takes four frames through the pipeline:

- two with the ANN, in ordinal and categorical mode;
- one with the CNN;
- one with the SNN.

Each frame uses its own motion vector. For every frame the test checks all
1024 traces and the decoded bin against models. It also counts fast
forwards, load/compute overlap, passes and an injected overrun. It runs in
about 15 seconds of wall time.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/decalcion_pkg.sv tb/tb_decalcion_top.sv \
          --top-module tb_decalcion_top -o sim
./obj_dir/sim
```

Replace `tb_decalcion_top` with any other testbench name to run that
testbench. `tb_acc_trace` runs a reduced accelerator with 8 TEs, 4 slots,
128 x 128 frames and 2 passes, with random contours.
