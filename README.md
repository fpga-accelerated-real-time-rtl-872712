# Real-time BES inference pipeline for tokamak plasma control

Edge-localised modes (ELMs) and changes of confinement regime in a tokamak
plasma show up early in the density fluctuations that Beam Emission
Spectroscopy (BES) measures at the plasma edge. Acting on them needs a verdict
within microseconds of the measurement, which is too fast for a CPU or GPU
sitting behind a software stack. This RTL puts a small neural network on an
FPGA right in the diagnostic data path: raw digitizer samples go in, and a
block of class scores for the plasma control system comes out.

The design follows the FPGA data path of the BES inference node deployed at the
DIII-D tokamak with the SLAC Neural Network Library (Dave et al., "FPGA-Accelerated
Real-Time Beam Emission Spectroscopy Diagnostics at DIII-D Using the SLAC Neural
Network Library for ML Inference"). That system has three parts:

* a **pre-processor** that keeps 16 BES channels out of a 160-channel
  digitizer stream and cuts them into frames;
* a **fully connected network** of 768 inputs, two hidden layers of 50 ReLU
  neurons, and 1 to 4 outputs;
* a **post-processor** that gathers the results of 18 frames into one block
  for the PCIe link to the control system.

The network's weights and biases can be **reloaded while it runs**. Because of
this, one fixed circuit serves several tasks. One example is 4-class
confinement-regime classification: L-mode, H-mode, quiescent H-mode and
wide-pedestal QH-mode. Another is binary detection of breakthrough ELMs.

The publication describes the parts, their sizes and how they fit together. It
does not describe the insides of the network engine, which come from the SNL
high-level-synthesis library. Everything below the block level is therefore
this design's own: number formats, parallelism, handshakes, buffering and the
parameter bus. Each such choice is marked below and in the file headers.

## Data path

```
 digitizer stream        bes_preprocessor                snl_mlp_core                   bes_postprocessor
 160 ch x 18 bit   --> [ bes_channel_select ] --> 8 feat/clk --> [ L1 768->50 ] -> ser ->     [ 18 frame     ] --> 18 x 64-bit
 1 sample / clock      [ bes_frame_buffer   ]                   [ L2  50->50 ] -> ser ->     [ result buffer ]     words to
                        16 of 160 kept, 2 banks                 [ L3  50->4  ]                                     PCIe link
                        of 18 x 768 features
 host write bus   --> snl_param_loader --> weights/biases of L1..L3, channel table, number of outputs
```

Everything runs on one clock with an active-low asynchronous reset. The target
clock is 6 ns (166.7 MHz), which is the published target.

| file | role |
|---|---|
| `rtl/snl_pkg.sv` | sizes, number formats, address map, `requant` |
| `rtl/bes_channel_select.sv` | keeps the BES channels named in a run-time table, converts to fixed point |
| `rtl/bes_frame_buffer.sv` | two-bank batch buffer, streams 8 features per clock |
| `rtl/bes_preprocessor.sv` | the two stages above |
| `rtl/snl_dense_layer.sv` | one fully connected layer with writable weight store |
| `rtl/snl_vec_serializer.sv` | turns a layer's output vector into the next layer's input stream |
| `rtl/snl_mlp_core.sv` | the 768-50-50-4 network |
| `rtl/snl_param_loader.sv` | decodes host writes into layer writes and configuration registers |
| `rtl/bes_postprocessor.sv` | collects 18 results, sends them as a block |
| `rtl/bes_ml_top.sv` | the whole data path |

## Input stream and frames

The digitizer delivers a *time slice* every microsecond: one sample from each
of its 160 channels, which carry ECE, BES and CO2-interferometer signals. Here a
slice arrives as 160 consecutive beats, one 18-bit signed sample per clock, in
channel order, with `dig_last` on channel 159. At 6 ns, 160 beats take 0.96 µs,
so the 1 MHz slice rate fits with about 6 idle clocks to spare per slice. The
stream cannot be stalled. Its form (one sample per clock with an end marker) is
this design's choice. The publication only says that the digitizer data reaches
the FPGA through host software in fixed time windows.

`bes_channel_select` keeps the 16 BES channels. Which digitizer channel feeds
feature position *j* is set by a run-time table `chmap[j]`. After reset, the
table holds channels 0..15. A kept 18-bit code becomes a 16-bit activation by an
arithmetic shift right by 2. The activation format has 8 fraction bits, so one
unit of activation equals 1024 ADC codes. If `dig_last` does not land on
channel 159, the sticky `slice_err` flag is set.

A **frame** is 48 consecutive slices of the 16 channels, 768 features, ordered
slice-major: feature `slice*16 + position`. A **batch** is 18 consecutive,
non-overlapping frames, or 864 µs of data. The network is always handed a whole
batch. This mirrors the deployed system, where the upstream software delivers
data in fixed windows. The network itself does not need it.

`bes_frame_buffer` holds two batches:

* The bank being filled is written one sample at a time.
* A full bank is read out one row of 8 features per clock: 96 beats per frame,
  1728 per batch. The row carries `out_frame_last` and `out_block_last`.
* Filling and reading swap banks at batch boundaries.
* If a batch starts while both banks are still full, that whole batch is
  dropped. The keep-or-drop decision is made only at batch boundaries, so the
  frames stay aligned. Dropped batches are counted in `overflow_cnt`.

Ping-pong banks, the drop policy and the slice-major order are this design's
choices.

## The network engine

This is the part that the publication leaves to the SNL library. Here it is
built as three layer engines in a chain, all working at the same time.

**Number formats** (this design's choice; the publication gives none):

| quantity | format |
|---|---|
| activations | signed 16 bits, 8 fraction bits (Q8.8) |
| weights, biases | signed 16 bits, 12 fraction bits (Q4.12) |
| accumulator | signed 40 bits, 20 fraction bits |

A neuron computes `bias << 8 + Σ x·w` in the accumulator. The result is then
shifted right by 12 with floor rounding. ReLU clips it at zero on the hidden
layers. Finally it saturates to 16 bits. The output layer has no activation, so
its values are raw scores. A host can take the arg-max over them, or apply a
sigmoid to the single score of a binary task.

**Layer engine** (`snl_dense_layer`). A layer keeps one accumulator per neuron
and updates all of them on every input beat. A beat carries `PAR` inputs, and
each neuron adds `PAR` products per beat. The weights are stored so that one
row holds everything a beat needs: row *k* holds `w[n][k*PAR+l]` for all
neurons *n* and lanes *l*. Each clock, one row is read. The first beat of a
frame loads the bias into the accumulators. With the last beat, the results go
into an output register.

If the output register is still occupied, only the *last* beat of the next
frame is held back. The next frame can still accumulate while the output waits.

| layer | shape | inputs per clock | multipliers | clocks per frame |
|---|---|---|---|---|
| L1 | 768 → 50, ReLU | 8 | 400 | 96 |
| L2 | 50 → 50, ReLU | 1 | 50 | 50 |
| L3 | 50 → 4, none | 1 | 4 | 50 |

Between layers, `snl_vec_serializer` takes the 50-value result vector in a
single handshake. It then sends the values to the next layer one per clock.

**Timing.** L1 sets the rate: it takes 96 clocks, and the other stages are
shorter. The core therefore accepts a new frame every 96 clocks, and while L1
works on frame *f*, L2 and L3 work on frames *f−1* and *f−2*. One frame's scores
appear 96 + 1 + 50 + 1 + 50 = **198 clocks** (1.19 µs) after its first beat is
accepted. A batch of 18 frames finishes 17·96 + 198 = **1830 clocks** after its
first beat. From the last digitizer sample of a batch to the first word of its
result block takes **1833 clocks** (11.0 µs at 6 ns). That figure adds one
register in each of the two pre-processor stages and one in the post-processor.

**Cost.** L1 has 400 multipliers and 50 forty-bit adder trees. L1 holds 38,400
16-bit weights in storage that is read a whole row (6,400 bits) at a time, so
it maps to registers or LUT RAM rather than to block RAM. The published
implementation reports 5 % of the DSPs and 1 % of the block RAM of its FPGA. It
therefore shares multipliers more than this one does. Set L1's `PAR` lower in
`snl_mlp_core` to trade throughput for multipliers. Each layer keeps working for
any `PAR` that divides its input count.

## Reloading parameters and switching tasks

The host writes one 16-bit word per clock on `p_wr_en / p_addr / p_data`.
`snl_param_loader` decodes each word and writes it into one layer's store a
clock later. The address map (17-bit word addresses) is in `snl_pkg`:

| address | contents |
|---|---|
| 0 … 38399 | L1 weight, `neuron*768 + input` |
| 38400 … 38449 | L1 bias |
| 38450 … 40949 | L2 weight, `neuron*50 + input` |
| 40950 … 40999 | L2 bias |
| 41000 … 41199 | L3 weight, `neuron*50 + input` |
| 41200 … 41203 | L3 bias |
| 65536 + j, j < 16 | BES channel table entry *j* |
| 65552 | number of active outputs, clamped to 1..4 |

Other addresses are ignored and counted in `bad_addr_cnt`.

A full network is 41,204 words and loads in 41,204 clocks (0.25 ms). Switching
between the 4-class task and the binary ELM task needs less. Load the new
output layer (204 words), set the output count, and also reload the hidden
layers if the two tasks use different ones. Writes take effect at once and are
not synchronised to frames. The host should therefore reload between batches.
In the deployed system, the host knows when batches go out.

The address map, the bus, the output-count register and the clamping are this
design's choices. Run-time reloading itself and the 1–4 outputs come from the
publication.

## Result blocks

`bes_postprocessor` stores each frame's scores. After the 18th frame, it sends
18 words of 64 bits on `res_*` (valid/ready), with `res_last` on the last word.
In word *f*, bits `[16k+15:16k]` hold output *k* of frame *f*. Outputs at or
above the active output count are zero. While a block is being sent, the
post-processor takes no new results. A PCIe side that is slow or stalled
therefore backs up through the network into the batch buffer, and in the end
causes an overflow drop rather than corrupt data. The word layout is this
design's own. The publication only says that the results of a batch are sent
as one block over Dolphin PCIe to the control system.

## How this compares with the published figures

* **Sizes.** 160 → 16 channels, 48 × 16 features, 18 frames, 8 features per
  clock, 768-50-50-(1..4) and the 6 ns clock are all as published and are the
  RTL defaults.
* **Latency.** The publication quotes 5.28 µs (its synthesis table) and
  "4.4 µs" (its introduction) for the network. It does not say whether either
  figure is per frame or per batch. This design needs 1.19 µs for one frame and
  11.0 µs for a batch of 18 frames. Streaming 18 × 768 features at 8 per clock
  alone takes 1728 clocks (10.4 µs), so no design with that input width can
  take in a whole batch in 5.28 µs. The published figure is probably per frame,
  or per some other unit of work.
* **Device.** The publication names both a KCU1500 board and a KCU105 board.
  The RTL targets no device.
* **Not built.** The digitizer cards, the host software that feeds the FPGA,
  the Dolphin PCIe link and the control-system host all lie outside this
  design. Their signals are the ports of `bes_ml_top`. No training flow is
  included: weights come from the host.

## Simulating

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. They compare
against `tb/tb_ref_pkg.sv`, an integer model written separately from the RTL.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/snl_pkg.sv tb/tb_ref_pkg.sv tb/tb_bes_ml_top.sv --top-module tb_bes_ml_top
./obj_dir/Vtb_bes_ml_top
```

The two packages are named first. Verilator finds every module it needs in
`rtl/` and `tb/` by its file name. For another testbench, change the last file
and the top name. `-Wno-fatal` keeps width warnings in the testbenches from
stopping the build.

| testbench | what it shows |
|---|---|
| `tb_bes_channel_select` | selection, conversion and position for random tables; table change at run time; `slice_err` |
| `tb_bes_frame_buffer` | reduced batch size; feature order and flags; ping-pong; overflow drops whole batches and recovers; 1 clock from last sample to first beat |
| `tb_bes_preprocessor` | full size; two batches from a raw 160-channel stream; 1728 beats per batch |
| `tb_snl_dense_layer` | two small layers, PAR 4 and 1, ReLU and none, saturation, back-pressure, reload; result NIN/PAR clocks after the first beat |
| `tb_snl_vec_serializer` | 12 values at 3 per beat; order, last flag, gapless back-to-back vectors, back-pressure |
| `tb_snl_mlp_core` | full network with random weights; 198-clock latency, one frame per 96 clocks, back-pressure |
| `tb_snl_param_loader` | every region of the address map, configuration registers, clamping, bad addresses |
| `tb_bes_postprocessor` | block layout, output masking for 4, 1 and 2 outputs, back-pressure |
| `tb_bes_ml_top` | whole design at its defaults (about 850,000 clocks, a few seconds) |

`tb_bes_ml_top` loads a random network and channel table over the parameter
bus. It runs one batch and checks the result block and the 1833-clock latency.
Then, while the next batch arrives, it switches to a one-output task, and checks
that batch's block under random back-pressure. Next it holds the output off
while four more batches arrive: the network stalls, the two banks fill, and the
fourth batch is dropped. Once released, the three kept blocks must arrive intact
and in order. Last, it sends a bad slice to trigger `slice_err`. It counts each
of these mechanisms and fails if any one never happened.

## Changing it

All sizes live in `snl_pkg` and are passed down as module parameters, so the
network can be changed in one place. This includes the frame length, channel
count, batch size, layer widths, `IN_PAR` and the number formats. The address
map derives from the layer sizes. Several rules must hold:

* `N_BES` must be a multiple of `IN_PAR`, because a slice fills whole rows.
* Each layer's input count must be a multiple of its `PAR`.
* L2 and L3 should take no more clocks per frame than L1, or they, rather than
  L1, will set the frame rate.
* If the ADC becomes narrower than the activation width, `bes_channel_select`
  needs a different conversion.
