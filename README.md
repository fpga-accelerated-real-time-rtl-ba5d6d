# BES edge inference: a streaming MLP for ELM and confinement-regime classification

This is synthesizable SystemVerilog for the FPGA part of a real-time plasma
diagnostic. The design follows the system described in *FPGA-Accelerated
Real-Time Diagnostics at DIII-D Using the SLAC Neural Network Library for ML
Inference* (Dave et al.). A digitizer samples 160 diagnostic channels once per
microsecond. The FPGA keeps 16 Beam Emission Spectroscopy (BES) channels and
cuts them into 48 µs windows of 768 values. A small fully connected network
(768 → 50 → 50 → 4, ReLU) classifies each window. Batches of 18 results go
back to the host, which passes them to the plasma control system.

One task is forecasting edge-localized modes (ELMs), a binary output. The
other is recognising the confinement regime (L-mode, H-mode, QH-mode,
wide-pedestal QH-mode), a 4-class output. The main idea is that both tasks
run on the same hardware. Every weight and bias is held in memories the host
can rewrite at run time, and the number of reported outputs is a register.
Switching tasks, or retraining the model between plasma discharges, therefore
needs no new FPGA build.

The published description gives the data flow, the sizes and the network
shape. It does not give the internals of the inference engine, which comes
from a vendor-HLS library, nor the number formats or the interface formats.
Those parts here are this design's own. They are marked as such below and in
the opening comment of each file.

## Data flow

```
 host (PCIe)                      FPGA, one clock domain                           host (PCIe)
 ───────────      ┌──────────────┐  8 features  ┌──────────────────────────┐  4 results  ┌────────────┐
 dig_* 8 ch/beat ─▶│ bes_preproc  │────/clock───▶│ snl_mlp                  │──/frame────▶│ post_proc  │─▶ res_*
 20 beats/slice    │ 160 → 16 ch, │              │ dense 768→50 ReLU        │             │ 18 events  │  one beat
                   │ mask, 48-slice│             │ dense  50→50 ReLU        │             │ → 1 block  │  per event
                   │ frames       │              │ dense  50→4  ReLU        │             └────────────┘
                   └──────────────┘              └──────────────────────────┘
 cfg_* ──────────── weights, biases, channel map, input mask, number of active outputs ───────────────▶
```

All links between the blocks are valid/ready streams, in the style of
AXI-Stream. A beat moves on a clock edge where both `valid` and `ready` are
high. A beat that is offered stays unchanged until it is taken, and the RTL
asserts this on every output. Back-pressure goes all the way up the chain. If
the host stops taking results, the network fills and then stops taking
features, and the pre-processor finally drops `dig_ready`.

## From digitizer slice to network frame (`bes_preproc`)

A time slice is one sample of each of the 160 channels. It arrives as 20
beats of 8 consecutive channels, 18-bit signed, with `dig_last` on beat 20.
Channels 96–159 are taken to be the 64 BES channels.

- **Selection.** Sixteen slots each hold a channel map entry, a BES channel
  number from 0 to 63. A slot copies its sample while the beat holding that
  channel passes. After reset the map is every fourth BES channel (0, 4, …,
  60). The host can point any slot at any BES channel, for example to route
  around a failed sensor.
- **Input mask.** A 16-bit mask with one bit per slot. A masked slot feeds
  zero to the network. This is how unused inputs are switched off without
  changing the hardware.
- **Conversion.** The feature is the sample's top 16 bits (`sample >>> 2`).
- **Framing.** After the 20th beat the 16 slot values move to an output
  buffer and leave as 2 beats of 8 features, while the next slice is
  captured. Features are ordered by time: feature `t*16 + k` is slot `k` of
  slice `t`. Forty-eight consecutive slices make one 768-feature frame
  (`m_last`), and 18 frames make one block (`m_blk_last`). Windows do not
  overlap.

The pre-processor can stall only on the last beat of a slice, and only if
the previous slice has not yet left.

## The network engine (`dense_layer`, `snl_mlp`)

This is the part the published description leaves most open. The engine
here is the simplest one that streams at the input rate.

**One layer.** A `dense_layer` holds one accumulator per neuron. Each input
beat of `IN_LANES` features is multiplied against the matching `IN_LANES`
weights of all `N_OUT` neurons in the same clock, and the products are added
into the accumulators. The input vector itself is never stored. On the
vector's last beat, each neuron's sum gets its bias and is shifted back to
the feature format. It then passes through ReLU, is saturated to 16 bits and
is written to an output buffer. The accumulators clear in the same clock, so
the next vector can start at once. The output buffer drains `OUT_LANES`
values per clock. A layer stalls only when a vector finishes while the
previous result is still in the buffer.

**Three layers in a pipeline:**

| layer | inputs | neurons | input lanes | multipliers | clocks per frame | output |
|---|---|---|---|---|---|---|
| 1 | 768 | 50 | 8 | 400 | 96 | 50 values, 1 per clock |
| 2 | 50 | 50 | 1 | 50 | 50 | 50 values, 1 per clock |
| 3 | 50 | 4 | 1 | 4 | 50 | 4 values in one beat |

Up to three frames are in flight, one per layer. The engine takes a new
frame every 96 clocks, limited by layer 1.

**Arithmetic.** Features, weights and biases are signed 16-bit fixed point
with 10 fraction bits, so 1.0 is 1024. Sums are exact in 48 bits. A layer
output is

```
y = sat16( relu( floor( (Σ w·x + b·2^10) / 2^10 ) ) )
```

A network trained in floating point must be quantised to this format before
its parameters are loaded. Because the weights are plain memories, a
different format only means changing `FRAC_W` and `DATA_W` in `snl_pkg`.

**Output layer.** It always has four neurons and ReLU; the network diagram
of the published system shows ReLU on the output layer too. For the binary
ELM task the host loads the task's weights into neuron 0 and sets one active
output. Neurons 1–3 are then ignored.

**Storage.** The design holds 41,100 weights and 104 biases, about 658 kbit.
Each neuron has its own bank of `N_IN/IN_LANES` words, and each word holds
the `IN_LANES` weights that meet one input beat. All banks of a layer are
read in the same clock. On an FPGA this maps to 50 narrow, deep memories for
layer 1, or to distributed RAM.

## Run-time reconfiguration

The host writes one 32-bit word per clock on `cfg_we/cfg_addr/cfg_data`.
Bits `[19:16]` of the address select a region and bits `[15:0]` give the
offset within it. Values use the low 16 bits of `cfg_data` unless stated
otherwise.

| region | contents | offset |
|---|---|---|
| 0 | layer 1 weights | `o*1024 + i` (neuron `o` < 50, input `i` < 768) |
| 1 | layer 1 biases | `o` |
| 2 | layer 2 weights | `o*64 + i` (`i` < 50) |
| 3 | layer 2 biases | `o` |
| 4 | layer 3 weights | `o*64 + i` (`o` < 4, `i` < 50) |
| 5 | layer 3 biases | `o` |
| 6 | pre-processor | 0–15: channel map (BES channel 0–63); 16: input mask |
| 7 | post-processor | 0: number of active outputs, 1–4 (other values ignored) |

In general the weight offset is `{o, i}`, with `i` taking the low
`clog2(N_IN)` bits. Writes take effect at the next clock edge and are not
blocked during a computation. The host should reload between blocks, that
is after it has received the last result of a block and before it sends the
first sample of the next. A full reload is 41,204 writes, or 0.25 ms at
6 ns per write. A task switch that changes only the output layer and the
active-output count is 205 writes.

## Result blocks (`post_proc`)

The post-processor gathers the result vectors of 18 frames and then sends
them as 18 beats, one per event. Each beat carries:

- four 16-bit lanes (`res_data`);
- `res_keep`, marking the active lanes (inactive lanes are sent as zero);
- the event index (`res_evt`, 0–17);
- `res_last`, set on event 17.

It does not take new results while it is sending a block. During those
≥ 18 clocks the network waits, which costs nothing at the real data rate.

## Timing

With the paper's 6 ns clock (166.7 MHz), no stalls, and the sizes above:

| interval | clocks | time |
|---|---|---|
| network: first feature of a frame in → its result valid | 196 | 1.18 µs |
| network: frame interval (throughput) | 96 | 0.58 µs |
| last sample beat of a block in → first result beat out | 103 | 0.62 µs |
| one slice into the pre-processor | 20 | 0.12 µs (a slice is 1 µs of data) |
| a whole block, if the host sends samples back to back | 17,383 | 104 µs |

The clock counts are exact and checked by the testbenches. A clock count
means the number of rising edges from the one that accepts the first beat to
the one after which the output is valid, counting the first.

## How this relates to the published system

What this RTL takes from the published description:

- the chain of pre-processor, MLP and post-processor;
- 160 channels, 64 of them BES, 16 selected;
- 48-slice windows and 18 events per inference call;
- 8 features per clock into the network;
- the 768-50-50-{1, 4} network with ReLU;
- run-time weight and bias reloading;
- input and output masking, so one network serves a 1-output and a
  4-output task;
- blocks of 4 outputs × 18 events back to the host;
- the 6 ns clock target.

What is this design's own: where the BES channels sit among the 160
(96–159), the channel map and its reset value, the 16-bit conversion and
fixed-point format, the feature order, non-overlapping windows, the
stream and block formats, the configuration bus and address map, the
per-neuron weight banks, the lane widths between layers, the synchronous
active-low reset, and the single block buffer in the post-processor.

Points where the description is ambiguous or disagrees with itself:

- **Parallelism at the network input.** One sentence says eight features per
  clock. Others say eight feature vectors at a time, or parallelism across 8
  channels. This design takes eight features of one frame per clock.
- **Latency.** Three figures are quoted: 5.28 µs for the 4-class model,
  "4.4 µs scale" and "just over 5 µs". None says which interval it measures.
  This engine's frame latency is 1.18 µs at 6 ns. Its organisation is not
  the one the original HLS library produced, so its latency is not meant to
  match.
- **Resources.** The original used about 5 % of the DSP blocks. This engine
  uses 454 multipliers, with 400 of them in layer 1. Against the 5,520 DSP
  slices of a KU115-class device (a data-sheet figure, not one from the
  paper) that is about 8 %. Reducing layer 1 to `N_OUT/2`
  neurons per beat would halve that, at the cost of a 192-clock frame
  interval. This RTL does not do it.
- **Target device.** The description names the board as KCU1500, KCU115
  and KCU105 in different places, and the device as Kintex-7. Nothing in
  this RTL depends on the device.
- **Output activation.** The text says only that the output layer has 1 to
  4 neurons. The network diagram shows ReLU, which this design follows. Set
  `RELU_OUT = 0` on `snl_mlp` for a linear output.

Outside this RTL: the digitizer, the host software that forwards fixed
windows of samples, the PCIe/DMA endpoint, and the host, InfiniBand and
plasma-control side that consume the results. The PCIe streams and the
configuration path appear as ports of `snl_bes_top`.

## Files

| file | contents |
|---|---|
| `rtl/snl_pkg.sv` | sizes, number format, configuration bus type and region codes, `sat16` |
| `rtl/bes_preproc.sv` | channel selection, mask, framing |
| `rtl/dense_layer.sv` | one dense layer with reloadable weights and biases |
| `rtl/snl_mlp.sv` | the three-layer network |
| `rtl/post_proc.sv` | result block assembly and output masking |
| `rtl/snl_bes_top.sv` | top level |
| `tb/mlp_ref_pkg.sv` | integer reference model of a dense layer, for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

Sizes live in `snl_pkg` and in the modules' parameters, and all defaults are
the full design. `bes_preproc` also takes `BES_BASE` and lane counts as
parameters.

## Simulating

Any testbench builds with plain Verilator 5, for example the end-to-end
one:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl \
  rtl/snl_pkg.sv tb/tb_snl_bes_top.sv --top-module tb_snl_bes_top
./obj_dir/Vtb_snl_bes_top
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops on a
watchdog if something hangs. Each compares the RTL against arithmetic
computed independently in the testbench.

- `tb_dense_layer`: two small layers, one with ReLU and one without, fed
  random data with random input gaps and output back-pressure. It reloads
  the weights between passes, makes sure saturation and ReLU clipping both
  occur, and checks the latency.
- `tb_bes_preproc`: full channel counts with short frames. It covers the
  reset map, a written map with a mask under stalls, the frame and block
  markers, and the latency.
- `tb_post_proc`: four blocks with 4, 1, 2 and 4 active outputs, plus
  out-of-range writes that must be ignored. It checks the keep mask, event
  index, that nothing is taken while sending, and the latency.
- `tb_snl_mlp`: the full-size network. It checks the 196-clock latency,
  back-to-back frames with heavy back-pressure (stalls are counted), and a
  reload of the output layer for the binary task.
- `tb_snl_bes_top`: the whole design at full size, with nothing scaled
  down. It writes a channel map, a mask and a 4-class model, runs one block
  and checks the 103-clock latency. It then switches to the binary task and
  runs two blocks back to back while the host holds off results, so the
  digitizer stream is stalled. Every result of every event is checked, and
  each mechanism (input stall, result back-pressure, masking, ReLU clip,
  task switch, block completion) must occur at least once. It runs in under
  a second.
