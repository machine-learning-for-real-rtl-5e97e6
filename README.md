# Neural-network energy reconstruction for liquid-argon calorimeter channels

Every 25 ns the LHC collides proton bunches, and each cell of the ATLAS liquid-argon
calorimeter turns the energy deposited in it into an analogue pulse that is sampled
at the same 40 MHz. One pulse lasts for many bunch crossings (BCs): it rises over two
or three samples, then undershoots below zero for about twenty more. At high-luminosity
pileup a new deposit often arrives while the previous pulse is still decaying, so the
samples of several crossings add up. A linear optimal filter with a peak finder then
gives the wrong energy, or gives it to the wrong crossing.

This RTL replaces that filter with small neural networks that run continuously on an
FPGA. For every channel and every crossing it produces one transverse-energy value.
Five networks are provided, and one of them is chosen when the design is built:

| `NN` | network | history per step | coefficients | engine latency |
|---|---|---|---|---|
| `NN_4CONV` (default) | CNN: pulse tagging + 2 energy conv layers | 13 samples | 88 | 4 clk |
| `NN_3CONV` | CNN: pulse tagging + 1 energy conv layer | 13 samples | 64 | 3 clk |
| `NN_VANILLA` | ReLU RNN over a 5-sample sliding window | 5 samples | 89 | 6 clk |
| `NN_LSTM_SLIDING` | LSTM over a 5-sample sliding window | 5 samples | 491 | 11 clk |
| `NN_LSTM_SINGLE` | LSTM, one step per BC, state kept per channel | 1 sample + state | 491 | 3 clk |

Every engine accepts a new input every clock (initiation interval 1). The processing
clock runs several times faster than 40 MHz, so one engine serves several channels in
turn. The design is built for six channels per CNN engine and fifteen per vanilla-RNN
engine.

One processing FPGA handles the cells of three or four front-end boards, 384 or 512
cells. The top level, `lar_fpga_top`, covers `NCELLS` = 384 cells by default. It uses
64 lockstep copies of the six-channel 4-Conv engine group `lar_nn_top`. For
comparison, the published Stratix-10 builds were estimated to fit at most 352 cells
(4-Conv), 390 (3-Conv) or 576 (vanilla RNN) on one device. So 384 cells with 4-Conv
is at or past that limit, and 512 cells call for the vanilla RNN. Whether this RTL
fits a given device has not been measured.

The published frequencies also disagree with each other. The text gives 480–600 MHz for
the single-channel builds, while the table lists 641 MHz for the vanilla RNN. Only the
clock-rate requirements (six or fifteen clocks per crossing) enter this design.

## Data flow

```
             bc_valid, adc[NCH]                      cfg_we/addr/wdata
                    |                                       |
              +-------------+                         +-----------+
              | channel_mux |  per-channel history    | coef_bank |
              +-------------+  (NCH x window)         +-----------+
                    | one channel per clock: (ch, window)   | coef[]
              +---------------------------------------------------+
              | engine: cnn_engine | vanilla_rnn_engine |         |
              |         lstm_sliding_engine | lstm_single_engine  |
              +---------------------------------------------------+
                    | (ch, energy, tag) per clock
              +---------------+
              | channel_demux | --> frame_valid, et[NCH], tag[NCH]
              +---------------+
```

`lar_nn_top` wires these blocks together for one group of `NCH` channels.
`lar_fpga_top` then places ceil(`NCELLS`/`NCH`) such groups side by side:
- Cell *k* goes to group *k*/`NCH`, channel *k* mod `NCH`.
- Spare channels of the last group get zero samples, and their results are dropped.
- All groups share `bc_valid` and so run in lockstep.
- Each group has its own coefficient bank. A write goes to the group selected by
  `cfg_eng`, or to all groups when `cfg_bcast` is set, so cells with different pulse
  shapes can get their own trained coefficients.
- `frame_valid` pulses when every group has finished the frame.
- `sync_err` flags a group that has fallen out of step, which should never happen.

The samples arrive as frames: on `bc_valid`, all `NCH` channels present the sample of
the current crossing together. The optical links that deliver the samples and the
trigger interface that takes the results are not part of this RTL. The top exposes
their signals as ports.

## Number format

All samples, activations and coefficients use one signed 16-bit fixed-point format
with 10 fractional bits (`lar_pkg::fx_t`). This covers about ±32 in steps of 1/1024.
The samples are assumed to be calibrated and pedestal-subtracted, in GeV.

A multiply-accumulate forms full 32-bit products and sums them in a 40-bit
accumulator, starting from the bias shifted left by 10. The accumulator is then shifted
right by 10 bits (arithmetically, which rounds toward minus infinity) and saturated to
16 bits.

Sigmoid and tanh come from a 256-entry table (`act_lut`):
- The input is rounded to the nearest 1/16 and clipped to [-8, 8).
- Each entry holds the exact function at that point, rounded to `fx_t`.
- The table is computed at elaboration from `$exp`, so no data file is needed.

Quantisation and table lookup are why hardware results differ slightly from a
floating-point model of the same network. The widths, step and table size are
choices of this design. Change `DW`, `FRAC` and `ACCW` in `lar_pkg` to explore others.

## The convolutional networks

The CNN works in two parts, each trained for its own job.

**Pulse tagging** (`cnn_tagging`) decides, for each crossing, how likely it is that a
significant deposit (above three times the noise) starts there:
- Conv 1: kernel 3, 5 feature maps, ReLU.
- Conv 2: kernel 6, one output map, sigmoid.

One tag therefore depends on 3 + 6 - 1 = 8 consecutive samples.

**Energy reconstruction** (`cnn_energy`) receives the tag probabilities together with
the samples. It stacks them as two input channels: channel 0 holds the samples and
channel 1 the tags.
- 4-Conv follows with Conv 3 (kernel 4, 3 feature maps, ReLU) and Conv 4 (kernel 3,
  one output, linear).
- 3-Conv uses a single linear layer of kernel 6.

Either way, the energy needs 6 consecutive tags. The receptive field is therefore
8 + 6 - 1 = 13 samples.

Windows, not streams: a CNN can be evaluated as a stream that stores every layer's
output. With multiplexing, that would need per-channel storage inside every layer.
Instead, `cnn_engine` receives the whole 13-sample window of a channel each clock and
computes every intermediate value that window needs:
- 11 positions × 5 maps for Conv 1;
- 6 tags;
- 3 positions × 3 maps for Conv 3;
- one energy.

Some products that a streaming version would reuse are recomputed. In exchange, the
only per-channel state is the sample history held in the multiplexer.

Alignment inside the engine: window position 12 is the current sample, and the six
tags cover positions 7..12. Tag *j* is paired with the newest sample of its own 8-sample
tagging window, and the six newest samples are delayed by two clocks to meet the tags.
The engine also outputs the tag of the current sample.

The network's training decides which crossing the energy output refers to. The
hardware only defines that the result belongs to the window that ends at the current
sample.

Coefficient layout (`coef_bank` addresses). Each layer stores its weights first, indexed
(output map, input channel, tap), then one bias per output map:

| 4-Conv addresses | content |
|---|---|
| 0..14, 15..19 | Conv 1 weights (map, tap), biases |
| 20..49, 50 | Conv 2 weights (map, tap), bias |
| 51..74, 75..77 | Conv 3 weights (map, channel 0 = sample / 1 = tag, tap), biases |
| 78..86, 87 | Conv 4 weights (map, tap), bias |

For 3-Conv, addresses 51..62 hold the single energy layer's weights (channel, tap) and
address 63 its bias.

## The recurrent networks

**Sliding window.** Each step looks at the channel's last five samples, BC *n*-4 to *n*.
It runs them through five copies of the recurrent cell, starting from a zero state, and
a dense layer maps the last state to one energy. Following the source's sliding-window
picture, that energy belongs to the second crossing of the window, BC *n*-3. This leaves
one sample of history before the deposit and three after it.

The five time steps are unrolled into a pipeline, which gives an initiation interval
of 1:
- Step *t* receives sample *t*, delayed to meet the state computed so far.
- All steps share one set of coefficients.

The two variants are:
- Vanilla RNN (`rnn_cell`): h' = ReLU(Wx·x + Wh·h + b). It has H = 8 state units, one
  clock per step, and latency 6.
- LSTM (`lstm_cell`): the usual input, forget, cell and output gates (sigmoid, sigmoid,
  tanh, sigmoid), with c' = f·c + i·g and h' = o·tanh(c'). It has H = 10 state units,
  two clocks per step, and latency 11.

**Single cell** (`lstm_single_engine`). The LSTM takes exactly one step per new sample
and carries its state (h, c) from one crossing to the next, so there is no window. When
the cell is shared by several channels, each channel's state sits in a per-channel
register file:
- the state is read when the channel's sample enters;
- it is written back two clocks later, when the cell has finished.

A channel must therefore not return within two clocks. The top makes sure of this: for
this network it never accepts frames less than 3 clocks apart. The engine also checks
it with an assertion. Reset clears all states.

Coefficient layouts:
- Vanilla: `wx[H]`, `wh[H*H]` (row = unit, column = previous unit), `b[H]`, then the
  dense layer `wd[H]`, `bd`.
- LSTM: for each gate in the order i, f, g, o: `w[H]`, `u[H*H]`, `b[H]`. Then `wd[H]`,
  `bd`.

## Multiplexing, frames and timing

The processing clock runs faster than the 40 MHz crossing rate. A multiplicity of 6
needs at least 240 MHz, and fifteen (vanilla) needs 600 MHz.

`channel_mux` latches a frame on `bc_valid`. Over the following `NCH` clocks it issues
channel 0, 1, …, `NCH`-1, one per clock. Each time it shifts the channel's new sample
into that channel's history and sends out the window.

The next frame is accepted in the clock that issues the last channel, or later. It is
also never accepted sooner than `MIN_PERIOD` clocks after the previous frame (`NCH`, or 3
for a single-cell LSTM with fewer than 3 channels). A frame that comes earlier is
dropped: `overflow` is set (sticky) and `overflow_cnt` counts it. This means the clock
is too slow for the chosen multiplicity.

`channel_demux` collects the per-channel results. The result of the last channel closes
the frame: `et[]` and `tag[]` update together and `frame_valid` pulses. `frame_err`
pulses instead if a channel was missing or repeated, which normal operation never
produces.

Latency from `bc_valid` to `frame_valid` is `NCH` + engine latency + 2 clocks. For the
default (4-Conv, 6 channels) that is 12 clocks, or 50 ns at 240 MHz. The latency
budget quoted for this system is about 150 ns.

Coefficients are loaded by writing `cfg_wdata` to `cfg_addr` with `cfg_we`, one per
clock. Writes beyond the network's coefficient count are ignored. All coefficients are
zero after reset.

## How this relates to the published implementation

What follows the source:
- The CNN geometry: kernels 3/6 and 4/3, 5 and 3 feature maps, tag and sample
  concatenation, 13-sample receptive field.
- The split into tagging and energy networks.
- The ReLU vanilla RNN.
- The sigmoid/tanh LSTM and its sliding-window and single-cell uses.
- The 5-sample window with its output crossing.
- Table-based activations.
- Multiplicities of 6 (CNN) and 15 (vanilla RNN).
- Initiation interval 1 for the CNNs and the sliding RNNs.

This design's own choices:
- All numeric formats and table sizes.
- The state sizes H = 8 and H = 10.
- The hidden and output activations of the CNN (ReLU, sigmoid tag, linear energy).
- The kernel of 3-Conv's single energy layer (6).
- The tag/sample alignment.
- The dense layers being linear.
- Run-time coefficient loading.
- The frame interface and the overflow policy.
- The pipelining: one register stage per layer or RNN step.

Latency and throughput differ from the source's own builds. Those builds took 58–62
clocks (CNN, VHDL) and 206–363 clocks (RNN, high-level synthesis) at 480–640 MHz. The
pipelines here are much shorter, with a full layer of multiply-adds per stage, so they
will not reach those clock rates unless they are re-pipelined.

The source's single-cell LSTM runs one channel with an initiation interval of 220
clocks. Here the cell is pipelined and shared by several channels. With `NCH` = 1 it
reduces to the unshared case.

Not included:
- the optical input links and their decoding;
- the interface to the trigger;
- the trained coefficients themselves.

The optimal filter is the baseline the networks are compared against. It is not part of
the design.

## Files

- `rtl/lar_pkg.sv`: format, helper functions, network geometry and coefficient
  counts (`nn_ncoef`, `nn_win`).
- `rtl/act_lut.sv`, `rtl/conv1d_layer.sv`, `rtl/dense_out.sv`: layer building blocks.
- `rtl/cnn_tagging.sv`, `rtl/cnn_energy.sv`, `rtl/cnn_engine.sv`: the CNNs.
- `rtl/rnn_cell.sv`, `rtl/vanilla_rnn_engine.sv`: the vanilla RNN.
- `rtl/lstm_cell.sv`, `rtl/lstm_sliding_engine.sv`, `rtl/lstm_single_engine.sv`: the
  LSTMs.
- `rtl/channel_mux.sv`, `rtl/channel_demux.sv`, `rtl/coef_bank.sv`, `rtl/lar_nn_top.sv`:
  multiplexing and one engine group.
- `rtl/lar_fpga_top.sv`: all cells of one FPGA, built from engine groups.
- `tb/nn_ref_pkg.sv`: integer reference models of every network, written independently
  of the RTL.
- `tb/<block>_tb.sv`: a self-checking testbench per block, with random inputs and
  coefficients. It compares every output bit-exactly with the reference model and
  checks latencies.
- `tb/top_harness.sv` and `tb/lar_nn_top_tb.sv`: end-to-end tests of all five networks,
  including the single-cell LSTM with one channel. Synthetic pulses with noise are sent
  at full and reduced frame rates, together with frames that arrive too early.
- `tb/lar_nn_top_full_tb.sv`: the same test on one engine group exactly as built by
  default.
- `tb/lar_fpga_top_tb.sv`: the FPGA-level top at 20 cells (four groups, the last only
  partly used). Coefficients are broadcast, then some are written per group, and every
  cell is checked.
- `tb/lar_fpga_top_full_tb.sv`: the same test at the default size of 384 cells. Its
  Verilator build takes a few minutes; the run takes about a second.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/lar_pkg.sv tb/nn_ref_pkg.sv tb/lar_nn_top_tb.sv --top-module lar_nn_top_tb
./obj_dir/Vlar_nn_top_tb
```

To run another test, substitute any `tb/*_tb.sv` file and its module name. Each test
finishes within seconds.

To build a different network, set the top's `NN` parameter (and `NCH` if needed), for
example `-GNN=2` for the vanilla RNN. To change a network's geometry, edit the constants
in `lar_pkg`. The engines, coefficient counts and testbench models follow from them,
apart from the fixed CNN layer offsets in `nn_ref_pkg::r_cnn`.
