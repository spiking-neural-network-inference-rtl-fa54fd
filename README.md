# A clock-driven spiking neural network classifier in SystemVerilog

This is register-transfer-level hardware for a small spiking neural network
(SNN). It classifies spoken digits from the Spiking Heidelberg Digits (SHD)
benchmark. Each utterance arrives as 140 time bins of 10 ms. Each bin holds 70
input features: the spike occupancy of the 700 cochlear channels, averaged in
groups of 10. The network answers with one of 20 classes, the digits 0–9 in
English and German.

An SNN differs from an ordinary feed-forward network in one way: its neurons
keep state. Each neuron has a membrane potential that builds up from timestep
to timestep, leaks, and fires a binary spike when it crosses a threshold. So
the hardware does not classify one input vector in isolation. It runs a whole
*window* of 140 timesteps and decides at the end. The design is
*clock-driven*: every layer does its full work once per timestep whether or
not any spikes are present. No event-driven gating is attempted, which keeps
the timing fixed and makes the design fit an ordinary FPGA streaming pipeline.

The structure follows a published extension of the hls4ml HLS model compiler
that maps snnTorch `Leaky` neurons onto FPGA firmware. The RTL here is an
independent implementation of that network and of its neuron and readout
semantics. It is not generated HLS output.

```
 in_data[70] ──► dense 70→64 ──► 64 LIF neurons ──► dense 64→20 ──► readout ──► class
 (one bin)       RF = 7           state u[64]        RF = 8           state m[20]
                 640 multipliers  beta, thr / neuron  160 multipliers  (membrane or
                                                                       spike count)
```

## Number format

Every stored value is a signed fixed-point number with 10 bits in total, 4 of
them integer bits including the sign: HLS `ap_fixed<10,4>`, range −8 to
+7.984 in steps of 1/64. The reference study swept 8, 10, 12, 16 and 24 bits.
Accuracy stopped improving at 10 bits, so 10 bits is the default here. The
package constants `FX_W`/`FX_F` set each block's default. `snn_top` takes
the width as parameters `DW` (total bits) and `DF` (fractional bits), which
it passes to every block. `DW=8, DF=4` builds the `ap_fixed<8,4>` variant,
and `DW=24, DF=20` builds the `ap_fixed<24,4>` one. Parameter values such as
`BETA_RO` are given in units of `2^-DF`.

Products and sums are formed at full precision. A value is rounded only when
it is stored back into a 10-bit register: the dense-layer output, the new
membrane potential and the new readout membrane. That rounding is
*convergent*, meaning round half to even, followed by saturation to the
10-bit range. This matches the `AP_RND_CONV, AP_SAT` mode of the reference
configuration. `snn_pkg::rnd_conv_sat` implements it. Getting this rounding
bit-exact matters: it is what makes the hardware agree with a fake-quantised
software model of the same network.

## The neuron: `lif_layer`

Each of the N neurons holds a membrane potential `u`, a decay `beta` and a
threshold `u_thresh`. When a timestep's input currents `x` arrive, every
neuron updates in parallel:

```
u'    = round(beta * u + x)             (IF variant, IS_IF=1:  u' = sat(u + x))
spike = (u' >= u_thresh)
u     = spike ? (subtract reset: sat(u' - u_thresh)  |  zero reset: 0) : u'
```

The spike is decided on the *new* potential, and the reset takes effect at
once, without scaling by `beta`. Some textbook forms of the LIF neuron apply
the reset one step later, scaled by `beta`. This design follows the
immediate, unscaled form. `beta` and `u_thresh` are stored per neuron,
because the reference network trains both. They reset to 0.75 and 1.0, the
reference training's initial values, and can be rewritten through the
configuration port. Setting `PER_NEURON=0` removes those registers. Every
neuron then uses the constants `BETA_INIT` and `THR_INIT`, and parameter
writes are ignored. This suits a network whose decay and threshold are
shared scalars.

The membrane, `beta` and `u_thresh` can each have their own fixed-point
format (`W`/`F`, `BETA_W`/`BETA_F`, `THR_W`/`THR_F`). The sum
`beta * u + x` is exact and is rounded once, to the membrane format. The
threshold test is exact, done at whichever of `F` and `THR_F` has more
fraction bits. If the threshold has the finer format, a subtractive reset
is rounded back to the membrane format the same way, ties to even. The
top level gives all three the same format, `DW`/`DF`.

Each layer counts its own timesteps. The 140th beat updates and spikes like
any other beat. After it, the layer clears all membranes and its counter, so
the next beat starts a new, independent sequence. No start-of-sequence signal
exists. Stray beats shift the framing of every later window, so the host must
send exactly 140 beats per sequence.

## The readout: `snn_readout`

The readout turns per-timestep class signals into one decision per window. It
keeps one score per class and has two modes:

* **Membrane mode** (default). The readout sits directly after the last dense
  layer. Each class integrates its current as a leaky membrane with no
  threshold and no reset: `m = round(BETA_RO * m + z)`. The reference
  network uses this mode because it scored higher accuracy. The decay
  `BETA_RO` is a compile-time scalar. Its default of 0.75 is an assumption:
  the reference gives no value.
* **Spike mode**. A second LIF layer of 20 neurons is inserted before the
  readout, which then counts spikes per class.

Decision rules (`RULE`):

| rule | decision |
|---|---|
| `RULE_ARGMAX` | class with the largest score, lowest index on ties |
| `RULE_FIRST_TO_THRESH` | first class whose spike count reaches `COUNT_THRESH` (lowest index if several reach it in the same timestep) |
| `RULE_THRESH_ARGMAX` | argmax, flagged as decided only if its count reached `COUNT_THRESH` |
| `RULE_BINARY_LOGIT` | `score[1] − score[0]`; class 1 if positive |

Membrane mode supports argmax and the binary logit. The threshold rules need
spike mode. When a threshold rule has not fired, `out_decided` is low.

The readout produces a result beat for *every* timestep. That beat carries the
scores and decision so far. `out_last` marks the beat of the 140th timestep,
which carries the sequence decision; after that beat the scores are cleared.
The intermediate beats are this design's choice. They make the per-timestep
latency visible, and a consumer that only wants decisions can discard beats
without `out_last`.

## Timing: how one timestep moves through the pipeline

The dense layers use *reuse factors*: each multiplier is used RF times per
timestep. The input layer (RF = 7) splits its 70 inputs into 7 groups of 10.
In cycle c, each of the 64 output neurons multiplies group c by its weights,
giving 640 multipliers in all. The output layer (RF = 8) handles 8 spikes per
cycle for each of its 20 outputs, giving 160 multipliers. The bias starts the
accumulator in cycle 0. The rounded result is offered combinationally in the
last cycle, so the register stage that follows captures it in that cycle.
Every stage boundary is a valid/ready handshake.

| cycle | input layer | LIF | output layer | readout |
|---|---|---|---|---|
| 0 | input accepted, group 0 | | | |
| 1–5 | groups 1–5 | | | |
| 6 | group 6, currents offered | captures, updates `u`, spikes | | |
| 7 | next timestep may start | spikes offered | spikes accepted, group 0 | |
| 8–13 | | | groups 1–6 | |
| 14 | | | group 7, currents offered | updates `m` |
| 15 | | | | result beat valid |

* **Latency**: 15 cycles from input acceptance to the result beat (16 in
  spike mode, which has one more LIF stage). For the reference HLS design,
  Vitis reported a maximum of 15 cycles per timestep.
* **Throughput**: the two dense layers work on consecutive timesteps at the
  same time, so the slower one sets the pace: one timestep every 8 cycles.
  The reference HLS design reported an initiation interval of 12; its
  schedule is not published.
* **One window** (140 timesteps) takes 139·8 + 15 = 1127 cycles when streamed,
  which is 18.0 µs at the reference's 16 ns clock period. A host that waits
  for each result before sending the next bin needs 140·15 = 2100 cycles,
  which is 33.6 µs, the figure reported for the HLS design.
* **Back-pressure**: `out_ready` low stalls the readout, then the output
  layer, then the LIF stage, then the input layer. The LIF stage also stalls
  on its own while the output layer is still on the previous timestep. No
  data is lost or reordered.

## Loading the network: the configuration port

Trained weights are not built in. They are written through
`cfg_we / cfg_addr / cfg_data` before inference, one `DW`-bit value (10 bits by default) per cycle.
The address is `{region[2:0], index[12:0]}`:

| region | contents | index |
|---|---|---|
| 0 `CFG_W1` | input-layer weights | `out*70 + in` |
| 1 `CFG_B1` | input-layer biases | `out` |
| 2 `CFG_BETA1` | hidden decay | neuron |
| 3 `CFG_THR1` | hidden threshold | neuron |
| 4 `CFG_W2` | output-layer weights | `out*64 + in` |
| 5 `CFG_B2` | output-layer biases | `out` |
| 6, 7 | output-layer LIF decay / threshold (spike mode only) | neuron |

Weights and biases use the same format as the data. Loading the full
network takes 5 972 writes. Write only between sequences: the weights are
read while an inference runs.

## Top-level interface (`snn_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid`, `in_ready` | in/out | 1 | input handshake, one beat per 10 ms bin |
| `in_data` | in | 70 × DW | pooled occupancy, `ap_fixed<10,4>` by default |
| `out_valid`, `out_ready` | out/in | 1 | result handshake, one beat per timestep |
| `out_last` | out | 1 | beat of the window's final timestep |
| `out_class` | out | 5 | decided class |
| `out_decided` | out | 1 | low while a threshold rule has not fired |
| `out_logit` | out | SW+1 | `score[1] − score[0]` |
| `out_score` | out | 20 × SW | readout membranes (or spike counts) |
| `cfg_we`, `cfg_addr`, `cfg_data` | in | 1, 16, DW | parameter load |

`SW` is the larger of `DW` and the width that holds a spike count up to the
window length: 10 bits at the defaults, and never less than 9 bits for a
140-step window.

Parameters: `N_IN=70`, `N_HID=64`, `N_OUT=20`, `T_WINDOW=140`, `RF_IN=7`,
`RF_HID=8`, `READOUT_MODE=RO_MEMBRANE`, `RULE=RULE_ARGMAX`, `BETA_RO=48`
(0.75 in 1/64 units), `COUNT_THRESH=10`, `DW=10`, `DF=6`. `RF_IN` must divide `N_IN`, and
`RF_HID` must divide `N_HID`; both must be at least 2.

## Files

| file | contents |
|---|---|
| `rtl/snn_pkg.sv` | formats, network sizes, enums, address map, rounding functions |
| `rtl/dense_layer.sv` | fully connected layer with reuse factor and weight storage |
| `rtl/lif_layer.sv` | LIF / IF neuron layer with window counter |
| `rtl/snn_readout.sv` | membrane / spike readout and decision rules |
| `rtl/snn_top.sv` | the complete classifier |
| `tb/tb_*.sv` | self-checking testbenches: one per module, plus system tests in spike mode and at other precisions |
| `tb/snn_prec_run.sv` | one full-size network and its reference model at a given precision; used by `tb_snn_top_precision` |

## Simulation

Each testbench is self-checking. It compares the design against an
independent integer reference model written in the testbench and prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/snn_pkg.sv rtl/dense_layer.sv \
    rtl/lif_layer.sv rtl/snn_readout.sv rtl/snn_top.sv tb/tb_snn_top.sv \
    --top-module tb_snn_top -o sim && ./obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_dense_layer` | random weights and inputs over the full range, rounding and saturation, latency RF−1, initiation interval RF, back-pressure |
| `tb_lif_layer` | LIF with subtractive reset and random per-neuron parameters, LIF with zero reset and constant parameters, IF, and LIF with separate decay and threshold formats; window clearing; saturation |
| `tb_snn_readout` | all six mode/rule combinations, ties, decided and undecided windows, membrane saturation |
| `tb_snn_top` | full-size network (defaults, no overrides), three windows; bit-exact scores and class for every timestep, latency 15, interval 8, stalls and back-pressure |
| `tb_snn_top_spike` | spike-count configuration with first-to-threshold on a reduced network, 30 windows |
| `tb_snn_top_precision` | four full-size networks side by side at `ap_fixed<8,4>`, `<12,4>`, `<16,4>` and `<24,4>`, one window each, bit-exact against a reference model at each width |

The system tests use random weights, not a trained model: no trained weight
set is included. They therefore check the arithmetic and control bit-exactly
against the reference model, not the classification accuracy.

## How far this follows the reference, and where it departs

Taken from the reference network: layer sizes 70-64-20, the 140-step window,
the reuse factors 7 and 8 and the multiplier counts they imply, the
`ap_fixed<10,4>` format with convergent rounding and saturation, and the LIF
and IF equations with both reset modes. Also taken: per-neuron decay and
threshold with initial values 0.75 and 1.0; per-layer timestep counters that
clear state after the last step of the window; and the readout modes and
decision rules.

This design's own choices:

* The internal schedule of the dense layers: which inputs are handled in which
  cycle, and full-precision accumulation before a single rounding.
* The valid/ready pipeline. It gives 15-cycle latency and an 8-cycle
  initiation interval; the HLS design reported 15 and 12.
* Runtime weight loading. The HLS flow compiles trained weights into the
  bitstream as constants.
* One shared format (`DW`/`DF`) for data, weights, biases, membranes, decay
  and threshold at the top level. The HLS flow lets each have its own
  precision. `lif_layer` supports separate decay and threshold formats,
  but `snn_top` does not expose them, and the dense layers use one format
  throughout.
* Details the reference leaves open: the readout decay value (0.75),
  `COUNT_THRESH` (10), argmax tie-breaking, what the threshold rules report
  when nothing reaches the threshold, and a result beat on every timestep.
* Spikes enter the output layer as the values 0 and 1, so its "multipliers"
  reduce to selecting or skipping a weight.

Not included: the offline preprocessing (binning and channel pooling), the
host software, and any power-saving gating of silent neurons. The reference
lists that gating only as future work.

A note on size: the network has 4 480 + 64 + 1 280 + 20 weights and biases
plus 128 neuron parameters, 5 972 values in all. Over a window it performs
(70·64 + 64·20)·140 = 806 400 synaptic operations, which matches the dense
operation count reported for the reference model. The reference's parameter
count of 29.5 thousand comes from a different counting tool and is not
reproduced by this arithmetic.
