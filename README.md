# Integer-only spiking network for continuous object detection

A spiking neural network (SNN) can detect objects at a high frame rate and
low power, but only if two problems are solved. First, conversion from a
trained network usually leaves wide floating-point weights. Second, the
usual inference needs many time steps for each output.

This design assumes both have been solved offline:

- The network was trained with quantization and then converted so that every
  weight is a small integer (4 bits in the deployed model).
- Every bias is a 32-bit integer.
- Every layer has one integer firing threshold.

What remains for the hardware is simple. Binary spikes come in and select
integer weights. The sums are added to membrane potentials, and neurons fire
when a potential reaches a threshold.

The second idea is **continuous inference**. The membrane potentials are not
reset between frames of a video-like spike stream. After a short warm-up,
each new spike frame gives a new detection result. It does not take another
N frames. A plain integrate-and-fire neuron would drift, so the neurons here
are *Feed-Forward Integrate-and-Fire* (FewdIF) neurons. Their potential is
clamped between two multiples of the threshold, so old frames can influence
new ones without dominating them.

The RTL contains:

- the inference datapath of one layer: spike convolution, bias addition and
  FewdIF neurons;
- the memories of a layer;
- a small multi-layer network built from that layer, with a host-facing
  interface, written in synthesizable SystemVerilog.

## The numbers the hardware holds

The hardware never sees the conversion, only its results. For layer *l* the
conversion produces a scale factor `S_l`: the inverse of the smallest gap
between any two of the layer's weight values. The stored values are then:

| stored value | meaning | width |
|---|---|---|
| weight | round(converted weight × `S_l`), an integer | 4-bit signed by default, per layer (`W_BITS`) |
| bias | round(converted bias × `S_l`) | 32-bit signed |
| `vth` | threshold × `S_l` | 32-bit signed |
| `N_max`, `N_min` | FewdIF bounds as multiples of the threshold | 8-bit signed |

Every term of a neuron's input is multiplied by the same `S_l`, and so is the
threshold. Firing is therefore unchanged, and everything stays in integers.
The convolution sum, the bias-added increment and the membrane potential are
all 32-bit signed values.

## The FewdIF neuron (`fewdif_neuron`)

In each time step, each neuron does the following:

```
v     = v_old + u                         // integrate this step's input
spike = (v >= vth)                        // fire at the scaled threshold
if (spike) v = v - vth                    // reset by subtraction
v     = clamp(v, N_min*vth, N_max*vth)    // FewdIF bounds
```

The result is saturated to 32 bits and stored back. Nothing ever zeroes the
potential except an explicit `clear`.

- The upper bound `N_max*vth` stops a neuron that has been driven hard from
  firing long after its input has gone.
- The lower bound `N_min*vth` (`N_min` ≤ 0) stops a long-inhibited neuron
  from staying silent.

The values of `N_max` and `N_min` are per-layer registers. The published
method does not fix them.

Two rules are choices made in this RTL, not given by the method:

- **Reset by subtraction.** Subtracting the threshold keeps the surplus charge,
  which is the usual convention for networks converted from ANNs. The
  alternative is reset to zero.
- **Clamp after firing.** A potential that reaches the bound can still fire
  in the same step.

## Continuous inference and the warm-up

Each `start` of the top runs one time step: one input spike frame goes
through every layer. After a `clear` (the start of a new scene):

- The first `warmup_frames` = N time steps only build up the membrane
  potentials.
- From then on, every time step's result frame is valid. The `result_valid`
  output shows this, and `frame_count` counts the time steps since the clear.

The conventional scheme needs N new frames per result: it clears every N
frames and reads one result. The host can reproduce that scheme by pulsing
`clear` every N frames.

## One layer (`snn_layer`)

```
 input spike frame ──► Spike Conv ──► (+ bias) ──► FewdIF ×COUT ──► output spike frame
   (CIN bits/pixel)     (spike_conv)   (bias_adder)     ▲   │           (COUT bits/pixel)
                          ▲                             │   ▼
                   weights (layer_param_store)   membrane memory (sdp_ram)
```

**Spike Conv.** A spike is 0 or 1, so no multipliers are needed. For every
output channel, the unit adds the weights of the input channels that spiked.
Each clock it handles one kernel tap: all `CIN` input channels of one input
pixel, for all `COUT` output channels in parallel. It accumulates over the
`K*K` taps of the window.

**Schedule.** The layer walks the output map in row-major order, one pixel
per `K*K` clocks. For each tap, stage 0 computes which input pixel the tap
reads, or that it reads padding (zero spikes). The pipeline is:

| clock | stage |
|---|---|
| 0 | tap issued, input spike RAM read started |
| 1 | spikes arrive; Spike Conv accumulates |
| 2 | window sum ready; bias added; membrane RAM read issued |
| 3 | increment and old potential arrive; neurons update; new potentials and output spikes written |

Pixels are at least 3 clocks apart, so a pixel's membrane read never passes
the write-back of the pixel before it. A time step takes exactly
`OUT_H*OUT_W*K*K + 3` clocks from `start` to `done`. A `clear` takes
`OUT_H*OUT_W` clocks.

**Layer kinds.** Max pooling and up-sampling are avoided by design. The
network uses these three kinds, all 3×3 with padding 1:

| `KIND` | operation | output size | input pixel read by output (oy, ox), tap (ky, kx) |
|---|---|---|---|
| `LAYER_CONV_S1` | convolution, stride 1 | H × W | (oy+ky−1, ox+kx−1) |
| `LAYER_CONV_S2` | down-sampling convolution, stride 2 | ⌈H/2⌉ × ⌈W/2⌉ | (2oy+ky−1, 2ox+kx−1) |
| `LAYER_TCONV_S2` | transposed convolution, stride 2 | 2H × 2W | ((oy+1−ky)/2, (ox+1−kx)/2) if both are even |

The transposed convolution is computed in gather form. An output pixel
collects the input pixels whose stride-2 scatter reaches it. This is the
usual definition with padding 1 and output padding 1, and the weight is used
without flipping.

## The network (`snn_top`)

`snn_top` chains `N_LAYERS` layers. Each layer has its own parameters and
membrane memory. A spike frame buffer (`sdp_ram`) sits in front of each
layer and after the last one. The input buffer holds `IN_CH` bits per pixel,
the others `CH` bits:

```
 host ─► frame buf 0 ─► layer 0 ─► buf 1 ─► layer 1 ─► buf 2 ─► layer 2 ─► buf 3 ─► host
                        CONV_S1            CONV_S2            TCONV_S2
                        256×256            128×128            256×256
```

The default network has one layer of each kind, on 256×256 frames. Each
input pixel carries 1 spike bit (`IN_CH = 1`, as a spiking camera
delivers), and every layer outputs 8 channels (`CH`). All weights are 4-bit.
`LAYER_W_BITS` can give any layer 8-bit weights instead: the deployed
network stores *most* of its weights in 4 bits, not all of them.

The layers of a time step run one after another. A time step takes Σ over the layers of `OUT_H*OUT_W*K*K + 6` clocks, which is
1,327,122 clocks at the defaults. At 150 MHz that is 8.85 ms per time step.

**Host interface** (all synchronous to `clk`, active-low asynchronous
`rst_n`):

- `param_we` + `param_wr` (`snn_pkg::param_wr_t`) load one item per clock.
  The fields are `{sel, layer, tap, cout, cin, data[31:0]}`.
- `sel` chooses what is written:
  - `PSEL_WEIGHT`: one weight, taken from `data[W_BITS-1:0]`, with
    `tap = ky*K + kx`;
  - `PSEL_BIAS`: the bias of output channel `cout`;
  - `PSEL_VTH`: the scaled threshold;
  - `PSEL_SCALE`: `N_max` in `data[15:8]` and `N_min` in `data[7:0]`.
- `frame_we/frame_waddr/frame_wdata` write the input spike frame at pixel
  `y*IMG_W + x`, with `IN_CH` bits per pixel.
- `res_re/res_raddr` read the result frame; `res_rdata` follows one clock
  later.
- Frames may be written and read only while `busy` is low.
- `start` runs one time step. `clear` zeroes all membranes and `frame_count`
  (it takes priority over `start`). `done` pulses when either has finished.

## Sizes against the deployed system

The FPGA system this design follows ran at 150 MHz on 256×256 frames. It
reached 681 frames/s for its own network, which has mostly 4-bit weights and
about 1.5 MB of them.

| case | fits the default RTL? |
|---|---|
| 256×256 input | yes, exactly. |
| 224×224 input | yes. The frame fits in the corner of the 256×256 buffer. Results near its right and bottom edges then differ from a true 224×224 run, because deeper layers see activity past the edge. `IMG_H = IMG_W = 224` gives the exact run: 1,016,082 clocks per time step. |
| 640×384 frames (the accuracy experiments) | no: 245,760 pixels per frame against 65,536. With `IMG_H = 384`, `IMG_W = 640` it runs, at 4,976,658 clocks per time step. |
| The detection network itself | no. 1.5 MB at 4 bits is roughly 3.1 M weights, against 1,728 in the default three layers. Its layer list is not published, so it cannot be instantiated here. |

The published frame rate cannot be compared with this RTL, because the
networks differ. The default network here does about 113 time steps/s at
150 MHz.

## What is taken from the published design and what is not

**From the published design:**

- binary spikes into a spike convolution, integer weights (4-bit as
  deployed), 32-bit biases and sums;
- the order conv → bias add → FewdIF;
- the threshold scaled by `S_l`;
- the FewdIF bounds `N_max*Vth` and `N_min*Vth`;
- membranes that are never reset between frames;
- stride-2 convolution instead of max pooling, transposed convolution
  instead of up-sampling;
- 256×256 input.

**This design's own choices:**

- everything about the architecture: one pixel at a time, one tap per
  clock, all channels in parallel, layers in sequence, and whole frames and
  membranes kept on chip;
- reset by subtraction, and clamping after firing;
- 32-bit saturation;
- the padding conventions;
- the number of layers, channels and kernel size;
- the parameter bus;
- the warm-up counter;
- reset values: zero weights and biases, `vth = 1`, `N_max = 1`,
  `N_min = −1`.

**Departures and gaps:**

- One figure labels the weight path as 8-bit, and the conversion text
  speaks of int8. The deployed network stores most weights in 4 bits. The
  default is therefore 4 bits (`snn_pkg::WEIGHT_W`), and each layer's width
  can be raised to 8 through `LAYER_W_BITS`. Which layers the deployed
  network kept wider is not known.
- Not included:
  - the spike camera or encoder that produces the spike frames;
  - the detection head and box decoding;
  - the host and off-chip memory;
  - the offline conversion.
- The membrane memory is large: `COUT × 32` bits per output pixel, 2 MiB for
  a 256×256×8 layer. A real FPGA would likely keep it off chip or narrower.
  Nothing here models that.

## Files

| file | content |
|---|---|
| `rtl/snn_pkg.sv` | widths, layer kinds, parameter-bus struct, helpers |
| `rtl/spike_conv.sv` | Spike Conv accumulator |
| `rtl/bias_adder.sv` | saturating bias addition |
| `rtl/fewdif_neuron.sv` | FewdIF neuron update (combinational) |
| `rtl/layer_param_store.sv` | weights, biases, threshold, bounds of one layer |
| `rtl/sdp_ram.sv` | simple dual-port RAM (membranes, spike frames) |
| `rtl/snn_layer.sv` | one layer: address generation, pipeline, control |
| `rtl/snn_top.sv` | layer chain, frame buffers, sequencing, host ports |
| `tb/snn_ref_pkg.sv` | behavioural layer model used as the reference |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_snn_top_full` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Each has a watchdog. Build and run one with Verilator 5, for
example:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/snn_pkg.sv tb/snn_ref_pkg.sv rtl/*.sv tb/tb_snn_top.sv \
  --top-module tb_snn_top -Mdir obj_tb_snn_top -o sim
./obj_tb_snn_top/sim
```

| testbench | what it runs | run time |
|---|---|---|
| `tb_snn_top` | the three-layer network on 10×8 frames with 2 input bits per pixel, 4 channels per layer and 8-bit weights in the first layer, over 8 time steps and a mid-stream clear | under a second |
| `tb_snn_top_full` | the default top (256×256, 1 input bit per pixel, 8 channels, 4-bit weights) over 4 time steps | about 20 s |
| `tb_snn_workloads` | the network at 224×224 and at 640×384, 3 time steps each, using the helper `snn_top_runner` | about 1 min |

All three compare every result spike with a chain of reference models. The
reference maps coordinates in scatter form, independently of the RTL's
gather form. They also check:

- the clock count of each time step;
- `frame_count` and `result_valid`.

They count these mechanisms, and each must occur:

- spikes in every layer;
- both clamps;
- padding taps;
- clears;
- warm-up and valid results;
- output spikes that differ from those of freshly cleared membranes, which
  shows continuous inference carries state.

Below the top, `tb_snn_layer` checks each layer kind on its own against the
model, including exact cycle counts and exactly one write per output pixel.
Every other module has its own `tb_<module>`, with an independent reference
computation and directed corner cases: clamps, saturation, and RAM
read/write collisions.
