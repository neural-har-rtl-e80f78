# GateCNN: a dimension-gated CNN accelerator for radar activity recognition

A radar looking at a person produces a micro-Doppler signature: a picture of
the radial velocities of the body parts (Doppler bins) against time. Each
activity (walking, sitting, standing, drinking, falling, picking up an object)
leaves its own pattern. This design classifies one 30 x 28 signature window
(30 Doppler bins, 28 time steps of 20 ms) into six activity logits with a
very small convolutional network, GateCNN, built as a streaming hardware
pipeline with all weights held as on-chip constants.

The idea behind the network is to treat the two axes of the signature
differently. After a small Conv2D front end, each time step's Doppler column
is embedded into a D-dimensional vector. Two paths then run side by side on
that sequence:

* a **gate path**, a Conv1D along time followed by ReLU, that learns *when*
  something salient happens;
* a **content path**, a Conv1D along time whose output is re-read as a
  one-channel Doppler x time image and passed through three Conv2Ds, that
  learns *what* the Doppler pattern looks like.

The content is multiplied element by element with the gate, a residual copy of
the embedding is added, and a learned average over the Doppler axis plus a
linear layer give the logits. The model has about 2.7 k parameters and
0.28 M multiply-accumulates per inference, which is what makes a
constant-weight, no-external-memory accelerator possible.

## The network, layer by layer

| Step | Operation | Shape in -> out | Weights |
|---|---|---|---|
| W_c0 | Conv2D 3x3, 1 -> 1 channel ("channel fusion") | 1x30x28 -> 1x30x28 | 10 |
| pool | MaxPool 2x2, stride 2 | 30x28 -> 15x14 | - |
| W_c1 | Conv1D kernel 1, 15 Doppler bins as channels -> D | 15 ch x 14 -> 12 ch x 14 | 192 |
| W_g | Conv1D kernel 3 along time, then ReLU -> gate Z | 12 x 14 -> 12 x 14 | 444 |
| W_p | Conv1D kernel 3 along time -> X_conv2 | 12 x 14 -> 12 x 14 | 444 |
| W_c2 | Conv2D 3x3, 1 -> 12, ReLU (X_conv2 read as a 12x14 image) | 1x12x14 -> 12x12x14 | 120 |
| W_c3 | Conv2D 3x3, 12 -> 12, ReLU | 12x12x14 -> 12x12x14 | 1,308 |
| W_c4 | Conv2D 3x3, 12 -> 1 -> X_conv5 | 12x12x14 -> 1x12x14 | 109 |
| gate | Y = X_conv5 * ReLU(Z) + X_conv1 | 12 x 14 | - |
| W_avg | Conv1D kernel 1, 12 Doppler rows as channels -> 1 | 12 x 14 -> 14 | 13 |
| W_cls | Linear 14 -> 6 | 14 -> 6 logits | 90 |

Total 2,730 weights and biases and 276,612 multiply-accumulates (all
convolutions are zero-padded to keep their size, stride 1).

Where these numbers come from matters for trust. The input size (1x30x28),
the six classes, the layer sequence, the kernel-size-1 Doppler embedding and
the reshape of X_conv2 to a one-channel image are from the published
description. The embedding width D = 12, the 3-tap time kernels, the 3x3
Conv2D kernels and the 2x2 pooling are **not** published; they were chosen
because they reproduce the published model size (2,719 parameters, 11 fewer
than here) and work (0.28 M). Note that the published work count is said to
count a multiply-accumulate as two operations, which would mean 0.14 M MACs;
the sizes here match only if each MAC counts once. All of these sizes are
parameters in `gatecnn_pkg` and of each stage module.

## Numbers

Every value is a 32-bit fixed-point number with 16 fraction bits (Q16.16).
The word width follows the reference implementation; the 16/16 split is a
choice of this design. Each layer sums full 64-bit products together with
its bias, then shifts right by 16 (rounding toward minus infinity) and
saturates to 32 bits, once per output. The gate multiplies X_conv5 by
ReLU(Z), requantises the same way, and adds X_conv1 with saturation.

## Weights

The trained weights are not published. `gatecnn_pkg::weight_value()` and
`bias_value()` therefore produce a fixed pseudo-random pattern, an integer
hash of (layer, index) scaled to +-0.125 (weights) and +-0.0625 (biases).
Every layer's ROM (`weight_rom`) is filled from these functions at
elaboration, so the weights are constants of the netlist, as in the
reference build, and the design computes real, checkable GateCNN arithmetic
with them; the logits simply do not mean anything until trained weights
are put in. To load a trained model, replace the two functions with lookups
into the trained tables, keeping the index convention

    weight index = ((ci * COUT + co) * KH + kh) * KW + kw

for each layer (layer ids in `gatecnn_pkg::layer_e`). Nothing else changes.
The constants total 2,730 x 32 bits, about 11 KB.

## Hardware structure

```
 s_axis ─► stage1_extract ─► stage2_embed ─► stage3_dual_path ─┬─ z ───► stage4_gate ─► stage5_output ─► m_axis
 (840 words) conv_layer W_c0   conv_layer W_c1  W_g ─────────────┤         Y = X5·Z + X1   W_avg, W_cls    (6 logits)
             maxpool2d                          W_p→W_c2→W_c3→W_c4 ─ x5 ─►│
                                                 residual X_conv1 ─ res ─►│
 s_axil ─► axil_ctrl (start / done / idle / auto-restart / count)
```

The five stages (front end, Doppler embedding, dual path, gating, output)
are connected by valid/ready streams. Each layer stores a whole input frame,
computes, and frees its buffer when its last result has left, so the stages
form a frame-level dataflow pipeline: several frames can be inside at once,
each in a different stage.

### conv_layer: the one engine behind every layer

All nine weighted layers are instances of `conv_layer`, which computes a
same-padded 2D convolution; Conv1D is the case H = 1 and a linear layer the
case H = W = 1. Its schedule:

1. **Load.** Take CIN*H*W / IN_BW input beats into the frame buffer.
2. **Compute.** For each output pixel (row-major), spend CIN cycles, one
   per input channel. In each cycle COUT x KH x KW multipliers work in
   parallel: the KH x KW window of that channel is read from the frame
   buffer, the matching row of weights from the layer's ROM.
3. **Emit.** One more cycle presents all COUT results of the pixel as a
   single beat (channels-last), held until taken.

So a layer needs H*W*(CIN+1) cycles per frame. Parallelism over output
channels and kernel taps, with input channels serial, is this design's
choice; the reference build's datapath was produced by an HLS tool and is not
described.

### Reshapes cost nothing

GateCNN reshapes its tensors several times: the pooled 15x14 map becomes a
sequence of 15-channel vectors, and X_conv2 (12 channels x 14 steps) becomes
a 1-channel 12x14 image. Here no data is moved for this. A producer always
writes its beats to consecutive addresses of the consumer's frame buffer,
and the consumer reads element (c, h, w) at address
`c*IN_SC + h*IN_SH + w*IN_SW`. The three strides, set per instance, express
the reshape. Two producers emit in a convenient order for this: `maxpool2d`
sends the pooled map time-major (all 15 bins of time 0, then time 1, ...),
so its output is already the Doppler-vector sequence, and W_c4 emits
X_conv5 Doppler-major, which `stage4_gate` and the averaging layer expect.

### The gating stage

`stage3_dual_path` broadcasts each embedding beat to the gate Conv1D, the
content Conv1D and the residual output at once; a beat moves only when all
three take it. ReLU(Z) and the residual X_conv1 arrive at `stage4_gate` long
before X_conv5, are stored whole, and each X_conv5 word is then combined
with the stored values of the same position and passed straight on.

### Output and control

`stage5_output` sends the six logits as six 32-bit AXI-Stream beats, TLAST on
the last; the class is the index of the largest logit, left to the host.
The input frame is 840 AXI-Stream beats, Doppler bin outer and time inner;
input TLAST is ignored.

`axil_ctrl` is a small AXI4-Lite slave. Its register map is this design's
own, in the style of the usual HLS block control register:

| Address | Bits | Meaning |
|---|---|---|
| 0x00 CTRL | 0 ap_start | write 1: accept one input frame; clears when its last beat is taken |
| | 1 ap_done | set when a frame's last logit leaves; cleared by reading CTRL |
| | 2 ap_idle | no frame inside |
| | 7 auto_restart | accept frames continuously |
| 0x10 COUNT | 31:0 | completed inferences |

Input beats are accepted only while ap_start or auto_restart is set.

## Timing

At the default sizes, from first input beat to last logit: **8,042 cycles,
80.4 us at 100 MHz**, against 107.5 us reported for the reference HLS build
at the same clock and well inside the 20 ms of one radar time bin. The time
is the sum of the layer schedules: input 840, W_c0 1,680, pooling 210,
W_c1 224, W_p 182, W_c2 336, W_c3 2,184, W_c4 2,184, W_avg 182,
W_cls 15, output 6 (the gating adds no time: it combines each X_conv5 word
in the cycle W_c4 emits it). Each layer loads while its producer computes,
so only compute phases add up. Back to back, a frame finishes every 5,095 cycles
(19,600 inferences/s at 100 MHz, against 9,300 reported). W_c3 and W_c4 each
have a single frame buffer and take turns, which sets this rate.

The parallel datapath (about 330 32-bit multipliers, 108 of them in each of
W_c2 and W_c3) is far larger than the reference build, which reported no DSP
blocks and about 2,700 LUTs; a smaller build would serialise the COUT x KH x
KW products and run longer.

## Departures and limits

* Network sizes D, kernel sizes and pooling are reconstructed, see above.
* Weights are a placeholder pattern, see above; classification accuracy of
  this RTL cannot be judged without trained weights.
* Fixed-point split, rounding, saturation, stream formats, beat orders,
  the control register map and the degree of parallelism are this design's
  own.
* The rest of the system around the accelerator is not included: the host
  processor, the DMA engine that moves frames between DDR3 memory and the
  AXI-Stream ports, the memory itself, and the radar front end with its
  short-time Fourier transform. The accelerator's AXI-Stream and AXI-Lite
  ports are where they connect.

## Files

`rtl/`
* `gatecnn_pkg.sv` types, sizes, weight generator, requantisation
* `weight_rom.sv` one layer's constant weight ROM
* `conv_layer.sv` the generic convolution / linear layer
* `maxpool2d.sv` 2x2 max pooling, time-major output
* `stage1_extract.sv` ... `stage5_output.sv` the five pipeline stages
* `axil_ctrl.sv` AXI-Lite control registers
* `gatecnn_top.sv` the accelerator

`tb/`
* `gatecnn_ref_pkg.sv` bit-exact reference model of the whole network,
  written with plain loops and plain tensor layouts, used as the expected
  value by every testbench
* `tb_<module>.sv` one self-checking testbench per module;
  `tb_gatecnn_top.sv` runs six frames through the full-size accelerator
  (single-shot start, then auto-restart, partly with output back-pressure),
  checks all logits bit for bit, the latency and throughput bounds and the
  control registers

## Simulating

With Verilator 5 (packages first):

```
verilator --binary --timing --assert rtl/gatecnn_pkg.sv tb/gatecnn_ref_pkg.sv \
    rtl/weight_rom.sv rtl/conv_layer.sv rtl/maxpool2d.sv rtl/stage*.sv \
    rtl/axil_ctrl.sv rtl/gatecnn_top.sv tb/tb_gatecnn_top.sv \
    --top-module tb_gatecnn_top -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops; the top-level
one also prints the measured latency and how often each mechanism (input
held off, output back-pressure, frames overlapping, both paths computing,
gate closed, ReLU clipping) occurred. Per-module testbenches are built the
same way with their own module file and `--top-module tb_<module>`.

To change sizes, edit the constants in `gatecnn_pkg` (and the reference model
in `tb/gatecnn_ref_pkg.sv`, which spells out the same network).
