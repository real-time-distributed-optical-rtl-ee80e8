# DSCNN-3: a streaming shift-add accelerator for fiber vibration recognition

A phase-sensitive optical time-domain reflectometer (Φ-OTDR) turns a long optical fiber
into thousands of vibration sensors. Every millisecond it records one back-scatter trace
along the whole fiber. The recognition task is to cut this data into patches of
**256 traces × 11 neighbouring fiber positions** (0.256 s × about 12.5 m) and classify
every patch as one of three intrusion events: hammer, air pick or excavator. A 100 km
fiber yields about 8,000 such patches every 0.256 s, so the classifier has to finish one
patch in a few tens of microseconds to keep up.

This RTL implements the classifier of the published DSCNN-3 design. DSCNN-3 is a
three-layer depth-wise separable CNN with only 4,141 parameters. All multiplications are
replaced by shifts ("shift-add" quantization: every weight is ± a power of two), so the
network can be laid out as plain logic. It needs no DSP blocks and no block RAM. Here the
whole network is a dataflow pipeline. A patch is streamed in one value per clock. The
stages work concurrently, and the class comes out 2,859 cycles after the first value.
Back-to-back patches are accepted at one per 2,838 cycles.

The network's training method is a physics-guided, teacher-free "cross-domain
distillation": the first convolution is pulled towards the DFT of the input during
training. It changes only the weight values, not the hardware, and is not part of this
RTL.

## The network as built

| stage | operation | output map (time × space × channels) |
|---|---|---|
| input | 8-bit samples, time-major raster | 256 × 11 × 1 |
| layer 1 | 3×3 depth-wise + 1×1 point-wise, ReLU | 256 × 11 × 8 |
| pool 1 | 2×2 max, stride 2 | 128 × 5 × 8 |
| layer 2 | 3×3 depth-wise + 1×1 point-wise, ReLU | 128 × 5 × 16 |
| pool 2 | 2×2 max, stride 2 | 64 × 2 × 16 |
| layer 3 | 3×3 depth-wise + 1×1 point-wise, ReLU | 64 × 2 × 32 |
| pool 3 | 2×2 average, stride 2 | 32 × 1 × 32 |
| classifier | flatten 1,024 → fully connected → 3, arg-max | 3 logits, class |

The published description fixes several things: the layer sequence, the channel counts
(8, 16, 32), max pooling after the first two layers and average pooling after the third,
the map sizes along the way, and the 1,024 → 3 classifier. The kernel size is not stated.
3×3 kernels, with a bias on both convolution stages and a batch-norm scale and shift on
each point-wise output, account for exactly the quoted 4,141 parameters:

    depth-wise   9·(1+8+16) + (1+8+16)      =  250
    point-wise   (8+128+512) + (8+16+32)    =  704
    batch norm   2·(8+16+32)                =  112
    classifier   1024·3 + 3                 = 3075
                                              4141

In this RTL batch normalisation is assumed folded into the point-wise weights and biases.
The padding ("same", zero) and the 2×2/stride-2 pooling that drops the odd last column
(11 → 5 → 2 → 1) are read off the published map sizes.

## Arithmetic: shift-add weights

`dscnn_pkg` defines the number formats, which are this design's choice:

* **Activations** are signed 8-bit. After every ReLU they lie in 0..127. The input
  samples use the full signed range.
* **Weights** are 4-bit codes `{s, e[2:0]}` meaning (−1)^s · 2^−e for e = 0..6. The
  code e = 7 means zero. `shift_mul` forms `act · 2^(6−e)` exactly, with no rounding, in
  15 bits. Every product therefore carries 6 fraction bits (`EMAX`).
* **Sums** are formed exactly in 24 bits (28 bits in the classifier). The bias, an 8-bit
  integer in activation scale, is added shifted left by 6.
* **Requantization** after each convolution stage is an arithmetic shift right by 6
  (floor), followed by saturation to 8 bits. The point-wise stage also applies ReLU.
  The depth-wise stage has no activation.
* **Logits** leave the classifier in the same ×64 scale. The class is the arg-max, and
  the lower index wins a tie.

The weights are synthesis constants, so each shift is plain wiring. A product costs at
most a negation, which folds into the adder tree behind it.

## Streaming a 3×3 layer through a row buffer

This is the least obvious part of the design. `conv_window` receives a map in raster
order: all 11 positions of time step 0, then time step 1, and so on. It keeps the rows in
a **four-slot circular buffer** (slot = row mod 4). Output row *e* needs input rows e−1,
e and e+1. It is emitted as soon as row e+1 is complete, one 3×3 window per clock, with
zeros outside the map. The fourth slot lets the next input row arrive while a row of
windows is emitted. The input is held off (`in_ready` low) only if it would overwrite row
e−1, which cannot happen when the consumer keeps up.

The image border sets the timing. Rows H−2 and H−1 can only be emitted after the last
input row has arrived, so each layer's last output leaves **2·W + 2 cycles** after its
last input. The 2·W cycles are the two rows of windows; the 2 cycles are the window
register and the output register. The same effect decides how soon the next patch can
enter: layer 1 takes new data only once its last row has been emitted. This gives

    latency  = H·W + 2·(W + W/2 + W/4) + 7 = 2,859 cycles   (first value in → class out)
    interval = H·W + 2·W                   = 2,838 cycles   (patches back to back)

`ds_conv_layer` joins `conv_window` to the combinational `dw_conv3x3` and `pw_conv1x1`
and registers the result. All taps and all channels of a pixel are computed in the same
cycle, so every layer processes one pixel per cycle. The layers after layer 1 get a pixel
only every 4 (layer 2) or 22 (layer 3) cycles. They idle most of the time, but they never
hold the pipeline up.

`pool2x2` keeps one partial maximum (or sum) per output column. The even row opens it,
the odd row completes it, and the pooled pixel leaves one cycle after the lower-right
input of its block. `fc_classifier` does not buffer the 1,024 features. Each of the 32
pooled pixels adds its 32 channels × 3 classes of shift-add products into three
accumulators as it arrives. The weights for the current position come from a constant
table indexed by the position. The flatten order is channel-major (f = c·32 + p), the
order in which a framework flattens a 32 × 32 × 1 tensor. The result is held until
`res_ready`.

All stages connect through valid/ready streams. A beat moves when both are high. Every
stage registers its output and keeps it stable while stalled; assertions check this for
the layer, window and classifier outputs.

## Top-level interface (`dscnn3_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `in_valid`, `in_ready`, `in_data` | in/out/in | 1/1/8 | sample stream: t = 0..255, for each t the positions x = 0..10 |
| `res_valid`, `res_ready` | out/in | 1 | result handshake |
| `res_class` | out | 2 | 0 hammer, 1 air pick, 2 excavator |
| `res_logits` | out | 3×28 | the three logits, scaled by 64 |

The parameters `H`, `W`, `C1`, `C2` and `C3` default to 256, 11, 8, 16 and 32. Smaller
maps work for experiments, as long as H is a multiple of 8 and W ≥ 8. The weight table
is indexed by layer, so changing the channel counts simply draws other placeholder
weights.

## Weights

The trained weights are not included. `dscnn_pkg::wcode()` and `dscnn_pkg::bias()`
compute a fixed set of placeholder weights from an integer hash of (layer, kind, index).
The exponent is drawn from 0..7 (1..7 for the wider layers 3 and 4, so that sums stay
in range). The biases are kept small (−2..1, and −8..7 in the classifier) so that the
deep features still depend on the input. With these weights the network computes real
numbers but recognises nothing: synthetic patches simply spread over the classes.
To deploy a trained model, quantize every folded weight to the nearest ± power of two (or zero).
Then replace the two function bodies with look-ups of the trained codes, keeping the
indexing documented in the package header: `c·9 + k` for depth-wise taps, `o·CIN + i`
for point-wise weights, `k·1024 + c·32 + p` for the classifier.

## Speed against the published FPGA figures

The published implementation reports 8,469 cycles per patch at a 2.24 ns clock
(0.019 ms) on a large UltraScale+ device. That is 13,494 patches per 0.256 s window, or
168.7 km of fiber at 12.5 m per patch. It uses 8,690 LUTs and 9,020 flip-flops, with no
DSP blocks or block RAM. On a small Artix-7 it reports 0.031 ms at 4.9 ns for 103.1 km.
The article does not describe how its implementation schedules the work. Its two figures
also do not agree in cycles: 0.031 ms at 4.9 ns is about 6,300 cycles, not 8,469.

This pipeline needs 2,838 cycles per patch, so at the same 2.24 ns clock it would keep up
with about 500 km of fiber. It was not mapped to an FPGA, so neither that clock nor a LUT
count comparable to 8,690 has been shown. Generic synthesis of the top gives about 2,700
flip-flop bits. It also gives about 16 kbit of small memories: the row buffers and the
classifier's weight table, which on an FPGA would become LUT-RAM or logic. Computing
every channel of a pixel at once is the simplest reading of the "full parallelization"
the article mentions. A design that must match its LUT budget would time-share the
datapaths of layers 2 and 3, which are idle most of the time.

## Where this RTL departs from, or adds to, the article

* Number formats, weight code, rounding and saturation: own choices. The article says
  only that multiplications become shifts.
* 3×3 kernels, batch norm folded into the point-wise stage, ReLU after the point-wise
  stage only: inferred from the parameter count, or assumed.
* Streaming row-buffer architecture, valid/ready interfaces, reset, one pixel per cycle:
  own choices. The schedule therefore differs from the published 8,469-cycle one.
* Flatten order, class encoding and tie rule of the arg-max: assumed.
* Weights: placeholders, see above.
* The article states a 1.5 m spatial sampling interval in one place and a 1.25 m
  interval in another. Only the latter matches 11 positions per 12.5 m patch. The RTL
  depends only on the 11 positions.
* The article quotes 601,600 FLOPs per patch. Counting two operations per
  multiply-accumulate, this network needs 2 × 262,912 = 525,824. The article does not
  give its counting convention, so the figure is not reconciled. The structure above
  reproduces the parameter count exactly.
* The reported Artix-7 utilisation (8,579 LUTs = 20.6 %, 10,068 FFs = 48.4 %) matches
  the device only with the two percentages swapped. This affects nothing here.

## Files

| file | contents |
|---|---|
| `rtl/dscnn_pkg.sv` | formats, types (`act_t`, `wcode_t`, `class_e`, `pool_mode_e`), weight functions |
| `rtl/shift_mul.sv` | power-of-two multiplier |
| `rtl/conv_window.sv` | four-row buffer and 3×3 window generator |
| `rtl/dw_conv3x3.sv` | depth-wise 3×3 stage |
| `rtl/pw_conv1x1.sv` | point-wise stage with bias, ReLU, requantization |
| `rtl/ds_conv_layer.sv` | one streaming depth-wise separable layer |
| `rtl/pool2x2.sv` | 2×2 max/average pooling |
| `rtl/fc_classifier.sv` | 1,024 → 3 layer and arg-max |
| `rtl/dscnn3_top.sv` | the whole accelerator |
| `tb/tb_ref_pkg.sv` | reference model of the network on whole arrays |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Every testbench is self-checking and ends with a line `TB_RESULT checks=N failures=M`.
With Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/dscnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_dscnn3_top.sv --top-module tb_dscnn3_top
    ./obj_dir/Vtb_dscnn3_top

Replace `tb_dscnn3_top` by the name of any other testbench to run it. Each one takes
at most a few seconds.

What the testbenches establish:

* `tb_shift_mul`: all 256 × 16 activation/code pairs.
* `tb_dw_conv3x3`, `tb_pw_conv1x1`: thousands of random pixels at the layer-2 and layer-3
  sizes, against the reference model. The reference multiplies by the weight value and
  does not shift.
* `tb_conv_window`, `tb_ds_conv_layer`, `tb_pool2x2`: several frames of reduced-size
  maps, with random input gaps and output back-pressure, compared pixel by pixel. A
  gap-free frame checks the exact end-of-frame timing (2·W+2 for a layer).
* `tb_fc_classifier`: 40 full-size feature maps, with exact logits, the class (each of
  the three wins at least once) and the one-cycle result latency.
* `tb_dscnn3_top`: five synthetic 256 × 11 patches through the full-size design at its
  default parameters. It compares the logits and class with the reference network and
  checks the 2,859-cycle latency, the 8,469-cycle published bound and the 2,838-cycle
  back-to-back interval. It also requires that input stalls, result back-pressure,
  overlapping patches, ReLU clamping and averaging all occur.
* `tb_realtime_stream`: continuous monitoring. 120 patches are streamed back to back
  through the full-size design. Every result is checked, every interval must be exactly
  2,838 cycles, and the average time per patch must fit the real-time budgets worked out
  below.

The real-time budgets come from the published monitoring ranges. 168.7 km of fiber in
12.5 m patches means 13,496 patches per 0.256 s. At a 2.24 ns clock that leaves 8,469
cycles per patch. 103.1 km at 4.9 ns leaves 6,334 cycles. This design needs 2,838.

The reference model shares only the weight table with the RTL. The tests therefore
establish that the hardware computes the network defined by that table and these number
formats. They say nothing about recognition accuracy, which depends on trained weights.

## Not included

The optical front end (laser, pulse shaping, amplifiers, circulator, photodetector), the
ADC and the stage that collects traces and cuts them into 256 × 11 patches are outside
this RTL. The accelerator expects ready-made patches on its input stream. Storing
256 traces of a 100 km fiber needs external memory, and the article does not describe
that stage.
