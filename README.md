# A 1 Mbit mixed-precision quantized encoder (NQE): RTL

This is synthesizable SystemVerilog for a small convolutional encoder. It turns
a 32x32 RGB image patch into a 256-bit binary code. It also has a binary
classifier that maps that code to one of 10 classes. The same hardware does two
jobs, and only its weights change between them:

* **classification**: the code goes to the on-chip classifier (a
  CIFAR-10-style task);
* **compression**: the code itself is the output. It costs 256 bits per 1024
  pixels, which is 0.25 bit per pixel. A decoder network elsewhere rebuilds the
  full frame from the codes of all patches.

The encoder is cheap because of three choices made at the network level. The
RTL keeps each of them in hardware form:

1. **Mixed precision.** The first two convolutions use quinary weights
   {-1, -0.5, 0, 0.5, 1} (3 bits), the next two ternary weights (2 bits), and
   all later layers binary weights (1 bit). The activations between layers are
   1 or 2 bits. Only the input pixels are 8 bits. No layer needs a multiplier.
2. **Bit-shift normalisation.** Each batch-normalisation layer is replaced by
   one power-of-two scale shared by the whole layer. A Sign or Heaviside after
   it ignores the scale, so there it costs nothing. In front of the 2-bit
   activation the scale becomes a 4-bit constant that moves a bit position.
3. **HWMSB activation.** The 2-bit activation ("half-wave most significant
   bit") keeps only the position of the leading one of a positive value, on a
   log2 scale. Negative values become zero.

A grouped last convolution and a factorised bottleneck keep the weight memory
at 1,072,704 bits when F = 64. That is the "1 Mb" of the title.

The design follows a published network description. That description fixes
the arithmetic: layer shapes, precisions, activation functions and the HWMSB
bit mapping. It does not describe a hardware architecture. The dataflow,
memory organisation, schedule, number encodings and host interface here are
this design's own choices. They are marked as such below.

## 1. The network

`F` is the width parameter (default 64). The input is one 32x32x3 patch.

| stage | input | weights | precision w / in | after the MACs |
|---|---|---|---|---|
| L1 conv 3x3 | 32x32x3 | 3x3x3xF, + F biases | 3 / 8 | Sign |
| L2 conv 3x3 | 32x32xF | 3x3xFxF | 3 / 1 | BSN + HWMSB, 2x2 max pool |
| L3 conv 3x3 | 16x16xF | 3x3xFx2F | 2 / 2 | Sign |
| L4 conv 3x3 | 16x16x2F | 3x3x2Fx2F | 2 / 1 | BSN + HWMSB, 2x2 max pool |
| L5 conv 3x3 | 8x8x2F | 3x3x2Fx4F | 1 / 2 | Sign |
| L6 group conv 3x3, 4 groups | 8x8x4F | 3x3xFx4F | 1 / 1 | Heaviside, 2x2 max pool |
| bottleneck: depthwise 4x4 | 4x4x4F | 4x4x1x4F | 1 / 1 | (none) |
| bottleneck: FC | 4F | 4Fx4F | 1 / int | Sign -> **code** (4F bits) |
| classifier FC | 4F | 4Fx10 | 1 / 1 | arg-max -> **class** |

The encoder is L1 to the bottleneck. Every convolution is 3x3 with zero
padding, so it keeps the spatial size. Pooling halves the size, and three
pooling steps take 32 down to 4.

Weight memory at F = 64, in bits: 5,184 + 110,592 + 147,456 + 294,912 +
294,912 + 147,456 + 4,096 + 65,536 + 2,560 = **1,072,704**. The bottleneck
(depthwise + FC) takes 69,632 of these. A plain 4x4x4F -> 4F dense layer in its
place would take 1,048,576 bits on its own.

## 2. Numbers inside the datapath

Everything is an integer. The real-valued scale factors (0.5 steps in the
quinary weights, the 1/3 steps of the HWMSB output) are absorbed into the
layer's power-of-two normalisation.

| quantity | encoding (`nqe_pkg`) | integer value |
|---|---|---|
| quinary weight | 3-bit two's complement | -2, -1, 0, 1, 2 |
| ternary weight | 2-bit two's complement | -1, 0, 1 |
| binary weight | 1 bit | 1 -> +1, 0 -> -1 |
| pixel | 8 bits unsigned | 0..255 |
| Sign output | 1 bit | 1 -> +1 (input >= 0), 0 -> -1 |
| HWMSB output | 2 bits | 0..3 (stands for 0, 1/3, 2/3, 1) |
| Heaviside output | 1 bit | 1 if input > 0, else 0 |

`qdot` forms each lane product from a select, at most one left shift (for a
weight magnitude of 2) and a negation. An adder tree then sums the lanes. The
accumulators are 24 bits. The worst case is the first layer: 27 taps x 255 x 2
plus the bias, which needs about 15 bits. The codes 011, 100, 101 (quinary) and
10 (ternary) are not valid weights.

## 3. HWMSB and the folded normalisation

This is the least obvious part of the design. Think of the normalised
pre-activation as a fixed-point number x. HWMSB gives:

| x | leading one of x | code |
|---|---|---|
| x < 0.125, or negative | below 2^-3, or sign set | 0 |
| 0.125 <= x < 0.25 | at 2^-3 | 1 |
| 0.25 <= x < 0.5 | at 2^-2 | 2 |
| x >= 0.5 | at 2^-1 or above | 3 |

The hardware never forms x. It works on the integer accumulator `acc`. The
reference position `ref_pos` is the accumulator bit that stands for 0.125, the
lowest bit that still gives a non-zero code. `hwmsb` finds the leading one p of
a positive `acc`. It returns 1 for p = ref_pos, 2 for p = ref_pos+1, 3 for
p >= ref_pos+2 and 0 for anything lower. The layer's normalisation 2^s scales
x, so it only moves the reference position. That is why normalisation plus
activation cost one 4-bit register per HWMSB layer.

Converting a trained model: say x = u * 2^s * acc. Here u is the real value of
one accumulator step, the product of the weight scale and the activation scale
(for example 0.5 for quinary weights on Sign inputs). Then
ref_pos = log2(0.125 / (u * 2^s)), which must be an integer in 0..15. Layers 2
and 4 each have their own `ref_pos` (cfg select 10, address 0 and 1). Both
reset to 6.

## 4. Group convolution and channel shuffle (L6)

L6 splits its 4F input channels into 4 groups of F. Output channel `co`
belongs to group g = co / F and reads only the F input channels of group g.
That quarters the weights and the MACs. The outputs are then interleaved
across groups. Result `co` is written at channel (co mod F)*4 + g, which is the
ShuffleNet-style transposition. The bottleneck that follows is depthwise, so
the shuffle only fixes which weights meet which channel. A trained weight set
must use the same permutation.

## 5. Bottleneck, code and classifier

The last max pool leaves a 4x4x4F binary map h. The bottleneck first reduces
each channel over its 16 positions with +-1 weights:
d[c] = sum_p (+-h[p][c]), which lies in -16..16. A binary 4F x 4F layer then
mixes the channels, with no activation between the two steps:
s[j] = sum_c (+-d[c]). The code bit is `s[j] >= 0`. Normalisation before Sign is
skipped because it cannot change a sign.

The classifier scores each class k as 2*popcount(XNOR(w_k, code)) - 4F and
reports the arg-max. The lowest index wins a tie. Its final normalisation is
omitted because it cannot change the order of the scores.

## 6. Microarchitecture

```
 pix_* --> [input buffer 1024x24] --> L1 --> [buf] --> L2 --> [buf] --> ... --> L6 --> [buf 16x4F]
                                                                                           |
 cfg_* --> weight memories inside every stage                  bottleneck --> code --> classifier --> class_idx
```

* **One engine per layer, run in sequence.** `qconv_layer` is a single
  parameterised engine, instantiated six times. Each instance owns its weight
  memory (`nqe_sram`, depth COUT*9, one word per (output channel, tap) holding
  all CIN/G lanes) and its output buffer (one word per pixel, all channels).
  The next layer reads that buffer directly. The top-level sequencer starts
  the layers one after another on one patch, so there is no overlap between
  layers or between patches.
* **Loop order in a layer**, outer to inner: output position (on the pooled
  grid), 2x2 sub-pixel, output channel, kernel tap. Each cycle handles one tap
  of one output channel across all input channels of its group. Taps outside
  the image are masked (zero padding). After the 9th tap the activation is
  applied. The result is folded into a per-position word register with a
  running maximum, which is the pooling step. The word is written once all
  channels and sub-pixels are done.
* **Pipeline**: address generation -> memories (1-cycle read) -> adder tree,
  accumulate, activation, pooling -> buffer write.
* **Timing**: a conv layer takes 9*COUT*H*H + 2 cycles from start to done. The
  bottleneck takes 16 + 4F + 2 and the classifier 10 + 2, plus one hand-over
  cycle per stage. One patch takes **2,064,691 cycles in classify mode** and
  2,064,678 in compress mode at F = 64 (258,131 / 258,118 at F = 8). The
  testbenches check these numbers exactly. L1 and L2 take 57% of the time.
  Adding output-channel lanes to `qconv_layer` would be the first speed-up;
  the paper states no throughput target.

Memory bits at F = 64: 1,072,704 of weights, 24,576 of input buffer and
167,936 of inter-layer buffers.

## 7. Using the top level (`nqe_top`)

| port | meaning |
|---|---|
| `pix_we, pix_addr[9:0], pix_data[23:0]` | write pixel y*32+x; R, G, B in bits 7:0, 15:8, 23:16 |
| `cfg_we, cfg_sel, cfg_addr[11:0], cfg_data[4F-1:0]` | load weights and parameters (map below) |
| `start, mode` | start one patch; `mode` 1 = classify, 0 = compress (stops after the code) |
| `busy, done` | `done` pulses for one cycle at the end |
| `code[4F-1:0]` | latent code, valid from `done` until the next run |
| `class_valid, class_idx[3:0], class_score` | classifier result (classify mode) |

`cfg_sel` values: 0-5 select the weights of L1-L6, 6 the depthwise weights,
7 the bottleneck FC, 8 the classifier, 9 the L1 biases and 10 the two
`ref_pos` values. Conv weight word `co*9 + 3*ky + kx` holds lane i (input
channel i of the group) at bits `[i*WBITS +: WBITS]`. Depthwise word p
(= 4*row + col) holds channel c at bit c. FC word j holds input c at bit c.
Classifier word k holds input c at bit c. L1 biases are 16-bit signed numbers
in accumulator units.

Switching between classification and compression means loading the other
weight set over `cfg_*`. No other state needs resetting. The memories have no
reset. Only control state is reset, asynchronously and active low on `rst_n`.

## 8. Where this departs from, or adds to, the source description

* Everything in section 6, plus the host interface, the integer encodings and
  the cfg map, is this design's own.
* The source text gives the first layer channel biases, but its comparison
  table lists a bias precision of 0. The biases are kept, at an assumed width
  of 16 bits.
* Sign(0) = +1 and Heaviside(0) = 0 are choices; the source does not say.
* The bottleneck FC takes the integer depthwise sums, because the source text
  says there is no activation between the two steps. Its layer table lists a
  single 1-bit input precision across both rows, which could be read
  otherwise.
* In the last block, max pooling is applied after the Heaviside (a 1-bit OR).
  The source notes that this order gives the same feed-forward result.
* The channel shuffle is the ShuffleNet transposition. The source shows only
  an illustrative routing.
* Not included: the patch splitter for whole frames (a VGA frame is 15x20
  patches, fed one at a time through `pix_*`), and the remote floating-point
  decoder that rebuilds images from the codes. Training-time features such as
  the histogram-equalised quantiser step are not hardware and are absent.
* Memories are plain arrays, not foundry SRAM macros.

## 9. Verification

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
The expected values come from `tb/nqe_ref_pkg.sv`. That is a behavioural model
written loop by loop in plain integers. It uses threshold comparisons for
HWMSB rather than a leading-one search.

| testbench | what it checks |
|---|---|
| `tb_hwmsb` | all 16 reference positions, values around every threshold, random values |
| `tb_qdot` | all seven weight x activation pairings, padding enable, extremes |
| `tb_nqe_sram` | read latency, read-during-write returns old data |
| `tb_qconv_layer` (with `qconv_harness`) | four layer kinds (pixel/quinary/bias/Sign; Sign/quinary/HWMSB/pool; HWMSB/ternary/Sign; 4-group binary/Heaviside/pool/shuffle), every output code, run time |
| `tb_bottleneck` | code bits and run time over six random weight sets |
| `tb_classifier` | arg-max, score, tie rule, run time |
| `tb_nqe_top` | F = 8 end to end: classify and compress runs, weight reload, cycle counts, coverage of every HWMSB code and both Heaviside values |
| `tb_nqe_top_full` | the same at the default F = 64 (about 20 s with verilator) |
| `tb_frame_compress` | compress workload at F = 64: a synthetic frame cut into 2x2 patches, each patch code checked against the model and the run time against the cycle formula |

Running one of them with verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_nqe_top rtl/nqe_pkg.sv tb/nqe_ref_pkg.sv tb/tb_nqe_top.sv
./obj_dir/Vtb_nqe_top
```

The tests use random weights, not trained ones. They show that the RTL
computes the specified integer network bit-exactly. They say nothing about
accuracy. Trained weights would need the conversion of section 3 and the
encodings of section 2.
