# Hybrid denoiser + classifier radio trigger: SystemVerilog RTL

A radio antenna that watches for air showers from cosmic rays sees mostly
noise. There are transient bursts and narrow-band interference, and weak shower
pulses sit at or below the noise level. A plain amplitude threshold either
fires on the noise or misses the weak pulses. The trigger built here tries to
do better by splitting the work into two small neural networks. A
**denoiser** first turns each 128‑sample trace into a cleaned waveform. A
**classifier** then scores that cleaned waveform, and the trigger fires when
the score is above a threshold. Both networks are small 1‑D convolutional
networks with a few hundred weights and narrow fixed‑point arithmetic. The aim
is a trigger that fits a small station FPGA.

This RTL gives the full inference chain for one channel:

```
 16-bit samples ──► z-score normaliser ──► denoiser (11 Conv1D layers) ──► classifier (6 Conv1D blocks + head) ──► score > tau ──► trigger
   (or PRBS16)          zscore_norm            denoiser                         classifier, gap_dense_head
                                               └──► cleaned trace stream (den_*)
```

A `den_bypass` input skips the denoiser, so the classifier scores the
normalised trace directly. That is the classifier-only trigger, the reference
the hybrid chain is measured against. It uses the same classifier hardware,
loaded with weights trained for raw traces.

The network shapes and number formats are those of the published design. The
training flow and the trained weight values are not part of this RTL. The
weights are loaded at run time over a small configuration bus.

## Files

| file | content |
|---|---|
| `rtl/ht_pkg.sv` | shared constants, the layer tables, the configuration-bus type, `fx_requant()` |
| `rtl/conv1d_layer.sv` | generic fixed-point Conv1D (+ReLU) (+MaxPool 2) layer with its own weight registers |
| `rtl/zscore_norm.sv` | per-trace normalisation `(x-mean)/std` |
| `rtl/denoiser.sv` | the 11-layer denoiser with its skip connection |
| `rtl/classifier.sv` | the six classifier blocks and the head |
| `rtl/gap_dense_head.sv` | global average pooling + Dense(1) |
| `rtl/prbs16.sv` | 16-bit LFSR test source |
| `rtl/hybrid_trigger_top.sv` | top level: source select, stages, frame controller, threshold |
| `tb/*.sv` | one self-checking testbench per module, a streaming testbench over many traces, plus `tb_ref_pkg` (reference arithmetic) and `tb_conv1d_case` (a helper) |

## The two networks

All layers use "same" padding, so the convolution output is as long as its
input. The denoiser therefore keeps all 128 positions. In the classifier, each
block halves the length with a max-pool of 2.

**Denoiser.** Everything uses one format, `ap_fixed<14,8>`: 14 bits, of which
8 are integer bits including the sign, and 6 are fractional bits. The range is
−128 … +127.98 in steps of 1/64.

| # | layer | kernel | in → out channels | activation | config base address |
|---|---|---|---|---|---|
| 0 | Conv1D | 3 | 1 → 4 | ReLU | 0 |
| 1 | Conv1D | 3 | 4 → 4 | ReLU | 16 |
| 2 | Conv1D | 3 | 4 → 4 | ReLU | 68 |
| 3 | Conv1D | 3 | 4 → 4 | ReLU | 120 |
| 4 | Conv1D | 2 | 4 → 4 | ReLU | 172 |
| 5 | Conv1D | 3 | 4 → 4 | ReLU | 208 |
| 6 | Conv1D | 3 | 4 → 4 | ReLU | 260 |
| 7 | Conv1D | 2 | 4 → 4 | ReLU | 312 |
| 8 | Conv1D | 3 | 4 → 4 | ReLU | 348 |
| 9 | Conv1D | 2 | 4 → 4 | ReLU | 400 |
| — | skip: input sample added to each of the 4 channels, saturated | | | | |
| 10 | Conv1D | 1 | 4 → 1 | none | 436 |

This adds up to 441 weights and biases.

**Classifier.** Every block is Conv1D with kernel 3, then ReLU, then max-pool 2.
The formats are written as `<total bits, integer bits>`.

| block | channels | length in → out | weight | bias | conv result | ReLU / pool result | base |
|---|---|---|---|---|---|---|---|
| 1 | 1 → 4 | 128 → 64 | <5,2> | <4,1> | <14,4> | <11,4> | 512 |
| 2 | 4 → 4 | 64 → 32 | <6,2> | <7,1> | <17,6> | <13,5> | 528 |
| 3 | 4 → 2 | 32 → 16 | <6,2> | <4,1> | <16,6> | <14,6> | 580 |
| 4 | 2 → 2 | 16 → 8 | <5,2> | <7,1> | <16,7> | <14,7> | 606 |
| 5 | 2 → 6 | 8 → 4 | <7,2> | <7,2> | <19,8> | <15,7> | 620 |
| 6 | 6 → 4 | 4 → 2 | <6,2> | <7,1> | <19,8> | <15,7> | 662 |
| head | GAP over 2 positions → <15,7>; Dense 4 → 1, weight <6,1>, bias <6,1>, result <15,6> | | | | | | 738 |

This adds up to 231 weights and biases. The classifier takes the denoiser's
`<14,8>` output as it is.

### Fixed-point rules

Every format conversion in the design goes through `ht_pkg::fx_requant()`. It
rounds to the nearest value, and a value exactly halfway between two codes goes
up (toward +∞). A result that does not fit is clamped to the largest or
smallest code. This is the `ap_fixed<…,AP_RND,AP_SAT>` behaviour the networks
were quantised for. Each convolution output is computed like this:

1. The bias and all K·C_in products are summed exactly, in an accumulator wide
   enough that it never overflows.
2. The sum is converted once to the layer's "conv result" format.
3. ReLU is applied.
4. The value is converted to the activation format.
5. Max-pool works on these activation codes.

Rounding only once per layer is this design's choice. A tool flow that
saturates a narrow accumulator after every addition can give different results
when a partial sum overflows.

The classifier has no output non-linearity. The score is the Dense output in
`<15,6>` format, which means 9 fractional bits. A sigmoid is monotonic, so "the
probability is above τ" is the same test as "the score is above logit(τ)". Set
the `tau` port to logit(τ) in the score's format.

## The normaliser

The networks expect each trace scaled to zero mean and unit standard deviation,
using that trace's own mean and population standard deviation. The published
design counts this stage as part of the implemented chain but does not say how
it is built. This RTL does it with exact integer arithmetic and a single
rounding at the end:

* While the 128 samples stream in, it stores them and adds up `S1 = Σx` and
  `S2 = Σx²`.
* It computes `D = 128·S2 − S1²`. This equals 128² times the variance, with no
  rounding.
* `root = ⌊√(D·2¹⁶)⌋` takes 32 steps of one bit each. The result equals 256·128·σ.
* `r = ⌊2⁴⁸ / root⌋` takes one restoring division of 49 steps.
* Each output is `(128·x − S1)·r`. This equals z·2⁴⁰ and is rounded and
  saturated to `<14,8>`, one multiplication per clock.

The extra 8 bits in the square root and the 48‑bit reciprocal keep the error
to at most one output LSB. The testbenches check against double-precision
arithmetic and allow ±1 LSB. If every sample in a trace has the same value, the
variance is zero and every output is 0. Samples are taken to be signed two's
complement.

## Frame pipeline, handshakes and timing

Each stage works on a whole frame, and each layer keeps its output frame in
registers. `conv1d_layer` computes one position per clock, with all output
channels in parallel. It reads whatever input taps it needs straight from the
previous layer's registers. Stages and layers signal each other with a
start pulse and a done pulse.

The top level runs the three stages as a frame pipeline:

* After normalising a frame, the normaliser holds it (`full`). It holds it
  until the denoiser is completely done, because the skip connection reads the
  normalised input again in the last layer. Only then does it accept the next
  frame.
* The denoiser's output frame is held until the classifier has finished with it.
* So the normaliser collects frame *n+1* while the classifier scores frame *n*.
* `s_ready` is low whenever the normaliser is not collecting. Inputs are
  stalled, never dropped.
* With `den_bypass` high when a normalised frame is handed on, that frame goes
  straight to the classifier. The normaliser then holds it until the
  classifier is done. The denoiser stays idle, and no `den_*` samples appear
  for that frame. `den_bypass` is sampled once per frame, so it can change at
  any time. Results always come out in input order.

| stage | clocks |
|---|---|
| collect a frame | 128 (one sample per clock when `s_valid` is held high) |
| normalise | 210 (1 + 32 + 49 + 128) |
| denoiser | 11 × 129 = 1419 |
| classifier | 6 blocks (128+64+32+16+8+4 positions + 1 each) + 1 head = 259 |
| last sample → `res_valid` | 1891; 472 in bypass (checked in simulation) |
| steady-state frame period | 1758 = 1 + 128 + 210 + 1419; in bypass 599 = 1 + 128 + 210 + 1 + 259 (checked in simulation) |

The published implementation runs at a 6 ns clock. At that clock, 128 + 1891
clocks come to about 12.1 µs per trace. That is the same order as the 13.55 µs
reported for the smallest target device. However, this RTL is not the
HLS-generated code that number was measured on.

### Top-level ports (`hybrid_trigger_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `s_valid`, `s_ready`, `s_data` | in/out/in | 1/1/16 | sample stream; a sample is taken when both are high |
| `den_bypass` | in | 1 | 1 = classifier-only branch: the classifier scores the normalised trace; sampled when a frame is handed on |
| `src_prbs` | in | 1 | 1 = take samples from the internal PRBS16 source instead (`s_ready` is then low); change it only between frames |
| `cfg_we`, `cfg_addr`, `cfg_data` | in | 1/12/16 | write one weight or bias; the value is right-aligned, and bits above the field width are ignored |
| `tau` | in | 15 | threshold, in the score's format; sampled when a frame's score is ready |
| `res_valid`, `trigger`, `score` | out | 1/1/15 | one pulse per frame; `trigger = score > tau` |
| `den_valid`, `den_idx`, `den_data` | out | 1/7/14 | the cleaned trace, one sample per pulse, while the last denoiser layer runs (not in bypass) |

**Configuration bus.** Inside a layer, the weights come first, in
`[out][in][tap]` order: word `base + (o·C_in + c)·K + k`. One bias per output
channel follows. Layer bases are in the tables above and are computed by
`den_base()` and `clf_base()` in `ht_pkg`. Weights reset to zero. Only write
weights while no frame is in flight, because the layers read them while
computing.

**PRBS16 source.** The register starts at all ones. On every sample taken it
shifts one bit toward the MSB, and `q[15]^q[13]^q[12]^q[10]` enters bit 0. This
is the polynomial x¹⁶+x¹⁴+x¹³+x¹¹+1, with period 65535. It exists to drive the
chain with changing data when no real input is connected. It plays no part in
triggering.

## How far this follows the published design

Taken from the published description:
* the chain (normalise, denoise, classify, compare);
* the 128-sample frame and the 16-bit input;
* the layer sequence, kernel sizes and filter counts of both networks;
* every fixed-point format and the rounding and saturation modes;
* the PRBS seed, taps and one-shift-per-clock rule.

This design's own choices, where the description is silent:
* "same" padding, with the extra zero on the right for kernel 2 (Keras
  convention);
* a max-pool size of 2. This is the size that takes 128 positions down to 2
  after six blocks;
* how the skip connection is combined. The network diagram draws it from the
  input to the final kernel‑1 layer. Here the input is added to every channel
  of the tenth layer's output, and the sum goes into that final layer;
* one rounding per layer (see above);
* the normaliser's arithmetic;
* all handshakes, the frame controller and its overlap rule, the configuration
  bus and address map, the `src_prbs` select and the `den_bypass` pin;
* the PRBS shift direction;
* thresholding the pre-sigmoid score.

Known disagreements inside the source description:
* **Denoiser layer count.** The prose describes four Conv1D+ReLU blocks, two
  intermediate layers, one refinement stage and an output projection. The
  diagram shows ten Conv1D+ReLU layers and the projection. This RTL follows the
  diagram.
* **Parameter counts.** The quoted counts are 868 for the denoiser and 460 for
  the classifier. The printed layers give 441 and 231. The RTL holds exactly
  what the printed layers need.

Not included: the trained weight values, the training and quantisation flow,
the classical Hilbert-envelope threshold trigger, and with it the
denoiser-only branch that applies that threshold to the cleaned trace. The
description only names that trigger and refers to an earlier definition of it.
It is a comparison baseline, not part of the trigger firmware. The cleaned
trace is available on the `den_*` stream for anyone who wants to add such a
stage. Also not included: any vendor-specific floorplanning. The structure is generic
registers and multipliers. It does not map feature maps to block RAM and does
not share multipliers between layers. Generic synthesis gives about 89 k
flip-flop bits, most of them the per-layer feature-map registers. That is more
than the ~40 k flip-flops reported for the HLS implementation. Moving the
feature maps into RAMs would be the first step to close that gap.

## Verification

Each testbench ends by printing `TB_RESULT checks=N failures=M`. Each one
compares the RTL with reference arithmetic written separately in
`tb/tb_ref_pkg.sv`. That reference works in double precision, with
`floor(v·2^f + 0.5)` and clamping.

| testbench | what it checks |
|---|---|
| `tb_conv1d_layer` | 4 layer shapes (kernel 3 / 2 / 1, a pooled mixed-format classifier block), every output, the output stream, the LEN+1-clock latency |
| `tb_zscore_norm` | noise, pulse, offset, full-scale and constant traces against double-precision z-scores (±1 LSB), stall, 210-clock latency, hold until release |
| `tb_denoiser` | full-size 128-sample frames through all 11 layers with random weights, every output and stream sample, the 11·(LEN+1) latency |
| `tb_classifier` | 24 full-size frames, random weights over each block's whole format range, every stored activation of all six blocks, the score and the 259-clock latency |
| `tb_gap_dense_head` | 200 head evaluations including saturating ones |
| `tb_prbs16` | every state against a bit model, hold when disabled, period 65535 |
| `tb_stream_workload` | full default size, 64 traces streamed back to back, the last 16 through the bypass with `s_valid` never dropped (half noise only, half with an injected bipolar pulse of random position and height): every normalised frame, every score and trigger bit in order, none lost, and the steady frame periods (1758 clocks, 599 in bypass) |
| `tb_hybrid_trigger_top` | full default size, end to end: the normalised frame, the cleaned trace, the score, the trigger and the latency for 13 frames from both sources, three of them through the bypass, with a weight reload. It requires at least one input stall, one frame overlap, one fired trigger, one rejected frame, one PRBS frame, one zero-variance frame and one bypass frame |

The weights in these tests are random, not trained, so the tests check the
arithmetic and the control, not trigger efficiency.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/ht_pkg.sv tb/tb_ref_pkg.sv rtl/conv1d_layer.sv rtl/gap_dense_head.sv \
  rtl/classifier.sv rtl/denoiser.sv rtl/zscore_norm.sv rtl/prbs16.sv \
  rtl/hybrid_trigger_top.sv tb/tb_hybrid_trigger_top.sv \
  --top-module tb_hybrid_trigger_top -o sim
./obj_dir/sim
```

For another testbench, list `ht_pkg`, `tb_ref_pkg` and the modules it uses
(`tb_conv1d_layer` also needs `tb/tb_conv1d_case.sv`). Each simulation runs in
under a second. Compiling the full-size denoiser and top-level testbenches
takes up to about a minute, because every layer is unrolled into registers.

## Changing the design

* **New weights.** Write them over the configuration bus. Convert each trained
  value to its layer's format, for example round(w·2⁶) for the denoiser, and
  write the two's-complement code.
* **Different network shape.** Edit the `DEN_*` and `CLF_*` tables in
  `ht_pkg`. `den_base()` and `clf_base()` follow automatically. The classifier
  instances are written out one per block, because the blocks differ in type.
* **Different frame length.** The `LEN` parameter of the top level must be a
  power of two of at least 64 for the classifier (its head averages
  `LEN/64` positions). The testbenches' reference functions handle up to 128
  positions.
