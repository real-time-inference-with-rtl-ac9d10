# Frame-by-frame CNN data selection for a liquid-argon TPC

A liquid-argon time projection chamber (LArTPC) reads every sense wire
continuously. If the waveforms of neighbouring wires are put side by side, one
drift period of one collection plane becomes a 2D image. In the reference
geometry this is 480 wires × 4488 time ticks (2.25 ms), with 12-bit ADC samples.
More than 99.9 % of these images hold only electronics noise and radiological
background. The rare images worth keeping hold either a low-energy interaction
(LE, e.g. supernova neutrinos) or a high-energy one (HE).

This RTL makes the keep/discard decision in hardware, one frame at a time:

```
 samples ──► de-noise ──► ROI finder ───────────────┐ ROI box / empty
 (8 lanes)     (<520→0)     (bounding box of >560)  │
                   │                                 ▼
                   └──► two-bank frame buffer ──► ROI resizer ──► CNN engine ──► decision
                        (one bank filling,          (64×64,        (Q-CNN02-DS-OP,   (frame, class,
                         one bank being read)        nearest        NB / LE / HE)     keep, empty,
                                                     neighbour)                       dropped, probs)
```

Each frame leaves exactly one decision. `keep` is 1 when the class is LE or
HE. The decision is meant to control an external store that holds the full
multi-plane frame while the decision is made. That store is not part of this
RTL.

## The stream and the frame buffer

Samples arrive as beats of `LANES` = 8 adjacent wires of one time tick. Beat
`g` of a tick holds wires `8g … 8g+7`, and ticks arrive in order. `in_sof`
marks the first beat of a frame. A frame is exactly `NT·NCH/LANES` beats,
which is 269,280 at full size. Nothing stalls the detector: there is no
back-pressure.

- **De-noising** (`denoise`) sets every sample below `denoise_thr` (default
  520 counts) to zero. It is one register stage.
- **ROI search** (`roi_finder`) runs in parallel with buffering. It keeps the
  lowest and highest wire and tick of any sample above `roi_thr` (default
  560). When the last beat is sampled it reports the box, or `roi_empty` if
  no sample passed.
- **Frame buffer** (`frame_buffer`) has two banks of `NT·NCH/LANES` words of
  `LANES`×12 bits, about 51.7 Mbit in total at full size. While one bank
  fills, the other can be read by the CNN side. The read port addresses a
  single sample (wire, tick) and returns it one clock later.

## When the network runs, and when it does not

The top (`cnn_trigger_top`) decides at the last beat of every frame:

| Frame outcome | Decision | CNN used |
|---|---|---|
| ROI empty | `empty=1`, class NB, `keep=0`, two clocks after the last beat | no (bypass) |
| ROI non-empty, CNN side idle | the bank is handed to the CNN side; class from the network, `keep` = LE or HE | yes |
| ROI non-empty, CNN side still busy | `dropped=1`, class NB, `keep=1` (forward unclassified) | no |

Background-only frames whose ROI is empty never wake the network.

The overflow rule keeps the bank-flip logic trivial and loses no candidate
signal. At full size it cannot trigger: a classified frame needs about
8,800 clocks, while the next frame takes 269,280. It matters for small
configurations and for bursts.

Decisions from the network and frame-end decisions can fall in the same
clock. In that case the network's result goes first and the other waits one
clock in a pending register. `dec.frame` carries the frame sequence number,
so the consumer never has to infer order.

## Resizing the ROI

The network input is a fixed 64×64 image, while an ROI can be anything from
1×1 up to the whole frame. `roi_resizer` fills the image by nearest-neighbour
sampling, writing one pixel per clock (4096 clocks):

```
row i (wire)  : ch = ch_lo + floor(i · (ch_hi − ch_lo + 1) / 64)
column j (tick): t = t_lo  + floor(j · (t_hi  − t_lo  + 1) / 64)
pixel          = de-noised ADC(ch, t) / 128   as ap_fixed<16,6>
```

Scaling by 1/128 is a left shift of the 12-bit code by 3 into the 10
fraction bits of ap_fixed<16,6>. It is lossless over 0…4095, so the whole
input range fits below 32.

Nearest-neighbour sampling, the orientation (wires are rows) and the
scaling are all choices of this design. A trained network must be trained
with the same convention.

## The network and its arithmetic

`qcnn_engine` runs a small two-convolution network with 4,371 trainable
parameters:

| Stage | Shape | Output format |
|---|---|---|
| input | 64×64×1 | ap_fixed<16,6> (Q5.10) |
| zero pad, conv 3×3, 8 filters, bias | 64×64×8 | cast to <16,6> |
| ReLU, max pool 4×4 | 16×16×8 | ap_fixed<7,1> (round, saturate) |
| zero pad, conv 3×3×8, 16 filters, bias | 16×16×16 | cast to <16,6> |
| ReLU, max pool 4×4 | 4×4×16 | <7,1> |
| dense 256→12, bias, ReLU | 12 | <16,6>, then <7,1> |
| dense 12→3, bias | 3 scores | <16,6> |
| softmax | 3 probabilities + argmax | <16,6> |

Number formats:

- Weights are ap_fixed<7,1> (sign plus 6 fraction bits).
- Convolution biases are ap_fixed<16,6>; dense biases are ap_fixed<7,1>.
- Sums are formed exactly, in 48 bits. Each layer output is cast once to
  <16,6> with the ap_fixed defaults: truncate toward −∞ and wrap.
- The ReLU output is rounded to <7,1> by adding half an LSB and truncating,
  then saturated at 63/64 (`cnn_pkg::relu_fx7`).

**Convolution blocks** (`conv_pool_layer`, used twice):

- A scanner walks the zero-padded grid (66×66, then 18×18) in raster order,
  one position per clock. Borders are inserted as zeros.
- Two line buffers and a 3×3 window register deliver one full window per
  clock. All 9·CIN·COUT products are formed in parallel.
- A row of pooling registers keeps the running 4×4 maxima. A pooled pixel
  leaves as soon as the last pixel of its window is done.
- Latency is (H+2)² + 3 clocks from `start`.

**Dense layers** (`dense_layer`): the second block's pooled pixels (16
channels each) go straight into the 256→12 layer. That layer accumulates one
pixel per beat, so it costs no extra pass. The 12→3 layer takes its input in
one beat.

**Softmax** (`softmax`) has no exponential unit:

1. Subtract the maximum score from each score.
2. Multiply by log₂e (1477/1024).
3. Split the result into integer and fraction parts. Each exponential is a
   32-entry table of 2^(−k/32), shifted right by the integer part.
4. One division per class normalises the sum to 1 (floor, 10 fraction
   bits).

The class is the argmax of the scores; ties go to the lower index (NB before
LE before HE).

**Latency.** The engine needs 66·66 + 18·18 + 12 = 4692 clocks from `start`
to `done`. The two scans account for 4680 of them. At 200 MHz this is
23.5 µs. A whole classified frame (resize plus inference) is decided about
8,790 clocks (44 µs) after its last beat.

## Loading the trained parameters

Parameters are plain registers written through `wt_we`, `wt_addr[14:0]` and
`wt_data[15:0]`. Write them while no inference is running.

| `wt_addr[14:12]` | Layer | Entries (`wt_addr[11:0]`) |
|---|---|---|
| 0 | conv1 | 72 weights `((kr·3+kc)·1+ci)·8+co`, then 8 biases (<16,6>) |
| 1 | conv2 | 1152 weights `((kr·3+kc)·8+ci)·16+co`, then 16 biases (<16,6>) |
| 2 | dense1 | 3072 weights `n·12+o`, then 12 biases (<7,1>) |
| 3 | dense2 | 36 weights `n·3+o`, then 3 biases (<7,1>) |

- Weight order is the Keras kernel order: kernel shape (3,3,CIN,COUT), dense
  (N_in, N_out).
- The dense1 input index `n = (row·4 + col)·16 + channel` is the Keras
  flatten order of the 4×4×16 map.
- <7,1> values sit in the low 7 bits of `wt_data`.

## How far the design follows the reference scheme

These parts are taken from the reference scheme:

- the chain de-noise → ROI → resize → CNN → keep if LE or HE;
- the thresholds 520 and 560;
- the frame size;
- the network's shapes, its 4×4 pooling and its fixed-point formats;
- the latency target of 4680 clocks at 5 ns.

These are choices of this design:

- the lane width of the input stream (8);
- the ping-pong buffering, the empty-ROI bypass reporting and the overflow
  policy;
- nearest-neighbour resizing and ADC/128 scaling;
- the streaming organisation of the convolutions, which is what gives 4692
  rather than 4680 clocks;
- the softmax approximation (a table of 2^(−k/32));
- the parameter address map.

These are not covered:

- the full multi-plane image store (2560 wires × 4488 ticks × 12 bit =
  138 Mbit per frame) that the decision controls;
- the detector readout in front of the design.

The engine is sized for this one network. C1=8, C2=16 and FC=12 are package
constants. The convolution and dense modules are parameterised, but other
network variants (e.g. 4/8/12 maps, or 2×2 pooling with 32/64 maps) need
the engine rebuilt. Other precisions would need the formats in `cnn_pkg`
changed.

No trained weights are included. The testbenches use random parameters and
check the hardware bit-exactly against an independent integer model of the
same arithmetic (`tb/cnn_ref_pkg.sv`). Agreement with a floating-point or
HLS model of a trained network has not been shown.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_cnn_trigger_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/cnn_pkg.sv tb/cnn_ref_pkg.sv tb/tb_cnn_trigger_top.sv
./obj_dir/Vtb_cnn_trigger_top
```

| Testbench | What it covers |
|---|---|
| `tb_denoise`, `tb_roi_finder`, `tb_frame_buffer`, `tb_roi_resizer` | the pre-processing blocks, on small frames; the resizer's 4096-clock latency |
| `tb_conv_pool_layer` | both convolution configurations, against the reference; latencies 4359 and 327 |
| `tb_dense_layer`, `tb_softmax` | the dense layer and the softmax against the reference |
| `tb_qcnn_engine` | twelve complete inferences with all three classes seen; 4692-clock latency |
| `tb_cnn_trigger_top` | the whole chain on 32×40 frames; see below |
| `tb_full_system` | the top with every parameter at its default: two full 480×4488 event frames and one empty frame, classified and checked |

`tb_cnn_trigger_top` makes every mechanism happen and fails if one never
does:

- empty-ROI bypass, including during an inference;
- classification with keep and with discard;
- overflow drop.

It switches the output biases between runs to obtain NB, LE and HE decisions.

`tb_full_system` builds and runs in well under a minute.
