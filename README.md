# Swipe-gesture recognition from table vibrations: an integer-only 1D-CNN accelerator

Four piezo sensors glued under an ordinary table pick up the vibration of a
finger swiping across it. This accelerator decides which of four swipes
happened (Up, Down, Left, Right) from one second of that signal. It works on
the raw waveform, not on a spectrogram. The window is 4410 time steps × 4
channels (44.1 kHz audio, every tenth sample kept). A very small
convolutional network does the classification: the default model has 264
weights and biases. All arithmetic is in integers, and the whole network fits
comfortably in a small FPGA (a Spartan-7 XC7S25 class device at 100 MHz).

The RTL follows the architecture of the paper "Enabling Vibration-Based
Gesture Recognition on Everyday Furniture via Energy-Efficient FPGA
Implementation of 1D Convolutional Networks" (Shibata, Ling, Qian et al.).
The paper's own hardware was produced by a VHDL generator that this RTL does
not reproduce. This is an independent SystemVerilog implementation of the
structure the paper describes. Where the paper gives no detail, the choice
made here is stated below and in each file's header.

## The network

For block `b = 0 .. NUM_BLOCKS-1`:

| step | operation | notes |
|---|---|---|
| Conv1DBN | 1D convolution, kernel 3, stride 1, batch norm folded into weights and bias | `SEPARABLE=1` uses SepConv1DBN instead |
| ReLU | `max(x, zero point)` | on the read path, no storage |
| MaxPool1D | kernel 2, stride 2 | every block except the last |

After the last block come GlobalAVGPool, then Dense(4) + ReLU, then
Dense(4). The last Dense layer gives the four class logits.

Output channels per block are 4, 4, 8, 8, 16: two blocks of width 4, then the
width doubles every two blocks. The window length halves after every pooled
block: 4410, 2205, 1102, 551, 275.

The defaults (`NUM_BLOCKS=3`, `DATA_W=6`, `SEPARABLE=0`) give the 6-bit
three-block 1D-CNN. In the paper this model scored best on the per-subject
split. It has 52 + 52 + 104 + 36 + 20 = 264 parameters. With `SEPARABLE=1`
the model becomes the 1D-SepCNN: 36 + 36 + 56 + 36 + 20 = 184 parameters.
Both counts equal the paper's counts after batch-norm folding. That is a
useful check that the layer shapes are right.

## Dataflow without a central controller

`gesture_accel` (top) instantiates one module per layer. Each layer contains:

* a control FSM that walks the output positions and produces read addresses;
* its own weight and bias ROMs (W, B);
* an ALU that multiplies and accumulates. A select line switches it from
  weights to bias for the last step, and it then requantizes the result;
* its own **output buffer**, a one-cycle-latency dual-port RAM (`sdp_ram`).

A layer does not push data forward. The next layer *reads* the previous
layer's output buffer by address (`in_addr` → `in_data` one clock later).
ReLU is a comparator between that buffer's data output and the next layer's
input. The layers are chained by their handshake: a layer's `done` is the
next layer's `enable`. So the layers run one after another, and each runs
only once the whole previous feature map is stored. No central controller
is needed.

Handshake of every layer:

* `enable` rising starts a pass.
* `done` rises after the last output word is written and stays high while
  `enable` is high.
* `enable` falling returns the layer to idle and clears `done`.

At the top level `done` therefore falls one layer per clock after `en`
falls. That is up to `2*NUM_BLOCKS+2` clocks. Wait for `done` to go low
before the next `en`.

### Using the top

1. Hold `rst_n` low for a clock or two, then release it.
2. Write the window through `in_wr_en / in_wr_addr / in_wr_data`. Address
   `t*4 + c` holds sensor `c` at time `t`. Samples are signed `DATA_W`-bit
   integers with zero point `Z_INPUT`.
3. Raise `en` and wait for `done`.
4. Read logits 0..3 at `out_addr` (Up, Down, Left, Right); `out_data`
   follows one clock later. The predicted class is the largest logit.
5. Lower `en` and wait for `done` to fall.

## Integer arithmetic

Weights and activations use signed, *asymmetric* quantization:
`real = scale · (q − z)`. Biases are symmetric and are stored at the
accumulator's scale. A convolution or dense output is computed as

```
acc = Σ (x − z_x)·(w − z_w) + b                        (32-bit accumulator)
y   = clamp( z_y + ((acc·M + 2^(S−1)) >>> S) )         (DATA_W bits)
```

`M / 2^S` is the combined real scale `s_x·s_w / s_y`, as a 16-bit multiplier
and a shift, rounded half up. Global average pooling uses the same rescale
and folds the division by the window length into `M`. Max pooling needs no
rescale. Padding (the convolutions keep the length, "same" padding) is
implemented by skipping the product, which equals reading the zero point.

The paper names integer-only inference with asymmetric weights and
activations and symmetric biases. The exact form above (round half up,
saturation, 16-bit bias words) is this design's choice.

**Weights are not the trained ones.** The trained models are not published
with the paper. Every ROM is filled from a fixed hash,
`gesture_pkg::gen_param(seed, index, bits)`, and the zero points and
multipliers come from the defaults in `gesture_pkg` (`act_zero`,
`weight_zero`, `conv_mult`, `conv_shift`, `gap_mult`). The hardware is
therefore exact, but its outputs are not gesture predictions. To deploy a
trained model:

* replace the `initial` ROM fills in `conv1d_bn`, `sepconv1d_bn` and `dense`;
* pass the layer's quantization constants as parameters.

ROM word orders: `w[co][k][ci]` (conv), `wd[c][k]` and `wp[co][ci]`
(separable), `w[o][i]` (dense).

## SepConv1DBN and ping-pong scheduling

The hardest part of the design to get right is the separable convolution. A
depthwise filter (one 3-tap filter per channel) is followed by a pointwise
1×1 convolution that mixes the channels. Done naively, the depthwise stage
produces all 4410 × C intermediate values before the pointwise stage starts,
so a second full-size buffer is needed. In the paper that buffer pushed the
8-bit model's block-RAM use from 66.67% to 97.78%.

`sepconv1d_bn` instead keeps one **C×1 slice** between the stages, with an
ownership flag `slice_full`:

1. The depthwise FSM computes the C intermediate values for time step `t`
   (3 taps each, with their own bias and requantization to zero point
   `Z_MID`) and writes them into the slice.
2. It sets `slice_full`, pulses `handoff` and waits.
3. The pointwise FSM sees `slice_full`. It computes the C_OUT outputs of step
   `t` from the slice (one product per clock, since the slice is in
   registers) and writes them to the output buffer.
4. It clears `slice_full`. The depthwise FSM moves on to `t+1`.

The two stages strictly alternate, as the paper describes. There is no
second slice, so they never overlap. An assertion checks that the depthwise
stage never writes the slice while the pointwise stage owns it. The
intermediate storage is C_IN words instead of C_IN × 4410.

## Timing

Every memory read takes one clock of address and one of data, so a product
costs two clocks in the convolutions, GAP and dense layers. Pass lengths, in
clocks, from `enable` to `done`:

| layer | clocks |
|---|---|
| conv1d_bn | `LEN·C_OUT·(2·K·C_IN + 2) + 2` |
| sepconv1d_bn | `LEN·(C_IN·(2K+2) + C_OUT·(C_IN+2) + 2) + 2` |
| maxpool1d | `4·(LEN_IN/2)·C + 2` |
| global_avg_pool | `C·(2·LEN + 1) + 2` |
| dense | `N_OUT·(2·N_IN + 2) + 2` |

An inference takes the sum of the pass lengths. The testbenches check every
one of these formulas exactly. Full-length (4410-step) runs of the six
configurations the paper selected (its Table II) give:

| split | model | blocks | bits | clocks | ms @100 MHz | paper (ms) |
|---|---|---|---|---|---|---|
| PS | 1D-CNN | 3 | 6 | 987,856 | 9.88 | 9.22 |
| PS | 1D-SepCNN | 3 | 8 | 544,714 | 5.45 | 6.83 |
| LOSO | 1D-CNN | 5 | 6 | 1,445,936 | 14.46 | 20.94 |
| LOSO | 1D-SepCNN | 3 | 6 | 544,714 | 5.45 | 6.83 |
| AOS | 1D-CNN | 4 | 8 | 1,217,076 | 12.17 | 13.32 |
| AOS | 1D-SepCNN | 5 | 8 | 704,990 | 7.05 | 11.16 |

The default model lands within 7% of the published latency. The published
latencies grow faster with depth than this design's do, and the paper does
not say why. All six stay well under the 100 ms bound for interactive use.

Storage is dominated by the feature-map buffers: 66,160 words for the
three-block models (388 Kbit at 6 bit), and up to 81,584 words (637 Kbit at
8 bit) for five blocks. That is at most 40% of the 1,620 Kbit of block RAM
on an XC7S25, before block-RAM rounding.

## Files

| file | contents |
|---|---|
| `rtl/gesture_pkg.sv` | widths, FSM state type, `gen_param`, `requant`, network shape and default quantization functions |
| `rtl/gesture_accel.sv` | top: input buffer, block chain, classifier head |
| `rtl/conv1d_bn.sv` | Conv1DBN layer |
| `rtl/sepconv1d_bn.sv` | SepConv1DBN layer with the C×1 ping-pong slice |
| `rtl/maxpool1d.sv` | MaxPool1D (kernel 2, stride 2) |
| `rtl/global_avg_pool.sv` | GlobalAVGPool |
| `rtl/dense.sv` | Dense layer |
| `rtl/relu.sv` | ReLU against the zero point |
| `rtl/sdp_ram.sv` | dual-port RAM used for the input and every output buffer |
| `tb/gesture_ref_pkg.sv` | bit-exact software reference of every layer and of the whole network, plus latency formulas |
| `tb/accel_harness.sv` | runs one top configuration through N inferences and checks logits and latency |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_gesture_accel` (five small configurations end to end: 4-, 6- and 8-bit, 1 to 5 blocks, both layer types), `tb_gesture_full` (defaults, full window) and `tb_gesture_workloads` (the six configurations above at full length) |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. With Verilator 5:

```
verilator --binary --timing --assert -j 4 --top-module tb_gesture_full \
  -y rtl -y tb +libext+.sv rtl/gesture_pkg.sv tb/gesture_ref_pkg.sv \
  tb/tb_gesture_full.sv -o sim
./obj_dir/sim
```

Replace the top-module and file name for the other testbenches. The
full-size inference simulates in under a second, and the six-configuration
run in about ten seconds. The end-to-end test counts the following
mechanisms and fails if any never happens:

* convolution padding
* requantization saturation
* ReLU clamping
* an odd-length window losing its last step in max pooling
* ping-pong hand-overs (exactly one per time step)
* rearming for a second inference

The top synthesizes with Yosys (through its slang front end). There is no
timing closure or FPGA resource report here.

## Where this departs from, or goes beyond, the paper

* **Weights and quantization constants** are generated, not trained (see
  above).
* **Padding** is "same" with the zero point. The paper's figures print equal
  input and output lengths (4410) for the separable layer. The padding
  itself is not described.
* **Pooling stride** 2, with a dropped remainder: not stated in the paper.
* **Handshake** is level `enable`/`done` with read-by-address buffers. The
  paper names enable, done, address and data ports and describes decoupled,
  controller-free layers, but gives no protocol.
* **Timing** is two clocks per product. The paper gives only end-to-end
  latencies (table above).
* **Reset** is asynchronous and active low, on control state only. The paper
  does not mention reset.
* **The input** arrives already quantized. The downsampling, the one-second
  window cut and the 16-bit-to-`DATA_W` conversion happen before the
  accelerator. The paper does these offline.
* **Not built:** the naive separable convolution without ping-pong (a
  comparison baseline in the paper), the software training and search flow,
  and the sensors.
