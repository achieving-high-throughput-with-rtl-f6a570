# A trainable CNN equalizer for 20 GBd, in SystemVerilog

An optical intensity-modulation link at 20 GBd distorts its symbols in ways no
closed-form equalizer undoes well. A small convolutional neural network does it
well, but only if it keeps learning while the channel drifts. Training needs
back-propagation at 24-bit precision, and that costs an order of magnitude more
logic than inference. This design gets both the throughput and the adaptation by
splitting the work unevenly:

* **Many cheap inference lanes.** `PI` lanes (default 32) run the forward pass
  only, with 6-bit weights and 10-bit activations. All of them share one weight
  set, so each weight feeds `PI` multipliers. Because of that sharing, two lanes'
  products can be packed into one 27x18 DSP multiplier.
* **A few expensive training lanes.** `PT` lanes (default 2) run the same
  network at training precision. They also compute the loss against known
  transmitted symbols, back-propagate, and deliver one gradient set per
  sequence.
* **One weight memory.** It sums the `PT` gradients, applies the update, and
  republishes the weights to every lane at a sequence boundary. Inference and
  training lanes always compute with the same weights; the inference lanes use
  a 6-bit copy.

Every lane takes 8 received samples (4 symbols at 2 samples per symbol) per
clock. With 34 lanes at 150 MHz, the equalizer handles 34 x 4 x 150 MHz =
20.4 GBd. Only the training lanes learn, so only 2 of every 34 sequences
contribute to the gradient. That is enough for the network to converge.

The architecture, the network shape, the two-products-per-DSP trick, the
widths (6/10 bit for inference, about 24 bit for training), the lane counts and
the clock come from the published design. The stream protocol, fixed-point
fraction splits, padding control, update timing, learning-rate
representation and configuration port are this implementation's own choices.
They are marked as such below and in each file's header.

## The network and how samples map onto it

| layer | in -> out channels | kernel | stride | padding | activation |
|-------|--------------------|--------|--------|---------|------------|
| 0     | 1 -> 4             | 9      | 8      | 4       | ReLU       |
| 1     | 4 -> 8             | 9      | 2      | 4       | none       |

The received signal is cut into **sequences**. Each lane carries its own
sequences back to back, and every sequence is padded with zeros on both sides.
With stride 8, layer 0 produces exactly one position per 8 input samples, so one
stream **beat** (8 samples) becomes one layer-0 position. Layer 1 has stride 2,
so every second position completes one layer-1 output. Its 8 output channels
are the 8 equalized symbols 8m .. 8m+7 of the sequence.

* A sequence of `SEQ_POS` beats (default 64) holds `4*SEQ_POS` symbols (256,
  the sequence length of the main configuration).
* A lane produces `SEQ_POS/2` outputs of 8 symbols per sequence, so 4 symbols
  per clock on average.

## Sequences, padding and the sliding window

*(This is the part that most often surprises on first reading.)*

**Layer 0 (`conv0_bp`, `train_conv0`).** Position p uses samples 8p-4 .. 8p+4.
* Taps 0..3 are the last four samples of the previous beat. On the first beat
  of a sequence, zeros replace them; this is the left padding.
* Taps 4..8 are samples 0..4 of the current beat.
* With stride 8, the right padding is never reached.

A beat counter marks the sequence start, so no control input is needed.

**Layer 1 (`conv1_bp`, `train_conv1`).** Each layer keeps a 9-position sliding
window that shifts by one position per accepted input.
* An output is computed when the window centre is an even position of its
  sequence.
* Padding is done by **masking**: any window slot that belongs to a different
  sequence than the centre counts as zero.
* As a result, sequences follow each other with no bubble. The last two outputs
  of sequence s (centres SEQ_POS-4 and SEQ_POS-2) are emitted while positions 0
  and 2 of sequence s+1 enter the window.

Consequence for a user: the last two outputs of the final sequence appear only
when four more beats arrive. Feed one more sequence, or at least four beats, to
flush.

**Index bookkeeping.** `cnt` is the sequence index of the newest position in
the window. The centre index is `ci = (cnt + 1 - 4) mod SEQ_POS`, computed
from the incoming position. A tap t is valid when
`0 <= ci + t - 4 < SEQ_POS`.

**Latency.** Output m is complete when the beat with samples 16m+32 .. 16m+39
has passed layer 0. It is registered 2 clocks after that beat is accepted.

## Two multiplications in one DSP (`dsp_dual_mult`)

The DSP block has a 27 x 18 signed multiplier. The two layer-1 products that
share a weight, `r1 = d1*w` and `r2 = d2*w`, are packed as follows:

```
D   = { 0, d2 (10 bit), 000000 (6 guard bits), d1 (10 bit) }   27 bit, non-negative
W   = sign-extended w (6 bit -> 18 bit)
P   = D * W
r1  = P[15:0]                  (16-bit signed: d1*w)
r2  = P[31:16] + P[15]         (16-bit signed: d2*w)
```

* d1 and d2 are unsigned because they come after the ReLU; w is signed.
* The packing needs `2*6 + 10 <= 26`.
* Because r1 is signed, a negative r1 sign-extends with ones into the upper
  field. That subtracts 1 from it, which the `+ P[15]` term restores.

**Departure from the published rule.** The published rule adds the 1 "when w is
negative". That is wrong when d1 = 0: then d1*w = 0 and nothing borrows. This
design keys the correction on the sign of the lower field, which is exact for
every operand pair. The test bench checks every weight against the corner
cases, plus 20,000 random pairs.

**Lane pairing.** Lanes 2p and 2p+1 share one `dsp_dual_mult` per (input
channel, output channel, tap). With an odd `PI`, the last lane gets a plain
multiplier. The module is combinational; the synthesis tool infers the DSP.

## A training lane (`cnn_training`)

The stages, in order:

* `train_conv0` builds one **position record** per beat. It holds the 4
  activations (24 bit), their ReLU derivatives, the 9 input taps, and the 4
  target symbols of that beat.
* These records move through the layer-1 window of `train_conv1`. That window
  therefore also serves as the delay line that keeps forward-pass data alive
  for the backward pass. No separate feature-map buffer is needed.
* With each output, `train_conv1` passes on a snapshot of the window, the 8
  targets, the layer-1 weights it used, and first/last-of-sequence flags.

In the cycle an output leaves the lane (`m_valid && m_ready`):

* `loss_mse`: `e = z - t`. This is the derivative of a squared-error loss; its
  factor 2/N is folded into the learning rate.
* `calc_grad1`:
  * `dW1[i][o][k] += e[o] * a[k][i]`
  * `dB1[o] += e[o]`
  * `delta[k][i] = relu'[k][i] * sum_o e[o]*w1[i][o][k]`
* `calc_grad0`:
  * `dW0[c][k] += sum_p delta[p][c] * x[p][k]`
  * `dB0[c] += sum_p delta[p][c]`

`delta` is only this output's *share* of each position's error; a position
lies in up to five outputs' windows. Finishing each position's error first
would need a buffer. Instead, the shares go straight into the layer-0 gradient.
The layer-0 gradient is linear in the error, and the ReLU mask of a position
does not change, so the sum is the same.

The first output of a sequence restarts the sums. On the second clock edge
after the last output of a sequence is taken, the finished set is copied to
`g` and `g_valid` pulses for one clock. `g` then stays unchanged for a whole sequence.

## Weights, updates and when they take effect (`weight_memory`)

The memory holds a **master** copy of the 336 parameters (24 bit, 20 fraction
bits). When every training lane has delivered its `g_valid` for a sequence, the
update is applied in one clock:

```
W <- sat24( W - (sum_j g_j) >> (24 - 20 + LR_SHIFT) )
```

* `LR_SHIFT = 10` gives a learning rate of 2^-10, which stands in for the
  published 0.001.
* Summing the `PT` gradients and applying them once equals letting each
  instance apply its own update to the same starting weights. The published
  convergence study describes that as a larger effective step with more
  instances.
* With `train_en` low, gradients are dropped and the weights stay fixed.

**The layers never read the master copy.** They read a **published** copy that
is refreshed from the master only when the last beat of a sequence is accepted
(`publish`, generated in `eq_top`).
* Layer 0 uses the published copy directly.
* Layer 1 latches it when it computes the first output of a sequence, which
  happens four beats into that sequence.

Together this gives each sequence exactly one weight set, in every lane. The
schedule is:

| sequence | weights used |
|----------|--------------|
| 0        | initial weights |
| s >= 1   | master after the updates from sequences 0 .. s-2 |

The gradient of sequence s completes a few beats into sequence s+1. It is
applied then, published at the end of s+1, and used from s+2 on.

**Inference copy.** The inference lanes see the published copy quantized by
truncation, saturated:
* weights: 4 fraction bits, 6 bits wide;
* layer-0 bias: 10 fraction bits, 16 bits wide;
* layer-1 bias: 10 fraction bits, 16 bits wide.

**Configuration port.** `cfg_we/cfg_addr/cfg_data` writes one parameter into
both copies at once; use it for the initial weights. Address map:

| address     | parameter |
|-------------|-----------|
| c*9+k       | w0[c][k] |
| 36+c        | b0[c] |
| 40+(i*8+o)*9+k | w1[i][o][k] |
| 328+o       | b1[o] |

`upd_count` counts applied updates.

## Fixed-point formats

Widths come from the published design. The split into integer and fraction
bits is this design's choice.

| quantity                   | width | fraction bits | notes |
|----------------------------|-------|---------------|-------|
| received sample x          | 10 s  | 6             | |
| target symbol t            | 10 s  | 6             | PAM-4 levels 0..3 in tests |
| inference weight           | 6 s   | 4             | |
| inference activation       | 10 u  | 6             | ReLU, saturated 0..1023 |
| inference biases, output z | 16 s  | 10            | saturated |
| training weight / bias     | 24 s  | 20            | |
| training activation, z, e  | 24 s  | 16            | saturated |
| gradients                  | 48 s  | 24            | accumulators wrap |

Every rescale is an arithmetic right shift, which rounds toward minus
infinity. Training outputs leave the lane in the 16-bit output format, the same
as inference outputs.

## Top level (`eq_top`) and its handshake

Ports:
* `s_x[PT+PI][8]`: samples. Lanes 0..PT-1 are training lanes.
* `s_t[PT][4]`: targets for the training lanes.
* `s_valid/s_ready`: input handshake.
* `m_z[PT+PI][8]`: outputs, 16 bit.
* `m_valid/m_ready`: output handshake.
* `train_en`, the configuration port, and `upd_count`.

All lanes move in **lock step**:
* `s_ready` is the AND of the readies of every training instance and the
  inference module. A beat is accepted on `s_valid && s_ready`.
* `m_valid` is the AND of their output valids. An output is taken on
  `m_valid && m_ready`.

Every stage has one output register with `ready = !valid || downstream_ready`.
So with `s_valid` and `m_ready` held high, one beat per lane enters every
clock.

The equalizer's own timing:

| event | time |
|-------|------|
| first output of a sequence | 2 clocks after its fifth beat is accepted |
| outputs | one per two beats |
| gradient (`g_valid`) | 2 clocks after the last output of a sequence is taken |
| update applied | at the clock where the last lane's gradient arrives |
| weights republished | at the next sequence end |

## Files

`rtl/` (synthesizable):

| file | content |
|------|---------|
| `eq_pkg.sv` | formats, types, address map, saturation helpers |
| `dsp_dual_mult.sv` | two products on one multiplier |
| `conv0_bp.sv`, `conv1_bp.sv` | batch-parallel inference layers |
| `cnn_inference.sv` | the two inference layers as a pipeline |
| `train_conv0.sv`, `train_conv1.sv` | forward pass at training precision |
| `loss_mse.sv` | output error |
| `calc_grad1.sv`, `calc_grad0.sv` | backward pass and gradient sums |
| `cnn_training.sv` | one training lane |
| `weight_memory.sv` | master/published weights and the update |
| `eq_top.sv` | PT training lanes, the inference module and the weight memory |

`tb/`: one self-checking bench per module (`tb_<module>.sv`), plus
`eq_ref_pkg.sv`. That package is a reference model written on whole sequences
(no windows, no streaming), bit-exact to the formats above. Each bench prints
`TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5, for example for the full-size top:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/eq_pkg.sv tb/eq_ref_pkg.sv tb/tb_eq_top.sv --top-module tb_eq_top
./obj_dir/Vtb_eq_top
```

Any other bench builds the same way by changing the last file and the top name.

**What the benches establish:**

* **`tb_eq_top`** runs the default configuration (32 + 2 lanes, 64-beat
  sequences) with no parameter changes. It builds in about 3 minutes; the
  simulation itself takes well under a second.
  * Stimulus: random initial weights through the configuration port, then five
    sequences plus a flush sequence on all 34 lanes, with random input gaps and
    output back-pressure. `train_en` is switched off for two sequences.
  * Checks: every symbol of every lane against the reference, including the
    schedule of which weights each sequence uses, and the update count.
  * Counted mechanisms: updates, skipped updates, both kinds of stall, gaps,
    sequence boundaries, and outputs changed by learning.
* **`tb_cnn_inference`** additionally checks the rate (no input stall when free
  running) and the first-output latency.
* **`tb_conv1_bp`** changes the weights in the middle of a sequence to check
  that a sequence never mixes two weight sets.
* **`tb_cnn_training`** compares all 336 gradients of three sequences bit for
  bit with the reference, and checks the `g_valid` timing.
* **`tb_weight_memory`** delivers gradients in the same clock and several
  clocks apart, with random publish strobes and `train_en` off.

Every bench was also run against a deliberately broken copy of its module; all
of them fail on it.

## Departures and limits

* **DSP correction rule:** keyed on the lower product's sign, not the weight's
  sign (see above).
* **Learning rate:** 2^-10 instead of 0.001. Plain gradient descent, no
  momentum. The loss is squared error; the published text names neither the
  loss nor the optimizer in detail.
* **Weight timing:** one sequence of delay between a gradient and its use,
  because of the double-buffered weights. The published design does not state
  its update timing.
* **Streams:** the published layers are linked by AXI-Stream. Here a plain
  valid/ready pair with the same meaning is used, without the sideband
  signals.
* **Not built:**
  * the optical channel and transmitter;
  * the symbol decision and error counting after the equalizer;
  * the high-speed sample interfaces that feed 34 lanes;
  * resource, power and GPU comparisons, which are measurements, not logic.
* **Other configurations:** the other two published configurations are
  reached by parameters only, not by the default build. `tb_eq_top_pt1_sl512`
  simulates 33 + 1 lanes with 512-symbol sequences; `tb_eq_top_pt4` simulates
  30 + 4 lanes. Both run the same checks as `tb_eq_top` and pass.
* **Synthesis size:** Verilator lint and the slang front end of Yosys accept
  every file, and lint reports no latches, loops or multiple drivers. Coarse
  Yosys synthesis (flattened, before technology mapping) did not finish within
  10 minutes for several modules: `conv1_bp`, `cnn_inference`,
  `weight_memory` and the top. So no cell count is quoted for the full design.
  One training lane (`cnn_training`) comes to about 3,200 coarse cells and
  43,000 flip-flop bits. Most of those bits are the window of position records.
