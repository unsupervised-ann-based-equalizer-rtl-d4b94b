# A self-retraining CNN equalizer in SystemVerilog

Short-reach optical links with intensity modulation and direct detection
(IM/DD) distort the signal non-linearly: chromatic dispersion acts on the
optical field, but the photodiode detects its squared magnitude. A small 1-D
convolutional neural network (CNN) is a good equalizer for such a channel.
Its weights, however, are fitted to one channel state, and the channel
drifts. This design keeps the CNN fitted by retraining it in hardware while
it equalizes. Backpropagation runs in the same pipeline as inference and at
the same rate. Training can use known pilot symbols (supervised mean squared
error) or no reference at all (an unsupervised loss). The unsupervised loss
only asks that the outputs sit on the constellation points and be spread
evenly over them.

The key point of the architecture is that the backward pass does not wait
for the forward pass to finish a sequence. Convolution is local: the
gradient at a position depends only on a window of 2P+1 neighbours. So the
backward pipeline follows the forward pipeline a fixed number of samples
behind. The forward feature maps only need to be stored for that fixed
distance, not for the whole sequence. The buffers are a few dozen samples
deep, and sequences can be of any length.

The RTL reproduces the network and architecture of the paper "Unsupervised
ANN-Based Equalizer and Its Trainable FPGA Implementation". Where that paper
leaves something open, the choice made here is stated in this document and
in the header comment of each file.

## The network

| layer | in -> out channels | kernel K | padding P | stride | activation |
|-------|--------------------|----------|-----------|--------|------------|
| 1     | 1 -> 3             | 21       | 10        | 1      | ReLU       |
| 2     | 3 -> 3             | 21       | 10        | 1      | ReLU       |
| 3     | 3 -> 1             | 21       | 10        | 2      | none       |

- The receiver delivers two samples per symbol. The stride-2 last layer turns
  them into one output z per symbol.
- Padding keeps every feature map as long as its input ("same" convolution).
- There are no biases.
- That makes 315 weights in all: 63, 189 and 63 per layer.
- A hard decision maps z to the nearest constellation point. It is given for
  PAM-2 (points -1, +1) and for PAM-4 (points -1.5, -0.5, +0.5, +1.5).

Forward and backward equations per layer, with `*` as correlation (the usual
CNN "convolution"):

    forward      o  = ReLU(i * k)
    input grad   di = (do (*) flip(k)) . ReLU'(previous layer)   (channel-wise)
    kernel grad  dk = i * do

The input gradient is needed only for layers 3 and 2. Layer 1 has no layer
before it to pass a gradient to.

## One beat, one stream

Everything in the datapath moves on a single "advance" pulse `adv`. That
covers:

- the three forward layers,
- the loss,
- the two input-gradient units,
- the three kernel-gradient units,
- the feature-map buffers.

There is one beat per accepted input sample, plus padding beats after each
sequence. A missing input sample (`in_valid` low) stalls the whole machine
for that cycle. Nothing else can stall, so no stage needs a FIFO or its own
handshake.

Each stream carries four flags next to its data (`flags_t` in `eq_pkg`):

| flag    | meaning |
|---------|---------|
| `vld`   | the beat belongs to a sequence |
| `first` | index 0 of a sequence. Windows forget all older taps here, which gives the left-hand zero padding and isolates sequences from each other. |
| `pad`   | past the end of the sequence. Data is zero, which gives the right-hand zero padding. These beats also carry the last gradients out of the backward pipeline. |
| `hole`  | an odd position of the stride-2 output. It is not an output, and its gradient is zero. |

Every convolution-like unit reads a K-tap window (`stream_window`): taps 0
(oldest) to K-1 (the beat now on the input). The output for the centre tap
can only be formed once P further beats have arrived. With one register after
each unit, every window stage therefore adds a lag of `LS = P + 1 = 11`
beats. Counting from the beat that carries input sample t:

| quantity at index t                  | appears on beat |
|--------------------------------------|-----------------|
| layer-1 activation a1[t]             | t + 11          |
| layer-2 activation a2[t]             | t + 22          |
| output z (even t), hole (odd t)      | t + 33          |
| selected loss gradient g[t]          | t + 34          |
| layer-2 delta δ2[t] (CalcInGrad 3)   | t + 45          |
| layer-1 delta δ1[t] (CalcInGrad 2)   | t + 56          |

After the last sample, `seq_ctrl` therefore issues 56 pad beats (5·LS + 1).
It then spends one cycle on the weight update. A sequence of L samples
occupies the machine for L + 57 cycles.

### Stride 2 and the dilated gradient

The last layer keeps one beat per input beat and marks every second output
position as a hole. Holes are dropped from the output port, and the losses
produce a zero gradient for them. The gradient stream entering the layer-3
backward units is therefore zero-stuffed. Running an ordinary K = 21 window
over it is the same as a dilation-2 convolution over the undecimated
gradient, which is the exact gradient of a stride-2 layer. No separate
dilated datapath is needed. (`conv_fwd` does have a dilation parameter
`DIL`, which spaces the used taps `DIL` beats apart. The equalizer leaves it
at 1.)

### Feature-map buffers

A kernel-gradient unit needs the layer input at indices t-P .. t+P at the
moment the output gradient for index t arrives. A buffer of depth D (in
front of a K-tap window) delivers index t+P on beat t + La + D, where La is
the lag of the feature map. Setting that equal to the gradient beat Lg gives
D = Lg − P − La:

| buffer               | feeds        | Lg | La | D  |
|----------------------|--------------|----|----|----|
| received samples     | CalcKGrad 1  | 56 | 0  | 46 |
| layer-1 activations  | CalcKGrad 2  | 45 | 11 | 24 |
| layer-2 activations  | CalcKGrad 3  | 34 | 22 | 2  |
| pilot symbols        | MSE loss     | –  | –  | 33 |

The depths depend only on K and P, never on the sequence length. Each buffer
is a circular array with a single pointer (`fm_buffer`). It stores its flags
along with the data, so the delayed stream keeps its `first` and `pad`
markers.

The ReLU derivative needed by an input-gradient unit (is a2[t] > 0? is
a1[t] > 0?) is not stored separately. On the beat when δ[t] is formed, that
activation is exactly the oldest tap of the neighbouring kernel-gradient
window. It is taken from there (`oldest` port of `calc_k_grad`).

## The backward units

- **`calc_in_grad`** correlates the incoming gradient with the kernel flipped
  in time, over all output channels, for every input channel. It then zeroes
  the channels whose forward activation was not positive. Its output is never
  a hole: the layer below has stride 1.
- **`calc_k_grad`** multiplies the gradient at index t by the 21 input values
  t-P .. t+P and adds the products into 48-bit accumulators, one per weight.
  Pad and hole beats add nothing. The accumulators are cleared in the same
  cycle as the weight update.

Both are fully parallel over output channel × input channel × kernel tap.
Layer 2 thus performs 189 multiply-accumulates per beat in each direction.

## Losses

All three losses produce a gradient per output, dL/dz, with 10 fraction bits.
`loss_sel` picks one and registers it; this is the loss switch.

- **Supervised** (`sup_loss`, `loss_sel` = 0 or 3): g = 2(z − x). The pilot
  symbol x enters with the even received sample of its symbol. It is delayed
  by 33 beats to meet z.
- **Unsupervised PAM-2** (`unsup_loss`, `loss_sel` = 1). The loss is
  L = Σ p(z) + μ·|d1 − d2|, where:
  - p(z) = (z − A1)²(z − A2)², with A1,2 = ∓1;
  - d_i = Σ|z − A_i|;
  - μ = 4.

  The first term pulls outputs onto the points. The second keeps them from
  all collapsing onto one point. The gradient is
  2(z−A1)(z−A2)(2z−A1−A2) + μ·sign(d1−d2)·(sign(z−A1) − sign(z−A2)).
- **Unsupervised PAM-4** (`unsup_loss4`, `loss_sel` = 2). The loss is
  L = Σ q(z)² + μ·(|d1−d4| + 1.5|d2−d3| + |d1−1.5d2| + |d4−1.5d3|), with
  q(z) = Π(z − A_i) over the four points. The 1.5 weights compensate for the
  inner points being closer to the others. With unit spacing, the summed
  distance to the other three points is 4 for an inner point and 6 for an
  outer one.

The distances d_i are sums over the whole sequence. A streaming design must
emit a gradient before the sequence ends, so both unsupervised units use the
**running** sums up to and including the current output. The running sums
restart at each sequence. Early in a sequence the balance term is therefore
noisier than the batch formula. Over a sequence the signs settle to the
batch values.

## Weights and the update

`weight_sgd` holds one layer's kernel as 20-bit master words with 17
fraction bits. The datapath sees the top 10 bits (7 fraction bits). After
each sequence's padding, when `train_en` is high, every weight takes one step:

    w <- sat(w - (lr * kg) >> 15)

Here lr has 16 fraction bits. 0.02, the paper's learning rate, is 1311. The
step is truncated, then saturated.

The gradient accumulated over a sequence is a **sum**, not a mean. An lr
tuned for mean-squared loss must therefore be divided by the number of
outputs per sequence. The end-to-end testbench uses lr = 20 (about
0.02 / 64) for its short sequences. For the 120,000-sample sequence it uses
lr = 1, the smallest step the 16-bit word allows (about 0.02 / 60,000 is
0.022 LSB). Sequences that long need a finer learning-rate word, or
shorter sequences per update.

Weights are loaded and read back through a simple port:

- `wr_layer` / `rd_layer`: 0 to 2;
- index: (co·CIN + ci)·K + k;
- data: 20-bit master word.

Initial weights come from offline training.

## Number formats

| signal                        | bits | fraction | notes |
|-------------------------------|------|----------|-------|
| samples, activations, z       | 10   | 6        | saturated after each layer |
| kernels as used               | 10   | 7        | top bits of the master word |
| master kernels                | 20   | 17       | SGD state |
| gradients (g, δ)              | 16   | 10       | saturated |
| kernel-gradient accumulators  | 48   | 16       | no overflow for > 10⁵ samples |
| learning rate                 | 16   | 16       | unsigned |

The paper reports about 10 bits per datatype on average after a quantisation
search, but not the individual splits. These splits were chosen to cover the
ranges seen in simulation. Right shifts truncate (floor).

## Top-level interface (`eq_top`)

Parameters: `K = 21`, `P = 10`, `NCH = 3`.

| port | dir | meaning |
|------|-----|---------|
| `in_valid`, `in_ready`, `in_y[9:0]` | in/out/in | received samples, one per accepted cycle |
| `in_last` | in | last sample of a sequence. The sequence length should be even: two samples per symbol. |
| `in_x[9:0]` | in | pilot symbol on even samples (supervised loss only) |
| `out_valid`, `out_first`, `out_z`, `out_sym`, `out_sym4` | out | one output per symbol, with its PAM-2 and PAM-4 decisions |
| `train_en`, `loss_sel[1:0]`, `lr[15:0]` | in | training control. Sample these per sequence. |
| `wr_*`, `rd_*` | | weight port |
| `busy`, `n_upd[31:0]` | out | sequence in progress; number of weight updates done |

Timing:

- `in_ready` is high while a sequence is accepted.
- `in_ready` is low for 57 cycles after `in_last`: 56 flush beats and one
  update cycle.
- Output n appears 33 beats after the beat of sample 2n. Without stalls, that
  is 33 cycles.
- The outputs of the last 33 samples come out during the flush.
- Reset is synchronous and active high. It clears all state, weights
  included.

## Size

The kernel-gradient accumulators dominate the register count: 315 × 48
bits. The design uses one full-precision multiplier per weight in each of
the three directions: forward, input gradient and kernel gradient. That is
882 small multipliers in total (315 forward, 252 input gradient, 315 kernel gradient), plus the loss multipliers.

## Where this departs from the paper

- **One instance, one sample per clock.** The paper allows parallelism over
  channels, taps, instances and several outputs per cycle. It reports
  1.2 Gbit/s at 300 MHz, i.e. 8 samples per clock. Only the fully parallel
  single-output configuration is built here. That is 150 Mbit/s PAM-2 at
  300 MHz.
- **Layer-1 gradient padding.** The paper's block diagram labels the layer-1
  gradient unit with P = 5. The text and the forward unit say P = 10. This
  design uses P = 10 for every backward unit, since that is what the exact
  gradient of a P = 10 forward layer requires.
- **Running sums in the unsupervised losses.** See above. The paper defines
  the balance term over the whole sequence.
- **Update once per sequence**, with summed gradients. The paper names SGD and
  lr = 0.02, but not the batch size or when the update happens.
- **Sequence delimiting and padding flags** (`first` / `pad` / `hole`) and the
  fixed 57-cycle gap between sequences are this design's own.
- **Constellation values.** PAM-2 is ±1, read from the paper's loss plot.
  PAM-4 is ±0.5, ±1.5: the paper gives only unit spacing.
- **Weights in registers.** Weights and accumulators are plain registers, not
  block RAM. Storage for a vendor's block RAM is not modelled.
- **Not included:** the optical transmitter and channel, the offline initial
  training, and the bit-width search. These are outside the receiver
  hardware.

## Verification

Each unit has a self-checking testbench in `tb/` that computes expected
values independently of the RTL. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_conv_fwd` | first and last layer shapes, and a dilation-2 layer, against a direct convolution, incl. padding, stride holes, stalls, lag |
| `tb_calc_in_grad` | flipped-kernel correlation and ReLU masking, both backward layer shapes |
| `tb_calc_k_grad` | accumulated kernel gradients, hole/pad exclusion, clear |
| `tb_fm_buffer` | delay and start-up zeros at depths 24 and 2, with stalls |
| `tb_sup_loss` | 2(z − x) with saturation |
| `tb_unsup_loss` | PAM-2 gradient, running balance sum and its restart |
| `tb_unsup_loss4` | PAM-4 gradient from the expanded polynomial, all four balance terms both ways |
| `tb_weight_sgd` | load, readback, SGD step with saturation, write-over-update priority |
| `tb_decision` | every 10-bit input for PAM-2 and PAM-4 |
| `tb_eq_top` | end to end at the default size: see below |

`tb_eq_top` runs seven sequences of 40 to 120 samples through a small
IM/DD channel model: FIR dispersion, square-law detection and noise. It then
runs one sequence of 120,000 samples. That is five 1500-byte packets as
PAM-2 at two samples per symbol, which exercises the accumulators at a
realistic length. The modes are:

- supervised training;
- unsupervised PAM-2 training;
- unsupervised PAM-4 training on a four-level stream;
- inference only;
- input stalls.

A whole-sequence reference model in the testbench recomputes the forward
pass, loss, backward pass and SGD step with the same formats. The testbench
checks:

- every output and decision, the output count and the latency;
- after each sequence, all 315 weights;
- that each of the modes above occurred at least once.

To run one with Verilator 5:

    verilator --binary --timing rtl/eq_pkg.sv $(ls rtl/*.sv | grep -v eq_pkg) \
        tb/tb_eq_top.sv --top-module tb_eq_top
    ./obj_dir/Vtb_eq_top

The end-to-end test takes about three minutes. Nearly all of that is
compile time; the simulation itself runs in seconds.

## Files

`rtl/eq_pkg.sv` holds the formats and the flag struct. It must be compiled
first. The other files, one module each:

- `stream_window`: K-tap window
- `conv_fwd`
- `calc_in_grad`
- `calc_k_grad`
- `fm_buffer`
- `sup_loss`
- `unsup_loss`
- `unsup_loss4`
- `weight_sgd`
- `decision`
- `seq_ctrl`: sequence controller
- `eq_top`
