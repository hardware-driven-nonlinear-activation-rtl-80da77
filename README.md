# A stochastic-computing neuron cell with tanh, logistic and ReLU activation

A convolutional-network neuron does three things: an inner product of its
inputs with its weights, pooling over neighbouring inner products, and a
nonlinear activation. In stochastic computing each value travels as a
random bit stream, and the first two steps become very cheap. A multiply
is one XNOR gate and a sum is a bit counter. The hard part is the
activation. A lookup table is large, and the classic stochastic tanh state
machine takes a single bit per cycle, whereas after the counters the
neuron's data are small binary numbers.

This RTL implements the neuron cell of Li, Yuan, Li, Ding, Ren, Qiu, Draper
and Wang, *Hardware-Driven Nonlinear Activation for Stochastic Computing
Based Deep Convolutional Neural Networks*. Its central idea is that one
saturated up/down counter, stepped each cycle by the binary inner-product
sum, computes all three popular activations:

* **tanh**: the output bit is 1 while the counter is in the upper half of
  its states;
* **logistic**: the same, with the boundary lowered to one quarter of the
  states, plus a *negative-value compensation* described below;
* **ReLU**: the tanh boundary, plus the same compensation.

The output is again a stochastic bit stream, ready to be fed into the next
layer's neurons.

## Number format

All streams are **bipolar**. A value v in [-1, 1] is a stream whose bits
are 1 with probability (v+1)/2. So 0 is a stream of half ones, +1 all ones
and -1 all zeros. The cell takes one bit per lane per clock. A result is
read by counting the ones in m output bits: v ≈ 2·ones/m - 1. Longer
streams are more precise. m is a run-time input, so precision can be
traded against time and energy without changing the hardware.

## Data path

```
x[j][0..N-1] ─┐
w[j][0..N-1] ─┴─ XNOR ×N ── parallel counter ── cnt_j (0..N)      j = 0..Q-1
                 (sc_xnor_mult)   (sc_apc)
                 └──────── sc_conv_block ────────┘
cnt_0..cnt_{Q-1} ── binary adder, drop log2 Q bits ── avg, frac   (sc_avg_pool)
avg, frac ──┬── saturated counter, boundary E/2 ─────────────────── tanh bit
            │   (sc_sat_counter)
            └── saturated counter, boundary E/4 or E/2            logistic /
                + history H[0..ALPHA-1] & shadow counter ────────── ReLU bit
                (sc_logrelu_act = sc_sat_counter + sc_history)
selected bit ── register ── z                                     (sc_neuron)
```

Defaults: N = 25 pairs per convolution block (a 5×5 receptive field),
Q = 4 blocks pooled 4-to-1 (2×2 average pooling), streams of up to
M_MAX = 1024 bits. These are the configuration the design was evaluated
in. E = 8 counter states and ALPHA = 16 history bits are this
implementation's choices; see "Choices not fixed by the design" below.

**Multiplication.** For independent streams, XNOR gives
P(1) = P(x)P(w) + (1-P(x))(1-P(w)), which in bipolar terms is exactly x·w.

**Addition.** A multiplexer tree would add by picking one input per cycle
and wasting the rest. Instead a parallel counter counts the ones among the
N products, so cnt_j is a binary number, and 2·cnt_j - N is the
bipolar sum of that block's N products for this cycle. The reference
design uses an *approximate* parallel counter from the literature. Its
structure is not given, so `sc_apc` is an exact count.

**Pooling.** The counts are binary, so stochastic pooling with a
multiplexer is impossible. A binary adder adds the Q counts, and dropping
the low log2 Q bits divides by Q. `sc_avg_pool` outputs that truncated
mean (`avg`) and also the dropped bits (`frac`). Why `frac` matters is
explained next.

## The saturated counter as an activation

`sc_sat_counter` holds a state S in [0, E-1]. At the start of a stream S
is set to the boundary state. Every input cycle

    S ← clamp(S + t, 0, E-1),   t = Σ_j (2·cnt_j - N) / Q,

and the output bit is `S ≥ boundary`. t is this cycle's sample of the
pooled inner product y. The state therefore performs a random walk with
drift y, reflected at both ends. For y ≫ 0 it sits at the top and outputs
almost all ones (+1). For y ≪ 0 it sits at the bottom (-1). Near y = 0 it
wanders, and the fraction of time spent in the upper half rises smoothly
with y. The resulting curve is tanh-shaped, and its steepness is set by E
relative to the noise of t. More states give a sharper step, fewer a
flatter one. E must therefore be tuned to the input size, and the
reference design does so by a search for the smallest error.

**Fraction bits (`POOL_FRAC`).** The pooling adder floors the mean. With
N = 25 and Q = 4 the floored mean is low by 3/8 on average, so t is low by
0.75 per cycle. That steady negative drift is comparable to the noise of t
and drags the output far down: a zero input reads about -0.5 with the
default E = 8 (about -0.85 with E = 16 and a strict > output rule). With
`POOL_FRAC = 1` (default) the counter keeps the log2 Q dropped bits as
fraction bits of S. The register then holds S in units of 1/Q, with
log2 E + log2 Q bits. The step becomes exactly 2·Σcnt_j - Q·N in those
units, the integer part saturates at E-1 and the fraction at all ones,
and the boundary is compared on the integer part. This is the
arithmetic the algorithm of the reference design states. `POOL_FRAC = 0`
gives the literal truncating adder, for comparison.

**Boundary rule.** The output is 1 for S ≥ boundary, so with boundary E/2
exactly half of the states output 1. The published algorithm listing
writes S > boundary. Its prose ("half of the states output 1", "one
quarter of the states output 0") and the classic state-machine drawing
both mean ≥, and ≥ halves the tanh error in simulation, so ≥ is used.

## Logistic and ReLU: negative-value compensation

A logistic output lies in [0, 1] and a ReLU output is never negative, but
the random walk freely produces negative-valued stretches of output.
`sc_history` therefore keeps the last ALPHA output bits in a shift
register H and their count δ in a *shadow counter*. δ is kept as an
up/down counter, δ += new bit - bit leaving H. If δ < ALPHA/2, the
recent output encodes a negative number. The activation then emits a 1
as compensation and leaves the counter unchanged for that cycle.
Otherwise it steps the counter as above and outputs its bit. The new
output bit, compensation or not, enters H. At stream start H and δ are
cleared, so every logistic/ReLU stream begins with ALPHA/2 compensation
ones.

The net effect is that the output hovers at value 0 (half ones) instead
of going negative. That is the bottom of ReLU, and of logistic once the
curve is shifted:

* **ReLU** (`beta = 0`) keeps the tanh boundary E/2: the curve is centred
  at (0, 0), the compensation clips it from below at 0, and the stream
  format clips it from above at 1, giving min(max(y, 0), 1).
* **Logistic** (`beta = 1`) must pass through 0.5 at y = 0. 0.5 is a
  stream of 3/4 ones, so the boundary moves down to E/4 and three
  quarters of the states output 1.

`sc_logrelu_act` is this combined unit, with the configuration bit `beta`
latched at stream start.

## The cell: `sc_neuron`

`sc_neuron` wires Q convolution blocks, the pooling adder and both
activation units together. A run-time input `act` (`sc_pkg::act_e`:
`ACT_TANH`, `ACT_LOGISTIC`, `ACT_RELU`) selects which unit drives the
output. Only the selected one is clocked.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `start` | in | 1 | pulse: start a stream, latch `act` and `m_len`, initialise the activation state |
| `act` | in | `act_e` | activation of this stream |
| `m_len` | in | log2(M_MAX+1) | stream length m (0 ends at once) |
| `in_valid` | in | 1 | this cycle's `x`/`w` bits are to be consumed (while `busy`) |
| `x`, `w` | in | Q × N | input and weight stream bits |
| `busy` | out | 1 | stream in progress |
| `z`, `z_valid` | out | 1 | output bit, one cycle after its input bits |
| `done` | out | 1 | pulse with the z_valid of the m-th bit |

Timing: one output bit per consumed input cycle, latency one clock. The
whole data path of one bit position, from XNOR to counter update, is
combinational, as the reference design evaluates it "fully in parallel".
A stream of m bits takes m cycles plus any idle input cycles. Bits
presented together with `start` are not consumed. A `start` during a
stream abandons it and begins a new one. An assertion flags consumption
beyond `m_len`.

Stochastic number generators for `x` and `w` are not part of the cell.
Inputs come from the previous layer's neurons, and weights from whatever
generators the system uses. The streams must be mutually independent for
the XNOR products to be correct. The testbenches generate them with
`$urandom`.

## Accuracy

`tb/tb_sc_neuron_accuracy.sv` draws random inputs and weights in [-1, 1],
runs the default cell for stream lengths 16, 64, 256 and 1024, and prints
the mean absolute difference between the decoded output and the software
function of y (y = mean over the 4 blocks of Σ x_i w_i). A typical run:

| activation | n | m=16 | m=64 | m=256 | m=1024 |
|---|---|---|---|---|---|
| tanh | 16 | 0.47 | 0.22 | 0.12 | 0.07 |
| tanh | 25 | 0.35 | 0.20 | 0.10 | 0.04 |
| logistic | 16 | 0.24 | 0.17 | 0.15 | 0.12 |
| logistic | 25 | 0.23 | 0.16 | 0.13 | 0.12 |
| ReLU | 16 | 0.42 | 0.22 | 0.15 | 0.12 |
| ReLU | 25 | 0.30 | 0.17 | 0.08 | 0.12 |

With n = 16 the 9 spare lanes carry zero-valued streams. These figures are
of the same order as the published ones at 1024 bits (about 0.12 for
tanh, 0.11 for logistic and 0.11 for ReLU at input size 16). Only 24
random points are averaged per cell, so individual entries vary by a few
hundredths from run to run. Note the logistic floor: with boundary E/4
and the compensation, a strongly negative input reads about -0.05 rather
than 0, and y = 0 reads about 0.45 rather than 0.5.

## Choices not fixed by the design

* **E = 8 counter states.** The design selects E per input size by a
  search for best accuracy but does not report it. In behavioural sweeps
  at N = 25, Q = 4, m = 1024, E = 8 beat E = 16 for all three
  activations under the final output rule. In an earlier sweep over
  4, 8, 12 and 16 it was the best for logistic and within 0.03 of the
  best for tanh and ReLU. Other input sizes need their own E.
* **ALPHA = 16 history bits.** Not reported. Values from 8 to 64 changed
  the error by about 0.01 at E = 8.
* **Exact parallel counter** instead of the approximate one.
* **Fraction bits in the counter** (`POOL_FRAC = 1`) and the **≥ output
  rule**, as explained above. Both resolve a disagreement between the
  published algorithm listing and its prose and figures, in the direction
  that reproduces the published accuracy.
* **Counter frozen during compensation.** This follows the algorithm
  listing literally, where the counter update sits in the branch taken
  only without compensation.
* **Control**: the start/`m_len`/`in_valid` handshake, run-time activation
  select, registered output, reset values. None of these is specified.

## Not included

The network the cell was evaluated in, LeNet-5 on MNIST
(784-11520-2880-3200-800-500-10, pipelined), is not built. Only its layer
sizes are published, not how layers are connected, how weights are stored
and turned into streams, or how the fully connected layers are organised.
A fully parallel version would need about 4,200 neuron cells with input
sizes of up to 800. The cell is parameterised in N and Q, so cells for
other layers can be made by overriding the parameters. N must then have a
matching E, and Q must be a power of two (Q = 1 is not supported).

## Files

| file | content |
|---|---|
| `rtl/sc_pkg.sv` | `act_e` and the default sizes |
| `rtl/sc_xnor_mult.sv` | N XNOR multipliers |
| `rtl/sc_apc.sv` | parallel counter |
| `rtl/sc_conv_block.sv` | multipliers + counter: one convolution block |
| `rtl/sc_avg_pool.sv` | pooling adder (avg and dropped bits) |
| `rtl/sc_sat_counter.sv` | saturated counter: tanh activation, base of the others |
| `rtl/sc_history.sv` | history shift register and shadow counter |
| `rtl/sc_logrelu_act.sv` | logistic / ReLU activation |
| `rtl/sc_neuron.sv` | the neuron cell (top) |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_sc_neuron_accuracy.sv` | accuracy sweep of the cell |

Each unit testbench compares the module with an independent integer model
of its function, cycle by cycle. `tb_sc_neuron` runs the top at its
default size and compares every output bit with a model of the whole
neuron algorithm. It checks the handshake and the shape of each
activation, and counts that every mechanism occurred: all three modes and
switches between them, saturation at both ends, compensation, idle input
cycles, a restart, an empty stream and a short stream. Every testbench
ends by printing `TB_RESULT checks=<n> failures=<n>`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/sc_pkg.sv tb/tb_sc_neuron.sv \
          --top-module tb_sc_neuron -Mdir obj_neuron
./obj_neuron/Vtb_sc_neuron
```

Replace the testbench name for any other test. Files are found through
`-Irtl`, because each module lives in `rtl/<module>.sv`. Every testbench
finishes in well under a second. To change the cell's size, override
`N`, `Q`, `E`, `ALPHA`, `M_MAX` or `POOL_FRAC` on `sc_neuron`. E must be
a multiple of 4 and ALPHA at least 2.
