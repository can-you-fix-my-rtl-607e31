# Adaptive FIR waveform synthesis with a learning agent — RTL

A neural-network classifier at a radio receiver (recognising a modulation, or
fingerprinting a transmitter from its hardware quirks) is trained on some
channels and then deployed on others, where its accuracy can collapse. Rather
than retrain the classifier, the *transmitter* reshapes what it sends: every
outgoing IQ sample passes through a short complex FIR filter whose taps are
chosen so that the features the classifier relies on survive the channel. The
taps are chosen online by a reinforcement-learning agent (an actor-critic agent
of the TD3 family) that sees only light feedback from the receiver: whether the
label was right, the classifier's softmax score for the intended class, and
whether decoding failed. The classifier itself stays a black box.

This repository holds synthesizable SystemVerilog for the transmitter side of
that scheme, as published in *"Can You Fix My Neural Network? Real-Time
Adaptive Waveform Synthesis for Resilient Wireless Signal Classification"*
(D'Oro, Restuccia, Melodia), under its main configuration: 11 complex taps,
taps bounded to within 0.1 of the pass-through filter, a 10-layer x 30-neuron
ReLU actor network with twin 10 x 30 critics and target copies of all three,
a 10000-entry experience buffer read in batches of 64, a discount of 0.99, a
target update every 2 learning steps with omega = 0.05, and rewards of
+2 / +1 / -1 / 0. The RTL is an independent implementation; every
number format, handshake and schedule below that is not one of those numbers is
a choice made here and is called out as such.

## The loop in one picture

```
            feedback per batch of waveforms
   receiver ───────────────────────────────┐
      ▲                                     ▼
      │                              reward_unit ── r, s'
      │                                     │
      │                          chares_controller ──► experience_buffer
      │                            │   ▲        │         (s, a, r, s')
      │                   start, s │   │ action │ noise_en      │ batch of 64
      │                            ▼   │        ▼               ▼
      │                        actor (fc_network) gaussian_noise td3_learner ──► trainer
      │                          ▲  weights ◄── soft_update ◄──┘ │  y, errors,  (outside:
      │                                     │                    │  losses       gradients)
      │                                     │ clip to h0 ± alpha (action_clip)
      │                                     ▼
   channel ◄── fir_filter ◄── taps h[0..10] (committed all at once)
                  ▲
             IQ samples from the baseband
```

`chares_top` wires these blocks together. It has two loops that share only
the experience buffer and the actor's weights.

**Acting.** The agent does nothing while the receiver is content; when
feedback arrives it takes one *step*:

1. `reward_unit` turns the feedback into a reward `r` and the next state `s'`.
2. In training mode the controller writes the trajectory `(s, a, r, s')` of
   the previous step into the experience buffer (`a` is the tap set that was
   actually applied, noise included).
3. If the receiver reported the intended label, the taps are left alone.
   Otherwise the actor network computes `pi(s')`.
4. The 22 outputs (real and imaginary part of each of the 11 taps) are walked
   one per clock: in training a fresh Gaussian noise sample is added, then the
   value is clipped into the feasible box.
5. All 11 taps are committed to the FIR in the same clock.

The FIR never stops: it filters one IQ sample per clock with whatever taps are
in force, and a new tap set takes effect on the sample after `taps_updated`.

**Learning.** On request from the trainer, `td3_learner` runs one learning
step of the twin-critic (TD3) scheme over a random batch from the buffer,
computing the learning targets, the critics' errors and their losses, and
every second step blends the main weights into the target networks (see
"Learning steps" below). The gradient step in between is the trainer's.

## Feasible taps

The default filter is `h0 = [1, 0, ..., 0]`, which leaves the waveform
untouched. Each tap is confined separately in its real and imaginary part:

```
Re h[m] in [Re h0[m] - alpha, Re h0[m] + alpha]
Im h[m] in [Im h0[m] - alpha, Im h0[m] + alpha]      alpha = 0.1
```

so tap 0 lives in [0.9, 1.1] + j[-0.1, 0.1] and every other tap in
[-0.1, 0.1] + j[-0.1, 0.1]. This bound keeps the bit error rate essentially
unchanged while still letting the agent move constellation points. In this RTL
the actor's output layer is linear and `action_clip` applies the box after the
noise has been added, so the tap set that is transmitted is always feasible.
Element `2m` of an action is `Re h[m]`, element `2m+1` is `Im h[m]`.

## Number format

Everything real-valued — taps, weights, biases, activations, state, noise — is
a 16-bit two's-complement number with 12 fractional bits (`fx_t` in
`chares_pkg`): range [-8, 8), step 1/4096. alpha = 0.1 is stored as 410.
IQ samples are plain 16-bit signed integers. Products are always formed at full
width and summed in a 48-bit accumulator; results are shifted right by 12
(arithmetic, truncating) and saturated. The published work gives no word
lengths (its FPGA build was generated from C++); this format is a choice of
this design and the place to look first when porting trained weights.

## The network engine

`fc_network` is the largest block and the one that sets the agent's
latency. It evaluates a fully connected network with `IN_DIM` inputs,
`N_HID = 10` hidden ReLU layers of `HID = 30` neurons and a linear output
layer of `OUT_DIM` neurons, using a single multiply-accumulate unit. The top
has six of them: the actor and the target actor (`IN_DIM = 2`,
`OUT_DIM = 22`, 9142 weight words), and two critics and two target critics
(`IN_DIM = 24` — the state followed by the 22 action values — and
`OUT_DIM = 1`, 9151 words). The numbers below are for the actor.

**Weight memory layout.** One memory of `NUM_W` 16-bit words holds the whole
network, layer by layer and, inside a layer, neuron by neuron; each neuron is
stored as its bias followed by one weight per input:

```
NUM_W = HID*(IN_DIM+1) + (N_HID-1)*HID*(HID+1) + OUT_DIM*(HID+1)
      = 30*3 + 9*30*31 + 22*31 = 9142 words
```

The trainer writes it through `wr_en / wr_addr / wr_data` (address = word
index in this order); a second, registered read port `rd_addr / rd_data`
(one clock of latency) lets the soft update read the weights. The helper `mlp_words()` in the package computes
`NUM_W` for other sizes.

**Schedule.** The engine keeps a running word address. For every neuron it
spends one clock loading the bias (shifted left by 12 so it lines up with the
products) and one clock per input accumulating `weight * activation`; in the
clock of the last input it writes the neuron's result — ReLU of the saturated
value in hidden layers, the saturated value itself in the output layer — into
the other of two 30-entry ping-pong activation buffers. Because every clock
consumes exactly one memory word, an inference takes exactly `NUM_W` clocks of
work: `done` pulses `NUM_W + 1` = 9143 clocks after the clock in which `start`
was raised. The published FPGA build, produced by high-level synthesis, reports
13614 clocks for its actor; the two numbers are not expected to match, since
the schedules differ.

**State encoding.** The state is `s = {softmax, label_ok ? 1.0 : 0.0}`:
element 0 is the receiver's average softmax score for the intended class,
element 1 says whether the batch was labelled correctly. The publication
describes the state only as feedback on the classifier's accuracy (label and
softmax); the two-element encoding is this design's choice.

## Rewards

`reward_unit` remembers the softmax of the previous accepted feedback and
applies, in this order:

| condition                                   | reward |
|---------------------------------------------|-------:|
| label correct                               |     +2 |
| label wrong, decoding failure reported      |     -1 |
| label wrong, softmax higher than last time  |     +1 |
| label wrong, softmax lower than last time   |     -1 |
| label wrong, softmax unchanged              |      0 |

The values are the published ones; the order in which overlapping cases are
resolved is this design's.

## Exploration noise

In training, each action element gets `eps ~ N(0, sigma)` before clipping; in
testing there is no noise and no trajectory is stored. `gaussian_noise` draws
64 pseudo-random bits per clock from an xorshift64 generator, adds four 16-bit
uniforms (an Irwin–Hall sum, close to Gaussian and bounded at about ±3.5
sigma), rescales to unit variance and multiplies by the run-time `sigma`
input. The publication does not give a value for sigma.

## Experience buffer

`experience_buffer` stores trajectories of 424 bits (`s`: 2x16, `a`: 22x16,
`r`: 8, `s'`: 2x16) in a 10000-entry ring; once full, the oldest entry is
overwritten. When at least 64 entries are stored, a request from the learner
returns 64 of them, one per clock, drawn uniformly with replacement (index
`floor(u * count / 65536)` for a 16-bit LFSR value `u`), with the slot number
on `batch_index` and `batch_last` on the 64th. The first entry appears two
clock edges after the request edge.

The learner takes the batch; the trainer may watch the same `batch_*` outputs
to collect the entries it needs for its gradient step.

## Learning steps

A learning step follows the TD3 recipe, minus the gradients. `learn_req`
starts it (only when a batch is available); `td3_learner` then

1. has the buffer deliver 64 trajectories and keeps them in a small local
   memory;
2. for each trajectory `j`, in order:
   - starts the target actor on `s'_j` and, at the same time, both main
     critics on `(s_j, a_j)`;
   - adds a fresh sample of a second noise generator (deviation `sigma_t`)
     to each target-actor output and clips it to the feasible box, giving the
     smoothed target action `a~_j`;
   - starts both target critics on `(s'_j, a~_j)`;
   - hands `r_j` and the four Q values to `learning_target`, which outputs
     `y_j = r_j + gamma * min(Q1', Q2')` and the errors `Q_i(s_j, a_j) - y_j`
     on `tgt_*`, and after the last entry the two losses
     `L_i = (1/64) * sum_j (Q_i - y_j)^2` on `loss*`;
3. waits for `learn_ack`: the trainer has turned the targets into new critic
   weights (and, when `actor_due` was high, new actor weights) and written
   them through the weight port;
4. on every second step, starts three `soft_update` walks that rewrite each
   target memory as `theta' = omega * theta + (1 - omega) * theta'`, word by
   word (one per clock, biases included);
5. pulses `learn_done`.

The weight port selects a memory with `wmem_sel`: 0 actor, 1 and 2 critics,
3 target actor, 4 and 5 target critics. The trainer initialises the targets
by loading the same weights as the main networks (or by a soft update with
omega = 1.0). While `learn_busy` is high it must leave the target memories
alone, since the soft updates write them.

Two points of the published description are read a particular way here. The
text adds noise to the target actor evaluated at `s_j`, while its target
equation and block diagram evaluate it at `s'_j`; the RTL follows the
equation. Its only value of 0.99 is called the learning rate, which fits the
discount `gamma` and is used as such (`gamma = 4055`); the learning rate of the
gradient step is the trainer's business. `gamma`, `omega` and `sigma_t` are
run-time inputs.

Acting and learning use different networks, so a step of one may run while
the other is busy. At the default sizes one batch entry takes
9143 + 22 + 9152 + 5 = 18322 clocks, a whole learning step about 1.17 million
clocks (about 3.5 ms at 3 ns), and the soft update another 9156 clocks from
`learn_ack` to `learn_done`.

## Latency

| path                                        | clocks |
|---------------------------------------------|-------:|
| actor inference, `start` to `done`          | 9143   |
| feedback accepted to `taps_updated`         | 9168 = 9142 + 22 + 4 |
| correct label (taps kept)                   | 2      |
| FIR input to output                         | 1      |
| learning, one batch entry                   | 18322 = 9143 + 22 + 9152 + 5 |
| `learn_ack` to `learn_done`, with / without soft update | 9156 / 2 |

While a step is running `fb_ready` is low and further feedback is dropped
(counted in `n_fb_dropped`). At a 3 ns clock a full step takes about 27.5 µs,
far inside the tens-of-milliseconds coherence time that motivates the scheme.

## Parameters

| parameter (module)            | default | meaning |
|-------------------------------|--------:|---------|
| `M` (top, FIR, controller)    | 11      | complex taps |
| `HID`, `N_HID` (top, networks) | 30, 10 | hidden width and depth |
| `IN_DIM`, `OUT_DIM` (network) | 2, 22 (critics 24, 1) | inputs and outputs |
| `DEPTH`, `B` (top, buffer)    | 10000, 64 | buffer entries, batch size |
| `alpha`, `sigma` (top inputs) | —       | tap bound, noise deviation (fx_t) |
| `gamma`, `omega`, `sigma_t` (top inputs) | — | discount (0.99 = 4055), soft-update weight (0.05 = 205), target-action noise |
| `D` (learner)                 | 2       | learning steps between target updates |
| `SEED` (noise, buffer)        | fixed   | generator seeds |

## Files

`rtl/chares_pkg.sv` holds the number format, sizes, reward values and the
`feedback_t` / `trajectory_t` structs. One module per file otherwise:
`fir_filter`, `fc_network`, `gaussian_noise`, `action_clip`,
`reward_unit`, `experience_buffer`, `chares_controller`, `td3_learner`,
`learning_target`, `soft_update`, `chares_top`.
`chares_top` carries assertions for its handshakes (no network start while
busy, noise delivered the clock after it is requested, batches only when at
least `B` entries are stored, no trainer write to the target actor during a
soft update).

Each block has a self-checking testbench `tb/tb_<module>.sv` that computes
expected values with its own integer model and ends by printing
`TB_RESULT checks=N failures=F`. `tb_chares_top` runs the whole agent at the
default sizes: it loads random weights into all six networks, sends feedback
of every kind in training and testing mode, pushes the buffer past 10000
entries, runs three learning steps (the second with a soft update, the third
checking the updated targets) and checks every tap set, every batch entry,
every learning target, error and loss, the latencies and every FIR output
sample against its own model: about 2.8 million checks in some 10 seconds of
simulation. `tb_td3_learner` tests the sequencer against small stand-in
networks.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl +libext+.sv -Irtl rtl/chares_pkg.sv tb/tb_chares_top.sv \
    --top-module tb_chares_top
./obj_dir/Vtb_chares_top
```

`-y rtl` lets Verilator find each module in `rtl/<name>.sv`; the package is
listed first. The testbenches use only `$urandom`, so any seed works; unused state starts at
random values, and every block resets everything it reads.

## Where this departs from, or goes beyond, the publication

- Number format, actor schedule (9143 vs the published 13614 clocks), state
  encoding, output-layer activation (linear, then clip), noise generator,
  buffer replacement and sampling policy, reward priority, and the rule that
  feedback is dropped while a step runs are all this design's choices.
- The published latency figure states a "minimum clock period 3 µs" and a
  total of 40.842 µs for 13614 cycles; the total only works for a 3 ns
  period, which is the reading used above.
- The gradient steps (critic SGD on the loss, the delayed policy-gradient
  update of the actor) are not implemented; the transmitter's DSP and radio
  chain and the receiver are outside the design.
- The critics' input layout, the clipping of the smoothed target action to
  the tap box, one-entry-at-a-time processing of a batch and the
  acknowledge handshake with the trainer are this design's choices.
