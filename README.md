# A multiplier-free, event-driven spiking network that learns a context-dependent task

This is synthesizable SystemVerilog for a small spiking neural network that
learns by reinforcement which of two items to "dig" for, depending on the
context it is in. The network has 16 leaky integrate-and-fire (LIF) neurons
in three layers, 64 plastic synapses with a spike-timing-dependent
plasticity (STDP) rule, and two winner-take-all (WTA) groups. A controller
runs the experiment. In each trial it shows a stimulus and lets the network
act until it digs. Then it replays the last steps with learning on: forward
if the dig was rewarded, backward if it was not. Forward replay strengthens
the synapses along the path the network took. Backward replay weakens them.

The whole datapath is built without multipliers:

* a spike times a weight is an AND gate;
* scaling weights to volts is an arithmetic shift;
* the learning amplitudes are powers of two, so they are shifts too;
* the membrane leak is a constant subtraction.

The design follows the architecture, constants and number format of
Asgari, Maybodi, Payvand, Indiveri and Sandamirskaya, "Digital
Multiplier-less Event-Driven Spiking Neural Network Architecture for
Learning a Context-Dependent Task". That paper leaves many details open:
the weight-to-voltage scale, the winner-take-all margin, the exact replay
schedule, how activity is recorded, and the time base of learning. This
implementation fills them in. Where it does, this is said below and in the
first comment of each source file.

**Main limitation:** the network runs the task, but with the choices made
here it does not learn it. Its rate of rewarded digs stays near chance. The
section [How far to trust it](#how-far-to-trust-it) explains this.

## The task

The agent is in one of two contexts, A or B. Each context has two
positions, 1 and 2. Two items, X and Y, lie in the two positions of the
current context. The agent senses one position and the item in it, a
*triplet* such as A1X. It then either digs there or moves to the other
position. Digging for X in context A, or for Y in context B, is rewarded:
A1X, A2X, B1Y and B2Y are the rewarded triplets. The other four are not.

Moving from a triplet always leads to its *complement*: the other position
of the same context, holding the other item. So A1X moves to A2Y, and B2X
moves to B1Y. A trial ends with the first dig.

The stimulus is a 6-bit one-hot pair, with one place bit and one item bit:

| bit | 0  | 1  | 2  | 3  | 4 | 5 |
|-----|----|----|----|----|---|---|
|     | A1 | B1 | A2 | B2 | X | Y |

`snn_pkg::complement` computes the move target and `snn_pkg::rewarded`
computes the reward rule. The testbenches use them to model the
environment.

## Network

| neurons | index | layer                                   |
|---------|-------|-----------------------------------------|
| 6       | 0-5   | sensory, one per triplet bit             |
| 8       | 6-13  | hidden ("hippocampus")                   |
| 2       | 14-15 | motor: 14 = dig, 15 = move               |

The synapses are:

* **Plastic, excitatory (64):** every sensory neuron to every hidden
  neuron (6×8). Every hidden neuron to both motor neurons (8×2).
* **Static, inhibitory (58):** every ordered pair inside the hidden layer
  (8×7). Both directions between the two motor neurons (2). They all carry
  the same strong negative weight, `w_inh`.

The inhibitory synapses make the hidden layer and the motor layer
winner-take-all groups. In a step, one hidden neuron wins and then one
motor neuron wins. So a decision is a path: stimulus → one hidden neuron →
dig or move. Learning changes which path a given stimulus takes.

The connections are point-to-point. `synaptic_crossbar` is purely
combinational. For each post-synaptic neuron j it outputs one row. Entry i
of the row is `W[i][j]` if neuron i spiked in this cycle and the pair is
connected. Otherwise the entry is 0.

## Numbers

All voltages and weights are 32-bit signed fixed point with 31 fractional
bits (Q1.31). The range is [-1, 1) with a step of 2^-31. One unit of 1.0
stands for 1 V.

| quantity                  | value        | Q1.31 integer |
|---------------------------|--------------|---------------|
| threshold V_th            | -50 mV       | -107374182    |
| reset / rest V_reset      | -70 mV       | -150323855    |
| leak per waiting cycle    | 1.2e-7 V     | 258           |
| replay drive, sensory     | 1.28 mV      | 2748779       |
| replay drive, hidden      | 1.48 mV      | 3178276       |
| replay drive, motor       | 1.64 mV      | 3521873       |
| weight range              | [0, 1)       | 0 … 0x7FFFFFFF |
| inhibitory weight (tb)    | -1.0         | 0x80000000    |
| LTP amplitude A+          | 2^-10        | shift by 10   |
| LTD amplitude A-          | 2^-11        | shift by 11   |

A weight is dimensionless. To turn it into a voltage step, the neuron
shifts its summed weights right by `W_SHIFT` (default 8):

* a weight of 0.5 adds about 1.95 mV;
* a weight of -1.0 subtracts about 3.9 mV.

The gap from reset to threshold is 20 mV. All adders saturate at the ends
of the 32-bit range instead of wrapping.

## The neuron (`lif_neuron`)

Each neuron is a Moore machine with four states. The state and V_m are
registered. The next state is worked out from this cycle's input.

```
            active                input != 0
 Resting ───────────▶ Waiting ───────────────▶ Integrating
    ▲  ◀─── !active ──   ▲  V_m -= V_leak           │ V_m += input
    │                    │                          │
    │                    └──── V_reset ≤ V_m < V_th ┤
    └──────────── V_m < V_reset ────────────────────┤
                         ▲                          │ V_m ≥ V_th and wins WTA
                         └──── Firing (spike=1, V_m=V_reset) ◀┘
```

**Resting.** V_m is held at V_reset. The neuron leaves Resting when its
`active` bit is set.

**Waiting.** The leak is subtracted every cycle. Any non-zero input moves
the neuron to Integrating.

**Integrating.** The input is added to V_m. Then:

* if V_m reaches the threshold, the neuron fires;
* if inhibition has pushed V_m below V_reset, it goes back to Resting;
* otherwise it returns to Waiting.

**Firing.** `spike` is high for exactly one cycle and V_m is set to
V_reset.

**Clearing `active`.** This resets a neuron to Resting from any state. The
controller uses it to reset every neuron in three cycles:

* the cycle of each action;
* the start of the replay;
* the start of each replay window.

**Timing.** A spike of neuron i at cycle t reaches neuron j at the edge
that ends cycle t, through the crossbar. The earliest spike j can answer
with comes two cycles later: Waiting → Integrating → Firing.

**Pending input.** While the neuron spends a cycle Integrating, another
spike may arrive. That input is held in a *pending* register and added at
the next integration. Without this, a one-cycle spike would be lost half
the time.

**Cost.** The datapath is one wide adder over all fan-in rows, a barrel
shift, a saturating adder and two comparators. There is no multiplier.

## Winner-take-all and the threshold margin (`neurons_core`)

Lateral inhibition arrives one cycle after the winner's spike. So two
neurons of one group that cross the threshold in the same cycle would both
fire. In practice this happens whenever two hidden neurons have similar
weights.

A *margin around the threshold* settles this. `neurons_core` looks at all
neurons of a WTA layer that cross the threshold in the same cycle. Only the
ones whose new V_m is within `V_MARGIN` of the highest are allowed to fire.
The default `V_MARGIN` is 0, so only the highest fires; exact ties all
fire.

A neuron that loses keeps its V_m and goes back to Waiting. The next cycle
it receives the winner's inhibition. With `w_inh` = -1.0 that drops it by
about 3.9 mV.

The sensory layer is not a WTA group. All of its stimulated neurons fire.

## Synapses and learning (`plastic_synapse`, `synapses_core`)

Each plastic synapse stores three things:

* its weight;
* the time stamp of the latest pre-synaptic spike, with a valid flag;
* the time stamp of the latest post-synaptic spike, with a valid flag.

The time stamps come from a free-running 16-bit counter, `now`. While
`e_learning` is high and both spike times are valid, the synapse updates
its weight every clock cycle, from dt = T_post − T_pre:

```
dt > 0  (pre before post)  W ← W + ((W_MAX − W) >>> 10)     LTP
dt < 0  (post before pre)  W ← W − ((W − W_MIN) >>> 11)     LTD
dt = 0 or |dt| > DT_MAX    unchanged
```

The result is clamped to [W_MIN, W_MAX]. Each step moves the weight a fixed
fraction of its distance to the bound it is heading for. So weights
approach the bounds geometrically and never cross them.

The update repeats in every learning cycle. The total change from one
pairing therefore depends on how long the pairing stays stored: from when
the second spike of the pair arrives until the end of the replay window.
At the start of every replay window, `ts_clr` clears all stored times, so
pairings never carry over from one replayed step to the next. A later
spike replaces the stored time, so the latest spikes decide the sign.

`DT_MAX` is set to the replay window, 130 cycles. So every pair that falls
inside one window counts.

The 58 inhibitory synapses are plain registers. `inh_load` loads them all
with `w_inh` at initialisation. They never learn.

`synapses_core` presents all weights as a full 16×16 matrix `w[pre][post]`,
with zero where there is no synapse. It also gives one `ltp`/`ltd` pulse
per plastic synapse, for observation.

Plastic synapse k is numbered as follows:

* sensory i → hidden h: `i*8 + h`;
* hidden h → motor o: `48 + h*2 + o`.

## Initial weights (`init_synapses`, `config_lfsr`)

On `run`, four Galois LFSRs are loaded. Each LFSR takes the width, seed and
feedback polynomial given at run time. Lane l gets the seed
`lfsr_seed ^ (l * 0x9E3779B9)` and the common polynomial `lfsr_taps`. An
all-zero seed is replaced by 1.

In each cycle, each lane writes one plastic synapse with

    W = 0.375 + r · 2^-(2+R_BITS),    r = lowest R_BITS bits of the LFSR

and then steps its LFSR. With R_BITS = 8 this gives 256 evenly spaced
values in [0.375, 0.625), centred on half the weight range.

The 64 synapses take 16 write cycles. One more cycle loads the inhibitory
registers, and then `done` rises. From `run` to `ready` takes about 20 cycles.

## One trial (`scheduler`, `behavior_mode`, `history_seq`, `replay_mode`, `controller_unit`)

The scheduler's states are `IDLE → INIT → READY → BEHAVIOR → REPLAY →
READY …`.

### Behaviour phase

`start_trial` (a pulse while `ready`) does three things:

* loads the triplet;
* clears the history;
* activates all neurons.

The behaviour unit drives every sensory neuron whose triplet bit is set
with a constant 1.28 mV per integration. The stimulated sensory neurons
fire about every 30 cycles. They charge the hidden layer, whose WTA picks
one neuron, and that neuron charges the two motor neurons. The first motor
spike is the action. `dig` or `move` pulses one cycle after it; if both
spike together, dig wins.

At each action, the behaviour unit pushes an *activity sample* into the
history. The sample has one bit per neuron. For each layer it holds that
layer's latest spike vector since the previous action. This is the
stimulated sensory neurons, the latest hidden winner and the acting motor
neuron: the path that produced the action.

At a move, three things happen:

* the stimulus switches to the complementary triplet;
* the neurons are reset for one cycle;
* the phase continues.

At a dig, the replay starts.

If no dig comes within `T_TRIAL` = 30000 cycles, `timeout` pulses. The
trial is then replayed as unrewarded.

The history (`history_seq`) keeps the two latest samples. Entry 0 is the
newest. A trial is a move followed by a dig, or a dig alone, so two
entries cover it; with repeated moves only the last two steps are kept.

### Replay phase

The replay unit latches the reward in the cycle after the dig pulse.
`e_learning` is high for the whole phase. Each stored sample gets a window
of `T_REPLAY` = 130 cycles:

| direction | taken when | sample order  | layer order in a window     |
|-----------|-----------|---------------|-----------------------------|
| forward   | rewarded  | oldest first  | sensory → hidden → motor    |
| reverse   | not       | newest first  | motor → hidden → sensory    |

Cycle 0 of a window resets the neurons and clears the synapses' spike
times. The first cycle of the replay clears them too, so no spike from the
behaviour phase is ever paired. The rest of the window is cut into three phases of 43 cycles. In
each phase, only the neurons of one layer that are set in the sample are
driven, with that layer's replay voltage:

* sensory: 1.28 mV;
* hidden: 1.48 mV;
* motor: 1.64 mV.

A driven neuron fires after 12–16 integrations, which is roughly 25–32
cycles, inside its 43-cycle phase. Once it has spiked in the window, its
drive stops. So each recorded neuron fires once, in its layer's phase.

In a forward window the pre-synaptic layer always fires before the
post-synaptic one. The synapses on the recorded path then see dt > 0 and
are potentiated for the rest of the window. In a reverse window the order
flips: dt < 0, and they are depressed.

Synapses that leave the path get one spike time but never the other. They
stay unchanged.

The replay takes (number of samples) × 130 cycles. `trial_done` pulses at
its end, and the scheduler returns to READY.

### Input multiplexer

`controller_unit` wires the five control units together. It selects the
neurons' direct input voltages from the behaviour unit or the replay unit,
using the scheduler's select. This is the only place where the two phases
meet the neurons.

## Timing summary

| event                                      | cycles                |
|--------------------------------------------|-----------------------|
| `run` → `ready`                            | about 20              |
| input → earliest spike                     | 2                     |
| spike → post-synaptic input                | 1 (crossbar is combinational) |
| motor spike → `dig`/`move` pulse           | 1                     |
| `dig` → replay start                       | 1 (`reward` sampled here) |
| replay                                     | 130 per stored sample (≤ 260) |
| behaviour time-out                         | 30000                 |
| trial after the first ~60 (simulated)      | 280–340 behaviour + 130 replay |

At the 100 MHz clock of the reference system, a trial takes about 5 µs.

## Top-level interface (`snn_top`)

| port          | dir | width | meaning |
|---------------|-----|-------|---------|
| `clk`, `rst_n`| in  | 1     | clock; asynchronous active-low reset |
| `run`         | in  | 1     | level: initialise weights, then stay ready for trials |
| `start_trial` | in  | 1     | pulse while `ready`: start a trial with `triplet` |
| `triplet`     | in  | 6     | starting stimulus, coded as above |
| `reward`      | in  | 1     | sampled the cycle after `dig`; typically `rewarded(cur_triplet)` |
| `lfsr_seed`, `lfsr_taps` | in | 32 | initial-weight generator |
| `w_inh`       | in  | 32    | inhibitory weight (Q1.31, negative) |
| `ready`       | out | 1     | idle between trials |
| `dig`, `move` | out | 1     | action pulses |
| `cur_triplet` | out | 6     | stimulus presented now (changes on move) |
| `spikes`      | out | 16    | spike of every neuron |
| `e_learning`  | out | 1     | replay / learning phase |
| `trial_done`  | out | 1     | pulse at the end of the replay |
| `timeout`     | out | 1     | pulse when a trial ran out of time |

The following parameters have the sizes given above as defaults:

* `N_IN`, `N_HID`, `N_OUT`;
* `T_TRIAL`, `T_REPLAY`;
* `W_SHIFT`, `R_BITS`.

The triplet coding fixes `N_IN` at 6 and `N_OUT` at 2, with dig at index
`N_IN+N_HID` and move at the next index. `N_HID` can be changed.

Generic synthesis of the top gives about 6000 cells and 3700 flip-flop
bits. Most of it is the 64 synapses: each has a 32-bit weight, two 16-bit
time stamps, and a subtractor plus a shifter.

## How far to trust it

**What is checked.** Each block has a self-checking testbench in `tb/`.
Each compares the block against values worked out independently in the
testbench:

* neuron trajectories and state sequences;
* LTP/LTD steps and clamping;
* LFSR sequences;
* the order and timing of replay drives;
* scheduler sequences, time-outs among them;
* the winner-take-all arbitration.

`tb_snn_top` runs 60 trials of the full-size network. It checks every
move's target, the replay direction, the trial length and the weight
ranges. It also counts initialisation, moves, digs, forward and reverse
replays, LTP and LTD updates, neuron firing, and inhibition pushing a
neuron to rest; it fails if any of them never happens.

`tb_learning` runs 300 trials. Every 10 trials it prints the performance
over a sliding window of 30 trials, the mean time to a dig and the number
of moves in the window.

**Learning does not converge.** The reference system reaches 80–90 %
rewarded digs after about 100 trials. This implementation does not. Over
300 trials its rate of rewarded digs moves between about 35 % and 65 %
(30-trial windows), which is chance level. This held for every seed,
`W_SHIFT` value (6–9) and rule variant that was tried.

The mechanisms themselves work:

* rewarded replays potentiate the recorded path;
* unrewarded replays depress it;
* weights stay bounded;
* the time to a dig falls over the trials.

What goes wrong is visible in `tb_learning`. In the first few dozen
trials the network explores. It moves back and forth between the two
triplets of a context, sometimes until the trial times out. After about
60 trials it has settled into digging at once on every stimulus, and it
never moves again. From then on the performance only reflects how often a
rewarded triplet is drawn. Two properties of the design, as built, cause
this:

* **The action is a deterministic function of the weights.** Nothing in
  the network is random after initialisation. The winning hidden neuron
  drives both motor neurons, so whichever of its two outgoing weights is
  larger acts first, every time. If dig is larger for every hidden winner,
  a move is never tried, and the move synapses never learn.
* **Credit depends on when a pairing forms in the window.** A pairing keeps
  updating until the end of its 130-cycle window. In a forward window the
  sensory→hidden pair forms first, about 75 cycles before the end; the
  hidden→motor pair forms about 30 cycles before the end. A reverse window
  is the other way round. So rewarded trials mostly strengthen the
  sensory→hidden weights, and unrewarded trials mostly weaken the
  hidden→motor weights. One hidden neuron then tends to win for half or
  more of the stimuli. Its dig weight settles near the value at which
  potentiation and depression balance, still above its move weight.
  Limiting each pairing to a fixed number of update cycles was tried, and
  did not change the outcome.

The source leaves open several quantities that bear on both points:

* the weight-to-voltage scale (`W_SHIFT`);
* the size and form of the WTA margin;
* the exact replay drive and window schedule;
* which neuron activity a sample records;
* how often the STDP step is applied during a replay.

Use the design as a faithful structural model and a platform to explore
those choices. Do not use it as a reproduction of the published learning
curve.

**Departures and own choices.** Where the source is silent or
inconsistent, this design does the following:

* *LTD weight dependence.* The simplified rule scales depression by
  (W_MAX − W), and the algorithm listing by W. Depression here uses
  (W − W_MIN), which is W. With (W_MAX − W), depression vanishes near the
  top, and all weights drifted to 1.
* *Sign of dt.* dt = T_post − T_pre, as in the text. The algorithm listing
  writes it the other way round.
* *Update rate.* The weight is updated once per cycle while learning is on
  and a pairing is stored. The amplitudes 2^-10 / 2^-11 per step then give
  changes of a few percent per replay.
* *WTA margin.* It is a same-cycle comparison of the crossing neurons, with
  margin 0. The source names a margin but gives neither its form nor its
  value.
* *Activity sample.* It holds the latest spike vector per layer. Keeping
  every neuron that spiked during a step made replays excite many hidden
  neurons at once.
* *Replay drive.* The three staggered layer phases, stopping a neuron's
  drive after its first spike, and the order of the samples are all this
  design's choices.
* *`W_SHIFT` = 8.* The source describes a barrel shifter but not its
  amount.
* *Pending input register.* This is this design's choice, as are firing at
  V_m = V_th and saturating arithmetic.
* *Initial weights.* The spread is [0.375, 0.625) with 8 random bits from
  four LFSR lanes. The source says only "random, around the middle".
* *History depth.* The history has two entries. With repeated moves, only
  the last two steps are replayed.
* *Time-out.* When a trial times out, it is replayed as unrewarded.
* *Outside the chip.* The PC interface, the robot, the camera and LED
  detection are not built. Their signals are the top's ports.

## Simulating

Every file is plain SystemVerilog-2017. The package must come first.
With Verilator 5:

```sh
verilator --binary --timing -Irtl rtl/snn_pkg.sv rtl/*.sv tb/tb_learning.sv \
          --top-module tb_learning -o sim
./obj_dir/sim
```

Replace `tb_learning` with any `tb/tb_<block>.sv` to test a single block.
Every testbench ends with a line
`TB_RESULT checks=<n> failures=<m>`. Every testbench also has a watchdog
that stops a run that hangs.

The full-size runs take seconds: 60 trials in `tb_snn_top`, 300 in
`tb_learning`.

Things to try when exploring learning:

* `W_SHIFT` on `snn_top`;
* `V_MARGIN` on `neurons_core`;
* the replay voltages and `T_REPLAY`;
* the LTP/LTD shifts in `snn_pkg`;
* `lfsr_seed`.

## Files

| file | content |
|------|---------|
| `rtl/snn_pkg.sv` | types, constants, triplet/topology helper functions |
| `rtl/lif_neuron.sv` | one LIF neuron (four-state machine) |
| `rtl/neurons_core.sv` | all neurons + WTA threshold-margin arbitration |
| `rtl/plastic_synapse.sv` | one STDP synapse |
| `rtl/synapses_core.sv` | 64 plastic + 58 static inhibitory synapses |
| `rtl/synaptic_crossbar.sv` | spike-gated point-to-point weight routing |
| `rtl/config_lfsr.sv` | run-time configurable Galois LFSR |
| `rtl/init_synapses.sv` | random initial weights, inhibitory load |
| `rtl/history_seq.sv` | two-entry activity history |
| `rtl/behavior_mode.sv` | stimulus drive, action detection, sampling |
| `rtl/replay_mode.sv` | forward/reverse replay of the history |
| `rtl/scheduler.sv` | experiment sequencer, learning enable, time-out |
| `rtl/controller_unit.sv` | control units + input multiplexer |
| `rtl/snn_top.sv` | the whole network |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_learning` |
