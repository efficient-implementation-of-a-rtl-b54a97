# ODESA on silicon: a spiking network that trains itself, in SystemVerilog

ODESA (Optimized Deep Event-driven Spiking neural network Architecture) is a
spiking neural network that learns without back-propagation. Every layer
learns with local signals only: its own output spikes, an *attention signal*
from the layer above, and the labels. That makes the learning cheap enough
to build beside the network in plain logic: counters, adders, shifters and a
few flip-flops per neuron, with no multiplier-heavy gradient path.

This RTL implements a two-layer ODESA network with its training hardware,
following the published FPGA implementation of the method. The default
configuration is the 8__2_4__4 network, which has:

- 8 input lines;
- a first layer (L1) of 2 neurons with 8 synapses each;
- an output layer (L2) of 4 neurons with 2 synapses each, one per class.

It is the network used to tell apart four spatio-temporal spike patterns.
Every block is parameterised, so the same RTL also builds the
4__6_3__3 network used for the Iris data set.

## 1. How an input spike becomes an output spike

### Synapse: a spike becomes a decaying trace

Each synapse (`synapse.sv`) turns a short, asynchronous input spike into a
number that decays with time, then multiplies it by its weight.

1. **Synchronizer** (`synchronizer.sv`). The spike itself clocks a flip-flop
   whose D input is tied high, so a pulse of any width is caught. A second
   flip-flop re-times the captured level to the layer clock. The level stays
   high, and further spikes are ignored, until the synchronizer is cleared.
2. **Leaky accumulator** (`leaky_accumulator.sv`). At the first clock that
   sees the synchronised level, the counter loads *its own value + C*. On
   every other clock it decays:
   - by one per clock (linear decay, the default), so a single spike's trace
     falls from C to 0 in exactly C clocks;
   - or by halving (exponential decay, `EXP_DECAY = 1`, with C = 2^tau - 1).

   Two clocks after the load, the accumulator pulls its `o_clr` output low
   for one clock. That clears the synchronizer, which can then take the next
   spike. Because of the *own value + C* load, a second spike that comes
   before the trace has died lifts it above C. The counter has one bit more
   than the C range for that reason, and it saturates.
3. The synapse output is *weight × trace*. The trace is also kept, delayed by
   one clock, as the synapse's TRACE register for the trainers.

### Neuron: sum, threshold, last value

A neuron (`neuron.sv`) adds its synapse outputs into a membrane potential.
- When the potential reaches the neuron's threshold (>=), the neuron outputs
  the potential; otherwise it outputs 0.
- When the neuron's own output spike appears, the potential is stored in the
  *LAST_VALUE* (LV) register, the value that threshold learning aims at.
- Potentials, thresholds and LV are 21 bits wide.

### Layer: one winner per input event

A layer (`odesa_layer.sv`) has `N_NEUR` neurons that share the same inputs,
one comparator and one spike generator per neuron.

- **IS_EVENT** is high for the clock in which any input line has just been
  synchronised. It opens a spike window of `SPK_WIN = 4` clocks.
- **Comparator** (`comparator.sv`). A combinational scan gives a one-hot
  trigger on the largest non-zero neuron output. Ties go to the lower index;
  if every output is 0 there is no trigger.
- **Spike generator** (`spike_generator.sv`).
  - Its first flip-flop samples the trigger on the falling clock edge.
  - Its second flip-flop turns that into a one-clock spike on the next
    rising edge, but only while the window is open.
  - The spike clears the first flip-flop.
  - The first spike also closes the window, so an input event gives at most
    one output spike in the whole layer: a hard winner-takes-all.
  - An assertion in the layer checks that the output spikes are one-hot or
    zero.

### Cycle-by-cycle timing of one layer

Times are in clocks of the layer's own clock. k is the rising edge at which
the synchronizer first shows the input spike.

| edge   | what happens |
|--------|--------------|
| k      | synchronizer output rises; IS_EVENT is high during [k, k+1) |
| k+1    | traces load +C; the spike window opens (4 clocks) |
| k+1.5  | the spike generators sample the comparator (falling edge) |
| k+2    | the winner's output spike rises (one clock wide); the window closes |
| k+3    | the winner's LV takes the potential; the synchronizer is cleared |

The testbenches check this: a spike two clocks after synchronisation, and
only one per event. The layer's spikes are the input spikes of the next
layer. Counting the clock in which the synchronizer catches the input,
the delay from an input spike to an output spike is three clocks.

## 2. How the network learns

Learning changes two things per neuron:
- its weights, which move towards the *time surface* (TS): the snapshot of
  its synapse traces taken when the neuron won;
- its threshold, which moves towards its LV (reward) or is lowered (punish).

All arithmetic lives in the register bank (`tw_register_bank.sv`) and the
shared functions of `odesa_pkg.sv`.

| action | weights | threshold |
|--------|---------|-----------|
| reward | w += η_w·(TS − w) | T += η_T·(LV − T) |
| punish | – | T −= ΔT |
| negative update (output layer only) | w −= η_w·(TS − w) | – |

- **Learning rates.** η is a power of two, so each step is a shift and an
  add (`UPD_SHIFT`). A step that would shift to zero is replaced by ±1, so
  training cannot lock up.
- **Sign mode.** For the very small rates of harder data sets, `UPD_SIGN`
  replaces the shift step by a fixed step η in the direction of the target.
- **Threshold punishment.** ΔT is fixed (`DT_FIXED`) or adaptive
  (`DT_ADAPTIVE`). The adaptive step is 1023, 255, 15 or 1 as T is above
  65535, 4095, 255 or not, so small thresholds are never driven through
  zero.
- **Range.** Every result is clamped to the register range.

### Attention signals

- **GAS (global attention signal)**: a label is present for the current
  input. It is the OR of the one-hot label bits and goes to every layer.
- **LAS (local attention signal)**: the layer above has just spiked. It is
  that layer's IS_WINNER and goes to the layer below.

Both are spikes, and each trainer catches them with its own synchronizer.

### Hidden-layer trainer (`hidden_trainer.sv`)

1. When a neuron spikes, its TS register takes the layer's synapse traces.
2. At IS_EVENT (or when a GAS arrives on its own), a pass counter starts. At
   the third clock edge (Δt_pass = 3), and only if a GAS was caught:
   - if a neuron won, the winner is rewarded;
   - if no neuron won, every neuron is punished, and each neuron's trace in
     the next layer is stored as its NO_WINNER value.
3. For each LAS from the layer above, every neuron is judged on the trace
   its last spike left in that layer:
   - a trace above 10 % of full scale means the neuron contributed, so it is
     rewarded;
   - otherwise, a NO_WINNER value above 10 % means the neuron stayed silent
     when it was needed, so it is punished and its NO_WINNER is cleared.

### Output-layer trainer (`output_trainer.sv`)

1. The rising edge of GAS itself clocks the label into `r_label`.
2. The first output spike seen while GAS is pending is latched as WINNER.
3. `PASS` clocks after GAS is seen, the winner is compared with the label:

| WINNER | action |
|--------|--------|
| = LABEL | reward the label neuron |
| none | punish the label neuron |
| another neuron | negative weight update of the winner, punish the label neuron |

One clock later everything is cleared. The comparison also drives two
outputs, `o_eval` and `o_match`, which the top counts to measure accuracy.

In the published design, Δt_pass is 3 clocks in every layer, counted from
the layer's own input event. The output trainer here counts from the label
instead: the label enters with the network's input, not with the L1 spike
that reaches L2. Its window therefore has to cover L1's latency too, so it
is 6 L2 clocks by default (`PASS2`). The end-to-end test checks that every
evaluation comes exactly 6 L2 clocks after GAS is seen.

## 3. Clocks

`clock_divider.sv` makes both layer clocks from the system clock:
- clk_l1 = system clock / `DIV_L1` (default 20, i.e. 2.5 MHz from 50 MHz);
- clk_l2 = clk_l1 / `RATIO_L2` (default 2).

Both are registered outputs of one counter, so every clk_l2 rising edge
falls on a clk_l1 rising edge.

L1 and its trainer run on clk_l1; L2 and its trainer run on clk_l2. Three
signals cross between the domains:
- the L1 output spikes;
- the L2 IS_WINNER, sent down as LAS;
- GAS.

Each is caught by a spike-clocked synchronizer on the receiving side. The L1
trainer reads L2 traces directly; they change only on clk_l2 edges, which
are also clk_l1 edges.

The original 8__2_4__4 network ran L1 at 64 kHz and L2 at 32 kHz. Only the
ratio matters to the logic, because every delay counts layer clocks.

## 4. Training memory and running the chip

The training set lives in an on-chip RAM (`training_ram.sv`).
- **Word format.** One word per L1 clock: `{label one-hot, events}`, i.e.
  N_CLS + N_IN bits. The label goes in the same word as the input spike it
  belongs to (for the pattern task, the last spike of each pattern).
- **Writing.** The RAM has a write port on the system clock, for a host.
- **Reading.** The RAM is read on clk_l1.

`event_source.sv` steps through words 0 .. `i_len`−1 once per L1 clock and
counts epochs in `o_epoch`. It stops, with `o_done`, after `i_epochs`
epochs; 0 means run forever. With `i_use_ram` low, the external inputs
`i_events` drive L1 instead, with no label.

A typical run of `odesa_top`:

1. Pulse `i_rst_n` low (see "Reset" below).
2. Write the set with `i_wr_en/i_wr_addr/i_wr_data`.
3. Set `i_len` and `i_epochs`, raise `i_train_en` and `i_use_ram`, and wait
   for `o_done`.
4. Lower `i_train_en`, raise `i_epochs` by one and wait for `o_done` again.
   The increase of `o_eval_cnt` and `o_match_cnt` over that epoch gives the
   accuracy on the stored set.
5. Lower `i_use_ram` to classify live events on `i_events`; the answer is
   on `o_spike`.

`o_l1_reward`, `o_l1_punish`, `o_l2_reward`, `o_l2_punish` and `o_l2_negw`
pulse in their layer's clock on every learning step, for monitoring.

**Reset.** The spike-clocked capture flip-flops are cleared through an
asynchronous clear. In silicon the level of `i_rst_n` is enough. A
two-state simulator, however, acts only on an edge of the clear net, and
some clear nets are an AND of the reset with a register that starts at a
random value. The testbenches therefore pulse reset low twice.

## 5. Parameters

Defaults (those of the 8__2_4__4 network) and the values for the Iris
network:

| parameter | default | meaning | Iris (4__6_3__3) |
|-----------|---------|---------|------------------|
| N_IN, N_L1, N_CLS | 8, 2, 4 | inputs, hidden neurons, classes | 4, 6, 3 |
| CNT_W1/2, C1/2 | 6, 63 | trace counter bits, decay constant | 8, 255 |
| W_W | 8 | weight bits | 8 |
| POT_W | 21 | potential / threshold / LV bits | 21 |
| SPK_WIN | 4 | spike window after an input event | 4 |
| W_MODE1, W_ETA1 | shift, 3 (2^-3) | L1 weight rule | sign, 1 |
| T_MODE1, T_ETA1 | shift, 3 | L1 threshold reward | sign, 127 |
| DT_MODE1, DELTA_T1 | fixed, 63 | L1 punishment | fixed/adaptive |
| W_MODE2, W_ETA2 | shift, 2 (2^-2) | L2 weight rule | sign, 2 |
| T_MODE2, T_ETA2 | shift, 2 | L2 threshold reward | shift, 10 (2^-10) |
| DT_MODE2, DELTA_T2 | fixed, 63 | L2 punishment | adaptive |
| PASS1, PASS2 | 3, 6 | pass windows (L1 from event, L2 from label) | 3, 6 |
| LAS_AFTER_GAS | 0 | pass LAS to L1 only while a label is pending | 1 |
| DIV_L1, RATIO_L2 | 20, 2 | clock ratios | 20, 4 |
| DEPTH | 2048 | RAM words | 2048 |

**Iris memory.** The 150-sample set is split 30 % for training. Its 45
training samples of up to 31 words each (a 0–30 time frame) need 1395
words, which fit. The 105 test samples (3255 words) must
be loaded in two parts or need `DEPTH = 4096`.

## 6. Where this RTL departs from, or goes beyond, the published design

- **Initial values.** These are not given. Thresholds reset to 0. Weights
  reset to a fixed hash in the range of one trace (0 .. 2^CNT_W − 1), which
  breaks the symmetry between neurons.
- **TRACE.** The value a hidden neuron is judged by under LAS is read from
  the synapse of the next layer that its own spikes feed.
- **LV.** LV is taken on the layer clock edge that first sees the neuron's
  spike. The published figure clocks it with the spike itself.
- **Accumulator.** It has one extra bit and saturates, so two close spikes
  do not overflow.
- **PASS2.** It is 6 instead of 3 (see section 2).
- **Output-trainer dead time.** After a label the output trainer is busy
  until its evaluation plus one clear clock: about 8 L2 clocks. A label that
  arrives in that time is ignored. Labelled samples must therefore be at
  least that far apart: 16 L1 clocks at RATIO_L2 = 2, 32 at RATIO_L2 = 4.
- **Measurement and host interface.** The accuracy counters, RAM write port,
  epoch control and monitoring outputs are additions for using and testing
  the design.
- **Accuracy not reproduced.** The published network reaches 100 % on the
  four patterns. This RTL, at its defaults and with the test pattern set
  (ν = 8 L1 clocks, 2ν pause between patterns), does not learn the task
  within 150 epochs. The end-to-end test reports 0 of 4 test patterns
  correct.

  All learning mechanisms operate. What goes wrong is the output layer's
  negative update, w −= η·(TS − w). Early in training a wrong output
  neuron often wins a label, and when the trace is larger than the weight
  (as it is for most weights here) this update lowers the weight by a
  quarter of the gap. A few such updates take every weight of that neuron
  to 0. Once all output weights are 0, the output layer never spikes again,
  so each label ends in a punishment of a threshold that is already 0.
  Runs with labels gating LAS, smaller ΔT or smaller threshold rates end the
  same way: every output weight at 0 after a few dozen labels. Starting the
  output thresholds high (`T_INIT2 = 4000`) gets further. The neurons then
  stay silent until punishments lower their thresholds. One output neuron
  learns its class: 58 of 600 labels are matched during training. The other
  three still lose their weights to negative updates.

  With LAS not gated, L1's thresholds are also pulled up by frequent LAS
  rewards, so L1 often stays silent on the labelled spike.

  The Iris configuration shows the same: the mechanisms work, but the
  network does not learn the synthetic set.

  The published description leaves open details that bear on this: initial
  weights and thresholds, exact label timing, and how weights are scaled
  against traces. Treat the learning dynamics as unverified against the
  published results. The datapath timing and each update rule are verified.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The expected values come
from models written in the testbench, not from the RTL.

| testbench | what it checks |
|-----------|----------------|
| tb_synchronizer | short pulses caught at the next edge, held until cleared |
| tb_leaky_accumulator | per-clock model; C → 0 in C clocks; sum of two spikes; saturation; o_clr timing; exponential decay |
| tb_synapse | two-clock load latency, re-arming, weight × trace |
| tb_neuron | threshold rule and LV against an 8-synapse model |
| tb_comparator | the published waveform values, then random argmax with ties |
| tb_spike_generator | one-clock spikes, held trigger, enable gating |
| tb_odesa_layer | IS_EVENT, spike at k+2, winner = largest potential, one spike per event, LV |
| tb_tw_register_bank | every update rule (shift/sign, fixed/adaptive) against an independent model |
| tb_hidden_trainer | GAS reward and punish timing, NO_WINNER, LAS reward and punish, training off |
| tb_output_trainer | match / no winner / wrong winner, evaluation delay, label clearing |
| tb_training_ram | two-clock write and read against a model |
| tb_event_source | replay order, epochs, done, GAS, external mode |
| tb_clock_divider | periods, duty cycle, edge alignment for ratios 1, 2 and 4 |
| tb_odesa_top | full-size run, described below |
| tb_odesa_iris | the Iris configuration, described below |

**tb_odesa_top** runs the whole default network with no parameter overrides.
It covers 150 training epochs of the four patterns, a test epoch and
external-input mode, and counts every mechanism: spikes in both layers, both
trainers' rewards and punishments, LAS updates, negative updates, epoch
wraps, and the switches between training and test and between RAM and
external input. It also checks the epoch length (576 L1 clocks) and the
output trainer's evaluation delay. It takes a few seconds.

**tb_odesa_iris** builds the top as the 4__6_3__3 network with the Iris
settings of section 5. It trains for 40 epochs on 45 synthetic
latency-coded samples (one spike per feature in a 0–30 frame, drawn around
a centre per class; the real data are not bundled), using 2025 of the 2048
RAM words. At every layer clock it checks each register-bank update
against the action applied:
- L1 weights move by exactly 1 towards TS;
- L1 thresholds move by 127;
- L2 weights move by at most 2;
- punishments follow the adaptive ΔT table;
- nothing changes without an action.

It also checks that L1 never receives LAS without a pending label, and that
the clock ratio is 4. On this synthetic set the accuracy after 40 epochs is
near zero; it is printed, not required.

Run any testbench with Verilator 5, for example:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_odesa_top \
        -y rtl -y tb +libext+.sv rtl/odesa_pkg.sv tb/tb_odesa_top.sv
    ./obj_dir/Vtb_odesa_top +verilator+rand+reset+2

## 8. Files

`rtl/`:
- `odesa_pkg.sv`: types and update functions;
- `synchronizer.sv`, `leaky_accumulator.sv`, `synapse.sv`, `neuron.sv`,
  `comparator.sv`, `spike_generator.sv`, `odesa_layer.sv`;
- `tw_register_bank.sv`, `hidden_trainer.sv`, `output_trainer.sv`;
- `training_ram.sv`, `event_source.sv`, `clock_divider.sv`;
- `odesa_top.sv`.

`tb/`: one testbench per module, named `tb_<module>.sv`.
