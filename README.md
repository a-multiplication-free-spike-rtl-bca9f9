# Spike-time trained SNN: a multiplier-free on-chip learning engine

This is synthesizable SystemVerilog for a small spiking neural network that both
classifies and *trains itself* on chip. It classifies 8x8 digit images with a
64-20-20-10 network. Training needs no floating point and no gradient memory.
It uses one small multiplication per neuron and weight update (delta times learning
rate); everything else is additions, comparisons and shifts.

The idea behind it is simple. Every neuron fires at most once per sample, so a neuron's
whole output is a 4-bit time. The forward pass needs no multiplier: at each time step a
neuron adds the weights of the inputs that spike at that step. The backward pass does the
same thing in reverse. The output error becomes a *signed backward spike* whose
timing encodes the gradient's size: earlier means larger. Hidden neurons are IF neurons
again. They add and subtract the weights of the backward spikes they receive and fire
a signed spike of their own when the sum crosses a threshold. Where a backpropagation
engine would multiply a delta by a weight, this design adds or subtracts a weight.

The design follows the architecture of Mirsadeghi, Mirbagheri and Kheradpisheh,
"A Multiplication-Free Spike-Time Learning Algorithm and its Efficient FPGA
Implementation for On-Chip SNN Training". The block structure, word formats and
sizes come from that description. The publication leaves the sequencing, the
host interface and several arithmetic details open; this implementation fills them in.
The section *Where this implementation fills gaps* lists every such choice.

## Numbers and encodings

| quantity | format | notes |
|---|---|---|
| spike time | 4 bits, 0..15 | 15 = "never fired" (virtual spike); time steps 0..14 are simulated |
| input | 4-bit pixel p, latency-coded off chip as t = 15 - p | a dark pixel (p = 0) never spikes |
| weight | 12-bit two's complement Q5.7 | four per 48-bit memory word, lane m = bits 12m+11:12m |
| spike-time word | 16 bits | four 4-bit times, lane m = bits 4m+3:4m |
| delta | 10-bit Q1.9 | saturated to +-511 |
| learning rate | 10-bit unsigned, read as Q0.10 | |
| backward spike | 5 bits: sign + 4-bit time | `bspike_t` in `snn_pkg`; time 15 = no spike |

Lane m of word a is always input (or neuron) 4a+m. A layer with N inputs therefore stores
ceil(N/4) words per neuron: 16 for the first hidden layer, 5 for the others.

## Forward pass: one weight word per clock

Every neuron owns a weight BRAM (`weight_bram`). All BRAMs of a layer share one read
address. In one clock the layer reads word a of every neuron, and the shared
`spike_splitter` splits the matching 16-bit presynaptic spike-time word. The splitter
marks the lanes whose time equals the current step. Each `if_neuron` then passes
the weights of the marked lanes through its `weight_select`, sums them in a 4-input
`adder_tree` and adds the sum to its membrane potential V. No leak is applied. After the last word of the step,
the `threshold_comparator` fires the neuron if V >= theta. A neuron fires only once per
sample, and the `spike_time_store` records the step at which it fired.

The controller sweeps the layers in order within each time step:

```
for t in 0..14:
    hidden 1: words 0..15   (16 clocks)
    hidden 2: words 0..4    ( 5 clocks)
    output:   words 0..4    ( 5 clocks)
```

A spike therefore reaches the next layer in the same time step, which is what the
per-step equations ask for. The forward pass takes 15 x 26 = 390 clocks plus one clock to drain the pipeline.

**The two-stage pipeline** is the detail that makes this work without bubbles.
In the *issue* clock the controller presents `op`, `addr`, `now` and `step_end` to a
layer, and the BRAM read starts. In the *data* clock that follows, the words are valid and
the layer takes its presynaptic word `pre_word` (from the input memory, or
from the previous layer's spike times indexed by `addr_q`). The previous layer's last
data clock coincides with the next layer's first issue clock. Because the next layer
samples `pre_word` only in its data clock, it already sees the spikes fired in that last
clock.

The `decision_maker` picks the class: the output neuron with the earliest spike (lowest
index on a tie). If no output neuron fired, it picks the one with the highest membrane potential.

## From output error to backward spikes

`delta_calculator` forms target times from the label, the earliest output time
t_min and a margin gamma:

* label neuron: T = t_min - gamma
* other neurons that fired before t_min + gamma: T = t_min + gamma
* all other neurons keep their own time as target.
* If no output fired at all: T = 15 - gamma for the label, 15 for the rest.

The delta is `(t - T) / 15` in Q1.9, which is minus the normalised time error. The
division is by a constant, and the result saturates. A positive delta means "fire earlier",
so adding lr x delta to the neuron's weights is the right direction.

`spike_grad_gen` normalises the deltas by their total magnitude S = sum |delta| and
turns each one into a backward spike: d = round(15 |delta| / S), tau = 15 - d,
with the sign of delta. A large delta gives an early spike, and d = 0 gives no spike.
It uses no divider. d is the number of k in 1..15 with 30|delta| >= (2k-1) S. Here
30|delta| is a shift and a subtract, and (2k-1)S are constant multiples of S. The
comparison yields the rounded quotient, with halves rounding up.

## Backpropagation through hidden layers (`bp_unit`)

This is the least obvious part of the design. A hidden neuron i has a *backward
potential* Delta_i. At each backward step tau = 0..14:

```
Delta_i += sum over upstream k with a backward spike at tau:
               (+W_ki for a positive spike, -W_ki for a negative one)
               but only if t_i < t_k          (forward times: i fired before k)
fire once:  Delta_i >  theta_b  -> +1 spike at tau
            Delta_i < -theta_b  -> -1 spike at tau
```

A neuron's backward spike time then defines its delta for its own weight update:
delta_i = sign x (15 - tau) / 16, which is a left shift by 5 in Q1.9. A neuron that never
fires backward has delta 0.

**Where the weights come from.** W_ki is the weight from hidden neuron i to upstream
neuron k. It sits in upstream neuron k's own forward BRAM, at word i/4, lane i%4. No
transposed copy exists. During a backward step the controller reads word a of *all* K
upstream BRAMs in one clock, which gives every weight that hidden neurons 4a..4a+3
need. For each upstream neuron, a `weight_select` gates and signs its four lanes. For each of
the four hidden neurons, a K-input `adder_tree` sums the K terms. Each hidden neuron
has its own comparator. A backward step therefore takes ceil(N/4) = 5 clocks for a
20-neuron layer, and a full backward pass takes 75 clocks. The backward datapath uses
the same leaf modules as the forward one (weight selection, adder trees, threshold
comparator, digital timer), and it reads the same BRAMs.

## Weight updates (`weight_updater`)

One word per clock and per neuron: each of the four weights changes by

```
dW = (delta x lr) >>> 12        (Q1.9 x Q0.10 -> Q5.7 LSBs), saturating at the 12-bit limits
```

The weight changes only if its presynaptic spike came strictly before the neuron's own spike.
Silent neurons count as spiking at 15, and dark inputs never precede anything.
The layer reads word a and writes the updated word back one clock later, through the
BRAM's second port. All neurons of a layer update in parallel. The same unit serves the
output layer and both hidden layers.

## One training step, clock by clock

| phase | clocks (defaults) | what happens |
|---|---|---|
| forward | 15 x (16+5+5) = 390, + 1 drain | all three layers, as above |
| decide | 1 | class latched; an inference run ends here |
| delta, spikes | 2 | output deltas, then output backward spikes, latched |
| output update | 5 | output weights updated |
| backprop to hidden 2 | 1 + 75 | clear, then 15 steps x 5 words of output-layer BRAMs |
| hidden-2 update | 5 | |
| backprop to hidden 1 | 1 + 75 | 15 steps x 5 words of hidden-2 BRAMs |
| hidden-1 update | 16 | |
| finish | 1 | `done` pulse |

From the clock that samples `start` to `done` takes 393 clocks for an inference run and
573 for a training run. The output weights are updated *before* the error is propagated
through them, and hidden layer 2 likewise before hidden layer 1. The publication does
not state the order; its block diagram of the backward pass connects the output weight
updater to the hidden updater, which this design reads as "update first". Textbook
backpropagation would use the old weights; that variant would only reorder the phases
in `snn_controller`, but it is not built or tested here.

## Host interface (`snn_top`)

| signals | use |
|---|---|
| `in_we, in_addr, in_data` | write input spike word `in_addr` (inputs 4a..4a+3) |
| `ld_we, ld_layer, ld_sel, ld_addr, ld_data` | write weight word `ld_addr` of neuron `ld_sel` in layer `ld_layer` (0 = hidden 1, 1 = hidden 2, 2 = output) |
| `rb_en, rb_layer, rb_sel, rb_addr` -> `rb_data` | read a weight word; the data arrives one clock later |
| `start, train, label` | run one sample; `busy` stays high until the one-clock `done` |
| `theta_h1, theta_h2, theta_o, theta_b, gamma, lr` | run-time constants; hold them stable while `busy` |
| `cls, any_fired, out_t, h1_t, h2_t, bsp_o` | decision, forward spike times, output backward spikes |

Loading and readback are allowed only while `busy` is low, and assertions in `snn_top` check this.
Reset is asynchronous and active low. It clears the state, but not the memories.

## Module map

| module | role |
|---|---|
| `snn_pkg` | widths, `bspike_t`, `layer_op_e`, saturating add |
| `digital_timer` | shared 4-bit step counter |
| `input_spike_mem` | memory-mapped input sample, 16 x 16 bits |
| `weight_bram` | per-neuron 48-bit weight memory, 1 read + 1 write port |
| `spike_splitter` | 16-bit word -> four times + "spikes now" flags |
| `weight_select` | weight splitter and selection: +w, -w or 0 per lane |
| `adder_tree` | signed N-input sum (4 in neurons, K in `bp_unit`) |
| `threshold_comparator` | fire-once decision, unipolar (forward) or bipolar (backward) |
| `if_neuron` | forward IF neuron datapath |
| `spike_time_store` | forward spike times kept for the backward pass |
| `weight_updater` | gated, saturating lr x delta update of one word per neuron |
| `fc_layer` | N parallel neurons + BRAMs + splitter + store + updater |
| `output_layer` | `fc_layer` + `decision_maker` |
| `delta_calculator`, `spike_grad_gen` | output error -> signed backward spikes |
| `bp_unit` | backward IF neurons of one hidden layer |
| `snn_controller` | phase sequencer (forward, decide, update, backprop) |
| `snn_top` | everything wired as a 64-20-20-10 trainer |

## Where this implementation fills gaps or departs

* **Backprop gate.** The backprop equation for hidden layers writes the gate with backward
  times (tau_i < tau_k). The delta equation and the hardware description use forward
  times ("presynaptic spike precedes postsynaptic"). This design uses forward times,
  with a strict t_i < t_k. The surrogate-derivative remark in the publication allows
  equality (t_i <= t_k); the strict form matches the delta equation and the update gate.
* **Hidden delta.** The publication says only that the "normalized backward potential"
  serves as the hidden delta. This design uses sign x (15 - tau)/16, so the backward
  spike time carries the magnitude.
* **Normalisation.** The publication normalises by a sum of deltas. This design uses the sum of magnitudes,
  because a signed sum can be zero.
* **Scale of the output delta.** The extra 1/t_max factor of the output delta equation
  is left to the learning rate. The learning rate is Q0.10, and the shift of 12 is this design's choice.
* **Weight format.** The publication states Q5.7 twice and Q4.8 once, for the output
  updater. Q5.7 is used everywhere.
* **Backward parallelism.** The publication speaks of each neuron processing "4 spikes with 4
  weights" per clock and of "3-5 clocks per layer". Doing that would need a transposed copy of
  every weight matrix, which is not described. This design instead reads the layer above's BRAMs
  column-wise, four hidden neurons per clock, which gives 5 clocks per backward step.
* **Adder trees.** The same *modules* serve both passes, but they are not the same *instances*.
  The publication's "semi-shared" design may share more physical hardware.
* **Spike-time storage.** The publication keeps spike times in per-neuron BRAMs. Here they are
  registers, because all neurons of a layer can fire in the same clock.
* **Time window.** Steps 0..14 are simulated, and 15 is the virtual spike. This matches the
  published throughput figure (0.452 M samples/s at 142.45 MHz is 315 = 15 x 21 clocks
  for a 64-20-10 network).
* **Timer.** The publication's 4-bit counter steps "in single clock cycle steps". Here one
  time step lasts a whole sweep of the three layers (26 clocks), because a layer needs
  16 or 5 clocks to see all its inputs. The timer advances at the end of each sweep.
  In the backward pass it advances every 5 clocks. One timer is shared by both passes.
* **Thresholds, gamma, learning rate.** These are run-time inputs. The publication gives no values.
* **Not included.** The latency encoding of pixels is done off chip, as in the publication.
  The two-layer 64-20-10 configuration used there for the throughput comparison is
  covered for inference only. `fc_layer` and `output_layer` at their default parameters
  are exactly its two layers, and `tb_fwd_64_20_10` runs them on the 21-clock step
  (315 clocks per sample). Training it would need a top with one hidden layer. The MNIST and Fashion-MNIST networks (784 inputs, up to
  836,400 synapses) were software-only results in the publication and are far beyond
  these 1,880 synapses. The layer modules are parameterised, though.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against values
computed independently in the testbench and prints `TB_RESULT checks=N failures=M`.
`tb_snn_top` runs the complete design at its default size. It contains an integer
model of the whole algorithm, written from the equations. It runs 60 random samples,
mixing training and inference, blank images and thresholds that no output
reaches. For every sample it compares the class, all 50 forward spike times, the output
backward spikes and the exact cycle count. It also compares every weight word, read back
through the host port, with the model after training. It counts how often each mechanism
occurred (forward spikes, virtual spikes, decision by potential, the all-silent target rule,
positive and negative backward spikes in the output and hidden layers, gated and applied
updates, both modes) and fails if one never did.

`tb_fwd_64_20_10` joins the layer blocks into the two-layer 64-20-10 network
and drives the 16 + 5 clock schedule itself. For 40 random samples it checks every spike time, the
class and the clock count. It also checks that an output neuron can fire in the same step as the
hidden spikes that push it over threshold.

To run a testbench with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/snn_pkg.sv tb/tb_snn_top.sv --top-module tb_snn_top
./obj_dir/Vtb_snn_top
```

Replace `tb_snn_top` with any other testbench name. All parameters default to the
64-20-20-10 network, and the full-size test runs in well under a second. Some testbenches
leave integer-to-bit conversions implicit. Verilator reports these as width warnings,
and `-Wno-fatal` keeps them from stopping the build.
