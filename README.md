# A recurrent layer of quantized context-dependent LIF neurons (qCLIF)

A context-dependent leaky integrate-and-fire (CLIF) neuron has two inputs of
different kinds. The *somatic* input carries the stimulus, for instance the
event stream of a dynamic vision sensor. The *apical* input carries context,
for instance "is this gesture an air guitar?". The apical compartment
integrates the context on its own. Its potential, rectified, then scales the
stimulus before the soma integrates it. Stimulus that arrives without context
barely moves the soma; stimulus that agrees with the context drives it to
fire. A recurrent layer of such neurons can decide whether an input stream
matches a given context with far fewer parameters than a plain spiking
network.

This repository holds synthesizable SystemVerilog for a digital, quantized
version of that neuron and for a recurrent layer built from it. The two
changes that make the neuron cheap in hardware are:

* the exponential leaks become **constant (linear) leaks**, and each
  potential is floored at zero so the leak cannot drive it negative;
* a synapse becomes a **bitwise AND** of the spike with its weight, so the
  input of a neuron is a plain sum of the weights whose spikes are set.

Everything runs at one network time step per clock cycle. The default
configuration is 200 neurons with 8-bit data and weights, 10 context inputs
and 200 stimulus inputs. That gives 200 x (200 + 200 + 10) = 82,000
synapses.

## The neuron, one cycle at a time

With all values as integers, one clock cycle of neuron `n` computes:

```
a'    = clamp(a - apical_leak + apical_in, 0, 2^(N-1)-1)        apical compartment
p     = a' * somatic_in                                        N x N multiplier
s     = clamp(v - somatic_leak + p, 0, 2^(2N-1)-1)             somatic compartment
spike = s > threshold                                          threshold comparator
v'    = spike ? 0 : s                                          reset to zero
```

`a` is the apical potential (N bits) and `v` the somatic potential (2N bits).
Both are held in registers. `apical_in` and `somatic_in` are the N-bit
weighted sums described in the next section. Since `a'` is never negative it
equals ReLU of the apical potential, so context gates the stimulus.

The neuron is split into the same blocks as its datapath diagram:

| module | block | what it does |
|---|---|---|
| `apical_compartment` | leakage subtractor (LS), apical accumulator (AA), N-bit register | `a'`. The floor at zero is a sign-bit check. `a'` goes to the multiplier in the same cycle and is stored. |
| `multiplication_unit` | N x N array multiplier (MU) | `p`, 2N bits, signed. Rows of AND-gated partial products are added one after another; the row of the sign bit is subtracted. |
| `somatic_compartment` | somatic leakage subtractor (SLS), somatic accumulator (SA), 2N-bit register | `s` and `v'`. The comparator's spike loads the register with zero. |
| `threshold_comparator` | threshold comparator (TC) | strict `s > threshold`, unsigned |
| `qclif_neuron` | the four blocks above, wired together | |

The path from the registers through LS, AA, MU, SLS, SA and TC back to the
somatic register is combinational and takes one cycle. Its critical path is
the N x N multiply between two adders.

Both compartments are computed two bits wider than their registers. Results
above the largest positive value saturate instead of wrapping. Leaks and
thresholds are unsigned.

## Spike weighting modules

The spike weighting module (`spike_weighting_module`, SWM) computes the
inputs of every neuron. It takes K spikes shared by all neurons and one
M-bit signed weight per neuron and spike. For each neuron it:

1. ANDs each weight with its spike (`weight & {M{spike}}`);
2. sums the K gated weights in a tree of 3:1 adders (`csa_adder_tree`);
   * each node compresses three operands to a sum/carry pair with a
     carry-save (3:2) stage, then adds the pair;
   * each level is registered, so the tree has `clog3(K)` pipeline stages
     and accepts a new spike vector every cycle;
3. saturates the full-precision sum to the N-bit signed input range of the
   neuron.

The sum can need many more bits than N. With 410 inputs and 8-bit weights it
can reach about 52,000. The neuron still takes N-bit inputs. The reasoning
is that activity is sparse (a few percent of inputs spike in a time step),
so typical sums are small. The saturation keeps rare large sums at the
nearest representable value instead of wrapping them to the wrong sign.

The layer uses two SWMs:

* the **somatic/recurrent SWM** takes the NUM_SOM stimulus spikes followed
  by the layer's own NEURONS spikes from the previous cycle (K = 400 by
  default, 6 stages);
* the **apical SWM** takes the NUM_CTX context spikes (K = 10, 3 stages).

## Timing of the layer (`qclif_layer`)

This is the part most easily misread. Let `L = clog3(NUM_SOM + NEURONS)`,
which is 6 at the default sizes.

* The stimulus and context spikes presented in cycle `t` are summed by the
  pipelined SWMs. Their sums reach the neurons in cycle `t + L`. The apical
  SWM is shorter, so it is padded with `L - clog3(NUM_CTX)` registers; both
  sums of one time step therefore arrive together.
* In cycle `t + L` each neuron computes `a'`, `s` and `spike` from those
  sums. The potentials are stored at the clock edge that ends the cycle.
* The spike vector is registered at the same edge and appears on
  `out_spikes` during cycle `t + L + 1`. In that cycle it is also the
  recurrent part of the somatic/recurrent SWM's input.
* The recurrent contribution of a spike from cycle `t + L` therefore reaches
  the neurons in cycle `t + 2L + 1`. In network terms, recurrence acts with a
  delay of `L + 1` time steps, not one.

The pipeline gives one time step per clock at a short clock period. The cost
is that the recurrent delay is `L + 1` steps. A network trained for a
one-step recurrent delay has to be retrained for it, or the inputs have to be
held for `L + 1` cycles per time step. The latter gives one-step recurrence
at 1/(L+1) of the throughput.

Reset (`rst`, synchronous, active high) clears every potential, every SWM
pipeline register and the spike register. The first sums after reset are
zero for `L` cycles.

### Ports of `qclif_layer`

| port | dir | size | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock, synchronous reset |
| `in_spikes` | in | `[NUM_SOM]` | stimulus spikes of this time step |
| `ctx_spikes` | in | `[NUM_CTX]` | context spikes of this time step |
| `w_som` | in | `[NEURONS][NUM_SOM]` x M signed | stimulus weights |
| `w_rec` | in | `[NEURONS][NEURONS]` x M signed | `w_rec[n][j]`: weight from neuron j to neuron n (self included) |
| `w_ctx` | in | `[NEURONS][NUM_CTX]` x M signed | context (apical) weights |
| `ap_leak` | in | `[NEURONS]` x N | apical leak per neuron |
| `som_leak` | in | `[NEURONS]` x 2N | somatic leak per neuron |
| `threshold` | in | `[NEURONS]` x 2N | firing threshold per neuron |
| `out_spikes` | out | `[NEURONS]` | registered spikes |
| `v_ap`, `v_som` | out | `[NEURONS]` x N, 2N | potentials, for observation |

Weights, leaks and thresholds are ports and must be held stable by the
surrounding system. This design does not store them.

### Parameters

| parameter | default | meaning |
|---|---|---|
| `NEURONS` | 200 | neurons in the layer |
| `NUM_SOM` | 200 | stimulus inputs |
| `NUM_CTX` | 10 | context inputs (one per class of a 10-class task) |
| `N` | 8 | neuron data width: inputs and apical potential N, somatic potential, leak and threshold 2N |
| `M` | 8 | weight width |

The defaults live in `qclif_pkg`, which also provides `clog3()`. The
reference operating point is 100 MHz. Typical leaks are 7 (apical) and
either 200 or 7 (somatic); at 8 bits these approximate decay time constants
of about 20 and 200 steps.

## Number formats

All arithmetic is integer two's complement. A weight is a fixed-point code,
and the hardware adds the codes without tracking a binary point. A trained
network's scale factors (for example stimulus weights spread over ±0.5 and
context weights over ±2, each mapped onto the full M-bit range) must be
folded into the thresholds and leaks when the network is mapped. Every
sub-sum that leaves a block is saturated, never wrapped.

## Where this RTL follows its source and where it decides alone

Taken from the published design:

* the two-compartment equations with linear leaks and floors at zero;
* reset of the soma to zero on a spike;
* AND-gated synapses and carry-save adders in a log3-deep pipeline;
* the split into LS/AA/register, N x N multiplier, SLS/SA/register and
  comparator;
* the widths: N-bit inputs, apical potential and apical leak; 2N-bit
  product, somatic potential, somatic leak and threshold; M-bit weights;
* the separate apical and somatic/recurrent weighting modules;
* 200 neurons, 10 context inputs and 8-bit precision.

This design's own choices:

* **Stimulus inputs: 200.** The source reports 82K synapses for the
  200-neuron layer, which is exactly 200 x (200 + 200 + 10). The dataset
  used with the same network has 512 input channels, which would give
  144,400 synapses. The RTL follows the synapse count. `NUM_SOM = 512`
  builds the larger version without other changes.
* Saturation to N bits at the SWM output, and saturation at the top of both
  potentials.
* Signed weights and signed multiplier operands; unsigned leaks and thresholds.
* A register after every adder-tree level, and the alignment registers on
  the apical path.
* The registered spike output. The recurrent delay of `L + 1` cycles follows
  from this register together with the SWM pipeline.
* Synchronous reset of all state.
* Weights, leaks and thresholds as ports.

Not included: storage and loading of the weights, which the source does not
describe, and anything physical (the standard-cell layout, clocking, power
and area figures).

## Configurations and what fits

* **Single neuron:** `qclif_neuron` on its own.
* **10-neuron layer with 250 synapses:** read here as 10 x (5 stimulus + 10
  recurrent + 10 context). It is the parameter set `NEURONS=10, NUM_SOM=5,
  NUM_CTX=10`, and it also fits in the default layer.
* **200-neuron layer with 82K synapses, 8-bit:** the defaults.
* **200-neuron layer with 82K synapses, 4-bit:** `N=4, M=4`. The 8-bit
  default also carries 4-bit weights unchanged.
* **The 512-channel gesture stream:** needs `NUM_SOM = 512`. It does not fit
  the default 200 stimulus inputs.

No trained weights come with this design, so the testbenches use random
weights.

## Verification

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. Each has a
watchdog that counts a failure if the run hangs.

| testbench | what it checks |
|---|---|
| `tb_threshold_comparator` | corners and random pairs against `>` |
| `tb_multiplication_unit` | all 65,536 8-bit operand pairs against integer multiplication |
| `tb_apical_compartment` | 3,000 random cycles against the clamped update; the zero floor and the saturation must both occur |
| `tb_somatic_compartment` | random products, leaks and spikes; the floor, the saturation and the reset on spike must all occur |
| `tb_qclif_neuron` | 6,000 cycles of the full neuron equations with context present and absent; spikes, gating and both floors must occur |
| `tb_spike_weighting_module` | 3 lanes, 14 inputs, 2 alignment registers; every output against the saturated sum from 5 cycles earlier; an impulse measures the latency (5 cycles); both saturations must occur |
| `tb_qclif_layer` | the 10-neuron, 250-synapse layer for 3,000 cycles against a cycle model of the whole layer (see below) |
| `tb_qclif_layer_4bit` | the 200-neuron 4-bit layer, 600 cycles, same model |
| `tb_qclif_layer_full` | the layer at its default sizes (82,000 synapses), 600 cycles, same model |

The layer testbenches compare every neuron's potentials and spike in every
cycle with an independent model. The model forms plain sums of the active
weights, saturates them, delays them by `L` cycles and applies the neuron
equations. A reset is applied mid-run. Each testbench counts these
mechanisms and fails if one never happens:

* spikes with reset to zero;
* recurrent spikes fed back;
* positive and negative SWM saturation;
* the zero floor of both compartments;
* context gating, that is, somatic input arriving while the apical
  potential is zero;
* the reset.

To simulate one of them with Verilator 5 (the package must come first):

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/qclif_pkg.sv rtl/csa_adder_tree.sv rtl/spike_weighting_module.sv \
    rtl/apical_compartment.sv rtl/multiplication_unit.sv rtl/somatic_compartment.sv \
    rtl/threshold_comparator.sv rtl/qclif_neuron.sv rtl/qclif_layer.sv \
    tb/tb_qclif_layer.sv --top-module tb_qclif_layer
./obj_dir/Vtb_qclif_layer
```

The full-size build takes about three minutes of C++ compilation and runs in
seconds.

`tb_qclif_layer_full.sv` and `tb_qclif_layer_4bit.sv` share their body with
`tb_qclif_layer.sv` and differ only in their size constants. When the checks
change, change all three.
