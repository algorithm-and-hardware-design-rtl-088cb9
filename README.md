# An event-driven processor for discrete-time spiking perceptrons

This is synthesizable SystemVerilog for a small inference processor. It runs a
multilayer perceptron whose neurons emit binary spikes in discrete time steps.
Because the neurons are binary, a layer never multiplies. It adds the weight
row of every presynaptic neuron that spiked. Neurons that stay silent cost
nothing, so the work done tracks the number of spikes, not the size of the
network.

The network is trained offline with ordinary back-propagation. Training
replaces the zero gradient of the step function with a straight-through
estimate (slope 0.5 between 0 and 2 theta). The hardware only runs inference
and never sees training. It ships in two configurations of the same
architecture:

| configuration | inputs | hidden | outputs | neuron model | typical input |
|---|---|---|---|---|---|
| MNIST (the RTL default) | 784 | 256, 256 | 10 | SNN-DC, discontinuous | Bernoulli (rate-coded) pixels |
| N-MNIST | 1156 | 256, 256 | 12 (10 digits + 2 motion directions) | SNN-CT, continuous | event-camera spikes in 16 time bins |

## The neuron models

Take a neuron k in a layer. Its inputs are the spikes `a_i(t)` of the layer
before, its weights are `w_{i,k}`, its bias is `b_k` and theta is its
threshold.

* **SNN-DC (discontinuous integration).** The potential starts again at
  every time step: `v_k(t) = b_k + sum_i a_i(t) w_{i,k}`. The neuron spikes
  when `v_k(t) > theta`. Time steps are independent, so this model suits
  rate-coded inputs, and even one time step gives a usable answer.
* **SNN-CT (continuous integration).** The potential carries over:
  `v_k(t-) = v_k(t-1) + b_k + sum_i a_i(t) w_{i,k}`. The spike is
  `v_k(t-) > theta`, and a spike takes theta off the potential:
  `v_k(t) = v_k(t-) - theta`. The potential is zero before the first step of
  a sample. This model can pick up temporal structure, for example the
  direction in which an N-MNIST digit moves.

In `neuron_array.sv` both models are the same three operations, selected by
the `MODE` parameter:

| operation | SNN-DC | SNN-CT |
|---|---|---|
| `start` | `v = b` | `v = b` on the first step of a sample, else `v = v + b` |
| `acc` (one per input spike) | `v = v + w` | `v = v + w` |
| `fire` | `s = (v > theta)` | `s = (v > theta)`, and `v = v - theta` if `s` |

**Number formats (chosen for this RTL).** Weights and biases are 7-bit two's
complement. The 7-bit precision is the one the design study selected. This
RTL reads those bits as Q1.6, so the trained threshold theta = 1.0 is
`THETA = 64` LSBs. Potentials are 16-bit signed, and every addition saturates.
Saturation makes the result depend on the order of additions. The order is
fixed: bias first, then the inputs in ascending index order. The reference
model in the testbenches follows the same order. If your quantiser uses a
different scale, change `THETA`.

## Architecture

```
 in_spikes ─► [spike scheduler] ─ANI─► [weight memory 1] ─N_IN rows of 256×7 b─► [hidden layer 1: 256 neurons] ─firing vector─►
           ─► [spike scheduler] ─ANI─► [weight memory 2] ─256 rows of 256×7 b─► [hidden layer 2: 256 neurons] ─firing vector─►
           ─► [spike scheduler] ─ANI─► [weight memory 3] ─256 rows of N_OUT×7 b─► [output layer: N_OUT neurons] ─► out_spikes
                        all three columns sequenced by the pipeline & time-step controller
```

Each column is one `snn_layer` (a scheduler, a memory and a neuron array). One
`pipeline_ctrl` sequences all three.

* **Spike scheduler** (`spike_scheduler.sv`). It holds the incoming firing
  vector. A priority encoder gives the lowest pending index (the *active
  neuron index*, ANI) each cycle and clears that bit. K spikes take K cycles,
  whatever the vector's width: 784, 1156 or 256 bits here.
* **Weight memory** (`weight_memory.sv`). There is one row per presynaptic
  neuron. A row holds that neuron's 7-bit weights to *all* neurons of the
  layer, so each spike needs exactly one read. Reads are synchronous, with
  data one cycle later. In silicon each memory is a compiler-generated SRAM.
  With rows of 256 × 7 = 1792 bits and depths rounded up to the next multiple
  of 256 (784 → 1024, 1156 → 1280), the three macros total 289 kB for MNIST and
  346.75 kB for N-MNIST (288,960 and 346,752 bytes). The RTL array holds exactly `N_IN` rows.
* **Neuron array** (`neuron_array.sv`). All neurons of a layer work in
  parallel, with their potentials and biases in registers. A weight word
  updates every potential in one cycle.
* **Pipeline & time-step controller** (`pipeline_ctrl.sv`), described next.

## Pipelining and the done / data_fetched handshake

Layers run on successive time steps at once: while layer 2 integrates step
t, layer 1 may already work on step t+1. The number of spikes varies per layer
and per step, so a fixed schedule would waste cycles. Instead, neighbouring
layers use two signals:

* `done[l]`: layer l has a firing vector ready. The vector stays in the
  neurons' spike register.
* `data_fetched`: layer l+1 has copied that vector into its scheduler. In
  the RTL this is layer l+1's `load`.

**A layer starts a time step when the layer before it is done and its own
last vector has been fetched.** The fetch may happen in the same cycle, so no
bubble is lost. The layer then:

1. **load** (1 cycle): the scheduler copies the vector, the neurons apply
   `start`, and `data_fetched` goes back to the layer before.
2. **integrate** (K cycles): one ANI is popped per cycle and its row is read.
   The row is added one cycle later (`acc_en` is the registered pop).
3. **check** (1 cycle): the scheduler is empty. The last row is being added.
4. **fire** (1 cycle): spikes are computed, and `done` is set on the next
   edge.

So a layer step with K input spikes takes **K + 3 cycles** from load to done.
Every testbench that runs whole layers checks this count. The steady-state
time per step is that of the slowest layer, usually the input layer.

The first layer treats the host's `in_valid` as its "done". The host's
`out_ready` acts as the output layer's "data_fetched".

**Time steps and samples.** The host sets `num_steps` (1–511) and then
supplies one input vector per time step. The controller counts the steps and
tags each vector with *first* and *last*. The tag travels down the pipeline
with the data. This is how a layer in SNN-CT mode knows when to drop its
carried potential, even while other layers still work on the previous sample.
The output carries `out_step` (the step index) and `out_last`. Change
`num_steps` only while `busy` is low.

Spike counting or an arg-max over the output spikes is left to the host. The
design presents the output layer's spikes for every step.

## Interface of `snn_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset (clears potentials, biases, state) |
| `num_steps` | in | 9 | time steps per sample |
| `in_spikes`, `in_valid`, `in_ready` | in/in/out | N_IN, 1, 1 | one input vector per step; hold it until `in_ready` (a cycle with `in_valid && in_ready` transfers it) |
| `out_spikes`, `out_valid`, `out_ready` | out/out/in | N_OUT, 1, 1 | output spikes of one step, held until `out_ready` |
| `out_step`, `out_last` | out | 9, 1 | step index in the sample, last-step flag |
| `wr_en`, `wr_layer`, `wr_bias`, `wr_addr`, `wr_data` | in | 1, 2, 1, clog2(N_IN), N_HID·7 | loading: writes row `wr_addr` of layer `wr_layer` (0..2); with `wr_bias` it writes that layer's biases. Neuron k sits at bits 7k+6..7k. The output layer uses the low N_OUT·7 bits |
| `busy` | out | 1 | any layer active or holding an unfetched vector |

Parameters: `N_IN` (784), `N_HID` (256), `N_OUT` (10), `MODE`
(`NEURON_DC` / `NEURON_CT`), `THETA` (64), `STEP_W` (9). For the N-MNIST
configuration, use `#(.N_IN(1156), .N_OUT(12), .MODE(snn_pkg::NEURON_CT))`.

## Files

| file | contents |
|---|---|
| `rtl/snn_pkg.sv` | widths, theta, neuron-mode and controller-state enums, step tag struct, saturating add |
| `rtl/spike_scheduler.sv` | priority-encoder spike scheduler |
| `rtl/weight_memory.sv` | weight SRAM model (array) |
| `rtl/neuron_array.sv` | parallel SNN-DC / SNN-CT neurons |
| `rtl/snn_layer.sv` | one layer column: scheduler + memory + neurons |
| `rtl/pipeline_ctrl.sv` | pipeline & time-step controller |
| `rtl/snn_top.sv` | the processor |
| `tb/tb_*.sv` | self-checking testbenches (below) |
| `tb/snn_ref_pkg.sv` | bit-exact reference model of the network |
| `tb/snn_e2e_env.sv` | stimulus/checking environment shared by the system tests |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself on a
watchdog.

* `tb_spike_scheduler`: random vectors of 0–80 % density. It checks the
  ascending, exactly-once index order, K pops for K spikes, and reload
  while busy.
* `tb_weight_memory`: random rows, one-cycle read latency, and that the read
  data holds.
* `tb_neuron_array`: DC and CT arrays against an integer model of the
  equations. It covers the first-step restart, the strict `>` (v = theta does
  not fire, theta + 1 does) and saturation at both ends.
* `tb_pipeline_ctrl`: the controller against behavioural layer stand-ins
  under random output back-pressure. It checks the handshake rules, K + 3
  cycles, the first tags, and the step index and last flag of every output.
* `tb_snn_top`: the whole processor at 40-16-16-6, in DC and CT mode, with 25
  random samples each. Every output spike is checked against `snn_ref_pkg`,
  along with the pops per layer step (equal to the active inputs) and the
  cycles per layer step. The test fails unless each of these occurred: empty
  steps, overlapping layers, a layer waiting for data_fetched, output
  back-pressure, carried potentials and theta subtraction (CT).
* `tb_snn_full`: the default (MNIST) processor, unmodified. It runs one
  1-step sample and one 16-step sample with about 13 % input density (the mean
  MNIST pixel intensity).
* `tb_snn_nmnist`: the N-MNIST configuration. It runs two 16-step samples with
  about 5 % input activity (the activity reported for this workload).

Weights in these tests are random, not trained. The hidden layers therefore
spike more than a trained network would, and the printed latencies are higher
than a trained network's. The design study reports 112 cycles for one MNIST
step, 1780 for 16 steps and 654 for 16 N-MNIST steps. The 16-step MNIST figure
works out at about 111 cycles per step. That fits a pipeline limited by the
input layer: about 100 active pixels plus the 3-cycle overhead.

To run a test with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/snn_pkg.sv tb/snn_ref_pkg.sv tb/tb_snn_top.sv --top-module tb_snn_top
./obj_dir/Vtb_snn_top
```

(`tb_spike_scheduler`, `tb_weight_memory`, `tb_neuron_array` and
`tb_pipeline_ctrl` do not need `snn_ref_pkg.sv`.)

## What follows the design study and what is this RTL's own

Taken from the design study:
* the network sizes;
* the two neuron models, with their strict threshold comparison and
  theta-subtraction;
* 7-bit weights;
* one SRAM row per presynaptic neuron, serving all parallel postsynaptic
  neurons;
* priority-encoder schedulers producing one active index per cycle;
* potentials kept in registers;
* three pipelined layers under one controller, with the done / data_fetched
  start rule.

Chosen here, because the study does not specify them:
* Q1.6 weights and `THETA = 64`;
* 16-bit saturating potentials;
* biases in per-neuron registers, loaded through the weight port. The quoted
  memory sizes leave no spare SRAM row for them in the 256-row memories;
* lowest-index-first scheduling;
* the one-cycle SRAM read and the K + 3 cycle layer sequence;
* the first/last tags and the host handshakes;
* the loading port.

Not in this RTL:
* **Clock gating.** The original uses extensive clock gating, which a
  synthesis flow inserts from library cells. Here every register changes only
  under a load, pop or fire enable, which is where such gating applies.
* **SRAM macros.** The memories are plain arrays, to be replaced by the
  compiler macros of the target process.
* **Classification from spike counts.** This is left to the host.
* **The convolutional and 1024-neuron networks** of the algorithm study. They
  were only evaluated in software.

The lint tool reports that `rst_n` is used both as an asynchronous reset and
synchronously. The synchronous use is only the `disable iff` of the
assertions, and it has no hardware effect.
