# sBSNN: a binary spiking network that learns with stochastic bits

A spiking network normally needs multi-bit synapses and a random number generator
per neuron. The design here needs neither. Every source of randomness is one
*stochastic bit*: a small cross-coupled inverter pair that, each time it is
enabled, falls to one side or the other with a probability set by a 6-bit
digital code. With one such bit per neuron and one per synapse, a two-layer
network with **binary** (1-bit SRAM) weights learns on chip. The learning rule is
stochastic spike-timing-dependent plasticity (sSTDP). When a pre-synaptic spike
comes shortly before a post-synaptic one, the weight is *set* with a probability
that falls with the delay. In the opposite order, the weight is *cleared* with a
probability that falls the same way.

The RTL describes one chip top level with three parts:

* a 784 × 400 network (28 × 28 pixel inputs, 400 output neurons in 10 class
  clusters of 40) with on-chip training and inference;
* a characterisation structure that measures a stochastic bit's switching
  probability over 768 evaluations;
* a characterisation structure that measures a synapse's switching probability
  against the spike delay, over 768 trials.

Everything digital is synthesizable SystemVerilog. The stochastic bit is analog
and is given as a behavioural model (`rtl/sbit.sv`), the only one in the design.

## The stochastic bit and its codes

The bit has a left and a right PMOS header, each selected by a 6-bit code (LC,
RC), and NMOS footers selected by a 3-bit code (NS). When EN rises, the stronger
side tends to win: output OA pulses if node A wins, OB otherwise. In this
design RC is always the complement of LC. So a single 6-bit code sweeps the
bit from mostly-A to mostly-B:

    P(OA) = (NS+1)/8 · ( 0.116 + 0.785 / (1 + exp((LC − RC) / 16)) )

With NS = 7, this runs from 90.1 % at code 0 to 11.6 % at code 63. Those end
points are the measured range of the silicon part. The sigmoid width and the
linear effect of NS are this model's fit. The real part's curve is only
roughly sigmoidal, and NS changes both the height and the shape of the real
curve. Randomness comes from `$urandom`. The model evaluates once per enabled
clock and gives a registered one-cycle pulse on `oa` or `ob`. One instance can
hold N independent bits (vector ports). A synapse column uses this to keep the
784 × 400 array a practical number of instances.

Every other block turns some quantity into a 6-bit code:

| user | quantity | code |
|---|---|---|
| input neuron | pixel intensity p (8 bit) | 63 − p/4 (white spikes most) |
| output neuron | weighted sum s of this step | 63 − min(63, (s ≪ gain_shift) + bias) |
| synapse | timing count c (10 = 1 step ago … 1 = 10 steps ago) | 63 − 6c |

## One time step

One clock cycle is one network time step. The reference clock is 37.5 MHz,
and the 10-step learning window is 267 ns. In each step:

1. Each input neuron evaluates its stochastic bit and emits a PRE spike.
2. Each synapse ANDs its weight with its row's PRE spike. A column's ones
   counter (`pulse_counter`, 10 bits for 784 inputs) adds up the AND outputs.
   That count is the weighted input.
3. The modulator maps the count to a code. The output neuron's stochastic bit
   spikes (POST) in the next step. A larger weighted input means a lower code
   and a higher spike probability. The neuron has no membrane potential: each
   step's spike depends only on that step's input.
4. Lateral inhibition: when an output neuron spikes, the EN of every other
   output neuron is masked for `inhib_steps` steps. Neurons that spiked in the
   same step are not masked.

## Learning: counters, latch and wordline

The spike timing is kept by down-counters (`stdp_counter`):

* one **POT counter** per input neuron, reloaded to 10 on each PRE spike;
* one **DEP counter** per output neuron, reloaded to 10 on each POST spike.

Each counter then decrements by one per step until it reaches 0. A count of 0
means the last spike is outside the window and no update is possible.

Each synapse (`stoch_synapse`) has an SR latch that remembers whether PRE or
POST came last. A mux selects the matching count:

* If the latch goes from PRE to POST (a POST after a PRE), the synapse uses
  the POT count of its row. Its stochastic bit fires the SRAM wordline with
  probability p(count), and the bitlines write **1**.
* If the latch goes from POST to PRE, the synapse uses the DEP count of its
  column and writes **0** with probability p(count).

Only the spike that *flips* the latch forms a pair. Further spikes on the same
side do nothing. This matters more than it looks. If every PRE spike sampled
the DEP counter, a bright pixel would get roughly ten depression chances per
POST spike and lose its weight. Simulations of that variant learned inverted
patterns. When PRE and POST arrive in the same step, POST wins and the POT
count is used.

Potentiation and depression have separate NMOS codes (`pot_ns`, `dep_ns`). This
lets their strengths be balanced. A weight update lands two clocks after the
spike step: the stochastic bit is registered, then the cell is written.

## Presenting a pattern: clusters, training and inference

`sbsnn_ctrl` runs one presentation: a one-cycle clear of all timing counters
and inhibition, then `t_present` time steps, then one drain step. In
**training** (`train = 1`), only the 40-neuron cluster of `label` is enabled,
so each cluster learns one class. The synapse bits are enabled during the
steps and for one cycle after, so that a POST in the last step still counts.
In **inference**, every output neuron is enabled and no synapse bit runs, so
the weights are frozen. In both modes `class_readout` counts the spikes of
each cluster. `predicted` is the cluster with the most spikes, the lowest
index on a tie.

`done` pulses `t_present + 4` cycles after `start`. At that point the last
weight write has landed and the counts are latched.

The readout is this design's own, simplest choice. The accuracy reported for
this architecture (92.3 % on MNIST) comes from a separate 400 × 10 softmax layer
trained off-line in software on the spike counts. That layer is not part of
the RTL. Without it, the comparable figure is the cluster-vote readout.

## Characterisation structures

Both structures take their settings through a serial shift register
(`test_mode_ctrl`). It is loaded MSB first while `*_gpo_shift` is high, the way
an FPGA's general-purpose outputs would drive it. A `*_start` pulse then runs
768 trials, paced by `timing_ctrl`.

* **Stochastic-bit test** (`sneuron_testchip`): the word is `{LC, RC, NS}`, 15
  bits. There is one evaluation every 2 clocks. A 15-bit saturating counter
  (`prob_counter`) counts the OA pulses, so `count / 768` estimates P(OA).
* **Synapse test** (`synapse_testchip`): the word is `{NS, TIME_IN}`, 8 bits.
  TIME_IN is a signed 5-bit delay t_post − t_pre in clocks. Each 16-clock
  trial does the following:
  1. The SRAM cell is reset to the opposite of the direction under test.
  2. `pulse_gen` emits PRE and POST TIME_IN clocks apart.
  3. The `tdc`, a POT and a DEP counter, turns the delay into a direction and
     a count.
  4. The stochastic bit fires the wordline with probability p(count).
  5. `flips` counts the trials in which the cell changed.

  |TIME_IN| = 0 or > 10 gives no flips.

## Interfaces and timing

`sbsnn_top` has plain ports. Network:

* `pixels[784]` (8 bits each);
* `start`, `train`, `label`;
* `t_present` (8 bits) and `inhib_steps` (8 bits);
* `in_ns`, `out_ns`, `pot_ns`, `dep_ns`;
* `gain_shift`, `bias`.

Hold all of these stable while `busy` is high. It returns `done`, `predicted`,
`class_count[10]`, and for observation `pre`, `post`, `inhibit_active` and the
full `weights` array. The test structures use `sb_*` and `sy_*` ports. Reset
is asynchronous and active low. All weights reset to 0.

## Where this departs from the original chip

* The stochastic bit is a behavioural model. It has no device variation
  (the silicon shows up to 5 % spread), no supply dependence, and a fitted
  rather than measured curve.
* One time step is one clock, and a stochastic bit evaluates in one cycle. The
  real bit's precharge, evaluate and read phases are folded into that cycle.
* These details are choices of this design, not the original's:
  - the pixel map, the modulator (shift plus bias) and the 63 − 6c timing map;
  - the latch-pairing rule and the POST-wins tie rule;
  - the separate `pot_ns`/`dep_ns` codes;
  - the inhibition hold length;
  - the per-pattern clear;
  - the cluster-vote readout;
  - the serial configuration formats;
  - the trial lengths of 2 and 16 clocks.
* Pads, package, decoupling, the FPGA host and the softmax layer are not part
  of the RTL.

## How far it has been checked

Every block has a self-checking testbench in `tb/` (`tb_<module>`). Each ends by
printing `TB_RESULT checks=… failures=…`. Each was also run against a copy of
its block with one deliberate bug, and each of those copies failed at least
one check. Probabilistic results are checked against the formula above within
a tolerance, over several hundred trials.

* `tb_sbsnn_top` runs the whole top at 20 inputs × 20 outputs. It trains two
  patterns and then runs them in inference, while both test structures run in
  parallel. It counts each mechanism and fails if any never occurs:
  - input spikes track brightness;
  - output spikes stay inside the trained cluster;
  - potentiation, depression and inhibition all occur;
  - inference leaves every weight unchanged;
  - the readout counts are consistent;
  - `done` latency is `t_present + 4`;
  - both characterisation results come out.
* The largest size simulated is 20 × 20. At the full 784 × 400 size the top
  passes lint and elaboration. But Verilator's C++ model of it had not finished
  compiling after 12 minutes (one 10 MB source file), so the full-size network
  has not been simulated.
* `tb_sbsnn_core` checks the same network behaviour on the core alone.

The *quality* of learning is printed, not asserted. At 2 neurons per class,
with binary weights that flip with high probability on every pair, how
selective the learned weights are varies from seed to seed. Reproducing the
published accuracy would need the MNIST data, thousands of presentations and
the off-line softmax layer. None of that has been simulated.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing -Wno-fatal -Irtl -y rtl +libext+.sv \
        rtl/sbsnn_pkg.sv tb/tb_sbsnn_top.sv --top-module tb_sbsnn_top
    ./obj_dir/Vtb_sbsnn_top

Use any other `tb/tb_<name>.sv` the same way. To simulate the full size, drop
the parameter overrides in `tb_sbsnn_top`. Expect a C++ build of well over ten
minutes and about 2 GB of compiler memory. The network size
is set by the `N_IN`/`N_OUT` parameters of `sbsnn_top` / `sbsnn_core`. `N_OUT`
should be a multiple of 10, because the clusters are `N_OUT/10` neurons each.

## Files

* `rtl/sbsnn_pkg.sv`: shared widths, types and code maps.
* Stochastic bit: `rtl/sbit.sv` (behavioural).
* Neurons: `rtl/input_neuron.sv`, `rtl/pulse_counter.sv`, `rtl/modulator.sv`,
  `rtl/output_neuron.sv`, `rtl/lateral_inhibition.sv`.
* Learning: `rtl/stdp_counter.sv`, `rtl/stoch_synapse.sv`.
* Network: `rtl/sbsnn_column.sv` (one output neuron with its synapse column
  and DEP counter), `rtl/sbsnn_ctrl.sv`, `rtl/class_readout.sv`,
  `rtl/sbsnn_core.sv`.
* Characterisation: `rtl/timing_ctrl.sv`, `rtl/prob_counter.sv`,
  `rtl/test_mode_ctrl.sv`, `rtl/pulse_gen.sv`, `rtl/tdc.sv`,
  `rtl/sneuron_testchip.sv`, `rtl/synapse_testchip.sv`.
* Top: `rtl/sbsnn_top.sv`.
