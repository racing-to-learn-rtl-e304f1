# SKAN in SystemVerilog: spiking neurons that learn by reshaping their kernels

Most spiking neurons store what they have learnt in synaptic weights, and every
synapse then needs a multiplier. The Synapto-dendritic Kernel Adapting Neuron
(SKAN) keeps the weights fixed and learns instead in the *shape* of each
synapse's response. Every input spike starts a triangular kernel. The slope of
each kernel adapts until all kernels of a neuron peak at the same moment for
the spike pattern the neuron has learnt. The only operations are add, compare
and saturate. A threshold that rises while the neuron fires and falls when it
stays silent makes the neuron more and more selective. Several neurons form a
classifier through a single shared inhibition wire: the neuron that fires first
silences the others, and it is also the only one that learns. No controller is
needed.

This RTL implements the model as published by Afshar, George, Tapson, van
Schaik and Hamilton ("Racing to Learn: Statistical Inference and Learning in
a Single Spiking Neuron with Adaptive Kernels"). The update rules are
bit-exact integer versions of the published equations, one clock per model
time step. Where the publication leaves a detail open, the
choice made here is stated in this document and in the header comment of each
file.

## 1. The pieces

```
          u[0..INPUTS-1]  (spike inputs shared by all neurons)
               |
   +-----------+------------------------------------------+
   | skan_neuron (x NEURONS)                              |
   |   skan_kernel x INPUTS --r(t)--> skan_membrane_sum   |
   |        ^                              | vmem(t)      |
   |        |  s(t-1)  (back-propagation)  v              |
   |        +-------------------------- skan_soma --------+--> spike[n]
   |                                       ^  s_next      |
   +---------------------------------------|--|-----------+
                                inh_active |  | s_n(t), all neurons
                                     +-----+--v-----+
                                     | skan_inhibit |  OR -> countdown -> "> 0"
                                     +--------------+
```

| module | role |
|---|---|
| `skan_pkg` | default learning parameters and the kernel phase type |
| `skan_kernel` | one synapse/dendrite: ramp-up/ramp-down accumulator with an adaptive slope |
| `skan_membrane_sum` | adds a neuron's kernels into its membrane potential |
| `skan_soma` | threshold comparison, output spike, threshold adaptation |
| `skan_neuron` | INPUTS kernels + sum + soma, with the spike fed back to the kernels |
| `skan_inhibit` | global OR of all spikes followed by a decaying countdown |
| `skan_network` | top level: NEURONS neurons sharing the inputs, coupled by the inhibition |

## 2. One time step

What matters most for reading the code is the order in which things happen
inside one model step Δt. Each step is one rising clock edge with `step = 1`
(with `step = 0` nothing changes). The registers hold the values of the
previous step, t-1. Everything of step t is computed combinationally from
them and from the inputs u(t), then stored together.

1. **Kernels** (`skan_kernel`). Phase p, value r and slope dr move from t-1 to t:
   - phase: IDLE→UP on an input spike; UP→DOWN once r(t-1) ≥ W;
     DOWN→IDLE once r(t-1) = 0. An input spike that arrives while the kernel is
     busy is ignored, so a burst counts as its first spike.
   - r(t) = r(t-1) + p(t-1)·dr(t-1), held between 0 and W.
   - dr(t) = dr(t-1) + p(t-1)·DDR·s(t-1), held between DR_MIN and DR_MAX.
     While the neuron fires, a kernel that is still climbing (its peak is late)
     gets steeper. A kernel that is already falling (its peak is early) gets
     shallower.
2. **Sum** (`skan_membrane_sum`): vmem(t) = Σ r_i(t). The potential is never
   reset after a spike.
3. **Spike** (`skan_soma`): s(t) = vmem(t) > θ(t-1), and in a layer also
   (inh(t-1) = 0 or s(t-1) = 1). A neuron can start a pulse only while nobody
   inhibits it, but it may finish a pulse it has already started.
4. **Threshold**: θ rises by THETA_RISE on every step with s(t) = 1. Otherwise
   it falls by THETA_FALL
   - in a single neuron, when the potential has just returned to zero
     (vmem(t) = 0, vmem(t-1) > 0);
   - in a layer, in that case only when the inhibition is off, **or** on
     the step where the neuron's own pulse ends (s(t) = 0, s(t-1) = 1).

   A rise takes precedence over a fall.
5. **Inhibition** (`skan_inhibit`): inh(t) = INH_MAX if any s_n(t) = 1.
   Otherwise it is inh(t-1) - INH_DECAY, but never below 0. Neurons see
   inh(t-1) > 0.

So the path from the kernel registers through the adder, the comparator and
the OR gate into the inhibition counter is one combinational cycle. This keeps
the model exact step for step. A pipelined version would change its
dynamics: spikes would arrive one step late at the kernels and at the other
neurons.

Because the fall rule in a layer is tied to the end of a pulse, the threshold
of the neuron that won a pattern goes down exactly once per presentation.
Its rise is THETA_RISE × (pulse width). Short pulses therefore push the
threshold up, long pulses pull it down. If the neuron answered every
presentation, the two would balance at a pulse width of 2.5 steps with the
default 40:100 ratio. Missed presentations cost extra falls, so in practice
the balance lies at somewhat narrower pulses. A neuron that was not
triggered by a pattern loses THETA_FALL when its potential returns to zero.
This is how a neuron that misses patterns widens its receptive field again.

## 3. Why the race works

The kernels adapt only during the neuron's own output pulse. When a pattern
arrives, the neuron whose kernels already fit it best crosses its threshold
first. Its spike sets the shared countdown, which blocks every other neuron
from starting a pulse. So only the first neuron adapts, and it adapts towards
this pattern. Its kernels get steeper and better aligned, so next time it
answers sooner still. Neurons that lose on one pattern keep their state and
are free to win another. The random initial slopes (uniform 100..199 in the
reference setting) break the symmetry between neurons. With INH_MAX/INH_DECAY
= 100 steps, the inhibition outlasts the slowest possible kernel rise (W/100
steps).

Each neuron needs INPUTS + 2 wires: its inputs, its output and the inhibition
line. Nothing grows with the square of the neuron count.

## 4. Parameters

All parameters are integers. The defaults are the values with which the model
was published.

| parameter | default | meaning |
|---|---|---|
| `NEURONS` | 4 | neurons in the layer (the four-neuron layer of the published network diagram) |
| `INPUTS` | 16 | input channels per neuron (largest published neuron) |
| `W` | 10000 | kernel peak (the fixed synaptic weight) |
| `DDR` | 1 | slope change per spiking step |
| `DR_MAX` | 400 | slope ceiling |
| `DR_MIN` | 1 | slope floor (own choice, see §7) |
| `THETA_RISE` | 40 × INPUTS | threshold rise per spiking step |
| `THETA_FALL` | 100 × INPUTS | threshold fall per event |
| `INH_MAX` | 100 | inhibition countdown start |
| `INH_DECAY` | 1 | inhibition countdown step |
| `NETWORK` (soma, neuron) | 1 | 1: layer rules gated by inhibition; 0: single-neuron rules |

The register widths follow from these parameters. The kernel value needs
⌈log2(W+1)⌉ bits (14), the slope ⌈log2(DR_MAX+1)⌉ bits (9), the membrane
potential ⌈log2(INPUTS·W+1)⌉ bits (18), and the threshold one bit more (19).

Pattern timing constrains DR_MAX: the first kernel of a pattern must still be
up when the last spike arrives. That requires DR_MAX < W / PW, where PW is the
widest expected pattern. The defaults therefore suit patterns up to 25 steps
wide.

## 5. Top-level interface (`skan_network`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `step` | in | 1 | advance one time step on this clock |
| `u` | in | INPUTS | input spikes of this step (one-step pulses) |
| `dr_init` | in | NEURONS×INPUTS×9 | initial slopes, loaded during reset |
| `theta_init` | in | NEURONS×19 | initial thresholds, loaded during reset |
| `spike` | out | NEURONS | output spike of each neuron for the last step |
| `theta` | out | NEURONS×19 | thresholds |
| `vmem` | out | NEURONS×18 | membrane potentials |
| `dr` | out | NEURONS×INPUTS×9 | kernel slopes |
| `inh`, `inh_active` | out | 7, 1 | inhibition countdown and its "> 0" flag |

All outputs are registered. They show the state after the last step, with no
further latency. The design has no source of random numbers. Whoever
instantiates it supplies the initial slopes, for example from an LFSR or a
ROM, and holds them stable while `rst_n` is low. The same holds for the
initial thresholds, for which the publication gives no value. The testbenches
use INPUTS·W/2.

## 6. Size

Each kernel holds 25 flip-flops (14 value, 9 slope, 2 phase). The soma holds
the spike, the threshold and the previous membrane potential. Against the
register counts published for an FPGA build of one neuron:

| synapses | flip-flops here | published registers |
|---|---|---|
| 1 | 55 | 48 |
| 2 | 82 | 72 |
| 4 | 134 | 121 |
| 8 | 236 | 218 |
| 16 | 438 | 411 |

Both grow by about 25 bits per synapse. The remaining difference is a few
bits in the soma and the kernel. The logic consists of one adder and
a few comparators per kernel, an adder chain per neuron, and one counter for
the whole layer. There are no multipliers. The default 4 × 16 layer
synthesises to about 1.8 k flip-flops.

## 7. Choices made here where the publication is silent or ambiguous

- **Kernel ceiling.** The published update equations would let r overshoot W
  by up to two steps, because the phase flips one step after r reaches W.
  The published parameter list, however, calls W the maximum kernel height
  and says r saturates at zero. Here r is held between 0 and W, so the kernel
  has a two-step flat top. In the classification experiments below, the
  unclamped variant converged markedly less often.
- **Slope floor** DR_MIN = 1. The publication gives no lower bound. A zero
  slope would leave a kernel stuck in its falling phase.
- **Threshold** is held between 0 and its 19-bit maximum. Its initial value is
  an input.
- **Layer fall rule.** The equation says "potential returned to zero with no
  inhibition, *or* the neuron's own pulse just ended". The prose describes only
  the first condition. The equation is implemented.
- **Time base.** One clock is one Δt when `step` is held high. The `step`
  enable lets a slower time base be used.
- **Inhibition floor.** The countdown stops at zero even if INH_DECAY does not
  divide INH_MAX.

## 8. Behaviour in simulation

The workload testbenches repeat the published experiments on this RTL. A
classification run has converged after 20 consecutive presentations that were
each answered by exactly one pulse of one neuron, with the same neuron for the
same pattern and a different neuron for each pattern. Patterns place one spike
per channel in a 20-step window, one presentation every 400 steps, with 20
runs per configuration. Results:

| configuration | converged within 800 presentations | mean presentations |
|---|---|---|
| 2 neurons, 2 inputs, 2 patterns | 17/20 | 43 |
| 4 neurons, 2 inputs, 4 patterns | 15/20 | 273 |
| 2 neurons, 16 inputs, 2 patterns | 18/20 | 49 |
| 2 neurons, 2 inputs, ±1 step jitter | 16/20 | 39 |
| 2 neurons, 16 inputs, 40-step window | 13/20 | 38 |

The published curves reach nearly 100 % convergence in these settings. The
runs that fail here mostly have two patterns whose inter-spike intervals
differ by only one to three steps. The publication does not say how its
random patterns were drawn or what the initial threshold was, and either may
account for the gap.

A single 4-input neuron shown pattern x with probability 0.9 and pattern y
otherwise ends up answering only x in 10 of 10 runs. A 2-input neuron follows
an inter-spike interval that drifts from -20 to 0 steps and keeps answering
every presentation. Both results match the published behaviour.

Noise tolerance was tested with a 4-input neuron trained for 1000
presentations. Input spikes were deleted at random and Poisson noise spikes
were added, keeping one spike per channel per period on average. After
training, the neuron was shown one clean presentation, and the spread of the
steps at which its four kernels peak was measured (5 runs):

| signal : noise | peak spread (steps) |
|---|---|
| 1 : 0 | 0 to 1 |
| 1 : 1 | 3 to 7 |
| 1 : 2 | 2 to 15 |

Alignment degrades with noise, as published. Each trained neuron still
answered the clean pattern.

## 9. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends itself; a
watchdog stops a hung run. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/skan_pkg.sv tb/skan_ref_pkg.sv tb/tb_skan_network.sv \
    --top-module tb_skan_network
./obj_dir/Vtb_skan_network
```

| testbench | what it checks |
|---|---|
| `tb_skan_kernel` | kernel timing (slope 125: 80 steps to the peak, 162 steps active) and random stimulus against an integer model |
| `tb_skan_membrane_sum` | random and corner-case sums |
| `tb_skan_soma` | both rule sets against a model; every rule must occur |
| `tb_skan_inhibit` | inhibition lasts 100 steps after a pulse; random spikes against a model |
| `tb_skan_neuron` | 16-input neurons, both rule sets, against `skan_ref_pkg` every step |
| `tb_skan_network` | the default 4 × 16 layer, 300 presentations, every step against `skan_ref_pkg`; fails unless every mechanism occurred: blocking, both threshold falls, slope increase, decrease and ceiling, inhibition expiry, ignored spikes, kernel saturation |
| `tb_skan_classify` | the classification experiments of §8 (uses `skan_classify_bench`) |
| `tb_skan_single` | commonest-pattern selection and interval tracking |
| `tb_skan_noise` | kernel alignment after training under spike deletion and Poisson noise |

`skan_ref_pkg` is an independent integer model of the whole layer. It also
counts how often each mechanism fired, so new tests can be checked for
coverage. To change the model, edit the defaults in `skan_pkg` or override the
parameters of `skan_network`. The register widths follow automatically.
