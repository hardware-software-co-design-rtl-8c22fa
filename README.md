# A multiplier-less spiking neural reservoir

This is the hardware half of a reservoir-computing speech recogniser. A
small recurrent network of leaky integrate-and-fire (LIF) neurons is
driven by spike trains and left untrained. Its membrane potentials are
sampled and handed to a software classifier, and only the classifier is
trained. The hardware's main idea is in the synapse. A synapse does not
multiply its input spike by a weight. It lets the spike through when a
shared pseudo-random number equals the synapse's fixed weight, and each
spike that passes adds a constant 0.125 to the membrane. So the synapses
need no multipliers. The only multiplier in a neuron is the one that
computes the leak of its membrane.

The RTL follows the architecture of A. Ghani, M. McGinnity, L. Maguire and
J. Harkin, "Hardware/Software Co-Design for Spike Based Recognition". That
design was built in a block-diagram tool. The SystemVerilog here is a new
implementation of it. Where their description stops, this RTL makes its
own choices, and the section *Where this RTL departs from or goes beyond
the reference* lists them.

## The system around the RTL

```
speech -> silence removal, LPC features -> Poisson spike trains     (software)
       -> reservoir_top: 8 LIF neurons, 16 synapses                 (this RTL)
       -> membrane potentials, sampled at steps 50,100,150,200,250  (software)
       -> 40-30-10 MLP readout                                      (software)
```

Each utterance becomes one spike train of a few hundred time steps. One
time step stands for 0.125 ms. The reservoir is reset before each train
and run for every step of it. The recorder keeps the 8 potentials at five
evenly spaced steps, so the readout gets 40 numbers per utterance. The
feature extraction, spike encoding, state recording and classifier are
outside this RTL.

## Number formats

| quantity | format | notes |
|---|---|---|
| membrane potential, synaptic values, V_th, V_reset, decay constant | Fix_18_12: signed 18 bit, 12 fractional | 1.0 = 4096, range -32 .. +31.9998 |
| fixed weight, random value | Fix_4_3: signed 4 bit, 3 fractional | -1.0 .. +0.875 in steps of 0.125 |
| LFSR | 6-bit register | only bits 3:0 are compared |

Defaults, rounded to Fix_18_12: threshold 0.15 V is 614 (0.1499). Reset
potential 1 mV is 4 (0.00098). Decay constant -0.11 is -451 (-0.1101).
All arithmetic saturates at the Fix_18_12 limits.

## The synapse: comparator AND pulse counter

`synapse.sv`. In each time step:

```
cmp_hit = (rnd == weight)                 // rnd = lfsr[3:0] as Fix_4_3
cnt_hit = spike_in && (count + 1 >= PULSE_CNT)
fire    = cmp_hit && cnt_hit
psp     = fire ? 1.0 >>> SHIFT : 0        // 0.125 = 512 with SHIFT = 3
```

The pulse counter counts input spikes. It asserts on the spike that brings
its count to `PULSE_CNT` and then restarts from zero. With the default
`PULSE_CNT = 1` every spike counts, and the synapse is just the AND of the
spike and the comparator. `fire` and `psp` are combinational within the
step. Only the counter holds state.

The weight acts differently from a multiplier weight, and this is the
hardest point of the design. The comparator tests for equality, so the
weight does not set *how much* a spike counts. It sets *at which LFSR
states* a spike can pass. In one 63-step LFSR period, the low nibble takes
the value 0 three times and every other value four times. So every synapse
passes about 4/63 (6.3 %) of its input spikes, whatever its weight. Two
synapses with different weights are open at different, disjoint steps.
Their gating is decorrelated, but their average strength is the same. The
threshold of 0.15 is just above one synaptic value of 0.125. So a neuron
fires only when two passed spikes arrive close enough together that the
leak has not yet taken away the first.

## The membrane: leaky integrator with reset

`membrane.sv`. One time step:

```
leak = ((V - V_reset) * decay_k) >>> 12          // the neuron's one multiplier
V'   = sat(V + V_s + leak)
if refractory:   V <= V_reset, spike <= 0, count down
elif V' >= V_th: V <= V_reset, spike <= 1, refractory for REFRACT_STEPS
else:            V <= V', spike <= 0
```

With `decay_k = -0.11`, V relaxes towards V_reset by about 11 % of the
distance per step. The product is truncated toward minus infinity, so a
potential just above V_reset falls exactly to V_reset. It does not hover
one LSB above it. Worked example with the defaults and 0.125 of input on
every step:

| step | V before | V_s | leak | V' | result |
|---|---|---|---|---|---|
| 1 | 4 | 512 | 0 | 516 | below 614 |
| 2 | 516 | 512 | (512 x -451) >> 12 = -57 | 971 | fires, V = 4 |
| 3 | 4 | 512 | - | - | refractory, V held at 4 |
| 4 | 4 | 512 | 0 | 516 | integrating again |

`vm`, `spike` and `refractory` are registers. They change only on a clock
edge with `step` high. A spike is high for exactly the step after the
threshold was crossed, and on that same edge V is back at V_reset. An
assertion in the module checks this.

## The reservoir

`reservoir_top.sv` instantiates:

* `cfg_regs`: the 16 weights and the three membrane constants.
* `lfsr_rng`: one 6-bit Fibonacci LFSR, x^6 + x^5 + 1, seed 1, period 63.
  It is shared by all 16 synapses.
* 8 × `lif_neuron`, each made of 2 × `synapse`, a `syn_adder` and a
  `membrane`.
* `spike_delay`: one step-enabled register per neuron on the feedback
  path.

The neurons are arranged in three layers of 3, 2 and 3, named by
(layer, position):

| neuron | position | synapse 0 | synapse 1 (delayed spike of) | weights (w0, w1) |
|---|---|---|---|---|
| N0 | (1,1) | input | N6 | 0.375, -0.25 |
| N1 | (1,2) | input | N5 | 0.25, -0.375 |
| N2 | (1,3) | input | N7 | 0.125, -0.125 |
| N3 | (2,1) | input | N0 | -0.375, 0.25 |
| N4 | (2,2) | input | N1 | 0.375, 0.125 |
| N5 | (3,2) | input | N3 | -0.25, 0.375 |
| N6 | (3,1) | input | N4 | -0.125, 0.25 |
| N7 | (3,3) | input | N2 | 0.25, -0.375 |

The table is the `CONN` parameter of `reservoir_top` (default
`rsv_pkg::CONN_DEF`), and each entry is a `src_t`: input train `idx`, or
neuron `idx`. A different network needs only a different table, plus more
neurons, synapses or inputs through `N_NEURON`, `N_SYN` and `N_IN`. The
weights can be rewritten at run time.

There is no controller. One `step` pulse advances every neuron, the LFSR
and the feedback registers together.

### Timing of one step

```
cycle k   : in_spikes valid, step = 1   -> synapses evaluate combinationally
edge k    : vm[], spikes[], LFSR, feedback registers update
cycle k+1 : state_valid = 1; vm[] and spikes[] hold the new state
```

`vm` and `spikes` hold between steps. So `step` may be given every clock
for full speed, or spaced out to pace the network: the stalls keep all
state. A spike produced on step t enters the feedback register on step
t+1 and reaches its target synapses on step t+2. Each recurrent loop
therefore has a loop delay of two steps.

### Configuration port

A write takes one clock with `cfg_we` high. `cfg_wdata` is Fix_18_12.
Unmapped addresses are ignored. Reset restores the defaults.

| `cfg_addr` | register |
|---|---|
| 0 .. 15 | weight of neuron a/2, synapse a%2 (`cfg_wdata[3:0]`) |
| 16 | threshold V_th |
| 17 | reset potential V_reset |
| 18 | decay constant |

## Where this RTL departs from or goes beyond the reference

* **Connectivity, weights, number of inputs.** The reference gives the
  3×2×3 layering, 8 neurons, 16 synapses, input connections to the
  neurons and delayed feedback. It does not give the exact wiring or the
  weight values. The table above is this design's own. The weights are
  kept within ±0.4, the range the reference quotes. One input train per
  utterance is assumed.
* **Random value range.** The reference describes random values within
  ±0.4 from a 6-bit LFSR, compared against 4-bit Fix_4_3 weights. Here
  the low 4 bits are compared directly, so the random value covers the
  full Fix_4_3 range (-1 .. 0.875).
* **LFSR taps and seed** are not given. Any maximal 6-bit polynomial would
  do. Changing it changes which steps each weight opens, not how often.
* **Inhibition.** The reference calls the no-pulse case inhibitory, but
  gives it no negative value. Here it contributes 0, and only the leak
  lowers the potential.
* **Pulse-counter target.** Not given. The default of 1 makes the synapse
  a plain AND of spike and comparator.
* **Reset level.** The reference states a 1 mV reset in several places,
  and once a reset to 0. 1 mV is used, and it is programmable.
* **Firing condition.** `V' >= V_th` on the updated potential, as in the
  reference's output equation.
* **Refractory period.** The reference names one but not its length. It
  is 1 step here (`REFRACT_STEPS`).
* **Leak formula and rounding.** The reference gives an exponential decay
  towards V_reset with one multiplier per neuron and the constant -0.11,
  not the formula. Truncation and saturation are this design's choices.
* **Registers.** The reference diagram has an accumulator register and a
  separate output register whose reset is driven by the comparator. They
  are one register here, and the spike is registered together with the
  reset.
* **Feedback delay.** One register per neuron (`FB_DELAY = 1`). The
  reference names "delayed registers" without a length.
* **Configuration write port.** This design's own. The reference says only
  that the weights are stored in registers and that threshold and decay
  are programmable.

With the default threshold, the equality comparator keeps the reservoir
quiet. In the 200-utterance test below, the 16 synapses pass about 5,800
spikes in 56,000 steps, and the neurons fire about 600 times. Raising
`PULSE_CNT` makes it quieter still. Lowering V_th, or letting more LFSR
states match, makes it busier.

## Verification

Each module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog. The reference model in
`tb/rsv_ref_pkg.sv` uses plain integer arithmetic and shares no code with
the RTL.

| testbench | what it checks |
|---|---|
| `tb_lfsr_rng` | sequence against the model, hold without `step`, period exactly 63 |
| `tb_synapse` | comparator/counter/AND/shift for `PULSE_CNT` 1 and 3, every step |
| `tb_syn_adder` | sums and saturation at both limits |
| `tb_membrane` | the worked example above cycle by cycle, then 3000 random steps with random constants, including saturation and refractory periods |
| `tb_lif_neuron` | two synapses plus membrane against the model, at two thresholds |
| `tb_cfg_regs` | reset defaults, random writes including unmapped addresses |
| `tb_spike_delay` | 1- and 3-step lines with irregular strobes |
| `tb_reservoir_top` | the whole network at its default size, every step, against the model |

`tb_reservoir_top` runs the recognition workload at full size. That is 10
digits × 20 utterances of 280 steps, each with a Poisson-like input whose
rate depends on the digit, with a reset before each utterance. The five
40-value state samples are taken at steps 50 to 250. It then lowers the
threshold and loads new weights through the configuration port. It
strobes `step` irregularly and checks that nothing changes between
strobes. Last, it switches the leak off with an unreachable threshold and
drives membranes into saturation. It counts synaptic events, feedback
events, spikes blocked by the comparator, spikes, refractory steps,
saturations, stalls and configuration writes, and fails if any count is
zero. It takes under a second.

To run a testbench with Verilator:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb --top-module tb_reservoir_top \
    rtl/rsv_pkg.sv tb/rsv_ref_pkg.sv tb/tb_reservoir_top.sv
./obj_dir/Vtb_reservoir_top
```

Replace the top-module name to run any other testbench. The packages must
come first on the command line.

## Not included

The speech front end, the Poisson encoder, the state recorder and sampler,
and the MLP readout run in software in the reference system. The trained
readout weights are not available. Slice counts and the 74 MHz clock rate
of the reference FPGA build are specific to that device and are not
reproduced.
