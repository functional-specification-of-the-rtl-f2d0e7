# RAVENS neuroprocessor: synthesizable SystemVerilog

RAVENS (Reconfigurable and Very Efficient Neuromorphic System) runs spiking neural
networks in discrete time. Each neuron keeps an integer potential and fires when that
potential exceeds its threshold. Each synapse carries a signed integer weight to another
neuron after a delay of a whole number of time steps. After a neuron fires, it goes
through an absolute and then a relative refractory period. Leak draws its potential back
towards a resting value. An STDP table (spike-timing-dependent plasticity) changes the
weights at run time. The published functional specification of RAVENS (Foshie, Plank,
Rose and Schuman, University of Tennessee) defines all of this exactly, down to which
neuron fires in which time step. It also gives worked example networks with full
activity tables.

This RTL implements that specification as one nCore, a group of neurons that are all
updated in parallel. The RTL completes one time step ("integration cycle") per clock. The
specification defines behaviour, not a microarchitecture. The organisation here (fully
parallel, one clock per step, a crossbar between neurons) is therefore this design's
own, and so is every size the specification leaves open. All of the specification's
example activity tables are reproduced cycle for cycle by the testbenches.

## The integration cycle

Everything in RAVENS is defined relative to one integration cycle (a "timestep"), and
the order of events inside it is the part that is easiest to get wrong. In this RTL a
timestep is one clock edge with `step` high. Within that clock period:

1. **Fire.** A neuron whose potential exceeded its threshold at the end of the previous
   timestep fires now, at the beginning of this one. `fire` is a register, so it is
   stable for the whole clock period.
2. **Reset or clamp, then leak.** A firing neuron's potential is reset. Otherwise, if the
   potential is below the floor of the current mode (see below), it is raised to the
   floor. If it is above the floor, it loses `leak`, but not below the floor.
3. **Deliver.** Every synapse whose spike is due delivers its current weight. A synapse
   with delay 0 whose pre-neuron fires in step 1 delivers in this same timestep. That is
   possible only because firing happens first. Injected charge is added here as well.
4. **Integrate.** The delivered charge is added to the potential, unless the neuron is in
   its absolute refractory period, when the charge is ignored.
5. **Compare and learn.** The new potential is compared with the threshold. A neuron that
   exceeds it fires in the next timestep. The same comparison drives STDP on all of the
   neuron's incoming synapses.

Steps 1 to 5 form one combinational path from the fire registers to the potential,
weight and delay-line registers. Timestep *t* therefore ends at the clock edge, where
`charge` takes the potential "at the end of timestep *t*", the quantity the
specification's tables print.

One detail of step 2: the clamp to the floor takes place at the start of the next
timestep, not at the end of the current one. A potential pushed below its resting value
is thus visible for one timestep. The specification's leak example shows exactly this: a
charge of -2, "reset to 0 at the beginning of timestep 2". The text elsewhere says the
clamp happens at the end of the cycle. Both readings give the same spikes, because the
fire decision in step 5 already uses the clamped value.

## Neuron modes

A neuron is in one of three modes in each timestep (`nmode_t`):

| mode | entered | floor (clamp / leak target) | incoming charge |
|---|---|---|---|
| standard | when no refractory period is running | standard resting potential | added |
| absolute refractory | the firing timestep and the `abs_ref - 1` after it | none; nothing changes | ignored |
| relative refractory | the `rel_ref` timesteps after the absolute period | refractory resting potential | added |

On firing, the potential is set to the refractory resting potential if `rel_ref` is
non-zero, and to the standard resting potential otherwise. With `abs_ref = 1, rel_ref = 1`
and a refractory resting potential of -3, a neuron that fires in timestep 3 shows -3 at
the end of 3 (it ignores that timestep's input). It accepts input from -3 upwards in
timestep 4. In timestep 5 its potential is first raised to the standard resting
potential. This is the specification's relative-refractory example.

The RTL tracks the modes with two down-counters (`abs_left_q`, `rel_left_q`). The
testbench's reference model instead uses the timestamp of the last firing. The two
formulations are checked against each other on random settings.

## Synapses, delays and spikes in flight

A synapse holds a weight register and a `DELAY_MAX`-bit shift register. When its
pre-neuron fires with delay *d* > 0, bit *d*-1 is set. Each timestep shifts the
register down, and bit 0 means "arrives now". Several spikes can therefore be in flight
on one synapse at once. The delivered value is the weight register *at arrival*: a weight
that STDP changes while spikes are in flight also applies to those spikes.

## STDP

The STDP table has *T* signed entries and is a Hardware Constant, which this RTL makes a
module parameter (`STDP_T`, `STDP_TABLE`). Let *H* = floor(*T*/2) and let *y* be the
current timestep. At the end of each timestep, each synapse applies at most one table
entry, added to its weight and saturated to the weight range:

* **Potentiation.** The post-neuron exceeds its threshold in timestep *y*, and the
  synapse last delivered a spike in timestep *x* (possibly *y* itself). The index is
  *H* - (*y* - *x*), used if it is at least 0.
* **Depression.** The synapse delivered a spike in timestep *y*, but the post-neuron did
  not exceed its threshold. Let *x* be the timestep at whose end the post-neuron last
  exceeded its threshold, i.e. one before its last firing. The index is *H* + (*y* - *x*),
  used if it is inside the table.

Two points of this design's reading of the specification are worth knowing:

* For depression, *x* is the threshold crossing, not the firing. The specification's
  text says "the neuron last fired at the beginning of cycle *x*", but its three
  depression examples only come out right with the crossing. In those examples a
  synapse depresses one timestep after the neuron crossed, that is, in the neuron's
  firing timestep.
* Because *y* - *x* is at least 1 for depression, entries 0 .. *H* serve potentiation and
  entries *H*+1 .. *T*-1 serve depression. For the example table `[1, 2, -1]` this gives
  exactly what the specification states: two potentiation entries and one depression
  entry.

Spikes that arrive during the absolute refractory period are ignored for the potential,
but they still count for depression. The specification's fourth STDP example relies on
this.

Hardware: every synapse has a saturating counter of timesteps since its last delivery,
and every neuron one of timesteps since its last crossing (`DT_W` bits). The lookup,
`ravens_stdp`, is a small combinational block per synapse.

## Ports, charge injection and the accumulator width

Every neuron has `N_PORTS` ports. A port holds one incoming synapse, given by a source
neuron index, weight and delay. When a neuron's `inj_en` setting is on, `N_INJ` of its
ports (here ports 0 .. `N_INJ`-1) stop being synapses. Together they carry one signed
`N_INJ`-bit number from outside, which is added to the potential in that timestep. An
input can also enter the network as a forced spike on a synapse (`ext_spike`), which
then travels through that synapse's delay and weight.

The accumulator width follows the specification's minimum-width rule

    A = ceil(log2(max((2^W - 1)(S - C) + 2^C - 1,  (2^W - 1) S)))

with *W* = `WEIGHT_W`, *S* = `N_PORTS` and *C* = `N_INJ`. The package computes it
(`acc_magnitude_bits`) and adds a sign bit: `ACC_W` = 9 for the defaults. The potential
saturates instead of wrapping, a case the specification does not cover.

## Hardware Constants

All of them live in `rtl/ravens_pkg.sv`, except the neuron count and the STDP table,
which are parameters of the top level.

| constant | default | origin |
|---|---|---|
| `WEIGHT_W` | 4 (weights -8 .. 7) | the specification's examples saturate weights at 7 |
| `THR_W` | 8 | design choice (thresholds and resting potentials) |
| `DELAY_MAX` | 5 | largest delay in the specification's examples |
| `REF_W`, `LEAK_W` | 4 (up to 15) | design choice |
| `N_PORTS` (*S*) | 10 | design choice |
| `N_INJ` (*C*) | 6 | design choice: carries the examples' input value 16 |
| `ACC_W` | 9 | minimum-width rule plus sign |
| `STDP_MAX` | 8 | largest table in the specification |
| `N_NEURONS` | 5 | the five-neuron network of all the examples |
| `STDP_T`, `STDP_TABLE` | 8, `[1,2,2,3,4,-4,-2,-1]` | the specification's example table |

Cost grows as `N_NEURONS` x `N_PORTS` synapses, each with a delay line, a weight register,
a counter and an STDP lookup, plus an `N_NEURONS`-to-1 crossbar mux per port. At the
defaults the design is about 850 flip-flops.

## RTL structure

| file | role |
|---|---|
| `ravens_pkg.sv` | Hardware Constants, `neuron_cfg_t`, `synapse_cfg_t`, STDP table type, accumulator-width function |
| `ravens_neuron.sv` | potential register, mode counters, reset / clamp / leak / integrate / compare |
| `ravens_synapse.sv` | delay line, weight register, time since last delivery, STDP update |
| `ravens_stdp.sv` | STDP table lookup (combinational) |
| `ravens_dendrite.sv` | adds a neuron's arriving weights and injected charge |
| `ravens_ncore.sv` | neurons, ports and the crossbar |
| `ravens_top.sv` | the neuroprocessor: nCore, STDP enable, timestep counter |

## Using the top level

`ravens_top` takes the network's settings as arrays. `ncfg[n]` holds each neuron's
threshold, resting potentials, leak, refractory periods and injection enable.
`scfg[n][p]` holds each port's enable, source, initial weight and delay. `stdp_en` is the
one overall setting. A run goes as follows:

1. Hold the settings stable, and pulse `clear` for one clock. Potentials go to their
   standard resting potentials, delay lines empty, weights load from `scfg`, and
   `timestep` returns to 0.
2. For each timestep, raise `step` for one clock, and drive that timestep's `inj_val` and
   `ext_spike`. During the clock, `fire` shows the neurons that fire in this timestep.
   After the edge, `charge` and `weight` show the state at the end of the timestep, and
   `timestep` has advanced.
3. With `step` low, the network holds its state, so the host can take any number of
   clocks between timesteps.

A synapse whose source index is outside the core (for example 255) is never driven by a
neuron, only by `ext_spike`.

## Verification

Every testbench checks its results itself and ends with a line
`TB_RESULT checks=N failures=M`. Run one with plain Verilator, for example:

    verilator --binary --timing --assert -Wno-fatal -y rtl rtl/ravens_pkg.sv tb/tb_ravens_top.sv \
              --top-module tb_ravens_top -o sim && obj_dir/sim

| testbench | what it checks |
|---|---|
| `tb_ravens_top` | default build: all non-plastic example networks of the specification (integrate-and-fire, firing every step, leak, clamping, both refractory periods), every timestep's fire pattern and every charge against the published tables, and the specification's worked STDP example with the default table. Counts that each mechanism occurred. |
| `tb_ravens_stdp_examples` | the five STDP example networks, on four instances with the tables `[1]`, `[1,2]`, `[1,2,-1]`, `[1,1,2,-2,-1]`, against the published tables, including saturation at 7 and spikes in flight |
| `tb_ravens_ncore` | 120 random networks of 50 timesteps against an independent timestamp-based model of the whole core: fire bits, charges and all weights in every timestep |
| `tb_ravens_neuron` | random settings and inputs against a timestamp-based neuron model |
| `tb_ravens_synapse` | delays, spikes in flight, STDP updates and saturation against a queue-based model |
| `tb_ravens_stdp` | all input combinations of the lookup for two tables |
| `tb_ravens_dendrite` | random port sums with and without injection, and the extreme sums |

The examples drive their input of 16 as charge injection. The specification describes
that input as an external synapse of weight 16, a weight the 4-bit weight range cannot
hold.

## Where this design interprets or departs from the specification

* Timing organisation, the crossbar, the settings interface, the reset behaviour and
  every size not printed in the specification are this design's choices.
* The depression time reference is the threshold crossing, as the examples require (see
  STDP).
* The clamp to the resting potential is shown one timestep late in `charge`, as in the
  specification's table.
* On firing, the potential goes to the refractory resting potential as soon as a relative
  refractory period is configured. The specification's table shows this, while its text
  places the reset at the start of the relative period.
* A neuron cannot fire during its absolute refractory period; this only matters if a
  resting potential is set above the threshold.
* The specification says that on entering standard operation the neuron is set to the
  standard resting potential "if its threshold is less than" it. This design reads
  "threshold" as the potential. That matches the clamp rule stated right after it and
  the example tables.
* A synapse is not depressed while its post-neuron has never crossed its threshold since
  `clear`, because there is then no time *x* for the index. The specification does not
  cover this case.
* Potentials and weights saturate. The specification gives only the upper weight bound.
* STDP is switched on and off as a whole by `stdp_en`.
* Some sentences of the specification's example text disagree with its own tables (a
  threshold of 2 vs 3 in the absolute-refractory example, a charge of 4 vs 6 in the
  two-entry STDP example). The RTL matches the tables.
* Only one nCore is built. The specification mentions multiple nCores but not how they
  communicate.
