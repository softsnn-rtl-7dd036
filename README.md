# Bound-and-Protect SNN compute engine

A spiking neural network (SNN) accelerator keeps its synaptic weights in
small registers spread over a crossbar, and its neurons are little state
machines. Particle strikes flip bits in both. Two kinds of upset do most of
the damage to classification accuracy:

* a flipped high-order weight bit makes a weight much *larger* than any
  weight the trained network has, and the neuron behind it fires far too
  often and dominates the vote;
* a neuron whose membrane reset stops working sits above threshold for
  good and emits a spike every cycle (a burst).

Re-running every inference three times and voting fixes this, but costs
three times the latency and energy. This design instead adds two small,
always-on circuits to the compute engine, together called *Bound-and-Protect*
(BnP):

1. **Weight bounding**, in every synapse: a weight at or above a threshold
   `wgh_th` is replaced, on its way to the adder, by a default value
   `wgh_def`. The threshold is the largest weight of the fault-free trained
   network, so clean weights are never changed in a harmful way and
   corrupted, hyper-active weights are.
2. **Neuron protection**, in every neuron: with a working reset, the
   comparison `Vmem >= Vth` is true for exactly one cycle per spike. If it
   is true in two consecutive cycles the reset has failed, and the spike
   output is forced to 0.

Neither circuit stalls or reorders anything; the dataflow of the engine is
unchanged. In silicon the added registers and gates are meant to be
radiation-hardened by process means (larger transistors, insulating
substrate), so they can be trusted to correct the unhardened logic around
them; the RTL models only their logic.

## Engine organisation

`softsnn_engine` is an `M x N` crossbar (default 256 x 256, 8-bit weights)
feeding `N` leaky integrate-and-fire (LIF) neurons, one per column.

```
 spike_in[r] ──► spike_skew (delay r) ──► row r
                                           │
   row 0:  [w00]─bound─(spike?)─► + ─►reg ─┐   ... one synapse per column
   row 1:  [w10]─bound─(spike?)─► + ◄──────┘
            ...                   │
   row M-1:                      reg ──► lif_neuron ──► out_spike[c]
                 bnp_bound_regs: wgh_th, wgh_def (one pair, shared)
```

Each synapse (`bnp_synapse`) holds its weight in a register, bounds it,
gates it with its row's input spike, adds it to the partial sum coming down
the column and registers the result. A column is therefore a chain of `M`
adder/register stages, and each neuron has a single input: the column sum.

Because every stage is registered, the sum belonging to one input spike
vector reaches row `r` after `r` cycles. `spike_skew` delays input spike `r`
by `r` cycles so that each row adds the spike of the right time step. With
it a new spike vector (one SNN time step) enters every cycle:

| cycle | event |
|-------|-------|
| t     | spike vector applied to `spike_in` |
| t+M   | column sums complete in the last row's registers; neurons integrate at the end of this cycle |
| t+M+1 | any resulting spike is on `out_spike` |

The protection and bounding logic add no cycles.

### Weight bounding (`bnp_synapse`, `bnp_bound_regs`)

```
wgh_b = (wgh >= wgh_th) ? wgh_def : wgh
```

One comparator and one 2:1 multiplexer per synapse; one shared register
pair per engine. Three variants differ only in `wgh_def`:

| variant | `wgh_def` | hardware |
|---------|-----------|----------|
| BnP1 | 0 | `wgh_th` register only (`BNP = BNP1`) |
| BnP2 | largest clean weight | `wgh_th` and `wgh_def` registers |
| BnP3 | most frequent clean weight | same as BnP2 (default build) |

BnP2 and BnP3 are the same circuit with a different value loaded into
`wgh_def`. BnP3 is the default because its replacement value can be tuned
to any weight distribution.

### LIF neuron and burst protection (`lif_neuron`)

The neuron has registers `Vmem`, `Vth`, `Vreset`, `Vleak` (stored negated),
a 3-bit refractory counter `T_ref` and a one-bit `spike` register. Each
cycle:

* if the column sum is non-zero, `Vmem += sum` (increase);
* otherwise `Vmem -= leak`, floored at 0 (leak);
* if `Vmem >= Vth`, `Vmem` takes `Vreset` instead (reset) and `spike` is set;
* on the cycle after a spike, `T_ref` is loaded with 5 and counts down;
  `out_spike` is `spike` while `T_ref == 0` and 0 otherwise.

The protection is one AND gate and one multiplexer at the output:
`protect = (Vmem >= Vth) & spike`. `spike` holds last cycle's comparison,
so `protect` is exactly "the comparison was true in this cycle and the one
before", and it forces `out_spike` to 0. A healthy neuron never trips it,
since a successful reset always brings `Vmem` below `Vth` the cycle after
a crossing (as long as `Vreset < Vth`). A neuron with a dead reset is
silenced after its first crossing, and the rest of the network classifies
without it. The three other neuron failures (no increase, no leak, no
spike) only make a neuron quieter or slower and are left alone.

`protect` is also brought out per neuron, so a controller can see which
neurons have been disabled.

## Soft-error injection ports

To let a testbench reproduce the fault model, the RTL carries hooks that a
chip ties to 0:

* `flip_vld/flip_row/flip_col/flip_mask` XOR a mask into one weight
  register. Like a real upset the flip stays until the weight is rewritten.
* `nf_vld/nf_idx/nf_op` put one neuron into one of four faulty modes
  (`nfault_e`): no increase, no leak, no reset, no spike generation. The
  mode is sticky until the next parameter load (`p_ld`). "No reset" also
  disables the refractory counter, because in this neuron the counter is
  part of the reset logic; that is what makes the neuron burst.

## Interfaces

| port group | use |
|------------|-----|
| `bnd_ld, bnd_th, bnd_def` | load `wgh_th`, `wgh_def` |
| `p_ld, p_set{vth,vreset,vleak}` | broadcast one parameter set to all neurons; also sets `Vmem = Vreset`, clears `T_ref`, `spike` and faults |
| `w_ld, w_row, w_data[N]` | write one crossbar row of `N` weights per cycle |
| `spike_in[M]` | one input spike vector per cycle |
| `out_spike[N]`, `protect[N]` | output spikes; per-neuron protection flag |
| fault hooks | see above |

All state resets asynchronously on `rst_n` low: weights and sums to 0,
`wgh_th` to all ones (nothing bounded), `Vth` to all ones (no firing).

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `M`, `N` (crossbar rows, neurons) | 256, 256 | paper |
| `W` weight bits | 8 | paper |
| `T_REF` refractory cycles | 5 | paper |
| `BNP` variant | `BNP3` | choice |
| partial-sum width | `W + log2(M)` = 16 | choice (no overflow possible) |
| `VMEM_W` membrane width | 20 | choice |
| `BOUND`, `PROTECT` | 1, 1 | set to 0 to build the unprotected baseline |

## What is this design's own

The circuits of the synapse, of the neuron and of both BnP additions follow
the published block diagrams. The following are choices made here because
no source fixes them:

* the input skew line and the one-time-step-per-cycle schedule;
* the load ports for weights, neuron parameters and bounding registers;
* the widths of partial sums, `Vmem` and `T_ref`, and all reset values;
* the operand order of the leak comparator, taken so the leak stops at 0;
* the fault-injection hooks and the choice that a dead reset also
  disables the refractory counter.

## Not included

The surrounding accelerator (off-chip DRAM, weight buffer, neuron buffer,
controller and the STDP learning unit) is not part of this RTL; its
traffic arrives on the load ports. Networks larger than the crossbar
(784 inputs by 400 to 3600 neurons for 28x28-pixel image classification)
need to be tiled over the engine, eight or more passes; no tiling
controller is provided, and the engine processes one 256 x 256 layer slice
at a time.

## Verification

Each module has a self-checking testbench in `tb/` that compares against an
independent reference model and prints
`TB_RESULT checks=<n> failures=<n>`:

* `tb_bnp_bound_regs`: loads and holds, BnP1 and BnP3 builds.
* `tb_bnp_synapse`: random loads, bit flips, bounding (including the
  `wgh == wgh_th` and `wgh_th - 1` boundary), spike gating, partial sum.
* `tb_lif_neuron`: cycle-by-cycle match with a model under random input,
  parameter loads and injected faults; refractory spacing; a dead reset
  bursts without protection and is silent with it.
* `tb_spike_skew`: row `r` delayed by exactly `r` cycles.
* `tb_softsnn_engine` (16 x 8) and `tb_softsnn_engine_64` (64 x 64):
  whole engine, every output spike of every cycle against a model of the
  crossbar and neurons, through a clean run, a run after weight bit flips
  and a run with one neuron in each fault mode. Each fails if bounding,
  burst protection, the refractory period or any fault mode never
  occurred.

The 256 x 256 default passes lint and elaboration but was not simulated:
its 65,536 synapse instances make the C++ model too slow to build for a
quick run. 64 x 64 is the largest size simulated.

Running a test with Verilator, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/softsnn_pkg.sv tb/tb_softsnn_engine.sv --top-module tb_softsnn_engine
./obj_dir/Vtb_softsnn_engine
```
