# A spiking-neural-network compute engine that keeps working with permanent faults

A digital SNN accelerator stores its synaptic weights in small registers spread over a
crossbar of synapses, with one leaky integrate-and-fire (LIF) neuron under each column. After
fabrication, or after years of wear, some of those register cells are stuck at 0 or at 1, and
some neurons have a broken adder, subtractor, comparator or output multiplexer. Retraining the
network for every chip's fault map is expensive. This design instead changes *how* the network is
placed on the faulty chip:

* **Weights are stored rotated.** If cell 5 of a weight register is stuck, the 8-bit weight is
  rotated before it is written, so that the stuck cell holds an unimportant low-order bit and the
  high-order bits sit on good cells. A small barrel shifter per column rotates the word back
  before it is added.
* **Columns with a harmful neuron are not used.** A neuron whose reset is broken fires on every
  time step forever and dominates the classification, so its column is switched off. Neurons that
  merely fire less (broken increase, broken output) or do not leak can stay in use.

The hardware added for this is one *hardware enhancement block* (HEB) per column and one
*enhancement control unit* (ECU) that stores a 3-bit rotation for every synapse. Everything else,
including the choice of rotations and of columns, is computed off-chip from the fault map and
written into the engine as configuration.

This RTL implements the compute engine with those enhancements, at the published size of 256 input
rows × 256 neurons, 8-bit weights and 32-bit accumulation registers, together with a model of the
permanent faults so that the mitigation can be exercised in simulation.

## Block diagram

```
              spikes_in[M] ──► input spike register (latched at start)
                                    │ spike[k]
   ┌────────────────────────────────┼───────────────────── column c (one of N) ─┐
   │  synapse k:  weight reg ─► (spike[k] ? w : 0) ─► gated_w[k] ──┐            │
   │              (stuck-at masks applied on read)                 ▼            │
   │                                                    HEB: gated_w[sel]       │
   │                                                    3-stage rotate by       │
   │                                                    shuffle (1, 2, 4)       │
   │              psum[k] <= psum[k-1] + heb_w  ◄──────── heb_w                 │
   │              (only in the cycle sel == k)                                  │
   │                      psum[M-1] = column sum                                │
   │                              ▼                                             │
   │                        LIF neuron ──► spikes_out[c] (0 if column disabled) │
   └────────────────────────────────────────────────────────────────────────────┘
   ECU: shuffle registers [M][N] x 3 bit, column-enable mask, row sequencer
        ─► sel (per column), shuffle of the selected synapse (per column), acc_en, step
```

| file | module | role |
|---|---|---|
| `rtl/rescue_pkg.sv` | package | widths, neuron-fault and configuration-target encodings |
| `rtl/synapse_column.sv` | `synapse_column` | M weight registers, spike gating, adder chain with 32-bit registers, stuck-at fault masks |
| `rtl/heb.sv` | `heb` | M-to-1 selector and 8-bit rotate-back barrel shifter |
| `rtl/lif_neuron.sv` | `lif_neuron` | LIF neuron with refractory counter and four fault models |
| `rtl/ecu.sv` | `ecu` | shuffle registers, column enables, time-step sequencer |
| `rtl/compute_engine.sv` | `compute_engine` | top: N columns, ECU, input register, configuration decode |

## Rotated weights and the barrel shifter

Number the cells of a weight register 7 (left) to 0 (right). A weight `w` is stored as
`ror(w, s)`, a rotation by `s` places towards the LSB, so cell `p` holds weight bit
`(p + s) mod 8`. The HEB applies the inverse, `rol(stored, s)`, with three layers of eight 2:1
multiplexers: layer 0 rotates by 1 when `shuffle[0]` is set, layer 1 by 2 when `shuffle[1]` is
set, layer 2 by 4 when `shuffle[2]` is set. A rotation of 0 is the unmodified engine.

How `s` is chosen is left to software. The testbenches use this rule (`fam_shift` in
`tb/fam_pkg.sv`). Look at the fault-free cells as a circle. Find the longest run of them that
starts just below a faulty cell and goes towards the LSB, wrapping from cell 0 to cell 7. Put
weight bit 7 on the first cell of that run. Examples, with the cells listed from 7 to 0:

| faulty cells | s | stored order of weight bits (cells 7..0) | bits landing on faulty cells |
|---|---|---|---|
| 5 | 3 | 2 1 0 7 6 5 4 3 | 0 |
| 6, 4 | 4 | 3 2 1 0 7 6 5 4 | 2, 0 |
| 5, 2 | 6 | 5 4 3 2 1 0 7 6 | 3, 0 |
| 1 | 7 | 6 5 4 3 2 1 0 7 | 0 |

The rule is tuned for at most two faulty cells per register; with more, the rotation still
helps but cannot protect every high bit.

## One time step, cycle by cycle

The HEB is shared by all synapses of its column, so only one synapse per column can take a
weight in each cycle. A time step is therefore a sweep down the rows:

| cycle after `start` | what happens |
|---|---|
| 0 (edge that samples `start`) | `spikes_in` latched, ECU leaves idle |
| 1 … M | `acc_en = 1`, `sel = k = 0 … M-1` on every column. Each HEB rotates the gated weight of row k by that synapse's shuffle, and synapse k stores `psum[k-1] + heb_w`. Row 0 starts from 0. |
| M + 1 | `step = 1`: every enabled neuron integrates its column sum `psum[M-1]` |
| M + 2 | `done = 1`; `spikes_out` and `vmem_out` hold the new state |

`start` to `done` takes M + 2 cycles, 258 at the default size. `start` must not be raised while
`busy` is high, and configuration writes are only allowed while idle. Both rules are assertions.

Because the partial sum moves down one synapse per cycle and `sel` moves with it, the adder
chain works as a wavefront. Registers of rows that are not selected keep their value.

## The neuron and its faults

Each neuron updates once per time step, using the column sum `wgh`:

* `wgh != 0` (some input spiked): `Vmem ← Vmem + wgh` (saturating).
* `wgh == 0`: `Vmem ← Vmem − Vleak` if `Vmem > Vleak`, else 0.
* If the *registered* `Vmem ≥ Vth`, `Vmem ← Vreset` and the spike register is set instead.
  A crossing is therefore reported one step later.
* A set spike register loads the refractory counter with 5, and the counter then counts down.
  While it is non-zero the output spike is masked. Integration itself continues.

`Vth`, `Vreset` and `Vleak` are registers in every neuron. They are loaded with configuration
target `CFG_NPARAM`, which also clears the neuron's state.

| fault (`nfault_e`) | modelled behaviour | kept by the mapping |
|---|---|---|
| `NF_VMEM_INC` | the increase adder passes `Vmem` unchanged, so the neuron never fires | FAM3 keeps it |
| `NF_VMEM_LEAK` | the leak subtractor passes `Vmem` unchanged (integrate-and-fire) | FAM3 keeps it |
| `NF_VMEM_RESET` | never reset; from its first threshold crossing on, it fires every step | always disabled |
| `NF_SPIKE_GEN` | output multiplexer stuck at 0; `Vmem` still resets | FAM3 keeps it |

## Mapping strategies

All three strategies are pure configuration:

| strategy | weights rotated | columns disabled |
|---|---|---|
| none (baseline) | no (`shuffle = 0`) | none |
| FAM1 | no | every column whose neuron has any fault |
| FAM2 | yes | every column whose neuron has any fault |
| FAM3 | yes | only columns whose neuron has a faulty reset |

A disabled column does not step its neuron, and its `spikes_out` bit is 0. Which logical neurons
go to which physical columns, and how many passes a network needs, is up to the software.

## Configuration port

One write per cycle: `cfg_we`, `cfg_target`, the row `cfg_row`, a column mask
`cfg_col_mask[N]` and one byte per column `cfg_data[N]`.

| `cfg_target` | row used | per-column data |
|---|---|---|
| `CFG_WEIGHT` | yes | stored (already rotated) 8-bit weight |
| `CFG_SHUFFLE` | yes | rotation `s` in bits 2:0 |
| `CFG_SA0` / `CFG_SA1` | yes | stuck-at-0 / stuck-at-1 cell mask (fault model) |
| `CFG_NFAULT` | no | neuron fault type in bits 2:0 (fault model) |
| `CFG_COLEN` | no | bit 0 = column in use |
| `CFG_NPARAM` | no | none; loads the `vth`, `vreset` and `vleak` inputs into the masked neurons |

After reset every register is 0 and all columns are enabled. The stuck-at masks and neuron fault
types stand in for physical defects. On real silicon these registers do not exist, and a
fault-free part behaves as if they were 0.

## Where this RTL departs from, or adds to, the published description

Following the published design:

* the per-synapse weight register, spike gating multiplexer, adder and 32-bit register;
* one HEB per column, with a selector and a three-layer 2:1-multiplexer barrel shifter;
* an ECU with 3-bit registers for all 256 × 256 synapses and a `sel` per column;
* the LIF datapath with its zero detector, floored leak, `≥` threshold and refractory value 5;
* the four neuron fault behaviours and stuck-at cells;
* the sizes: 256 × 256, 8-bit weights, 32-bit sums.

Choices made here where the description is silent:

* **Rotation direction.** The HEB rotates towards the MSB by `shuffle`, which matches the shuffled
  bit orders shown for the examples above.
* **Row sweep and latency.** The sweep runs one row per cycle, followed by one neuron step, for
  M + 2 cycles per time step. No schedule or latency is published, so throughput figures cannot
  be compared cycle for cycle.
* **Faulty-reset model.** The description is "spikes continuously once Vmem reaches Vth".
* **Unsigned 32-bit `Vmem`, with a saturating increase.**
* **Interfaces and bookkeeping:** the configuration port, the column-enable register, the reset
  values, and the fault-model registers.

Not in this RTL:

* the rest of the accelerator (spike scheduler, neuron and weight buffers, STDP learning unit,
  global control, DRAM);
* lateral inhibition between neurons;
* the software that derives rotations and column enables from a fault map.

Networks larger than 256 inputs or 256 neurons do not fit in one pass. The published benchmarks
use fully connected networks of 400 to 3600 neurons on 28 × 28 images (784 inputs). The engine
has no way to carry a partial column sum from one 256-row pass to the next, so those networks
cannot run on it as built.

## Simulating

All testbenches are self-checking and print `TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/rescue_pkg.sv tb/fam_pkg.sv tb/tb_compute_engine.sv --top-module tb_compute_engine
./obj_dir/Vtb_compute_engine
```

| testbench | what it covers |
|---|---|
| `tb_heb` | all rotations, random words, the four rotation examples above |
| `tb_synapse_column` | gated weights and column sums with random weights, stuck-at masks and spikes (16 rows) |
| `tb_lif_neuron` | 2400 steps over the fault-free and four faulty neurons against a reference model |
| `tb_ecu` | sel sweep, per-column shuffle read-out, column enables, M + 2 latency (8 × 5) |
| `tb_compute_engine` | end to end at 16 × 8: random fault map, four mappings (baseline, FAM1, FAM2, FAM3), 30 steps each; every mechanism counted |
| `tb_compute_engine_full` | the same at the default 256 × 256 size, 12 steps per mapping (a few seconds) |

`tb/fam_pkg.sv` holds the reference: the rotation rule, `rol`/`ror`, the weight a faulty register
returns, and a one-step LIF model. The top-level testbenches compare every column's `Vmem` and
spike after every time step with that model. They also fail if any of these never occurs: a
rotated weight, a weight changed by a stuck-at-0 cell and by a stuck-at-1 cell, a rotation that
brings a faulty weight closer to its true value, a disabled column, a leak, a reset, a refractory
mask, a spike from the faulty-reset neuron, and each of the four mappings.
