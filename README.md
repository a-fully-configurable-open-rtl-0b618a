# QUANTISENC: a configurable quantized spiking neural core in SystemVerilog

QUANTISENC is a digital core that runs a feed-forward spiking neural network (SNN)
built from leaky integrate-and-fire (LIF) neurons. The core is configurable in two ways:

- **At build time** (parameters): the number of layers, the neurons per layer, how
  each layer is connected to the one before it, and the fixed-point format of every
  number in the datapath.
- **At run time** (registers written by a host): the synaptic weights and the
  neuron dynamics of each layer. These are the growth and decay rates, the
  threshold, the reset behaviour and the refractory period.

Each layer owns its synaptic memory and its own arithmetic, so the layers work in
parallel. While layer 2 integrates the spikes that layer 1 produced at time step
*t*, layer 1 is already working on step *t+1*. A host streams one spike vector per
time step into the core. It reads back the output spikes, or a per-class spike
count.

The default build is the 256 × 128 × 10 network in the Q5.3 format (8-bit
numbers with 3 fraction bits). It classifies 16 × 16 spiking MNIST digits. The RTL
follows the published QUANTISENC architecture, an SNN core by other authors. This
README states where the RTL departs from it.

```
            cfg_in ──► decoder ──► per-layer neuron parameters
            wt_in  ──────────────┬──────────────┬──────────────┐
                                 ▼              ▼              ▼
spk_in ─► [reg] ─► layer 0 ──spk──► layer 1 ──spk──► layer 2 ──► spk_out ─► spike_counter ─► spk_count
                  (256, 1:1)       (128, all)       (10, all)
                  each layer: syn_mem + connect + addr_gen + N × lif_neuron
```

## 1. Numbers: the Qn.q format

Every value in the datapath is a `W = QN + QQ`-bit two's-complement number with
`QQ` fraction bits, so its real value is `raw / 2^QQ`. This covers weights,
membrane potentials, activations, rates and thresholds. The format comes from the
package defaults `QN_DEF = 5` and `QQ_DEF = 3`. Every module that does arithmetic
takes `QN` and `QQ` as parameters.

- **Multiplication** (`fxp_mul`) forms the exact `2W`-bit product `c`. It keeps
  bits `c[QN+2·QQ-1 : QQ]`.
  - The low `QQ` bits are truncated, which rounds toward −∞.
  - The high `QN` bits are dropped, so an overflowing product wraps around. It does
    not saturate.
  - The `ovf` output is set when the dropped bits are not a sign extension.
- **Addition and subtraction** saturate at the format's range in this design: the
  activation sum, the membrane update and the reset subtractions. The published
  architecture does not say what happens on overflow there. Saturation was chosen
  so that a large input cannot flip a neuron's sign.

Example in Q5.3: 0.75 × 2.5 has raw values 6 × 20 = 120. Shifting right by 3 gives
raw 15, which is 1.875 (the exact answer is 1.875). 12.0 × 4.0 has raw values
96 × 32 = 3072, and 3072 >> 3 = 384. Its low 8 bits are 128, which reads as −16.0:
the product wrapped, and `ovf` is set.

## 2. The neuron

One `lif_neuron` is four parts in a row. The parts have the names of the original
block diagram.

| part | clock | what it does |
|---|---|---|
| `act_gen` | mem_clk | adds the weight of every spiking input into `act` (current-based synapse) |
| `vmem_dyn` | — | `U + growth_rate·act − decay_rate·U`: one forward-Euler step of the LIF equation |
| `vmem_sel` + `reset_gen` | spk_clk | chooses the next membrane value and runs the refractory counter |
| `spk_gen` | spk_clk | membrane register, threshold comparator, spike register |

On every spk_clk edge (one time step) the membrane register `U` loads one of
three values:

1. **Held**, `U`, while the neuron is refractory.
2. **Reset**, on the edge where the neuron fires. The run-time `reset_mechanism`
   selects the value:

   | code | name | new U |
   |---|---|---|
   | 0 | constant | `V_reset` |
   | 1 | zero | `0` |
   | 2 | subtraction | `U − V_th` |
   | 3 | default (decay) | `U − decay_rate·U` |

3. **Integrated**, `U + growth_rate·act − decay_rate·U`, otherwise.

The neuron **fires** at an edge when `U ≥ V_th` and it is not refractory. The
original block diagram labels its comparator "=", but the description says the
neuron fires when U crosses the threshold. The RTL uses ≥.

When the neuron fires with `refractory_en` set, the refractory counter loads
`refractory_period` (P). It then counts down by one per edge. While it is non-zero
the membrane is held and firing is blocked. So a neuron fires at most once every
P + 1 edges.

**Timing.** The reset is applied on the same edge that registers the spike. This is
this design's choice: the original diagram takes the reset from the spike
register's output, which would give one extra step of integration before the reset.
The activation read at edge *t+1* is the weighted sum of the input spikes held
during period *t*. So an input spike can make a neuron fire two edges later at the
earliest.

## 3. Two clocks and one time step

The core has two clocks. The relation between them is the least obvious part of the
design.

- **`spk_clk`** is the time step. Spikes, membrane potentials and refractory
  counters change only on its rising edge.
- **`mem_clk`** is much faster. Between two spk_clk edges, each layer reads its
  weight memory once per mem_clk cycle and accumulates one connection per cycle.
  This *sweep* covers all `DEPTH` connections of every neuron in parallel.

What happens in one layer:

```
spk_clk  ─┐___________________________┌───────────  (edge t+1 samples act)
          ^ edge t: pre-synaptic spikes of step t are now stable
step_tog  toggles at edge t (spk_clk domain)
mem_clk   sync (2 flops) → addr 0,1,…,DEPTH-1 → read data one cycle later → act_reg
          |<──────── DEPTH + 4 cycles ───────>| act stable until edge t+1
```

Each spk_clk edge toggles a one-bit flag. The layer's `addr_gen` synchronises the
flag into mem_clk with two flip-flops and, on each change, starts a sweep. The
synaptic memory has a one-cycle synchronous read, so it maps onto block RAM. Each
neuron's `act_gen` adds the weight of the connection being read when the routed
input spike is set. On the last connection the sum is copied into the activation
register, which spk_clk samples at the next edge.

**Rule: one spk_clk period must last at least `DEPTH + 6` mem_clk cycles.** `DEPTH`
is the longest sweep in the core: 256 in the default build, so 262 cycles. The
default-size testbenches use 270. This is a multi-cycle relation between the two clocks, so
static timing must treat the spk_clk-domain registers as stable during the sweep.
An assertion in `addr_gen` (`a_no_overrun`) reports a violation in simulation.

**Idle steps.** When a layer receives no spike at all in a step, `addr_gen` skips the
sweep and the activation is zero. This stands in for the clock gating of the
original design, which stops the core when there is no input. It uses an enable
instead of a gated clock.

## 4. Layers, synaptic memory and connection modes

An `snn_layer` of `N` neurons with `N_PRE` inputs holds a `syn_mem` of `N` columns
by `DEPTH` rows. Row `k` holds the weight of the *k*-th connection of every neuron,
so one read serves all neurons at once. The `connect` unit gives neuron *j* the
spike of its *k*-th pre-synaptic neuron *i*. The connection mode is a build-time
parameter per layer:

| mode | DEPTH | connection *k* of neuron *j* |
|---|---|---|
| `CONN_FULL` (all-to-all) | `N_PRE` | *i = k* |
| `CONN_ONE2ONE` | 1 | *i = j* |
| `CONN_GAUSS` (receptive field \|i−j\| ≤ 1) | 3 | *i = j−1, j, j+1* for *k = 0, 1, 2*; an *i* outside the previous layer contributes nothing |

**Polarity.** A weight is excitatory or inhibitory according to its sign. There is
no separate polarity bit.

**Memory layout.** The mapping of *k* to *i* is this design's choice. It defines how a
host lays out the weights of a trained network.

**Width of the Gaussian mode.** The Gaussian mode is one-dimensional, three wide. The
published evaluation also mentions 3 × 3 and 5 × 5 convolution filters. Their
two-dimensional layout is not described, so they are not provided.

**Layer 0.** Layer 0 is one-to-one from the `N_IN` spike inputs. Its 256 weights act
as per-input gains. The published neuron count (394 = 256 + 128 + 10) implies that
the input neurons are LIF neurons. Its synapse count (34,048 = 256·128 + 128·10)
does not include their input weights.

## 5. Pipelining and latency

Every layer registers its spikes, and the next layer needs a full period to sweep
them. Each layer therefore adds two spk_clk edges. An input registered at edge *t*
can affect the output spikes at edge *t + 2K + 1* at the earliest: 7 edges for
K = 3.

The layers are independent, so a new input can start on every step. Successive
inputs (for example, successive images) can be streamed back-to-back. To keep them
apart, the host either inserts a few empty steps between them, or reprograms the
registers and clears the spike counter between them. The end-to-end testbenches do
this: each image runs under a different register setting, followed by empty steps.

## 6. Programming interface

All writes are synchronous to mem_clk, one per cycle, with a `we` strobe. Both
write ports are packed structs from `quantisenc_pkg`.

**Weights** are written through `wt_in` (`wt_wr_t`):

| field | width | meaning |
|---|---|---|
| `layer` | 4 | layer index |
| `neuron` | 12 | post-synaptic neuron *j* |
| `conn` | 12 | connection index *k* (section 4) |
| `data` | 32 | weight; the low `W` bits are a Qn.q value |

A write with an index out of range is ignored.

**Neuron parameters** are written through `cfg_in` (`cfg_wr_t`). Each layer has its
own set of parameters. The fields are `layer`, `addr` and `data`.

| addr | register | used bits | reset value |
|---|---|---|---|
| 0 | growth_rate | W (Qn.q) | 0 |
| 1 | decay_rate | W (Qn.q) | 0 |
| 2 | V_th | W (Qn.q) | largest positive value (only a saturated membrane reaches it) |
| 3 | V_reset | W (Qn.q) | 0 |
| 4 | refractory_period | 8 | 0 |
| 5 | refractory_en | 1 | 0 |
| 6 | reset_mechanism | 2 (section 2) | 2, subtraction |

The spk_clk logic reads these registers without synchronisation. Write them, and
the weights, only while no input is being streamed.

**Run time:**

- `spk_in` is sampled at each spk_clk edge.
- `spk_out` is the output layer's spike register.
- `spk_count[c]` counts the output spikes of class *c* (16-bit, saturating) since
  `cnt_clear`, a synchronous clear on spk_clk. The count picks up a spike one edge
  after it appears on `spk_out`.
- The class with the largest count is the result. The host picks it.

`rst_n` is an asynchronous, active-low reset for the registers of both clock domains. The weight memory is not reset and must be loaded after power-up.

## 7. Sizes and parameters

`quantisenc_top` parameters:

| parameter | default | meaning |
|---|---|---|
| `K` | 3 | number of layers (up to 16) |
| `N_IN` | 256 | spike inputs |
| `LAYER_N[K]` | `'{256,128,10}` | neurons per layer (up to 4096) |
| `LAYER_CONN[K]` | `'{CONN_ONE2ONE,CONN_FULL,CONN_FULL}` | connection mode per layer |
| `QN`, `QQ` | 5, 3 | number format |
| `CW` | 16 | spike counter width |

A layer's `DEPTH` follows from its mode: `N_PRE` for all-to-all, 1 for one-to-one,
3 for Gaussian. Its memory holds `N · DEPTH · W` bits.

Networks and their cost at Q5.3 unless noted. Weight counts include layer 0.

| network | build | weights | memory bits | min mem_clk per step |
|---|---|---|---|---|
| MNIST 256×128×10 | default | 34,304 | 274,432 | 262 |
| same in Q9.7 | `QN=9, QQ=7` | 34,304 | 548,864 | 262 |
| wide 256×256×10 | `LAYER_N='{256,256,10}` | 68,352 | 546,816 | 262 |
| deep 256×256×256×10 | `K=4`, four layers | 133,888 | 1,071,104 | 262 |
| spoken digits 700×256×20 | `N_IN=700, LAYER_N='{700,256,20}` | 185,020 | 1,480,160 | 706 |

The default build synthesises to about 15,000 flip-flop bits and 280 kbit of
memory. Each neuron has two multipliers. A 256 × 256 all-to-all layer needs a
262-cycle sweep whatever the number of neurons, because the neurons work in
parallel.

## 8. Where this design departs from the published core

- **Boundary.** The boundary carries spike vectors, one per time step, not
  address-event (AER) words. The published core packs spikes as AER, but its word
  format and handshake are not given.
- **Host side.** The host processor, its bus, and the software that trains networks
  and writes the weights are not part of this RTL. The testbenches play the host.
- **Idle steps.** Idle steps are skipped through an enable, not a gated clock.
- **Comparator.** Firing uses ≥ (section 2).
- **Reset timing.** The reset lands on the spike's edge (section 2).
- **Saturation.** Adders saturate; products wrap, as in the published multiplier.
- **Own choices.** The following are choices of this design:
  - one address generator per layer instead of one per neuron (all neurons read
    the same row);
  - the register map and its reset values;
  - the reset-mechanism encoding;
  - the weight memory layout;
  - the spike counter's width;
  - the one-to-one input layer.

## 9. How far it has been checked

Every module has a self-checking testbench in `tb/` that compares it with an
independent behavioural model (`tb_ref_pkg.sv`). The model is written from the
equations above, not from the RTL.

- `tb_fxp_mul` tries all 65,536 operand pairs.
- The arithmetic blocks get tens of thousands of random vectors.
- The clocked blocks are checked cycle by cycle.

The core-level testbenches share one body, `tb_core_body.svh`. Each one:

- loads random weights with mixed signs;
- streams several random inputs back-to-back under six different register
  settings;
- compares every neuron's membrane and spike with the model after every time step;
- compares the output counts after every input.

Each core-level test also counts how often every mechanism actually occurred and
fails if one never did. The mechanisms are:

- the four resets;
- refractory blocking;
- multiplier overflow;
- activation saturation;
- inhibitory weights;
- skipped idle steps;
- Gaussian edge neurons;
- layers busy on different inputs at once;
- reconfiguration.

| testbench | configuration |
|---|---|
| `tb_quantisenc_top` | small 8 → 8 → 12 → 12 → 4 core with all three connection modes |
| `tb_quantisenc_full` | the default 256 × 128 × 10 core, no parameter changed |
| `tb_quantisenc_shd` | 700 → 256 → 20, sized for a spoken-digit data set |
| `tb_quantisenc_q97` | the default network in Q9.7 (16-bit values) |
| `tb_quantisenc_deep` | four layers, 256 → 256 → 256 → 256 → 10 |

Not checked: behaviour when the spk_clk period is too short (the assertion only
reports it); gate-level timing; trained weights (the tests use random ones).

## 10. Simulating and changing it

There is one module, package or testbench per file. Any testbench `tb_X` runs with
plain Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps --top-module tb_X \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/quantisenc_pkg.sv tb/tb_ref_pkg.sv tb/tb_X.sv
./obj_dir/Vtb_X
```

Each prints `TB_RESULT checks=<n> failures=<m>`. The full-size core takes a few
seconds of simulation. The simulators are two-state; the testbenches use
`$urandom` for stimulus.

- **Another network.** Set `K`, `N_IN`, `LAYER_N` and `LAYER_CONN` on
  `quantisenc_top`.
- **Another format.** Set `QN` and `QQ`.
- **Number behaviour.** Change `sat_add` in `quantisenc_pkg.sv` and `fxp_mul.sv`;
  the model in `tb_ref_pkg.sv` must change with them.
- **New connection mode.** Add a case to `conn_t`, `conn_depth` and `connect.sv`,
  and to `pre_index` in the model.
