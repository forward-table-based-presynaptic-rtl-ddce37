# Forward-table STDP core

Spike-timing-dependent plasticity (STDP) changes a synapse according to the time
between the spike of its input (pre-synaptic) and the spike of its neuron
(post-synaptic). If the input fired first, the pair is *causal* and the weight
grows. If the neuron fired first, the pair is *acausal* and the weight shrinks.
A compact digital core stores its synapses as a forward table: for each input,
the list of neurons it reaches. The classic rule needs the reverse lookup as
well: when a neuron fires, it must find every input connected to it to apply the
causal updates at once. A forward table cannot answer that question without a
full scan.

This design never looks up the reverse direction. The causal update is
**deferred**. Each input keeps an STDP timer. When that timer runs out, or when
the input spikes again before it runs out, the core sweeps the input's forward
row. During the sweep it applies the causal updates for every neuron that has
fired since the input's previous spike. The acausal updates are applied in the
same forward sweep, when a new input spike arrives. Every update therefore
starts from an input event and walks one forward row.

The RTL implements the complete core as one block: a 64-input × 64-neuron
index-based core with a run-length-encoded weight table, 9-bit weights, 20-tick
STDP windows and an anti-symmetric ramp kernel with a peak of ±1. The neuron
model is outside the core. The core delivers synaptic events to it and takes
back its spikes.

## Block structure

```
 incoming pre-synaptic events                 outgoing post-synaptic events
            |                                              ^
            v                                              |
  +-------------------+    post timers     +--------------------+
  | pre_syn_processor | <----------------- | post_syn_processor |
  |  input timers     |                    |  neuron timers     |
  |  row sweeps       | -- syn events -->  (neuron model, outside)
  |  stdp_update      |                    +--------------------+
  +-------------------+                              |
     |            |                                  v
     v            v                           +---------------+
 +---------------+ +--------------+           | routing_table |
 | pointer_table | | weight_table |           +---------------+
 +---------------+ +--------------+
```

`stdp_core` holds the tables, both processors, the per-tick sequencing and a
configuration port. `stdp_timer_bank` is used twice: once for the 64 input
timers and once for the 64 neuron timers.

## The tables

* **Pointer table** (`pointer_table`): one 12-bit entry per input. Each entry is
  the address in the weight table where that input's row starts. Rows can
  therefore have any length.
* **Weight table** (`weight_table`): 4096 entries of 10 bits, `{flag, payload}`.
  * Flag `1`: a synapse to the next neuron. The payload is its signed 9-bit
    weight.
  * Flag `0`: a run. The payload is the number of consecutive neurons this
    input does *not* reach. The sweep skips them without reading anything else.
  * A run of length `0` ends the row early. A row also ends once all 64 neurons
    have been covered, so a row that ends on a synapse needs no marker.
* **Routing table** (`routing_table`): one 16-bit destination word per neuron.
  It is sent out with each of that neuron's spikes.

Each entry covers at least one neuron, so no row is longer than 64 entries.
4096 entries are therefore enough for any connectivity of a 64 × 64 core, fully
connected included.

Example row for an input that reaches neurons 0, 3, 4 and 63:

| address  | entry           | meaning             |
|----------|-----------------|---------------------|
| p        | `1` w(0)        | neuron 0            |
| p+1      | `0` 2           | skip neurons 1, 2   |
| p+2      | `1` w(3)        | neuron 3            |
| p+3      | `1` w(4)        | neuron 4            |
| p+4      | `0` 58          | skip neurons 5..62  |
| p+5      | `1` w(63)       | neuron 63, row ends |

## Timers instead of spike times

Each input and each neuron has one timer of `ceil(log2(T_STDP+1))` bits, 5 bits
for a 20-tick window.
* When its owner spikes, the timer is loaded with `T_STDP`.
* On every tick it is decremented until it reaches 0.
* A value `t > 0` means that the owner's **latest** spike was `T_STDP − t` ticks
  ago.

Only the latest spike is remembered, so the rule pairs nearest neighbours. The
tick on which an input timer goes from 1 to 0 is the end of that spike's
window. The timer bank flags it in `expired`.

All pairing decisions follow from the timer values seen during a sweep. Let
`p` be the input's timer and `q` the neuron's timer, both already decremented
for the current tick. A larger value means a more recent spike.

| situation                                | pair found when | time between spikes | update            |
|------------------------------------------|-----------------|---------------------|-------------------|
| new input spike (acausal)                | `q > 0`         | `T − q`             | `w −= K(T − q)`   |
| old input spike, neuron fired after it   | `q > p`         | `q − p`             | `w += K(q − p)`   |

Here `K(dt) = round(DW_MAX · (T − dt) / T)`, the magnitude of the ramp kernel.
With `DW_MAX = 1` and `T = 20` it is 1 for `dt ≤ 10` and 0 beyond.

An input is swept on a tick in one of three cases:

1. **New spike, timer already 0.** Acausal updates only.
2. **New spike, timer still running.** For each synapse, the causal update of
   the old spike first, then the acausal update of the new spike. The input
   timer is reloaded.
3. **Timer runs out on this tick, no new spike.** Causal updates only. This is
   the deferred causal update. `p` is 0 here, so every neuron with `q > 0`
   fired inside the window.

A new spike arriving on the very tick the old window ends is case 2 with
`p = 0`.

Each weight is saturated to the 9-bit range after each of its two updates.

### Order inside one tick

On each tick the core does the following, in this order:

1. Decrement all timers.
2. Sweep the rows of the inputs that spiked or whose window ended.
3. Load the timers of the neurons that spiked during this tick.

As a result, the sweeps see only neuron spikes from earlier ticks. An input
spike and a neuron spike in the same tick never form a pair, and every pair
found is 1 to `T − 1` ticks apart, on both sides of the kernel.

### What the deferral loses

Suppose a neuron fires twice inside one input window. The second spike reloads
the neuron's timer before the deferred causal sweep runs. Only the later, more
distant pair is then counted. The nearer causal pair, the one classic STDP
would apply, is lost. This happens only when neurons fire again within one STDP
window of their previous spike. The learning test below measures how much
difference it makes. It vanishes when the neurons' refractory period is at
least the window length.

## A time step

Between ticks, the core collects the following in two bitmaps:
* incoming events (`in_valid`/`in_addr`);
* neuron spikes (`post_spike`, a strobe per neuron).

An input that receives several events in one tick is counted once.

A `tick` pulse starts one step:

1. Both timer banks decrement. The two bitmaps become this step's spikes, and
   new events from now on go to the next step.
2. `pre_syn_processor` serves the inputs with work, in index order. A priority
   encoder finds the next one.
   * It reads the input's pointer (2 cycles).
   * It walks the row: each run entry takes 2 cycles (read, decode), and each
     synapse entry takes 3 (read, update, write back).
   * On a new spike it also sends each synapse's old weight to the neurons on
     `syn_valid/syn_post/syn_weight`, one per cycle.
3. When the sweeps are done, `post_syn_processor` loads the timers of this
   step's spiking neurons, all in one cycle. It then sends one outgoing event
   per spike, in index order. Each event takes 3 cycles plus any cycles in
   which `out_ready` is low. The destination comes from the routing table.

`busy` is high from the tick until the last outgoing event has left.

A step takes `2 + Σ(2 + 2·entries + synapses)` cycles for the sweeps, summed
over the inputs served, plus `3·spikes + 1` cycles for the outgoing events. For
a full 64-synapse row that is 194 cycles.

If a tick arrives while `busy`, it is held, and `overrun` pulses. The held step
then runs right after the current one. A third tick arriving before then is
dropped.

In the 10 Hz workload, about 1.3 rows are swept per 1 ms tick on average. In
the worst case all 64 rows are swept in one tick, which takes 12.4k cycles. A
clock above about 13 MHz keeps up with 1 ms ticks in every case.

## Interfaces of `stdp_core`

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset (timers, bitmaps, state; tables are not reset) |
| `tick` | in | one-cycle pulse per time step |
| `busy`, `overrun` | out | step running; a tick came while busy |
| `in_valid`, `in_addr[5:0]` | in | incoming spike on input `in_addr` (always accepted) |
| `syn_valid`, `syn_post[5:0]`, `syn_weight[8:0]` | out | synaptic event for the neuron model (no back-pressure) |
| `post_spike[63:0]` | in | spike strobes from the neuron model |
| `out_valid`, `out_ready`, `out_dest[15:0]`, `out_src[5:0]` | out/in | outgoing spike, valid/ready handshake |
| `cfg_req`, `cfg_we`, `cfg_sel`, `cfg_addr[15:0]`, `cfg_wdata[31:0]` | in | table access; `cfg_sel` is `CFG_PT`, `CFG_WT` or `CFG_RT` |
| `cfg_ack`, `cfg_rdata[31:0]` | out | access done (pulse); read data, valid with the pulse |
| `upd_*`, `row_*` | out | per-synapse and per-row activity strobes, for monitoring |

How the configuration port behaves:
* A request is taken only while no step is running or waiting. Hold `cfg_req`
  until `cfg_ack`; the pulse comes two cycles after the request is taken.
* Weight-table reads return the whole 10-bit entry. This is how learned weights
  are read out.
* The tables have no reset. Load the pointer, weight and routing tables before
  the first tick.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N_IN` | 64 | inputs (axons) |
| `N_POST` | 64 | neurons |
| `W_BITS` | 9 | weight width, two's complement |
| `T_STDP` | 20 | window in ticks, the same for the causal and acausal sides |
| `DW_MAX` | 1 | peak of the ramp kernel |
| `WT_DEPTH` | 4096 | weight-table entries |
| `DEST_W` | 16 | routing-table word |

Four of these values come from the published design: the 64 × 64 size, the
9-bit weights, the 20 ms windows and the ±1 peak. `WT_DEPTH` follows from the
64 × 64 size. `DEST_W` is this design's own choice.

## Choices made where the description leaves freedom

The method fixes the table organisation, the timer semantics and the three
update cases. Everything below is a choice of this implementation:

* **Kernel quantisation.** The ramp peaks at ±1 weight step and is rounded per
  pair, so each pair moves a weight by 0 or 1. A finer ramp would need fraction
  bits in the weights, which the 9-bit format does not have.
* **Weights.** Weights are signed and saturating. A run of length zero ends a
  row.
* **Single sweep.** Case 2 is done in one sweep: on each synapse the causal
  update is applied, then the acausal one. This gives the same weights as two
  separate passes.
* **Same-tick spikes.** An input spike and a neuron spike in the same tick form
  no pair (see *Order inside one tick*).
* **Handshakes and routing.** The valid/ready handshake on outgoing events, the
  configuration port, the one-deep tick queue and one destination per neuron
  are all this design's own.
* **Asymmetric windows are not built.** The method allows different causal and
  acausal windows: the timer is loaded with the longer one and the shorter side
  stops counting early. This core supports only equal windows.
* **Not included.**
  * The neuron model. The core exposes `syn_*` and `post_spike` instead.
  * The network between cores. The core exposes `out_*` instead.
  * The software that builds the tables.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_pointer_table`, `tb_routing_table`, `tb_weight_table`: random writes and
  reads against a copy of the contents. The weight-table test also checks that
  a write-back does not disturb the read register.
* `tb_stdp_timer_bank`: random loads and ticks against a model, including the
  expiry flags.
* `tb_stdp_update`: every pair of timer values, both enables, and weights at
  and near the saturation limits. The reference evaluates the kernel in real
  arithmetic.
* `tb_pre_syn_processor`: a small core (8 × 8, window 8, peak 4) with random
  run-length rows. Every weight, every synaptic event and the exact cycle count
  of every step are checked against a model of the three cases.
* `tb_post_syn_processor`: timer reload, outgoing event order and destinations
  under back-pressure, and the cycle count.
* `tb_stdp_core`: the full 64 × 64 core for 600 steps.
  * Rows are full, empty, sparse, or closed by a zero run. Weights start next
    to both limits.
  * Ticks are doubled to force overruns, and outgoing events see random
    back-pressure.
  * Checked: every synaptic event, every outgoing event, and all weights every
    100 steps through the configuration port.
  * The test fails if any of these mechanisms never occurs.
* `tb_stdp_learning`: the validation experiment of the method, on the default
  core.
  * 64 × 64 fully connected, all 4096 weights starting at 0.
  * 10 Hz Poisson trains on all inputs and neurons, with refractory periods of
    5, 10, 15 and 20 ms, for 60 s of 1 ms ticks each.
  * Every weight must match a model of the forward-table rule exactly.
  * The testbench also runs classic nearest-neighbour STDP, with immediate
    causal updates, and reports the difference between the two.

Results of `tb_stdp_learning` after 60 s. `w_p` is the forward-table weight,
`w_o` the classic one. The last column counts synapses out of 4096.

| refractory | mean(w_p − w_o) | rms  | range    | synapses with w_p < w_o |
|------------|-----------------|------|----------|-------------------------|
| 5 ms       | −4.77           | 5.25 | −14 … 0  | 4060                    |
| 10 ms      | −2.14           | 2.61 | −11 … 0  | 3622                    |
| 15 ms      | −0.45           | 0.81 | −6 … 0   | 1475                    |
| 20 ms      | 0               | 0    | 0        | 0                       |

The forward-table rule never produces a higher weight than classic STDP. The
whole difference comes from the lost causal pairs described above. With a
refractory period equal to the window the two rules agree on every synapse.
The testbench checks both of these properties.

These weights match the published comparison in shape but not in size. There,
at a 5 ms refractory period, the forward-table weights are also never higher,
but differences beyond −4 are said to be rare. Here the mean difference is
−4.8. The published description does not give the exact kernel quantisation,
the way the Poisson trains are generated, or the classic reference it compares
with. The ±1 step per pair used here for every pair up to 10 ticks apart is
therefore an assumption. It is coarser than a finely graded ramp, so each lost
causal pair costs a full step. The wider spread is most likely due to that
choice, not to the update cases.

## Simulating

All files are SystemVerilog-2017. `rtl/stdp_pkg.sv` must come first. To run
any testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
          rtl/stdp_pkg.sv tb/tb_stdp_core.sv --top-module tb_stdp_core -Mdir obj
./obj/Vtb_stdp_core
```

Replace `tb_stdp_core` with any other testbench name. The 60 s learning
experiment takes about one minute.

Lint a module with:

```
verilator --lint-only -Wall -y rtl rtl/stdp_pkg.sv rtl/stdp_core.sv
```

## Files

| file | contents |
|------|----------|
| `rtl/stdp_pkg.sv` | default sizes, configuration selector type, ramp kernel function |
| `rtl/stdp_core.sv` | top: tables, processors, step sequencing, configuration port |
| `rtl/pre_syn_processor.sv` | input timers, event bitmap, forward row sweeps |
| `rtl/post_syn_processor.sv` | neuron timers, spike bitmap, routed output |
| `rtl/stdp_update.sv` | per-synapse causal/acausal update with the ramp kernel |
| `rtl/stdp_timer_bank.sv` | STDP timers with expiry flags |
| `rtl/pointer_table.sv`, `rtl/weight_table.sv`, `rtl/routing_table.sv` | the three tables |
| `tb/tb_*.sv` | self-checking testbenches |
