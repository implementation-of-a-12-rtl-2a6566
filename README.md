# A time-multiplexed Hodgkin-Huxley network engine

This is SystemVerilog RTL for a synchronous engine that simulates very large networks of
Hodgkin-Huxley (HH) neurons. The synapses have short-term plasticity (STP),
spike-timing-dependent plasticity (STDP) and per-synapse delays. The neurons have per-neuron
axonal delays.

The engine holds no physical neuron or synapse. It has a few deep pipelines that each compute
one neuron or one synapse per clock, and they walk through all the state in a fixed order.
With the default parameters one chip holds:
- 12 million neurons;
- 600 million synapse slots.

At 300 MHz one millisecond of model time takes 0.125 s, i.e. 125 s of run time per model
second. The schedule is fixed and known in advance, so there is no arbitration, no message
passing and no stall anywhere in the design. Every arithmetic unit is busy on every clock.

The design follows the "neuron machine" idea extended to several computation nodes, the
*hardware neurons* (HNs). Each HN computes its own share of the neurons. All HNs share one
broadcast *axon bus*, through which every node learns every spike. A synapse may therefore
connect any two neurons of the system, with no routing.

## 1. Two clocks of model time

The engine keeps two timesteps. They are locked together by one counter in the control unit.

| | network timestep | neuron timestep |
|---|---|---|
| model time | 1 ms | 40 µs |
| what advances | synapses (STP, STDP, delays), spike exchange | HH membrane equations |
| clocks (default) | 37,500,000 = one per synapse slot | 1,500,000 = one per neuron |

One network timestep is exactly 25 neuron timesteps (`N_SUBSTEP`). While the synapse pipelines
pass over all 37.5 M slots of an HN once, the soma pipeline passes over the 1.5 M neurons of
that HN 25 times. Both therefore end on the same clock. The control unit issues per clock:
- a slot address `slot`;
- a neuron index `nidx`;
- a substep `substep`.

The rule between them is `slot = substep * N_NEURON + nidx`, and an assertion in
`control_unit` checks it.

Speed therefore depends only on the clock and the sizes:
`run time per model second = 1000 * N_SUBSTEP * N_NEURON / f_clk`. This gives 125 s for
1.5 M neurons per HN at 300 MHz. The time does not depend on activity or on the number of
HNs, because the HNs run in parallel.

## 2. One hardware neuron: a ring of four pipelines

```
            axon bus (N_HN write ports, every port reaches every MX)
   ┌───────────────────────────────────────────────────────────────┐
   │   ┌──────┐  spike   ┌──────┐ I_syn  ┌────┐ Netsum ┌────┐ spike│
   └──►│ NU 0 ├─────────►│SNU 0 ├───────►│    │        │    ├──────┘
       └──────┘          └──────┘        │ DU ├───────►│ SU │
   ──► │ NU 1 ├─────────►│SNU 1 ├───────►│    │        │    │
       └──────┘          └──▲───┘        └────┘        └─┬──┘
                            └─── V_post, spike_post, y ───┘
```

- **Network unit (`nu_read`, `mx_memory`).** MM holds, for every synapse slot, the 24-bit id of
  the presynaptic neuron.
  - MX holds one spike bit for every neuron of the system (2^24 words, in 8 banks of 2^21).
  - Each clock the NU reads the id of slot *t* and looks up that neuron's spike. This takes
    two clocks.
  - Bank *i* of every MX copy is written only by HN *i* over the axon bus. So after each
    network step every NU of every HN holds every spike, and the topology is unrestricted.
- **Synapse unit (`synapse_unit`).** This is a 33-clock pipeline, one synapse per clock. Section 4
  describes it.
- **Dendrite unit (`dendrite_unit`).** It adds the P currents of each slot, and all slots of one
  neuron, into that neuron's word of the Netsum memory.
- **Soma unit (`soma_unit`).** It integrates the HH equations of one neuron per clock in single
  precision. It gathers the neuron's spikes over the 25 substeps and, in the last substep,
  writes them onto the axon bus. Section 5 describes it.

Each HN has P = 2 NU/SNU pairs. The pairs step through their slots in lock step, so an HN
processes P synapses per clock.

## 3. Slots: how a network is laid out in memory

This is the least obvious part of the design. It decides what a network must look like to fit.

The NU/SNU pairs do not know about neurons. They only count slot addresses 0 … N_SLOT−1.
Neurons are mapped onto slots as follows:

1. The neurons of an HN own consecutive runs of slots, in neuron order. Neuron 0 owns slots
   0 … k₀−1, neuron 1 the next k₁ slots, and so on. Every neuron needs at least one slot.
2. A slot holds P synapses, one in each pair at the same address. A neuron with *s* input
   synapses therefore needs ⌈s/P⌉ slots. The unused places get a *null synapse*, whose
   attribute set has g_syn = 0 and so contributes 0.
3. A one-bit memory per slot (`seg_last` in `hardware_neuron`, loaded with `CFG_SEG`) marks the
   last slot of each neuron.
   - A counter of these bits gives the postsynaptic neuron of the current slot. Its tag travels
     with the synapse.
   - From this index the SNU gets the neuron's membrane potential, last spike and STDP trace.
   - The DU uses the `last` flag to close the neuron's sum and write it into Netsum.
4. Slots after the last neuron's final slot hold null synapses with the bit clear. The counter
   restarts at slot 0 of every network step.

So the capacity figures are totals. 600 M slots hold 600 M synapses only if every neuron's
input count is a multiple of P. The SU must also reach every neuron once per substep, so
the slot count is always `N_SUBSTEP * N_NEURON`, whatever the network.

## 4. Synapse pipeline

Each slot word in an SNU is 66 bits:
- a 10-bit index into a table of 1024 *attribute sets* of 180 bits;
- 56 bits of state.

Rich per-synapse parameters therefore cost 10 bits per synapse. The table holds the time
constants, amplitudes and delay. The timing, with the t-numbers used in the RTL comments, is:

| clocks | stage | model |
|---|---|---|
| −2 … 0 | read slot word, then attribute set | |
| t0 → t2 | **ACDS**: per-synapse delay 0–24 ms | countdown of network steps |
| t2 → t23 | **STP** and **LTP** side by side | see below |
| t23 | state written back | |
| t23 → t31 | **Membrane** | `I = S·w·g_syn·(E_syn − V_post)` |

Total latency: 33 clocks from the slot address to the current at the DU.

The stage latencies (2, 21, 8) are padded to the numbers of the reference block diagram. The
arithmetic itself takes one clock in each stage. Everything is updated once per network
timestep:

**STP** (Tsodyks–Markram), with the decay and recovery factors per 1 ms step in the
attribute set:
```
u⁻ = u(1−1/τ_f)          on spike: u⁺ = u⁻ + U(1−u⁻)
x⁻ = x + (1−x)/τ_d       on spike: x⁺ = x⁻ − u⁺x⁻
S⁻ = S(1−1/τ_s)          on spike: S⁺ = S⁻ + A·u⁺x⁻
```
**STDP** uses a presynaptic trace x_j kept in the synapse and a postsynaptic trace y kept in
the soma unit:
```
x_j⁻ = x_j(1−1/τ₊)
postsynaptic spike:  w ← w + (w_max − w)·η₊·x_j⁻
presynaptic spike:   w ← w − w·η₋·y ;  x_j ← min(x_j⁻ + a₊, 1)
```

**Number formats.** The SNU and DU work in fixed point:

| quantity | format |
|---|---|
| u, x, S, x_j, w | Q0.10 fractions |
| decay factors | Q0.16 |
| V_post and E_syn | Q7.8 mV |
| g_syn | Q4.12 mS/cm² |
| currents | Q23.8 µA/cm² |

Products truncate and sums saturate. The exact layouts are in `hh_pkg`.

**Delays.** A delayed synapse keeps one spike in flight: a 5-bit counter and a pending flag in
its state. A second spike that arrives while one is travelling is dropped. A synapse with
delay d sees a presynaptic spike d network steps after an undelayed one.

**Hazard.** The state is read at clock −2 and written at t23, 25 clocks later. A slot is
revisited only once per network step, and the control unit adds a drain gap after a run.
So a slot never sees its own write-back pending.

## 5. Soma pipeline

For each neuron and substep (c = the clock the schedule arrives):

| clock | work |
|---|---|
| c | read V, n, m, h (4 × fp32), the neuron's attribute word, Spike 1, STDP 1, ACDN state and Netsum |
| c+1 | Netsum → float (`i2f`). V → Q7.8, which indexes six gate-rate tables (`hh_gate_lut`). Read the neuron's attribute set |
| c+2 … c+5 | `hh_core`: forward-Euler step of the HH equations, 4 stages |
| c+6 | write the state back. Spike detector: V crosses 0 mV from below. V → Q7.8 (`f2i`) |
| c+6, substeps 0–23 | Spike 1 ← Spike 1 OR spike |
| c+6, substep 24 (flush) | the gathered spike updates y (STDP 1, plus its copy STDP 2 for the SNUs) and is stored in Spike 2 (`spike_post` for the SNUs). It then passes through the neuron's axonal delay (ACDN, 0–256 ms) |
| c+7 | the delayed spike goes onto this HN's axon-bus port; the Q7.8 potential is written into the Vi memory that the SNUs read |

Spike 1 is cleared by the flush.

**Gate-rate tables.** The rate functions are those of the classic squid-axon model, with rest
at −65 mV. Each is a 1024-entry fp32 ROM at 0.25 mV spacing from −128 mV. The ROMs are
computed at elaboration time from the formulas in `hh_gate_lut.sv`, so no data file is needed.

**Neuron parameters.** g_Na, E_Na, g_K, E_K, g_L, E_L, dt/C_m and the STDP decay and
increment come from one of 16 neuronal attribute sets, selected per neuron. With C_m = 1 µF/cm²
the `dt` field is simply 0.04 ms.

**Floating point.** `hh_fp_pkg` provides fadd and fmul written as functions:
- round to nearest, ties away from zero;
- flush-to-zero on underflow;
- saturation instead of infinities.

There is no NaN handling.

## 6. What a spike sees, and when

Netsum, Spike 2, STDP 2, Vi and MX are **single buffers**. They are rewritten while the other
units read them. The consequences are deliberate and follow from the fixed schedule:

- **MX.** A spike written in the flush of step T is in MX for every slot read in step T+1, so
  a delay-0 synapse acts one step after the spike.
  - The flush of the first neurons of an HN happens while the NUs still read the last slots of
    step T.
  - Those slots are unused or null if the network does not fill the last substep's slots, so in
    practice this does not matter.
- **Netsum.** A neuron's Netsum word is written once per network step, when its last slot
  passes the DU, early in the step for low-numbered neurons.
  - The SU reads Netsum in every substep. So the new current takes effect from the next
    substep on, and a strong input can make a neuron fire in the same network step as the
    presynaptic spike reached it.
  - The end-to-end testbench shows this.
- **V_post, spike_post, y** reach each synapse as they were when its slot passed.

## 7. Loading and running

All memories are loaded through one write port, `cfg` (`cfg_wr_t` in `hh_pkg`), while the
engine is idle. `cfg.hn` and `cfg.unit` select the HN and the NU/SNU pair, `cfg.addr` the
word.

| target | memory | address | data |
|---|---|---|---|
| `CFG_MM` | NU topology | slot | 24-bit presynaptic id {HN, local} |
| `CFG_SEG` | last-slot bits | slot | bit 0 |
| `CFG_SYN` | SNU slot word | slot | `syn_word_t` (set index + state) |
| `CFG_ASET` | SNU attribute set | 0..1023 | `syn_attr_t` |
| `CFG_NSTATE` | SU state | neuron | `neuron_state_t`; also clears the neuron's Spike 1/2, STDP traces, ACDN state and Netsum |
| `CFG_NATTR` | SU per-neuron word | neuron | `neuron_attr_t` {ACDN delay, set index} |
| `CFG_NSET` | SU attribute set | 0..15 | `neuron_set_t` |
| `CFG_MX` | spike bit, all MX copies | neuron id | bit 0 |

The memories come up with arbitrary contents, so load every slot and every neuron. Pulsing
`start` with `n_steps` ≠ 0 then runs that many network steps:
- `busy` is high while the run lasts;
- `step` counts completed steps;
- `done` pulses after the pipelines have drained.

The axon-bus ports are outputs of the top, so spikes can be logged outside.

The top is `hh_network_top`. Its parameters:

| parameter | default | meaning |
|---|---|---|
| `N_HN` | 8 | hardware neurons (at most 8 with the 3+21-bit neuron id) |
| `P` | 2 | NU/SNU pairs per HN |
| `N_NEURON` | 1,500,000 | neurons per HN |
| `N_SUBSTEP` | 25 | neuron timesteps per network timestep |

The soma unit needs `N_NEURON > 6`, and a step needs more than 25 clocks
(`N_NEURON * N_SUBSTEP > 25`). Assertions check both.

## 8. Relation to the published design

**Follows the original architecture:**
- the HN ring NU → SNU → DU → SU;
- the broadcast axon bus with banked MX memories;
- the two locked timesteps (25 substeps of 40 µs per 1 ms);
- single-precision HH with spike detection at the 0 mV crossing, and spike gathering with a
  flush in the last substep;
- the postsynaptic STDP trace and axonal delay (0–256 ms) in the soma;
- per-synapse delay, STP and STDP in the synapse unit with stage latencies 2/21/8;
- the Netsum dual-port memory;
- 1024 synaptic attribute sets of 180 bits and 56 bits of synaptic state;
- the high-capacity sizes.

**Choices made here**, where the original is silent:
- all fixed-point formats and field layouts;
- forward Euler;
- the classic m³h / n⁴ currents and rate functions, with C_m = 1;
- the gate functions as ROMs;
- a constant a₊ and a₋ for the trace increments;
- delays as countdown counters with one spike in flight;
- the last-slot bit memory and post-neuron counter that tell the SNU and DU where neurons
  begin and end;
- 16 neuronal attribute sets;
- the `cfg` load port in place of the separate back-end circuits;
- start/step-count/done run control;
- read-before-write on same-address collisions;
- reset only of control state and pipeline valid bits.

**Departure.** The published STP equations print the jump of x with a plus sign. The original
model subtracts, which keeps x in [0, 1], and that is what is built.

**Not built:**
- off-chip and vendor parts: the HBM memory that holds topology and state in the
  high-capacity version, the processor, the Ethernet link to the host, and the HDMI
  display/checkpoint logic;
- the "Override" and "RNG" blocks of the soma unit, which are only named, never described.

Here all state lives in on-chip arrays: 37.5 M-entry arrays per pair, which a real FPGA would
map onto HBM.

**Sizes.** The 32-HN high-speed configuration (1 M neurons, 2.6 s per model second) needs a
{5, 19}-bit split of the neuron id in `hh_pkg` in place of {3, 21}. The default build can
hold that network but runs it at the full 125 s per model second.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each testbench:
- compares the block against a model worked out independently (real arithmetic, reference
  formulas, or a behavioural model of the memories);
- prints `TB_RESULT checks=N failures=M`;
- has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_fp32_units` | fadd/fsub/fmul against real arithmetic, bit-exact rounding; fixed↔float |
| `tb_i2f`, `tb_f2i` | Netsum and V conversions, latency 1 |
| `tb_hh_gate_lut` | all six tables against the formulas |
| `tb_hh_core` | one Euler step against a real-valued model, latency 4 |
| `tb_su_stdp_post`, `tb_su_acdn` | trace update, delay counter over long random runs |
| `tb_soma_unit` | 8 neurons × 5 substeps × 60 steps against a real-valued HH model, including spikes, flush and delayed axon writes |
| `tb_mx_memory`, `tb_nu_read` | bank decode, write-port separation, out-of-range reads, latency |
| `tb_snu_acds`, `tb_snu_stp`, `tb_snu_ltp`, `tb_snu_membrane` | each synapse model against a reference (integer arithmetic for STP/STDP/delay, real arithmetic within the truncation error for the current), with the 2/21/8-clock latencies |
| `tb_synapse_unit` | the full 33-clock pipeline against a reference over many steps with random spikes and delays |
| `tb_dendrite_unit` | per-neuron sums across multi-slot neurons |
| `tb_control_unit` | schedule order, step count, drain and done |
| `tb_hardware_neuron` | one HN with its own spikes looped back: firing chains, delays, STDP, silent null-input neurons |
| `tb_hh_network_top` | whole chip, 8 HNs × 2 pairs × 25 substeps, 8 neurons per HN, 30 network steps |

In `tb_hh_network_top`, a spike chain crosses four HNs. The test counts and requires each of
these mechanisms:
- spikes crossing between HNs;
- the axonal delay and the synaptic delay, each to the exact step;
- STP facilitation;
- an STDP weight change;
- a multi-slot neuron summed correctly;
- null-input neurons staying silent;
- the per-step flush of every HN;
- the `done` handshake.

**Largest size simulated.** The largest simulated configuration keeps every top-level default
except `N_NEURON` (8 instead of 1.5 M). At full size:
- one HN has about 1 GB of arrays in a 2-state simulator;
- loading the memories through `cfg` takes over 10⁹ clocks;
- a single network step is 37.5 M clocks.

So no full-size simulation is included. The full-size design is linted and elaborated by the
usual tools.

**Running a test** with Verilator:
```
verilator --binary --timing --assert -y rtl \
    rtl/hh_fp_pkg.sv rtl/hh_pkg.sv tb/tb_util_pkg.sv tb/tb_hh_network_top.sv \
    --top-module tb_hh_network_top
obj_dir/Vtb_hh_network_top
```
Replace the testbench name for any other block. `tb_util_pkg` holds the real↔float helpers and
the reference rate functions that the testbenches share.
