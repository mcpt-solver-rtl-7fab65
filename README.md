# NeuroPDE+ in SystemVerilog: a stochastic-device Monte Carlo PDE accelerator

Monte Carlo solvers for partial differential equations spend most of their time
moving simulated particles. Each particle, or *walker*, takes a random step, is
tracked and is counted, over and over. This accelerator moves that inner loop
into hardware. It uses the random switching of magnetic tunnel junctions (MTJs)
as its source of randomness and ferroelectric tunnel junctions (FTJs) as
programmable analog weights that set the probabilities. It has two independent
units:

* **Diffusion tracking unit (DTU).** A 1-D chain of 50 "neurons", one per grid
  node. Exactly one neuron is active at a time and marks where the walker is.
  Each step, the walker stays, moves left or moves right with programmed
  probabilities. The unit tracks walkers until they are absorbed and counts how
  often each node was visited. A host turns those counts into the solution of,
  for example, a steady-state heat equation.
* **Scattering tracking unit (STU).** A four-level conditional-probability tree
  of stochastic bits. It draws 4-bit events, such as one of 16 scattering
  directions, from any programmed 16-bin distribution, at one event per
  21.6 ns.

A host CPU programs the weights, starts the units and post-processes their
results. The host is not part of this RTL. The top module `neuropde_top`
exposes each unit's host interface as plain ports.

Everything runs on one clock whose tick is **0.2 ns**, which is the length of
one sense-amplifier sub-phase. With that tick, every timing in the design is a
whole number of ticks:

| operation | time | ticks |
|---|---|---|
| MTJ read (precharge + amplify) | 0.4 ns | 2 |
| probabilistic MTJ write | 5 ns | 25 |
| one DTU walk step | 10 ns | 50 |
| one STU sample | 21.6 ns | 108 |

The 0.2 ns tick is a choice of this implementation. The operation times
themselves are the published ones.

---

## 1. The device models

Four parts of the design are analog. They are written as behavioural models
with the real part's pins, and each says so in its first comment.

**`mtj_model`: the stochastic junction.** It stores one bit: P = 0 and
AP = 1. When `wr_en` rises, the model decides in advance whether this pulse
will switch the junction (probability `p_code/256`) and, if so, at what instant
(uniform over the 5 ns pulse, on a femtosecond grid). At that instant it
switches only if the pulse is still on. This is the property the DTU relies on: whichever
junction switches first can cut the current of the other, which then never
switches. `force_en` models the large deterministic reset and initialise
current.

Two racing junctions must never switch in the same simulation instant, because
a simulator cannot let one of them cut the other's current within a single
time step. Each model instance therefore gets a tie-break `SLOT` (0–3 fs), and
the instants are drawn on a 4 fs grid plus that slot. The DTU gives neuron *i*
slot *i* mod 4, so the two junctions of any write path (*i* and *i*+2) always
differ. On an exact grid tie, about one race in 10⁶, the lower slot wins.
Without this, ties at a 1 ps resolution broke the one-walker rule about once
every 6·10⁴ steps.

The model uses `$urandom` and delays. It needs `--timing` in
Verilator and is not synthesizable.

**`ftj_synapse`: the programmable weight.** An 8-bit code stands for the FTJ's
polarisation state, matching the roughly 8-bit resolution reported for the
device. Programming follows the device's use:

* a negative pulse (`prog_pos = 0`) resets the code to 0;
* each tick of positive pulse (`prog_pos = 1`) adds one LSB, saturating at 255.

In operation the cell outputs the code while its input is high, and 0
otherwise. A code `c` means a switching probability of `c/256` for a full
write. The published device has a non-linear voltage-to-probability curve;
here the mapping is linear, so the host works directly in probabilities.

**`pcsa`: the pre-charge sense amplifier.** `sen` must be high for two ticks:
one tick precharges, the next amplifies and latches `rd` and `rd_b`. The
result is held between reads.

**`current_monitor`: the winner-takes-all detector.** It watches the two
junctions of one series write path. A change of either junction raises
`wr_int` in the same instant, which is a combinational path. A flop then holds
`wr_int` until the next read phase (`clr`), so that it can trigger the reset of
the old neuron. Once the path has carried current since the last `clr`, the
monitor stays armed. Without that, a switch landing in the last partial tick
of the window, just after the enable fell, would be missed.

---

## 2. The diffusion tracking unit

### 2.1 The chain and its write paths

This is the least obvious part of the design.

Neuron *i* holds one MTJ, and the walker is at node *i* while MTJ*i* = 1.
Every neuron has one FTJ synapse S*i*. The synapse's input is the neuron's own
read output. Its output drives the `wr` pin of the *left* neighbour, i*−1*.
The `out` pin of each neuron is wired to the `in` pin of the neuron two places
to its right.

So when the walker sits on node *k*:

1. **Read.** All neurons are read, and only neuron *k* reports 1.
2. **Transmit.** The read of *k*, scaled by S*k*, appears on `wr` of neuron
   *k−1*.
3. **Activate.** Neuron *k−1*'s write gate opens and current flows through
   MTJ*k−1*, out of `out` of *k−1*, into `in` of *k+1*, through MTJ*k+1* and
   the current monitor of *k+1* to ground. Both neighbours are pushed towards
   AP with the same strength, for 5 ns. The first one to switch changes the
   current. The monitor raises `wr_int` for *k−1*, whose write gate closes,
   and the other junction keeps its state. That is the winner-takes-all: at
   most one neighbour becomes active.
4. **Reset (self-inhibition).** If that monitor fired, neuron *k* is written
   back to 0. The walker has moved.

If each junction would switch on its own with probability *p*, the outcomes of
one step are:

| outcome | probability |
|---|---|
| stay (neither switched) | (1−*p*)² |
| move left | (1−(1−*p*)²)/2 |
| move right | (1−(1−*p*)²)/2 |

Left and right are equally likely because the two switching instants are
identically distributed. For a target stay probability P_s, the host therefore
programs *p* = 1 − √P_s, that is, synapse code round(256·(1−√P_s)).

The two junctions always race with equal strength, so the chain is
symmetric by construction. A drift would need a different circuit.

`dtu_neuron` contains one MTJ, its PCSA, the write gate, and the monitor of the
path that *ends* in it. That is why a neuron's `wr_int` input comes from the
neuron two places to its right.

### 2.2 The ends of the chain

* **Node 0 reflects.** It has no left neighbour, so S₀ drives a path that
  writes only MTJ₁. The walker at node 0 moves right with probability `code/256`
  or stays, so the host programs S₀ with 2·P_g. This matches the usual
  reflecting rule, in which the move probability at the wall is doubled.
* **Node N−1 absorbs.** When the read finds the walker there, that walker is
  finished and the step is not counted.

Both ends are wired in `dtu`. The published neuron array does not show them.

### 2.3 The step sequence and the walk schedule

`dtu_controller` runs each step as four phases:

| phase | ticks | signals |
|---|---|---|
| READ | 2 | `sen`; the monitors are cleared |
| TRANSMIT | 1 | synapses in operational mode |
| ACTIVATE | 25 (5 ns) | `en_wr`; the race |
| RESET | 22 | `rst_phase`; a neuron whose path fired is written to 0 |

That makes 50 ticks, or 10 ns, per step. The 5 ns write and the 10 ns step are
the published figures. The TRANSMIT and RESET lengths are this design's
choice, made to fill the 10 ns.

A run is started by a one-tick `start` pulse carrying `start_pos` = *i* and
`num_walkers` = W. For each walker the controller:

1. clears every neuron for one tick;
2. initialises neuron *i* for one tick;
3. steps until the walker is absorbed at N−1.

After each read at a non-absorbing node *j* it increments the visit counter
n[*i*][*j*]. The start node is therefore counted once per walker, and the sum
of a row equals the number of steps taken. `done` pulses when all W walkers
have been absorbed. `walkers_done` and `steps` are readable status.

An assertion checks that the read in every step finds exactly one active
neuron.

### 2.4 Visit counters and what the host computes

`dtu_visit_mem` holds the N×N matrix as N² words of 32 bits at address
*i*·N + *j*:

* increments saturate;
* `cnt_clr` starts a sweep that clears one word per tick and raises
  `cnt_clearing` while it runs;
* the host reads word (`cnt_rd_i`, `cnt_rd_j`) with one tick of latency.

For the 1-D heat equation on [0, L] with N nodes, the host computes

    u_i = −(F·dt/W) · Σ_j n[i][j]·(L − X_j)        u(X_i) ≈ u_i − u_0

from the counts of W walkers started at each node *i*.

---

## 3. The scattering tracking unit

### 3.1 The tree

A 4-bit event {A,B,C,D}, with A the MSB, is drawn one bit per level:

* A with P(A=1);
* B with P(B=1 | A);
* C with P(C=1 | A,B);
* D with P(D=1 | A,B,C).

The levels need 1, 2, 4 and 8 conditional probabilities. By the chain rule,
the product reproduces any 16-bin distribution up to the 8-bit precision of the
synapses. To program a distribution P(v), v = 0…15, take each prefix *q* of the
higher bits and set

    P(next bit = 1 | q) = Σ P(v, prefix q1) / Σ P(v, prefix q)

(`tb_stu` does exactly this for a discrete Gaussian.)

### 3.2 One bit: flip with a programmed strength

`stu_bit_unit` has an MTJ, a PCSA and a write driver. The inverted readout is
the driver's target, so every write *tries to flip* the junction:

* from 0 it tries with strength `vin1`;
* from 1 it tries with strength `vin0`.

The host programs each pair as (dir 0, dir 1) = (1−*p*, *p*). Then:

* from 0: P(new = 1) = *p*;
* from 1: P(new = 1) = 1 − (1−*p*) = *p*.

The new bit therefore does not depend on the old one. In codes the pair is
(256−c, c), with 256 capped at 255, so c = 0 still leaves a 1/256 chance of a 1. This programming rule is
this design's choice. The inverted feedback is the published circuit.

### 3.3 Weight selectors

`weight_selector` with `LEVEL` = 0…3 holds 2·2^LEVEL synapses. Level 0 is a
fixed pair, and levels 1–3 are selectors B, C and D. A synapse is addressed by
`{higher bits, write direction}`. For example, at level 2, index 5 = 3'b101 is
the synapse for A=1, B=0 and a write to 1. The latched outputs of the higher
units choose the pair, which is driven to the bit unit only while that unit
writes. In the circuit the choice is made by a transistor tree that switches
the supply onto one pair. Here it is a multiplexer.

### 3.4 The four-phase cycle

`stu_controller` repeats four phases of 27 ticks (2 read + 25 write):

| phase | reads | writes | why the reads |
|---|---|---|---|
| 0 | A, D | A | D finishes the previous event; A's state is needed to flip it |
| 1 | A, B | B | A's new bit selects B's pair |
| 2 | B, C | C | |
| 3 | C, D | D | |

One event takes 108 ticks (21.6 ns), which is 4 bits per 21.6 ns or about 185 Mbit/s. The final read of D overlaps the first
read of the next cycle, so an event is reported (`rn_valid` for one tick)
right after the phase-0 read of the following cycle. The first event arrives
110 ticks after the clock edge that samples `run`. After that, events come
every 108 ticks. When `run` drops, the unit finishes the current cycle and
performs one extra read of D (the flush), reports the last event and goes
idle. An assertion checks that no unit is read and written at once.

---

## 4. Top-level interface (`neuropde_top`, N = 50, CW = 32)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | 0.2 ns tick clock; asynchronous active-low reset |
| `dtu_syn_prog_en`, `dtu_syn_prog_sel[5:0]`, `dtu_syn_prog_pos` | in | program synapse S_sel (pos = 0: reset; pos = 1: +1 LSB per tick) |
| `dtu_start`, `dtu_start_pos[5:0]`, `dtu_num_walkers[31:0]` | in | start W walkers from a node |
| `dtu_busy`, `dtu_done`, `dtu_walkers_done[31:0]`, `dtu_steps[31:0]` | out | run status |
| `dtu_cnt_clr` / `dtu_cnt_clearing` | in / out | clear the visit matrix / sweep in progress |
| `dtu_cnt_rd_i`, `dtu_cnt_rd_j` → `dtu_cnt_rd_data[31:0]` | in → out | read n[i][j], 1 tick latency |
| `dtu_mtj_vec[49:0]` | out | neuron states (the walker's position) |
| `dtu_moved_left[49:0]`, `dtu_moved_right[49:0]` | out | during the reset phase: the walker at node k moved left or right |
| `stu_prog_en`, `stu_prog_level[1:0]`, `stu_prog_idx[3:0]`, `stu_prog_pos` | in | program STU synapse {level, higher bits, direction} |
| `stu_run` | in | sample continuously |
| `stu_rn[3:0]`, `stu_rn_valid`, `stu_busy` | out | sampled event, its strobe, activity |

Programming a synapse to code *c*:

1. one tick with `prog_en = 1` and `prog_pos = 0`;
2. *c* ticks with `prog_en = 1` and `prog_pos = 1`.

---

## 5. Capacity for the published workloads

* **1-D steady-state heat equation** (L = 2, N = 50, dt = 0.00038, F = 3,
  W = 10⁴ walkers per start node). The chain has exactly 50 nodes and the
  matrix has 50×50 counters. With P_g ≈ 0.375, a walker from node 0 needs
  about N²/(2P_g) ≈ 3.3·10³ steps. A row for W = 10⁴ therefore totals about
  3.3·10⁷ counts, well under 2³² for the counters and the step counter. At
  10 ns per step, that row takes about 0.33 s.
* **Particle-transport scattering** (16 directions, Gaussian with σ² = 4,
  350,000 samples). The 4-level tree gives 16 bins with 15 weight pairs. The
  350,000 samples take 7.56 ms. Particle positions and histories are tracked by
  the host.

---

## 6. Where this implementation departs from, or adds to, the published design

* **Timing.**
  * The 0.2 ns clock and the 2/1/25/22 split of the DTU step are this design's.
  * The DTU read is modelled like the STU read (0.2 ns precharge + 0.2 ns
    amplify). The DTU description alone quotes about 0.2 ns for the whole read.
* **Device models.**
  * Switching probability is linear in the weight code, and the switching
    instant is uniform over the pulse.
  * A femtosecond tie-break slot keeps racing junctions from switching in the
    same instant.
  * Process and voltage variation of the devices is not modelled.
* **Chain ends and walk schedule.**
  * The reflecting node 0 and the absorbing node N−1 are wired explicitly.
  * Clearing and re-initialising between walkers, and the on-chip visit-count
    matrix, are this design's realisation of the host-level algorithm.
* **Current monitor.**
  * It detects a junction-state change rather than sensing current, and it
    holds its flag until the next read.
* **STU programming.**
  * Weight pairs are programmed as (1−*p*, *p*), so each bit is independent of
    its previous value.
* **Host.** The host CPU is not included. Its roles are the `dtu_*` and `stu_*`
  ports.
* **Synthesis.** The MTJ model, and every block that contains it (neuron, DTU,
  bit unit, STU, top), cannot be synthesised. The all-digital parts can: the
  controllers, the counter memory, the selectors, the synapse and PCSA
  abstractions, and the monitor logic.

---

## 7. Simulating

Each block has a self-checking bench in `tb/`. Each bench prints
`TB_RESULT checks=<n> failures=<m>`, has a watchdog, and checks the published
timing where there is one. Build and run any of them with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        --top-module tb_dtu rtl/npde_pkg.sv tb/tb_dtu.sv -o sim
    ./obj_dir/sim

| bench | what it shows |
|---|---|
| `tb_mtj_model` | switching rates against the code, no switching after a pulse is cut, forced writes |
| `tb_ftj_synapse`, `tb_pcsa`, `tb_current_monitor` | programming and saturation, two-tick read, winner detection and hold |
| `tb_dtu_neuron` | two racing junctions: never both switch, move probability 1−(1−*p*)², left/right balance |
| `tb_dtu_controller` | phase lengths, 50-tick step, counting and absorption with a behavioural walker |
| `tb_dtu_visit_mem` | counters against a reference matrix, clear sweep |
| `tb_dtu` (N = 8) | stay/left/right = 0.25/0.375/0.375 at code 128, reflection, one active neuron after every step, every counter against the bench's own tally |
| `tb_weight_selector`, `tb_stu_bit_unit`, `tb_stu_controller` | pair selection, state-independent bit probability, 108-tick cycle and flush |
| `tb_stu` | 20,000 samples of a programmed discrete Gaussian, bin by bin |
| `tb_heat_equation` (N = 10) | the heat-equation workload end to end (see below) |
| `tb_neuropde_top` | full size, no parameter overrides (see below) |

`tb_neuropde_top` runs both units at once. It counts every mechanism and fails
any that never occurred:

* left, right and stay moves;
* reflection at node 0 and absorption at node 49;
* self-inhibition resets;
* clearing and re-initialisation between walkers;
* visit counts;
* sampled events;
* the flush when sampling stops.

It also checks that each walker row of the counter matrix sums to the steps
taken. It takes about 15 s to build and run.

`tb_heat_equation` solves u'' = F(L−x), u(0) = u'(0) = 0 on L = 2 with F = 3.
It uses 10 nodes, P_s = 0.5 (code 75 inside, 128 at node 0) and 400 walkers per
start node, and turns the counters into u(X_i) with the estimator of §2.4. Each
u_i must lie within 5 standard errors of the exact expectation of the
programmed Markov chain, which the bench solves itself. The profile must
agree, within the same statistical bound, with the analytic
u(x) = F·L·x²/2 − F·x³/6. A typical run gives a mean squared error of
0.1–0.5 at W = 400. The error falls as 1/W, and the published study used
W = 10⁴. The bench takes about 25 s.

Every bench has also been run against a deliberately broken copy of its module, and it fails there.

The benches are statistical. Tolerances are set several standard deviations
wide, but they use `$urandom`, so a different seed draws different walks.
