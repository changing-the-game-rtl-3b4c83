# Bounce-Bind Ising machine: SystemVerilog model

An Ising machine looks for a low-energy state of N binary spins
m_i ∈ {−1, +1}, where the energy is

    E(m) = − Σ_{i<j} J_ij m_i m_j − Σ_i h_i m_i

(or, for a third-order machine, − Σ_{i<j<k} J_ijk m_i m_j m_k − Σ_i h_i m_i).
Many combinatorial problems map onto this form. MAX-CUT is one
(J_ij = −w_ij). 3-regular 3-XORSAT (3R3X) is another.
The machine performs Gibbs sampling. It visits the spins one after the other.
For each spin it computes the local field I_i = −∂E/∂m_i = Σ_j J_ij m_j + h_i
and draws the new value

    m_i ← sign[ tanh(β · I) − r ],   r uniform in (−1, 1)

The inverse temperature β is raised step by step (annealing).

The **Bounce-Bind** machine changes a single thing: it adds B·m_i to the
field of the spin being updated,

    I_BB,i = I_i + B · m_i

This corresponds to an energy term −(B/2) Σ m_i². Because m_i² = 1, that term
is a constant. The ground state and every energy difference stay the same.
What changes is how the machine moves:

* **B < 0, "bounce"**: the field pushes each spin away from its present value.
  Spins flip more often, and the search leaves shallow local minima sooner.
  In the limit B → −∞ every spin flips at every visit.
* **B > 0, "bind"**: the field holds each spin where it is. The search settles
  quickly, but it may freeze in a poor minimum. In the limit B → +∞ nothing
  moves.
* **B = 0**: the classical machine.

The published results use moderate negative values, roughly −0.5 to −1 for
MAX-CUT and below −3 for the gadget form of 3R3X. Those are the settings
under which the paper reports its speed-ups over B = 0. The RTL here
implements the machine. It contains no tuning of B.

## One spin update, step by step

The machine has one spin unit. All spins share it in turn: spin 0, 1, …, N−1,
then spin 0 again. A complete pass over all spins is a *round* (sweep), and a
round yields N *samples*. Each update takes three clock cycles. Updates are
strictly sequential, so every update sees the result of the one before it.

| cycle | what happens | block |
|---|---|---|
| READ | row i of the coefficient memory (all J_ij, or all J_ijk with j<k) and h_i are read into a register | `coeff_memory` |
| SUM | c_i = Σ_{j≠i} J_ij m_j, I_i = c_i + h_i and I_BB,i = I_i + B m_i are formed and registered | `field_sum2` / `field_sum3`, `bb_controller` |
| UPDATE | x = β·I_BB,i, then t = tanh(x), compared with the random number; the spin is written and the energy is updated | `spin_update`, `lfsr32`, `spin_memory`, `hitting_engine` |

Number formats:

| quantity | format | notes |
|---|---|---|
| spin | 1 bit, 1 = +1, 0 = −1 | |
| J, h | JW-bit two's complement, JW = 2 by default (−2…+1) | 2 bits suffice for MAX-CUT and third-order 3R3X; the 3R3X gadget needs JW = 3 |
| B | s[2][3]: sign, 2 integer bits, 3 fraction bits, −4 … +3.875 | format taken from the published design |
| β | u[3][3], 0 … 7.875 in steps of 0.125 | the step matches the published schedule; the width is this design's choice |
| I_BB | integer field shifted left by 3, plus B·m_i | exact |
| x = β·I_BB | 6 fraction bits | exact |
| tanh | 128-entry table of Q0.16 magnitudes at \|x\| = k/16, k = 0…127; \|x\| ≥ 8 uses the last entry | the sign of x is applied afterwards |
| r | low 17 bits of the LFSR, read as Q1.16 in [−1, 1) | |

The result is m = +1 exactly when the signed tanh value is greater than r. For
x = 0 this gives +1 with probability ½. The tanh table is computed at
elaboration from `$exp` (`bbim_pkg::make_tanh_lut`):
entry k = min(⌊tanh(k/16)·65536⌋, 65535).

The random source is a 32-bit Fibonacci LFSR with XNOR feedback. The feedback
is the XNOR of registers 32, 22, 2 and 1 (register n is bit n−1), and it is
shifted into register 1. This gives a maximal period of 2³²−1. The register
steps in every clock cycle of a run, so consecutive updates use numbers that
are 3 shifts apart. This is the simplest arrangement, and the numbers are
correlated. A run is fully deterministic for a given seed. The testbenches
rely on that.

## The third-order unit

With `ORDER = 3` the field becomes
I_i = Σ_{j<k; j,k≠i} J_ijk m_j m_k + h_i. No second-order couplings are kept,
because 3R3X in third-order form needs none. Each coefficient row lists every
pair (j,k), j<k, in the order (0,1), (0,2), …, (0,N−1), (1,2), …, so a row has
N(N−1)/2 entries. A coupling J_ijk must be written into the rows of i, j and k.
The product m_j m_k of two ±1 spins is one XOR gate. With the 1 = +1
encoding, `m[j] ^ m[k]` is 1 exactly when the product is −1. That bit selects
whether J_ijk is added or subtracted. Row storage grows with N³, so the
third-order machine is meant for small N: the published third-order
experiments stop near 56 variables.

## Energy, the best state, and stopping: the hitting engine

To report a result, the machine has to know the Ising energy (without the
constant B term). `hitting_engine` tracks it exactly with a small amount of
logic:

1. **Energy pass.** Before sampling starts, the sequencer walks once through
   all spins, in 3N cycles, using the same read and sum path. The engine
   accumulates A = Σ_i m_i c_i and H = Σ_i m_i h_i. Each coupling term appears
   ORDER times in A, so E = −A/ORDER − H. The division is exact.
2. **Tracking.** E is linear in any single spin. When spin i flips from
   m_old, the energy changes by exactly 2·m_old·I_i, where I_i is the
   classical field that was just computed. The engine adds this after every
   update.
3. **Best state.** When an update lowers E below the best value so far, the
   engine stores the energy, the whole spin vector after the update, and the
   sample number (`hit_sample`). The result is the lowest energy reached and
   the first sample at which it was reached: the "hitting time".
4. **Target.** If `cfg.target_en` is set, `hit` rises as soon as
   E ≤ `cfg.target_energy`, and the run stops at the next update slot. This is
   how runs stop early when the ground-state energy is known, for example in
   planted 3R3X or in small, exactly solved MAX-CUT instances.

For MAX-CUT with weights w (J = −w) the cut is
−E/2 + ¼ Σ_i Σ_j w_ij.

## Run control

`bbim_sequencer` steps through these states:

    IDLE → PREP → [RINIT × ⌈N/32⌉] → (EREAD, ESUM, EACC) × N → EINIT
         → (UREAD, USUM, UUPD) × (N per round) … → IDLE with done = 1

* PREP clears the hitting engine and starts the annealing schedule.
* RINIT (optional, `cfg.init_random`) fills the spins with LFSR words, 32 per
  cycle. Without it, the spins that the host wrote are the initial state.
* A run ends, checked before each update, when one of these holds:
  * the target energy has been hit;
  * the annealing schedule is complete;
  * `cfg.max_rounds` rounds are done (0 means no limit).

`annealer` holds β. It starts at `beta0` and, after every `rounds_per_step`
rounds, adds `beta_step`, clamped at `beta_end`. It reports completion once
the rounds at `beta_end` are done. The published schedule is beta0 = 0.125,
beta_step = 0.125, beta_end = 4: that is 32 temperatures, so
32 × `rounds_per_step` rounds. A fixed temperature uses beta_step = 0 and
beta0 = beta_end. The run then lasts `rounds_per_step` rounds. The published work does not say how many rounds each β
value gets, so this is a run setting here.

Run length in clock cycles:
1 + ⌈N/32⌉·[random start] + 3N + 1 + 3·N·rounds + 1.
With the default N = 2000 and the full 32-step schedule at one round per
step, that is 198,000 cycles, or 0.94 ms at the 210 MHz clock of the
published FPGA build.

## Using `bbim_top`

Parameters: `ORDER` (2 or 3, default 2), `N` (default 2000), `JW` (default
2). `ROW` and `SW` are derived and should be left alone.

While `busy` is low, the host:

1. writes the couplings one per clock (`j_we`, `j_row` = i, `j_col` = j or
   pair index, `j_data`) and the fields (`h_we`, `h_row`, `h_data`). Every
   entry that will be read must be written, including zeros. The memory is
   not cleared at reset;
2. optionally writes initial spins (`s_we`, `s_idx`, `s_m`) and a seed
   (`seed_we`, `seed`);
3. presents `cfg` (`bbim_pkg::bbim_cfg_t`: `bb`, `beta0`, `beta_step`,
   `beta_end`, `rounds_per_step`, `max_rounds`, `target_en`,
   `target_energy`, `init_random`) and pulses `start`. `cfg` and B are
   captured at that edge.

During the run, `spins`, `energy`, `beta`, `rounds` and `samples` can be
watched. When `done` rises, `best_energy`, `best_state`, `hit_sample` and
`hit` hold the result. Writes and `start` are ignored while `busy` is high.
An assertion in the sequencer reports a `start` given while busy.

## What the design takes from the paper, and what it adds

Taken from the published description:

* the Bounce-Bind update I_BB = I + B·m_i;
* the update rule sign[tanh(βI) − rand(−1,1)] with sequential updates;
* the block structure of the spin unit: coefficient memory, spin memory,
  multipliers, sum, annealing multiplier, tanh, comparator, PRNG and
  Bounce-Bind controller;
* the XOR realisation of spin products in the third-order unit;
* the s[2][3] format of B and the 2-bit (3-bit for XORSAT) coefficients;
* the 32-bit XNOR LFSR with taps 32, 22, 2, 1;
* the annealing schedule 0.125 → 4 in steps of 0.125;
* early stopping at a known ground energy, and recording the lowest energy
  and when it was first reached.

Choices made here, where the description is silent:

* a single time-multiplexed spin unit that adds all N products in one
  cycle, and 3 cycles per update. The published FPGA's degree of
  parallelism and its cycles per sample are not given;
* the row-wide coefficient memory and its host write port;
* the tanh table and its resolution;
* the width of β;
* the use of LFSR bits and the rate at which the LFSR steps;
* the energy-pass method of the hitting engine;
* the host interface, the configuration structure and the reset behaviour
  (everything clears to zero, spins to −1, B to 0);
* the sweep limit and the random-start path.

Known departures and limits:

* **B = −8 does not fit.** The published K2000 result uses B = −8, which the
  s[2][3] format cannot hold. The most negative value is −4.
* **Default width is too narrow for the 3R3X gadget.** The second-order 3R3X
  gadget needs coefficients of ±2 and fields down to −3. Build with `JW = 3`
  for it.
* **Gadget signs.** Written as G = −h_s·S + h_a·m_a − J_s·P − J_a·S·m_a with
  (h_s, h_a, J_s, J_a) = (−1, −2, 1, 2), the published 4-spin gadget does not
  reach its minimum −4 exactly on the states with m1·m2·m3 = +1. Here S is the
  sum of the three variable spins and P the sum of their pairwise products.
  Enumerating all 16 states shows that G = h_s·S + h_a·m_a + J_s·P + J_a·S·m_a
  with the same values does. The workload test uses that form. A clause of
  parity −1 is mapped onto parity +1 by flipping the sign of one variable's
  terms.
* **No timing closure.** Summing 2000 products in one cycle is a very long
  combinational path. A real 210 MHz build would accumulate over several
  cycles or pipeline the adder tree. Nothing in this RTL has been timed.
* **Limited validation.** Only the statistical behaviour checked by the
  testbenches below has been validated. The published success
  probabilities and times-to-solution have not been reproduced.

## Capacity against the published workloads

| workload | needs | default build |
|---|---|---|
| dense MAX-CUT G(N, ½), N = 10…200 | ≤ 200 spins, J ∈ {−1, 0} | fits |
| G22 (2000 nodes, 19,990 unit edges), G39 (2000 nodes, 11,778 ±1 edges) | 2000 spins, J ∈ {−1, 0, 1} | fits |
| K2000 (complete graph, ±1 weights) | 2000 spins, 3,998,000 stored J (8 Mbit) | fits, except B = −8 |
| second-order 3R3X, n = 16…160 | 2n = 32…320 spins, 3-bit J/h | needs `JW = 3` |
| third-order 3R3X, n ≲ 56 | n(n−1)/2 pair entries per row | needs `ORDER = 3`, `N = n` |

## Verification

Every module has a self-checking testbench in `tb/` whose name ends in `_tb`.
Each prints `TB_RESULT checks=… failures=…`. The end-to-end tests compare the
whole machine bit for bit with a reference model (`tb/bbim_tb_pkg.sv`). The
model is written from the specification above: integer ±1 spins, real-valued
tanh from exp, the LFSR and the documented cycle timing. It therefore
predicts every spin value, the energy, the best state, the hitting sample and
all counters.

* `bbim_top_tb` (N = 16): tests
  * the published schedule;
  * the sweep limit;
  * early stopping at the brute-force ground energy;
  * random and host-given starts;
  * B < 0, = 0 and > 0.

  It also checks that at β = 1 the share of updates that flip a spin falls as
  B goes from −1 to 0 to +1, and that with B = −4, β = 4 and no couplings
  every update flips.
* `bbim_top3_tb`: third order, on a planted 3-regular 3-XORSAT instance
  (12 variables, ground energy −12).
* `bbim_top_full_tb`: the default size (N = 2000) on three 2000-node
  MAX-CUT graphs. All 4 million coefficients are loaded for each graph, and
  each runs the full 32-step schedule at one sweep per step (64,000 updates).
  Every run is matched bit for bit with the model. The graphs are random, so
  their cuts are not comparable with published cuts of the named instances.
  The three graphs and the cuts from the recorded run:
  * a complete ±1 graph (K2000-type) at B = −1: cut 31,343;
  * 19,990 unit edges (G22-type) at B = −0.5: cut 13,137;
  * 11,778 ±1 edges (G39-type) at B = −1: cut 2,300.

  The whole test takes about 20 s.
* `bbim_maxcut_tb`: dense MAX-CUT on G(20, ½), whose maximum cut is found by
  enumerating all 2^20 states. It runs 8 seeds each at B = −1 and B = 0,
  using the published schedule at 3 sweeps per β and stopping at the maximum
  cut. Every run is matched with the model, and the cut of the best state is
  recounted edge by edge. In the recorded run the maximum cut (64 of 99 edges)
  was reached in 8/8 runs with B = −1 and 4/8 with B = 0.
* `bbim_3r3x3_tb`: third-order 3R3X at n = 56, the largest size in the
  published plots (`ORDER = 3`, `N = 56`). The instance is planted, so its
  ground energy is −56. It runs 4 seeds each at B = −0.625 and B = 0, for
  3008 sweeps with a random start, and every run is matched with the model.
  No run reached the ground state in the recorded run. The best energies
  were −54/−54/−54/−52 with B = −0.625 and −54/−52/−52/−54 with B = 0.
  The test confirms that the third-order datapath is exact at this size. It
  does not measure success rates.
* `bbim_3spin_tb`: the machine used as a sampler at a fixed β = 1 with no
  annealing, on a 3-spin problem of its own. The couplings are J01 = +1,
  J02 = J12 = −1 and h2 = −1, with the ground state (+1, +1, −1). It runs
  20,000 sweeps each at B = −2, −1, 0, 1 and 2, and records the state after
  every sweep. The recorded shares were:

  | B | sweeps keeping the previous state | sweeps in the ground state |
  |---|---|---|
  | −2 | 0.07 | 0.28 |
  | −1 | 0.51 | 0.59 |
  | 0 | 0.91 | 0.89 |
  | +1 | 0.99 | 0.99 |
  | +2 | 1.00 | 1.00 |

  The test checks that both shares rise with B.
* `bbim_3r3x_tb`: second-order 3R3X with 16 variables and 16 auxiliary spins
  (`N = 32`, `JW = 3`). The instance is planted, so its ground energy −64 is
  known. It runs 6 seeds each at B = −3.875, −1 and 0, with 30 sweeps per β
  (960 sweeps), a random start and early stopping. The ground was reached in
  0/6, 5/6 and 1/6 runs respectively. At B = −3.875, about 72 % of updates
  flip a spin, and the best energy stays near −58. With this gadget scaling
  and this tanh resolution, the most negative B is too strong. The published
  plot of the optimal B against size puts the optimum for n = 16 near −3.9
  (the lowest axis label). That value is read from a plot, and the published
  gadget scaling may differ from the one used here. The result is reported
  as found, not as a failure.

To run one with Verilator 5 (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert --top-module bbim_top_tb \
      -y rtl -y tb +libext+.sv -Irtl -Itb \
      rtl/bbim_pkg.sv tb/bbim_tb_pkg.sv tb/bbim_top_tb.sv -o sim
    ./obj_dir/sim

Replace the top-module and file name to run another testbench.
`bbim_tb_pkg.sv` is only needed by the end-to-end tests.

## Files

| file | content |
|---|---|
| `rtl/bbim_pkg.sv` | formats, `bbim_cfg_t`, tanh table function |
| `rtl/bbim_top.sv` | the machine |
| `rtl/bbim_sequencer.sv` | run control |
| `rtl/coeff_memory.sv` | J rows and h |
| `rtl/spin_memory.sv` | spin state |
| `rtl/field_sum2.sv`, `rtl/field_sum3.sv` | second- and third-order local fields |
| `rtl/bb_controller.sv` | B register and B·m_i |
| `rtl/annealer.sv` | β schedule |
| `rtl/spin_update.sv` | β multiply, tanh, comparator |
| `rtl/lfsr32.sv` | PRNG |
| `rtl/hitting_engine.sv` | energy, best state, hitting time, target |
| `tb/bbim_tb_pkg.sv` | reference model |
| `tb/*_tb.sv` | testbenches |
