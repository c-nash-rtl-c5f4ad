# C-Nash in SystemVerilog: a ferroelectric compute-in-memory Nash-equilibrium solver

A two-player game is given by two payoff matrices, `M` (what player 1 earns) and
`N` (what player 2 earns), both `n x m`. A mixed strategy is a probability vector
over a player's actions: `p` for player 1 (length `n`), `q` for player 2
(length `m`). A pair `(p, q)` is a Nash equilibrium when neither player can
earn more by changing their own strategy alone.

C-Nash (Qian, Ni, Kämpfe, Zhuo, Yin) finds such pairs by simulated annealing
on one scalar objective that is zero exactly at an equilibrium:

    f(p, q) = max(Mq) + max(N^T p) - p^T M q - p^T N q        (f >= 0)

`max(Mq)` is the best that player 1 could get against `q`, and `p^T M q` is
what player 1 actually gets. The same holds for player 2. So `f` is the sum of
both players' regrets. Every term is a matrix-vector or a
vector-matrix-vector product. These are computed by two arrays of one-bit
ferroelectric FET cells, which sum cell currents. A winner-takes-all (WTA)
current tree takes the two maxima. A small digital controller runs the
annealing loop around them.

This repository holds SystemVerilog for that architecture:

- synthesizable RTL for the digital parts: the annealing controller, the
  line drivers and the payoff write path;
- behavioural models for the analog parts: the FeFET arrays, the WTA cells
  and tree, and the ADCs.

Together they make a complete solver that runs in a plain Verilator simulation.
The default size holds games of up to 8 x 8 actions.

## 1. How numbers become currents

Everything analog is counted in one unit: the ON current of one cell. A
1FeFET1R cell is a FeFET with a series resistor. It stores one bit, where a
low threshold voltage means 1. Its gate is on a word line (WL) and its drain
is on a data line (DL). It conducts one unit of current only when its WL is
driven, its DL is driven and it stores 1. The resistor clamps the ON current,
so each cell is a reliable one-bit product `i = p * m * q`.

Three quantisations map the game onto such cells:

- **Probabilities** are counts `k` in `0..I`, meaning `k/I` (default
  `I = 4`). Each action of the WL-side player owns `I` rows, and probability
  `k/I` drives the first `k` of them.
- **Payoffs** are integers `0..t` (default `t = 4`). One element is stored as
  `t` cells holding the value in unary: the first `v` cells are 1 and the rest
  are 0. So 3 with `t = 4` is `1 1 1 0`.
- **Column strategy**: each element is stored `I` times side by side, one
  copy per probability step of the DL-side player. Probability `l/I` drives
  the first `l` copies, which is `l*t` data lines.

An element `M_ij` therefore occupies an `I x (I*t)` subarray. With `k` rows
and `l` copies driven, the subarray conducts `k * l * M_ij` units, which is
`I^2 * p_i * M_ij * q_j`. The worked example is `0.25 x 3 x 0.75` with
`I = t = 4`:

- 1 of 4 rows is driven;
- 12 of 16 columns are driven;
- the stored pattern is `1110 1110 1110 1110`;
- the subarray conducts 9 units, which is `0.25 * 3 * 0.75 * 16`.

The whole array for `M` is `(I*n) x (I*t*m)` cells. At the default size this
is 32 x 128.

Every quantity the controller sees is thus an integer multiple of `1/I^2`.
Most of the design is exact integer arithmetic on counts of cells:

- the ADC codes, `f` and the temperature are all "`f` times `I^2`";
- `f_sol = 0` means an equilibrium;
- `f_sol = 16` at `I = 4` means a total regret of 1.0.

## 2. The two arrays

| array | stores | word lines driven by | data lines driven by | row-block output `r` |
|---|---|---|---|---|
| M array   | `M` (row block = player-1 action `i`)   | `p` | `q` | `p_i * (Mq)_i * I^2` |
| N^T array | `N^T` (row block = player-2 action `j`) | `q` | `p` | `q_j * (N^T p)_j * I^2` |

Storing `N` transposed lets the same circuit give `N^T p`. Player 2's
strategy drives the rows of the second array and player 1's its columns.
`payoff_mapper` does the transposition as the element is written: element
`N(i,j)` goes to row block `j`, column block `i`.

Each array has one current output per row block (`blk_current`). The outputs
feed two places:

- the WTA tree, which finds the largest row-block current;
- the periphery (`crossbar_periphery`), which adds all row-block currents and
  digitises the sum, giving the full vector-matrix-vector product.

The C-Nash paper's schematic draws the source lines along columns and calls
their summed current the product `p^T M q`. It also states that with `p` all
ones the array outputs the vector `Mq`. That second statement needs one output
per row, and the model follows it. The column-wise sum is what the periphery
adds up.

## 3. Two phases per evaluation

One evaluation of `f` for a candidate pair takes two phases. `sa_logic`
sequences them:

| | WL drivers | DL drivers | WTA trees | what is latched |
|---|---|---|---|---|
| Phase 1 | all lines on (unit vector) | real strategy | on | `max(Mq)`, `max(N^T p)` from the WTA ADCs |
| Phase 2 | real strategy | real strategy | off (output 0) | `p^T M q`, `p^T N q` from the periphery ADCs |

In Phase 1 every row of the M array is driven, so row block `i` carries
`I * sum_j M_ij l_j = I^2 (Mq)_i`, and the tree returns the largest. In
Phase 2 only the `k_i` rows selected by `p` are driven, and the sum over row
blocks is `I^2 p^T M q`. The N^T array does the same with the roles of `p`
and `q` swapped. The controller then forms
`f_n = max_mq + max_ntp - vmv_m - vmv_n`, which needs only additions and
subtractions.

## 4. WTA tree

`wta_cell` models the two-input current-mode winner-takes-all cell. The circuit
forces both input currents onto nodes at equal voltage. A cross-coupled PMOS
pair then carries the excess `|I1 - I2|`, while `min(I1, I2)` flows in the
other branch. Both are mirrored out and added:
`Imax = min + |difference| = max(I1, I2)`. The model computes exactly these
two terms. It delays the output by the cell's 0.08 ns settling time. It does
not model the circuit's 0.25 % output offset.

`wta_tree` is a binary tree of `2^K - 1` cells with `K = ceil(log2 D)`. For
8 actions that is 7 cells and 3 levels, or 0.24 ns. Leaves beyond `D` are
tied to zero current. Dropping `en` disconnects the inputs, which is how the
trees are switched off in Phase 2.

## 5. The annealing controller (`sa_logic`)

The loop follows standard simulated annealing:

```
f_c = f(p0, q0); T = t_max
while T >= t_min (and T > 0):
    (p_n, q_n) = neighbour of (p_c, q_c)
    dE = f(p_n, q_n) - f_c
    accept if dE <= 0, else accept with probability exp(-dE / T)
    T = D(T)
result: the recorded (p_c, q_c) and f_c
```

States: `SA_IDLE -> SA_PH1 -> SA_PH2 -> SA_EVAL -> SA_GEN -> SA_PH1 ...`. Each
phase lasts `SETTLE` clocks (default 1). From the clock that takes `start`,
`done` rises after `(2*SETTLE + 1) + n_iter * (2*SETTLE + 2)` clocks. At the
default that is 3 clocks plus 4 clocks per iteration.

The following details are this implementation's choices. The annealing
algorithm leaves them open.

- **Neighbour move.** One player is picked at random (`rnd[31]`). One
  probability interval of that player moves from one action to another:
  - the source is the first action with a non-zero count at or after a random
    start;
  - the destination is any other action;
  - the counts therefore still sum to `I`.

  Moving both players in every iteration was tried first. It leaves local
  minima on the coarse grid. For example, at `I = 4` Battle of the Sexes has
  a basin at `f = 8` next to its mixed equilibrium (0.6, 0.4), which the grid
  cannot represent. With one player per move, a path of equal `f` links that
  basin to an equilibrium.
- **Metropolis test.**
  - An uphill move is accepted when `dE * 2^24 <= T * L`. Here `L = -ln u` in
    Q4.8, taken from a 256-entry table indexed by a random byte `u`.
  - `P(dE <= T * (-ln u)) = exp(-dE/T)`, so this is exactly the Metropolis
    rule, quantised to 256 levels of `u`. It needs no divider and no
    exponential unit.
  - The table is computed at elaboration from `$ln`, in
    `cnash_pkg::neg_ln_table`.
- **Temperature.**
  - The temperature is Q16.16 in units of `f * I^2`.
  - The decay is geometric: `T <- floor(T * alpha / 2^16)`.
  - The run length is about `ln(t_max / t_min) / (1 - alpha/2^16)`
    iterations. With `t_max = 30`, `t_min = 0.25`, `alpha = 65505` gives about
    10,000 iterations and `alpha = 65530` gives about 52,000.
  - An 8-bit fraction was too coarse: truncation turned the geometric decay
    into a linear one.
- **Random numbers.** A 32-bit xorshift generator (`xorshift32`), seeded at
  `start`, advances every busy clock.
- **Result.** The result is the last recorded pair. No best-so-far copy is
  kept.

Counters report the iterations, downhill or equal accepts, uphill accepts and
rejections. Concurrent assertions check that the initial pair and every
generated pair sum to `I`.

## 6. Using `cnash_top`

Parameters: `N_ACT`, `M_ACT` (8, 8), `I_INT` (4), `T_CELL` (4), `T_W` (32),
`SETTLE` (1). The ADC width is derived from the array size: 13 bits, which is
lossless for a full 32 x 128 array.

1. **Reset.** Assert `rst_n` low. The reset is asynchronous and active low.
   The cells themselves have no reset, because they are non-volatile.
2. **Load the game.** Write every element of `M` and `N` once. Each write is
   one valid/ready handshake on `pay_valid/pay_ready` with:
   - `pay_sel`: 0 for `M`, 1 for `N`;
   - `pay_i`: the player-1 action;
   - `pay_j`: the player-2 action;
   - `pay_value`: 0..`T_CELL`.

   An element takes `I_INT` clocks to write, and `pay_ready` stays low
   meanwhile. Loads are refused while a run is busy.
3. **Start a run.** Hold `t_max`, `t_min`, `alpha`, `seed`, `p_init` and
   `q_init` steady and pulse `start`. `p_init` and `q_init` are counts per
   action, and each must sum to `I_INT`.
4. **Read the result.** Wait for `done`, then read `p_sol`, `q_sol`, `f_sol`
   and the counters. `adc_overrange` flags an ADC clip. It cannot occur with
   the default widths.

**Payoffs must be non-negative integers no larger than `T_CELL`.** Shifting
all of a player's payoffs by a constant does not change the equilibria, so
negative payoffs can be shifted up.

**Games smaller than the array.** Do not pad unused actions with zeros.
Padding with zeros adds a false equilibrium: if both players play padded
actions, everyone earns 0 and nobody can gain by deviating alone. Instead:

1. add 1 to every real payoff;
2. give each real action 1 against every padded action of the opponent;
3. give each padded action 0 everywhere.

Padded actions are then strictly dominated, so they never appear in an
equilibrium. `tb_cnash_workloads` runs Battle of the Sexes this way inside the
8 x 8 array. Alternatively, set `N_ACT`/`M_ACT` to the game's size.

**Mixed equilibria are found only when they lie on the grid** `{0, 1/I, ..., 1}`.
Rock-paper-scissors (1/3 each) needs `I = 3`. The mixed equilibrium of the
usual Battle of the Sexes (3/5, 2/5) is not on any small grid. At `I = 4` the
solver returns that game's two pure equilibria.

## 7. What is modelled, and where this departs from the paper

Behavioural models (analog or mixed-signal in silicon, integer-exact here):

- `fefet_crossbar`: the array as a bit array plus cell counting. It has no
  device variation and no IR drop.
- `wta_cell` and `wta_tree`: exact max with a 0.08 ns delay per cell, and no
  offset.
- `current_adc`: `floor(i/LSB)` with clipping, settling within one clock.
- `crossbar_periphery`: current sum plus ADC.

These follow the paper closely:

- the objective and its two-phase evaluation;
- the array geometry `(I*n) x (I*t*m)`;
- the unary `t`-cell payoff code;
- the thermometer coding of probabilities;
- the tree of `2^K - 1` WTA cells with `Imax = min + |diff|`;
- the 0.08 ns cell latency;
- the annealing loop.

These are this design's own choices: the neighbour rule (one player and one
interval per move), the decay law, the random source, the Metropolis
implementation, all number formats and widths, the ADC, the host load
interface, one clock per phase, the reset, and the padding rule for small
games.

These conflicts in the source material were resolved as follows:

- **Worked example.** The paper's text says 8 of 12 columns are active for
  `q = 0.75`. Its figure says 12 of 16, in a 16-column subarray. The figure
  is followed.
- **Source lines.** The paper's text and schematic disagree on how
  source-line currents are grouped (see section 2). The per-row outputs needed
  for `Mq` are used.

Not built:

- the shift-and-add stage drawn in the array periphery, which is not needed
  with one-bit unary cells;
- FeFET programming pulses and voltages;
- device variability;
- any timing model of the analog parts beyond the WTA delay.

The MAX-QUBO rewriting itself is a step done before mapping the problem, not
hardware.

## 8. Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=F`.

| testbench | what it checks |
|---|---|
| `tb_strategy_driver` | thermometer lines for random strategies; the 1-of-4 rows / 12-of-16 columns example |
| `tb_payoff_mapper` | write rows, column block, unary pattern (3 -> `1110`), `I` clocks per element, back-pressure |
| `tb_fefet_crossbar` | row-block currents against a mirror of the cells for random WL/DL; `0.25 x 3 x 0.75` gives 9 |
| `tb_current_adc`, `tb_crossbar_periphery` | division, clipping, summation |
| `tb_wta_cell`, `tb_wta_tree` | max, output still old at 0.05 ns and settled at 0.11 ns, 3-level settling, pad leaves, disable |
| `tb_sa_logic` | see below |
| `tb_cnash_top` | end to end at 2 x 2 and 3 x 3, using the harness `cnash_game_run` (see below) |
| `tb_cnash_workloads` | default-size array: padded Battle of the Sexes (~10,000 iterations/run), a padded 3-action game (~15,000), an 8-action game (~52,000) |
| `tb_cnash_full` | default parameters, untouched: 8-action coordination game, 3 runs of ~52,000 iterations |

`tb_sa_logic` runs the controller against arithmetic models of the arrays and
re-derives every decision. It checks:

- `f`, and the exact Metropolis decision, using the controller's random byte
  and an independently computed `-ln` table;
- the recorded pair;
- that every move shifts one interval of one player;
- the geometric iteration count;
- that a run takes `3 + 4n` clocks;
- the rate of uphill accepts at a fixed temperature against the sum of
  `exp(-dE/T)`;
- that a cold run accepts nothing uphill;
- that a hot run ends at an equilibrium.

`cnash_game_run` checks the analog datapath against the matrices on every
clock: the Phase 1 maxima, the Phase 2 products and that the WTA is off in
Phase 2. After each run it checks the reported `f`, the Nash conditions and
the clock count. It counts the load back-pressure, the refused load, both
phases and all three move outcomes. The games in `tb_cnash_top` are:

- Battle of the Sexes at `I = 4`;
- rock-paper-scissors at `I = 3`, whose only equilibrium is the mixed
  `(1/3, 1/3, 1/3)`.

Results with the seeds in the testbenches: every annealing run ended at a Nash
equilibrium.

| game | array | iterations per run | runs ending at an equilibrium | of which mixed |
|---|---|---|---|---|
| Battle of the Sexes | 2 x 2, `I = 4` | ~10,000 | 8 of 8 | 0 |
| rock-paper-scissors | 3 x 3, `I = 3` | ~15,000 | 6 of 6 | 6 |
| padded Battle of the Sexes | 8 x 8 | ~10,000 | 6 of 6 | 0 |
| padded 3-action coordination game | 8 x 8 | ~15,000 | 4 of 4 | 0 |
| 8-action game | 8 x 8 | ~52,000 | 3 of 3 | 3 |

Battle of the Sexes never ends mixed at `I = 4`, because its mixed
equilibrium is not on the grid. This agrees with the published C-Nash results
for that game, which are all pure equilibria.

These are small samples and not a measured success rate. The payoff tables of
the paper's benchmark games (Bird Game, Modified Prisoner's Dilemma) are not
given here. The 3- and 8-action games above are stand-ins of the same sizes and schedule
lengths (10,000, 15,000 and 50,000 iterations for the 2-, 3- and 8-action
games).

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
  rtl/cnash_pkg.sv tb/tb_cnash_full.sv --top-module tb_cnash_full -o sim
./obj_dir/sim
```

The full-size run takes about 2 s of wall time. `--timing` is needed for the
WTA delays and the testbench clocks.

## 9. Files

- `rtl/cnash_pkg.sv`: defaults, fixed-point formats, the `-ln` table function
  and the controller state type.
- `rtl/cnash_top.sv`: the solver.
- `rtl/sa_logic.sv`: the controller, with its helpers `strategy_perturb.sv`
  and `xorshift32.sv`.
- `rtl/strategy_driver.sv`, `rtl/payoff_mapper.sv`: the WL/DL drivers and the
  write path.
- `rtl/fefet_crossbar.sv`, `rtl/crossbar_periphery.sv`, `rtl/current_adc.sv`,
  `rtl/wta_cell.sv`, `rtl/wta_tree.sv`: behavioural models of the analog
  parts.
- `tb/`: the testbenches above and the harness `cnash_game_run.sv`.
