# HyCiM: a constraint-filtering QUBO annealer in synthesizable SystemVerilog

Many combinatorial problems have an inequality constraint. Quadratic knapsack is
the standard example: choose items `x_i ∈ {0,1}` to maximise the pairwise profit
`Σ_ij p_ij x_i x_j` while the total weight `Σ_i w_i x_i` stays at or below a
capacity `C`. The usual way to hand such a problem to an Ising or QUBO solver
folds the constraint into the energy as a penalty. That needs a one-hot slack
vector of up to `C` extra binary variables and much larger matrix elements. The
search space grows from `2^n` to `2^(n+C)`.

HyCiM keeps the constraint out of the QUBO matrix. It minimises

```
E(x) = [ w·x <= C ] * x^T Q x,        Q = -P   (profits stored as magnitudes)
```

A configuration that breaks the constraint has `E = 0`. A feasible one has the
plain QUBO energy, which is zero or negative. Two computing-in-memory arrays do
the work in hardware:

* an **inequality filter** decides `w·x <= C` in one analog-style evaluation;
* a **CiM crossbar** computes `x^T P x`, but only for configurations the filter
  passes.

A **simulated-annealing (SA) controller** proposes configurations and decides
whether to keep them. An infeasible proposal never reaches the crossbar. The
annealer just moves on to its next proposal.

This repository holds a cycle-level digital implementation of that solver. The
FeFET cells, match lines and column currents become integer counts. The
structure and sequencing follow the published design. The default sizes are
those of its evaluation: 100 variables, 16 × 100 filter arrays and 7-bit
crossbar elements.

## Block structure

```
            x_init, schedule                      x_o, E_o
                 |                                   ^
          +------v-----------------------------------+------+
          |                 sa_logic                        |
          +--+-----------------------------^-------------^--+
     x_new,  |                  infeasible |             | qubo, qubo_done
     flt_start                             |             |
          +--v--------------------+   +----+-----------+ |
          |  inequality_filter    |-->| enable_circuit |-+--> xb_start, x
          |  staircase_ctrl       |   +----------------+ |       |
          |  filter_array (work)  | done, feasible, x    |  +----v--------------+
          |  filter_array (repl.) |                      +--|   cim_crossbar    |
          |  ml_comparator        |                         |  crossbar_ctrl    |
          +-----------------------+                         |  crossbar_array   |
                                                            |  column_adc  x N  |
                                                            |  shift_add   x N  |
                                                            |  adder_tree       |
                                                            +-------------------+
```

`hycim_top` wires these together and adds the programming ports.

## The inequality filter

### Multi-level cells and the staircase

Each filter cell holds a small weight `k ∈ {0,1,2,3,4}`. In the physical array
this is a FeFET programmed to one of five threshold voltages, in series with a
resistor that limits its ON current. There are four read voltages,
`Vread4 < Vread3 < Vread2 < Vread1`. A cell holding `k` conducts under
`Vread_j` exactly when `j <= k`. A cell with weight 4 already turns on at the
lowest read voltage; a cell with weight 1 only at the highest.

One evaluation (`staircase_ctrl`) runs like this:

| cycle after start | state  | action                                             |
|-------------------|--------|----------------------------------------------------|
| 1                 | PRE    | match line (ML) precharged to VDD                  |
| 2                 | PH1    | gates of columns with `x_i = 1` get `Vread4`       |
| 3                 | PH2    | `Vread3`                                           |
| 4                 | PH3    | `Vread2`                                           |
| 5                 | PH4    | `Vread1`                                           |
| 6                 | SENSE  | comparator latches                                 |
| 7                 | RESULT | `done`, `feasible`, `x_out` valid                  |

Columns with `x_i = 0` keep their gates at 0. A cell with weight `k` and input 1
conducts in exactly `k` of the four phases. Each conducting cell removes the
same amount of charge from ML per phase. After the four phases

```
ML = VDD - Σ_i x_i Σ_r w_ri = VDD - w·x
```

`filter_array` models this with an integer ML. The precharge level `ML_FULL`
is `ROWS·LEVELS·N`. In each phase the ML register drops by the number of
conducting cells, which an adder tree counts.

### Item weights larger than one cell

All `ROWS` cells of column `i` share the input `x_i` and the ML. The column
therefore contributes `w_i = Σ_r w_ri`, so an item weight is split over the
cells of its column. With 16 rows of 4 levels, a column holds weights 0..64.
The split is up to the host. The testbenches use the greedy split `4,4,…,rest,0,…`.

### The replica and the comparison

A second array, the replica, is driven through the same staircase. Its weight
vector `w'` and its fixed input `x'` satisfy `w'·x' = C`, so its ML ends at
`VDD - C`. The simplest encoding is `x' = all ones` with `C` spread over the
columns, which allows `C` up to `ROWS·LEVELS·N = 6400`. `ml_comparator` is the
two-stage comparator: stage 1 takes the difference, and stage 2 latches its
sign on the SENSE cycle. The rule is

```
ML >= Replica ML   <=>   w·x <= C   ->  feasible (OUT+ = 1), go to the crossbar
ML <  Replica ML   <=>   w·x >  C   ->  infeasible (OUT- = 1), back to the annealer
```

A tie (`w·x = C`) is feasible.

Worked example, `4x1 + 7x2 + 2x3 <= 9` (weight 7 is stored as 4 + 3). The eight
configurations give `w·x = 0, 4, 7, 11, 2, 6, 9, 13`. Six end at or above the
replica ML and are feasible. The two with 11 and 13 end below it.
`tb_inequality_filter` runs exactly this case.

## The CiM crossbar

Matrix column `A_i` (elements `Q[0][i] … Q[N-1][i]`) lives in subarray `i`.
A subarray has `N` rows and `M` bit columns, one bit per cell. Word line `WL_j`
carries `x_j`, and every drain line of subarray `i` carries `x_i`. A cell
conducts when gate, stored bit and drain are all 1, which gives
`x_j · Q[j][i][b] · x_i`. The source line of bit `b` in subarray `i` therefore
carries a current proportional to `x_i Σ_j x_j Q[j][i][b]`.

Each subarray has one ADC behind an `M`-way multiplexer. A computation
(`crossbar_ctrl`) converts the bit columns one per cycle, LSB first, in all
subarrays at once. `shift_add` accumulates `code << b`, and an adder tree sums
the `N` subarray results into the output buffer:

```
start   t      clear accumulators, capture x in the input buffer
CONV    t+1 .. t+M     bit column b converted (b = 0..M-1), bit b-1 accumulated
LAST    t+M+1  bit M-1 accumulated
SUM     t+M+2  output buffer <= Σ_i acc_i
DONE    t+M+3  done; qubo = x^T P x
```

**Sign convention.** The crossbar holds unsigned `M`-bit magnitudes: the
profits `p_ij = -q_ij`. The annealer negates the result (`E = -qubo`). With
profits of at most 100, `M = 7` is enough. Any `N × N` matrix can be loaded.
Load the full symmetric `P` to get `Σ_ij p_ij x_i x_j`. An upper-triangular
form with doubled off-diagonal entries gives the same energy but may need an
extra bit.

`column_adc` outputs the exact number of conducting cells by default
(`BITS = ceil(log2(N+1))`). A smaller `BITS` makes it clip at full scale.

## The annealer

`sa_logic` runs the following loop for `num_iters` iterations:

1. **Start.** Evaluate `x_init`. `E_o` is `-x_init^T P x_init` if it is
   feasible and 0 if it is not (the value of `E` for an infeasible point).
2. **Propose.** Flip one bit of `x_o`. The bit index is `⌊r·N/2^16⌋`, where `r`
   is 16 bits from a 32-bit xorshift generator seeded by the host.
3. **Filter.** If the proposal is infeasible, nothing else happens in this
   iteration: no QUBO computation and no change to `x_o`.
4. **Decide.** Otherwise `E_new = -qubo`. If `E_new < E_o` the move is accepted.
   If not, it is accepted with probability `p = 2^(-ΔE/T)`.
5. **Cool.** `T <- T - (T >> t_shift)`. This happens in every iteration,
   feasible or not.

The probabilistic test needs neither a divider nor an exponential. For a fresh
16-bit uniform sample `u`, `P(-log2 u >= ΔE/T) = 2^(-ΔE/T)`. The hardware
therefore accepts when

```
ΔE · 2^16  <=  T · L(u),     T in Q16.8,   L(u) = -log2(u/2^16) in Q5.8
```

`L(u)` comes from the position of the leading one of `u` plus the next 8 bits
as a linear fraction (`hycim_pkg::neg_log2_q8`). That approximation is at most
0.09 off in the exponent, which raises `p` by at most about 6 %. `ΔE = 0` is
always accepted. `T = 0` never accepts an uphill move. To get the
natural-exponent form `exp(-ΔE/T')`, program `T = T'·ln 2`.

`x_o` is the current state of the chain, not a best-so-far register.
`ev` carries one pulse per iteration: `infeasible`, `accept_better`,
`accept_prob` or `reject_prob`.

**Iteration time.** An infeasible iteration takes 11 cycles: propose, issue,
filter evaluation, enable circuit and update. A feasible one takes 23 cycles
with `M = 7`. A 1000-iteration run at full size takes about 21,000 cycles.

## Using the solver

Host sequence on `hycim_top`, one write per clock:

1. `xb_erase` for one cycle. Then write each element with `xb_wr_en`,
   `xb_wr_row = j`, `xb_wr_col = i`, `xb_wr_data = P[j][i]`.
2. Write each filter cell with `flt_wr_en`, `flt_wr_replica` (0 = working,
   1 = replica), `flt_wr_row`, `flt_wr_col` and `flt_wr_data` (0..4). The
   working column `i` must sum to `w_i`. The replica cells must give `w'·x' = C`.
3. Load `x'` with `rx_load` / `rx_data`.
4. Pulse `sa_start` with `x_init`, `num_iters`, `t_init` (Q16.8), `t_shift`
   (`T` is held constant when `t_shift >= TW`) and `seed`. Wait for `sa_done`,
   then read `x_o` and `e_o`.

Do not write either array while a run is in progress. Assertions flag a write
that lands while the filter or the crossbar is evaluating.

| parameter  | default | meaning                                                        |
|------------|---------|----------------------------------------------------------------|
| `N`        | 100     | variables (items)                                              |
| `ROWS`     | 16      | cells per filter column                                        |
| `LEVELS`   | 4       | weight levels per filter cell (read voltages / phases)         |
| `M`        | 7       | bits per QUBO element (largest element 127)                    |
| `ADC_BITS` | 7       | ADC resolution, `ceil(log2(N+1))` is exact                     |
| `IW`       | 16      | iteration counter width                                        |
| `TW`       | 24      | temperature width, Q(TW-8).8                                   |

At the defaults the solver holds 100-item quadratic knapsack instances with
item weights up to 64, a capacity up to 6400 and profits up to 127. The
crossbar has 100 × 700 cells. Each filter array has 16 × 100 cells.

## What is modelled and where it departs from the silicon

These parts follow the published design:
* the inequality-QUBO formulation;
* the filter (multi-level cells, four-phase staircase from the lowest to the
  highest read voltage, shared ML, replica array, two-stage comparator with
  `>=` meaning feasible);
* the routing of feasible and infeasible configurations;
* the crossbar (column-wise mapping of `Q`, one bit per cell, `x` on word and
  drain lines, a multiplexer and ADC per subarray, shift-add and sum);
* the annealing flow.

These are this implementation's own choices or simplifications:

* **Analog becomes integer.** ML voltage is a charge-unit count. Column current
  is a cell count. Device variation, ML nonlinearity, comparator offset and ADC
  noise are not modelled, so the filter decision and the QUBO value are exact.
* **Timing.** Each precharge, phase and sense step takes one clock, and so does
  each ADC conversion. The physical phase durations are not represented.
* **Programming.** Programming uses digital write ports instead of FeFET write
  pulses. Cells reset to weight 0, and the crossbar also has a whole-array
  `erase`.
* **Annealer details.** Single-bit-flip moves, base-2 Metropolis acceptance,
  geometric cooling and the xorshift generator are not specified by the
  original design. The same goes for the widths `IW` and `TW` and the way the
  initial energy is formed.
* **One of each.** There is one filter and one crossbar. The original
  architecture drawing shows stacked copies of both, but their use is not
  described.
* **Size.** The sizes are those of the 100-item evaluation. They are not those
  of the 32 × 32 FeFET test chip, which used four shared ADCs.
* **Not built.** Off-chip parts are not built: the problem transformation,
  generating initial configurations and the FeFET device itself.

Solution quality depends on the schedule. On the full-size generated instance
in `tb_hycim_full`, one 1000-iteration run from `x = 0` reaches about 89 %
of the profit of a greedy profit-per-weight solution. Other initial
temperatures and cooling rates land between 76 % and 87 %. Single-bit-flip
moves over 1000 iterations touch each variable only about ten times, so this
annealer does not reach the near-optimal success rate reported for the
original system. Better move or schedule choices are where to improve it. On the 16-item instance
in `tb_hycim_top` it reaches 92 % of the exhaustive optimum. The 3-variable
example reaches its optimum (`x = {1,0,1}`, `E = -32`).

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the outputs
with values computed independently in the testbench. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench              | what it checks                                                                 |
|------------------------|--------------------------------------------------------------------------------|
| `tb_staircase_ctrl`    | phase order Vread4→Vread1, 7-cycle latency, start ignored while busy            |
| `tb_filter_array`      | ML after every phase against a per-cell count                                  |
| `tb_ml_comparator`     | `>=` rule including ties, hold without sense                                   |
| `tb_inequality_filter` | full size: the 3-item example (6/2 split) and random 100-item inequalities     |
| `tb_enable_circuit`    | feasible → crossbar start and buffer, infeasible → SA return                   |
| `tb_crossbar_array`    | every multiplexed cell output, `en`, erase                                     |
| `tb_column_adc`        | exact count at 7 bits, clipping at 4 bits                                      |
| `tb_shift_add`         | `Σ code_b·2^b`, clear, hold                                                    |
| `tb_crossbar_ctrl`     | bit-serial schedule, done at `M+3`                                             |
| `tb_cim_crossbar`      | full size: the 3 × 3 example and random matrices, latency                      |
| `tb_sa_logic`          | single-bit moves, acceptance rules, cooling, and the uphill acceptance rate against `Σ 2^(-ΔE/T)` |
| `tb_filter_validation` | full size: 40 random 100-item inequalities, 10 feasible and 10 infeasible sampled configurations each (800 cases); decisions and both MLs |
| `tb_hycim_top`         | 16 items: example solved, random QKP within 10 % of the exhaustive optimum, every mechanism exercised |
| `tb_hycim_full`        | default parameters: one 1000-iteration run on a 100-item instance, every decision and QUBO value cross-checked |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/hycim_pkg.sv tb/tb_hycim_full.sv \
          --top-module tb_hycim_full -Mdir obj_full -o sim && obj_full/sim
```

Swap in any other testbench name. Every run takes seconds.

## Files

`rtl/` holds the following files:
* `hycim_pkg.sv`: default sizes, the filter state encoding, the SA event type,
  xorshift and `-log2`;
* one file per module, as in the block structure above;
* `adder_tree.sv`: the shared balanced adder.

`tb/` holds the testbenches listed above.
