# A tiled higher-order Hopfield solver for 3-SAT

This is synthesizable SystemVerilog for a hardware Hopfield network that searches for a
satisfying assignment of a 3-SAT formula. Most Ising machines accept only quadratic
energies, so a 3-SAT formula must first be quadratized, which adds auxiliary
variables. This design works on the cubic energy of the formula directly: a polynomial
(PUBO) energy instead of a quadratic (QUBO) one. It follows the memristor-based PUBO solver
described by Hizzani et al., "Memristor-based hardware and algorithms for
higher-order Hopfield optimization solver outperforming quadratic Ising machines". That
work designs the circuits in 28 nm CMOS with memristive crossbars. Here the analog parts
are modelled by exact integer arithmetic, so the whole solver can be simulated cycle by
cycle and its algorithm checked. The paper's main configuration is used: a
150-variable problem split into 8 tiles of 19 variables, with 400 word lines per tile.

## The energy the hardware descends

Each variable `x_i` is 0 or 1. A clause such as `(x_a OR NOT x_b OR x_c)` is violated
exactly when `(1-x_a) * x_b * (1-x_c) = 1`. The energy `E(x)` is the sum of these products
over all clauses, which is the number of violated clauses. `E = 0` means the formula is
satisfied.

`E` is multilinear, so flipping one variable changes the energy by exactly

    dE_i = (1 - 2 x_i) * g_i,     g_i = dE/dx_i

For every clause that contains `x_i`, `g_i` picks up the product of the other two
literal factors. Write each factor as `f = alpha + beta*x`: `(1, -1)` for a positive
literal and `(0, 1)` for a negative one. Then the contribution of one clause to `g_i` is

    sigma * (alpha_b alpha_c + beta_b alpha_c x_b + alpha_b beta_c x_c + beta_b beta_c x_b x_c)

Here `sigma` is -1 if `x_i` appears positive and +1 if it appears negated. So each
gradient is a weighted sum of four kinds of term: a constant, single state bits, and
products of two state bits. The hardware evaluates this sum for all variables at once.

## Tiles: a configurable encoder in front of a gradient crossbar

Enumerating every pair product would need N(N-1)/2 word lines: 11,175 for N = 150. Most
of those rows would be empty for any one formula. Instead, each tile
(`pubo_tile`) holds its own list of the products its gradients actually use.

```
 full state vector (N bits)
        |
   +----v------------+     N_WL word lines     +---------------------+
   | cenc_array      |------------------------>| gradient_array      |
   | (pattern / row) |                         | 2 bit lines / var   |
   +-----------------+                         +----------+----------+
                                                          | i_pos, i_neg (N_COL)
   prng_xorshift32 -> noise_dac -- dac (noise - offset) ->|
                                                   +------v------+
                                                   | tia_comp    |  flip candidates
                                                   +------+------+
   prng_xorshift32 ----------------------> select_1_of_n (1-from-N_COL)
                                                          |
                                     cand, partial state (N_COL bits, <= 1 flipped)
```

* **`cenc_array`**: the configurable encoder (CENC). It has one row per gradient word
  line. Each row stores a pattern, which is a set of state bits. The row's word line is
  active when all those bits are 1. An empty pattern is always active and carries the
  constant term. In silicon this is a memristor array whose bit-line current is
  compared with a threshold. Here it is the equivalent AND.
* **`gradient_array`**: a 1T1R crossbar with `N_WL` rows. Each variable has two bit lines,
  one for positive weights and one for negative weights. Each device holds a
  `WBITS`-bit conductance level. The array's output is the two column sums over the active
  rows, so `g_i = i_pos - i_neg`.
* **`noise_dac`**: a current DAC fed by a PRNG. It adds zero-mean noise of amplitude
  `amp` to each column, and subtracts the offset accumulator (see below).
* **`tia_comp`**: the TIAs and comparators. They form `dE_i = (1-2x_i)*g_i`. A
  variable becomes a flip candidate when `dE_i + dac_i < 0`.
* **`select_1_of_n`**: picks one candidate at random. It uses a rotating priority whose
  start point is `(rnd * n) >> 16`, with `rnd` taken from a second PRNG.

A tile outputs `cand` and its partial state, which is its 19 bits with at most one bit
flipped. Tile `t` owns variables `19t .. 19t+18`. The last tile of a 150-variable problem
uses only 17 of its columns. Its two unused columns never propose a flip.

Why 400 rows are enough: a tile's 19 variables occur in about 19 x 3 x 4.3 = 245 clause
positions of a 150-variable formula with the usual 4.3 clauses per variable. That gives at
most one constant row, one row per distinct other variable (up to 149), and about one pair
row per occurrence. This comes to roughly 1 + 140 + 245, about 386 rows. The original
design reports that 400 word lines and 19 variables per tile hold the SATLIB benchmarks.
In the full-size testbench, a random 635-clause instance needed at most 381 rows in any
tile.

## One step per clock: focus + offset

`state_update_unit` holds the state vector and sends it to every tile. In each clock
cycle of a run (`busy`), the following happens:

1. All tiles evaluate in parallel, combinationally.
2. **Focus.** If any tile proposes a flip, a random 1-from-N_TILE encoder picks one
   proposing tile. That tile's partial state is written into the state register, and the
   offset accumulator is cleared. Exactly one variable changes.
3. **Offset.** If no tile proposes a flip, the accumulator grows by `e_offset`, saturating
   at 4095. Because the DAC subtracts it from every `dE`, moves with zero energy change
   (and later uphill moves) become candidates on the next steps. This lets the search
   drift across the large flat regions of a 3-SAT landscape instead of getting stuck.
4. **Annealing.** The noise amplitude starts at `amp0` and drops by one every
   `anneal_period` steps, down to 0. Setting `anneal_period = 0` holds the amplitude
   constant.

The run ends when the SAT checker (`sat_checker`) reports that every active clause is
satisfied (`done`, `solved`), or when `max_steps` steps have been taken (`done` without
`solved`). `sat_checker` stores each clause as two literal masks. It counts
unsatisfied clauses (`n_unsat`) combinationally from the state register. The step on
which `sat` is seen is not taken, so the final `state` is a satisfying assignment.

Timing: a one-cycle `start` loads `init_state`, `amp0` and a zero offset. After that,
each cycle is one algorithmic step, so `steps` equals the number of clock cycles spent in
RUN. `done` rises one cycle after the last step and stays high until the next `start`.

## Using the top level, `pubo_solver_top`

Parameters, with defaults: `N=150`, `N_COL=19`, `N_WL=400`,
`N_TILE=ceil(N/N_COL)=8`, `WBITS=4`, `M=645` clause slots.

1. **Program the gradient rows.** Do this once per row of every tile, because the arrays
   model non-volatile devices and reset does not clear them. Raise `row_we` with
   `row_tile`, `row_addr`, `row_mask` (the CENC pattern: one bit per variable, at most
   two set for 3-SAT) and `row_wpos`/`row_wneg` (per column, the magnitude of the
   positive or negative coefficient of that term). Give unused rows zero weights.
2. **Program the clauses.** Write each of the `M` slots once through
   `cl_we`/`cl_idx`/`cl_pos`/`cl_neg`/`cl_act`. Unused slots get `cl_act = 0`.
3. **Run.** Pulse `start` with `init_state`, `amp0`, `anneal_period`, `e_offset` and
   `max_steps` set, then wait for `done`.

The coefficients come from the expansion above: for tile `t` and each variable `i` of
it, add each clause's four terms into the row of that term, in column `i - 19t`. The
testbench package `tb/sat3_pkg.sv` does exactly this mapping and can serve as a
reference. A smaller formula also fits: variables that appear in no clause have zero
gradient, so they only flip as free moves and never affect satisfiability.

Debug outputs: `flip` (a variable changed this cycle), `flip_tile`, `offset`, `amp`,
`n_unsat`.

## What is modelled, and how faithfully

The digital blocks are ordinary RTL: the PRNGs (`prng_xorshift32`), the 1-from-n
encoders, the state and update unit, and the tile and top wiring. The analog and memristive
blocks are behavioural models, and each file says so in its header: `cenc_array`,
`gradient_array`, `tia_comp`, `noise_dac` and `sat_checker`. They compute, in integers,
what the circuit computes with currents. The unit is one weight LSB (one conductance
level). Device variation, read noise, IR drop, settling time and the energy figures of
the original circuits are outside this model. The models are still synthesizable, so the
whole design can be built as a purely digital solver. In that form each tile is a 400 x 150
AND plane followed by 38 adder trees of 400 inputs.

Taken from the original design:

* the algorithm: the cubic energy, one flip per step, and the focus+offset rule with its
  offset reset on a flip
* the tile structure: CENC, gradient array, PRNG + noise DAC, TIA & comparators, and a
  1-from-N_col encoder in each tile
* a central unit that holds the state, runs a 1-from-N_tile encoder, broadcasts the state
  and collects partial states
* the sizes: 150 variables, 19 per tile, 400 word lines, 8 tiles
* xorshift PRNGs, 32 bits wide
* two bit lines per variable, read from the 20-variable floor plan's 40 bit lines for 20
  comparators

This design's own choices (the original does not specify them):

* 4-bit conductances (`WBITS`), and the integer widths of currents, DAC codes (16-bit
  signed), the offset (12-bit, saturating) and the amplitude (8-bit)
* xorshift shift triple (13, 17, 5), the seeds, and two PRNGs per tile (one for noise,
  one for selection)
* the noise law: `±((r[7:0]*amp)>>8)`, with the 8 bits of `r` rotated by 5 bit positions
  per column. The offset is injected through the same DAC.
* the comparator rule `dE + dac < 0`, a strict inequality, so zero-change moves wait for
  the offset
* the random-start rotating-priority selector, which is close to uniform but not exactly
  uniform
* the CENC pattern semantics: an AND of true state bits, with the empty pattern as the
  constant row
* the use of the SAT checker as the stop condition. The original introduces this
  clause-crossbar checker for its quadratic solver.
* a linear annealing schedule, the start/done handshake, `max_steps`, and row-wide write
  ports in place of memristor programming circuits
* a fully combinational step: the state register is the only state on the loop besides
  the PRNGs

Not included:

* the quadratic (QUBO) baseline solver and its n/2-from-n encoder
* the fixed AND-encoder of the 20-variable version. A CENC programmed with every pair
  computes the same thing.
* word-line drivers, which only buffer
* the physical interconnect between tiles
* memristor write circuitry

## Simulating

All files are IEEE 1800-2017. `rtl/pubo_pkg.sv` must come first; other modules are
found by name. For example, to run the full-size end-to-end test:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/pubo_pkg.sv tb/sat3_pkg.sv tb/tb_pubo_solver_top.sv \
    --top-module tb_pubo_solver_top -o sim
./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops on a watchdog.

| testbench | what it checks |
|---|---|
| `tb_prng_xorshift32` | reset value, Marsaglia's published first output for seed 2463534242, hold, 1000 steps against a bit-level model |
| `tb_noise_dac` | per-column codes against an integer reference; noise bounded by `amp` |
| `tb_cenc_array` | word lines against a bit-by-bit AND, including empty and full patterns and reprogramming |
| `tb_gradient_array` | column sums against the testbench's own sums, including the full-scale row |
| `tb_tia_comp` | flip decisions, including the exact `dE + dac = 0` boundary |
| `tb_select_1_of_n` | one-hot grant to the first request at or after the random start, for n = 19 and 8 |
| `tb_sat_checker` | unsatisfied count for all 1024 assignments of a 10-variable formula |
| `tb_state_update_unit` | write-back of a proposing tile, offset growth, saturation and clearing, annealing, both stop conditions, one step per cycle |
| `tb_pubo_tile` | exact candidate sets without noise, the noise allowance with noise, unused columns, every column eventually chosen |
| `tb_pubo_solver_top_small` | end to end at 40 variables / 4 tiles / 200 rows / 170 clauses |
| `tb_pubo_solver_top` | end to end at the default size: 150 variables / 8 tiles / 400 rows, 635 clauses |
| `tb_workload_sizes` | random satisfiable formulas of 20, 50, 100 and 150 variables (4.23 clauses per variable) on the default-size solver, each solved from random starts |

The two end-to-end testbenches generate a random satisfiable formula: a hidden random
assignment is drawn first, and only clauses it satisfies are kept. They map the formula,
program the solver and run it from a random state. At every step they recompute the
energy and all energy changes from the clauses alone, then check the following:

* the SAT checker's count
* that at most one variable flips
* that a flip happens whenever one is certain whatever the noise
* that the flipped variable's `dE` is within the noise-plus-offset allowance
* the offset bookkeeping
* the step count

They also require each mechanism to occur at least once: downhill flips, zero/uphill
flips, offset growth, offset-induced flips, annealing steps, several tiles proposing at
once, flips in the last tile, a SAT stop and a step-limit stop. At full size, a typical run
solves its 635-clause instance in a few thousand to a few tens of thousands of steps;
the simulation takes about 20 seconds.

`tb_workload_sizes` covers the range of problem sizes on one solver of the default size.
Smaller formulas occupy the first variables and tiles, and the remaining rows and clause
slots are programmed empty. The test allows up to four restarts of 25,000 steps each,
because a stochastic solver is judged by its time to solution over repeated runs. In
these tests the worst tile needed between about 160 rows (20 variables) and 397 rows (150
variables) of its 400.

One observation from these runs concerns the noise. Annealing the amplitude all the way
to zero sometimes leaves the focus+offset rule circling through the same few states. A
small constant amplitude (`amp0 = 2` with `anneal_period = 0`, so the noise is in -1..1)
breaks those cycles and solved every instance tried within the restarts.

## Changing the design

* **Sizes.** Set `N`, `N_COL` and `N_WL` on `pubo_solver_top`; `N_TILE` follows. The
  internal current width grows with `N_WL` and `WBITS` automatically.
* **Weight resolution.** Raise `WBITS` if a formula has a term whose summed coefficient
  exceeds 15.
* **Noise law or comparator rule.** Each lives in one behavioural model, `noise_dac` or
  `tia_comp`.
* **A pipelined step.** To break the combinational path from the state register through
  a tile back to the state register, register `cand`/`pstate` in the tile. The
  update rule must then account for proposals that are one step stale.
