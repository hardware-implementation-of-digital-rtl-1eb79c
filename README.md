# A digital memcomputing 3-SAT solver for small FPGAs

This is synthesizable SystemVerilog for a hardware solver of Boolean
satisfiability (3-SAT) problems. It does not search: it integrates a
system of ordinary differential equations, the *digital memcomputing machine*
(DMM) equations for 3-SAT. Their dynamics is built so that their stable
points are the solutions of the problem. Every Boolean variable becomes a
continuous variable `v_n` in [-1, 1]. The sign of `v_n` is its truth value
(`v_n >= 0` means 1). Every clause gets two "memory" variables: a short-term
one, `x_s,m`, and a long-term one, `x_l,m`. The memory variables grow while a
clause stays unsatisfied and push its literals towards truth harder and
harder. The solver runs forward-Euler time steps until the signs of the
variables satisfy every clause.

The hardware is *clause-serial and variable-parallel*. One datapath handles a
single clause per clock cycle. All `N` variables are updated together, in one
extra cycle at the end of every time step. A step therefore takes `M + 1`
cycles for `M` clauses, whatever `N` is. The memory variables live in block
RAM. The clauses are constants built into the design, so the circuit is
generated for one problem instance.

The RTL follows a published small-FPGA implementation of this scheme (an
Artix-7 board at 100 MHz, problems of up to 90 variables). Where that
description stops (number format, time step, control, initialisation), the
choices made here are listed in [Departures and own choices](#departures-and-own-choices).

## The equations being integrated

Each clause `m` has three literals. For its literal `k` on variable `v_k`,
`q_k = +1` for a plain literal and `q_k = -1` for a negated one. Let
`a_k = 1 - q_k v_k`. This runs from 0 (the literal is fully true) to 2 (the
literal is fully false). Then:

| quantity | definition |
|---|---|
| clause function | `C_m = ½ min(a_1, a_2, a_3)` (0: satisfied by some literal, 1: all literals fully false) |
| gradient term of literal k | `G_k = ½ q_k min(a_j, a_l)` over the two *other* literals |
| rigidity term of literal k | `R_k = ½ (q_k − v_k)` if `a_k` is the minimum, else 0 |
| variable | `dv_n/dt = Σ_m [ x_l x_s G_n,m + (1 + ζ x_l)(1 − x_s) R_n,m ]` |
| short memory | `dx_s/dt = β (x_s + ε)(C_m − γ)` |
| long memory | `dx_l/dt = α (C_m − δ)` |

The bounds are `v ∈ [−1, 1]`, `x_s ∈ [ε, 1−ε]` and `x_l ∈ [1, 10⁴·M]`, kept
by clipping after every step. The constants are α = 5, β = 20, γ = 1/4,
δ = 1/20 and ε = 10⁻³. ζ depends on the clause-to-variable ratio: ζ = 0.001
for M/N = 4.3 and ζ = 0.1 for M/N = 7.

The `G` term pulls each variable of a clause towards satisfying it. Its
weight `x_l x_s` is large for clauses that have been unsatisfied for a long
time. The `R` term acts only on the literal that currently decides the
clause, and holds it in place. Its weight `(1 + ζ x_l)(1 − x_s)` is large
when the short memory says the clause is fine.

Start point: every `v_n` starts at a fixed pseudo-random value in [−1, 1).
Each clause starts at `x_l = 1` and `x_s = C_m(0)`. That value is written as
it is, without clipping to [ε, 1−ε]. The first update clips it.

## One time step in M + 1 clock cycles

```
 cycle:     0        1        2      ...    M-1        M
 clause:    c0       c1       c2            c(M-1)     (none)
 action:  evaluate clause, write x_s,x_l back,         v_n += dt*S_n  (all n)
          add 3 contributions to the sums S_n          S_n := 0
 read:      c1       c2       c3            c0         c0 (again)
```

In the cycle for clause `m`, the clause table and the block RAM present
clause `m` and its word `(x_s,m, x_l,m)`, because the address was issued one
cycle earlier. The bank of variables supplies the three `v` values. The
clause unit computes `C_m`, `G`, `R`, the three contributions and the new
memory values in one combinational pass. The new memory values are written
back to word `m`. At the same time the read for clause `m+1` is issued, so a
read and a write never hit the same word. The extra cycle `M` updates every
variable at once. It also gives the synchronous memories the cycle they need
to present clause 0 again.

Forward Euler means every clause of a step sees the same `v(t)`, because the
variables change only in cycle `M`. The contributions use `x(t)` as read from
RAM, and `x(t+dt)` goes back to RAM.

**Stopping.** While a step sweeps the clauses, the controller ANDs the
Boolean satisfaction of every clause under the current signs of `v`. If the
whole sweep was satisfied, cycle `M` raises `solved` instead of updating, and
the variables hold a solution. `steps` then counts the Euler updates taken.
The exact time from the cycle after `start` to `solved` is
`(steps + 2)·(M + 1) + 1` cycles: one load cycle, one initialisation sweep,
`steps` updating sweeps and the final checking sweep.

**Initialisation.** `start` loads the start point into the variable registers
and runs one sweep with `init = 1`. In it every clause writes `x_s = C_m(0)`
and `x_l = 1` to RAM, and nothing is accumulated.

## Blocks

```
               +----------------+   clause m (idx, neg)
  raddr ------>|  clause_table  |-----------------------+
     |         +----------------+                       |
     |         +----------------+   x_s,m  x_l,m        v            +-----------------+
     +-------->|      xmem      |----------------->+---------+ dv[3] |  variable_bank  |
               | (block RAM)    |<-----------------| clause_ |------>|  v[N], sums[N]  |
  waddr,we --->|                |  x_s', x_l'      |  unit   |<------|  Euler update   |
               +----------------+                  +---------+ v[3]  +-----------------+
                                                        | sat
               +----------------+                       |
               | dmm_controller |<----------------------+   load / acc_en / update
               | M+1 sub-steps  |-------------------------------------------> (bank)
               +----------------+
```

| file | role |
|---|---|
| `rtl/dmm_pkg.sv` | number format, model constants, fixed-point helpers, clause type, instance and start-point generator |
| `rtl/clause_table.sv` | ROM of the M clauses, registered read |
| `rtl/xmem.sv` | block RAM of `(x_s, x_l)`: one read port and one write port, registered read |
| `rtl/clause_unit.sv` | combinational datapath for one clause |
| `rtl/variable_bank.sv` | `v` registers, one accumulator per variable, read multiplexers, parallel Euler update with clipping |
| `rtl/dmm_controller.sv` | sub-step counter, addresses, initialisation, update, stop rule, step counter |
| `rtl/dmm_solver.sv` | top level |

Each accumulator compares its own index with all three literal indices of
the current clause. A clause that named the same variable twice would still
be summed correctly. This comparison and the read multiplexers are what
grows linearly with `N`.

## Number format

Every continuous quantity is a signed fixed-point number of 48 bits with 16
fraction bits (`dmm_pkg::fx_t`). The integer range is needed by `x_l`, whose
ceiling `10⁴·M` is 3.87·10⁶ at M = 387, and by the sums of its products.
With 16 fraction bits, ε and ζ = 0.001 are 66 units of the last place.
Products are formed at full width and shifted back, truncating toward
minus infinity. `β` and `α` are integers and multiply without rounding.
The time step is `dt = 2^−DT_SHIFT`, applied as an arithmetic shift. The
default is `DT_SHIFT = 5`.

Because of the truncation, a trajectory is not the same as a floating-point
integration of the same equations from the same start. Both settle on
solutions, but not necessarily on the same one, nor after the same number of
steps.

## The instance is part of the design

`dmm_pkg::gen_clause(SEED, N, m)` computes clause `m` during elaboration,
following the planted-solution recipe for hard random 3-SAT:

1. Pick three distinct variables.
2. Negate 0, 1 or 2 of them, with probabilities 0.08, 0.34 and 0.58. These
   are `p0`, `3p1` and `3p2` for `p0 = 0.08`, `p1 = (1−4p0)/6` and
   `p2 = (1+2p0)/6`. Every clause is then true when all variables are 1.
3. Hide that solution: for a random half of the variables, flip every
   occurrence in every clause.

The random numbers come from a counter-based integer hash, `hash32`, of
`(SEED, stream, index)`. A clause can therefore be computed on its own, and
a testbench can regenerate the instance without reading any file. The start
point `init_v(SEED, n)` comes from the same hash. To run a different problem
of your own, replace the body of `gen_clause`, or replace `clause_table` with
a ROM of your clauses. The rest of the design only needs the `clause_t`
entries.

## Top-level interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock (the reference board runs at 100 MHz) |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `start` | in | 1 | one-cycle pulse: load the start point and solve (also restarts after `solved`) |
| `busy` | out | 1 | initialising or integrating |
| `solved` | out | 1 | stays high once the signs of `v` satisfy every clause |
| `steps` | out | 32 | Euler updates taken |
| `assignment` | out | N | Boolean solution, `assignment[n] = (v_n >= 0)` |
| `v` | out | N×48 | the continuous variables |

| parameter | default | meaning |
|---|---|---|
| `N` | 90 | variables |
| `M` | 387 | clauses (M/N = 4.3) |
| `ZETA` | `ZETA_4P3` (0.001) | use `ZETA_7` (0.1) for M/N = 7 |
| `DT_SHIFT` | 5 | time step 2⁻⁵ |
| `SEED` | 1 | selects the instance and the start point |

## What it does on the evaluated sizes

Simulated results with SEED = 1 and dt = 2⁻⁵, one instance per size. The
time is at 100 MHz and counts from `start` to `solved`.

| N | M/N | M | Euler steps | cycles | time |
|---|---|---|---|---|---|
| 10 | 4.3 | 43 | 124 | 5,545 | 0.06 ms |
| 30 | 4.3 | 129 | 60 | 8,061 | 0.08 ms |
| 50 | 4.3 | 215 | 551 | 119,449 | 1.2 ms |
| 70 | 4.3 | 301 | 2,003 | 605,511 | 6.1 ms |
| 90 | 4.3 | 387 | 14,136 | 5,485,545 | 55 ms |
| 10 | 7 | 70 | 23 | 1,776 | 0.02 ms |
| 30 | 7 | 210 | 35 | 7,808 | 0.08 ms |
| 50 | 7 | 350 | 1,404 | 493,507 | 4.9 ms |
| 70 | 7 | 490 | 448 | 220,951 | 2.2 ms |
| 90 | 7 | 630 | 761 | 481,454 | 4.8 ms |

Ten instances per size (SEED = 1..10), for every size but the default one:

| N | M/N | M | steps: min | median | max | median time |
|---|---|---|---|---|---|---|
| 10 | 4.3 | 43 | 18 | 77 | 1,476 | 0.035 ms |
| 30 | 4.3 | 129 | 29 | 118 | 1,014 | 0.16 ms |
| 50 | 4.3 | 215 | 179 | 676 | 11,932 | 1.5 ms |
| 10 | 7 | 70 | 16 | 104 | 899 | 0.075 ms |
| 30 | 7 | 210 | 35 | 265 | 800 | 0.56 ms |
| 50 | 7 | 350 | 103 | 192 | 1,404 | 0.68 ms |
| 70 | 4.3 | 301 | 106 | 2,258 | 40,564 | 6.8 ms |
| 70 | 7 | 490 | 95 | 411 | 1,498 | 2.0 ms |
| 90 | 7 | 630 | 69 | 428 | 1,383 | 2.7 ms |

These times are of the same order as published FPGA measurements of this
scheme, which range from about 0.1 ms at N = 10 to between 10 ms and 1 s at
N = 90 for M/N = 4.3. The spread between instances of one size is wide, as
it is there: one to two orders of magnitude. So few instances are not
enough to estimate a scaling exponent.

After generic synthesis, the default top holds about 8,700 flip-flop bits,
mostly the 90 × 2 variable and sum registers of 48 bits. It also holds
63 kbit of memory: the 387 × 96-bit `xmem` and the 387 × 51-bit clause ROM.
No FPGA LUT count is available for comparison. The published Artix-7 figure
is about 5,200 + 582·N LUTs.

## Departures and own choices

The published description fixes the equations, the constants, the bounds,
the start point, the M+1-cycle schedule, and the use of block RAM with
compiled-in instances. Everything below is this design's own choice:

- **Number format and time step.** 48-bit fixed point with 16 fraction bits,
  and a constant `dt = 2⁻⁵`. Neither is published.
- **What is stored where.** `x_s` and `x_l` are in block RAM. `v` and the
  sums are in registers, because all `N` variables update in one cycle.
- **Memory values used by the sums.** The contributions use `x(t)`. The
  published schedule lists `x(t+dt)` and `G(t)`, `R(t)` in the same
  sub-step without saying which one feeds the other.
- **Ties.** When two literals share the minimum, both receive the `R` term,
  as the definition of `R` reads literally.
- **Sum in the variable equation.** Both terms are summed over clauses. In
  the printed equation the sum sign typographically covers only the first
  term, and the `R` term's arguments contain a typo (`v_m` for `v_j`).
- **Initialisation.** A separate sweep writes `x_s(0) = C_m(0)`. The start
  point is a hash of `SEED`, not a stored table of random numbers.
- **Stopping rule, handshake, reset and step counter.** Solution detection
  by a satisfied sweep; the `start`/`busy`/`solved` handshake; asynchronous
  active-low reset; the `steps` counter.
- **Instance generator.** The three variables of a clause are drawn
  distinct. The random source is an integer hash.
- **Left out.** The host side that loads instances, and board-specific I/O.
  The fully parallel variant (every clause evaluated in one cycle) is also
  left out: the published work rejects it as too costly beyond 3 variables
  and 6 clauses.

## Simulation

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal rtl/dmm_pkg.sv \
  rtl/clause_table.sv rtl/xmem.sv rtl/clause_unit.sv rtl/variable_bank.sv \
  rtl/dmm_controller.sv rtl/dmm_solver.sv tb/dmm_solver_tb.sv \
  --top-module dmm_solver_tb -Mdir obj -o sim && ./obj/sim
```

Every testbench is self-checking. Each one ends with a line
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `clause_table_tb` | read latency; index range; distinct variables; planted solution satisfies every clause; shares of 0/1/2 false literals near 0.08/0.34/0.58 |
| `xmem_tb` | read-one-cycle-later and write behaviour against a shadow array |
| `clause_unit_tb` | every output against a double-precision model of the equations: random, tie, corner and bound cases, init mode |
| `variable_bank_tb` | accumulation (including a variable named twice), Euler update, clipping at both bounds, read port, reload |
| `dmm_controller_tb` | cycle-by-cycle schedule of a small controller; stop after exactly K steps |
| `dmm_solver_tb` | N = 10, M = 43 end to end, solved twice. Checks the assignment against the instance, the cycle count against the schedule, and that every step is M+1 cycles. Counts each mechanism: initialisation sweep, update, variable clipping, `x_s` clipping, `R` selection, solution detection |
| `dmm_solver_full_tb` | the same end-to-end checks with every parameter at its default (N = 90, M = 387), about 20 s of simulation |
| `dmm_workload_tb` | the nine other sizes of the first table, all solved and checked |
| `dmm_instances_tb` | ten instances each of N = 10, 30, 50 at both ratios (60 solvers side by side, each clock stopped once solved) |
| `dmm_instances_large_tb` | ten instances each of N = 70 at both ratios and N = 90 at M/N = 7, in the same way (about 90 s of simulation). N = 90 at M/N = 4.3 runs as a single instance only, in `dmm_solver_full_tb` |

## Changing it

- **Another size or ratio.** Set `N`, `M` and `ZETA` on `dmm_solver`.
  `clause_table` asserts that `N` fits the 16-bit index field.
- **Another instance.** Change `SEED`, or change `gen_clause`.
- **Time step.** Change `DT_SHIFT`. Larger steps make the memory
  variables' dynamics coarser. `β·dt` must stay well below 1 for `x_s` to
  behave.
- **Word length.** Change `FX_W` and `FX_F` in `dmm_pkg`. The integer part
  must hold `10⁴·M` and the largest sum.
