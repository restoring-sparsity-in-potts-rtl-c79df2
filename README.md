# A mean-field-constrained Potts machine for balanced graph partitioning

Balanced partitioning asks for a split of a graph's vertices into Q parts of
(nearly) equal size with as few edges as possible running between parts. The
cut objective is local: each vertex only cares about its neighbours. The
balance requirement is global. Written as an energy, it adds a term
`sum_k (N_k - N/Q)^2` (N_k is the size of part k), and that term couples every
vertex to every other vertex. A probabilistic machine that has to evaluate
that term exactly loses the sparsity that lets it update many vertices at once.

This design keeps the sparsity by splitting the work in two:

* **Probabilistic half.** Each vertex is a *p-dit*, a stochastic variable with
  Q states. It only looks at its graph neighbours. Vertices that share no edge
  are updated in parallel.
* **Classical half.** A small controller counts how many vertices are in each
  state after every sweep, low-pass filters these counts and broadcasts one bias
  value per state. That shared *mean field* takes the place of the all-to-all
  balance couplings. A vertex in an over-full part is pushed out of it; a vertex
  considering a move into an over-full part is held back.

The RTL implements the FPGA kernel described in "Restoring Sparsity in Potts
Machines via Mean-Field Constraints" (Callahan-Coray, Lee, Jiang, Camsari). Its
configuration is a 10 x 10 x 10 nearest-neighbour cube (1000 vertices,
2700 edges) split three ways. A sweep takes 37 clock cycles and the anneal is
an 800-step staircase schedule. Where that description stops, this RTL makes
its own choices; they are listed under "Departures and own choices".

## The p-dit update (`pdit_update`)

A p-dit with current state `s` proposes a candidate `c`, one of the two states
next to `s` on a ring of Q states. One random bit picks which one. It then
computes the energy difference between staying and moving, scaled by the
inverse temperature beta:

```
beta*E(s->c) = sum over neighbours j of f(s, c, s_j)  +  B[s] - B[c] - beta*lambda

f = -beta   if neighbour j is in state s   (moving would cut this edge)
    +beta   if neighbour j is in state c   (moving would heal this edge)
     0      otherwise

B[k] = beta*lambda * Nhat[k]               (broadcast mean-field bias)
```

The p-dit moves with probability `sigmoid(beta*E)`. A move that lowers the
energy is therefore taken more often than not. This rule satisfies detailed
balance with respect to the p-dit's local energy. The `B[s] - B[c] - beta*lambda`
term is the change in the balance penalty `lambda * sum_k (Nhat_k - N/Q)^2`
when one vertex moves from `s` to `c`, with the factor two absorbed into lambda.
The constant N/Q drops out of the difference, so the controller only needs the
counts themselves.

Hardware details:

* **Random source.** Each p-dit has its own 32-bit xorshift generator, which
  advances once per update. Bit 16 picks the candidate and bits 15:0 are the
  uniform number for the acceptance test.
* **Sigmoid.** A 256-entry table holds `sigmoid(x)` for `x` from -16 to +15.875
  in steps of 1/8 (the resolution of the energy word), as 16-bit probabilities.
  Outside that range the energy is clamped to the end of the table. The table
  is computed at elaboration from `sigmoid(k/8) = 1/(1 + r^k)` with
  `r = exp(-1/8) = 947573834 / 2^30`, using integer arithmetic only
  (`potts_pkg::build_sigmoid_lut`). The move is accepted when the random number
  is below the table entry.
* **Timing.** One update per enabled cycle, fully combinational between the
  state registers. The new state appears after the clock edge.

## The lattice and its two colour groups (`pdit_array`)

Vertex `(x, y, z)` has index `x + L*y + L*L*z` and is wired to up to six lattice
neighbours. The boundaries are open, so there are `3*L*L*(L-1)` edges: 2700 for
L = 10. The graph is hard-wired; there is no edge memory.

The cube is bipartite. Vertices with even `x+y+z` form colour group 0 and the
rest form group 1. Within a group no two vertices are neighbours, so a whole
group can update in one clock cycle, each vertex reading a consistent snapshot
of the other group. A full Monte Carlo sweep of the probabilistic half is
therefore two cycles. The array also reports `flips`, the number of vertices
that changed state in the current cycle.

## The mean-field controller (`mfc_controller`)

After each sweep the controller runs a fixed 35-cycle pipeline:

| cycles after start | block | work |
|---|---|---|
| 0 - 31 | `batched_popcount` | count batch b (32 consecutive vertices) per cycle into Q counters, giving `N[k]` |
| 32 | `lowpass_filter` | `Nhat[k] += ((N[k] << 8) - Nhat[k]) >>> 3`, i.e. `Nhat = N/8 + 7*Nhat/8` |
| 33 | `mfc_bias` | `P[k] = beta_lambda * Nhat[k]` (one multiplier per state) |
| 34 | `mfc_bias` | `B[k] = P[k] >>> 8`, registered and broadcast to all p-dits |

The filter gain alpha = 1/8 is a power of two, so the filter needs no
multiplier. The only multiplications in the whole machine are the Q products of
cycle 33. The product beta*lambda comes from the host already computed, so no
p-dit multiplies anything. On the first run after `start` the filter loads
`Nhat = N` instead of taking a filter step.

## One sweep, cycle by cycle (`sweep_sequencer`)

```
cycle  0      colour group 0 updates         (uses B from the previous sweep)
cycle  1      colour group 1 updates
cycle  2      controller starts: population count batch 0
...
cycle 33      count batch 31
cycle 34      filter
cycle 35      multiply by beta*lambda
cycle 36      broadcast B     -> cycle 37 is cycle 0 of the next sweep
```

The two halves never run at the same time; an assertion in the top checks that
the p-dits stay still while they are being counted. The error measured at the
end of sweep n sets the bias for sweep n+1. At 100 MHz a sweep takes 370 ns.

A job starts with one cycle in which every p-dit loads its seed and draws a
random initial state. One controller run follows, so the first sweep already
has a bias. The machine then runs `N_STEPS * sweeps_per_step` sweeps. After the
final sweep the controller runs once more so that `counts` describes the final
partition, and `done` rises. A whole job lasts
`1 + 35 + 37 * N_STEPS * sweeps_per_step` cycles plus any stall cycles.

**Schedule stream.** The anneal is a staircase of `N_STEPS` = 800 steps. Each
step has one pair (beta, beta*lambda) and the same number of sweeps. The host
offers pairs on a valid/ready handshake (`sched_valid`, `sched_ready`,
`sched_data`), and the sequencer keeps one pair in a prefetch register. The new
pair takes effect when the controller starts after the last sweep of a step.
The bias for the first sweep of the new step is therefore already scaled by the
new beta*lambda, and the p-dits see the new beta from that sweep on. If the next
pair has not arrived in time, the machine stalls (`stall` high) with every
register frozen. The generators do not advance during a stall, so a stalled job
ends in exactly the same state as an unstalled one. An assertion checks the
host's side of the rule: an offered pair stays unchanged until it is taken.

## Number formats

| quantity | format |
|---|---|
| beta, beta*lambda | 10-bit signed, 3 fractional bits (Q6.3): 0 ... 63.875 in steps of 0.125 |
| energy terms, bias `B[k]` | 24-bit signed, 3 fractional bits |
| counts `N[k]` | 10 bits (up to 1000) |
| filtered counts `Nhat[k]` | 18 bits, 8 fractional bits |
| acceptance probability, random number | 16 bits |

The paper gives only the 10-bit Q6.3 format of beta; every other width here is
this design's choice. Two things follow from Q6.3:

* **beta saturates at 63.875.** A schedule ending at T = 0.01 (beta = 100) is
  clipped. This does not matter, because at beta above about 16 every decision
  with a non-zero energy difference is already deterministic.
* **Small beta*lambda rounds to zero.** With lambda = 0.1 and round-to-nearest on the host,
  beta*lambda rounds to 0 until beta reaches about 0.6. During the hot start of a schedule
  the balance bias is off altogether, and the lattice is free to order into
  unbalanced domains. The bias then has to undo them once it switches on.

## Stability of the feedback loop, and what a run looks like

The mean field is a delayed feedback loop. The controller sees the populations
one sweep late, and the filter adds a lag of about eight sweeps. At low
temperature every vertex of an over-full part reacts to the same bias in the
same sweep, so the loop can overshoot. The population then swings between parts
from sweep to sweep instead of settling. Large lambda or large alpha make this
worse; a slower schedule makes it better.

Simulation of the full-size machine shows this clearly. All runs used the
cube, lambda = 0.1, alpha = 1/8, and the 800-step staircase for T = 8 -> 0.01
(linear in T):

* **1 sweep per step (800 sweeps).** The balance bias switches on (see above)
  only in the last ~150 sweeps, when the lattice has already ordered. The loop
  is still oscillating when the schedule ends, with parts such as 534/232/234
  and a cut near 1400.
* **10 sweeps per step (8000 sweeps).** The oscillation dies out and the run
  ends with parts 336/332/332 and a cut of 183. That meets the 1 % balance
  target (no part above 336.67), and the best known balanced cut for this
  instance is 177.

Use long enough schedules, and tune lambda against alpha if the populations in
`counts` keep swinging. For scale: at 100 MHz, 8000 sweeps take 3 ms of kernel
time. The reference cut of 177 is reached in half of all runs at roughly
1.8 x 10^5 sweeps (66 ms in the FPGA measurements of the paper).

## Checking the p-dit on the 2D Potts model

The update rule is meant to sample the Potts distribution correctly, not just
to find low cuts. A plain ferromagnetic Potts model tests that. Take a square
L x L lattice with periodic boundaries and switch off the balance term
(beta*lambda = 0, zero bias). The p-dit cell then samples
H = -sum over bonds of delta(s_i, s_j). The exact critical point of this model
is beta_c = ln(1 + sqrt Q). At beta_c the fraction of unlike bonds is
1 - (1 + 1/sqrt Q)/2.

`tb_potts2d` builds three such lattices with L = 16 out of `pdit_update` cells,
for Q = 2, 3 and 4. It updates them in two checkerboard colours. The cube's
top level is not used, because its wiring is fixed to three dimensions. For
each beta it runs 1000 sweeps to settle and then averages over 3000 sweeps.
Unlike-bond fraction u and order parameter m = (Q * largest part / N - 1)/(Q - 1):

| beta | 0.25 | 0.5 | 0.75 | 0.875 | 1.0 | 1.125 | 1.25 | 1.5 | 2.0 |
|---|---|---|---|---|---|---|---|---|---|
| Q=2: u | 0.44 | 0.36 | 0.25 | 0.145 | 0.063 | 0.034 | 0.018 | 0.006 | 0.001 |
| Q=2: m | 0.07 | 0.10 | 0.28 | 0.67 | 0.92 | 0.96 | 0.98 | 0.99 | 1.00 |
| Q=3: u | 0.61 | 0.54 | 0.45 | 0.368 | 0.197 | 0.077 | 0.039 | 0.012 | 0.001 |
| Q=3: m | 0.06 | 0.08 | 0.12 | 0.21 | 0.70 | 0.92 | 0.97 | 0.99 | 1.00 |
| Q=4: u | 0.70 | 0.64 | 0.56 | 0.504 | 0.434 | 0.149 | 0.065 | 0.021 | 0.002 |
| Q=4: m | 0.05 | 0.06 | 0.08 | 0.12 | 0.17 | 0.85 | 0.95 | 0.98 | 1.00 |

Interpolated linearly to the exact beta_c, u is compared with theory:

| Q | beta_c | u at beta_c, exact | u measured |
|---|---|---|---|
| 2 | 0.881 | 0.146 | 0.141 |
| 3 | 1.005 | 0.211 | 0.193 |
| 4 | 1.099 | 0.250 | 0.209 |

Each transition sits where theory puts it. The larger gap at Q = 4 is expected
from the strong finite-size effects of that model, and from the interpolation
across a steep step. Beta moves in steps of 1/8 in Q6.3. That is too coarse to
fit a finite-size curve T_c(L) over several lattice sizes, so no such fit is
attempted.

## Top-level interface (`potts_mfc_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst` | in | clock, synchronous active-high reset |
| `start` | in | begin a job (when idle or done) |
| `sweeps_per_step` | in | sweeps per schedule step (0 is treated as 1) |
| `seed` | in | seed of all random generators |
| `sched_valid`, `sched_ready`, `sched_data` | in/out/in | schedule stream; `sched_data` is `{beta, beta_lambda}` (`potts_pkg::sched_entry_t`) |
| `busy`, `done`, `stall` | out | job running, job finished (held), waiting for the schedule |
| `sweep_count`, `step` | out | completed sweeps, schedule step in use |
| `states[N]` | out | state of every vertex (the partition) |
| `counts[Q]`, `nhat[Q]`, `bias[Q]` | out | last population count, filtered counts, broadcast bias |
| `flips` | out | vertices that changed state this cycle |

Parameters: `L` = 10, `Q` = 3, `POP_CYCLES` = 32, `ALPHA_SHIFT` = 3, `N_STEPS` = 800.
`Q` can be set to any value of 2 or more. `POP_CYCLES` can be any value; the
batch size follows from it.

## Files

| file | contents |
|---|---|
| `rtl/potts_pkg.sv` | formats, schedule entry type, sigmoid table, xorshift and seed hash |
| `rtl/pdit_update.sv` | one p-dit |
| `rtl/pdit_array.sv` | the L^3 lattice with its two colour groups |
| `rtl/batched_popcount.sv` | 32-cycle population count |
| `rtl/lowpass_filter.sv` | alpha = 2^-SHIFT filter |
| `rtl/mfc_bias.sv` | beta*lambda multipliers and bias broadcast register |
| `rtl/mfc_controller.sv` | the 35-cycle controller pipeline |
| `rtl/sweep_sequencer.sv` | sweep timing, schedule stream, stall, job control |
| `rtl/potts_mfc_top.sv` | top level |
| `tb/tb_ref_pkg.sv` | reference models for the testbenches |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_potts_full.sv` | a full-size annealing job at the default parameters |
| `tb/tb_potts2d.sv` | 2D ferromagnetic Potts lattices (Q = 2, 3, 4) of p-dit cells around the critical point |

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. The package must come first on the command
line. From the top of the tree, for example:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/potts_pkg.sv $(ls rtl/*.sv | grep -v potts_pkg) tb/tb_ref_pkg.sv \
    tb/tb_potts_mfc_top.sv --top-module tb_potts_mfc_top
./obj_dir/Vtb_potts_mfc_top
```

* `tb_pdit_update` compares one p-dit cycle by cycle with a reference model
  that has its own generator, candidate rule, energy and real-valued sigmoid.
  It also measures the acceptance frequency at fixed energies.
* `tb_pdit_array` predicts every vertex of a 4 x 4 x 4 lattice every cycle.
* `tb_batched_popcount`, `tb_lowpass_filter`, `tb_mfc_bias` and
  `tb_mfc_controller` check exact values and the 32-cycle and 35-cycle
  latencies.
* `tb_sweep_sequencer` uses a model controller and a slow host. It checks the
  37-cycle sweep, the order of the colour groups, the use of each schedule pair
  and the stall.
* `tb_potts_mfc_top` anneals a 6 x 6 x 6 cube (200 sweeps). It requires a stall,
  step changes, moves in both colour groups, an active bias and an uphill move
  to have happened.
* `tb_potts_full` runs the full-size job described above: default parameters,
  8000 sweeps, about 300 000 cycles, well under a minute of simulation. It
  requires the 1 % balance and a cut within 20 % of 177.

* `tb_potts2d` runs the 2D Potts check above. For each Q it requires the
  unlike-bond fraction to fall as beta rises, disorder at beta = 0.25 and order
  at beta = 2. It also requires u at beta_c to be within 0.06 of the exact value.

## Departures and own choices

Following the paper: the candidate rule on the state ring, the cut term `f`,
the balancing term `B[s] - B[c] - beta*lambda` with precomputed beta*lambda,
Q6.3 beta, the filter with alpha = 1/8 by shifting, one multiplier per state,
the cube with two colour groups updated in one cycle each, the 37-cycle sweep
(2 + 32 + 3), and the 800-step staircase with one (beta, beta*lambda) pair per
step.

This design's own choices:

* the random generators, seeding and initial state;
* the sigmoid table and the energy, count and filter widths;
* the batch layout of the population count;
* how the three bias cycles divide up the work;
* the valid/ready schedule interface with its prefetch register and stall;
* the preamble controller run and the start value of the filter;
* the order in which a new schedule pair takes effect;
* synchronous reset.

Not included:

* the host processor;
* the PCIe shell and its block RAMs, which on the prototype carry the schedule
  and the results; the schedule stream and the readout ports of the top take
  their place;
* an on-chip schedule memory, which the paper only suggests as a future
  improvement;
* the paper's other experiments (the 4elt mesh and the 2D Potts validation),
  which ran on CPU and GPU and need graphs this fixed lattice cannot hold.
