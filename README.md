# A sparsity-aware QP accelerator for path planning

## Design idea

Path smoothing in an autonomous-driving planner is a quadratic program,

    minimise 1/2 x'Px   subject to   l <= Ax <= u,

with six unknowns per trajectory point (lateral offset l, heading error
phi, curvature k, curvature rate k', and two slack variables eps1, eps2).
Every constraint couples at most two neighbouring points, and P is diagonal.
So all the matrices of the problem are thin bands with the same small pattern
repeated at every point. For L = 270 points there are 1619 variables and
1622 constraints, but A has only 17L-5 non-zeros and P has 5L-1.

The accelerator uses this regularity everywhere. Instead of a general sparse
format it stores the j-th non-zero of every point's pattern in memory block
j. A has 17 blocks and P has 5, each L entries deep. So one memory read
returns everything that belongs to one point. Every unit is a streaming pass
over the points, one point (six rows or six columns) per clock cycle, with no
row indices, column pointers or irregular loops. The solver is OSQP-style
ADMM, preceded by Ruiz equilibration. The linear system inside each ADMM
iteration is solved by a Jacobi-preconditioned conjugate gradient (PCG) in
24-bit fixed point. Its per-iteration operators are fused into three
streaming stages, so intermediate vectors are handed on in registers instead
of memories.

## Data layout

* **Point word.** The decision vector is kept as L words of six lanes
  `{l, phi, k, k', eps1, eps2}`. Point 0 has no k', so that lane is padding
  and is held at zero. This gives n = 6L-1 variables.
* **Constraint word.** Word w < L holds six rows: the three dynamic-model
  rows of point w (the start-state rows for w = 0), the curvature bound, and
  the front and rear obstacle-corridor rows. Word L holds the two end-state
  rows plus four padding rows. This gives m = 6L+2 rows.
* **A blocks.** Blocks 0..5 hold the six entries of the 3x3 transition block
  that reaches back to point w-1. Blocks 6..8 hold the identity part of the
  dynamic rows, block 9 the control input, block 10 the curvature row, and
  blocks 11..13 and 14..16 the (l, phi, eps) coefficients of the front and
  rear rows. The two end-state coefficients occupy index 0 of blocks 0 and 3,
  which point 0 leaves free.
* **K record.** K = P + sigma I + A' rho A is symmetric and
  block-tridiagonal over points. Per point it is stored as the lower
  triangle of its 6x6 diagonal block (14 values) and the block coupling it
  to the previous point (7 values): 36L-17 non-zeros in all.

`qp_pkg` holds these layouts and the arithmetic helpers. `problem_mem`
holds the blocks (built from `sp_ram`), plus l, u and the scaling exponents.

## Scaling (`scaling_unit`)

Each pass makes two sweeps over the problem memory:

* **Norm sweep.** The column norms of [P; A] and the row norms of A are
  formed, six of each per cycle. A word's rows are complete when that word
  is read. A point's columns are complete one word later.
* **Update sweep.** P <- DPD, A <- EAD, l <- El and u <- Eu are written back
  in place, and the running D and E are updated.

The factors are rounded to powers of two, d = 2^-floor(log2(norm)/2), so
every scaling is an exact shift and D and E are stored as small exponents. A
pass takes about 2L cycles. Ten passes (the number OSQP uses) bring the
spread of the row and column norms from hundreds down to a few units.

## ADMM module (`admm_core`)

The controller sequences five streaming parts over the point words:

1. **Calculate K (`kcalc_unit`).** This runs only at the start and after rho
   changed. A row of word w touches only points w-1 and w. So one pass over
   A gives every K record: the diagonal block of point w-1 is completed and
   the coupling block of point w is formed. That is six columns of K per
   cycle.
2. **Update b (`b_update`).** It forms b = sigma x + A'(rho z - y) through
   the transposed product unit `spmv_at`. The cost has no linear term.
3. **PCG (`pcg_engine`)**, described below.
4. **Update x, z, y (`vec_update`).** z~ = A x~ comes from `spmv_a` and is
   used in the same cycle. The relaxed value alpha z~ + (1-alpha) z is formed
   once and reused for both the projection onto [l, u] and the dual update.
   z~ is never stored.
5. **Check (`term_check`).** It computes the infinity norms of the primal
   residual Ax - z and the dual residual Px + A'y. It then applies the
   absolute/relative termination test and recommends a rho change (doubling
   or halving) when one residual exceeds three times the other. The
   recommendation is applied every tenth iteration, which also marks K for
   recomputation.

**Step sizes.** Equality rows (l = u) use rho_eq = 5 rho_bar, and inequality
rows use rho_bar, with rho_bar starting at 0.1. This balances the number of
ADMM iterations against the number of PCG iterations. alpha = 1.6 and
sigma = 1e-6.

## PCG solver (`pcg_engine`, `spmv_k`, `fx_div`)

The solver starts from x0 = 0 and uses M = diag(K). Two scalar divisions
(alpha and beta) split an iteration into three streaming stages, each one
pass of L cycles:

* **Stage 1.** Kp is computed by `spmv_k`. p'Kp is accumulated from each Kp
  word as it leaves the SpMV.
* **Stage 2.** r <- r - alpha Kp, y = M^-1 r and r'y are chained in one
  cycle per word. x <- x + alpha p runs alongside.
* **Stage 3.** p <- y + beta p.

`spmv_k` keeps the partial sum of a point and adds C(i+1)' p(i+1) when the
next record arrives. So a product over L points takes L+2 cycles (272 at
L = 270) and delivers six results per cycle.

The divider is a restoring divider with a fixed 72-cycle latency. It also
computes the six Jacobi reciprocals per point word whenever K changed. One
PCG iteration takes 3L + 2x72 + about 16 cycles. The loop ends when
r'y <= 2^-22 r0'y0, or after 100 iterations.

## Number formats

* The PCG solver runs in 24-bit fixed point with 15 fraction bits
  (`ap_fixed<24,9>`-style) and wide accumulators.
* Scaling and the ADMM vector updates run in 32-bit fixed point with 20
  fraction bits (Q12.20).

The original mixed-precision design uses floating point for these outside
parts. Here, exact power-of-two equilibration keeps the scaled data within
the Q12.20 range.

## Top level (`qp_accel_top`)

The problem is written through an indexed load port, one memory block per
write enable: 17 A enables, 5 P enables, and 6 each for l and u. After a
`start` pulse the scaling unit runs, then the ADMM core. When `done` pulses,
the result is read one point word at a time through `res_idx`/`res_x`, one
cycle after the index. It is already unscaled, x = D x_scaled, by a shift.

Status outputs report:

* whether the solver converged;
* the ADMM and PCG iteration counts;
* the number of K calculations and rho changes;
* the final residuals.

All parameters default to the full problem size (L = 270).

## Verification

Every block has a self-checking testbench in `tb/`:

* The streaming units are compared against dense double-precision
  references of the same path problem. Their cycle latencies are checked:
  one cycle for the A products and the K calculation, L+2 cycles for a K
  product, 72 cycles per division, and two cycles for the vector update.
* `tb_pcg_engine` compares against a Cholesky solve.
* `tb_admm_core` and `tb_qp_accel_top` compare the full solver against a
  double-precision ADMM run with exact linear solves. The end-to-end test
  also checks feasibility and the objective. It confirms that rho adaptation,
  K recomputation, tolerance exits of PCG, projection onto an active
  obstacle bound, and convergence all occurred.
* `tb_qp_accel_full` runs the top level with all defaults on a 270-point
  problem, the largest size simulated. A complete solve at this size would
  need tens of millions of cycles, and the solver does not converge there
  (see the known defect below). So the test observes the first 300 ADMM
  iterations. It checks the scaling time, the PCG tolerance exits, that the
  residuals fall well below their early peak (this check fails), and that
  the cycle count follows the streaming schedule: about 3L + 160 cycles per
  PCG iteration plus 4L per ADMM iteration. The largest complete solve that
  is simulated and checked has 8 points (16 points also converges).

For every module a copy with one deliberate bug was written,
and its testbench detects it.

## Differences from the original system and things not built

* The CPU side is software, not hardware: B-spline smoothing, DP path
  search, QP formulation, and the FIFO/thread pipeline between planning
  steps.
* The DDR memory and the AXI4 bus interfaces (AXI4-Lite control, two
  128-bit data ports) are not built. They are replaced by the plain load and
  result ports.
* The scaling and ADMM modules share one on-chip problem memory and one
  clock. The original runs them as separate 200 MHz and 250 MHz IPs
  exchanging data through DDR.
* The PCG vector operators run with six lanes. The final original design
  doubles this to twelve, which is about 31 % faster at a large logic cost.
* The termination tolerance defaults to 5e-3 rather than the OSQP value
  1e-3. With 24-bit PCG solves, the residuals of this fixed-point loop level
  off just above 1e-3. The tolerance is a parameter.
* The rho update rule (double/halve on a 3x residual imbalance) and the PCG
  stopping test (on the preconditioned residual) are our own choices. The
  original fixes only the update period of ten iterations.
* **Known defect: long horizons do not converge.** On 8- and 16-point
  problems the solver converges to the double-precision ADMM solution.
  On 40- and 270-point problems the loop stalls with a primal residual of a
  few hundred. The full-size test reports this as a failure. The probable
  cause is the range of the fixed-point formats: the dual variables of the
  dynamic-model rows grow with the horizon length and saturate, either in
  Q12.20 or in the Q9.15 right-hand side of the PCG solve. Wider formats or
  scaling of the duals would be the next step.
