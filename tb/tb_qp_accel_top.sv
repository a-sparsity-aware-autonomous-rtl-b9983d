// tb_qp_accel_top: end-to-end test of the accelerator on a small path-planning
// QP (L = 8 points, 47 variables, 50 constraints). The problem is loaded
// block by block, scaled, solved, and the unscaled solution is compared with a
// double-precision reference ADMM solution; feasibility of the hardware
// solution is checked against the original (unscaled) constraints. The test
// also counts that each mechanism of the design happened: more than one K
// calculation (a step-size change), PCG exits on tolerance,
// an active obstacle bound (projection), and ADMM convergence.
module tb_qp_accel_top;
  import qp_pkg::*;
  import tb_qp_util::*;

  localparam int L = 8;
  localparam int IW = $clog2(L + 1);
  localparam int AW = $clog2(L);
  localparam int PCG_MAX = 60;

  logic clk = 0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  always #5 clk = ~clk;

  logic [IW-1:0] ld_idx;
  pm_word_t      ld_word;
  logic [NA_BLK-1:0] ld_we_a;
  logic [NP_BLK-1:0] ld_we_p;
  logic [LANES-1:0]  ld_we_l, ld_we_u;
  logic start, busy, done, converged;
  logic [15:0] admm_iters, k_calcs, rho_changes;
  logic [31:0] pcg_iters;
  fx_t r_prim, r_dual;
  logic [AW-1:0] res_idx;
  fxw_t res_x;

  qp_accel_top #(.L(L), .SCALE_ITERS(4), .MAX_ITER(1000), .PCG_MAX_ITER(PCG_MAX)) dut (.*);

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #60_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  qp_problem q;
  real xr [], xh [];
  real err, tol, ov, oh, viol;
  int active;
  longint t0;

  initial begin
    q = new(L);
    q.gen_path(3);
    ld_we_a = '0; ld_we_p = '0; ld_we_l = '0; ld_we_u = '0; ld_idx = '0; ld_word = '0;
    start = 0; res_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // load one memory block at a time, as the host would
    for (int w = 0; w <= L; w++) begin
      ld_idx  <= IW'(w);
      ld_word <= q.word(w);
      for (int j = 0; j < NA_BLK; j++) begin
        ld_we_a <= '0; ld_we_a[j] <= (w < L) || (j == 0) || (j == 3);
        @(posedge clk);
      end
      ld_we_a <= '0;
      if (w < L) begin ld_we_p <= '1; @(posedge clk); ld_we_p <= '0; end
      ld_we_l <= '1; ld_we_u <= '1; @(posedge clk);
      ld_we_l <= '0; ld_we_u <= '0;
    end
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    t0 = cycles;
    wait (done);
    @(posedge clk);
    $display("solve: %0d cycles, ADMM iterations %0d, PCG iterations %0d, K calculations %0d, rho changes %0d, converged %0d",
             cycles - t0, admm_iters, pcg_iters, k_calcs, rho_changes, converged);

    // read back the unscaled solution
    xh = new[q.N];
    for (int i = 0; i < L; i++) begin
      res_idx <= AW'(i);
      @(posedge clk); @(posedge clk); #1;
      for (int c = 0; c < LANES; c++) xh[6*i+c] = fx2r(res_x[c]);
    end

    ref_solve(q, 1500, xr);
    err = 0.0;
    foreach (xr[i]) if (rabs(xr[i] - xh[i]) > err) err = rabs(xr[i] - xh[i]);
    tol = 0.05;
    $display("max |x_hw - x_ref| = %f  r_prim %f r_dual %f", err, fx2r(r_prim), fx2r(r_dual));
    check(err < tol, "solution matches the reference");
    viol = q.max_violation(xh);
    $display("max constraint violation of the hardware solution = %f", viol);
    check(viol < 0.05, "hardware solution feasible");
    ov = q.objective(xr); oh = q.objective(xh);
    $display("objective: reference %f hardware %f", ov, oh);
    check(rabs(oh - ov) < 0.05 * (1.0 + rabs(ov)), "objective close to the reference");
    check(xh[6*0+0] > 0.55 && xh[6*0+0] < 0.65, "start state l0 = 0.6 held");

    // mechanisms
    active = 0;
    for (int i = L/3; i < L/2; i++) begin
      real v; v = 0.0;
      for (int c = 0; c < q.N; c++) v += q.A[6*i+4][c] * xh[c];
      if (v > -0.35) active++;
    end
    $display("mechanism counts: converged=%0d k_calcs=%0d rho_changes=%0d active_obstacle_rows=%0d pcg_tol_exits=%0d",
             converged, k_calcs, rho_changes, active, (pcg_iters < 32'(admm_iters) * PCG_MAX));
    check(converged, "ADMM termination check reached convergence");
    check(k_calcs >= 2, "K recomputed after a step-size change");
    check(rho_changes >= 1, "step size rho updated");
    check(active >= 1, "projection onto an active obstacle bound");
    check(pcg_iters < 32'(admm_iters) * PCG_MAX, "PCG left on its tolerance test");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
