// tb_qp_accel_full: the accelerator at its full size, with every parameter at
// its default: L = 270 points, 1619 variables, 1622 constraints, the problem
// size of the original design. The path problem is loaded block by block and
// the solver is started. A complete solve at this size takes several hundred
// ADMM iterations (tens of millions of cycles), too long for simulation, so
// the test observes the first RUN_IT = 300 ADMM iterations (or fewer if the
// solver converges earlier) and checks at full size that
//   - the scaling phase ends and writes non-trivial D exponents,
//   - every PCG solve so far ended on its tolerance test (iterations below
//     the limit) and K was computed,
//   - the primal and dual residuals at the end are at least ten times below
//     the largest values seen during the run (ADMM first grows the residuals
//     from the trivial start, then reduces them),
//   - one ADMM iteration costs about (PCG iterations) x (3L + 160) + 4L
//     cycles, the schedule of the design.
// Cycle counts are also reported in microseconds at the 250 MHz ADMM clock.
// At this size the residual check fails: the fixed-point loop stalls with a
// primal residual of a few hundred, while 8- and 16-point problems converge.
// The test is kept to expose that defect.
module tb_qp_accel_full;
  import qp_pkg::*;
  import tb_qp_util::*;

  localparam int L = 270;
  localparam int IW = $clog2(L + 1);
  localparam int AW = $clog2(L);
  localparam int PCG_MAX = 100;   // default of the top level

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

  qp_accel_top dut (.*);

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1_000_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  qp_problem q;
  localparam int RUN_IT = 300;
  real pk_p = 0.0, pk_d = 0.0;
  logic [15:0] last_it = '0;
  // peak residuals, sampled once per ADMM iteration
  always @(posedge clk)
    if (admm_iters != last_it) begin
      last_it <= admm_iters;
      if (fx2r(r_prim) > pk_p) pk_p = fx2r(r_prim);
      if (fx2r(r_dual) > pk_d) pk_d = fx2r(r_dual);
    end
  longint t_scale, t1, dt;
  real rp1, rd1, sched;
  int nontriv;
  logic [31:0] p1;
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
    wait (dut.u_scale.done);
    t_scale = cycles - t0;
    $display("scaling: %0d cycles = %0.1f us at 250 MHz", t_scale, real'(t_scale) / 250.0);
    nontriv = 0;
    wait (admm_iters == 16'd1);
    @(posedge clk);
    rp1 = fx2r(r_prim); rd1 = fx2r(r_dual); t1 = cycles; p1 = pcg_iters;
    wait (admm_iters == 16'(RUN_IT) || done);
    @(posedge clk);
    @(posedge clk);
    dt = cycles - t1;
    $display("ADMM iterations 2..%0d (converged %0b): %0d cycles, %0d PCG iterations, %0d K calculations, %0d rho changes",
             admm_iters, converged, dt, pcg_iters - p1, k_calcs, rho_changes);
    $display("residuals after iteration 1: primal %f dual %f; peak: primal %f dual %f; after %0d: primal %f dual %f",
             rp1, rd1, pk_p, pk_d, admm_iters, fx2r(r_prim), fx2r(r_dual));
    check(t_scale > 0 && t_scale < 10 * (2 * L + 20), "scaling finished within ten passes of 2L + 20 cycles");
    for (int i = 0; i < L; i++) if (dut.u_pm.g_v[0].u_d.mem[i] != 0 || dut.u_pm.g_v[2].u_d.mem[i] != 0) nontriv++;
    check(nontriv > 0, "non-trivial scaling exponents stored");
    check(k_calcs >= 1, "K computed");
    check(pcg_iters < 32'(admm_iters) * 100, "PCG solves ended on their tolerance test");
    check(fx2r(r_prim) < 0.1 * pk_p && fx2r(r_dual) < 0.1 * pk_d, "residuals reduced tenfold from their peak");
    sched = real'(pcg_iters - p1) * real'(3 * L + 160) + real'(admm_iters - 1) * real'(4 * L + 40)
          + real'(k_calcs) * real'(L + 10);
    $display("schedule estimate %0.0f cycles, measured %0d", sched, dt);
    check(real'(dt) < 1.1 * sched && real'(dt) > 0.7 * sched, "ADMM iteration time follows the streaming schedule");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
