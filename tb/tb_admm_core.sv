// tb_admm_core: checks the ADMM solver on its own (no scaling step).
//
// An L = 8 path problem is equilibrated in the testbench (power-of-two Ruiz
// scaling in double precision, as the scaling unit would do), written into a
// problem memory with its D and E exponents, and solved by the ADMM core. The
// scaled-space solution it returns, multiplied by D, is compared with a
// double-precision reference ADMM run with exact linear solves on the
// original problem. The test also
// checks convergence, feasibility, that rho was adapted (and K recomputed),
// and that the PCG solves ended on their tolerance test. A second start on
// the same data must give the same result (state fully re-initialised).
module tb_admm_core;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 8;
  localparam int IW = $clog2(L + 1);
  localparam int AW = $clog2(L);
  localparam int PCG_MAX = 60;
  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic busy, done, converged;
  logic [15:0] iters, k_calcs, rho_changes;
  logic [31:0] pcg_iters;
  fx_t r_prim, r_dual;
  logic [IW-1:0] pm_rd_idx, rd_idx, t_idx = '0;
  pm_word_t pm_rd_word, wr_word = '0;
  logic [NA_BLK-1:0] we_a = '0;
  logic [NP_BLK-1:0] we_p = '0;
  logic [LANES-1:0] we_l = '0, we_u = '0, we_d = '0, we_e = '0;
  logic [AW-1:0] x_ridx = '0;
  fxw_t x_rdata;
  int checks = 0, failures = 0;
  qp_problem q, qs;
  int dexp [], eexp [];

  problem_mem #(.L(L)) u_mem (.clk, .rd_idx(pm_rd_idx), .rd_word(pm_rd_word),
    .wr_idx(t_idx), .wr_word, .we_a, .we_p, .we_l, .we_u, .we_d, .we_e);
  admm_core #(.L(L), .MAX_ITER(1000), .PCG_MAX_ITER(PCG_MAX)) dut (.*);

  always #5 clk = ~clk;
  initial begin #60_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(output real xh []);
    #1 start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    while (!done) @(posedge clk);
    $display("ADMM: %0d iterations, %0d PCG iterations, %0d K calculations, %0d rho changes, converged %0d",
             iters, pcg_iters, k_calcs, rho_changes, converged);
    xh = new[q.N];
    for (int i = 0; i < L; i++) begin
      #1 x_ridx = AW'(i);
      @(posedge clk);
      #1;
      for (int c = 0; c < 6; c++) xh[6*i+c] = fx2r(x_rdata[c]) * (2.0 ** dexp[6*i+c]);
    end
  endtask

  initial begin
    real xh [], xh2 [], xr [], err, d2;
    q = new(L);
    q.gen_path(3);
    qs = new(L);
    qs.gen_path(3);
    scale_problem(qs, 10, dexp, eexp);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int w = 0; w <= L; w++) begin
      #1 t_idx = IW'(w); wr_word = qs.word(w);
      for (int c = 0; c < 6; c++) begin
        wr_word.e[c] = sexp_t'(eexp[6*w+c]);
        if (w < L) wr_word.d[c] = sexp_t'(dexp[6*w+c]);
      end
      we_a = (w < L) ? '1 : NA_BLK'(9);
      we_p = (w < L) ? '1 : '0;
      we_l = '1; we_u = '1; we_e = '1; we_d = (w < L) ? '1 : '0;
      @(posedge clk);
    end
    #1 we_a = '0; we_p = '0; we_l = '0; we_u = '0; we_d = '0; we_e = '0;
    run(xh);
    ref_solve(q, 1500, xr);
    err = 0.0;
    foreach (xr[i]) if (i != 3 && rabs(xr[i] - xh[i]) > err) err = rabs(xr[i] - xh[i]);
    $display("max |x - x_ref| = %f, violation %f", err, q.max_violation(xh));
    check(converged, "ADMM converged");
    check(err < 0.06, "solution matches the reference (stopping tolerance 5e-3)");
    check(q.max_violation(xh) < 0.05, "solution feasible");
    check(rho_changes >= 1 && k_calcs == rho_changes + 1, "rho adapted and K recomputed once per change");
    check(pcg_iters < 32'(iters) * PCG_MAX, "PCG solves ended on tolerance");
    run(xh2);
    d2 = 0.0;
    foreach (xh[i]) if (rabs(xh[i] - xh2[i]) > d2) d2 = rabs(xh[i] - xh2[i]);
    check(d2 == 0.0, "second run reproduces the first");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
