// tb_pcg_engine: checks the PCG solver on the K matrix of a path problem.
//
// K = P + sigma I + A^T rho A of an L = 8 problem (rho 0.1 / 0.5, as the
// ADMM solver starts) is built in double precision, packed into records and
// written through the K port; a random right-hand side goes through the b
// port. Two solves are run: the first with new_k (preconditioner computed),
// the second with a new b and new_k low (preconditioner reused). Each
// solution is compared with a Cholesky solve, the iteration count must stay
// below the limit (the tolerance test must end the loop), and the cycle count
// of each solve is checked against the schedule: per iteration three passes
// of L cycles, two divisions and a fixed pipeline overhead.
module tb_pcg_engine;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 8;
  localparam int AW = $clog2(L);
  localparam int MAXIT = 100;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic k_we = 1'b0, b_we = 1'b0, start = 1'b0, new_k = 1'b0;
  logic [AW-1:0] k_idx = '0, b_idx = '0, x_ridx = '0;
  krec_t k_data = '0;
  fxw_t b_data = '0;
  logic busy, done;
  logic [15:0] iters;
  pcw_t x_rdata;
  int checks = 0, failures = 0, cycle = 0;
  real K [][];
  qp_problem q;

  pcg_engine #(.L(L), .MAX_ITER(MAXIT), .TOL_SHIFT(22)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #20_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_solve(bit nk, int seed);
    real b [], xr [], err, bn;
    int c0, cyc;
    b = new[q.N];
    foreach (b[i]) b[i] = fx2r(r2fx((real'($urandom_range(2000)) - 1000.0) / 500.0));
    b[3] = 0.0;
    for (int i = 0; i < L; i++) begin
      #1 b_we = 1'b1; b_idx = AW'(i);
      for (int c = 0; c < 6; c++) b_data[c] = r2fx(b[6*i+c]);
      @(posedge clk);
    end
    #1 b_we = 1'b0; start = 1'b1; new_k = nk;
    c0 = cycle;
    @(posedge clk);
    #1 start = 1'b0;
    while (!done) @(posedge clk);
    cyc = cycle - c0;
    chol_solve(K, b, xr);
    err = 0.0; bn = 0.0;
    for (int i = 0; i < L; i++) begin
      #1 x_ridx = AW'(i);
      @(posedge clk);
      #1;
      for (int c = 0; c < 6; c++) begin
        if (i == 0 && c == 3) continue;
        if (rabs(pc2r(x_rdata[c]) - xr[6*i+c]) > err) err = rabs(pc2r(x_rdata[c]) - xr[6*i+c]);
        if (rabs(xr[6*i+c]) > bn) bn = rabs(xr[6*i+c]);
      end
    end
    $display("solve %0d: %0d iterations, %0d cycles, max error %f (max |x| %f)", seed, iters, cyc, err, bn);
    check(err < 0.01 * (1.0 + bn), "PCG solution matches the direct solve");
    check(iters > 0 && iters < 16'(MAXIT), "PCG stopped on its tolerance test");
    // schedule: 3 passes of L words + 2 divisions (72 cycles) + overhead per
    // iteration, plus the preconditioner (L divisions) when new_k is set
    check(cyc <= int'(iters) * (3 * L + 2 * 72 + 16) + (nk ? L * 80 : 0) + 4 * L + 20,
          "cycle count within the iteration schedule");
  endtask

  initial begin
    q = new(L);
    q.gen_path(19);
    K = new[q.N]; foreach (K[i]) K[i] = new[q.N];
    for (int i = 0; i < q.N; i++)
      for (int j = 0; j < q.N; j++) begin
        real s;
        s = (i == j) ? q.Pd[i] + 1e-6 : 0.0;
        for (int r = 0; r < q.M; r++) s += q.A[r][i] * ((q.lo[r] == q.hi[r]) ? 0.5 : 0.1) * q.A[r][j];
        K[i][j] = s;
      end
    K[3][3] = 1.0;   // padding variable: decoupled, unit diagonal
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < L; i++) begin
      pmat6_t dg, cp;
      dg = '0; cp = '0;
      for (int r = 0; r < 6; r++)
        for (int c = 0; c < 6; c++) begin
          dg[r][c] = r2pc(K[6*i+r][6*i+c]);
          if (i > 0) cp[r][c] = r2pc(K[6*i+r][6*(i-1)+c]);
        end
      for (int r = 0; r < 6; r++)
        for (int c = 0; c < 6; c++) begin
          K[6*i+r][6*i+c] = pc2r(dg[r][c]);
          if (i > 0) begin K[6*i+r][6*(i-1)+c] = pc2r(cp[r][c]); K[6*(i-1)+c][6*i+r] = pc2r(cp[r][c]); end
        end
      #1 k_we = 1'b1; k_idx = AW'(i); k_data = k_pack(dg, cp);
      @(posedge clk);
    end
    #1 k_we = 1'b0;
    @(posedge clk);
    run_solve(1'b1, 1);
    run_solve(1'b0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
