// tb_b_update: checks the ADMM right-hand side b = sigma x + A^T (rho z - y).
//
// Random x, z, y vectors are streamed with the constraint words of an L = 8
// path problem (rho_eq on rows with l = u, rho_ineq elsewhere). Each output
// point must appear one cycle after the word that completes it and match the
// dense reference computed with the same rho choice.
module tb_b_update;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic in_valid = 1'b0;
  pm_word_t in_w = '0;
  fxw_t in_x = '0, in_z = '0, in_y = '0;
  fx_t rho_ineq, rho_eq, sigma;
  logic out_valid;
  fxw_t out_b;
  int checks = 0, failures = 0, cycle = 0;
  int in_cyc [$];
  int out_cnt = 0;
  real xs [], zs [], ys [];
  qp_problem q;

  b_update dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #2_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real rnd(real s);
    return fx2r(r2fx((real'($urandom_range(2000)) - 1000.0) / 1000.0 * s));
  endfunction

  always @(posedge clk) if (out_valid) begin
    int i, c0;
    i = out_cnt;
    c0 = in_cyc.pop_front();
    check(cycle == c0 + 1, $sformatf("latency of point %0d", i));
    for (int c = 0; c < 6; c++) begin
      real ref_v, rho;
      ref_v = fx2r(sigma) * xs[6*i+c];
      for (int r = 0; r < q.M; r++) begin
        rho = (q.lo[r] == q.hi[r]) ? fx2r(rho_eq) : fx2r(rho_ineq);
        ref_v += q.A[r][6*i+c] * (rho * zs[r] - ys[r]);
      end
      check(rabs(fx2r(out_b[c]) - ref_v) < 2e-4, $sformatf("b point %0d lane %0d: %f vs %f", i, c, fx2r(out_b[c]), ref_v));
    end
    out_cnt++;
  end

  initial begin
    q = new(L);
    q.gen_path(7);
    rho_ineq = r2fx(0.1); rho_eq = r2fx(0.5); sigma = r2fx(0.25);
    xs = new[q.N]; zs = new[q.M]; ys = new[q.M];
    foreach (xs[i]) xs[i] = rnd(2.0);
    foreach (zs[i]) zs[i] = rnd(2.0);
    foreach (ys[i]) ys[i] = rnd(1.0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int w = 0; w <= L; w++) begin
      #1;
      in_valid = 1'b1; in_w = q.word(w);
      for (int r = 0; r < 6; r++) begin
        in_z[r] = r2fx(zs[6*w+r]); in_y[r] = r2fx(ys[6*w+r]);
        in_x[r] = (w < L) ? r2fx(xs[6*w+r]) : fx_t'($urandom());
      end
      if (w > 0) in_cyc.push_back(cycle);
      @(posedge clk);
    end
    #1 in_valid = 1'b0;
    repeat (4) @(posedge clk);
    check(out_cnt == L, "L output points");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
