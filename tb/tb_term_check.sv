// tb_term_check: checks the residual norms, the termination verdict and the
// rho advice.
//
// Three passes over the words of an L = 8 path problem, each after a clear
// pulse: (1) random x, z, y: residuals compared with the dense reference,
// verdict not converged; (2) x = 0, z = 0, y = 0 except tiny y values so the
// verdict is converged; (3) z far from A x and y = 0: primal residual large
// against a tiny dual one, so rho_up must be set. The verdict is read three
// cycles after the last word of a pass.
module tb_term_check;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic clear = 1'b0, in_valid = 1'b0;
  pm_word_t in_w = '0;
  fxw_t in_x = '0, in_z = '0, in_y = '0;
  fx_t eps_abs, eps_rel;
  fx_t r_prim, r_dual;
  logic converged, rho_up, rho_down;
  int checks = 0, failures = 0;
  real xs [], zs [], ys [];
  qp_problem q;

  term_check dut (.*);

  always #5 clk = ~clk;
  initial begin #2_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real rnd(real s);
    return fx2r(r2fx((real'($urandom_range(2000)) - 1000.0) / 1000.0 * s));
  endfunction

  task automatic pass(output real rp, output real rd, output bit conv);
    real axm, zm, pxm, atym;
    #1 clear = 1'b1;
    @(posedge clk);
    #1 clear = 1'b0;
    for (int w = 0; w <= L; w++) begin
      in_valid = 1'b1; in_w = q.word(w);
      for (int r = 0; r < 6; r++) begin
        in_z[r] = r2fx(zs[6*w+r]); in_y[r] = r2fx(ys[6*w+r]);
        in_x[r] = (w < L) ? r2fx(xs[6*w+r]) : fx_t'($urandom());
      end
      @(posedge clk);
      #1;
    end
    in_valid = 1'b0;
    repeat (3) @(posedge clk);
    #1;
    rp = 0.0; rd = 0.0; axm = 0.0; zm = 0.0; pxm = 0.0; atym = 0.0;
    for (int r = 0; r < q.M; r++) begin
      real s; s = 0.0;
      for (int c = 0; c < q.N; c++) s += q.A[r][c] * xs[c];
      if (rabs(s - zs[r]) > rp) rp = rabs(s - zs[r]);
      if (rabs(s) > axm) axm = rabs(s);
      if (rabs(zs[r]) > zm) zm = rabs(zs[r]);
    end
    for (int c = 0; c < q.N; c++) begin
      real s; s = 0.0;
      for (int r = 0; r < q.M; r++) s += q.A[r][c] * ys[r];
      if (rabs(q.Pd[c] * xs[c] + s) > rd) rd = rabs(q.Pd[c] * xs[c] + s);
      if (rabs(q.Pd[c] * xs[c]) > pxm) pxm = rabs(q.Pd[c] * xs[c]);
      if (rabs(s) > atym) atym = rabs(s);
    end
    conv = (rp <= fx2r(eps_abs) + fx2r(eps_rel) * ((axm > zm) ? axm : zm)) &&
           (rd <= fx2r(eps_abs) + fx2r(eps_rel) * ((pxm > atym) ? pxm : atym));
    check(rabs(fx2r(r_prim) - rp) < 1e-4, $sformatf("primal residual %f vs %f", fx2r(r_prim), rp));
    check(rabs(fx2r(r_dual) - rd) < 1e-4, $sformatf("dual residual %f vs %f", fx2r(r_dual), rd));
    check(converged == conv, "termination verdict");
    check(rho_up == (fx2r(r_prim) > 3.0 * fx2r(r_dual)), "rho_up rule");
    check(rho_down == (fx2r(r_dual) > 3.0 * fx2r(r_prim)), "rho_down rule");
  endtask

  initial begin
    real rp, rd;
    bit conv;
    q = new(L);
    q.gen_path(17);
    eps_abs = r2fx(1e-3); eps_rel = r2fx(1e-3);
    xs = new[q.N]; zs = new[q.M]; ys = new[q.M];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // (1) random vectors
    foreach (xs[i]) xs[i] = rnd(2.0);
    xs[3] = 0.0;
    foreach (zs[i]) begin zs[i] = rnd(2.0); ys[i] = rnd(1.0); end
    pass(rp, rd, conv);
    check(!converged, "random point is not converged");
    // (2) a converged point: x = z = 0, tiny y
    foreach (xs[i]) xs[i] = 0.0;
    foreach (zs[i]) begin zs[i] = 0.0; ys[i] = fx2r(fx_t'($urandom_range(3))); end
    pass(rp, rd, conv);
    check(converged, "zero residual point is converged");
    // (3) large primal, small dual residual
    foreach (zs[i]) begin zs[i] = rnd(1.0); ys[i] = 0.0; end
    pass(rp, rd, conv);
    check(rho_up && !rho_down, "rho_up for a dominant primal residual");
    // (4) large dual, small primal residual
    foreach (zs[i]) zs[i] = 0.0;
    foreach (ys[i]) ys[i] = rnd(1.0);
    pass(rp, rd, conv);
    check(rho_down && !rho_up, "rho_down for a dominant dual residual");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
