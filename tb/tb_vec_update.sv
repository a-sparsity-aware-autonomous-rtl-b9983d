// tb_vec_update: checks the fused x / z / y update of one ADMM iteration.
//
// For an L = 8 path problem, random x~, x, z, y vectors are streamed with the
// constraint words. The reference computes z~ = A x~, the relaxed zr, the
// projection onto [l, u] (per-row rho: rho_eq on l = u rows), y and x in
// double precision from the same quantised inputs. Each output word must leave
// two cycles after its input word. The test also counts how many rows were
// clamped at the lower and at the upper bound, so the projection is exercised
// in both directions.
module tb_vec_update;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic in_valid = 1'b0;
  pm_word_t in_w = '0;
  fxw_t in_xt = '0, in_x = '0, in_z = '0, in_y = '0;
  fx_t alpha, rho_ineq, rho_eq, rho_inv_ineq, rho_inv_eq;
  logic out_valid;
  fxw_t out_x, out_z, out_y;
  int checks = 0, failures = 0, cycle = 0;
  int in_cyc [$];
  int out_cnt = 0, n_lo = 0, n_hi = 0;
  real xts [], xs [], zs [], ys [];
  qp_problem q;

  vec_update dut (.*);

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
    int w, c0;
    real a;
    w = out_cnt;
    a = fx2r(alpha);
    c0 = in_cyc.pop_front();
    check(cycle == c0 + 2, $sformatf("latency of word %0d", w));
    for (int r = 0; r < 6; r++) begin
      real zt, zr, zn, yn, rho, rinv;
      int row;
      row = 6 * w + r;
      eq = (q.lo[row] == q.hi[row]);
      rho  = eq ? fx2r(rho_eq) : fx2r(rho_ineq);
      rinv = eq ? fx2r(rho_inv_eq) : fx2r(rho_inv_ineq);
      zt = 0.0;
      for (int c = 0; c < q.N; c++) zt += q.A[row][c] * xts[c];
      zr = a * zt + (1.0 - a) * zs[row];
      zn = zr + rinv * ys[row];
      if (zn < q.lo[row]) begin zn = q.lo[row]; n_lo++; end
      else if (zn > q.hi[row]) begin zn = q.hi[row]; n_hi++; end
      yn = ys[row] + rho * (zr - zn);
      check(rabs(fx2r(out_z[r]) - zn) < 2e-4, $sformatf("z word %0d row %0d: %f vs %f", w, r, fx2r(out_z[r]), zn));
      check(rabs(fx2r(out_y[r]) - yn) < 2e-4, $sformatf("y word %0d row %0d: %f vs %f", w, r, fx2r(out_y[r]), yn));
      if (w < L)
        check(rabs(fx2r(out_x[r]) - (a * xts[6*w+r] + (1.0 - a) * xs[6*w+r])) < 2e-4,
              $sformatf("x point %0d lane %0d", w, r));
    end
    out_cnt++;
  end

  bit eq;
  initial begin
    q = new(L);
    q.gen_path(13);
    alpha = r2fx(1.6);
    rho_ineq = r2fx(0.1); rho_eq = r2fx(0.5);
    rho_inv_ineq = r2fx(10.0); rho_inv_eq = r2fx(2.0);
    xts = new[q.N]; xs = new[q.N]; zs = new[q.M]; ys = new[q.M];
    foreach (xts[i]) begin xts[i] = rnd(3.0); xs[i] = rnd(3.0); end
    xts[3] = 0.0; xs[3] = 0.0;
    foreach (zs[i]) begin zs[i] = rnd(3.0); ys[i] = rnd(0.5); end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int w = 0; w <= L; w++) begin
      #1;
      in_valid = 1'b1; in_w = q.word(w);
      for (int r = 0; r < 6; r++) begin
        in_z[r] = r2fx(zs[6*w+r]); in_y[r] = r2fx(ys[6*w+r]);
        in_xt[r] = (w < L) ? r2fx(xts[6*w+r]) : fx_t'($urandom());
        in_x[r]  = (w < L) ? r2fx(xs[6*w+r]) : fx_t'($urandom());
      end
      in_cyc.push_back(cycle);
      @(posedge clk);
    end
    #1 in_valid = 1'b0;
    repeat (5) @(posedge clk);
    check(out_cnt == L + 1, "L+1 output words");
    $display("rows clamped at lower bound %0d, at upper bound %0d", n_lo, n_hi);
    check(n_lo > 0 && n_hi > 0, "projection active at both bounds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
