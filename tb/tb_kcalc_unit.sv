// tb_kcalc_unit: checks K = P + sigma I + A^T rho A, one record per point.
//
// The words of an L = 8 path problem are streamed once. The record of point
// i must leave one cycle after word i+1 entered; its diagonal block and its
// coupling block (point i against point i-1) are compared with the dense K.
// The test also checks that the dense K has no non-zero outside the stored
// pattern (so the 21-value record really holds all of K) and counts the
// non-zeros against 36L-17.
module tb_kcalc_unit;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic in_valid = 1'b0;
  pm_word_t in_w = '0;
  fx_t rho_ineq, rho_eq, sigma;
  logic out_valid;
  krec_t out_k;
  int checks = 0, failures = 0, cycle = 0;
  int in_cyc [$];
  int out_cnt = 0;
  real K [][];
  qp_problem q;

  kcalc_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #2_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (out_valid) begin
    int i, c0;
    pmat6_t dg, cp;
    i = out_cnt;
    c0 = in_cyc.pop_front();
    check(cycle == c0 + 1, $sformatf("latency of point %0d", i));
    dg = k_diag(out_k); cp = k_cpl(out_k);
    for (int r = 0; r < 6; r++)
      for (int c = 0; c < 6; c++) begin
        if (!(i == 0 && (r == 3 || c == 3)))
          check(rabs(pc2r(dg[r][c]) - K[6*i+r][6*i+c]) < 2e-3,
                $sformatf("K diag point %0d (%0d,%0d): %f vs %f", i, r, c, pc2r(dg[r][c]), K[6*i+r][6*i+c]));
        if (i > 0)
          check(rabs(pc2r(cp[r][c]) - K[6*i+r][6*(i-1)+c]) < 2e-3,
                $sformatf("K coupling point %0d (%0d,%0d): %f vs %f", i, r, c, pc2r(cp[r][c]), K[6*i+r][6*(i-1)+c]));
      end
    out_cnt++;
  end

  initial begin
    int nnz, outside;
    q = new(L);
    q.gen_path(11);
    rho_ineq = r2fx(0.1); rho_eq = r2fx(0.5); sigma = r2fx(0.01);
    K = new[q.N]; foreach (K[i]) K[i] = new[q.N];
    nnz = 0; outside = 0;
    for (int i = 0; i < q.N; i++)
      for (int j = 0; j < q.N; j++) begin
        real s;
        s = (i == j) ? q.Pd[i] + fx2r(sigma) : 0.0;
        for (int r = 0; r < q.M; r++)
          s += q.A[r][i] * ((q.lo[r] == q.hi[r]) ? fx2r(rho_eq) : fx2r(rho_ineq)) * q.A[r][j];
        K[i][j] = s;
        if (s != 0.0 && !(i == 3 || j == 3)) begin
          int pi, pj, ri, rj;
          nnz++;
          pi = i / 6; pj = j / 6; ri = i % 6; rj = j % 6;
          if (pi == pj) begin
            if (!(ri >= rj ? kd_mask(ri, rj) : kd_mask(rj, ri))) outside++;
          end else if (pi == pj + 1) begin
            if (!kc_mask(ri, rj)) outside++;
          end else if (pj == pi + 1) begin
            if (!kc_mask(rj, ri)) outside++;
          end else outside++;
        end
      end
    check(outside == 0, $sformatf("K pattern covers every non-zero (%0d outside)", outside));
    $display("K non-zeros %0d, pattern bound 36L-17 = %0d", nnz, 36 * L - 17);
    check(nnz <= 36 * L - 17, "K non-zeros within 36L-17");
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int w = 0; w <= L; w++) begin
      #1;
      in_valid = 1'b1; in_w = q.word(w);
      if (w > 0) in_cyc.push_back(cycle);
      @(posedge clk);
    end
    #1 in_valid = 1'b0;
    repeat (4) @(posedge clk);
    check(out_cnt == L, "L records");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
