// tb_scaling_unit: checks the Ruiz scaling of the QP data in the problem
// memory.
//
// An L = 12 path problem, with its P weights and some rows multiplied by
// large and small factors so that it is badly equilibrated, is loaded into a
// problem memory; the scaling unit then runs ITERS = 10 passes on it. Reading
// the memory back, the test checks that
//   - every stored A entry equals E A D of the original (D, E from the stored
//     exponents), P equals D P D and l, u equal E l, E u (to rounding);
//   - after scaling, the spread (largest / smallest) of the column norms of
//     [P; A] and the row norms of A is at most 64 and smaller than before;
//   - the unit finished within ITERS * (2L + 10) cycles.
module tb_scaling_unit;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 12, ITERS = 10;
  localparam int IW = $clog2(L + 1);
  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic busy, done;
  logic [IW-1:0] rd_idx, wr_idx, s_rd_idx, s_wr_idx, t_idx = '0;
  pm_word_t rd_word, wr_word, s_wr_word, t_word = '0;
  logic [NA_BLK-1:0] we_a, s_we_a, t_we_a = '0;
  logic [NP_BLK-1:0] we_p, s_we_p, t_we_p = '0;
  logic [LANES-1:0] we_l, we_u, we_d, we_e, s_we_l, s_we_u, s_we_d, s_we_e;
  logic [LANES-1:0] t_we_l = '0, t_we_u = '0;
  logic tb_owns = 1'b1;
  int checks = 0, failures = 0, cycle = 0;
  qp_problem q;

  problem_mem #(.L(L)) u_mem (.*);
  scaling_unit #(.L(L), .ITERS(ITERS)) dut (
    .clk, .rst_n, .start, .busy, .done, .rd_idx(s_rd_idx), .rd_word,
    .wr_idx(s_wr_idx), .wr_word(s_wr_word), .we_a(s_we_a), .we_p(s_we_p),
    .we_l(s_we_l), .we_u(s_we_u), .we_d(s_we_d), .we_e(s_we_e));

  assign rd_idx  = tb_owns ? t_idx : s_rd_idx;
  assign wr_idx  = tb_owns ? t_idx : s_wr_idx;
  assign wr_word = tb_owns ? t_word : s_wr_word;
  assign we_a = tb_owns ? t_we_a : s_we_a;
  assign we_p = tb_owns ? t_we_p : s_we_p;
  assign we_l = tb_owns ? t_we_l : s_we_l;
  assign we_u = tb_owns ? t_we_u : s_we_u;
  assign we_d = tb_owns ? '0 : s_we_d;
  assign we_e = tb_owns ? '0 : s_we_e;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real p2(int e);
    return (e >= 0) ? real'(longint'(1) << e) : 1.0 / real'(longint'(1) << -e);
  endfunction

  // column norms of [P; A] and row norms of A (dense, padded index space)
  function automatic real spread(qp_problem p, real Dc [], real Er []);
    real mn, mx;
    mn = 1e30; mx = 0.0;
    for (int c = 0; c < p.N; c++) begin
      real n;
      if (c == 3) continue;
      n = rabs(p.Pd[c]) * Dc[c] * Dc[c];
      for (int r = 0; r < p.M; r++) if (rabs(p.A[r][c]) * Er[r] * Dc[c] > n) n = rabs(p.A[r][c]) * Er[r] * Dc[c];
      if (n < mn) mn = n;
      if (n > mx) mx = n;
    end
    for (int r = 0; r < p.M; r++) begin
      real n; n = 0.0;
      for (int c = 0; c < p.N; c++) if (rabs(p.A[r][c]) * Er[r] * Dc[c] > n) n = rabs(p.A[r][c]) * Er[r] * Dc[c];
      if (n == 0.0) continue;
      if (n < mn) mn = n;
      if (n > mx) mx = n;
    end
    return mx / mn;
  endfunction

  initial begin
    pm_word_t rw [L + 1];
    real Dc [], Er [], ones_c [], ones_r [], mx_err, s0, s1;
    int c0, cyc;
    q = new(L);
    q.gen_path(23);
    // make the data badly scaled: heavy weights, large / small rows
    for (int i = 0; i < L; i++) begin
      q.pb[i][0] = 40.0; q.pb[i][1] = 200.0; q.pb[i][2] = 600.0; q.pb[i][3] = 8.0; q.pb[i][4] = 8.0;
      q.ab[i][10] = 25.0; q.ab[i][13] = 0.1; q.ab[i][16] = 0.1;
    end
    q.build_dense();
    ones_c = new[q.N]; ones_r = new[q.M];
    foreach (ones_c[i]) ones_c[i] = 1.0;
    foreach (ones_r[i]) ones_r[i] = 1.0;
    s0 = spread(q, ones_c, ones_r);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int w = 0; w <= L; w++) begin
      #1 t_idx = IW'(w); t_word = q.word(w);
      t_we_a = (w < L) ? '1 : NA_BLK'(9);   // word L: blocks 0 and 3 only
      t_we_p = (w < L) ? '1 : '0;
      t_we_l = '1; t_we_u = '1;
      @(posedge clk);
    end
    #1 t_we_a = '0; t_we_p = '0; t_we_l = '0; t_we_u = '0;
    tb_owns = 1'b0; start = 1'b1;
    c0 = cycle;
    @(posedge clk);
    #1 start = 1'b0;
    while (!done) @(posedge clk);
    cyc = cycle - c0;
    $display("scaling: %0d cycles for %0d passes", cyc, ITERS);
    check(cyc <= ITERS * (2 * L + 10), "scaling time within ITERS * (2L + 10) cycles");
    #1 tb_owns = 1'b1;
    for (int w = 0; w <= L; w++) begin
      #1 t_idx = IW'(w);
      @(posedge clk);
      #1 rw[w] = rd_word;
    end
    Dc = new[q.N]; Er = new[q.M];
    for (int i = 0; i < L; i++) for (int c = 0; c < 6; c++) Dc[6*i+c] = p2(int'(rw[i].d[c]));
    for (int w = 0; w <= L; w++) for (int r = 0; r < 6; r++) Er[6*w+r] = p2(int'(rw[w].e[r]));
    // stored data against E A D, D P D, E l, E u
    mx_err = 0.0;
    for (int w = 0; w <= L; w++) begin
      for (int j = 0; j < 17; j++) begin
        int r, c, pt; bit pv; real ex, v;
        blk_pos(j, r, c, pv);
        if (w == L && !(j == 0 || j == 3)) continue;
        if (w == 0 && (pv || j == 9)) continue;
        pt = pv ? w - 1 : w;
        v = (w == L) ? q.ab[0][j] : q.ab[w][j];
        ex = v * Er[6*w+r] * Dc[6*pt+c];
        if (rabs(fx2r((w == L) ? rw[0].a[j] : rw[w].a[j]) - ex) > mx_err)
          mx_err = rabs(fx2r((w == L) ? rw[0].a[j] : rw[w].a[j]) - ex);
      end
      for (int r = 0; r < 6; r++) begin
        if (rabs(fx2r(rw[w].l[r]) - q.lo[6*w+r] * Er[6*w+r]) > mx_err) mx_err = rabs(fx2r(rw[w].l[r]) - q.lo[6*w+r] * Er[6*w+r]);
        if (rabs(fx2r(rw[w].u[r]) - q.hi[6*w+r] * Er[6*w+r]) > mx_err) mx_err = rabs(fx2r(rw[w].u[r]) - q.hi[6*w+r] * Er[6*w+r]);
      end
      if (w < L) begin
        fxw_t pd;
        pd = p_diag(rw[w].p);
        for (int c = 0; c < 6; c++)
          if (c != 1 && !(w == 0 && c == 3) && rabs(fx2r(pd[c]) - q.Pd[6*w+c] * Dc[6*w+c] * Dc[6*w+c]) > mx_err)
            mx_err = rabs(fx2r(pd[c]) - q.Pd[6*w+c] * Dc[6*w+c] * Dc[6*w+c]);
      end
    end
    $display("max deviation of stored data from E A D / D P D / E l / E u: %g", mx_err);
    check(mx_err < 1e-4, "scaled data consistent with the stored D and E");
    s1 = spread(q, Dc, Er);
    $display("norm spread (max/min of column and row norms): before %f after %f", s0, s1);
    check(s1 <= 64.0, "norm spread at most 64 after scaling");
    check(s1 < s0, "scaling reduced the norm spread");
    check(rw[0].d != '0 || rw[1].d != '0, "non-trivial scaling factors stored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
