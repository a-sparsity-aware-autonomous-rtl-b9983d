// tb_qp_util: testbench helpers. Real <-> fixed-point conversion, a generator
// for the path-planning QP (dense matrices in a padded index space of six
// lanes per point, variable (i,c) at 6i+c, constraint row (w,r) at 6w+r), the
// conversion of that problem to the per-block memory words, and a reference
// ADMM solver in double precision with a direct (Cholesky) linear solve.
package tb_qp_util;
  import qp_pkg::*;

  function automatic real fx2r(fx_t v);  return real'(v) / real'(1 << FX_F); endfunction
  function automatic fx_t r2fx(real v);
    real s;
    s = v * real'(1 << FX_F);
    if (s > 2147483647.0) s = 2147483647.0;
    if (s < -2147483648.0) s = -2147483648.0;
    return fx_t'($rtoi(s));
  endfunction
  function automatic real pc2r(pc_t v);  return real'(v) / real'(1 << PC_F); endfunction
  function automatic pc_t r2pc(real v);  return pc_t'($rtoi(v * real'(1 << PC_F))); endfunction
  function automatic real rabs(real v);  return v < 0 ? -v : v; endfunction

  // Matrix position of each A memory block, written out from the storage
  // table: {row lane, column lane, column of point w-1}
  function automatic void blk_pos(int j, output int r, output int c, output bit prev);
    case (j)
      0: begin r = 0; c = 0; prev = 1; end   1: begin r = 1; c = 0; prev = 1; end
      2: begin r = 0; c = 1; prev = 1; end   3: begin r = 1; c = 1; prev = 1; end
      4: begin r = 1; c = 2; prev = 1; end   5: begin r = 2; c = 2; prev = 1; end
      6: begin r = 0; c = 0; prev = 0; end   7: begin r = 1; c = 1; prev = 0; end
      8: begin r = 2; c = 2; prev = 0; end   9: begin r = 2; c = 3; prev = 0; end
      10: begin r = 3; c = 2; prev = 0; end  11: begin r = 4; c = 0; prev = 0; end
      12: begin r = 4; c = 1; prev = 0; end  13: begin r = 4; c = 4; prev = 0; end
      14: begin r = 5; c = 0; prev = 0; end  15: begin r = 5; c = 1; prev = 0; end
      default: begin r = 5; c = 5; prev = 0; end
    endcase
  endfunction

  class qp_problem;
    int  L, N, M;
    real ab [][];      // [word 0..L-1][block] block values (word L's end rows at index 0)
    real pb [][];      // [point][P block]
    real A  [][];      // dense [M][N]
    real Pd [];        // diagonal of P, [N]
    real lo [], hi [];

    function new(int nl);
      L = nl; N = 6 * nl; M = 6 * nl + 6;
      ab = new[L]; pb = new[L];
      foreach (ab[i]) begin ab[i] = new[17]; pb[i] = new[5]; end
      A = new[M]; foreach (A[i]) A[i] = new[N];
      Pd = new[N]; lo = new[M]; hi = new[M];
    endfunction

    // Fill dense A / P from the block values (word L: end rows from index 0)
    function void build_dense();
      foreach (A[i, j]) A[i][j] = 0.0;
      foreach (Pd[i]) Pd[i] = 0.0;
      for (int w = 0; w <= L; w++)
        for (int j = 0; j < 17; j++) begin
          int r, c, pt; bit pv; real v;
          blk_pos(j, r, c, pv);
          pt = pv ? w - 1 : w;
          if (w == L && !(j == 0 || j == 3)) continue;
          if (w == 0 && (pv || j == 9)) continue;
          v = (w == L) ? ab[0][j] : ab[w][j];
          A[6 * w + r][6 * pt + c] = v;
        end
      for (int i = 0; i < L; i++) begin
        Pd[6*i+0] = pb[i][0]; Pd[6*i+2] = pb[i][1]; Pd[6*i+3] = pb[i][2];
        Pd[6*i+4] = pb[i][3]; Pd[6*i+5] = pb[i][4];
      end
    endfunction

    // The path-planning QP: linearised lateral dynamics along a reference
    // path with curvature kr, step ds, vehicle front/rear lengths, an obstacle
    // that narrows the corridor in the middle of the path.
    function void gen_path(int seed);
      real ds, fl, rl, kmax, kr;
      int s;
      s = seed;
      ds = 0.5; fl = 3.0; rl = 1.0; kmax = 0.25;
      foreach (lo[i]) begin lo[i] = 0.0; hi[i] = 0.0; end
      for (int i = 0; i < L; i++) begin
        foreach (ab[i][j]) ab[i][j] = 0.0;
        kr = 0.05 * $sin(real'(i + seed) * 0.3);
        // P: w_l, w_k, w_dk, w_s, w_s
        pb[i][0] = 1.0; pb[i][1] = 5.0; pb[i][2] = (i == 0) ? 0.0 : 20.0;
        pb[i][3] = 50.0; pb[i][4] = 50.0;
        // dynamic rows: z_i - F z_{i-1} - g k'_i = h_i ; start rows z_0 = z_init
        ab[i][6] = 1.0; ab[i][7] = 1.0; ab[i][8] = 1.0;
        if (i > 0) begin
          ab[i][0] = -1.0;  ab[i][2] = -ds;                // l  row
          ab[i][1] = ds * kr * kr; ab[i][3] = -1.0; ab[i][4] = -ds;   // phi row
          ab[i][5] = -1.0;  ab[i][9] = -ds;                // k  row
          lo[6*i+0] = 0.0;  hi[6*i+0] = 0.0;
          lo[6*i+1] = -ds * kr; hi[6*i+1] = -ds * kr;
          lo[6*i+2] = 0.0;  hi[6*i+2] = 0.0;
        end else begin
          lo[0] = 0.6; hi[0] = 0.6; lo[1] = 0.0; hi[1] = 0.0; lo[2] = 0.02; hi[2] = 0.02;
        end
        // curvature limit
        ab[i][10] = 1.0; lo[6*i+3] = -kmax; hi[6*i+3] = kmax;
        // front / rear corridor rows
        ab[i][11] = 1.0; ab[i][12] = fl;  ab[i][13] = 1.0;
        ab[i][14] = 1.0; ab[i][15] = -rl; ab[i][16] = 1.0;
        lo[6*i+4] = -2.0; hi[6*i+4] = 2.0;
        lo[6*i+5] = -2.0; hi[6*i+5] = 2.0;
        if (i >= L/3 && i < L/2) begin   // obstacle on the left: l <= -0.3
          hi[6*i+4] = -0.3; hi[6*i+5] = -0.3;
        end
      end
      // end state: l = 0, phi = 0 at the last point
      ab[0][0] = 1.0; ab[0][3] = 1.0;
      lo[6*L+0] = 0.0; hi[6*L+0] = 0.0; lo[6*L+1] = 0.0; hi[6*L+1] = 0.0;
      build_dense();
    endfunction

    function pm_word_t word(int w);
      pm_word_t pw;
      pw = '0;
      for (int j = 0; j < 17; j++) pw.a[j] = r2fx((w == L) ? ab[0][j] : ab[w][j]);
      if (w < L) for (int j = 0; j < 5; j++) pw.p[j] = r2fx(pb[w][j]);
      for (int r = 0; r < 6; r++) begin
        pw.l[r] = r2fx(lo[6*w+r]);
        pw.u[r] = r2fx(hi[6*w+r]);
      end
      pw.first = (w == 0);
      pw.last  = (w == L);
      return pw;
    endfunction

    function real objective(real x []);
      real s; s = 0.0;
      for (int i = 0; i < N; i++) s += 0.5 * Pd[i] * x[i] * x[i];
      return s;
    endfunction

    function real max_violation(real x []);
      real v, mv; mv = 0.0;
      for (int r = 0; r < M; r++) begin
        v = 0.0;
        for (int c = 0; c < N; c++) v += A[r][c] * x[c];
        if (v - hi[r] > mv) mv = v - hi[r];
        if (lo[r] - v > mv) mv = lo[r] - v;
      end
      return mv;
    endfunction
  endclass

  // Solve K x = b for symmetric positive definite K (Cholesky), in place on copies
  function automatic void chol_solve(real K [][], real b [], output real x []);
    int n;
    real Lm [][];
    real y [];
    n = b.size();
    Lm = new[n]; foreach (Lm[i]) Lm[i] = new[n];
    y = new[n]; x = new[n];
    for (int j = 0; j < n; j++) begin
      real s;
      s = K[j][j];
      for (int k = 0; k < j; k++) s -= Lm[j][k] * Lm[j][k];
      Lm[j][j] = (s > 1e-12) ? $sqrt(s) : 1e-6;
      for (int i = j + 1; i < n; i++) begin
        s = K[i][j];
        for (int k = 0; k < j; k++) s -= Lm[i][k] * Lm[j][k];
        Lm[i][j] = s / Lm[j][j];
      end
    end
    for (int i = 0; i < n; i++) begin
      real s; s = b[i];
      for (int k = 0; k < i; k++) s -= Lm[i][k] * y[k];
      y[i] = s / Lm[i][i];
    end
    for (int i = n - 1; i >= 0; i--) begin
      real s; s = y[i];
      for (int k = i + 1; k < n; k++) s -= Lm[k][i] * x[k];
      x[i] = s / Lm[i][i];
    end
  endfunction

  // Reference QP solution: ADMM with exact linear solves, fixed rho, many
  // iterations (independent of the hardware's arithmetic and schedules).
  function automatic void ref_solve(qp_problem q, int iters, output real x []);
    real K [][];
    real rho [];
    real z [], y [], b [], xt [], zt [];
    real sigma, alpha;
    int n, m;
    n = q.N; m = q.M; sigma = 1e-6; alpha = 1.6;
    rho = new[m]; z = new[m]; y = new[m]; zt = new[m];
    x = new[n]; b = new[n];
    foreach (rho[i]) rho[i] = (q.lo[i] == q.hi[i]) ? 5.0 : 1.0;
    K = new[n]; foreach (K[i]) K[i] = new[n];
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        real s; s = (i == j) ? q.Pd[i] + sigma : 0.0;
        for (int r = 0; r < m; r++) s += q.A[r][i] * rho[r] * q.A[r][j];
        K[i][j] = s;
      end
    foreach (x[i]) x[i] = 0.0;
    foreach (z[i]) begin z[i] = 0.0; y[i] = 0.0; end
    for (int it = 0; it < iters; it++) begin
      for (int i = 0; i < n; i++) begin
        real s; s = sigma * x[i];
        for (int r = 0; r < m; r++) s += q.A[r][i] * (rho[r] * z[r] - y[r]);
        b[i] = s;
      end
      chol_solve(K, b, xt);
      for (int r = 0; r < m; r++) begin
        real s, zr, zn; s = 0.0;
        for (int c = 0; c < n; c++) s += q.A[r][c] * xt[c];
        zr = alpha * s + (1.0 - alpha) * z[r];
        zn = zr + y[r] / rho[r];
        if (zn < q.lo[r]) zn = q.lo[r];
        if (zn > q.hi[r]) zn = q.hi[r];
        y[r] = y[r] + rho[r] * (zr - zn);
        z[r] = zn;
      end
      for (int i = 0; i < n; i++) x[i] = alpha * xt[i] + (1.0 - alpha) * x[i];
    end
  endfunction
  // Ruiz equilibration in double precision with power-of-two factors
  // (d = 2^-floor(floor(log2(norm)) / 2)), applied in place to the problem;
  // dexp / eexp return the accumulated exponents of D (per variable) and E
  // (per constraint row).
  function automatic void scale_problem(qp_problem q, int passes, output int dexp [], output int eexp []);
    dexp = new[q.N]; eexp = new[q.M];
    foreach (dexp[i]) dexp[i] = 0;
    foreach (eexp[i]) eexp[i] = 0;
    for (int it = 0; it < passes; it++) begin
      int dk [], ek [];
      dk = new[q.N]; ek = new[q.M];
      for (int c = 0; c < q.N; c++) begin
        real n; n = rabs(q.Pd[c]);
        for (int r = 0; r < q.M; r++) if (rabs(q.A[r][c]) > n) n = rabs(q.A[r][c]);
        dk[c] = (n > 0.0) ? -($floor($ln(n) / $ln(2.0)) >= 0 ? int'($floor($ln(n) / $ln(2.0))) / 2
                                                            : -((1 - int'($floor($ln(n) / $ln(2.0)))) / 2)) : 0;
      end
      for (int r = 0; r < q.M; r++) begin
        real n; n = 0.0;
        for (int c = 0; c < q.N; c++) if (rabs(q.A[r][c]) > n) n = rabs(q.A[r][c]);
        ek[r] = (n > 0.0) ? -($floor($ln(n) / $ln(2.0)) >= 0 ? int'($floor($ln(n) / $ln(2.0))) / 2
                                                            : -((1 - int'($floor($ln(n) / $ln(2.0)))) / 2)) : 0;
      end
      for (int r = 0; r < q.M; r++)
        for (int c = 0; c < q.N; c++) q.A[r][c] = q.A[r][c] * (2.0 ** ek[r]) * (2.0 ** dk[c]);
      for (int c = 0; c < q.N; c++) begin q.Pd[c] = q.Pd[c] * (2.0 ** (2 * dk[c])); dexp[c] += dk[c]; end
      for (int r = 0; r < q.M; r++) begin
        q.lo[r] = q.lo[r] * (2.0 ** ek[r]); q.hi[r] = q.hi[r] * (2.0 ** ek[r]); eexp[r] += ek[r];
      end
    end
    // back to the block values
    for (int w = 0; w <= q.L; w++)
      for (int j = 0; j < 17; j++) begin
        int r, c, pt; bit pv;
        blk_pos(j, r, c, pv);
        if (w == q.L && !(j == 0 || j == 3)) continue;
        if (w == 0 && (pv || j == 9)) continue;
        pt = pv ? w - 1 : w;
        if (w == q.L) q.ab[0][j] = q.A[6*w+r][6*pt+c];
        else q.ab[w][j] = q.A[6*w+r][6*pt+c];
      end
    for (int i = 0; i < q.L; i++) begin
      q.pb[i][0] = q.Pd[6*i+0]; q.pb[i][1] = q.Pd[6*i+2]; q.pb[i][2] = q.Pd[6*i+3];
      q.pb[i][3] = q.Pd[6*i+4]; q.pb[i][4] = q.Pd[6*i+5];
    end
  endfunction
endpackage
