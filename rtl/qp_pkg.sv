// qp_pkg: types, constants and helper functions shared by the path-planning
// QP accelerator.
//
// Everything in the accelerator is organised per trajectory point. The
// decision vector x (n = 6L-1 entries) is stored as L words of six lanes,
// lane order {l, phi, k, k', eps1, eps2}; lane 3 (k') of point 0 does not
// exist and is a padding lane held at zero. The constraint vector (m = 6L+2
// rows) is stored as L+1 words of six lanes: word w < L holds the three
// dynamic-model rows of point w (start-state rows for w = 0), the curvature
// row and the front / rear obstacle-boundary rows; word L holds the two
// end-state rows in lanes 0 and 1 and four padding rows.
//
// The constraint matrix A is kept in 17 memory blocks and the (diagonal) cost
// matrix P in 5, each block L entries deep, following the pattern-aware
// storage of the paper: block j holds the j-th non-zero of a repeating
// per-point pattern. The assignment of blocks to matrix positions below is
// this design's reading of the pattern figure (blocks 0..5 are the a0..a5
// entries of the 3x3 transition block, the rest are our numbering).
//
// Number formats: the scaling module and the ADMM vector updates use a
// 32-bit fixed-point format with 20 fraction bits (the original design uses
// single-precision float here); the PCG solver uses the 24-bit format with
// 9 integer bits (ap_fixed<24,9>) chosen in the paper.
package qp_pkg;

  localparam int LANES = 6;         // outputs per cycle of the pattern-aware units
  localparam int NA_BLK = 17;       // memory blocks of A
  localparam int NP_BLK = 5;        // memory blocks of P

  // ADMM / scaling number format: Q12.20
  localparam int FX_W = 32;
  localparam int FX_F = 20;
  typedef logic signed [FX_W-1:0] fx_t;
  typedef fx_t [LANES-1:0] fxw_t;

  // PCG number format: ap_fixed<24,9> = Q9.15
  localparam int PC_W = 24;
  localparam int PC_F = 15;
  typedef logic signed [PC_W-1:0] pc_t;
  typedef pc_t [LANES-1:0] pcw_t;

  // Power-of-two scaling exponents (the D and E diagonals)
  typedef logic signed [7:0] sexp_t;
  typedef sexp_t [LANES-1:0] sw_t;

  typedef fx_t [NA_BLK-1:0] a_word_t;
  typedef fx_t [NP_BLK-1:0] p_word_t;

  // Variable lanes
  localparam int V_L = 0, V_PHI = 1, V_K = 2, V_DK = 3, V_E1 = 4, V_E2 = 5;

  // A memory blocks: transition block entries a0..a5 (row, col of point w-1)
  //   a0:(0,l) a1:(1,l) a2:(0,phi) a3:(1,phi) a4:(1,k) a5:(2,k)
  localparam int A_F0 = 0, A_F1 = 1, A_F2 = 2, A_F3 = 3, A_F4 = 4, A_F5 = 5;
  // identity part of the dynamic rows (start-state rows at w = 0)
  localparam int A_I0 = 6, A_I1 = 7, A_I2 = 8;
  // control input g (row 2, column k')
  localparam int A_G = 9;
  // curvature row
  localparam int A_CV = 10;
  // front boundary row: l, phi, eps1 ; rear boundary row: l, phi, eps2
  localparam int A_FL = 11, A_FP = 12, A_FE = 13;
  localparam int A_RL = 14, A_RP = 15, A_RE = 16;
  // The end-state rows (word L) reuse index 0 of blocks a0 (row 0, l) and
  // a3 (row 1, phi), which the transition block leaves free at point 0.

  // P memory blocks (P is diagonal): w_l, w_k, w_dk, w_s, w_s
  localparam int P_L = 0, P_K = 1, P_DK = 2, P_S1 = 3, P_S2 = 4;

  typedef fx_t [LANES-1:0][LANES-1:0] mat6_t;   // [row][col]
  typedef pc_t [LANES-1:0][LANES-1:0] pmat6_t;

  // One word of the problem memory, as seen by the streaming units
  typedef struct packed {
    a_word_t a;
    p_word_t p;
    fxw_t    l;
    fxw_t    u;
    sw_t     d;
    sw_t     e;
    logic    first;   // word 0
    logic    last;    // word L (end-state rows only)
  } pm_word_t;

  // Coefficient matrix K, one record per point: the lower triangle of the
  // 6x6 diagonal block (14 non-zeros) and the 6x6 block coupling point i to
  // point i-1 (7 non-zeros). K has 36L-17 non-zeros in total.
  localparam int KD_NZ = 14;
  localparam int KC_NZ = 7;
  localparam int K_NZ  = KD_NZ + KC_NZ;
  typedef pc_t [K_NZ-1:0] krec_t;

  function automatic bit kd_mask(int r, int c);   // r >= c
    case (r)
      0: return c == 0;
      1: return c <= 1;
      2: return c <= 2;
      3: return c == 2 || c == 3;
      4: return c == 0 || c == 1 || c == 4;
      5: return c == 0 || c == 1 || c == 5;
      default: return 1'b0;
    endcase
  endfunction

  function automatic bit kc_mask(int r, int c);
    case (r)
      0: return c == 0 || c == 1;
      1: return c <= 2;
      2: return c == 2;
      3: return c == 2;
      default: return 1'b0;
    endcase
  endfunction

  // ---- arithmetic helpers -------------------------------------------------
  function automatic fx_t fx_sat(logic signed [63:0] v);
    if (v > 64'sd2147483647) return 32'sh7fffffff;
    if (v < -64'sd2147483648) return 32'sh80000000;
    return v[31:0];
  endfunction

  // Wide accumulator for sums of products; results are rounded down once at
  // the end of a sum and saturated.
  typedef logic signed [71:0] acc_t;

  function automatic fx_t fx_from_acc(acc_t v);
    acc_t s;
    s = v >>> FX_F;
    if (s > 72'sd2147483647) return 32'sh7fffffff;
    if (s < -72'sd2147483648) return 32'sh80000000;
    return s[31:0];
  endfunction

  function automatic pc_t pc_from_acc(acc_t v, int f);
    acc_t s;
    s = v >>> f;
    if (s > 72'sd8388607) return 24'sh7fffff;
    if (s < -72'sd8388608) return 24'sh800000;
    return s[23:0];
  endfunction

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_sat(p >>> FX_F);
  endfunction

  function automatic pc_t pc_sat(logic signed [63:0] v);
    if (v > 64'sd8388607) return 24'sh7fffff;
    if (v < -64'sd8388608) return 24'sh800000;
    return v[23:0];
  endfunction

  function automatic pc_t pc_mul(pc_t a, pc_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return pc_sat(p >>> PC_F);
  endfunction

  function automatic pc_t fx_to_pc(fx_t v);
    return pc_sat(64'(v) >>> (FX_F - PC_F));
  endfunction

  function automatic fx_t pc_to_fx(pc_t v);
    return fx_t'(v) <<< (FX_F - PC_F);
  endfunction

  // v * 2^s with saturation
  function automatic fx_t fx_shift(fx_t v, int s);
    logic signed [63:0] w;
    if (s >= 0) begin
      if (s > 31) return (v == 0) ? '0 : (v[FX_W-1] ? 32'sh80000000 : 32'sh7fffffff);
      w = 64'(v) <<< s;
      return fx_sat(w);
    end
    if (s < -31) return v[FX_W-1] ? -32'sd1 : 32'sd0;
    return v >>> (-s);
  endfunction

  function automatic fx_t fx_abs(fx_t v);
    return (v == 32'sh80000000) ? 32'sh7fffffff : (v < 0 ? -v : v);
  endfunction

  // ---- structure of A around one word ------------------------------------
  // Rows of word w against the variables of point w.
  function automatic mat6_t a_cur(a_word_t a, logic first, logic last);
    mat6_t m;
    m = '0;
    if (!last) begin
      m[0][V_L]   = a[A_I0];
      m[1][V_PHI] = a[A_I1];
      m[2][V_K]   = a[A_I2];
      if (!first) m[2][V_DK] = a[A_G];
      m[3][V_K]   = a[A_CV];
      m[4][V_L]   = a[A_FL];
      m[4][V_PHI] = a[A_FP];
      m[4][V_E1]  = a[A_FE];
      m[5][V_L]   = a[A_RL];
      m[5][V_PHI] = a[A_RP];
      m[5][V_E2]  = a[A_RE];
    end
    return m;
  endfunction

  // Rows of word w against the variables of point w-1.
  function automatic mat6_t a_prev(a_word_t a, logic first, logic last);
    mat6_t m;
    m = '0;
    if (!first) begin
      m[0][V_L]   = a[A_F0];
      m[1][V_PHI] = a[A_F3];
      if (!last) begin
        m[1][V_L]   = a[A_F1];
        m[0][V_PHI] = a[A_F2];
        m[1][V_K]   = a[A_F4];
        m[2][V_K]   = a[A_F5];
      end
    end
    return m;
  endfunction

  // Diagonal of P for one point (padding lane k' of point 0 is zero in memory)
  function automatic fxw_t p_diag(p_word_t p);
    fxw_t d;
    d[V_L] = p[P_L];  d[V_PHI] = '0; d[V_K] = p[P_K];
    d[V_DK] = p[P_DK]; d[V_E1] = p[P_S1]; d[V_E2] = p[P_S2];
    return d;
  endfunction

  // ---- K record packing (constant masks fold to fixed wiring) ------------
  function automatic krec_t k_pack(pmat6_t dg, pmat6_t cp);
    krec_t k;
    int n;
    k = '0;
    n = 0;
    for (int r = 0; r < LANES; r++)
      for (int c = 0; c < LANES; c++)
        if (c <= r && kd_mask(r, c)) begin k[n] = dg[r][c]; n++; end
    for (int r = 0; r < LANES; r++)
      for (int c = 0; c < LANES; c++)
        if (kc_mask(r, c)) begin k[n] = cp[r][c]; n++; end
    return k;
  endfunction

  function automatic pmat6_t k_diag(krec_t k);   // full symmetric block
    pmat6_t m;
    int n;
    m = '0;
    n = 0;
    for (int r = 0; r < LANES; r++)
      for (int c = 0; c < LANES; c++)
        if (c <= r && kd_mask(r, c)) begin m[r][c] = k[n]; m[c][r] = k[n]; n++; end
    return m;
  endfunction

  function automatic pmat6_t k_cpl(krec_t k);
    pmat6_t m;
    int n;
    m = '0;
    n = KD_NZ;
    for (int r = 0; r < LANES; r++)
      for (int c = 0; c < LANES; c++)
        if (kc_mask(r, c)) begin m[r][c] = k[n]; n++; end
    return m;
  endfunction

endpackage
