// scaling_unit: the Scaling module, a modified Ruiz equilibration of the QP
// data before ADMM starts.
//
// Each pass makes two sweeps over the problem memory, one word (six rows and
// the six columns of one point) per cycle:
//   norm sweep    d_j = 1/sqrt(|| [P; A]_{:,j} ||_inf) for every variable and
//                 e_i = 1/sqrt(|| A_{i,:} ||_inf) for every constraint row,
//                 six of each per cycle; the rows of word w and the columns of
//                 point w-1 are finished when word w is read;
//   update sweep  P = D P D, A = E A D, l = E l, u = E u, written back in
//                 place, and the running products D, E stored in their blocks.
// The factors are rounded to powers of two (d = 2^-floor(log2(norm)/2)), so D
// and E are stored as exponents and every scaling is an exact shift; the
// original design computes them in floating point. The number of passes is
// ITERS. Since every non-zero of a row and of a column sits in its own memory
// block, a whole row/column group is read in one cycle.
// Interface: start pulses; the unit then owns the problem-memory ports until
// done pulses. A pass takes about 2L+6 cycles.
module scaling_unit
  import qp_pkg::*;
#(
  parameter int L     = 270,
  parameter int ITERS = 10,
  localparam int IW = $clog2(L + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // problem memory ports
  output logic [IW-1:0]     rd_idx,
  input  pm_word_t          rd_word,
  output logic [IW-1:0]     wr_idx,
  output pm_word_t          wr_word,
  output logic [NA_BLK-1:0] we_a,
  output logic [NP_BLK-1:0] we_p,
  output logic [LANES-1:0]  we_l,
  output logic [LANES-1:0]  we_u,
  output logic [LANES-1:0]  we_d,
  output logic [LANES-1:0]  we_e
);
  typedef enum logic [1:0] {S_IDLE, S_NORM, S_UPD} state_t;
  state_t st;

  sw_t dp [L];        // this pass's column exponents (D_BLOCK 0..5)
  sw_t ep [L + 1];    // this pass's row exponents (E_BLOCK 0..5)

  logic [IW-1:0] idx, idx1;
  logic          v1, issuing, first_pass;
  logic [7:0]    pass;

  // position of each A block: row lane, column lane, column belongs to point w-1
  function automatic int blk_row(int j);
    case (j)
      A_F0, A_F2, A_I0: return 0;
      A_F1, A_F3, A_F4, A_I1: return 1;
      A_F5, A_I2, A_G: return 2;
      A_CV: return 3;
      A_FL, A_FP, A_FE: return 4;
      default: return 5;
    endcase
  endfunction
  function automatic int blk_col(int j);
    case (j)
      A_F0, A_F1, A_I0, A_FL, A_RL: return V_L;
      A_F2, A_F3, A_I1, A_FP, A_RP: return V_PHI;
      A_F4, A_F5, A_I2, A_CV: return V_K;
      A_G: return V_DK;
      A_FE: return V_E1;
      default: return V_E2;
    endcase
  endfunction
  function automatic bit blk_prev(int j);
    return j <= A_F5;
  endfunction

  function automatic sexp_t s_of(fx_t norm);
    int p, k;
    if (norm <= 0) return '0;
    p = 0;
    for (int b = 0; b < FX_W - 1; b++) if (norm[b]) p = b;
    k = p - FX_F;
    return sexp_t'(-(k >>> 1));
  endfunction

  // ---- norm sweep datapath ----------------------------------------------
  fxw_t  colpart, colpart_n, colfin, rown;
  mat6_t mc, mp;
  fxw_t  pd;
  always_comb begin
    mc = a_cur(rd_word.a, rd_word.first, rd_word.last);
    mp = a_prev(rd_word.a, rd_word.first, rd_word.last);
    pd = p_diag(rd_word.p);
    for (int c = 0; c < LANES; c++) begin
      colpart_n[c] = rd_word.last ? '0 : fx_abs(pd[c]);
      colfin[c]    = colpart[c];
      rown[c]      = '0;
    end
    for (int r = 0; r < LANES; r++)
      for (int c = 0; c < LANES; c++) begin
        if (fx_abs(mc[r][c]) > colpart_n[c]) colpart_n[c] = fx_abs(mc[r][c]);
        if (fx_abs(mp[r][c]) > colfin[c])    colfin[c]    = fx_abs(mp[r][c]);
        if (fx_abs(mc[r][c]) > rown[r])      rown[r]      = fx_abs(mc[r][c]);
        if (fx_abs(mp[r][c]) > rown[r])      rown[r]      = fx_abs(mp[r][c]);
      end
  end

  // ---- update sweep datapath --------------------------------------------
  sw_t dcur, dprv, ecur;
  always_comb begin
    dcur = (idx1 < IW'(L)) ? dp[idx1[IW-1:0]] : '0;
    dprv = (idx1 != '0) ? dp[idx1 - 1'b1] : '0;
    ecur = ep[idx1];
  end

  always_comb begin
    wr_word       = rd_word;
    for (int j = 0; j < NA_BLK; j++)
      wr_word.a[j] = fx_shift(rd_word.a[j],
                      int'(ecur[blk_row(j)]) + (blk_prev(j) ? int'(dprv[blk_col(j)]) : int'(dcur[blk_col(j)])));
    wr_word.p[P_L]  = fx_shift(rd_word.p[P_L],  2 * int'(dcur[V_L]));
    wr_word.p[P_K]  = fx_shift(rd_word.p[P_K],  2 * int'(dcur[V_K]));
    wr_word.p[P_DK] = fx_shift(rd_word.p[P_DK], 2 * int'(dcur[V_DK]));
    wr_word.p[P_S1] = fx_shift(rd_word.p[P_S1], 2 * int'(dcur[V_E1]));
    wr_word.p[P_S2] = fx_shift(rd_word.p[P_S2], 2 * int'(dcur[V_E2]));
    for (int r = 0; r < LANES; r++) begin
      wr_word.l[r] = fx_shift(rd_word.l[r], int'(ecur[r]));
      wr_word.u[r] = fx_shift(rd_word.u[r], int'(ecur[r]));
      wr_word.d[r] = (first_pass ? sexp_t'(0) : rd_word.d[r]) + dcur[r];
      wr_word.e[r] = (first_pass ? sexp_t'(0) : rd_word.e[r]) + ecur[r];
    end
    wr_idx = idx1;
    we_a = '0; we_p = '0; we_l = '0; we_u = '0; we_d = '0; we_e = '0;
    if (st == S_UPD && v1) begin
      we_l = '1; we_u = '1; we_e = '1;
      if (rd_word.last) begin
        we_a[A_F0] = 1'b1;
        we_a[A_F3] = 1'b1;
      end else begin
        we_p = '1; we_d = '1;
        we_a = '1;
        if (rd_word.first) begin
          we_a[A_F5:A_F0] = '0;   // index 0 holds the end-state rows
          we_a[A_G]       = 1'b0;
        end
      end
    end
  end

  assign rd_idx = idx;
  assign busy   = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (st == S_NORM && v1) begin
      for (int r = 0; r < LANES; r++) ep[idx1][r] <= s_of(rown[r]);
      if (!rd_word.first)
        for (int c = 0; c < LANES; c++) dp[idx1 - 1'b1][c] <= s_of(colfin[c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; idx <= '0; idx1 <= '0; v1 <= 1'b0; issuing <= 1'b0;
      pass <= '0; first_pass <= 1'b0; done <= 1'b0; colpart <= '0;
    end else begin
      done <= 1'b0;
      v1   <= issuing;
      idx1 <= idx;
      if (issuing) begin
        if (idx == IW'(L)) issuing <= 1'b0;
        else idx <= idx + 1'b1;
      end
      case (st)
        S_IDLE: if (start) begin
          st <= S_NORM; idx <= '0; issuing <= 1'b1; pass <= '0; first_pass <= 1'b1;
        end
        S_NORM: begin
          if (v1) colpart <= colpart_n;
          if (v1 && idx1 == IW'(L)) begin st <= S_UPD; idx <= '0; issuing <= 1'b1; end
        end
        S_UPD: if (v1 && idx1 == IW'(L)) begin
          idx        <= '0;
          first_pass <= 1'b0;
          if (pass + 1'b1 == 8'(ITERS)) begin st <= S_IDLE; done <= 1'b1; end
          else begin pass <= pass + 1'b1; st <= S_NORM; issuing <= 1'b1; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
