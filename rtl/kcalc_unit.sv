// kcalc_unit: the "Calculate K" step of ADMM, K = P + sigma*I + A^T rho A.
//
// The constraint words of A are streamed once, in order w = 0..L, together
// with P (words 0..L-1) and the bounds l, u, which decide each row's step
// size: rho_i = rho_eq where l_i = u_i (equality rows) and rho_ineq
// otherwise (the paper's rho_eq = 5 * rho_ineq setting is made by the caller).
// Because every row of word w touches only the variables of points w-1 and w,
// the columns of one point only ever meet the columns of the neighbouring
// point, so one pass over A gives all of K: on word w the unit forms
//   the diagonal block of point w-1 = (its part from word w-1, kept)
//                                    + Aprev(w)^T rho(w) Aprev(w),
//   the coupling block of point w   = Acur(w)^T rho(w) Aprev(w),
// and emits the finished record of point w-1 (diagonal block lower triangle
// and coupling block, 21 values in the 24-bit PCG format) one cycle later.
// So six columns of K are produced per cycle and the whole matrix takes
// L+1 input cycles plus one cycle of latency. Each non-zero of A is read once.
//
// Lint note: only the A, P, l, u fields and the flags of the memory word are
// needed; the D and E fields are unused here.
module kcalc_unit
  import qp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  pm_word_t in_w,
  input  fx_t      rho_ineq,
  input  fx_t      rho_eq,
  input  fx_t      sigma,
  output logic     out_valid,
  output krec_t    out_k          // point (w-1) for input word w
);
  typedef acc_t [LANES-1:0][LANES-1:0] amat_t;

  amat_t dpart, cpart;            // kept from the previous word
  amat_t dcur_n, dprev_n, ccur_n;
  mat6_t mc, mp, rmc, rmp;
  fxw_t  rho, pd;
  pmat6_t kd, kc;

  always_comb begin
    mc = a_cur(in_w.a, in_w.first, in_w.last);
    mp = a_prev(in_w.a, in_w.first, in_w.last);
    pd = p_diag(in_w.p);
    for (int r = 0; r < LANES; r++) begin
      rho[r] = (in_w.l[r] == in_w.u[r]) ? rho_eq : rho_ineq;
      for (int c = 0; c < LANES; c++) begin
        rmc[r][c] = fx_mul(rho[r], mc[r][c]);
        rmp[r][c] = fx_mul(rho[r], mp[r][c]);
      end
    end
    for (int i = 0; i < LANES; i++)
      for (int j = 0; j < LANES; j++) begin
        dcur_n[i][j]  = '0;
        dprev_n[i][j] = dpart[i][j];
        ccur_n[i][j]  = '0;
        for (int r = 0; r < LANES; r++) begin
          dcur_n[i][j]  += acc_t'(mc[r][i]) * acc_t'(rmc[r][j]);
          dprev_n[i][j] += acc_t'(mp[r][i]) * acc_t'(rmp[r][j]);
          ccur_n[i][j]  += acc_t'(mc[r][i]) * acc_t'(rmp[r][j]);
        end
      end
    // P and sigma I belong to the current point (not to the end-state word)
    if (!in_w.last)
      for (int i = 0; i < LANES; i++)
        dcur_n[i][i] += (acc_t'(pd[i]) + acc_t'(sigma)) <<< FX_F;
    for (int i = 0; i < LANES; i++)
      for (int j = 0; j < LANES; j++) begin
        kd[i][j] = pc_from_acc(dprev_n[i][j], 2 * FX_F - PC_F);
        kc[i][j] = pc_from_acc(cpart[i][j], 2 * FX_F - PC_F);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_k     <= '0;
      dpart     <= '0;
      cpart     <= '0;
    end else begin
      out_valid <= in_valid && !in_w.first;
      if (in_valid) begin
        dpart <= dcur_n;
        cpart <= ccur_n;
        out_k <= k_pack(kd, kc);
      end
    end
  end
endmodule
