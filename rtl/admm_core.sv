// admm_core: the ADMM module of the accelerator (OSQP-style QP solver).
//
// Solves  min 1/2 x'Px  s.t.  l <= Ax <= u  on the scaled problem held in the
// problem memory, iterating
//   (P + sigma I + A' rho A) x~ = sigma x + A'(rho z - y)     (PCG)
//   x = alpha x~ + (1-alpha) x
//   z = clamp(alpha A x~ + (1-alpha) z + rho^-1 y, l, u)
//   y = y + rho(alpha A x~ + (1-alpha) z_old - z)
// The five parts of the paper's ADMM module are sequenced as streaming passes
// over the point words, one word per cycle:
//   S_K  Calculate K (kcalc_unit) into the PCG engine's K_MEM_BLOCK; only at
//        start and after rho changed
//   S_B  Update b (b_update) into the PCG engine's b_MEM_BLOCK
//   S_P  PCG solving (pcg_engine)
//   S_V  Update x, y, z (vec_update, fused; z~ never stored)
//   S_C  Check termination (term_check); every RHO_INTERVAL iterations the
//        step size may be doubled or halved, which marks K for recomputation.
// rho is rho_bar on inequality rows and 5 rho_bar on equality rows (l = u),
// rho_bar starting at RHO_INIT, as in the paper's tuned setting.
// The unit reads the problem memory through pm_rd_idx / pm_rd_word (one cycle
// latency); the scaled solution is read through x_ridx / x_rdata once done.
//
// Lint note: the PCG engine's busy output is not needed (its done pulse is used).
module admm_core
  import qp_pkg::*;
#(
  parameter int  L            = 270,
  parameter int  MAX_ITER     = 4000,
  parameter int  RHO_INTERVAL = 10,
  parameter int  PCG_MAX_ITER = 100,
  parameter int  PCG_TOL_SHIFT = 22,
  parameter int  RHO_MU       = 3,
  parameter fx_t ALPHA        = 32'sd1677722,    // 1.6
  parameter fx_t SIGMA        = 32'sd1,          // 1e-6 (one LSB)
  parameter fx_t RHO_INIT     = 32'sd104858,     // 0.1
  parameter fx_t EPS_ABS      = 32'sd5243,       // 5e-3
  parameter fx_t EPS_REL      = 32'sd5243,       // 5e-3
  localparam int IW = $clog2(L + 1),
  localparam int AW = (L > 1) ? $clog2(L) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          converged,
  output logic [15:0]   iters,
  output logic [31:0]   pcg_iters,
  output logic [15:0]   k_calcs,
  output logic [15:0]   rho_changes,
  output fx_t           r_prim,
  output fx_t           r_dual,
  // problem memory read port
  output logic [IW-1:0] pm_rd_idx,
  input  pm_word_t      pm_rd_word,
  // solution read port (scaled x)
  input  logic [AW-1:0] x_ridx,
  output fxw_t          x_rdata
);
  typedef enum logic [3:0] {S_IDLE, S_INIT, S_K, S_B, S_P, S_PW, S_V, S_C, S_CW, S_DEC, S_DONE} state_t;
  state_t st;

  // ---- x, y, z buffers ---------------------------------------------------
  fxw_t xm [L], zm [L + 1], ym [L + 1];
  fxw_t x_rd, z_rd, y_rd;

  logic [IW-1:0] idx, idx1, ocnt;
  logic          v1, issuing;
  logic [AW-1:0] xa;

  assign xa = (st == S_IDLE || st == S_DONE) ? x_ridx :
              ((idx >= IW'(L)) ? AW'(L - 1) : AW'(idx));
  assign pm_rd_idx = idx;
  assign x_rdata = x_rd;

  always_ff @(posedge clk) begin
    x_rd <= xm[xa];
    z_rd <= zm[idx];
    y_rd <= ym[idx];
  end

  // ---- step sizes ----------------------------------------------------------
  fx_t rho_i, rho_e, rinv_i, rinv_e;
  logic k_dirty;

  // ---- units -----------------------------------------------------------------
  logic  kc_v;
  krec_t kc_k;
  kcalc_unit u_kcalc (
    .clk, .rst_n, .in_valid(v1 && st == S_K), .in_w(pm_rd_word),
    .rho_ineq(rho_i), .rho_eq(rho_e), .sigma(SIGMA), .out_valid(kc_v), .out_k(kc_k));

  logic bu_v;
  fxw_t bu_b;
  b_update u_bupd (
    .clk, .rst_n, .in_valid(v1 && st == S_B), .in_w(pm_rd_word),
    .in_x(x_rd), .in_z(z_rd), .in_y(y_rd), .rho_ineq(rho_i), .rho_eq(rho_e), .sigma(SIGMA),
    .out_valid(bu_v), .out_b(bu_b));

  logic pcg_start, pcg_busy, pcg_done;
  logic [15:0] pcg_it;
  pcw_t pcg_x;
  pcg_engine #(.L(L), .MAX_ITER(PCG_MAX_ITER), .TOL_SHIFT(PCG_TOL_SHIFT)) u_pcg (
    .clk, .rst_n,
    .k_we(kc_v), .k_idx(AW'(ocnt)), .k_data(kc_k),
    .b_we(bu_v), .b_idx(AW'(ocnt)), .b_data(bu_b),
    .start(pcg_start), .new_k(k_dirty), .busy(pcg_busy), .done(pcg_done), .iters(pcg_it),
    .x_ridx((idx >= IW'(L)) ? AW'(L - 1) : AW'(idx)), .x_rdata(pcg_x));

  fxw_t xt;
  always_comb for (int j = 0; j < LANES; j++) xt[j] = pc_to_fx(pcg_x[j]);

  logic vu_v;
  fxw_t vu_x, vu_z, vu_y;
  vec_update u_vupd (
    .clk, .rst_n, .in_valid(v1 && st == S_V), .in_w(pm_rd_word),
    .in_xt(xt), .in_x(x_rd), .in_z(z_rd), .in_y(y_rd), .alpha(ALPHA),
    .rho_ineq(rho_i), .rho_eq(rho_e), .rho_inv_ineq(rinv_i), .rho_inv_eq(rinv_e),
    .out_valid(vu_v), .out_x(vu_x), .out_z(vu_z), .out_y(vu_y));

  logic tc_clear, tc_conv, tc_up, tc_down;
  term_check #(.MU(RHO_MU)) u_term (
    .clk, .rst_n, .clear(tc_clear), .in_valid(v1 && st == S_C), .in_w(pm_rd_word),
    .in_x(x_rd), .in_z(z_rd), .in_y(y_rd), .eps_abs(EPS_ABS), .eps_rel(EPS_REL),
    .r_prim(r_prim), .r_dual(r_dual), .converged(tc_conv), .rho_up(tc_up), .rho_down(tc_down));

  // ---- buffer writes -----------------------------------------------------------
  always_ff @(posedge clk) begin
    if (st == S_INIT && v1) begin
      if (idx1 < IW'(L)) xm[AW'(idx1)] <= '0;
      zm[idx1] <= '0;
      ym[idx1] <= '0;
    end
    if (st == S_V && vu_v) begin
      if (ocnt < IW'(L)) xm[AW'(ocnt)] <= vu_x;
      zm[ocnt] <= vu_z;
      ym[ocnt] <= vu_y;
    end
  end

  assign busy = (st != S_IDLE && st != S_DONE);

  logic [3:0] drain;
  logic [15:0] since_rho;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; idx <= '0; idx1 <= '0; v1 <= 1'b0; issuing <= 1'b0; ocnt <= '0;
      rho_i <= '0; rho_e <= '0; rinv_i <= '0; rinv_e <= '0; k_dirty <= 1'b0;
      done <= 1'b0; converged <= 1'b0; iters <= '0; pcg_iters <= '0; k_calcs <= '0;
      rho_changes <= '0; pcg_start <= 1'b0; tc_clear <= 1'b0; drain <= '0; since_rho <= '0;
    end else begin
      done      <= 1'b0;
      pcg_start <= 1'b0;
      tc_clear  <= 1'b0;
      v1   <= issuing;
      idx1 <= idx;
      if (issuing) begin
        if (idx == IW'(L)) issuing <= 1'b0;
        else idx <= idx + 1'b1;
      end
      case (st)
        S_IDLE, S_DONE: if (start) begin
          st <= S_INIT; idx <= '0; issuing <= 1'b1;
          rho_i  <= RHO_INIT;
          rho_e  <= fx_sat(64'(RHO_INIT) * 5);
          rinv_i <= fx_sat((64'sd1 <<< (2 * FX_F)) / 64'(RHO_INIT));
          rinv_e <= fx_sat((64'sd1 <<< (2 * FX_F)) / (64'(RHO_INIT) * 5));
          k_dirty <= 1'b1; converged <= 1'b0; iters <= '0; pcg_iters <= '0;
          k_calcs <= '0; rho_changes <= '0; since_rho <= '0;
        end
        S_INIT: if (v1 && idx1 == IW'(L)) begin
          st <= S_K; idx <= '0; issuing <= 1'b1; ocnt <= '0;
        end
        S_K: if (kc_v) begin
          ocnt <= ocnt + 1'b1;
          if (ocnt == IW'(L - 1)) begin
            st <= S_B; idx <= '0; issuing <= 1'b1; ocnt <= '0; k_calcs <= k_calcs + 1'b1;
          end
        end
        S_B: if (bu_v) begin
          ocnt <= ocnt + 1'b1;
          if (ocnt == IW'(L - 1)) begin st <= S_P; pcg_start <= 1'b1; end
        end
        S_P: st <= S_PW;
        S_PW: if (pcg_done) begin
          k_dirty   <= 1'b0;
          pcg_iters <= pcg_iters + 32'(pcg_it);
          st <= S_V; idx <= '0; issuing <= 1'b1; ocnt <= '0;
        end
        S_V: if (vu_v) begin
          ocnt <= ocnt + 1'b1;
          if (ocnt == IW'(L)) begin
            st <= S_C; idx <= '0; issuing <= 1'b1; tc_clear <= 1'b1;
          end
        end
        S_C: if (v1 && idx1 == IW'(L)) begin st <= S_CW; drain <= 4'd3; end
        S_CW: if (drain == '0) st <= S_DEC; else drain <= drain - 1'b1;
        S_DEC: begin
          iters     <= iters + 1'b1;
          since_rho <= since_rho + 1'b1;
          idx       <= '0;
          ocnt      <= '0;
          issuing   <= 1'b1;
          if (tc_conv || iters + 1'b1 == 16'(MAX_ITER)) begin
            converged <= tc_conv;
            done      <= 1'b1;
            issuing   <= 1'b0;
            st        <= S_DONE;
          end else if (since_rho + 1'b1 >= 16'(RHO_INTERVAL) && (tc_up || tc_down)) begin
            since_rho   <= '0;
            rho_changes <= rho_changes + 1'b1;
            k_dirty     <= 1'b1;
            st          <= S_K;
            if (tc_up) begin
              rho_i <= fx_shift(rho_i, 1); rho_e <= fx_shift(rho_e, 1);
              rinv_i <= fx_shift(rinv_i, -1); rinv_e <= fx_shift(rinv_e, -1);
            end else begin
              rho_i <= fx_shift(rho_i, -1); rho_e <= fx_shift(rho_e, -1);
              rinv_i <= fx_shift(rinv_i, 1); rinv_e <= fx_shift(rinv_e, 1);
            end
          end else begin
            if (since_rho + 1'b1 >= 16'(RHO_INTERVAL)) since_rho <= '0;
            st <= S_B;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
