// term_check: ADMM residuals, termination test and step-size (rho) advice.
//
// One pass over the constraint words w = 0..L (with x(w), z(w), y(w)) forms
//   primal residual  r_p = max |A x - z|      (with max |A x|, max |z|)
//   dual residual    r_d = max |P x + A^T y|  (with max |P x|, max |A^T y|)
// as infinity norms (q = 0 in this QP). A x comes from spmv_a, A^T y from
// spmv_at, P x from the diagonal P word; all three are aligned in registers.
// Pulse clear before a pass. Once the pass has drained (three cycles after the
// last word) the outputs hold the verdict:
//   converged = r_p <= eps_abs + eps_rel * max(|Ax|, |z|)
//            && r_d <= eps_abs + eps_rel * max(|Px|, |A^T y|)
//   rho_up    = r_p > MU * r_d,   rho_down = r_d > MU * r_p
// (residual balancing). The caller applies rho_up / rho_down only every
// tenth ADMM iteration, which is the update period the paper uses; the
// balancing rule and MU are this design's choice.
//
// Lint note: only the A and P fields and the flags of the memory word are used.
module term_check
  import qp_pkg::*;
#(
  parameter int MU = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  logic     in_valid,
  input  pm_word_t in_w,
  input  fxw_t     in_x,
  input  fxw_t     in_z,
  input  fxw_t     in_y,
  input  fx_t      eps_abs,
  input  fx_t      eps_rel,
  output fx_t      r_prim,
  output fx_t      r_dual,
  output logic     converged,
  output logic     rho_up,
  output logic     rho_down
);
  logic ax_v, aty_v;
  fxw_t ax, aty;
  spmv_a u_a (
    .clk, .rst_n, .in_valid, .in_a(in_w.a), .in_first(in_w.first), .in_last(in_w.last),
    .in_x(in_x), .out_valid(ax_v), .out_y(ax));
  spmv_at u_at (
    .clk, .rst_n, .in_valid, .in_a(in_w.a), .in_first(in_w.first), .in_last(in_w.last),
    .in_v(in_y), .out_valid(aty_v), .out_g(aty));

  fxw_t z_d, px_prev, px_d, px_w;
  always_comb begin
    fxw_t pd;
    pd = p_diag(in_w.p);
    for (int c = 0; c < LANES; c++) px_w[c] = fx_mul(pd[c], in_x[c]);
  end

  fx_t m_rp, m_ax, m_z, m_rd, m_px, m_aty;

  function automatic fx_t fmax(fx_t a, fx_t b);
    return (a > b) ? a : b;
  endfunction

  // running maxima updated with the current word
  fx_t n_rp, n_ax, n_z, n_rd, n_px, n_aty;
  always_comb begin
    n_rp = m_rp; n_ax = m_ax; n_z = m_z;
    n_rd = m_rd; n_px = m_px; n_aty = m_aty;
    for (int r = 0; r < LANES; r++) begin
      n_rp  = fmax(n_rp, fx_abs(fx_sat(64'(ax[r]) - 64'(z_d[r]))));
      n_ax  = fmax(n_ax, fx_abs(ax[r]));
      n_z   = fmax(n_z, fx_abs(z_d[r]));
      n_rd  = fmax(n_rd, fx_abs(fx_sat(64'(px_d[r]) + 64'(aty[r]))));
      n_px  = fmax(n_px, fx_abs(px_d[r]));
      n_aty = fmax(n_aty, fx_abs(aty[r]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_d <= '0; px_prev <= '0; px_d <= '0;
      m_rp <= '0; m_ax <= '0; m_z <= '0; m_rd <= '0; m_px <= '0; m_aty <= '0;
    end else begin
      if (in_valid) begin
        z_d     <= in_z;
        px_prev <= px_w;
        px_d    <= px_prev;
      end
      if (clear) begin
        m_rp <= '0; m_ax <= '0; m_z <= '0; m_rd <= '0; m_px <= '0; m_aty <= '0;
      end else begin
        if (ax_v) begin
          m_rp <= n_rp; m_ax <= n_ax; m_z <= n_z;
        end
        if (aty_v) begin
          m_rd <= n_rd; m_px <= n_px; m_aty <= n_aty;
        end
      end
    end
  end

  fx_t tol_p, tol_d;
  always_comb begin
    tol_p = fx_sat(64'(eps_abs) + 64'(fx_mul(eps_rel, fmax(m_ax, m_z))));
    tol_d = fx_sat(64'(eps_abs) + 64'(fx_mul(eps_rel, fmax(m_px, m_aty))));
  end
  assign r_prim    = m_rp;
  assign r_dual    = m_rd;
  assign converged = (m_rp <= tol_p) && (m_rd <= tol_d);
  assign rho_up    = 64'(m_rp) > 64'(m_rd) * MU;
  assign rho_down  = 64'(m_rd) > 64'(m_rp) * MU;
endmodule
