// vec_update: the fused "Update x, y, z" step that follows each PCG solve.
//
//   z~    = A x~                                   (spmv_a, no z~ buffer)
//   zr    = alpha z~ + (1 - alpha) z_old           (relaxed z, computed once)
//   z_new = clamp(zr + rho^-1 y_old, l, u)         (projection onto [l, u])
//   y_new = y_old + rho (zr - z_new)
//   x_new = alpha x~ + (1 - alpha) x_old
// Following the paper's operator fusion, each z~ word is consumed the cycle it
// leaves the SpMV, and the relaxed value zr, the old z and the new z are
// passed from the z update to the y update in registers, so z~ is never
// written to memory and alpha z~ / (1-alpha) z_old are computed only once.
// Constraint words w = 0..L enter in order with x~(w), x_old(w), z_old(w),
// y_old(w) (x values ignored on word L); outputs for word w leave two cycles
// later (x_new is meaningful for w < L only). rho / rho^-1 are chosen per row:
// the _eq values on equality rows (l = u).
//
// Lint note: the P, D and E fields of the memory word are unused here.
module vec_update
  import qp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  pm_word_t in_w,
  input  fxw_t     in_xt,
  input  fxw_t     in_x,
  input  fxw_t     in_z,
  input  fxw_t     in_y,
  input  fx_t      alpha,
  input  fx_t      rho_ineq,
  input  fx_t      rho_eq,
  input  fx_t      rho_inv_ineq,
  input  fx_t      rho_inv_eq,
  output logic     out_valid,
  output fxw_t     out_x,
  output fxw_t     out_z,
  output fxw_t     out_y
);
  localparam fx_t ONE = fx_t'(1) <<< FX_F;

  logic zt_v;
  fxw_t zt;
  spmv_a u_a (
    .clk, .rst_n, .in_valid, .in_a(in_w.a), .in_first(in_w.first), .in_last(in_w.last),
    .in_x(in_xt), .out_valid(zt_v), .out_y(zt));

  // side band delayed to meet z~
  fxw_t xt_d, x_d, z_d, y_d, l_d, u_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xt_d <= '0; x_d <= '0; z_d <= '0; y_d <= '0; l_d <= '0; u_d <= '0;
    end else if (in_valid) begin
      xt_d <= in_xt; x_d <= in_x; z_d <= in_z; y_d <= in_y; l_d <= in_w.l; u_d <= in_w.u;
    end
  end

  fxw_t zr, zc, zn, yn, xn;
  fx_t  oma;
  assign oma = ONE - alpha;
  always_comb begin
    for (int r = 0; r < LANES; r++) begin
      logic eq;
      eq    = (l_d[r] == u_d[r]);
      zr[r] = fx_sat(64'(fx_mul(alpha, zt[r])) + 64'(fx_mul(oma, z_d[r])));
      zc[r] = fx_sat(64'(zr[r]) + 64'(fx_mul(eq ? rho_inv_eq : rho_inv_ineq, y_d[r])));
      zn[r] = (zc[r] < l_d[r]) ? l_d[r] : ((zc[r] > u_d[r]) ? u_d[r] : zc[r]);
      yn[r] = fx_sat(64'(y_d[r]) + 64'(fx_mul(eq ? rho_eq : rho_ineq,
                                              fx_sat(64'(zr[r]) - 64'(zn[r])))));
      xn[r] = fx_sat(64'(fx_mul(alpha, xt_d[r])) + 64'(fx_mul(oma, x_d[r])));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_x <= '0; out_z <= '0; out_y <= '0;
    end else begin
      out_valid <= zt_v;
      if (zt_v) begin out_x <= xn; out_z <= zn; out_y <= yn; end
    end
  end
endmodule
