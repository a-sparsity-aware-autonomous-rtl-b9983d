// b_update: right-hand side of the ADMM linear system,
//   b = sigma x + A^T (rho z - y),
// streamed one point word per cycle (the "Update b" part of the ADMM module).
//
// Constraint words w = 0..L enter in order with z(w), y(w) and x(w) (x is
// ignored on the end-state word L). The unit forms v = rho z - y per row,
// with rho_eq on equality rows (l = u) and rho_ineq elsewhere, feeds v to the
// A^T product and adds sigma x of the matching point. Output point w-1 leaves
// one cycle after word w entered, so L outputs follow L+1 inputs. The cost
// has no linear term (q = 0) in the path-planning QP, so no -q appears.
//
// Lint note: the P, D and E fields of the memory word are unused here.
module b_update
  import qp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  pm_word_t in_w,
  input  fxw_t     in_x,
  input  fxw_t     in_z,
  input  fxw_t     in_y,
  input  fx_t      rho_ineq,
  input  fx_t      rho_eq,
  input  fx_t      sigma,
  output logic     out_valid,
  output fxw_t     out_b
);
  fxw_t v, g, x_prev, x_out;
  logic gv;

  always_comb
    for (int r = 0; r < LANES; r++)
      v[r] = fx_sat(64'(fx_mul((in_w.l[r] == in_w.u[r]) ? rho_eq : rho_ineq, in_z[r]))
                    - 64'(in_y[r]));

  spmv_at u_at (
    .clk, .rst_n, .in_valid, .in_a(in_w.a), .in_first(in_w.first), .in_last(in_w.last),
    .in_v(v), .out_valid(gv), .out_g(g));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_prev <= '0;
      x_out  <= '0;
    end else if (in_valid) begin
      x_prev <= in_x;
      x_out  <= x_prev;
    end
  end

  assign out_valid = gv;
  always_comb
    for (int c = 0; c < LANES; c++)
      out_b[c] = fx_sat(64'(g[c]) + 64'(fx_mul(sigma, x_out[c])));
endmodule
