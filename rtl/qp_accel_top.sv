// qp_accel_top: programmable-logic side of the path-planning accelerator.
//
// The host (the processing system, which builds the QP from the reference
// path) loads the non-zeros of A and P and the bounds l, u into the pattern-
// aware problem memory, then pulses start. The Scaling module equilibrates the
// problem in place (P = DPD, A = EAD, l = El, u = Eu, D and E kept); the ADMM
// module then solves the scaled QP, reading the same memory. When done pulses,
// the solution is read one point word at a time through res_idx / res_x
// (one cycle latency), already unscaled (x = D x_scaled).
//
// In the original system the two modules are separate IP cores that exchange
// the scaled problem through DDR over AXI; here they share the on-chip problem
// memory directly and the host ports are plain load / read ports, so no bus
// adapter or DRAM model is needed. The top adds only this sequencing, the
// memory port multiplexing and the final unscaling shift.
//
// Loading: ld_idx selects the word (0..L), ld_word carries the data, and one
// enable bit per memory block (ld_we_a / ld_we_p / ld_we_l / ld_we_u) selects
// which blocks take it. Every entry, padding included, must be written (with
// zero where the matrix has none) before start.
//
// Lint note: the busy outputs of the scaling unit and the ADMM core are not needed
// here (the phase register tracks them), so they are left unconnected in use.
module qp_accel_top
  import qp_pkg::*;
#(
  parameter int  L             = 270,
  parameter int  SCALE_ITERS   = 10,
  parameter int  MAX_ITER      = 4000,
  parameter int  RHO_INTERVAL  = 10,
  parameter int  PCG_MAX_ITER  = 100,
  parameter int  PCG_TOL_SHIFT = 22,
  parameter int  RHO_MU        = 3,
  parameter fx_t EPS_ABS       = 32'sd5243,   // 5e-3
  parameter fx_t EPS_REL       = 32'sd5243,   // 5e-3
  localparam int IW = $clog2(L + 1),
  localparam int AW = (L > 1) ? $clog2(L) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // problem loading
  input  logic [IW-1:0]     ld_idx,
  input  pm_word_t          ld_word,
  input  logic [NA_BLK-1:0] ld_we_a,
  input  logic [NP_BLK-1:0] ld_we_p,
  input  logic [LANES-1:0]  ld_we_l,
  input  logic [LANES-1:0]  ld_we_u,
  // control and status
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              converged,
  output logic [15:0]       admm_iters,
  output logic [31:0]       pcg_iters,
  output logic [15:0]       k_calcs,
  output logic [15:0]       rho_changes,
  output fx_t               r_prim,
  output fx_t               r_dual,
  // result
  input  logic [AW-1:0]     res_idx,
  output fxw_t              res_x
);
  typedef enum logic [1:0] {T_IDLE, T_SCALE, T_ADMM} phase_t;
  phase_t ph;

  // problem memory and its port multiplexing
  logic [IW-1:0]     pm_ridx, pm_widx;
  pm_word_t          pm_rword, pm_wword;
  logic [NA_BLK-1:0] pm_we_a;
  logic [NP_BLK-1:0] pm_we_p;
  logic [LANES-1:0]  pm_we_l, pm_we_u, pm_we_d, pm_we_e;

  problem_mem #(.L(L)) u_pm (
    .clk, .rd_idx(pm_ridx), .rd_word(pm_rword),
    .wr_idx(pm_widx), .wr_word(pm_wword),
    .we_a(pm_we_a), .we_p(pm_we_p), .we_l(pm_we_l), .we_u(pm_we_u),
    .we_d(pm_we_d), .we_e(pm_we_e));

  logic              sc_start, sc_busy, sc_done;
  logic [IW-1:0]     sc_ridx, sc_widx;
  pm_word_t          sc_wword;
  logic [NA_BLK-1:0] sc_we_a;
  logic [NP_BLK-1:0] sc_we_p;
  logic [LANES-1:0]  sc_we_l, sc_we_u, sc_we_d, sc_we_e;

  scaling_unit #(.L(L), .ITERS(SCALE_ITERS)) u_scale (
    .clk, .rst_n, .start(sc_start), .busy(sc_busy), .done(sc_done),
    .rd_idx(sc_ridx), .rd_word(pm_rword), .wr_idx(sc_widx), .wr_word(sc_wword),
    .we_a(sc_we_a), .we_p(sc_we_p), .we_l(sc_we_l), .we_u(sc_we_u),
    .we_d(sc_we_d), .we_e(sc_we_e));

  logic          ad_start, ad_busy, ad_done;
  logic [IW-1:0] ad_ridx;
  fxw_t          ad_x;

  admm_core #(.L(L), .MAX_ITER(MAX_ITER), .RHO_INTERVAL(RHO_INTERVAL),
              .PCG_MAX_ITER(PCG_MAX_ITER), .PCG_TOL_SHIFT(PCG_TOL_SHIFT),
              .RHO_MU(RHO_MU), .EPS_ABS(EPS_ABS), .EPS_REL(EPS_REL)) u_admm (
    .clk, .rst_n, .start(ad_start), .busy(ad_busy), .done(ad_done),
    .converged, .iters(admm_iters), .pcg_iters, .k_calcs, .rho_changes, .r_prim, .r_dual,
    .pm_rd_idx(ad_ridx), .pm_rd_word(pm_rword), .x_ridx(res_idx), .x_rdata(ad_x));

  always_comb begin
    case (ph)
      T_SCALE: pm_ridx = sc_ridx;
      T_ADMM:  pm_ridx = ad_ridx;
      default: pm_ridx = IW'(res_idx);
    endcase
    if (ph == T_SCALE) begin
      pm_widx = sc_widx; pm_wword = sc_wword;
      pm_we_a = sc_we_a; pm_we_p = sc_we_p; pm_we_l = sc_we_l; pm_we_u = sc_we_u;
      pm_we_d = sc_we_d; pm_we_e = sc_we_e;
    end else begin
      pm_widx = ld_idx; pm_wword = ld_word;
      pm_we_a = (ph == T_IDLE) ? ld_we_a : '0;
      pm_we_p = (ph == T_IDLE) ? ld_we_p : '0;
      pm_we_l = (ph == T_IDLE) ? ld_we_l : '0;
      pm_we_u = (ph == T_IDLE) ? ld_we_u : '0;
      pm_we_d = '0; pm_we_e = '0;
    end
  end

  // unscaling: x = D x_scaled (D holds power-of-two exponents)
  always_comb
    for (int j = 0; j < LANES; j++) res_x[j] = fx_shift(ad_x[j], int'(pm_rword.d[j]));

  assign busy = (ph != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= T_IDLE; sc_start <= 1'b0; ad_start <= 1'b0; done <= 1'b0;
    end else begin
      sc_start <= 1'b0;
      ad_start <= 1'b0;
      done     <= 1'b0;
      case (ph)
        T_IDLE:  if (start) begin ph <= T_SCALE; sc_start <= 1'b1; end
        T_SCALE: if (sc_done) begin ph <= T_ADMM; ad_start <= 1'b1; end
        T_ADMM:  if (ad_done) begin ph <= T_IDLE; done <= 1'b1; end
        default: ph <= T_IDLE;
      endcase
    end
  end
endmodule
