// pcg_engine: Jacobi-preconditioned conjugate gradient solver for K x = b,
// the inner loop of the ADMM solver, in the 24-bit fixed-point format.
//
// Algorithm (x0 = 0, r0 = b, y0 = M^-1 r0, p0 = y0, M = diag(K)):
//   alpha = r'y / p'Kp ; x += alpha p ; r -= alpha Kp ; y = M^-1 r ;
//   beta = r'y_new / r'y_old ; p = y + beta p
// The two scalar divisions split an iteration into three streaming stages,
// each one pass over the L point words at six elements per cycle:
//   stage 1  fused operator 1: Kp = K p through spmv_k, and p'Kp accumulated
//            from each Kp word as it leaves the SpMV (no re-read of Kp);
//   stage 2  fused operator 2: r = r - alpha Kp, y = M^-1 r and r'y chained
//            in one cycle per word, with x = x + alpha p alongside;
//   stage 3  p = y + beta p.
// The iteration stops when r'y <= r0'y0 * 2^-TOL_SHIFT (a preconditioned
// form of ||r|| <= eps ||b||, which needs no extra dot product) or after
// MAX_ITER iterations. The preconditioner 1/K_ii is recomputed (six dividers,
// one point word at a time) when start arrives with new_k set, i.e. after K
// changed.
//
// Interface: K records and b words are written through the k_* / b_* ports
// while the engine is idle (b in the 32-bit ADMM format, converted here);
// start pulses; done pulses when x is ready; x is then read through
// x_ridx / x_rdata (one cycle latency). iters reports the iterations used.
// Timing per iteration: three passes of L cycles, two divisions of 72 cycles
// and about 16 pipeline cycles (954 + 16 cycles at L = 270).
//
// Lint note: all six preconditioner dividers start together and finish together,
// so only the done of the first one is watched, and the scalar divider's busy
// is not needed; those outputs are unused.
module pcg_engine
  import qp_pkg::*;
#(
  parameter int L         = 270,
  parameter int MAX_ITER  = 100,
  parameter int TOL_SHIFT = 22,
  localparam int AW = (L > 1) ? $clog2(L) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // K_MEM_BLOCK write port
  input  logic          k_we,
  input  logic [AW-1:0] k_idx,
  input  krec_t         k_data,
  // b_MEM_BLOCK write port
  input  logic          b_we,
  input  logic [AW-1:0] b_idx,
  input  fxw_t          b_data,
  // control
  input  logic          start,
  input  logic          new_k,
  output logic          busy,
  output logic          done,
  output logic [15:0]   iters,
  // solution read port
  input  logic [AW-1:0] x_ridx,
  output pcw_t          x_rdata
);
  localparam int DNW = 56;

  typedef enum logic [3:0] {
    S_IDLE, S_MINV_RD, S_MINV_GO, S_MINV_WAIT, S_INIT, S_S1, S_ALPHA,
    S_S2, S_CHK, S_BETA, S_S3, S_DONE
  } state_t;
  state_t st;

  // ---- buffers ------------------------------------------------------------
  krec_t kmem [L];
  pcw_t  minv [L], bmem [L], xm [L], rm [L], ym [L], pm [L], kpm [L];
  krec_t k_rd;
  pcw_t  minv_rd, b_rd, x_rd, r_rd, y_rd, p_rd, kp_rd;

  logic [AW-1:0] idx, idx1, ra;
  logic          v1, first1, last1;

  assign ra = (st == S_IDLE || st == S_DONE) ? x_ridx : idx;
  assign x_rdata = x_rd;

  always_ff @(posedge clk) begin
    k_rd <= kmem[ra]; minv_rd <= minv[ra]; b_rd <= bmem[ra]; x_rd <= xm[ra];
    r_rd <= rm[ra];   y_rd <= ym[ra];      p_rd <= pm[ra];   kp_rd <= kpm[ra];
    if (k_we) kmem[k_idx] <= k_data;
    if (b_we) for (int j = 0; j < LANES; j++) bmem[b_idx][j] <= fx_to_pc(b_data[j]);
  end

  // ---- scalar state ---------------------------------------------------------
  acc_t rty, rty0, rty_new, pkp;
  pc_t  alpha, beta;

  // ---- dividers -------------------------------------------------------------
  logic              sd_start, sd_done;
  logic signed [DNW-1:0] sd_num, sd_den;
  logic signed [PC_W-1:0] sd_q;
  logic              sd_busy;
  fx_div #(.NW(DNW), .F(PC_F), .QW(PC_W)) u_sdiv (
    .clk, .rst_n, .start(sd_start), .num(sd_num), .den(sd_den),
    .busy(sd_busy), .done(sd_done), .q(sd_q));

  logic [LANES-1:0] md_done;
  logic [LANES-1:0] md_busy;
  logic             md_start;
  pcw_t             md_q;
  for (genvar j = 0; j < LANES; j++) begin : g_mdiv
    fx_div #(.NW(PC_W + 1), .F(PC_F), .QW(PC_W)) u_mdiv (
      .clk, .rst_n, .start(md_start),
      .num((PC_W + 1)'(1) <<< PC_F),
      .den((PC_W + 1)'(k_diag(k_rd)[j][j])),
      .busy(md_busy[j]), .done(md_done[j]), .q(md_q[j]));
  end

  // ---- stage 1: SpMV ----------------------------------------------------------
  logic s1_ov;
  pcw_t s1_y, s1_p;
  logic [AW-1:0] ocnt;
  spmv_k u_spmv (
    .clk, .rst_n, .in_valid(v1 && st == S_S1), .in_first(first1), .in_last(last1),
    .in_k(k_rd), .in_p(p_rd), .out_valid(s1_ov), .out_y(s1_y), .out_p(s1_p));

  // ---- stage 2 / init / stage 3 datapath (one word per cycle) ---------------
  pcw_t r_n, y_n, x_n, p_n;
  acc_t dot_ry, dot_pkp;
  always_comb begin
    dot_ry  = '0;
    dot_pkp = '0;
    for (int j = 0; j < LANES; j++) begin
      if (st == S_INIT) begin
        r_n[j] = b_rd[j];
        x_n[j] = '0;
      end else begin
        r_n[j] = pc_sat(64'(r_rd[j]) - 64'(pc_mul(alpha, kp_rd[j])));
        x_n[j] = pc_sat(64'(x_rd[j]) + 64'(pc_mul(alpha, p_rd[j])));
      end
      y_n[j] = pc_mul(minv_rd[j], r_n[j]);
      p_n[j] = (st == S_INIT) ? y_n[j] : pc_sat(64'(y_rd[j]) + 64'(pc_mul(beta, p_rd[j])));
      dot_ry  += acc_t'(r_n[j]) * acc_t'(y_n[j]);
      dot_pkp += acc_t'(s1_p[j]) * acc_t'(s1_y[j]);
    end
  end

  always_ff @(posedge clk) begin
    if (v1) begin
      case (st)
        S_INIT: begin
          rm[idx1] <= r_n; ym[idx1] <= y_n; pm[idx1] <= p_n; xm[idx1] <= x_n;
        end
        S_S2: begin
          rm[idx1] <= r_n; ym[idx1] <= y_n; xm[idx1] <= x_n;
        end
        S_S3: pm[idx1] <= p_n;
        default: ;
      endcase
    end
    if (st == S_S1 && s1_ov) kpm[ocnt] <= s1_y;
    if (st == S_MINV_WAIT && md_done[0]) minv[idx] <= md_q;
  end

  assign busy = (st != S_IDLE && st != S_DONE);

  logic issuing;   // read addresses 0..L-1 are being issued
  logic last_wr;   // the last word of a stream is processed this cycle
  assign last_wr = v1 && idx1 == AW'(L - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; idx <= '0; idx1 <= '0; v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0;
      issuing <= 1'b0;
      rty <= '0; rty0 <= '0; rty_new <= '0; pkp <= '0; alpha <= '0; beta <= '0;
      ocnt <= '0; iters <= '0; done <= 1'b0; sd_start <= 1'b0; sd_num <= '0; sd_den <= '0;
      md_start <= 1'b0;
    end else begin
      done     <= 1'b0;
      sd_start <= 1'b0;
      md_start <= 1'b0;
      // read pipeline shared by the streaming stages
      v1     <= issuing;
      idx1   <= idx;
      first1 <= (idx == '0);
      last1  <= (idx == AW'(L - 1));
      if (issuing) begin
        if (idx == AW'(L - 1)) issuing <= 1'b0;
        else idx <= idx + 1'b1;
      end
      case (st)
        S_IDLE, S_DONE: begin
          if (start) begin
            idx     <= '0;
            iters   <= '0;
            rty     <= '0;
            issuing <= !new_k;
            st      <= new_k ? S_MINV_RD : S_INIT;
          end
        end
        S_MINV_RD: st <= S_MINV_GO;                 // k_rd valid next cycle
        S_MINV_GO: begin md_start <= 1'b1; st <= S_MINV_WAIT; end
        S_MINV_WAIT: if (md_done[0]) begin
          if (idx == AW'(L - 1)) begin idx <= '0; issuing <= 1'b1; st <= S_INIT; end
          else begin idx <= idx + 1'b1; st <= S_MINV_RD; end
        end
        S_INIT: if (v1) begin
          rty <= rty + dot_ry;
          if (last_wr) begin
            rty0 <= rty + dot_ry;
            idx  <= '0;
            if (rty + dot_ry == '0) begin st <= S_DONE; done <= 1'b1; end
            else begin st <= S_S1; pkp <= '0; ocnt <= '0; issuing <= 1'b1; end
          end
        end
        S_S1: if (s1_ov) begin
          pkp  <= pkp + dot_pkp;
          ocnt <= ocnt + 1'b1;
          if (ocnt == AW'(L - 1)) begin
            st       <= S_ALPHA;
            sd_start <= 1'b1;
            sd_num   <= DNW'(rty);
            sd_den   <= DNW'(pkp + dot_pkp);
            idx      <= '0;
          end
        end
        S_ALPHA: if (sd_done) begin
          alpha <= sd_q; st <= S_S2; rty_new <= '0; issuing <= 1'b1;
        end
        S_S2: if (v1) begin
          rty_new <= rty_new + dot_ry;
          if (last_wr) begin idx <= '0; st <= S_CHK; end
        end
        S_CHK: begin
          iters <= iters + 1'b1;
          if (rty_new <= (rty0 >>> TOL_SHIFT) || iters + 1'b1 == 16'(MAX_ITER)) begin
            st <= S_DONE; done <= 1'b1;
          end else begin
            st <= S_BETA; sd_start <= 1'b1; sd_num <= DNW'(rty_new); sd_den <= DNW'(rty);
          end
        end
        S_BETA: if (sd_done) begin beta <= sd_q; rty <= rty_new; st <= S_S3; issuing <= 1'b1; end
        S_S3: if (last_wr) begin
          idx <= '0; st <= S_S1; pkp <= '0; ocnt <= '0; issuing <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
