// spmv_k: pattern-aware sparse matrix-vector product y = K p for the PCG
// solver, six output elements per cycle.
//
// K is symmetric and block-tridiagonal over the trajectory points: point i
// meets only points i-1 and i+1. Each K record holds the lower triangle of
// the 6x6 diagonal block of point i and the 6x6 block C(i) that couples point
// i to point i-1; the block coupling point i to point i+1 is C(i+1)^T, so it
// is not stored (the symmetric storage replaces row indices and column
// pointers with a fixed access pattern). Records and p words enter in order
// i = 0..L-1, one per cycle (in_first on i = 0, in_last on i = L-1). When
// record i arrives the unit completes point i-1 with C(i)^T p(i) and emits it
// one cycle later, keeping C(i) p(i-1) + D(i) p(i) as the partial sum of
// point i. After the last record it emits point L-1 by itself, so a product
// takes L input cycles and the last output comes two cycles after the last
// input. out_p carries the p word of the emitted point, so a consumer can form
// p^T K p on the fly (the fused Kp / pKp operator of the paper).
// All products use the 24-bit PCG format with a wide accumulator.
module spmv_k
  import qp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  logic     in_first,
  input  logic     in_last,
  input  krec_t    in_k,
  input  pcw_t     in_p,
  output logic     out_valid,
  output pcw_t     out_y,
  output pcw_t     out_p
);
  acc_t [LANES-1:0] part, part_n, done_n;
  pcw_t   p_prev;
  logic   flush;
  pmat6_t kd, kc;

  always_comb begin
    kd = k_diag(in_k);
    kc = k_cpl(in_k);
    for (int r = 0; r < LANES; r++) begin
      part_n[r] = '0;
      done_n[r] = part[r];
      for (int c = 0; c < LANES; c++) begin
        part_n[r] += acc_t'(kd[r][c]) * acc_t'(in_p[c]);
        if (!in_first) begin
          part_n[r] += acc_t'(kc[r][c]) * acc_t'(p_prev[c]);
          done_n[r] += acc_t'(kc[c][r]) * acc_t'(in_p[c]);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_y     <= '0;
      out_p     <= '0;
      part      <= '0;
      p_prev    <= '0;
      flush     <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      flush     <= 1'b0;
      if (in_valid) begin
        part   <= part_n;
        p_prev <= in_p;
        flush  <= in_last;
        if (!in_first) begin
          out_valid <= 1'b1;
          out_p     <= p_prev;
          for (int r = 0; r < LANES; r++) out_y[r] <= pc_from_acc(done_n[r], PC_F);
        end
      end else if (flush) begin
        out_valid <= 1'b1;
        out_p     <= p_prev;
        for (int r = 0; r < LANES; r++) out_y[r] <= pc_from_acc(part[r], PC_F);
      end
    end
  end
endmodule
