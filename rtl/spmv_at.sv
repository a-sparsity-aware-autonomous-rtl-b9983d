// spmv_at: streaming sparse product g = A^T v (one point of g per cycle).
//
// The constraint words of A and v enter in order w = 0..L. Point i of the
// result collects the rows of word i (through the columns of point i) and the
// rows of word i+1 (through the transition block that reaches back to point
// i). When word w enters, the unit adds the part of word w that belongs to
// point w-1 to the partial sum it kept from the previous word, and emits point
// w-1 on the next cycle; it then keeps the part of word w that belongs to
// point w. Words 1..L thus produce points 0..L-1, so a full product takes
// L+1 input cycles and ends two cycles after the last word.
// Used for b = sigma x + A^T(rho z - y) and for the dual residual.
module spmv_at
  import qp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  a_word_t  in_a,
  input  logic     in_first,
  input  logic     in_last,
  input  fxw_t     in_v,
  output logic     out_valid,
  output fxw_t     out_g          // point (w-1) for input word w
);
  acc_t [LANES-1:0] part;         // A_cur(w)^T v(w), waiting for word w+1
  acc_t [LANES-1:0] cur_n, prev_n;
  mat6_t mc, mp;

  always_comb begin
    mc = a_cur(in_a, in_first, in_last);
    mp = a_prev(in_a, in_first, in_last);
    for (int c = 0; c < LANES; c++) begin
      cur_n[c]  = '0;
      prev_n[c] = part[c];
      for (int r = 0; r < LANES; r++) begin
        cur_n[c]  += acc_t'(mc[r][c]) * acc_t'(in_v[r]);
        prev_n[c] += acc_t'(mp[r][c]) * acc_t'(in_v[r]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_g     <= '0;
      part      <= '0;
    end else begin
      out_valid <= in_valid && !in_first;
      if (in_valid) begin
        part <= cur_n;
        for (int c = 0; c < LANES; c++) out_g[c] <= fx_from_acc(prev_n[c]);
      end
    end
  end
endmodule
