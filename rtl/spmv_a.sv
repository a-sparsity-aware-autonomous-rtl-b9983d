// spmv_a: streaming sparse matrix-vector product z = A x.
//
// A is read one constraint word (six rows) per cycle from the 17 A memory
// blocks, in order w = 0..L. The rows of word w touch only the variables of
// point w and point w-1, so the unit keeps the previous x word in a register
// and produces the six row results of word w one cycle after the word enters
// (latency 1, one word per cycle, L+1 cycles for the whole product). The
// x input of the end-state word L is ignored. The sparsity structure is
// fixed by qp_pkg::a_cur / a_prev; multiplications by structural zeros are
// constant and vanish in synthesis.
// Used for z~ = A x~ in the vector update and for A x in the residual check.
module spmv_a
  import qp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  a_word_t  in_a,
  input  logic     in_first,
  input  logic     in_last,
  input  fxw_t     in_x,
  output logic     out_valid,
  output fxw_t     out_y
);
  fxw_t  x_prev;
  mat6_t mc, mp;
  fxw_t  y;

  always_comb begin
    mc = a_cur(in_a, in_first, in_last);
    mp = a_prev(in_a, in_first, in_last);
    for (int r = 0; r < LANES; r++) begin
      acc_t s;
      s = '0;
      for (int c = 0; c < LANES; c++) begin
        s += acc_t'(mc[r][c]) * acc_t'(in_x[c]);
        s += acc_t'(mp[r][c]) * acc_t'(x_prev[c]);
      end
      y[r] = fx_from_acc(s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_y     <= '0;
      x_prev    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_y  <= y;
        x_prev <= in_x;
      end
    end
  end
endmodule
