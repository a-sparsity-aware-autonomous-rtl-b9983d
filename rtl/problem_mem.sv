// problem_mem: pattern-aware storage of the QP problem.
//
// A is kept in 17 memory blocks and P in 5, each L entries deep, so that all
// non-zeros belonging to one trajectory point are read in a single cycle (the
// "fully decoupled" storage: no two non-zeros of a row or of a column share a
// block). Alongside them: the bounds l and u (6 blocks each, L+1 deep) and the
// scaling diagonals D (6 blocks, L deep) and E (6 blocks, L+1 deep), kept as
// power-of-two exponents.
//
// Read: present word index rd_idx (0..L); the whole word, plus flags telling
// whether it is the first word or the end-state word L, appears one cycle
// later on rd_word. For word L the A blocks are read at index 0, where the two
// end-state coefficients live. Write: each block has its own enable bit, so
// the host can load one element at a time and the scaling unit can rewrite a
// whole word per cycle.
//
// Lint note: the first/last flags of the write word are read-side information and
// are not stored, so those two bits of wr_word are unused.
module problem_mem
  import qp_pkg::*;
#(
  parameter int L = 270,
  localparam int IW = $clog2(L + 1)
) (
  input  logic                clk,
  // read port
  input  logic [IW-1:0]       rd_idx,
  output pm_word_t            rd_word,
  // write port
  input  logic [IW-1:0]       wr_idx,
  input  pm_word_t            wr_word,
  input  logic [NA_BLK-1:0]   we_a,
  input  logic [NP_BLK-1:0]   we_p,
  input  logic [LANES-1:0]    we_l,
  input  logic [LANES-1:0]    we_u,
  input  logic [LANES-1:0]    we_d,
  input  logic [LANES-1:0]    we_e
);
  localparam int AWL  = (L > 1) ? $clog2(L) : 1;
  localparam int AWL1 = $clog2(L + 1);

  logic [AWL-1:0] ra_pt;    // read index into the L-deep blocks
  logic [AWL-1:0] wa_pt;
  assign ra_pt = (rd_idx >= IW'(L)) ? '0 : AWL'(rd_idx);
  assign wa_pt = (wr_idx >= IW'(L)) ? '0 : AWL'(wr_idx);

  for (genvar j = 0; j < NA_BLK; j++) begin : g_a
    sp_ram #(.W(FX_W), .DEPTH(L)) u_blk (
      .clk, .we(we_a[j]), .waddr(wa_pt), .wdata(wr_word.a[j]),
      .raddr(ra_pt), .rdata(rd_word.a[j]));
  end
  for (genvar j = 0; j < NP_BLK; j++) begin : g_p
    sp_ram #(.W(FX_W), .DEPTH(L)) u_blk (
      .clk, .we(we_p[j]), .waddr(wa_pt), .wdata(wr_word.p[j]),
      .raddr(ra_pt), .rdata(rd_word.p[j]));
  end
  for (genvar j = 0; j < LANES; j++) begin : g_v
    sp_ram #(.W(FX_W), .DEPTH(L + 1)) u_l (
      .clk, .we(we_l[j]), .waddr(AWL1'(wr_idx)), .wdata(wr_word.l[j]),
      .raddr(AWL1'(rd_idx)), .rdata(rd_word.l[j]));
    sp_ram #(.W(FX_W), .DEPTH(L + 1)) u_u (
      .clk, .we(we_u[j]), .waddr(AWL1'(wr_idx)), .wdata(wr_word.u[j]),
      .raddr(AWL1'(rd_idx)), .rdata(rd_word.u[j]));
    sp_ram #(.W(8), .DEPTH(L)) u_d (
      .clk, .we(we_d[j]), .waddr(wa_pt), .wdata(wr_word.d[j]),
      .raddr(ra_pt), .rdata(rd_word.d[j]));
    sp_ram #(.W(8), .DEPTH(L + 1)) u_e (
      .clk, .we(we_e[j]), .waddr(AWL1'(wr_idx)), .wdata(wr_word.e[j]),
      .raddr(AWL1'(rd_idx)), .rdata(rd_word.e[j]));
  end

  always_ff @(posedge clk) begin
    rd_word.first <= (rd_idx == '0);
    rd_word.last  <= (rd_idx == IW'(L));
  end
endmodule
