// tb_problem_mem: checks the pattern-aware problem storage.
//
// Every block is written separately with its own enable (random data, a
// different random word per block), so a missing or crossed enable shows up.
// Reads of every word index 0..L must return the model contents one cycle
// later, with the first / last flags, and word L must read the A and P blocks
// at index 0 (where the two end-state coefficients are kept) while l, u and E
// come from their own entry L.
module tb_problem_mem;
  import qp_pkg::*;
  localparam int L = 10;
  localparam int IW = $clog2(L + 1);
  logic clk = 1'b0;
  logic [IW-1:0] rd_idx = '0, wr_idx = '0;
  pm_word_t rd_word, wr_word = '0;
  logic [NA_BLK-1:0] we_a = '0;
  logic [NP_BLK-1:0] we_p = '0;
  logic [LANES-1:0] we_l = '0, we_u = '0, we_d = '0, we_e = '0;
  pm_word_t model [L + 1];
  int checks = 0, failures = 0;

  problem_mem #(.L(L)) dut (.*);

  always #5 clk = ~clk;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic pm_word_t rnd_word();
    pm_word_t w;
    for (int j = 0; j < NA_BLK; j++) w.a[j] = fx_t'($urandom());
    for (int j = 0; j < NP_BLK; j++) w.p[j] = fx_t'($urandom());
    for (int c = 0; c < LANES; c++) begin
      w.l[c] = fx_t'($urandom()); w.u[c] = fx_t'($urandom());
      w.d[c] = sexp_t'($urandom()); w.e[c] = sexp_t'($urandom());
    end
    w.first = 1'b0; w.last = 1'b0;
    return w;
  endfunction

  initial begin
    pm_word_t w, e;
    @(posedge clk);
    for (int i = 0; i <= L; i++) begin
      model[i] = '0;
      for (int j = 0; j < NA_BLK + NP_BLK + 4 * LANES; j++) begin
        if (i == L && j < NA_BLK + NP_BLK) continue;            // A, P: L deep
        if (i == L && j >= NA_BLK + NP_BLK + 2 * LANES && j < NA_BLK + NP_BLK + 3 * LANES) continue;  // D: L deep
        w = rnd_word();
        #1 wr_idx = IW'(i); wr_word = w;
        we_a = '0; we_p = '0; we_l = '0; we_u = '0; we_d = '0; we_e = '0;
        if (j < NA_BLK) begin we_a[j] = 1'b1; model[i].a[j] = w.a[j]; end
        else if (j < NA_BLK + NP_BLK) begin we_p[j-NA_BLK] = 1'b1; model[i].p[j-NA_BLK] = w.p[j-NA_BLK]; end
        else begin
          int k, c;
          k = (j - NA_BLK - NP_BLK) / LANES; c = (j - NA_BLK - NP_BLK) % LANES;
          case (k)
            0: begin we_l[c] = 1'b1; model[i].l[c] = w.l[c]; end
            1: begin we_u[c] = 1'b1; model[i].u[c] = w.u[c]; end
            2: begin we_d[c] = 1'b1; model[i].d[c] = w.d[c]; end
            default: begin we_e[c] = 1'b1; model[i].e[c] = w.e[c]; end
          endcase
        end
        @(posedge clk);
      end
    end
    #1 we_a = '0; we_p = '0; we_l = '0; we_u = '0; we_d = '0; we_e = '0;
    for (int rep = 0; rep < 3; rep++)
      for (int i = 0; i <= L; i++) begin
        #1 rd_idx = IW'(i);
        @(posedge clk);
        #1;
        e = model[i];
        if (i == L) begin e.a = model[0].a; e.p = model[0].p; e.d = model[0].d; end
        e.first = (i == 0); e.last = (i == L);
        check(rd_word.a == e.a, $sformatf("A blocks of word %0d", i));
        check(rd_word.p == e.p, $sformatf("P blocks of word %0d", i));
        check(rd_word.l == e.l && rd_word.u == e.u, $sformatf("bounds of word %0d", i));
        check(rd_word.e == e.e, $sformatf("E of word %0d", i));
        if (i < L) check(rd_word.d == e.d, $sformatf("D of word %0d", i));
        check(rd_word.first == e.first && rd_word.last == e.last, $sformatf("flags of word %0d", i));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
