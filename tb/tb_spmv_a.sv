// tb_spmv_a: checks the streaming product z = A x against a dense reference.
//
// A path-planning problem with L = 8 points is generated, its constraint
// words are streamed with random x words (x of the end-state word set to
// random junk, which the unit must ignore), one word per cycle, twice back to
// back. Every output word is compared with the dense product, and the latency
// (output of word w exactly one cycle after word w entered) is checked.
module tb_spmv_a;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  a_word_t in_a = '0;
  fxw_t in_x = '0;
  logic out_valid;
  fxw_t out_y;
  int checks = 0, failures = 0, cycle = 0;
  int in_cyc [$];
  int out_cnt = 0;
  real xs [];
  qp_problem q;

  spmv_a dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #2_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // compare each output word when it appears
  always @(posedge clk) if (out_valid) begin
    int w, c0;
    w = out_cnt % (L + 1);
    c0 = in_cyc.pop_front();
    check(cycle == c0 + 1, $sformatf("latency of word %0d", w));
    for (int r = 0; r < 6; r++) begin
      real ref_v;
      ref_v = 0.0;
      for (int c = 0; c < q.N; c++) ref_v += q.A[6*w+r][c] * xs[c];
      check(rabs(fx2r(out_y[r]) - ref_v) < 1e-4, $sformatf("z word %0d row %0d: %f vs %f", w, r, fx2r(out_y[r]), ref_v));
    end
    out_cnt++;
  end

  initial begin
    pm_word_t pw;
    q = new(L);
    q.gen_path(3);
    xs = new[q.N];
    foreach (xs[i]) xs[i] = (real'($urandom_range(2000)) - 1000.0) / 500.0;
    xs[3] = 0.0;   // padding lane of point 0
    foreach (xs[i]) xs[i] = fx2r(r2fx(xs[i]));
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int rep = 0; rep < 2; rep++)
      for (int w = 0; w <= L; w++) begin
        #1;
        pw = q.word(w);
        in_valid = 1'b1; in_a = pw.a; in_first = pw.first; in_last = pw.last;
        for (int c = 0; c < 6; c++)
          in_x[c] = (w < L) ? r2fx(xs[6*w+c]) : fx_t'($urandom());
        in_cyc.push_back(cycle);   // sampled at the next edge
        @(posedge clk);
      end
    #1 in_valid = 1'b0;
    repeat (4) @(posedge clk);
    check(out_cnt == 2 * (L + 1), "one output word per input word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
