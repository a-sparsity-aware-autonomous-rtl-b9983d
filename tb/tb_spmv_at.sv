// tb_spmv_at: checks the streaming transposed product g = A^T v.
//
// The constraint words of an L = 8 path problem are streamed with random v
// words, twice back to back. Word w (w >= 1) must produce point w-1 of the
// result one cycle after it entered; word 0 produces nothing. Each output is
// compared with the dense reference and the output count is checked.
module tb_spmv_at;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  a_word_t in_a = '0;
  fxw_t in_v = '0;
  logic out_valid;
  fxw_t out_g;
  int checks = 0, failures = 0, cycle = 0;
  int in_cyc [$];
  int out_cnt = 0;
  real vs [];
  qp_problem q;

  spmv_at dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #2_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (out_valid) begin
    int i, c0;
    i = out_cnt % L;
    c0 = in_cyc.pop_front();
    check(cycle == c0 + 1, $sformatf("latency of point %0d", i));
    for (int c = 0; c < 6; c++) begin
      real ref_v;
      ref_v = 0.0;
      for (int r = 0; r < q.M; r++) ref_v += q.A[r][6*i+c] * vs[r];
      check(rabs(fx2r(out_g[c]) - ref_v) < 1e-4, $sformatf("g point %0d lane %0d: %f vs %f", i, c, fx2r(out_g[c]), ref_v));
    end
    out_cnt++;
  end

  initial begin
    pm_word_t pw;
    q = new(L);
    q.gen_path(5);
    vs = new[q.M];
    foreach (vs[i]) vs[i] = fx2r(r2fx((real'($urandom_range(2000)) - 1000.0) / 400.0));
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int rep = 0; rep < 2; rep++)
      for (int w = 0; w <= L; w++) begin
        #1;
        pw = q.word(w);
        in_valid = 1'b1; in_a = pw.a; in_first = pw.first; in_last = pw.last;
        for (int r = 0; r < 6; r++) in_v[r] = r2fx(vs[6*w+r]);
        if (w > 0) in_cyc.push_back(cycle);   // sampled at the next edge
        @(posedge clk);
      end
    #1 in_valid = 1'b0;
    repeat (4) @(posedge clk);
    check(out_cnt == 2 * L, "one output point per word after the first");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
