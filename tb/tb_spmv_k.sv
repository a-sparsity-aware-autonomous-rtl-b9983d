// tb_spmv_k: checks the pattern-aware product y = K p of the PCG solver.
//
// Random K records (diagonal-block lower triangle and coupling block, in the
// 24-bit PCG format) and random p words are streamed for L = 16 points, twice,
// with the one idle cycle the unit needs between products. Each output point is compared with the block-tridiagonal
// reference y_i = D_i p_i + C_i p_{i-1} + C_{i+1}^T p_{i+1}, out_p must carry
// p_i, and the timing is checked: point i leaves one cycle after record i+1
// entered, and the last point two cycles after the last record (a product
// over L points takes L + 2 cycles from first input to last output).
module tb_spmv_k;
  import qp_pkg::*;
  import tb_qp_util::*;
  localparam int L = 16;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  krec_t in_k = '0;
  pcw_t in_p = '0;
  logic out_valid;
  pcw_t out_y, out_p;
  int checks = 0, failures = 0, cycle = 0;
  int out_cnt = 0;
  int first_in [$];
  krec_t ks [L];
  pcw_t ps [L];

  spmv_k dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #2_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (out_valid) begin
    int i;
    pmat6_t d, c0, c1;
    i = out_cnt % L;
    d = k_diag(ks[i]); c0 = k_cpl(ks[i]);
    c1 = (i + 1 < L) ? k_cpl(ks[i+1]) : '0;
    for (int r = 0; r < 6; r++) begin
      real ref_v;
      ref_v = 0.0;
      for (int c = 0; c < 6; c++) begin
        ref_v += pc2r(d[r][c]) * pc2r(ps[i][c]);
        if (i > 0) ref_v += pc2r(c0[r][c]) * pc2r(ps[i-1][c]);
        if (i + 1 < L) ref_v += pc2r(c1[c][r]) * pc2r(ps[i+1][c]);
      end
      check(rabs(pc2r(out_y[r]) - ref_v) < 1e-3, $sformatf("y point %0d lane %0d: %f vs %f", i, r, pc2r(out_y[r]), ref_v));
      check(out_p[r] == ps[i][r], "out_p carries p of the emitted point");
    end
    if (i == L - 1) begin
      int f0;
      f0 = first_in.pop_front();
      check(cycle - f0 == L + 1, $sformatf("last point after L+2 cycles (%0d)", cycle - f0 + 1));
    end
    out_cnt++;
  end

  initial begin
    for (int i = 0; i < L; i++) begin
      ks[i] = '0;
      for (int j = 0; j < K_NZ; j++) ks[i][j] = r2pc((real'($urandom_range(2000)) - 1000.0) / 250.0);
      if (i == 0) for (int j = KD_NZ; j < K_NZ; j++) ks[i][j] = '0;   // no point -1
      for (int c = 0; c < 6; c++) ps[i][c] = r2pc((real'($urandom_range(2000)) - 1000.0) / 500.0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int rep = 0; rep < 2; rep++)
      for (int i = 0; i < L; i++) begin
        #1;
        in_valid = 1'b1; in_first = (i == 0); in_last = (i == L - 1);
        in_k = ks[i]; in_p = ps[i];
        if (i == 0) first_in.push_back(cycle);   // sampled at the next edge
        @(posedge clk);
        if (i == L - 1) begin   // the flush cycle of the last point needs a free input slot
          #1 in_valid = 1'b0;
          @(posedge clk);
        end
      end
    #1 in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
    repeat (5) @(posedge clk);
    check(out_cnt == 2 * L, "L output points per product");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
