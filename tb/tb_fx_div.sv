// tb_fx_div: checks the sequential fixed-point divider.
//
// Directed cases (signs, exact quotients, zero divisor, 0/0, saturation) and
// 300 random operand pairs are divided; q must equal the truncated quotient
// (num * 2^F) / den saturated symmetrically to +-(2^(QW-1)-1), busy must be
// high while working, and done must pulse exactly NW+F+1 cycles after start.
module tb_fx_div;
  localparam int NW = 56, F = 15, QW = 24;
  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0;
  initial #1 rst_n = 1'b0;   // a real reset edge for the asynchronous resets
  logic signed [NW-1:0] num = '0, den = '0;
  logic busy, done;
  logic signed [QW-1:0] q;
  int checks = 0, failures = 0;

  fx_div #(.NW(NW), .F(F), .QW(QW)) dut (.*);

  always #5 clk = ~clk;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic signed [QW-1:0] expect_q(logic signed [NW-1:0] n, logic signed [NW-1:0] d);
    logic signed [127:0] a, b, r;
    if (d == 0) return (n == 0) ? '0 : (n < 0 ? -24'sh7fffff : 24'sh7fffff);
    a = 128'(n) <<< F;
    b = 128'(d);
    r = a / b;   // truncates toward zero
    if (r > 128'sd8388607) return 24'sh7fffff;
    if (r < -128'sd8388607) return -24'sh7fffff;
    return r[QW-1:0];
  endfunction

  task automatic divide(logic signed [NW-1:0] n, logic signed [NW-1:0] d);
    int cyc;
    #1 num = n; den = d; start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    cyc = 0;
    check(busy, "busy after start");
    while (!done) begin @(posedge clk); #1; cyc++; end
    check(cyc == NW + F + 1, $sformatf("done after %0d cycles", cyc));
    check(q == expect_q(n, d), $sformatf("%0d / %0d: q %0d expected %0d", n, d, q, expect_q(n, d)));
    @(posedge clk);
    #1 check(!done && !busy, "done is a pulse, unit idle afterwards");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    divide(56'sd3 <<< 15, 56'sd1 <<< 15);
    divide(-(56'sd3 <<< 15), 56'sd2 <<< 15);
    divide(56'sd7, -56'sd2);
    divide(-56'sd7, -56'sd2);
    divide(56'sd5, 56'sd0);
    divide(-56'sd5, 56'sd0);
    divide(56'sd0, 56'sd0);
    divide(56'sd1 <<< 40, 56'sd1);      // saturates high
    divide(-(56'sd1 <<< 40), 56'sd1);   // saturates low
    for (int i = 0; i < 300; i++) begin
      logic signed [NW-1:0] n, d;
      int sh;
      sh = $urandom_range(40);
      n = NW'({$urandom(), $urandom()}) >>> $urandom_range(50);
      d = NW'({$urandom(), $urandom()}) >>> (10 + sh);
      divide(n, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
