// tb_sp_ram: checks the memory block used for all problem and vector storage.
//
// Random writes fill a 270-deep, 32-bit block while a model array tracks the
// contents; random reads must return the model value one cycle after the
// address, including reads of an address written in the same cycle (the old
// value is returned, read-before-write).
module tb_sp_ram;
  localparam int W = 32, DEPTH = 270, AW = $clog2(DEPTH);
  logic clk = 1'b0, we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sp_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] exp_v;
    @(posedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      #1 we = 1'b1; waddr = AW'(i); wdata = $urandom(); model[i] = wdata;
      @(posedge clk);
    end
    for (int i = 0; i < 2000; i++) begin
      #1;
      raddr = AW'($urandom_range(DEPTH - 1));
      we = ($urandom_range(1) == 1);
      waddr = ($urandom_range(3) == 0) ? raddr : AW'($urandom_range(DEPTH - 1));
      wdata = $urandom();
      exp_v = model[raddr];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1 check(rdata == exp_v, $sformatf("read %0d", raddr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
