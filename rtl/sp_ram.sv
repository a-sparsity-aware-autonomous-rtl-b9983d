// sp_ram: one memory block of the accelerator, a simple dual-port RAM with
// one write port and one registered read port (read data appears the cycle
// after the address). Every matrix and vector buffer of the design is built
// from blocks like this one so that each block can be read in parallel with
// all the others, which is what the pattern-aware storage scheme relies on.
// Contents are not reset; the host or the owning unit writes them first.
module sp_ram #(
  parameter int W     = 32,
  parameter int DEPTH = 270,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
