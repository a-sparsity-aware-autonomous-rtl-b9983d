// fx_div: sequential signed fixed-point divider, q = (num * 2^F) / den,
// saturated symmetrically to +-(2^(QW-1)-1).
//
// Used for the two scalar operations of each PCG iteration
// (alpha = r'y / p'Kp and beta = r'y_new / r'y_old) and for the Jacobi
// preconditioner 1 / K_ii. The paper performs these as scalar steps between
// the pipelined vector stages; it does not describe the divider, so this is
// the simplest one: a restoring divider that produces one quotient bit per
// cycle on the magnitudes and applies the sign at the end. A pulse on start
// loads the operands; done pulses NW+F+1 cycles later with q valid (and q
// holds until the next start). A zero divisor gives the largest magnitude with
// the sign of num (zero for 0/0). The quotient is truncated toward zero.
//
// Lint note: the top bit of the partial remainder is never set after a subtraction
// step, so it is not read.
module fx_div #(
  parameter int NW = 56,      // width of num and den
  parameter int F  = 15,      // fraction bits added to the quotient
  parameter int QW = 24       // width of the saturated quotient
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [NW-1:0] num,
  input  logic signed [NW-1:0] den,
  output logic                 busy,
  output logic                 done,
  output logic signed [QW-1:0] q
);
  localparam int DW = NW + F;
  localparam int CW = $clog2(DW + 1);

  logic [DW-1:0] dvd, quo;
  logic [NW-1:0] dmag;
  logic [NW:0]   rem, rem_sh;
  logic [CW-1:0] cnt;
  logic          neg, dzero, nzero;

  localparam logic signed [QW-1:0] QMAX = {1'b0, {(QW-1){1'b1}}};

  assign rem_sh = {rem[NW-1:0], dvd[DW-1]};

  function automatic logic [NW-1:0] mag(logic signed [NW-1:0] v);
    return v[NW-1] ? NW'(-v) : NW'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0;
      dvd <= '0; quo <= '0; dmag <= '0; rem <= '0; cnt <= '0;
      neg <= 1'b0; dzero <= 1'b0; nzero <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        dvd   <= {mag(num), {F{1'b0}}};
        dmag  <= mag(den);
        neg   <= num[NW-1] ^ den[NW-1];
        dzero <= (den == '0);
        nzero <= (num == '0);
        rem   <= '0;
        quo   <= '0;
        cnt   <= CW'(DW);
      end else if (busy) begin
        if (cnt != '0) begin
          dvd <= dvd << 1;
          if (rem_sh >= {1'b0, dmag}) begin
            rem <= rem_sh - {1'b0, dmag};
            quo <= {quo[DW-2:0], 1'b1};
          end else begin
            rem <= rem_sh;
            quo <= {quo[DW-2:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          if (nzero)
            q <= '0;
          else if (dzero || quo > DW'(QMAX))
            q <= neg ? -QMAX : QMAX;
          else
            q <= neg ? -QW'(quo) : QW'(quo);
        end
      end
    end
  end
endmodule
