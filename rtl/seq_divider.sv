// seq_divider: sequential unsigned divider of the least-squares fitting stage.
//
// Computes quotient = dividend / divisor and remainder = dividend % divisor
// by restoring long division, one quotient bit per clock, most significant
// bit first.  Only that a divider sits at the end of the fitting stage (and
// how long it takes in the prototype: 3.050 us, 122 cycles at 40 MHz) is
// given; the radix-2 restoring algorithm is the simplest circuit that does the
// job and is this design's choice.
//
// Interface: pulse start for one cycle with the operands valid (ignored while
// busy).  busy is high for DW cycles, then done pulses for one cycle and
// quotient/remainder hold until the next start.  A zero divisor gives an
// all-ones quotient and flags div_by_zero.
//
// Timing: done rises DW+1 clock edges after the edge that samples start
// (DW = 70 by default, i.e. 71 cycles, below the prototype's 122).
module seq_divider #(
  parameter int unsigned DW = 70,  // dividend and quotient width
  parameter int unsigned VW = 37,  // divisor and remainder width
  localparam int unsigned CW = $clog2(DW + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] dividend,
  input  logic [VW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [DW-1:0] quotient,
  output logic [VW-1:0] remainder,
  output logic          div_by_zero
);

  logic [VW-1:0] dsr;
  logic [CW-1:0] cnt;
  logic [VW:0]   rem_sh;
  logic          ge;

  always_comb begin
    rem_sh = {remainder, quotient[DW-1]};
    ge     = (rem_sh >= {1'b0, dsr});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      cnt         <= '0;
      dsr         <= '0;
      quotient    <= '0;
      remainder   <= '0;
      div_by_zero <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy        <= 1'b1;
          cnt         <= CW'(DW);
          dsr         <= divisor;
          quotient    <= dividend;
          remainder   <= '0;
          div_by_zero <= (divisor == '0);
        end
      end else begin
        quotient  <= {quotient[DW-2:0], ge};
        remainder <= ge ? VW'(rem_sh - {1'b0, dsr}) : VW'(rem_sh);
        cnt       <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
