// seq_divider -- unsigned restoring divider, one quotient bit per clock.
//
// Computes quotient = dividend / divisor and remainder = dividend % divisor for unsigned
// operands. A pulse on start loads the operands; the result is valid together with a one-cycle
// done pulse DW + 1 cycles later and stays on the outputs until the next start. busy is high
// in between. Division by zero returns an all-ones quotient. Used by the conformal transform
// for x/r^2 and y/r^2; the bit-serial structure is this design's choice.
module seq_divider #(
  parameter int DW = 50,   // dividend and quotient width
  parameter int VW = 36    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] dividend,
  input  logic [VW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [DW-1:0] quotient,
  output logic [VW-1:0] remainder
);

  logic [VW:0]          rem;
  logic [DW-1:0]        num;
  logic [VW-1:0]        den;
  logic [$clog2(DW+1)-1:0] cnt;
  logic [VW:0]          trial;

  always_comb trial = {rem[VW-1:0], num[DW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      rem      <= '0;
      num      <= '0;
      den      <= '0;
      cnt      <= '0;
      quotient <= '0;
      remainder <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        rem  <= '0;
        num  <= dividend;
        den  <= divisor;
        cnt  <= ($clog2(DW+1))'(DW);
      end else if (busy) begin
        if (cnt == 0) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          quotient  <= num;
          remainder <= rem[VW-1:0];
        end else begin
          // shift in the next dividend bit; num collects quotient bits from the right
          if (trial >= {1'b0, den}) begin
            rem <= trial - {1'b0, den};
            num <= {num[DW-2:0], 1'b1};
          end else begin
            rem <= trial;
            num <= {num[DW-2:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
        end
      end
    end
  end

endmodule
