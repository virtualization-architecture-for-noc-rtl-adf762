// gcd_pe: greatest-common-divisor accelerator, one of the two PE functions.
//
// Subtractive Euclid: while both values are non-zero and differ, the larger
// is replaced by the difference; one subtraction per cycle. gcd(a,0) = a,
// gcd(0,b) = b. start is taken while not busy; done pulses for one cycle with
// result valid from then until the next start. The algorithm and width are
// this design's choice; only the function is given.
module gcd_pe #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] result
);
  logic [W-1:0] x, y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      x      <= '0;
      y      <= '0;
      result <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          x    <= a;
          y    <= b;
          busy <= 1'b1;
        end
      end else if (x == '0 || y == '0 || x == y) begin
        result <= (x == '0) ? y : x;
        done   <= 1'b1;
        busy   <= 1'b0;
      end else if (x > y) begin
        x <= x - y;
      end else begin
        y <= y - x;
      end
    end
  end
endmodule
