// isqrt -- sequential integer square root, one result bit per clock.
//
// Computes y = floor(sqrt(x)) for an IN_W-bit unsigned x (IN_W even) with
// the digit-by-digit method: a trial bit "one" starts at the highest power
// of four, and each clock the remainder is compared with res + one. Pulse
// start with x valid; done pulses IN_W/2 + 1 clocks later with y valid, and
// y holds until the next start. Used by the localization engine for the
// pixel-to-receiver distance.
// The published system only gives the distance formula; the bit-serial
// square root is this design's choice (no DSP slice, one bit per clock).
module isqrt #(
  parameter int unsigned IN_W = 28
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [IN_W-1:0]   x,
  output logic              busy,
  output logic              done,
  output logic [IN_W/2-1:0] y
);

  logic [IN_W-1:0] op, res, one;

  assign y = res[IN_W/2-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      op   <= '0;
      res  <= '0;
      one  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        op   <= x;
        res  <= '0;
        one  <= IN_W'(1) << (IN_W - 2);
        busy <= 1'b1;
      end else if (busy) begin
        if (op >= res + one) begin
          op  <= op - (res + one);
          res <= (res >> 1) + one;
        end else begin
          res <= res >> 1;
        end
        one <= one >> 2;
        if (one == IN_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  initial assert (IN_W % 2 == 0);

endmodule
