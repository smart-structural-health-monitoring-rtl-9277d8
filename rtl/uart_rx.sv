// uart_rx -- 8N1 serial receiver.
//
// The input is synchronised by two flip-flops. A falling edge on the idle
// line starts a frame; the start bit is checked at its middle and each data
// bit is sampled in the middle of its bit time (DIV system clocks per bit).
// rx_valid pulses for one clock with rx_data once the stop bit has been
// sampled; frame_err pulses instead of rx_valid when the stop bit is low.
// The published system gives only the baud rate (230400); the 8N1 frame
// and mid-bit sampling are this design's choices.
module uart_rx #(
  parameter int unsigned DIV = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] rx_data,
  output logic       rx_valid,
  output logic       frame_err
);

  logic [1:0]             sync;
  logic [$clog2(DIV)-1:0] cnt;
  logic [3:0]             bitn;
  logic                   active;
  logic [7:0]             shreg;
  logic                   rx;

  assign rx = sync[1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      active    <= 1'b0;
      cnt       <= '0;
      bitn      <= '0;
      shreg     <= '0;
      rx_data   <= '0;
      rx_valid  <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      rx_valid  <= 1'b0;
      frame_err <= 1'b0;
      if (!active) begin
        if (!rx) begin
          active <= 1'b1;
          cnt    <= ($bits(cnt))'(DIV / 2);
          bitn   <= '0;
        end
      end else if (cnt == ($bits(cnt))'(DIV - 1)) begin
        cnt <= '0;
        if (bitn == 4'd0) begin
          if (rx) active <= 1'b0;       // glitch, not a start bit
          else    bitn   <= 4'd1;
        end else if (bitn <= 4'd8) begin
          shreg <= {rx, shreg[7:1]};
          bitn  <= bitn + 1'b1;
        end else begin
          active <= 1'b0;
          if (rx) begin
            rx_data  <= shreg;
            rx_valid <= 1'b1;
          end else begin
            frame_err <= 1'b1;
          end
        end
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
