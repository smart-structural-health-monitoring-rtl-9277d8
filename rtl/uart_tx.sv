// uart_tx -- 8N1 serial transmitter.
//
// Sends one byte per accepted request: a start bit, eight data bits LSB
// first and one stop bit, each DIV system clocks long. A byte is accepted
// when tx_valid and tx_ready are both high at a clock edge; tx_ready is low
// from then until the stop bit has been sent. The line idles high.
// The published system gives only the baud rate (230400); the 8N1 frame
// and the handshake are this design's choices.
module uart_tx #(
  parameter int unsigned DIV = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] tx_data,
  input  logic       tx_valid,
  output logic       tx_ready,
  output logic       txd
);

  logic [$clog2(DIV)-1:0] cnt;
  logic [3:0]             bitn;   // 0 start, 1..8 data, 9 stop
  logic [7:0]             shreg;  // data bits still to send, next in bit 0
  logic                   active;

  assign tx_ready = !active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      txd    <= 1'b1;
      cnt    <= '0;
      bitn   <= '0;
      shreg  <= '1;
    end else if (!active) begin
      txd <= 1'b1;
      if (tx_valid) begin
        active <= 1'b1;
        shreg  <= tx_data;
        txd    <= 1'b0;
        cnt    <= '0;
        bitn   <= '0;
      end
    end else if (cnt == ($bits(cnt))'(DIV - 1)) begin
      cnt <= '0;
      if (bitn == 4'd9) begin
        active <= 1'b0;
        txd    <= 1'b1;
      end else begin
        bitn  <= bitn + 1'b1;
        shreg <= {1'b1, shreg[7:1]};
        txd   <= (bitn == 4'd8) ? 1'b1 : shreg[0];
      end
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
