// uart -- host serial link of the monitoring system.
//
// One 8N1 transmitter and one receiver at BAUD (230400 in the published
// system) derived from the system clock by an integer divider,
// DIV = round(CLK_HZ / BAUD); at 100 MHz this is 434 clocks per bit, a
// rate error of 0.01 %. The link carries host commands in and acquired
// samples and DI map pixels out. Transmit uses a valid/ready handshake;
// receive gives a one-clock rx_valid strobe. See uart_tx and uart_rx for
// the bit timing.
module uart #(
  parameter int unsigned CLK_HZ = shm_pkg::CLK_HZ,
  parameter int unsigned BAUD   = shm_pkg::BAUD,
  localparam int unsigned DIV   = (CLK_HZ + BAUD / 2) / BAUD
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] tx_data,
  input  logic       tx_valid,
  output logic       tx_ready,
  output logic [7:0] rx_data,
  output logic       rx_valid,
  output logic       frame_err,
  input  logic       rxd,
  output logic       txd
);

  uart_tx #(.DIV(DIV)) u_tx (.clk, .rst_n, .tx_data, .tx_valid, .tx_ready, .txd);
  uart_rx #(.DIV(DIV)) u_rx (.clk, .rst_n, .rxd, .rx_data, .rx_valid, .frame_err);

  a_tx_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                tx_valid && !tx_ready |=> tx_valid);

endmodule
