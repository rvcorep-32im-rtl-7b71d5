// uart: the RS-232C serial communication device of the evaluation SoC, a
// transmitter (uart_tx) and a receiver (uart_rx) sharing one bit time of
// CLKS_PER_BIT clocks, 8N1 frames in both directions.
// Transmit: a write (we) of wdata while busy is low starts a frame on txd;
// busy stays high until the stop bit has been sent.
// Receive: a frame received on rxd sets rx_valid and holds its byte in
// rx_data until rd is pulsed (the bus does so when software reads the data
// register); an unread byte is overwritten by the next one.
// The paper names the device only; its two halves, the frame format and the
// default bit time (115200 baud at about 162 MHz) are this design's choices.
module uart #(
  parameter int CLKS_PER_BIT = 1406
) (
  input  logic       clk,
  input  logic       rst,
  // transmitter
  input  logic       we,
  input  logic [7:0] wdata,
  output logic       busy,
  output logic       txd,
  // receiver
  input  logic       rxd,
  input  logic       rd,
  output logic       rx_valid,
  output logic [7:0] rx_data
);
  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (.clk, .rst, .we, .wdata, .busy, .txd);
  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (.clk, .rst, .rxd, .rd, .valid(rx_valid), .data(rx_data));
endmodule
