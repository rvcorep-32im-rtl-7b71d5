// uart_tx: RS-232C serial transmitter of the evaluation SoC (8 data bits,
// no parity, 1 stop bit, LSB first). A write (we) of a byte while idle
// starts a frame: start bit (0), eight data bits, stop bit (1), each held for
// CLKS_PER_BIT clocks; busy is high for the whole frame and a write while
// busy is ignored, so software polls busy before writing. txd idles high.
// The paper only names the RS232C device; its format and the default of
// 1406 clocks per bit (115200 baud at about 162 MHz) are this design's.
module uart_tx #(
  parameter int CLKS_PER_BIT = 1406
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       we,
  input  logic [7:0] wdata,
  output logic       busy,
  output logic       txd
);
  logic [9:0]  shreg;
  logic [3:0]  nbits;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg <= '1;
      nbits <= '0;
      cnt   <= '0;
      busy  <= 1'b0;
    end else if (!busy) begin
      if (we) begin
        shreg <= {1'b1, wdata, 1'b0};
        nbits <= 4'd10;
        cnt   <= '0;
        busy  <= 1'b1;
      end
    end else if (cnt == ($bits(cnt))'(CLKS_PER_BIT - 1)) begin
      cnt   <= '0;
      shreg <= {1'b1, shreg[9:1]};
      nbits <= nbits - 4'd1;
      if (nbits == 4'd1) busy <= 1'b0;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  assign txd = busy ? shreg[0] : 1'b1;
endmodule
