// uart_rx: RS-232C serial receiver of the evaluation SoC (8 data bits, no
// parity, 1 stop bit, LSB first), the counterpart of uart_tx.
// rxd passes a two-flop synchroniser. A falling edge on the idle-high line
// starts a frame; the start bit is checked again half a bit time later, and
// from there each data bit and the stop bit are sampled one bit time
// (CLKS_PER_BIT clocks) apart, near the middle of the bit. A frame whose stop
// bit is 1 stores its byte in data and sets valid; a frame whose stop bit is
// 0 (framing error) is dropped. valid stays high until rd clears it; a new
// byte arriving first overwrites data. A start bit that is gone at its middle
// is taken as noise. The paper only names the RS232C device; frame format,
// sampling scheme and the one-byte buffer are this design's choices.
module uart_rx #(
  parameter int CLKS_PER_BIT = 1406
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  input  logic       rd,      // clear valid (byte taken)
  output logic       valid,
  output logic [7:0] data
);
  typedef enum logic [1:0] {R_IDLE, R_START, R_BITS, R_STOP} state_e;
  state_e      state;
  logic [1:0]  sync;
  logic [7:0]  shreg;
  logic [2:0]  nbit;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] cnt;
  logic        line;

  assign line = sync[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      sync  <= 2'b11;
      state <= R_IDLE;
      shreg <= '0;
      nbit  <= '0;
      cnt   <= '0;
      valid <= 1'b0;
      data  <= '0;
    end else begin
      sync <= {sync[0], rxd};
      if (rd) valid <= 1'b0;
      case (state)
        R_IDLE: if (!line) begin
          state <= R_START;
          cnt   <= '0;
        end
        R_START: if (cnt == ($bits(cnt))'(CLKS_PER_BIT / 2 - 1)) begin
          cnt   <= '0;
          nbit  <= '0;
          state <= line ? R_IDLE : R_BITS;
        end else cnt <= cnt + 1'b1;
        R_BITS: if (cnt == ($bits(cnt))'(CLKS_PER_BIT - 1)) begin
          cnt   <= '0;
          shreg <= {line, shreg[7:1]};
          nbit  <= nbit + 3'd1;
          if (nbit == 3'd7) state <= R_STOP;
        end else cnt <= cnt + 1'b1;
        R_STOP: if (cnt == ($bits(cnt))'(CLKS_PER_BIT - 1)) begin
          cnt   <= '0;
          state <= R_IDLE;
          if (line) begin
            data  <= shreg;
            valid <= 1'b1;
          end
        end else cnt <= cnt + 1'b1;
      endcase
    end
  end
endmodule
