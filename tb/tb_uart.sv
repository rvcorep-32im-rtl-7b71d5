// tb_uart: the RS-232C device, transmitter and receiver, at the default bit
// time. Part 1 loops txd back into rxd and sends random bytes: each must
// keep busy high for exactly 10 bit times and arrive in rx_data with
// rx_valid set between the middle and the end of the stop bit. Part 2 drives
// rxd directly from the testbench: good frames, a frame with a bad stop bit
// (must be dropped), a short low glitch (must be ignored), a second byte
// before the first is read (overwrites it), and rd clearing rx_valid.
`include "tb_check.svh"
module tb_uart;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  localparam int CPB = 1406;
  logic we, busy, txd, rxd, rd, rx_valid, loop;
  logic [7:0] wdata, rx_data;
  logic drv;
  assign rxd = loop ? txd : drv;
  uart dut (.*);
  `WATCHDOG(clk, 600000)

  task automatic send_frame(logic [7:0] b, logic stop);
    logic [9:0] f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin drv = f[i]; repeat (CPB) @(posedge clk); end
    drv = 1'b1;
  endtask

  initial begin
    we = 0; wdata = 0; rd = 0; loop = 1; drv = 1;
    repeat (3) @(posedge clk); #1 rst = 0;
    `CHECK(txd && !busy && !rx_valid, "idle after reset")
    // part 1: loopback
    for (int n = 0; n < 6; n++) begin
      logic [7:0] b;
      int busy_cyc, valid_at;
      b = 8'($urandom);
      wdata = b; we = 1; @(posedge clk); #1 we = 0;
      busy_cyc = 0; valid_at = -1;
      for (int c = 0; c < 11 * CPB; c++) begin
        if (busy) busy_cyc++;
        if (rx_valid && valid_at < 0) valid_at = c;
        @(posedge clk); #1;
      end
      `CHECK(busy_cyc == 10 * CPB - 1 || busy_cyc == 10 * CPB, $sformatf("busy for %0d cycles", busy_cyc))
      `CHECK(valid_at >= 9 * CPB + CPB / 2 && valid_at <= 10 * CPB + 4, $sformatf("byte received at cycle %0d", valid_at))
      `CHECK(rx_valid && rx_data == b, $sformatf("loopback byte %h got %h", b, rx_data))
      rd = 1; @(posedge clk); #1 rd = 0;
      `CHECK(!rx_valid, "rd clears rx_valid")
    end
    // part 2: frames driven by the testbench
    loop = 0;
    send_frame(8'hc3, 1'b1);
    repeat (4) @(posedge clk); #1;
    `CHECK(rx_valid && rx_data == 8'hc3, "driven frame received")
    send_frame(8'h3c, 1'b1);
    repeat (4) @(posedge clk); #1;
    `CHECK(rx_valid && rx_data == 8'h3c, "unread byte overwritten by the next")
    rd = 1; @(posedge clk); #1 rd = 0;
    send_frame(8'h77, 1'b0);
    repeat (CPB) @(posedge clk); #1;
    `CHECK(!rx_valid, "frame with a bad stop bit dropped")
    drv = 0; repeat (CPB / 4) @(posedge clk); #1 drv = 1;
    repeat (12 * CPB) @(posedge clk); #1;
    `CHECK(!rx_valid, "short glitch ignored")
    send_frame(8'h01, 1'b1);
    repeat (4) @(posedge clk); #1;
    `CHECK(rx_valid && rx_data == 8'h01, "receiver recovered after glitch")
    `TB_DONE
  end
endmodule
