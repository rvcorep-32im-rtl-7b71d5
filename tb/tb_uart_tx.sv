// tb_uart_tx: sends random bytes and decodes the line at mid-bit, checking
// start bit, data, stop bit, busy and that a write while busy is ignored.
`include "tb_check.svh"
module tb_uart_tx;
  int checks = 0, failures = 0;
  localparam int CPB = 8;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic we, busy, txd; logic [7:0] wdata;
  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.*);
  `WATCHDOG(clk, 100000)
  initial begin
    we = 0; wdata = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    `CHECK(txd && !busy, "idle")
    for (int i = 0; i < 40; i++) begin
      logic [7:0] b, got;
      b = $urandom; wdata = b; we = 1; @(posedge clk); #1; we = 0;
      `CHECK(busy, "busy after write")
      wdata = ~b; we = 1; @(posedge clk); #1; we = 0;      // ignored
      repeat (CPB / 2 - 1) @(posedge clk); #1;
      `CHECK(txd == 0, "start bit")
      for (int k = 0; k < 8; k++) begin repeat (CPB) @(posedge clk); #1; got[k] = txd; end
      repeat (CPB) @(posedge clk); #1;
      `CHECK(txd == 1, "stop bit")
      `CHECK(got == b, $sformatf("byte %h got %h", b, got))
      repeat (CPB) @(posedge clk); #1;
      `CHECK(!busy && txd, "idle after frame")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
