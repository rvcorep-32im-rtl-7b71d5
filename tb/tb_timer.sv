// tb_timer: the counter clears on reset and counts one per clock.
`include "tb_check.svh"
module tb_timer;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic [63:0] count;
  timer dut (.*);
  `WATCHDOG(clk, 10000)
  initial begin
    repeat (2) @(posedge clk); #1;
    `CHECK(count == 0, "reset value")
    rst = 0;
    for (int i = 1; i <= 500; i++) begin
      @(posedge clk); #1;
      `CHECK(count == 64'(i), $sformatf("count=%0d exp=%0d", count, i))
    end
    rst = 1; @(posedge clk); #1;
    `CHECK(count == 0, "re-reset")
    `TB_DONE
  end
endmodule
