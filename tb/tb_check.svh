// Shared testbench helpers: check counting, result line and watchdog.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; if (failures < 20) $display("FAIL %s", msg); end end
`define TB_DONE \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
// Watchdog: after N clock cycles count a failure and stop.
`define WATCHDOG(clk, N) \
  initial begin repeat (N) @(posedge clk); failures++; $display("FAIL watchdog"); `TB_DONE end
`endif
