// tb_fetch: pc sequence after reset, hold on stall, redirect priority over
// stall, and following a learned jump target in the fetch cycle.
`include "tb_check.svh"
module tb_fetch;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic stall, redirect, f_valid, upd_valid, upd_is_cond, upd_taken;
  logic [31:0] redirect_pc, pc_next, f_pc, upd_pc, upd_target; logic [15:0] upd_pht_idx; pred_t f_pred;
  fetch #(.RESET_PC(32'h100)) dut (.*);
  `WATCHDOG(clk, 100000)
  initial begin
    stall = 0; redirect = 0; redirect_pc = 0; upd_valid = 0; upd_is_cond = 0; upd_taken = 0;
    upd_pc = 0; upd_target = 0; upd_pht_idx = 0;
    repeat (2) @(posedge clk); #1;
    `CHECK(pc_next == 32'h100 && !f_valid, "reset")
    rst = 0; #1;
    `CHECK(f_pc == 32'h100 && f_valid, "first fetch at RESET_PC")
    for (int i = 1; i < 10; i++) begin @(posedge clk); #1; `CHECK(f_pc == 32'h100 + 4 * i, "sequential") end
    stall = 1; repeat (3) begin @(posedge clk); #1; `CHECK(f_pc == 32'h124, "hold on stall") end
    redirect = 1; redirect_pc = 32'h800; #1;
    `CHECK(pc_next == 32'h800, "redirect wins over stall")
    @(posedge clk); #1; redirect = 0; stall = 0;
    `CHECK(f_pc == 32'h800, "redirected")
    // teach a jump 0x808 -> 0x200
    upd_valid = 1; upd_pc = 32'h808; upd_taken = 1; upd_target = 32'h200; @(posedge clk); #1; upd_valid = 0;
    `CHECK(f_pc == 32'h804, "sequential")
    @(posedge clk); #1;
    `CHECK(f_pc == 32'h808 && f_pred.taken && pc_next == 32'h200, "predicted jump")
    @(posedge clk); #1;
    `CHECK(f_pc == 32'h200, "followed prediction")
    `TB_DONE
  end
endmodule
