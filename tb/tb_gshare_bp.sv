// tb_gshare_bp: a cold predictor predicts not taken; after a taken jump is
// recorded it predicts it with the target; a conditional branch becomes
// predicted taken only after its counter is trained, and not taken again
// after being trained not taken; another pc with the same BTB index misses.
`include "tb_check.svh"
module tb_gshare_bp;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic [31:0] lookup_pc, f_pc, upd_pc, upd_target; pred_t pred;
  logic upd_valid, upd_is_cond, upd_taken; logic [15:0] upd_pht_idx;
  gshare_bp dut (.*);
  `WATCHDOG(clk, 100000)
  task automatic look(logic [31:0] pc);
    lookup_pc = pc; @(posedge clk); #1; f_pc = pc; #1;
  endtask
  task automatic upd(logic [31:0] pc, logic cond, logic taken, logic [31:0] tgt, logic [15:0] idx);
    upd_valid = 1; upd_pc = pc; upd_is_cond = cond; upd_taken = taken; upd_target = tgt; upd_pht_idx = idx;
    @(posedge clk); #1; upd_valid = 0;
  endtask
  initial begin
    logic [15:0] idx;
    upd_valid = 0; upd_pc = 0; upd_is_cond = 0; upd_taken = 0; upd_target = 0; upd_pht_idx = 0;
    lookup_pc = 0; f_pc = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 50; k++) begin
      logic [31:0] pc; pc = $urandom & 32'h0000_fffc; look(pc);
      `CHECK(!pred.taken, "cold predictor predicts not taken")
    end
    upd(32'h0000_0100, 0, 1, 32'h0000_0400, 0);
    look(32'h0000_0100);
    `CHECK(pred.taken && pred.target == 32'h0000_0400, "jump predicted from BTB")
    look(32'h0000_0100 + 32'(512 * 4));
    `CHECK(!pred.taken, "aliasing pc misses on tag")
    // conditional branch; global history is 0 while no conditional resolved
    look(32'h0000_0200); idx = pred.pht_idx;
    `CHECK(!pred.taken && idx == 16'h0080, $sformatf("cold conditional, idx %h", idx))
    upd(32'h0000_0200, 1, 1, 32'h0000_0300, idx);     // counter 01 -> 10, BTB written
    look(32'h0000_0200);                               // history is now 1
    `CHECK(pred.pht_idx == 16'h0081, $sformatf("history enters the index: %h", pred.pht_idx))
    `CHECK(!pred.taken, "other history entry untrained")
    upd(32'h0000_0200, 1, 1, 32'h0000_0300, pred.pht_idx);   // 0x81: 01 -> 10
    look(32'h0000_0200);                               // history 3 -> idx 0x83
    upd(32'h0000_0200, 1, 1, 32'h0000_0300, 16'h0081);       // 0x81 -> 11, history 7
    rst = 1; @(posedge clk); #1 rst = 0;               // clears history only
    look(32'h0000_0200);
    `CHECK(pred.taken && pred.target == 32'h0000_0300, "trained conditional predicted taken")
    upd(32'h0000_0200, 1, 0, 32'h0000_0300, 16'h0080); // 10 -> 01, history 0
    look(32'h0000_0200);
    `CHECK(!pred.taken && pred.pht_idx == 16'h0080, "trained not taken")
    `TB_DONE
  end
endmodule
