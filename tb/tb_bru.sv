// tb_bru: random check of branch conditions, targets and pc+4.
`include "tb_check.svh"
module tb_bru;
  int checks = 0, failures = 0;
  logic clk = 0; always #5 clk = ~clk;
  logic [31:0] pc, rs1, rs2, imm, tkn_pc, seq_pc; logic [2:0] funct3;
  logic is_branch, is_jal, is_jalr, taken;
  bru dut (.*);
  `WATCHDOG(clk, 100000)
  initial begin
    for (int i = 0; i < 4000; i++) begin
      logic c, et; logic [31:0] etgt;
      pc = $urandom & ~32'd3; imm = 32'($signed($urandom_range(0, 8191)) - 4096);
      rs1 = $urandom; rs2 = (i % 3 == 0) ? rs1 : $urandom;
      if (i % 4 == 1) rs2 = ~rs1;
      funct3 = $urandom_range(0, 7);
      {is_branch, is_jal, is_jalr} = 3'b001 << $urandom_range(0, 2);
      #1;
      case (funct3)
        0: c = rs1 == rs2; 1: c = rs1 != rs2; 4: c = $signed(rs1) < $signed(rs2);
        5: c = $signed(rs1) >= $signed(rs2); 6: c = rs1 < rs2; 7: c = rs1 >= rs2; default: c = 0;
      endcase
      et = is_jal | is_jalr | (is_branch & c);
      etgt = is_jalr ? {rs1[31:1] + imm[31:1] + 31'(rs1[0] & imm[0]), 1'b0} : pc + imm;
      `CHECK(taken == et && tkn_pc == etgt && seq_pc == pc + 4,
             $sformatf("f3=%0d br=%b jal=%b jalr=%b taken=%b/%b tgt=%h/%h", funct3, is_branch, is_jal, is_jalr, taken, et, tkn_pc, etgt))
      @(posedge clk);
    end
    `TB_DONE
  end
endmodule
