// tb_decoder: decodes encoded RV32IM instructions and checks fields,
// immediates, operation flags and mul_op/div_op.
`include "tb_check.svh"
module tb_decoder;
  import rv_pkg::*;
  import rv_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0; always #5 clk = ~clk;
  logic [31:0] instr; dec_t dec;
  decoder dut (.instr, .dec);
  `WATCHDOG(clk, 100000)
  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [4:0] rd, rs1, rs2; int imm; logic [2:0] f3;
      rd = $urandom_range(1, 31); rs1 = $urandom; rs2 = $urandom; f3 = $urandom;
      imm = $urandom_range(0, 4095) - 2048;
      // R-type M extension
      instr = r_type(7'd1, rs2, rs1, f3, rd); #1;
      `CHECK(dec.mul_op == !f3[2] && dec.div_op == f3[2] && dec.rd == rd && dec.rd_we && dec.rs1 == rs1 && dec.rs2 == rs2 && dec.rs1_used && dec.rs2_used && !dec.is_load, "M op")
      // R-type SUB / SRA / others
      instr = r_type(7'h20, rs2, rs1, 3'd0, rd); #1;
      `CHECK(dec.alu_op == ALU_SUB && !dec.mul_op && !dec.op2_imm, "SUB")
      instr = r_type(7'h20, rs2, rs1, 3'd5, rd); #1;
      `CHECK(dec.alu_op == ALU_SRA, "SRA")
      instr = r_type(7'h0, rs2, rs1, 3'd7, rd); #1;
      `CHECK(dec.alu_op == ALU_AND, "AND")
      // I-type
      instr = ADDI(rd, rs1, imm); #1;
      `CHECK(dec.imm == 32'(imm) && dec.op2_imm && dec.alu_op == ALU_ADD && dec.rd_we && !dec.rs2_used, $sformatf("ADDI imm %h", dec.imm))
      instr = i_type(imm & 12'h01f | 12'h400, rs1, 3'd5, rd); #1;
      `CHECK(dec.alu_op == ALU_SRA, "SRAI")
      // loads / stores
      instr = LW(rd, rs1, imm); #1;
      `CHECK(dec.is_load && dec.imm == 32'(imm) && dec.funct3 == 3'd2 && dec.rd_we, "LW")
      instr = SW(rs2, rs1, imm); #1;
      `CHECK(dec.is_store && dec.imm == 32'(imm) && !dec.rd_we && dec.rs2_used, $sformatf("SW imm %h exp %h", dec.imm, imm))
      // branch / jumps / upper
      instr = b_type(2 * imm, rs2, rs1, f3); #1;
      `CHECK(dec.is_branch && dec.imm == 32'(2 * imm) && !dec.rd_we, $sformatf("B imm %h exp %h", dec.imm, 2 * imm))
      instr = JAL(rd, 2 * imm * 100); #1;
      `CHECK(dec.is_jal && dec.imm == 32'(2 * imm * 100) && dec.rd_we, $sformatf("JAL imm %h", dec.imm))
      instr = i_type(imm, rs1, 0, rd, 7'b1100111); #1;
      `CHECK(dec.is_jalr && dec.imm == 32'(imm) && dec.rs1_used, "JALR")
      instr = LUI(rd, imm & 20'hfffff); #1;
      `CHECK(dec.op1_zero && dec.op2_imm && dec.imm == {20'(imm), 12'd0} && dec.rd_we, "LUI")
      instr = u_type(imm, rd, 7'b0010111); #1;
      `CHECK(dec.op1_pc && dec.op2_imm && dec.imm == {20'(imm), 12'd0}, "AUIPC")
      // system: no-op
      instr = 32'h0000_0073; #1;
      `CHECK(!dec.rd_we && !dec.is_load && !dec.is_store && !dec.mul_op && !dec.div_op, "ECALL no-op")
      @(posedge clk);
    end
    `TB_DONE
  end
endmodule
