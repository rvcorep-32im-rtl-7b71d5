// bru: branch unit of the execute stage.
// For a conditional branch it evaluates BEQ/BNE/BLT/BGE/BLTU/BGEU on the
// forwarded rs1/rs2 values; JAL and JALR are always taken. It produces the
// taken target tkn_pc (pc+imm, or (rs1+imm)&~1 for JALR) and the sequential
// pc seq_pc = pc+4, which are the two values the paper's figure shows going
// into the EX/MEM register. Whether the prediction was wrong is decided in
// the core from these outputs. Combinational.
module bru
  import rv_pkg::*;
(
  input  logic [31:0] pc,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  input  logic [31:0] imm,
  input  logic [2:0]  funct3,
  input  logic        is_branch,
  input  logic        is_jal,
  input  logic        is_jalr,
  output logic        taken,
  output logic [31:0] tkn_pc,
  output logic [31:0] seq_pc
);
  logic cond;
  always_comb begin
    unique case (funct3)
      3'b000:  cond = (rs1 == rs2);
      3'b001:  cond = (rs1 != rs2);
      3'b100:  cond = ($signed(rs1) <  $signed(rs2));
      3'b101:  cond = ($signed(rs1) >= $signed(rs2));
      3'b110:  cond = (rs1 <  rs2);
      3'b111:  cond = (rs1 >= rs2);
      default: cond = 1'b0;
    endcase
    taken  = is_jal | is_jalr | (is_branch & cond);
    tkn_pc = is_jalr ? ((rs1 + imm) & ~32'd1) : (pc + imm);
    seq_pc = pc + 32'd4;
  end
endmodule
