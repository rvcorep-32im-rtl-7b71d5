// decoder: RV32IM instruction decoder of the decode stage.
// Turns a 32-bit instruction into the dec_t control bundle: register indices
// and which of them are used, the sign-extended immediate (I/S/B/U/J), the
// ALU operation and operand sources, memory/branch/jump flags, and mul_op or
// div_op for the RV32M instructions (funct7 = 1 on OP). FENCE, ECALL, EBREAK,
// CSR and unknown encodings decode to no-ops (nothing written); the paper
// does not describe them. Combinational.
module decoder
  import rv_pkg::*;
(
  input  logic [31:0] instr,
  output dec_t        dec
);
  logic [6:0] opcode;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  always_comb begin
    opcode = instr[6:0];
    f3     = instr[14:12];
    f7     = instr[31:25];
    imm_i  = {{20{instr[31]}}, instr[31:20]};
    imm_s  = {{20{instr[31]}}, instr[31:25], instr[11:7]};
    imm_b  = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u  = {instr[31:12], 12'd0};
    imm_j  = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

    dec          = '0;
    dec.rd       = instr[11:7];
    dec.rs1      = instr[19:15];
    dec.rs2      = instr[24:20];
    dec.funct3   = f3;
    dec.alu_op   = ALU_ADD;

    unique case (opcode)
      OP_LUI: begin
        dec.rd_we = 1'b1; dec.op1_zero = 1'b1; dec.op2_imm = 1'b1; dec.imm = imm_u;
      end
      OP_AUIPC: begin
        dec.rd_we = 1'b1; dec.op1_pc = 1'b1; dec.op2_imm = 1'b1; dec.imm = imm_u;
      end
      OP_JAL: begin
        dec.rd_we = 1'b1; dec.is_jal = 1'b1; dec.imm = imm_j;
      end
      OP_JALR: begin
        dec.rd_we = 1'b1; dec.is_jalr = 1'b1; dec.rs1_used = 1'b1; dec.imm = imm_i;
      end
      OP_BRANCH: begin
        dec.is_branch = 1'b1; dec.rs1_used = 1'b1; dec.rs2_used = 1'b1; dec.imm = imm_b;
      end
      OP_LOAD: begin
        dec.rd_we = 1'b1; dec.is_load = 1'b1; dec.rs1_used = 1'b1; dec.imm = imm_i;
      end
      OP_STORE: begin
        dec.is_store = 1'b1; dec.rs1_used = 1'b1; dec.rs2_used = 1'b1; dec.imm = imm_s;
      end
      OP_IMM: begin
        dec.rd_we = 1'b1; dec.rs1_used = 1'b1; dec.op2_imm = 1'b1; dec.imm = imm_i;
        unique case (f3)
          3'b000: dec.alu_op = ALU_ADD;
          3'b001: dec.alu_op = ALU_SLL;
          3'b010: dec.alu_op = ALU_SLT;
          3'b011: dec.alu_op = ALU_SLTU;
          3'b100: dec.alu_op = ALU_XOR;
          3'b101: dec.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
          3'b110: dec.alu_op = ALU_OR;
          default: dec.alu_op = ALU_AND;
        endcase
      end
      OP_REG: begin
        dec.rd_we = 1'b1; dec.rs1_used = 1'b1; dec.rs2_used = 1'b1;
        if (f7 == 7'b0000001) begin
          dec.mul_op = ~f3[2];
          dec.div_op =  f3[2];
        end else begin
          unique case (f3)
            3'b000: dec.alu_op = f7[5] ? ALU_SUB : ALU_ADD;
            3'b001: dec.alu_op = ALU_SLL;
            3'b010: dec.alu_op = ALU_SLT;
            3'b011: dec.alu_op = ALU_SLTU;
            3'b100: dec.alu_op = ALU_XOR;
            3'b101: dec.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
            3'b110: dec.alu_op = ALU_OR;
            default: dec.alu_op = ALU_AND;
          endcase
        end
      end
      default: ;  // FENCE, SYSTEM and unknown: no-op
    endcase
    if (dec.rd == 5'd0) dec.rd_we = 1'b0;
  end
endmodule
