// rv_pkg: types and constants shared by the RVCoreP-32IM pipeline and its SoC.
// It holds the RV32IM opcode map, the ALU operation and multiplier-type enums,
// the decoded-instruction bundle that travels from decode to execute, the
// branch-prediction record that travels from fetch to the branch unit, and the
// memory-stage result selector. Field widths are those of RV32IM; the names of
// the control bundle are this design's own.
package rv_pkg;

  localparam int XLEN = 32;

  // RV32I/M major opcodes (instr[6:0])
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU,
    ALU_XOR, ALU_SRL, ALU_SRA, ALU_OR, ALU_AND
  } alu_op_e;

  // Multiplier implementation chosen at elaboration time
  typedef enum logic {MUL_DSP, MUL_RADIX4} mul_type_e;

  // Which value the memory stage forwards to write back
  typedef enum logic [2:0] {
    RES_ALU, RES_MUL_L, RES_MUL_H, RES_DIV_Q, RES_DIV_R
  } res_sel_e;

  // Decoded instruction (decode -> execute)
  typedef struct packed {
    logic        rs1_used;
    logic        rs2_used;
    logic        rd_we;
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [31:0] imm;
    alu_op_e     alu_op;
    logic        op1_pc;     // ALU operand 1 is pc (AUIPC)
    logic        op1_zero;   // ALU operand 1 is zero (LUI)
    logic        op2_imm;    // ALU operand 2 is the immediate
    logic        is_load;
    logic        is_store;
    logic        is_branch;  // conditional branch
    logic        is_jal;
    logic        is_jalr;
    logic [2:0]  funct3;     // memory size / branch condition / M operation
    logic        mul_op;
    logic        div_op;
  } dec_t;

  // Prediction made in fetch for one instruction
  typedef struct packed {
    logic        taken;
    logic [31:0] target;
    logic [15:0] pht_idx;   // PHT index used for the prediction (up to 65536 entries)
  } pred_t;

endpackage
