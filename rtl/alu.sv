// alu: single-cycle RV32I arithmetic/logic unit of the execute stage.
// Computes y = a OP b for add, subtract, the three shifts, set-less-than
// (signed and unsigned) and the bitwise operations. Shifts are done by a
// barrel shifter so that every shift finishes in one cycle, as the paper
// requires; the internal structure is this design's choice.
// Purely combinational: y is valid in the same cycle as a, b and op.
module alu
  import rv_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  always_comb begin
    unique case (op)
      ALU_ADD:  y = a + b;
      ALU_SUB:  y = a - b;
      ALU_SLL:  y = a << b[4:0];
      ALU_SLT:  y = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU: y = {31'd0, a < b};
      ALU_XOR:  y = a ^ b;
      ALU_SRL:  y = a >> b[4:0];
      ALU_SRA:  y = 32'($signed(a) >>> b[4:0]);
      ALU_OR:   y = a | b;
      ALU_AND:  y = a & b;
      default:  y = a + b;
    endcase
  end
endmodule
