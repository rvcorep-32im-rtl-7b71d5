// mul_unit: multiplier of the execute stage with one fixed interface.
// MUL_TYPE selects the implementation at elaboration time: MUL_DSP (default,
// 2-cycle latency, mul_stall high 1 cycle) or MUL_RADIX4 (18-cycle latency,
// mul_stall high 17 cycles). The paper selects between the two with a header
// file option; here it is a parameter. funct3 is the RV32M funct3 of the
// multiplication (MUL, MULH, MULHSU, MULHU); it sets the operand signedness.
// Which half of the product is written back is chosen in the memory stage.
module mul_unit
  import rv_pkg::*;
#(
  parameter mul_type_e MUL_TYPE = MUL_DSP
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        valid_in,
  input  logic [2:0]  funct3,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  output logic        stall_out,
  output logic        valid_out,
  output logic [31:0] product_L,
  output logic [31:0] product_H
);
  logic signed_rs1, signed_rs2;
  // MUL/MULH: both signed; MULHSU: rs1 signed; MULHU: both unsigned
  assign signed_rs1 = (funct3[1:0] != 2'b11);
  assign signed_rs2 = (funct3[1:0] == 2'b00) || (funct3[1:0] == 2'b01);

  if (MUL_TYPE == MUL_RADIX4) begin : g_radix4
    mul_radix4 u_mul (.*);
  end else begin : g_dsp
    mul_dsp u_mul (.*);
  end
endmodule
