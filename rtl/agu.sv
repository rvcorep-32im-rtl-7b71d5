// agu: address generation unit for loads and stores.
// addr = rs1 + imm. For a store it also moves the store data to the byte
// lanes selected by addr[1:0] and produces the byte write enables for SB, SH
// and SW (funct3 = 0, 1, 2). The paper names the AGU as the address unit; the
// lane placement is this design's choice. Misaligned accesses are not
// trapped: SH uses addr[1], SW ignores addr[1:0]. Combinational; the address
// goes straight to the synchronous data memory at the end of execute.
module agu (
  input  logic [31:0] rs1,
  input  logic [31:0] imm,
  input  logic [31:0] store_data,
  input  logic [2:0]  funct3,
  input  logic        is_store,
  output logic [31:0] addr,
  output logic [31:0] wdata,
  output logic [3:0]  wstrb
);
  always_comb begin
    addr = rs1 + imm;
    unique case (funct3[1:0])
      2'b00: begin
        wdata = {4{store_data[7:0]}};
        wstrb = 4'b0001 << addr[1:0];
      end
      2'b01: begin
        wdata = {2{store_data[15:0]}};
        wstrb = addr[1] ? 4'b1100 : 4'b0011;
      end
      default: begin
        wdata = store_data;
        wstrb = 4'b1111;
      end
    endcase
    if (!is_store) wstrb = 4'b0000;
  end
endmodule
