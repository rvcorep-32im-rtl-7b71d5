// data_aligner: load-data aligner of the memory stage.
// Picks the byte or halfword addressed by addr[1:0] out of the 32-bit word
// read from data memory and sign- (LB, LH) or zero- (LBU, LHU) extends it;
// LW passes the word. funct3 is the RV32I load funct3. Misaligned accesses
// are not trapped: a halfword ignores addr[0] and a word ignores addr[1:0],
// as on the store side. The paper only names this block; the behaviour is
// the standard RV32I load semantics.
// Combinational; its output is written into the MEM/WB register.
module data_aligner (
  input  logic [31:0] rdata,
  input  logic [1:0]  addr,
  input  logic [2:0]  funct3,
  output logic [31:0] load_data
);
  logic [7:0]  b;
  logic [15:0] h;
  always_comb begin
    b = rdata[8*addr +: 8];
    h = rdata[16*addr[1] +: 16];   // halfwords: addr[0] ignored, as in the AGU
    unique case (funct3)
      3'b000:  load_data = {{24{b[7]}},  b};
      3'b001:  load_data = {{16{h[15]}}, h};
      3'b100:  load_data = {24'd0, b};
      3'b101:  load_data = {16'd0, h};
      default: load_data = rdata;
    endcase
  end
endmodule
