// dmem: data memory, a synchronous-read block RAM of BYTES bytes (64 KB by
// default) with four byte write enables. Address, write data and strobes are
// presented by the execute stage; when en is high the addressed word is read
// (old contents) and the enabled bytes are written at the clock edge, so load
// data reaches the memory stage one cycle later, a single-cycle access as the
// paper assumes for block RAM. Address bits above the memory size are ignored.
module dmem #(
  parameter int BYTES = 65536
) (
  input  logic        clk,
  input  logic        en,
  input  logic [3:0]  wstrb,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata
);
  localparam int AW = $clog2(BYTES / 4);
  logic [31:0] mem [BYTES / 4];
  logic [AW-1:0] a;
  assign a = addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (en) begin
      rdata <= mem[a];
      for (int i = 0; i < 4; i++)
        if (wstrb[i]) mem[a][8*i +: 8] <= wdata[8*i +: 8];
    end
  end
endmodule
