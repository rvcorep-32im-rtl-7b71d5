// imem: instruction memory, a synchronous-read block RAM of BYTES bytes
// (64 KB by default, the size used for all benchmarks). The fetch stage
// presents the next pc on addr; the word appears on rdata one clock later.
// A separate write port (load_we/load_addr/load_data) fills the memory with
// the program while the processor is held in reset; the paper only says the
// program is loaded into IMEM, the port is this design's choice.
module imem #(
  parameter int BYTES = 65536
) (
  input  logic        clk,
  input  logic [31:0] addr,
  output logic [31:0] rdata,
  input  logic        load_we,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data
);
  localparam int AW = $clog2(BYTES / 4);
  logic [31:0] mem [BYTES / 4];

  always_ff @(posedge clk) begin
    if (load_we) mem[load_addr[AW+1:2]] <= load_data;
    rdata <= mem[addr[AW+1:2]];
  end
endmodule
