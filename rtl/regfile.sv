// regfile: 32 x 32-bit integer register file with two read ports (decode)
// and one write port (write back); x0 reads as zero. Reads are asynchronous
// and write-through: a read of the register written in the same cycle returns
// the new value, so an instruction in decode sees a result retiring in write
// back. Registers are cleared by reset (both are this design's choices).
module regfile (
  input  logic        clk,
  input  logic        rst,
  input  logic [4:0]  ra1,
  input  logic [4:0]  ra2,
  output logic [31:0] rd1,
  output logic [31:0] rd2,
  input  logic        we,
  input  logic [4:0]  wa,
  input  logic [31:0] wd
);
  logic [31:0] regs [32];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (we && wa != 5'd0) begin
      regs[wa] <= wd;
    end
  end

  always_comb begin
    rd1 = (ra1 == 5'd0) ? '0 : (we && wa == ra1) ? wd : regs[ra1];
    rd2 = (ra2 == 5'd0) ? '0 : (we && wa == ra2) ? wd : regs[ra2];
  end
endmodule
