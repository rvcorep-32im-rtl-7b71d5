// tb_data_aligner: checks LB/LH/LW/LBU/LHU extraction and extension.
`include "tb_check.svh"
module tb_data_aligner;
  int checks = 0, failures = 0;
  logic clk = 0; always #5 clk = ~clk;
  logic [31:0] rdata, load_data; logic [1:0] addr; logic [2:0] funct3;
  data_aligner dut (.*);
  `WATCHDOG(clk, 100000)
  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] exp; logic [7:0] b; logic [15:0] h;
      rdata = $urandom; addr = $urandom; funct3 = 3'({1'b0, 2'b00} + $urandom_range(0, 5));
      if (funct3 == 3) funct3 = 3'b010;
      #1;
      b = rdata[8*addr +: 8]; h = rdata[16*addr[1] +: 16];
      case (funct3)
        0: exp = {{24{b[7]}}, b}; 1: exp = {{16{h[15]}}, h}; 4: exp = {24'd0, b}; 5: exp = {16'd0, h};
        default: exp = rdata;
      endcase
      `CHECK(load_data == exp, $sformatf("f3=%0d a=%0d d=%h got=%h exp=%h", funct3, addr, rdata, load_data, exp))
      @(posedge clk);
    end
    `TB_DONE
  end
endmodule
