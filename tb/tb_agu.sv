// tb_agu: checks the effective address, store-lane placement and byte
// enables by applying the strobes to a word and comparing with a byte model.
`include "tb_check.svh"
module tb_agu;
  int checks = 0, failures = 0;
  logic clk = 0; always #5 clk = ~clk;
  logic [31:0] rs1, imm, store_data, addr, wdata; logic [2:0] funct3; logic is_store; logic [3:0] wstrb;
  agu dut (.*);
  `WATCHDOG(clk, 100000)
  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] old, got, exp; int sz;
      rs1 = $urandom; imm = 32'($signed($urandom_range(0, 4095)) - 2048);
      store_data = $urandom; sz = $urandom_range(0, 2); funct3 = 3'(sz);
      is_store = (i % 10 != 0); old = $urandom;
      #1;
      got = old;
      for (int k = 0; k < 4; k++) if (wstrb[k]) got[8*k +: 8] = wdata[8*k +: 8];
      exp = old;
      if (is_store) begin
        logic [1:0] o; o = 2'(rs1 + imm);
        if (sz == 0) exp[8*o +: 8] = store_data[7:0];
        else if (sz == 1) exp[16*o[1] +: 16] = store_data[15:0];
        else exp = store_data;
      end
      `CHECK(addr == rs1 + imm, "address")
      `CHECK(got == exp, $sformatf("sz=%0d addr=%h data=%h got=%h exp=%h", sz, addr, store_data, got, exp))
      @(posedge clk);
    end
    `TB_DONE
  end
endmodule
