// tb_regfile: random writes/reads against a shadow array; x0 stays zero and
// a read of the register being written returns the new value.
`include "tb_check.svh"
module tb_regfile;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic [4:0] ra1, ra2, wa; logic [31:0] rd1, rd2, wd; logic we;
  logic [31:0] shadow [32];
  regfile dut (.*);
  `WATCHDOG(clk, 100000)
  initial begin
    for (int i = 0; i < 32; i++) shadow[i] = 0;
    we = 0; wa = 0; wd = 0; ra1 = 0; ra2 = 0;
    @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] e1, e2;
      we = $urandom_range(0, 1); wa = $urandom; wd = $urandom;
      ra1 = (i % 3 == 0) ? wa : 5'($urandom); ra2 = $urandom;
      #1;
      e1 = (ra1 == 0) ? 0 : (we && wa == ra1) ? wd : shadow[ra1];
      e2 = (ra2 == 0) ? 0 : (we && wa == ra2) ? wd : shadow[ra2];
      `CHECK(rd1 == e1 && rd2 == e2, $sformatf("ra1=%0d rd1=%h/%h ra2=%0d rd2=%h/%h", ra1, rd1, e1, ra2, rd2, e2))
      @(posedge clk);
      if (we && wa != 0) shadow[wa] = wd;
      #1;
    end
    `TB_DONE
  end
endmodule
