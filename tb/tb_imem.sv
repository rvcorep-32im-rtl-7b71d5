// tb_imem: load words through the load port, read them back one cycle later.
`include "tb_check.svh"
module tb_imem;
  int checks = 0, failures = 0;
  logic clk = 0; always #5 clk = ~clk;
  logic [31:0] addr, rdata, load_addr, load_data; logic load_we;
  logic [31:0] shadow [1024];
  imem #(.BYTES(4096)) dut (.*);
  `WATCHDOG(clk, 100000)
  initial begin
    load_we = 1; addr = 0;
    for (int i = 0; i < 1024; i++) begin
      shadow[i] = $urandom; load_addr = 4 * i; load_data = shadow[i]; @(posedge clk); #1;
    end
    load_we = 0;
    for (int i = 0; i < 3000; i++) begin
      int w; w = $urandom_range(0, 1023); addr = 4 * w;
      @(posedge clk); #1;
      `CHECK(rdata == shadow[w], $sformatf("word %0d", w))
    end
    `TB_DONE
  end
endmodule
