// tb_dmem: random byte-masked writes and reads against a shadow array; read
// data arrives one cycle after the request; no access when en is low.
`include "tb_check.svh"
module tb_dmem;
  int checks = 0, failures = 0;
  logic clk = 0; always #5 clk = ~clk;
  logic en; logic [3:0] wstrb; logic [31:0] addr, wdata, rdata;
  logic [31:0] shadow [256];
  dmem #(.BYTES(1024)) dut (.*);
  `WATCHDOG(clk, 100000)
  initial begin
    en = 1; wstrb = 4'hf;
    for (int i = 0; i < 256; i++) begin shadow[i] = $urandom; addr = 4 * i; wdata = shadow[i]; @(posedge clk); #1; end
    for (int i = 0; i < 4000; i++) begin
      int w; logic [31:0] old;
      w = $urandom_range(0, 255); addr = 4 * w + $urandom_range(0, 3); wdata = $urandom;
      wstrb = $urandom; en = ($urandom_range(0, 5) != 0);
      old = shadow[w];
      @(posedge clk); #1;
      if (en) begin
        `CHECK(rdata == old, $sformatf("read %0d", w))
        for (int k = 0; k < 4; k++) if (wstrb[k]) shadow[w][8*k +: 8] = wdata[8*k +: 8];
      end
    end
    en = 1; wstrb = 0;
    for (int i = 0; i < 256; i++) begin addr = 4 * i; @(posedge clk); #1; `CHECK(rdata == shadow[i], "final contents") end
    `TB_DONE
  end
endmodule
