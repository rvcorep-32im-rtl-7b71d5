// tb_mul_dsp: random and corner products for all four signedness modes
// against 64-bit reference arithmetic; checks that stall_out is high for
// 1 cycle(s) and valid_out comes in cycle 2, as the paper states.
`include "tb_check.svh"
module tb_mul_dsp;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic valid_in, signed_rs1, signed_rs2, stall_out, valid_out;
  logic [31:0] rs1, rs2, product_L, product_H;
  mul_dsp dut (.*);
  `WATCHDOG(clk, 200000)
  function automatic logic [63:0] ref_mul(logic [31:0] a, logic [31:0] b, logic sa, logic sb);
    logic signed [65:0] x, y;
    x = sa ? 66'(signed'(a)) : 66'(a);
    y = sb ? 66'(signed'(b)) : 66'(b);
    return 64'(x * y);
  endfunction
  initial begin
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_0000, 32'h7fff_ffff, 32'h5555_5555};
    valid_in = 0; signed_rs1 = 0; signed_rs2 = 0; rs1 = 0; rs2 = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 600; i++) begin
      int cyc, ns; logic [63:0] exp; logic [31:0] a0, b0;
      rs1 = (i < 36) ? corner[i % 6] : $urandom;
      rs2 = (i < 36) ? corner[i / 6] : $urandom;
      signed_rs1 = $urandom_range(0, 1); signed_rs2 = $urandom_range(0, 1);
      if (i % 4 == 3) begin signed_rs1 = 0; signed_rs2 = 1; end
      exp = ref_mul(rs1, rs2, signed_rs1, signed_rs2); a0 = rs1; b0 = rs2;
      valid_in = 1; cyc = 1; ns = 0;
      forever begin
        #1;
        if (stall_out) ns++;
        if (valid_out) break;
        @(posedge clk); #1; valid_in = 0; rs1 = $urandom; rs2 = $urandom; signed_rs1 = ~signed_rs1; cyc++;
        if (cyc > 100) break;
      end
      @(posedge clk); #1; valid_in = 0;
      `CHECK({product_H, product_L} == exp, $sformatf("%h*%h got=%h exp=%h", a0, b0, {product_H, product_L}, exp))
      `CHECK(cyc == 2 && ns == 1, $sformatf("latency %0d stall %0d", cyc, ns))
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1;
      `CHECK({product_H, product_L} == exp, "product held")
    end
    `TB_DONE
  end
endmodule
