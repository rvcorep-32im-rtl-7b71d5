// tb_mul_unit: both multiplier options behind the common interface; checks
// MUL/MULH/MULHSU/MULHU operand signedness and each option's latency
// (2 cycles DSP, 18 cycles radix-4).
`include "tb_check.svh"
module tb_mul_unit;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic valid_in; logic [2:0] funct3; logic [31:0] rs1, rs2;
  logic st_d, vo_d, st_r, vo_r; logic [31:0] l_d, h_d, l_r, h_r;
  mul_unit #(.MUL_TYPE(MUL_DSP)) u_d (.clk, .rst, .valid_in, .funct3, .rs1, .rs2,
    .stall_out(st_d), .valid_out(vo_d), .product_L(l_d), .product_H(h_d));
  mul_unit #(.MUL_TYPE(MUL_RADIX4)) u_r (.clk, .rst, .valid_in, .funct3, .rs1, .rs2,
    .stall_out(st_r), .valid_out(vo_r), .product_L(l_r), .product_H(h_r));
  `WATCHDOG(clk, 200000)
  initial begin
    valid_in = 0; funct3 = 0; rs1 = 0; rs2 = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 300; i++) begin
      logic signed [65:0] x, y; logic [63:0] exp; int cyc, td, tr;
      rs1 = $urandom; rs2 = $urandom; funct3 = 3'($urandom_range(0, 3));
      if (i % 3 == 0) begin rs1[31] = 1; rs2[31] = 1; end
      x = (funct3 != 3) ? 66'(signed'(rs1)) : 66'(rs1);
      y = (funct3 <= 1) ? 66'(signed'(rs2)) : 66'(rs2);
      exp = 64'(x * y);
      valid_in = 1; cyc = 0; td = 0; tr = 0;
      while (cyc < 40 && (td == 0 || tr == 0)) begin
        #1; cyc++;
        if (vo_d) td = cyc;
        if (vo_r) tr = cyc;
        @(posedge clk); #1; valid_in = 0;
        if (td == cyc) `CHECK({h_d, l_d} == exp, $sformatf("dsp f3=%0d got %h exp %h", funct3, {h_d, l_d}, exp))
        if (tr == cyc) `CHECK({h_r, l_r} == exp, $sformatf("r4 f3=%0d got %h exp %h", funct3, {h_r, l_r}, exp))
      end
      `CHECK(td == 2 && tr == 18, $sformatf("latency dsp=%0d radix4=%0d", td, tr))
    end
    `TB_DONE
  end
endmodule
