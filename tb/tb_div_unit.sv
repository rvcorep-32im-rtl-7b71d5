// tb_div_unit: DIV/DIVU/REM/REMU against reference arithmetic with the
// RISC-V rules for divide by zero and overflow; checks the stall length:
// 2 cycles for a zero operand, 33 when no result is negated, 34 otherwise.
`include "tb_check.svh"
module tb_div_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic valid_in, signed_div, stall_out, valid_out;
  logic [31:0] rs1, rs2, quotient, reminder;
  div_unit dut (.*);
  `WATCHDOG(clk, 300000)
  task automatic ref_div(input logic [31:0] a, input logic [31:0] b, input logic s,
                         output logic [31:0] q, output logic [31:0] r, output int ns);
    if (b == 0) begin q = '1; r = a; ns = 2; end
    else if (a == 0) begin q = 0; r = 0; ns = 2; end
    else if (s) begin
      if (a == 32'h8000_0000 && b == 32'hffff_ffff) begin q = a; r = 0; end
      else begin q = 32'($signed(a) / $signed(b)); r = 32'($signed(a) % $signed(b)); end
      ns = (a[31] || b[31]) ? 34 : 33;
    end else begin q = a / b; r = a % b; ns = 33; end
  endtask
  initial begin
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_0000, 32'h7fff_ffff, 32'd7};
    valid_in = 0; signed_div = 0; rs1 = 0; rs2 = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 400; i++) begin
      logic [31:0] eq, er, a0, b0; int ens, ns, cyc;
      rs1 = (i < 72) ? corner[i % 6] : $urandom;
      rs2 = (i < 72) ? corner[(i / 6) % 6] : ((i % 3 == 0) ? $urandom_range(1, 1000) : $urandom);
      signed_div = (i < 72) ? (i >= 36) : $urandom_range(0, 1);
      a0 = rs1; b0 = rs2;
      ref_div(rs1, rs2, signed_div, eq, er, ens);
      valid_in = 1; ns = 0; cyc = 0;
      forever begin
        #1; cyc++;
        if (stall_out) ns++;
        if (valid_out || cyc > 60) break;
        @(posedge clk); #1; valid_in = 0; rs1 = $urandom; rs2 = $urandom;
      end
      @(posedge clk); #1;
      `CHECK(quotient == eq && reminder == er, $sformatf("%h/%h s=%b q=%h/%h r=%h/%h", a0, b0, signed_div, quotient, eq, reminder, er))
      `CHECK(ns == ens && cyc == ens + 1, $sformatf("%h/%h s=%b stall %0d exp %0d, cycles %0d", a0, b0, signed_div, ns, ens, cyc))
    end
    `TB_DONE
  end
endmodule
