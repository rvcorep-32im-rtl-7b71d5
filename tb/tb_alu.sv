// tb_alu: random and corner-case check of the ALU against a reference model.
`include "tb_check.svh"
module tb_alu;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  alu_op_e op; logic [31:0] a, b, y, exp;
  logic clk = 0;
  always #5 clk = ~clk;
  alu dut (.op, .a, .b, .y);
  `WATCHDOG(clk, 100000)
  function automatic logic [31:0] ref_alu(alu_op_e o, logic [31:0] x, logic [31:0] z);
    case (o)
      ALU_ADD: return x + z;   ALU_SUB: return x - z;
      ALU_SLL: return x << z[4:0];
      ALU_SLT: return (signed'(x) < signed'(z)) ? 1 : 0;
      ALU_SLTU: return (x < z) ? 1 : 0;
      ALU_XOR: return x ^ z;  ALU_OR: return x | z;  ALU_AND: return x & z;
      ALU_SRL: return x >> z[4:0];
      ALU_SRA: begin logic [63:0] e = {{32{x[31]}}, x}; return 32'(e >> z[4:0]); end
      default: return 'x;
    endcase
  endfunction
  initial begin
    for (int i = 0; i < 5000; i++) begin
      op = alu_op_e'($urandom_range(0, 9));
      a = (i % 7 == 0) ? 32'h8000_0000 : $urandom;
      b = (i % 5 == 0) ? 32'hffff_ffff : $urandom;
      #1; exp = ref_alu(op, a, b);
      `CHECK(y === exp, $sformatf("op=%s a=%h b=%h y=%h exp=%h", op.name(), a, b, y, exp))
      @(posedge clk);
    end
    `TB_DONE
  end
endmodule
