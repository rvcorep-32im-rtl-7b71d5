// tb_fork_join_control: ex_valid/ex_from_md follow one cycle after a
// single-cycle instruction or a finishing mul/div, never after mul_op/div_op.
`include "tb_check.svh"
module tb_fork_join_control;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic flush, id_valid, mul_op, div_op, mul_valid, div_valid, ex_valid, ex_from_md;
  fork_join_control dut (.*);
  `WATCHDOG(clk, 100000)
  initial begin
    {flush, id_valid, mul_op, div_op, mul_valid, div_valid} = '0;
    @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 2000; i++) begin
      logic e_v, e_md;
      flush = ($urandom_range(0, 7) == 0);
      if ($urandom_range(0, 1)) begin
        id_valid = $urandom_range(0, 1); mul_op = $urandom_range(0, 1); div_op = mul_op ? 0 : $urandom_range(0, 1);
        mul_valid = 0; div_valid = 0;
      end else begin
        id_valid = 0; mul_op = 0; div_op = 0; mul_valid = $urandom_range(0, 1); div_valid = mul_valid ? 0 : $urandom_range(0, 1);
      end
      e_md = !flush && (mul_valid || div_valid);
      e_v  = !flush && ((id_valid && !mul_op && !div_op) || mul_valid || div_valid);
      @(posedge clk); #1;
      `CHECK(ex_valid == e_v && ex_from_md == e_md, $sformatf("in=%b%b%b%b%b%b out=%b%b", flush, id_valid, mul_op, div_op, mul_valid, div_valid, ex_valid, ex_from_md))
    end
    `TB_DONE
  end
endmodule
