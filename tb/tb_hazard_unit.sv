// tb_hazard_unit: random pipeline situations against an independent model of
// the paper's rules (load-use stall, mul/div dependency stall, mul/div stall,
// forwarding only ALU results from memory stage and non-load results from
// write back).
`include "tb_check.svh"
module tb_hazard_unit;
  int checks = 0, failures = 0;
  logic clk = 0; always #5 clk = ~clk;
  logic d_valid, d_rs1_used, d_rs2_used, e_valid, e_is_load, md_pending, mul_stall, div_stall;
  logic m_valid, m_rd_we, m_is_load, m_from_md, w_valid, w_rd_we, w_is_load;
  logic [4:0] d_rs1, d_rs2, e_rd, e_rs1, e_rs2, md_rd, m_rd, w_rd;
  logic stall, load_use, md_dep; logic [1:0] fwd_a, fwd_b;
  hazard_unit dut (.*);
  `WATCHDOG(clk, 100000)
  function automatic bit uses(logic [4:0] r);
    return r != 0 && ((d_rs1_used && d_rs1 == r) || (d_rs2_used && d_rs2 == r));
  endfunction
  function automatic logic [1:0] efwd(logic [4:0] r);
    if (r == 0) return 0;
    if (m_valid && m_rd_we && m_rd == r) return (m_is_load || m_from_md) ? ((w_valid && w_rd_we && !w_is_load && w_rd == r) ? 2'd2 : 2'd0) : 2'd1;
    if (w_valid && w_rd_we && !w_is_load && w_rd == r) return 2;
    return 0;
  endfunction
  initial begin
    for (int i = 0; i < 20000; i++) begin
      bit elu, emd;
      {d_valid, d_rs1_used, d_rs2_used, e_valid, e_is_load, md_pending} = $urandom;
      mul_stall = ($urandom_range(0, 7) == 0); div_stall = ($urandom_range(0, 7) == 0);
      {m_valid, m_rd_we, m_is_load, m_from_md, w_valid, w_rd_we, w_is_load} = $urandom;
      d_rs1 = $urandom_range(0, 4); d_rs2 = $urandom_range(0, 4); e_rd = $urandom_range(0, 4);
      e_rs1 = $urandom_range(0, 4); e_rs2 = $urandom_range(0, 4); md_rd = $urandom_range(0, 4);
      m_rd = $urandom_range(0, 4); w_rd = $urandom_range(0, 4);
      #1;
      elu = d_valid && ((e_valid && e_is_load && uses(e_rd)) || (m_valid && m_is_load && m_rd_we && uses(m_rd)));
      emd = d_valid && md_pending && uses(md_rd);
      `CHECK(load_use == elu && md_dep == emd && stall == (elu || emd || mul_stall || div_stall), "stall")
      `CHECK(fwd_a == efwd(e_rs1) && fwd_b == efwd(e_rs2), $sformatf("fwd %0d/%0d exp %0d/%0d", fwd_a, fwd_b, efwd(e_rs1), efwd(e_rs2)))
      @(posedge clk);
    end
    `TB_DONE
  end
endmodule
