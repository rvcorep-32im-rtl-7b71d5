// tb_core: the RVCoreP-32IM pipeline with simple synchronous memories, built
// once with the DSP and once with the radix-4 multiplier.
// 1) Directed timing: the sequence ADD; MUL x7; AND (uses x7); SUB must
//    retire with the spacing of the paper's pipeline diagram (MUL occupies
//    execute for 2 cycles DSP / 18 radix-4, the dependent AND waits one more
//    cycle), a load-use pair must show two bubbles, a DIV 34 execute cycles.
// 2) Random programs (ALU, M extension, loads/stores, branches, loops) are
//    run to the final jump-to-self and the register file and data memory are
//    compared with the instruction-set reference model. Stalls, bypasses and
//    redirects are counted and each must occur.
`include "tb_check.svh"
module tb_core;
  import rv_pkg::*;
  import rv_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  localparam int MW = 4096;   // words of each test memory
  longint cycle = 0;
  always @(posedge clk) cycle++;
  `WATCHDOG(clk, 2000000)

  logic [31:0] prog_mem [2][MW];
  logic [31:0] data_mem [2][MW];
  logic        retire_valid [2];
  logic [31:0] retire_pc    [2];
  int n_load_use[2], n_md_dep[2], n_mul_stall[2], n_div_stall[2], n_redirect[2], n_fwd_m[2], n_fwd_w[2];

  for (genvar g = 0; g < 2; g++) begin : g_core
    logic [31:0] imem_addr, imem_rdata, d_addr, d_wdata, d_rdata;
    logic d_req, d_we; logic [3:0] d_wstrb;
    rvcorep32im_core #(.MUL_TYPE(g == 0 ? MUL_DSP : MUL_RADIX4)) dut (
      .clk, .rst, .imem_addr, .imem_rdata, .d_req, .d_we, .d_addr, .d_wdata, .d_wstrb, .d_rdata,
      .retire_valid(retire_valid[g]), .retire_pc(retire_pc[g]));
    always @(posedge clk) begin
      imem_rdata <= prog_mem[g][imem_addr[13:2]];
      if (d_req) begin
        d_rdata <= data_mem[g][d_addr[13:2]];
        for (int k = 0; k < 4; k++) if (d_wstrb[k]) data_mem[g][d_addr[13:2]][8*k +: 8] <= d_wdata[8*k +: 8];
      end
      if (!rst) begin
        n_load_use[g]  += int'(dut.load_use && !dut.mul_stall && !dut.div_stall);
        n_md_dep[g]    += int'(dut.md_dep && !dut.mul_stall && !dut.div_stall);
        n_mul_stall[g] += int'(dut.mul_stall);
        n_div_stall[g] += int'(dut.div_stall);
        n_redirect[g]  += int'(dut.redirect);
        n_fwd_m[g]     += int'(dut.idex.valid && (dut.fwd_a == 1 || dut.fwd_b == 1));
        n_fwd_w[g]     += int'(dut.idex.valid && (dut.fwd_a == 2 || dut.fwd_b == 2));
      end
    end
  end

  function automatic logic [31:0] reg_of(int g, int r);
    return (g == 0) ? g_core[0].dut.u_rf.regs[r] : g_core[1].dut.u_rf.regs[r];
  endfunction

  task automatic load(logic [31:0] p [$]);
    for (int g = 0; g < 2; g++) for (int i = 0; i < MW; i++) begin
      prog_mem[g][i] = (i < p.size()) ? p[i] : NOP;
      data_mem[g][i] = 0;
    end
  endtask

  // run both cores until each retires the final jump-to-self; record the
  // retire cycle of every pc (first time)
  longint ret_cyc [2][int];
  task automatic run(logic [31:0] last_pc, int max_cycles);
    bit done [2];
    rst = 1; repeat (3) @(posedge clk); #1 rst = 0;
    for (int g = 0; g < 2; g++) begin done[g] = 0; ret_cyc[g].delete(); end
    for (int c = 0; c < max_cycles && !(done[0] && done[1]); c++) begin
      @(posedge clk); #1;
      for (int g = 0; g < 2; g++) if (retire_valid[g]) begin
        if (!ret_cyc[g].exists(int'(retire_pc[g]))) ret_cyc[g][int'(retire_pc[g])] = cycle;
        if (retire_pc[g] == last_pc) done[g] = 1;
      end
    end
    `CHECK(done[0] && done[1], "program reached its end")
  endtask

  initial begin
    logic [31:0] p [$];
    // ---------------- directed timing (paper Fig. 2(a) sequence)
    p = {ADDI(3, 0, 5), ADDI(4, 0, 7), ADDI(1, 0, 1), NOP, NOP, NOP,
         ADD(2, 3, 4), MUL(7, 2, 4), AND_(6, 7, 2), SUB(5, 4, 1),      // pc 0x18..0x24
         NOP, NOP, NOP, SW(4, 0, 64), NOP, NOP,
         LW(10, 0, 64), ADD(11, 10, 10), NOP, NOP, NOP,                 // pc 0x40, 0x44
         DIV(12, 4, 3), AND_(13, 12, 4), ADDI(14, 0, 1), NOP, NOP,      // pc 0x54..0x5c
         MUL(15, 4, 4), ADDI(16, 0, 2), 32'h0000_006f};                 // pc 0x68, 0x6c, 0x70
    load(p);
    run(32'h70, 300);
    for (int g = 0; g < 2; g++) begin
      int lat;
      lat = (g == 0) ? 2 : 18;
      `CHECK(ret_cyc[g][32'h1c] - ret_cyc[g][32'h18] == lat, $sformatf("g%0d MUL after ADD: %0d", g, ret_cyc[g][32'h1c] - ret_cyc[g][32'h18]))
      `CHECK(ret_cyc[g][32'h20] - ret_cyc[g][32'h1c] == 2, $sformatf("g%0d dependent AND after MUL: %0d", g, ret_cyc[g][32'h20] - ret_cyc[g][32'h1c]))
      `CHECK(ret_cyc[g][32'h24] - ret_cyc[g][32'h20] == 1, "SUB after AND")
      `CHECK(ret_cyc[g][32'h44] - ret_cyc[g][32'h40] == 3, $sformatf("g%0d load-use spacing %0d", g, ret_cyc[g][32'h44] - ret_cyc[g][32'h40]))
      `CHECK(ret_cyc[g][32'h54] - ret_cyc[g][32'h50] == 34, $sformatf("g%0d DIV execute cycles %0d", g, ret_cyc[g][32'h54] - ret_cyc[g][32'h50]))
      `CHECK(ret_cyc[g][32'h58] - ret_cyc[g][32'h54] == 2, "dependent AND after DIV")
      `CHECK(ret_cyc[g][32'h6c] - ret_cyc[g][32'h68] == 1, "independent instruction after MUL")
      `CHECK(reg_of(g, 7) == 84 && reg_of(g, 6) == (84 & 12) && reg_of(g, 5) == 6, "fig2 values")
      `CHECK(reg_of(g, 11) == 14 && reg_of(g, 12) == 1 && reg_of(g, 13) == 1 && reg_of(g, 15) == 49, "load/div/mul values")
    end
    // ---------------- random programs against the reference model
    for (int t = 0; t < 12; t++) begin
      iss m;
      gen_program(p, 150, 1000 + t);
      load(p);
      m = new(32'h0000_3fff);
      foreach (p[i]) m.imem[i] = p[i];
      while (m.step() && m.n_retired < 100000) ;
      run(m.pc, 60000);
      for (int g = 0; g < 2; g++) begin
        for (int r = 1; r < 32; r++)
          `CHECK(reg_of(g, r) == m.x[r], $sformatf("t%0d g%0d x%0d = %h exp %h", t, g, r, reg_of(g, r), m.x[r]))
        for (int w = 32'h1000 / 4; w < 32'h1100 / 4; w++)
          `CHECK(data_mem[g][w] == m.rd32(32'(w * 4)), $sformatf("t%0d g%0d mem[%h]", t, g, w * 4))
      end
    end
    for (int g = 0; g < 2; g++) begin
      $display("core %0d: load-use %0d md-dep %0d mul-stall %0d div-stall %0d redirect %0d fwd-M %0d fwd-W %0d",
               g, n_load_use[g], n_md_dep[g], n_mul_stall[g], n_div_stall[g], n_redirect[g], n_fwd_m[g], n_fwd_w[g]);
      `CHECK(n_load_use[g] > 0 && n_md_dep[g] > 0 && n_mul_stall[g] > 0 && n_div_stall[g] > 0 &&
             n_redirect[g] > 0 && n_fwd_m[g] > 0 && n_fwd_w[g] > 0, "every stall/bypass/redirect mechanism exercised")
    end
    `TB_DONE
  end
endmodule
