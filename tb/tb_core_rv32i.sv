// tb_core_rv32i: the pipeline built as RV32I only (ENABLE_M = 0), with
// simple synchronous memories. Without the M extension the multiplier and
// divider are absent: M-extension encodings must retire as no-ops, one per
// cycle, with no stall and no register write, while everything else behaves
// as in the full core.
// 1) Directed: the sequence ADD; MUL x7; AND (uses x7); SUB retires one
//    instruction per cycle and leaves x7 untouched; a DIV does the same; the
//    load-use pair still shows two bubbles.
// 2) Random programs (which contain M-extension encodings) run to their
//    final jump-to-self and the register file and data memory are compared
//    with the reference model set to treat M encodings as no-ops. Load-use
//    stalls, redirects and both forwarding paths must occur; multiplier and
//    divider stalls must never occur.
`include "tb_check.svh"
module tb_core_rv32i;
  import rv_pkg::*;
  import rv_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  localparam int MW = 4096;   // words of each test memory
  longint cycle = 0;
  always @(posedge clk) cycle++;
  `WATCHDOG(clk, 1000000)

  logic [31:0] prog_mem [MW];
  logic [31:0] data_mem [MW];
  logic        retire_valid;
  logic [31:0] retire_pc;
  logic [31:0] imem_addr, imem_rdata, d_addr, d_wdata, d_rdata;
  logic        d_req, d_we;
  logic [3:0]  d_wstrb;
  int n_load_use, n_md_stall, n_redirect, n_fwd_m, n_fwd_w;

  rvcorep32im_core #(.ENABLE_M(1'b0)) dut (
    .clk, .rst, .imem_addr, .imem_rdata, .d_req, .d_we, .d_addr, .d_wdata, .d_wstrb, .d_rdata,
    .retire_valid, .retire_pc);

  always @(posedge clk) begin
    imem_rdata <= prog_mem[imem_addr[13:2]];
    if (d_req) begin
      d_rdata <= data_mem[d_addr[13:2]];
      for (int k = 0; k < 4; k++) if (d_wstrb[k]) data_mem[d_addr[13:2]][8*k +: 8] <= d_wdata[8*k +: 8];
    end
    if (!rst) begin
      n_load_use += int'(dut.load_use);
      n_md_stall += int'(dut.mul_stall || dut.div_stall || dut.md_dep);
      n_redirect += int'(dut.redirect);
      n_fwd_m    += int'(dut.idex.valid && (dut.fwd_a == 1 || dut.fwd_b == 1));
      n_fwd_w    += int'(dut.idex.valid && (dut.fwd_a == 2 || dut.fwd_b == 2));
    end
  end

  task automatic load(logic [31:0] p [$]);
    for (int i = 0; i < MW; i++) begin
      prog_mem[i] = (i < p.size()) ? p[i] : NOP;
      data_mem[i] = 0;
    end
  endtask

  longint ret_cyc [int];
  task automatic run(logic [31:0] last_pc, int max_cycles);
    bit done = 0;
    rst = 1; repeat (3) @(posedge clk); #1 rst = 0;
    ret_cyc.delete();
    for (int c = 0; c < max_cycles && !done; c++) begin
      @(posedge clk); #1;
      if (retire_valid) begin
        if (!ret_cyc.exists(int'(retire_pc))) ret_cyc[int'(retire_pc)] = cycle;
        if (retire_pc == last_pc) done = 1;
      end
    end
    `CHECK(done, "program reached its end")
  endtask

  initial begin
    logic [31:0] p [$];
    // ---------------- directed
    p = {ADDI(3, 0, 5), ADDI(4, 0, 7), ADDI(1, 0, 1), NOP, NOP, NOP,
         ADD(2, 3, 4), MUL(7, 2, 4), AND_(6, 7, 2), SUB(5, 4, 1),      // pc 0x18..0x24
         NOP, NOP, NOP, SW(4, 0, 64), NOP, NOP,
         LW(10, 0, 64), ADD(11, 10, 10), NOP, NOP, NOP,                 // pc 0x40, 0x44
         DIV(12, 4, 3), AND_(13, 12, 4), ADDI(14, 0, 1), NOP, NOP,      // pc 0x54..0x5c
         32'h0000_006f};                                                // pc 0x68
    load(p);
    run(32'h68, 300);
    `CHECK(ret_cyc[32'h1c] - ret_cyc[32'h18] == 1, $sformatf("MUL retires 1 cycle after ADD: %0d", ret_cyc[32'h1c] - ret_cyc[32'h18]))
    `CHECK(ret_cyc[32'h20] - ret_cyc[32'h1c] == 1, "AND retires 1 cycle after MUL")
    `CHECK(ret_cyc[32'h24] - ret_cyc[32'h20] == 1, "SUB after AND")
    `CHECK(ret_cyc[32'h44] - ret_cyc[32'h40] == 3, $sformatf("load-use spacing %0d", ret_cyc[32'h44] - ret_cyc[32'h40]))
    `CHECK(ret_cyc[32'h54] - ret_cyc[32'h50] == 1, "DIV retires 1 cycle after NOP")
    `CHECK(ret_cyc[32'h58] - ret_cyc[32'h54] == 1, "AND retires 1 cycle after DIV")
    `CHECK(dut.u_rf.regs[7] == 0 && dut.u_rf.regs[12] == 0, "M encodings wrote no register")
    `CHECK(dut.u_rf.regs[6] == 0 && dut.u_rf.regs[13] == 0 && dut.u_rf.regs[5] == 6, "dependents saw x0-initialised registers")
    `CHECK(dut.u_rf.regs[11] == 14 && dut.u_rf.regs[14] == 1, "load and ALU values")
    // ---------------- random programs against the reference model
    for (int t = 0; t < 8; t++) begin
      iss m;
      gen_program(p, 150, 2000 + t);
      load(p);
      m = new(32'h0000_3fff);
      m.no_m = 1;
      foreach (p[i]) m.imem[i] = p[i];
      while (m.step() && m.n_retired < 100000) ;
      `CHECK(m.n_retired < 100000, "reference model reached the end")
      run(m.pc, 60000);
      for (int r = 1; r < 32; r++)
        `CHECK(dut.u_rf.regs[r] == m.x[r], $sformatf("t%0d x%0d = %h exp %h", t, r, dut.u_rf.regs[r], m.x[r]))
      for (int w = 32'h1000 / 4; w < 32'h1100 / 4; w++)
        `CHECK(data_mem[w] == m.rd32(32'(w * 4)), $sformatf("t%0d mem[%h]", t, w * 4))
      `CHECK(m.n_mul + m.n_div > 0, "program contained M-extension encodings")
    end
    $display("load-use %0d mul/div stalls %0d redirect %0d fwd-M %0d fwd-W %0d",
             n_load_use, n_md_stall, n_redirect, n_fwd_m, n_fwd_w);
    `CHECK(n_load_use > 0 && n_redirect > 0 && n_fwd_m > 0 && n_fwd_w > 0, "load-use, redirect and both forwarding paths exercised")
    `CHECK(n_md_stall == 0, "no multiplier or divider stall in an RV32I build")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
