// tb_workloads: benchmark-style kernels on the evaluation SoC in both
// multiplier configurations, RV32IM(DSP) and RV32IM(radix-4), side by side.
//
// The kernels are small hand-written versions of the inner loops that the
// usual embedded benchmarks spend their time in:
//   matmult  8x8 signed integer matrix product (LW, MUL, ADD; load-use and
//            mul-dependency stalls in every iteration)
//   crc32    bitwise reflected CRC-32 (polynomial 0xEDB88320) over 64 bytes
//            (LBU, shifts, XOR, data-dependent branches; no M instructions)
//   decimal  unsigned decimal conversion of 16 words by REMU/DIVU 10, plus a
//            signed DIV/REM by -7 of each word (divider heavy)
//   mulacc   64-bit accumulation of MUL/MULHU/MULH/MULHSU products of a
//            linear congruential sequence (all multiply forms)
// Each kernel is loaded through the SoC load port (program into IMEM, data
// into DMEM), run from reset until it reaches its final self-jump, and then
// checked: register file and the first 4 KB of DMEM against the instruction-
// set reference model, the matmult and crc32 results also against values
// computed directly here. The cycle counts are printed per configuration.
// Timing checks: the radix-4 core needs exactly 16 more cycles per multiply
// instruction than the DSP core (17 against 1 stall cycle), and both need the
// same number of cycles for a kernel without multiplies. These two SoCs have
// the default 64 KB memories; a third one, DSP multiplier with 4 KB IMEM and
// DMEM (the small configuration), runs the same kernels and must give the
// same results in the same number of cycles as the 64 KB DSP SoC. The UART
// bit time is irrelevant here.
`include "tb_check.svh"
module tb_workloads;
  import rv_pkg::*;
  import rv_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic load_we, load_dmem;
  logic [31:0] load_addr, load_data;
  logic [2:0] txd, rv;
  logic [31:0] rpc [3];
  rvcorep32im_soc #(.MUL_TYPE(MUL_DSP)) u_dsp (
    .clk, .rst, .load_we, .load_dmem, .load_addr, .load_data,
    .uart_txd(txd[0]), .uart_rxd(1'b1), .retire_valid(rv[0]), .retire_pc(rpc[0]));
  rvcorep32im_soc #(.MUL_TYPE(MUL_RADIX4)) u_r4 (
    .clk, .rst, .load_we, .load_dmem, .load_addr, .load_data,
    .uart_txd(txd[1]), .uart_rxd(1'b1), .retire_valid(rv[1]), .retire_pc(rpc[1]));
  // the small-memory configuration: 4 KB IMEM and DMEM, DSP multiplier
  rvcorep32im_soc #(.MUL_TYPE(MUL_DSP), .IMEM_BYTES(4096), .DMEM_BYTES(4096)) u_4k (
    .clk, .rst, .load_we, .load_dmem, .load_addr, .load_data,
    .uart_txd(txd[2]), .uart_rxd(1'b1), .retire_valid(rv[2]), .retire_pc(rpc[2]));
  `WATCHDOG(clk, 400000)

  // ---- encoders not in the shared package
  function automatic logic [31:0] XOR_ (logic [4:0] rd, rs1, rs2); return r_type(0, rs2, rs1, 4, rd); endfunction
  function automatic logic [31:0] SLTU (logic [4:0] rd, rs1, rs2); return r_type(0, rs2, rs1, 3, rd); endfunction
  function automatic logic [31:0] MULH (logic [4:0] rd, rs1, rs2); return r_type(1, rs2, rs1, 1, rd); endfunction
  function automatic logic [31:0] MULHSU(logic [4:0] rd, rs1, rs2); return r_type(1, rs2, rs1, 2, rd); endfunction
  function automatic logic [31:0] MULHU(logic [4:0] rd, rs1, rs2); return r_type(1, rs2, rs1, 3, rd); endfunction
  function automatic logic [31:0] DIVU (logic [4:0] rd, rs1, rs2); return r_type(1, rs2, rs1, 5, rd); endfunction
  function automatic logic [31:0] REM  (logic [4:0] rd, rs1, rs2); return r_type(1, rs2, rs1, 6, rd); endfunction
  function automatic logic [31:0] REMU (logic [4:0] rd, rs1, rs2); return r_type(1, rs2, rs1, 7, rd); endfunction
  function automatic logic [31:0] SLLI (logic [4:0] rd, rs1, int sh); return i_type(sh, rs1, 1, rd); endfunction
  function automatic logic [31:0] SRLI (logic [4:0] rd, rs1, int sh); return i_type(sh, rs1, 5, rd); endfunction
  function automatic logic [31:0] ANDI (logic [4:0] rd, rs1, int imm); return i_type(imm, rs1, 7, rd); endfunction
  function automatic logic [31:0] XORI (logic [4:0] rd, rs1, int imm); return i_type(imm, rs1, 4, rd); endfunction
  function automatic logic [31:0] LBU  (logic [4:0] rd, rs1, int imm); return i_type(imm, rs1, 4, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SB   (logic [4:0] rs2, rs1, int imm); return s_type(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] BEQ  (logic [4:0] rs1, rs2, int off); return b_type(off, rs2, rs1, 0); endfunction
  // load a 32-bit constant with LUI + ADDI
  function automatic void li(ref logic [31:0] p [$], input logic [4:0] rd, input logic [31:0] v);
    logic [31:0] hi = (v + 32'h800) >> 12;
    p.push_back(LUI(rd, int'(hi)));
    p.push_back(ADDI(rd, rd, int'(signed'(v[11:0]))));
  endfunction
  // branch back to the instruction at index target
  function automatic int back(ref logic [31:0] p [$], input int target);
    return 4 * (target - p.size());
  endfunction

  logic [31:0] prog [$];
  logic [31:0] dinit [int];     // initial DMEM words by byte address
  logic [31:0] expect_w [int];  // independently computed results by byte address

  // ---- kernel builders
  task automatic build_matmult();
    int Li, Lj, Lk;
    logic signed [31:0] a [8][8], b [8][8];
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      a[i][j] = 32'($urandom_range(0, 2000)) - 1000;
      b[i][j] = (i == j && i == 0) ? 32'sh7fff_ffff : 32'($urandom_range(0, 200)) - 100;
      dinit[4 * (8 * i + j)] = a[i][j];
      dinit[32'h100 + 4 * (8 * i + j)] = b[i][j];
    end
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      logic signed [31:0] s = 0;
      for (int k = 0; k < 8; k++) s += a[i][k] * b[k][j];
      expect_w[32'h200 + 4 * (8 * i + j)] = s;
    end
    prog.push_back(ADDI(4, 0, 8));
    prog.push_back(ADDI(1, 0, 0));
    Li = prog.size();
    prog.push_back(ADDI(2, 0, 0));
    Lj = prog.size();
    prog.push_back(ADDI(3, 0, 0));
    prog.push_back(ADDI(5, 0, 0));
    prog.push_back(SLLI(6, 1, 5));
    prog.push_back(SLLI(7, 2, 2));
    prog.push_back(ADDI(7, 7, 32'h100));
    Lk = prog.size();
    prog.push_back(LW(8, 6, 0));
    prog.push_back(LW(9, 7, 0));
    prog.push_back(MUL(8, 8, 9));
    prog.push_back(ADD(5, 5, 8));
    prog.push_back(ADDI(6, 6, 4));
    prog.push_back(ADDI(7, 7, 32));
    prog.push_back(ADDI(3, 3, 1));
    prog.push_back(BNE(3, 4, back(prog, Lk)));
    prog.push_back(SLLI(10, 1, 5));
    prog.push_back(SLLI(11, 2, 2));
    prog.push_back(ADD(10, 10, 11));
    prog.push_back(SW(5, 10, 32'h200));
    prog.push_back(ADDI(2, 2, 1));
    prog.push_back(BNE(2, 4, back(prog, Lj)));
    prog.push_back(ADDI(1, 1, 1));
    prog.push_back(BNE(1, 4, back(prog, Li)));
  endtask

  task automatic build_crc32();
    int Lb, Lbit;
    logic [7:0] data [64];
    logic [31:0] crc = '1;
    foreach (data[i]) data[i] = 8'($urandom);
    for (int w = 0; w < 16; w++) dinit[32'h400 + 4 * w] = {data[4*w+3], data[4*w+2], data[4*w+1], data[4*w]};
    foreach (data[i]) begin
      crc ^= 32'(data[i]);
      for (int k = 0; k < 8; k++) crc = crc[0] ? (crc >> 1) ^ 32'hEDB8_8320 : crc >> 1;
    end
    expect_w[32'h500] = ~crc;
    prog.push_back(ADDI(1, 0, 32'h400));
    prog.push_back(ADDI(2, 0, 32'h440));
    prog.push_back(ADDI(3, 0, -1));
    li(prog, 4, 32'hEDB8_8320);
    Lb = prog.size();
    prog.push_back(LBU(5, 1, 0));
    prog.push_back(XOR_(3, 3, 5));
    prog.push_back(ADDI(6, 0, 8));
    Lbit = prog.size();
    prog.push_back(ANDI(7, 3, 1));
    prog.push_back(SRLI(3, 3, 1));
    prog.push_back(BEQ(7, 0, 8));
    prog.push_back(XOR_(3, 3, 4));
    prog.push_back(ADDI(6, 6, -1));
    prog.push_back(BNE(6, 0, back(prog, Lbit)));
    prog.push_back(ADDI(1, 1, 1));
    prog.push_back(BNE(1, 2, back(prog, Lb)));
    prog.push_back(XORI(3, 3, -1));
    prog.push_back(SW(3, 0, 32'h500));
  endtask

  task automatic build_decimal();
    int Lw, Ld;
    for (int w = 0; w < 16; w++) begin
      logic [31:0] v;
      case (w)
        0: v = 0;
        1: v = 32'hffff_ffff;
        2: v = 32'h8000_0000;
        3: v = 7;
        default: v = $urandom >> $urandom_range(0, 31);
      endcase
      dinit[32'h600 + 4 * w] = v;
    end
    prog.push_back(ADDI(1, 0, 32'h600));
    prog.push_back(ADDI(2, 0, 32'h640));
    prog.push_back(ADDI(9, 0, 32'h700));
    prog.push_back(ADDI(10, 0, 10));
    prog.push_back(ADDI(11, 0, 32'h7f0));
    prog.push_back(ADDI(11, 11, 32'h110));
    prog.push_back(ADDI(12, 0, -7));
    Lw = prog.size();
    prog.push_back(LW(3, 1, 0));
    Ld = prog.size();
    prog.push_back(REMU(4, 3, 10));
    prog.push_back(DIVU(3, 3, 10));
    prog.push_back(SB(4, 9, 0));
    prog.push_back(ADDI(9, 9, 1));
    prog.push_back(BNE(3, 0, back(prog, Ld)));
    prog.push_back(LW(5, 1, 0));
    prog.push_back(DIV(7, 5, 12));
    prog.push_back(REM(8, 5, 12));
    prog.push_back(SW(7, 11, 0));
    prog.push_back(SW(8, 11, 4));
    prog.push_back(ADDI(11, 11, 8));
    prog.push_back(ADDI(1, 1, 4));
    prog.push_back(BNE(1, 2, back(prog, Lw)));
  endtask

  task automatic build_mulacc();
    int L;
    li(prog, 1, $urandom);
    li(prog, 2, $urandom);
    prog.push_back(ADDI(3, 0, 32));
    prog.push_back(ADDI(4, 0, 0));
    prog.push_back(ADDI(5, 0, 0));
    li(prog, 12, 32'd1664525);
    li(prog, 13, 32'd1013904223);
    L = prog.size();
    prog.push_back(MUL(6, 1, 2));
    prog.push_back(MULHU(7, 1, 2));
    prog.push_back(ADD(4, 4, 6));
    prog.push_back(SLTU(8, 4, 6));
    prog.push_back(ADD(5, 5, 7));
    prog.push_back(ADD(5, 5, 8));
    prog.push_back(MULH(9, 1, 2));
    prog.push_back(XOR_(5, 5, 9));
    prog.push_back(MULHSU(9, 2, 1));
    prog.push_back(ADD(4, 4, 9));
    prog.push_back(MUL(1, 1, 12));
    prog.push_back(ADD(1, 1, 13));
    prog.push_back(MUL(2, 2, 12));
    prog.push_back(ADDI(2, 2, 7));
    prog.push_back(ADDI(3, 3, -1));
    prog.push_back(BNE(3, 0, back(prog, L)));
    prog.push_back(SW(4, 0, 32'h300));
    prog.push_back(SW(5, 0, 32'h304));
  endtask

  // ---- run one kernel on both cores
  task automatic run(string name);
    iss m;
    logic [31:0] end_pc;
    int cyc [3];
    bit done [3];
    end_pc = 32'(4 * prog.size());
    prog.push_back(32'h0000_006f);
    m = new(32'h0000_ffff);
    foreach (prog[i]) m.imem[i] = prog[i];
    foreach (dinit[a]) for (int k = 0; k < 4; k++) m.dmem[a + k] = dinit[a][8*k +: 8];
    while (m.step() && m.n_retired < 100000) ;
    `CHECK(m.pc == end_pc, {name, ": reference model reached the end"})
    rst = 1;
    @(posedge clk); #1;
    load_we = 1; load_dmem = 0;
    for (int i = 0; i < prog.size() + 8; i++) begin
      load_addr = 32'(4 * i); load_data = (i < prog.size()) ? prog[i] : NOP; @(posedge clk); #1;
    end
    load_dmem = 1;
    for (int w = 0; w < 1024; w++) begin
      load_addr = 32'(4 * w); load_data = dinit.exists(4 * w) ? dinit[4 * w] : 32'd0; @(posedge clk); #1;
    end
    load_we = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    cyc = '{0, 0, 0}; done = '{0, 0, 0};
    for (int c = 0; c < 100000 && !(done[0] && done[1] && done[2]); c++) begin
      @(posedge clk); #1;
      for (int g = 0; g < 3; g++) if (!done[g]) begin
        cyc[g]++;
        if (rv[g] && rpc[g] == end_pc) done[g] = 1;
      end
    end
    `CHECK(done[0] && done[1] && done[2], {name, ": all cores reached the end"})
    `CHECK(txd == 3'b111, {name, ": serial lines stay idle"})
    repeat (4) @(posedge clk);
    for (int r = 1; r < 32; r++) begin
      `CHECK(u_dsp.u_core.u_rf.regs[r] == m.x[r], $sformatf("%s dsp x%0d = %h exp %h", name, r, u_dsp.u_core.u_rf.regs[r], m.x[r]))
      `CHECK(u_r4.u_core.u_rf.regs[r] == m.x[r], $sformatf("%s radix-4 x%0d = %h exp %h", name, r, u_r4.u_core.u_rf.regs[r], m.x[r]))
      `CHECK(u_4k.u_core.u_rf.regs[r] == m.x[r], $sformatf("%s 4 KB x%0d = %h exp %h", name, r, u_4k.u_core.u_rf.regs[r], m.x[r]))
    end
    for (int w = 0; w < 1024; w++) begin
      `CHECK(u_dsp.u_dmem.mem[w] == m.rd32(32'(4 * w)), $sformatf("%s dsp dmem[%h]", name, 4 * w))
      `CHECK(u_r4.u_dmem.mem[w] == m.rd32(32'(4 * w)), $sformatf("%s radix-4 dmem[%h]", name, 4 * w))
      `CHECK(u_4k.u_dmem.mem[w] == m.rd32(32'(4 * w)), $sformatf("%s 4 KB dmem[%h]", name, 4 * w))
    end
    foreach (expect_w[a]) begin
      `CHECK(u_dsp.u_dmem.mem[a / 4] == expect_w[a], $sformatf("%s dsp result at %h = %h exp %h", name, a, u_dsp.u_dmem.mem[a / 4], expect_w[a]))
      `CHECK(u_r4.u_dmem.mem[a / 4] == expect_w[a], $sformatf("%s radix-4 result at %h", name, a))
    end
    `CHECK(cyc[2] == cyc[0], {name, ": memory size does not change the timing"})
    `CHECK(cyc[1] - cyc[0] == 16 * int'(m.n_mul),
           $sformatf("%s: radix-4 minus DSP cycles %0d, expected 16 x %0d multiplies", name, cyc[1] - cyc[0], m.n_mul))
    $display("%-8s retired %6d  mul %5d  div %5d  cycles DSP %6d (CPI %0.2f)  radix-4 %6d (CPI %0.2f)",
             name, m.n_retired, m.n_mul, m.n_div, cyc[0], real'(cyc[0]) / m.n_retired, cyc[1], real'(cyc[1]) / m.n_retired);
    prog.delete(); dinit.delete(); expect_w.delete();
  endtask

  initial begin
    load_we = 0; load_dmem = 0; load_addr = 0; load_data = 0;
    build_matmult(); run("matmult");
    build_crc32();   run("crc32");
    build_decimal(); run("decimal");
    build_mulacc();  run("mulacc");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
