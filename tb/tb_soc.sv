// tb_soc: end-to-end run of the evaluation SoC with every parameter at its
// default (64 KB memories, 8192-entry PHT, 512-entry BTB, DSP multiplier,
// 1406 clocks per UART bit). The program is loaded through the load port:
// IMEM gets a random RV32IM program followed by a tail that reads the timer
// twice and sends four result bytes over RS232C, polling the busy flag, and
// then waits for a byte on the receive line and reads it (the testbench
// sends 0xA5 on uart_rxd shortly after reset, so it waits in the receiver's
// buffer); DMEM gets initial data. The tb decodes the serial line, compares
// the bytes,
// the register file and the data memory with the reference model, checks
// that the timer advanced, and counts every pipeline mechanism (load-use
// stall, mul/div dependency stall, mul and div stalls, branch redirect,
// memory- and write-back-stage forwarding, UART busy polling): each must
// occur at least once.
`include "tb_check.svh"
module tb_soc;
  import rv_pkg::*;
  import rv_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic load_we, load_dmem, uart_txd, uart_rxd, retire_valid;
  logic [31:0] load_addr, load_data, retire_pc;
  rvcorep32im_soc dut (.*);
  `WATCHDOG(clk, 3000000)

  int CPB;
  initial CPB = dut.CLKS_PER_BIT;   // the SoC default bit time
  int n_load_use, n_md_dep, n_mul_stall, n_div_stall, n_redirect, n_fwd_m, n_fwd_w, n_poll;
  always @(posedge clk) if (!rst) begin
    n_load_use  += int'(dut.u_core.load_use && !dut.u_core.mul_stall && !dut.u_core.div_stall);
    n_md_dep    += int'(dut.u_core.md_dep && !dut.u_core.mul_stall && !dut.u_core.div_stall);
    n_mul_stall += int'(dut.u_core.mul_stall);
    n_div_stall += int'(dut.u_core.div_stall);
    n_redirect  += int'(dut.u_core.redirect);
    n_fwd_m     += int'(dut.u_core.idex.valid && (dut.u_core.fwd_a == 1 || dut.u_core.fwd_b == 1));
    n_fwd_w     += int'(dut.u_core.idex.valid && (dut.u_core.fwd_a == 2 || dut.u_core.fwd_b == 2));
  end

  // serial input: one byte, 8N1, sent soon after reset
  initial begin
    uart_rxd = 1'b1;
    @(negedge rst);
    repeat (2000) @(posedge clk);
    for (int i = 0; i < 10; i++) begin uart_rxd = RX_FRAME[i]; repeat (CPB) @(posedge clk); end
    uart_rxd = 1'b1;
  end
  localparam logic [9:0] RX_FRAME = {1'b1, 8'ha5, 1'b0};

  // serial line decoder
  byte rx [$];
  initial begin
    forever begin
      @(negedge uart_txd);
      if (!rst) begin
        byte b;
        repeat (CPB + CPB / 2) @(posedge clk);
        for (int k = 0; k < 8; k++) begin b[k] = uart_txd; repeat (CPB) @(posedge clk); end
        rx.push_back(b);
      end
    end
  end

  initial begin
    logic [31:0] p [$];
    logic [31:0] tail_pc, end_pc, rx_pc;
    iss m;
    int ok;
    load_we = 0; load_dmem = 0; load_addr = 0; load_data = 0;
    gen_program(p, 400, 77);
    void'(p.pop_back());
    tail_pc = 32'(4 * p.size());
    // tail: x20 = UART, poll busy, send low byte of x1..x4, read timer twice
    p.push_back(LUI(20, 32'h80000));
    p.push_back(LW(22, 20, 16));
    for (int r = 1; r <= 4; r++) begin
      p.push_back(LW(21, 20, 0));
      p.push_back(i_type(1, 21, 3'd7, 21));        // ANDI x21, x21, 1 (busy)
      p.push_back(BNE(21, 0, -8));
      p.push_back(SW(5'(r), 20, 0));
    end
    p.push_back(LW(21, 20, 0));
    p.push_back(i_type(1, 21, 3'd7, 21));
    p.push_back(BNE(21, 0, -8));
    p.push_back(LW(23, 20, 16));
    // receive: wait for status bit 1, read the byte into x24, status into x25
    rx_pc = 32'(4 * p.size());
    p.push_back(LW(24, 20, 0));
    p.push_back(i_type(2, 24, 3'd7, 24));          // ANDI x24, x24, 2
    p.push_back(b_type(-8, 0, 24, 3'd0));          // BEQ x24, x0, poll
    p.push_back(LW(24, 20, 4));
    p.push_back(LW(25, 20, 0));
    end_pc = 32'(4 * p.size());
    p.push_back(32'h0000_006f);
    // reference model: I/O reads return 0, so run it on the same program
    m = new(32'h0000_ffff);
    foreach (p[i]) m.imem[i] = p[i];
    for (int w = 0; w < 64; w++) for (int k = 0; k < 4; k++) m.dmem[32'h1000 + 4 * w + k] = 8'(w * 4 + k + 8'h30);
    // the model has no serial input: it stops where the program starts to wait
    while (m.pc != rx_pc && m.step() && m.n_retired < 200000) ;
    `CHECK(m.pc == rx_pc, "reference model reached the receive loop")
    // load IMEM (whole memory) and DMEM data through the load port
    @(posedge clk); #1;
    load_we = 1; load_dmem = 0;
    for (int i = 0; i < 65536 / 4; i++) begin
      load_addr = 32'(4 * i); load_data = (i < p.size()) ? p[i] : NOP; @(posedge clk); #1;
    end
    load_dmem = 1;
    for (int w = 0; w < 64; w++) begin
      load_addr = 32'h1000 + 32'(4 * w);
      load_data = {8'(w * 4 + 3 + 8'h30), 8'(w * 4 + 2 + 8'h30), 8'(w * 4 + 1 + 8'h30), 8'(w * 4 + 0 + 8'h30)};
      @(posedge clk); #1;
    end
    load_we = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    ok = 0;
    for (int c = 0; c < 2500000 && !ok; c++) begin
      @(posedge clk); #1;
      if (retire_valid && retire_pc == end_pc) ok = 1;
    end
    `CHECK(ok, "program reached its end")
    repeat (2 * 10 * CPB) @(posedge clk);
    for (int r = 1; r < 32; r++)
      if (r < 20 || r > 25) `CHECK(dut.u_core.u_rf.regs[r] == m.x[r], $sformatf("x%0d = %h exp %h", r, dut.u_core.u_rf.regs[r], m.x[r]))
    for (int w = 32'h1000 / 4; w < 32'h1100 / 4; w++)
      `CHECK(dut.u_dmem.mem[w] == m.rd32(32'(w * 4)), $sformatf("dmem[%h]", w * 4))
    `CHECK(rx.size() == 4, $sformatf("%0d bytes received", rx.size()))
    for (int r = 1; r <= 4 && r <= rx.size(); r++)
      `CHECK(rx[r - 1] == m.x[r][7:0], $sformatf("byte %0d = %h exp %h", r, rx[r - 1], m.x[r][7:0]))
    `CHECK(dut.u_core.u_rf.regs[23] - dut.u_core.u_rf.regs[22] > 32'(3 * 10 * CPB), "timer advanced while sending")
    n_poll = int'(dut.u_core.u_rf.regs[23] - dut.u_core.u_rf.regs[22]) / (10 * CPB);
    $display("load-use %0d md-dep %0d mul-stall %0d div-stall %0d redirect %0d fwd-M %0d fwd-W %0d busy-waits %0d",
             n_load_use, n_md_dep, n_mul_stall, n_div_stall, n_redirect, n_fwd_m, n_fwd_w, n_poll);
    `CHECK(dut.u_core.u_rf.regs[24] == 32'h0000_00a5, "received byte read from the data register")
    `CHECK(dut.u_core.u_rf.regs[25][1] == 1'b0, "reading the data register cleared the waiting flag")
    `CHECK(n_load_use > 0, "load-use stall seen")
    `CHECK(n_md_dep > 0, "mul/div dependency stall seen")
    `CHECK(n_mul_stall > 0, "mul stall seen")
    `CHECK(n_div_stall > 0, "div stall seen")
    `CHECK(n_redirect > 0, "branch redirect seen")
    `CHECK(n_fwd_m > 0, "memory-stage forwarding seen")
    `CHECK(n_fwd_w > 0, "write-back forwarding seen")
    `CHECK(n_poll > 0, "UART busy polling seen")
    `TB_DONE
  end
endmodule
