// tb_dhrystone: Dhrystone 2.2 on the evaluation SoC in the three processor
// configurations side by side: RV32IM(DSP) with every parameter at its
// default, RV32IM(radix-4), and RV32I (ENABLE_M = 0).
//
// The program images were produced from the standard Dhrystone 2.2 C sources
// by a bare-metal compiler (-O2, no C library), once for RV32IM and once for
// RV32I, where multiplication and division are subroutines (shift-and-add
// multiply, restoring divide). The code goes to IMEM at address 0, the
// initialised data (strings, constants) to DMEM from 0x4000, and the stack
// starts at the top of the 64 KB DMEM. The small start-up routine clears the
// zero-initialised data, runs the benchmark for its default 500 iterations
// and then calls a check routine that compares every final value the
// benchmark defines (Int_Glob = 5, Arr_2_Glob[8][7] = runs + 10, the two
// record strings, ...) and writes four words to DMEM:
//   0x3ff0  bit mask of the values that were wrong (0 = all correct)
//   0x3ff4  timed part of the run in timer ticks (clock cycles), read from
//           the SoC timer at 0x8000_0010 before and after the loop
//   0x3ff8  number of iterations
//   0x3ffc  0x600d, written last
// The testbench loads both images through the load port, releases reset,
// waits for the completion word and checks the four words. It also counts,
// from the retired instruction words, how many multiplies ran: the radix-4
// core must need exactly 16 more cycles for each of them, since its
// multiplier holds the pipeline for 17 cycles against 1 for the DSP one.
// The RV32I core must retire no M instruction and run slower than both
// RV32IM cores. The testbench prints the cycles per iteration, the Dhrystone
// figure per MHz (1757 Dhrystones per second = 1 DMIPS) and the speed-up of
// each RV32IM configuration over RV32I at equal clock frequency.
`include "tb_check.svh"
module tb_dhrystone;
  import rv_pkg::*;
  localparam int RUNS = 500;
  localparam int DATA_BASE = 32'h4000;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic load_we, load_dmem;
  logic [31:0] load_addr, load_data, load_data_i;
  logic [2:0] txd, rv;
  logic [31:0] rpc [3];
  rvcorep32im_soc u_dsp (
    .clk, .rst, .load_we, .load_dmem, .load_addr, .load_data,
    .uart_txd(txd[0]), .uart_rxd(1'b1), .retire_valid(rv[0]), .retire_pc(rpc[0]));
  rvcorep32im_soc #(.MUL_TYPE(MUL_RADIX4)) u_r4 (
    .clk, .rst, .load_we, .load_dmem, .load_addr, .load_data,
    .uart_txd(txd[1]), .uart_rxd(1'b1), .retire_valid(rv[1]), .retire_pc(rpc[1]));
  rvcorep32im_soc #(.ENABLE_M(1'b0)) u_i (
    .clk, .rst, .load_we, .load_dmem, .load_addr, .load_data(load_data_i),
    .uart_txd(txd[2]), .uart_rxd(1'b1), .retire_valid(rv[2]), .retire_pc(rpc[2]));
  `WATCHDOG(clk, 1500000)

  logic [31:0] code [1024];
  logic [31:0] data [64];
  logic [31:0] code_i [1024];
  logic [31:0] data_i [64];

  function automatic bit is_mul(logic [31:0] insn);
    return insn[6:0] == 7'b0110011 && insn[31:25] == 7'b0000001 && !insn[14];
  endfunction
  function automatic bit is_div(logic [31:0] insn);
    return insn[6:0] == 7'b0110011 && insn[31:25] == 7'b0000001 && insn[14];
  endfunction

  initial begin
    int cyc [3], n_ret [3], n_mul [3], n_div [3];
    bit done [3];
    logic [31:0] res [3][4];
    load_we = 0; load_dmem = 0; load_addr = 0; load_data = 0; load_data_i = 0;
    foreach (code[i]) begin code[i] = 32'h0000_0013; code_i[i] = 32'h0000_0013; end
    foreach (data[i]) begin data[i] = 32'd0; data_i[i] = 32'd0; end
    $readmemh("tb/dhrystone_imem.hex", code);
    $readmemh("tb/dhrystone_dmem.hex", data);
    $readmemh("tb/dhrystone_rv32i_imem.hex", code_i);
    $readmemh("tb/dhrystone_rv32i_dmem.hex", data_i);
    @(posedge clk); #1;
    load_we = 1; load_dmem = 0;
    foreach (code[i]) begin
      load_addr = 32'(4 * i); load_data = code[i]; load_data_i = code_i[i]; @(posedge clk); #1;
    end
    load_dmem = 1;
    foreach (data[i]) begin
      load_addr = 32'(DATA_BASE + 4 * i); load_data = data[i]; load_data_i = data_i[i]; @(posedge clk); #1;
    end
    load_we = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    cyc = '{0, 0, 0}; n_ret = '{0, 0, 0}; n_mul = '{0, 0, 0}; n_div = '{0, 0, 0}; done = '{0, 0, 0};
    for (int c = 0; c < 1200000 && !(done[0] && done[1] && done[2]); c++) begin
      @(posedge clk); #1;
      for (int g = 0; g < 3; g++) if (!done[g]) begin
        automatic logic [31:0] insn;
        cyc[g]++;
        if (rv[g]) begin
          insn = (g == 0) ? u_dsp.u_imem.mem[rpc[g][15:2]] :
                 (g == 1) ? u_r4.u_imem.mem[rpc[g][15:2]] : u_i.u_imem.mem[rpc[g][15:2]];
          n_ret[g]++;
          n_mul[g] += int'(is_mul(insn));
          n_div[g] += int'(is_div(insn));
        end
        done[g] = (g == 0) ? u_dsp.u_dmem.mem[32'h3ffc >> 2] == 32'h600d :
                  (g == 1) ? u_r4.u_dmem.mem[32'h3ffc >> 2] == 32'h600d :
                             u_i.u_dmem.mem[32'h3ffc >> 2] == 32'h600d;
      end
    end
    for (int k = 0; k < 4; k++) begin
      res[0][k] = u_dsp.u_dmem.mem[(32'h3ff0 >> 2) + k];
      res[1][k] = u_r4.u_dmem.mem[(32'h3ff0 >> 2) + k];
      res[2][k] = u_i.u_dmem.mem[(32'h3ff0 >> 2) + k];
    end
    for (int g = 0; g < 3; g++) begin
      string n = (g == 0) ? "dsp" : (g == 1) ? "radix-4" : "rv32i";
      `CHECK(done[g], {n, ": benchmark completed"})
      `CHECK(res[g][0] == 0, $sformatf("%s: final values, wrong-value mask %h", n, res[g][0]))
      `CHECK(res[g][2] == RUNS, $sformatf("%s: iterations %0d", n, res[g][2]))
      `CHECK(res[g][1] > 0 && res[g][1] < cyc[g], $sformatf("%s: timed cycles %0d of %0d", n, res[g][1], cyc[g]))
      if (g < 2) `CHECK(n_mul[g] > 0 && n_div[g] > 0, $sformatf("%s: the benchmark multiplies (%0d) and divides (%0d)", n, n_mul[g], n_div[g]))
    end
    `CHECK(n_mul[2] == 0 && n_div[2] == 0, "rv32i: no M instruction retired")
    `CHECK(res[2][1] > res[1][1] && res[1][1] > res[0][1], "rv32i slower than radix-4, radix-4 slower than DSP")
    `CHECK(txd == 3'b111, "serial lines stay idle")
    `CHECK(n_ret[0] == n_ret[1] && n_mul[0] == n_mul[1] && n_div[0] == n_div[1], "same instruction stream on both cores")
    `CHECK(cyc[1] - cyc[0] == 16 * n_mul[0],
           $sformatf("radix-4 minus DSP cycles %0d, expected 16 x %0d multiplies", cyc[1] - cyc[0], n_mul[0]))
    for (int g = 0; g < 3; g++)
      $display("Dhrystone %-8s total %7d cycles, %7d instructions (%0d MUL, %0d DIV/REM), timed %0d cycles = %0d per iteration, %0.3f DMIPS/MHz, %0.2fx RV32I",
               (g == 0) ? "DSP" : (g == 1) ? "radix-4" : "RV32I", cyc[g], n_ret[g], n_mul[g], n_div[g], res[g][1], res[g][1] / RUNS,
               1.0e6 * RUNS / (real'(res[g][1]) * 1757.0), real'(res[2][1]) / real'(res[g][1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
