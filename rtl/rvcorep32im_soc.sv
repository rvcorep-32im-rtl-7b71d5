// rvcorep32im_soc: the evaluation system: an RVCoreP-32IM core, instruction
// memory, data memory, RS232C serial device and timer joined by the local
// interconnect bus. To run a program, hold rst high, write the program words
// through the load port into IMEM (load_dmem = 0) and any initial data into
// DMEM (load_dmem = 1), then release rst; the core starts at address 0.
// Program output leaves on uart_txd, input arrives on uart_rxd (tie it high
// when unused); retire_valid/retire_pc show each
// instruction leaving write back. Memory sizes default to the paper's 64 KB.
// MUL_TYPE and ENABLE_M pass to the core (multiplier choice, RV32I build).
module rvcorep32im_soc
  import rv_pkg::*;
#(
  parameter mul_type_e MUL_TYPE     = MUL_DSP,
  parameter bit        ENABLE_M     = 1'b1,
  parameter int        PHT_ENTRIES  = 8192,
  parameter int        BTB_ENTRIES  = 512,
  parameter int        IMEM_BYTES   = 65536,
  parameter int        DMEM_BYTES   = 65536,
  parameter int        CLKS_PER_BIT = 1406
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        load_we,
  input  logic        load_dmem,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data,
  output logic        uart_txd,
  input  logic        uart_rxd,
  output logic        retire_valid,
  output logic [31:0] retire_pc
);
  logic [31:0] i_addr, i_rdata;
  logic        d_req, d_we;
  logic [31:0] d_addr, d_wdata, d_rdata;
  logic [3:0]  d_wstrb;
  logic [31:0] imem_addr, imem_rdata, imem_waddr, imem_wdata;
  logic        imem_we;
  logic        dmem_en;
  logic [3:0]  dmem_wstrb;
  logic [31:0] dmem_addr, dmem_wdata, dmem_rdata;
  logic        uart_we, uart_busy, uart_rd, uart_rx_valid;
  logic [7:0]  uart_wdata, uart_rx_data;
  logic [63:0] timer_count;

  rvcorep32im_core #(.MUL_TYPE(MUL_TYPE), .ENABLE_M(ENABLE_M), .PHT_ENTRIES(PHT_ENTRIES), .BTB_ENTRIES(BTB_ENTRIES)) u_core (
    .clk, .rst, .imem_addr(i_addr), .imem_rdata(i_rdata),
    .d_req, .d_we, .d_addr, .d_wdata, .d_wstrb, .d_rdata,
    .retire_valid, .retire_pc
  );

  local_bus u_bus (.*);

  imem #(.BYTES(IMEM_BYTES)) u_imem (
    .clk, .addr(imem_addr), .rdata(imem_rdata),
    .load_we(imem_we), .load_addr(imem_waddr), .load_data(imem_wdata)
  );

  dmem #(.BYTES(DMEM_BYTES)) u_dmem (
    .clk, .en(dmem_en), .wstrb(dmem_wstrb), .addr(dmem_addr), .wdata(dmem_wdata), .rdata(dmem_rdata)
  );

  uart #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst, .we(uart_we), .wdata(uart_wdata), .busy(uart_busy), .txd(uart_txd),
    .rxd(uart_rxd), .rd(uart_rd), .rx_valid(uart_rx_valid), .rx_data(uart_rx_data)
  );

  timer u_timer (.clk, .rst, .count(timer_count));
endmodule
