// local_bus: local interconnect of the evaluation SoC.
// The instruction bus goes to IMEM. The data bus, issued by the execute stage,
// is decoded by address: bit 31 clear selects DMEM (low bits index it), bit 31
// set selects the I/O devices: 0x8000_0000 RS232C status/transmit (write:
// send the low byte; read: bit 0 = transmitter busy, bit 1 = received byte
// waiting), 0x8000_0004 RS232C receive data (read: the byte in bits 7:0; the
// read also clears the waiting flag, through uart_rd), 0x8000_0010 /
// 0x8000_0014 timer low/high word. The core only issues requests on the
// correct path, so a read with a side effect is safe here. The target
// selected for a read is registered with the request so the
// returned word is chosen in the memory stage, the cycle DMEM delivers its
// data; device read values are sampled in execute. While load_we is high the
// program loader owns DMEM's port (load_dmem) or writes IMEM. The paper only
// names this bus; the map and loader are this design's choices.
module local_bus (
  input  logic        clk,
  input  logic        rst,
  // processor instruction bus
  input  logic [31:0] i_addr,
  output logic [31:0] i_rdata,
  // processor data bus
  input  logic        d_req,
  input  logic        d_we,
  input  logic [31:0] d_addr,
  input  logic [31:0] d_wdata,
  input  logic [3:0]  d_wstrb,
  output logic [31:0] d_rdata,
  // program loader
  input  logic        load_we,
  input  logic        load_dmem,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data,
  // IMEM
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  output logic        imem_we,
  output logic [31:0] imem_waddr,
  output logic [31:0] imem_wdata,
  // DMEM
  output logic        dmem_en,
  output logic [3:0]  dmem_wstrb,
  output logic [31:0] dmem_addr,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata,
  // RS232C
  output logic        uart_we,
  output logic [7:0]  uart_wdata,
  input  logic        uart_busy,
  output logic        uart_rd,
  input  logic        uart_rx_valid,
  input  logic [7:0]  uart_rx_data,
  // timer
  input  logic [63:0] timer_count
);
  typedef enum logic [1:0] {T_DMEM, T_UART, T_TIMER} target_e;
  target_e     sel_q;
  logic [31:0] io_q;
  logic        is_io;

  assign is_io = d_addr[31];

  // instruction side
  assign imem_addr  = i_addr;
  assign i_rdata    = imem_rdata;
  assign imem_we    = load_we && !load_dmem;
  assign imem_waddr = load_addr;
  assign imem_wdata = load_data;

  // data side
  always_comb begin
    if (load_we && load_dmem) begin
      dmem_en    = 1'b1;
      dmem_wstrb = 4'b1111;
      dmem_addr  = load_addr;
      dmem_wdata = load_data;
    end else begin
      dmem_en    = d_req && !is_io;
      dmem_wstrb = (d_we && !is_io) ? d_wstrb : 4'b0000;
      dmem_addr  = d_addr;
      dmem_wdata = d_wdata;
    end
    uart_we    = d_req && d_we && is_io && d_addr[7:4] == 4'h0 && !d_addr[2] && d_wstrb[0];
    uart_rd    = d_req && !d_we && is_io && d_addr[7:4] == 4'h0 && d_addr[2];
    uart_wdata = d_wdata[7:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sel_q <= T_DMEM;
      io_q  <= '0;
    end else if (d_req) begin
      if (!is_io)                 sel_q <= T_DMEM;
      else if (d_addr[7:4] == 4'h1) sel_q <= T_TIMER;
      else                        sel_q <= T_UART;
      if (d_addr[7:4] == 4'h1) io_q <= d_addr[2] ? timer_count[63:32] : timer_count[31:0];
      else if (d_addr[2])      io_q <= {24'd0, uart_rx_data};
      else                     io_q <= {30'd0, uart_rx_valid, uart_busy};
    end
  end

  assign d_rdata = (sel_q == T_DMEM) ? dmem_rdata : io_q;
endmodule
