// tb_local_bus: address decoding of the data bus, the memory-stage read mux,
// loader ownership of DMEM and IMEM, the RS232C status, transmit and
// receive registers (including the read strobe that clears a received
// byte), with a DMEM and timer attached.
`include "tb_check.svh"
module tb_local_bus;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  logic [31:0] i_addr, i_rdata, d_addr, d_wdata, d_rdata, load_addr, load_data;
  logic d_req, d_we, load_we, load_dmem; logic [3:0] d_wstrb;
  logic [31:0] imem_addr, imem_rdata, imem_waddr, imem_wdata, dmem_addr, dmem_wdata, dmem_rdata;
  logic imem_we, dmem_en, uart_we, uart_busy; logic [3:0] dmem_wstrb; logic [7:0] uart_wdata;
  logic uart_rd, uart_rx_valid; logic [7:0] uart_rx_data;
  logic [63:0] timer_count;
  local_bus dut (.*);
  dmem #(.BYTES(1024)) u_dmem (.clk, .en(dmem_en), .wstrb(dmem_wstrb), .addr(dmem_addr), .wdata(dmem_wdata), .rdata(dmem_rdata));
  timer u_timer (.clk, .rst, .count(timer_count));
  `WATCHDOG(clk, 100000)
  initial begin
    d_req = 0; d_we = 0; d_addr = 0; d_wdata = 0; d_wstrb = 0; load_we = 0; load_dmem = 0;
    load_addr = 0; load_data = 0; i_addr = 0; imem_rdata = 32'hcafe_0001; uart_busy = 1;
    uart_rx_valid = 0; uart_rx_data = 8'h5a;
    repeat (2) @(posedge clk); #1 rst = 0;
    i_addr = 32'h44; #1;
    `CHECK(imem_addr == 32'h44 && i_rdata == 32'hcafe_0001, "instruction bus")
    load_we = 1; load_dmem = 0; load_addr = 32'h10; load_data = 32'h1234; #1;
    `CHECK(imem_we && imem_waddr == 32'h10 && imem_wdata == 32'h1234 && !dmem_en, "loader to IMEM")
    load_dmem = 1; load_addr = 32'h20; load_data = 32'h5555_aaaa; #1;
    `CHECK(!imem_we && dmem_en && dmem_wstrb == 4'hf, "loader to DMEM")
    @(posedge clk); #1 load_we = 0;
    d_req = 1; d_we = 0; d_addr = 32'h20; @(posedge clk); #1 d_req = 0;
    `CHECK(d_rdata == 32'h5555_aaaa, "DMEM read in next cycle")
    d_req = 1; d_we = 1; d_wstrb = 4'b0010; d_addr = 32'h20; d_wdata = 32'h0000_7700; @(posedge clk); #1;
    d_we = 0; d_wstrb = 0; @(posedge clk); #1 d_req = 0;
    `CHECK(d_rdata == 32'h5555_77aa, "byte store")
    d_req = 1; d_we = 1; d_wstrb = 4'b0001; d_addr = 32'h8000_0000; d_wdata = 32'h41; #1;
    `CHECK(uart_we && uart_wdata == 8'h41 && dmem_wstrb == 0, "UART write decoded, DMEM untouched")
    d_we = 0; d_wstrb = 0; @(posedge clk); #1 d_req = 0;
    `CHECK(d_rdata == 32'd1, "UART status read")
    uart_rx_valid = 1; uart_busy = 0;
    d_req = 1; d_addr = 32'h8000_0000; #1;
    `CHECK(!uart_rd && !uart_we, "status read has no side effect")
    @(posedge clk); #1 d_req = 0;
    `CHECK(d_rdata == 32'd2, "UART status: received byte waiting, transmitter idle")
    d_req = 1; d_addr = 32'h8000_0004; #1;
    `CHECK(uart_rd && !uart_we && !dmem_en, "receive data read strobes uart_rd")
    @(posedge clk); #1 d_req = 0; #1;
    `CHECK(d_rdata == 32'h5a && !uart_rd, "receive data read")
    d_req = 1; d_we = 1; d_wstrb = 4'b0001; d_addr = 32'h8000_0004; #1;
    `CHECK(!uart_we && !uart_rd, "write to the receive register sends nothing")
    d_we = 0; d_wstrb = 0; d_req = 0; uart_busy = 1; uart_rx_valid = 0;
    d_req = 1; d_addr = 32'h8000_0010; #1;
    begin
      logic [31:0] t; t = timer_count[31:0];
      `CHECK(!uart_we && !dmem_en, "timer read selects nothing else")
      @(posedge clk); #1 d_req = 0;
      `CHECK(d_rdata == t, "timer low word sampled in execute")
    end
    d_req = 1; d_addr = 32'h8000_0014; @(posedge clk); #1 d_req = 0;
    `CHECK(d_rdata == 32'd0, "timer high word")
    `TB_DONE
  end
endmodule
