// rvcorep32im_core: the RVCoreP-32IM five-stage in-order RV32IM pipeline.
//
// Stages: F (pc, synchronous instruction memory, gshare prediction),
// D (decode, register read, hazard detection), E (forwarding muxes, then a
// fork into the single-cycle ALU/BRU/AGU path or the multi-cycle multiplier
// or divider, joined again by fork_join_control), M (data memory read data,
// data aligner, result mux, branch redirect) and W (register write).
//
// Fork-join: when decode hands a MUL* or DIV*/REM* to execute (mul_op /
// div_op in the ID/EX register), the unit captures the forwarded operands in
// that cycle and raises mul_stall/div_stall; while a stall is high, fetch and
// decode hold and a bubble enters ID/EX. The unit's valid_out is joined into
// ex_valid, the memory-stage valid bit. With the DSP multiplier a MUL spends
// 2 cycles in execute (1 stall), with the radix-4 multiplier 18 (17 stalls),
// a division 34 or 35 (33/34 stalls; 3 with a zero operand).
//
// Forwarding: memory-stage results only from the single-cycle path, write-
// back results except load data. Hence an instruction that uses a mul/div
// result right away waits one extra cycle, and one that uses a load result
// right away waits two cycles (it then reads the write-through register file).
//
// Branches and jumps are predicted in fetch; the branch unit computes tkn_pc
// and seq_pc in execute, and a wrong prediction is repaired from the memory
// stage: fetch is redirected and the three younger instructions (fetch,
// decode, execute) are discarded; a store or mul/div in execute is suppressed.
// These timings follow the paper; the redirect point is read from its
// microarchitecture figure, the 3-instruction penalty follows from it.
//
// Data bus: request, address, write data and byte strobes leave in execute
// (the memory is synchronous); read data returns in the memory stage.
//
// Configuration: MUL_TYPE picks the multiplier (MUL_DSP or MUL_RADIX4).
// ENABLE_M = 0 builds an RV32I core: the multiplier and divider are left
// out, decode no longer recognises M-extension encodings and they retire as
// no-ops; the pipeline is then the plain five-stage RV32I one. The paper
// selects its configuration in a header file; parameters are used here.
module rvcorep32im_core
  import rv_pkg::*;
#(
  parameter mul_type_e   MUL_TYPE    = MUL_DSP,
  parameter bit          ENABLE_M    = 1'b1,
  parameter int          PHT_ENTRIES = 8192,
  parameter int          BTB_ENTRIES = 512,
  parameter logic [31:0] RESET_PC    = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst,
  // instruction bus
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  // data bus
  output logic        d_req,
  output logic        d_we,
  output logic [31:0] d_addr,
  output logic [31:0] d_wdata,
  output logic [3:0]  d_wstrb,
  input  logic [31:0] d_rdata,
  // retirement (write-back stage)
  output logic        retire_valid,
  output logic [31:0] retire_pc
);
  // ------------------------------------------------------------------ types
  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
    pred_t       pred;
  } ifid_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    dec_t        dec;
    logic [31:0] rs1_val;
    logic [31:0] rs2_val;
    pred_t       pred;
  } idex_t;

  typedef struct packed {
    logic [31:0] pc;
    logic [4:0]  rd;
    logic        rd_we;
    logic        is_load;
    logic [2:0]  funct3;
    logic [1:0]  addr_lo;
    logic [31:0] alu_result;
    res_sel_e    res_sel;
    logic        mispredict;
    logic        is_branch;
    logic        is_jump;
    logic        taken;
    logic [31:0] tkn_pc;
    logic [31:0] seq_pc;
    logic [15:0] pht_idx;
  } exmem_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [4:0]  rd;
    logic        rd_we;
    logic        is_load;
    logic [31:0] load_data;
    logic [31:0] result;
  } memwb_t;

  ifid_t  ifid;
  idex_t  idex;
  exmem_t exmem;
  memwb_t memwb;
  logic   ex_valid, ex_from_md;

  // ------------------------------------------------------------------ wires
  logic        stall, load_use, md_dep;
  logic        redirect;
  logic [31:0] redirect_pc;
  logic [31:0] f_pc;
  logic        f_valid;
  pred_t       f_pred;
  dec_t        d_dec, d_dec_raw;
  logic [31:0] d_rs1_val, d_rs2_val;
  logic [1:0]  fwd_a, fwd_b;
  logic [31:0] opa, opb, alu_a, alu_b, alu_y;
  logic        br_taken;
  logic [31:0] tkn_pc, seq_pc;
  logic [31:0] agu_addr, agu_wdata;
  logic [3:0]  agu_wstrb;
  logic        e_go;
  logic        mul_stall, mul_valid, div_stall, div_valid;
  logic [31:0] product_L, product_H, quotient, reminder;
  logic        md_busy;
  logic [4:0]  md_rd;
  res_sel_e    md_sel;
  logic [31:0] md_pc;
  logic        md_mispredict;
  logic        md_pending;
  logic [4:0]  md_rd_now;
  logic        mispredict;
  logic [31:0] pred_next, actual_next;
  logic [31:0] m_load_data, m_result;
  logic        w_we;
  logic [31:0] w_data;

  // ------------------------------------------------------------------ F
  fetch #(.RESET_PC(RESET_PC), .PHT_ENTRIES(PHT_ENTRIES), .BTB_ENTRIES(BTB_ENTRIES)) u_fetch (
    .clk, .rst, .stall, .redirect, .redirect_pc,
    .pc_next(imem_addr), .f_pc, .f_valid, .f_pred,
    .upd_valid  (ex_valid && (exmem.is_branch || exmem.is_jump)),
    .upd_is_cond(exmem.is_branch),
    .upd_taken  (exmem.taken),
    .upd_pc     (exmem.pc),
    .upd_target (exmem.tkn_pc),
    .upd_pht_idx(exmem.pht_idx)
  );

  always_ff @(posedge clk) begin
    if (rst || redirect) ifid.valid <= 1'b0;
    else if (!stall)     ifid.valid <= f_valid;
    if (!stall) begin
      ifid.pc    <= f_pc;
      ifid.instr <= imem_rdata;
      ifid.pred  <= f_pred;
    end
  end

  // ------------------------------------------------------------------ D
  decoder u_dec (.instr(ifid.instr), .dec(d_dec_raw));

  // RV32I build: M-extension encodings are not recognised and retire as
  // no-ops, so nothing is forked off and no register is written.
  always_comb begin
    d_dec = d_dec_raw;
    if (!ENABLE_M && (d_dec_raw.mul_op || d_dec_raw.div_op)) begin
      d_dec.mul_op = 1'b0;
      d_dec.div_op = 1'b0;
      d_dec.rd_we  = 1'b0;
    end
  end

  regfile u_rf (
    .clk, .rst,
    .ra1(d_dec.rs1), .ra2(d_dec.rs2), .rd1(d_rs1_val), .rd2(d_rs2_val),
    .we(w_we), .wa(memwb.rd), .wd(w_data)
  );

  assign md_pending = (idex.valid && (idex.dec.mul_op || idex.dec.div_op)) || md_busy;
  assign md_rd_now  = md_busy ? md_rd : (idex.dec.rd_we ? idex.dec.rd : 5'd0);

  hazard_unit u_hz (
    .d_valid(ifid.valid), .d_rs1(d_dec.rs1), .d_rs2(d_dec.rs2),
    .d_rs1_used(d_dec.rs1_used), .d_rs2_used(d_dec.rs2_used),
    .e_valid(idex.valid), .e_is_load(idex.dec.is_load),
    .e_rd(idex.dec.rd_we ? idex.dec.rd : 5'd0),
    .e_rs1(idex.dec.rs1_used ? idex.dec.rs1 : 5'd0),
    .e_rs2(idex.dec.rs2_used ? idex.dec.rs2 : 5'd0),
    .md_pending, .md_rd(md_rd_now), .mul_stall, .div_stall,
    .m_valid(ex_valid), .m_rd_we(exmem.rd_we), .m_rd(exmem.rd),
    .m_is_load(exmem.is_load), .m_from_md(ex_from_md),
    .w_valid(memwb.valid), .w_rd_we(memwb.rd_we), .w_rd(memwb.rd), .w_is_load(memwb.is_load),
    .stall, .load_use, .md_dep, .fwd_a, .fwd_b
  );

  always_ff @(posedge clk) begin
    if (rst || redirect || stall) idex.valid <= 1'b0;
    else                          idex.valid <= ifid.valid;
    if (!stall) begin
      idex.pc      <= ifid.pc;
      idex.dec     <= d_dec;
      idex.rs1_val <= d_rs1_val;
      idex.rs2_val <= d_rs2_val;
      idex.pred    <= ifid.pred;
    end
  end

  // ------------------------------------------------------------------ E
  assign e_go = idex.valid && !redirect;

  always_comb begin
    unique case (fwd_a)
      2'd1:    opa = exmem.alu_result;
      2'd2:    opa = memwb.result;
      default: opa = idex.rs1_val;
    endcase
    unique case (fwd_b)
      2'd1:    opb = exmem.alu_result;
      2'd2:    opb = memwb.result;
      default: opb = idex.rs2_val;
    endcase
    alu_a = idex.dec.op1_zero ? 32'd0 : (idex.dec.op1_pc ? idex.pc : opa);
    alu_b = idex.dec.op2_imm ? idex.dec.imm : opb;
  end

  alu u_alu (.op(idex.dec.alu_op), .a(alu_a), .b(alu_b), .y(alu_y));

  bru u_bru (
    .pc(idex.pc), .rs1(opa), .rs2(opb), .imm(idex.dec.imm), .funct3(idex.dec.funct3),
    .is_branch(idex.dec.is_branch), .is_jal(idex.dec.is_jal), .is_jalr(idex.dec.is_jalr),
    .taken(br_taken), .tkn_pc, .seq_pc
  );

  agu u_agu (
    .rs1(opa), .imm(idex.dec.imm), .store_data(opb), .funct3(idex.dec.funct3),
    .is_store(idex.dec.is_store), .addr(agu_addr), .wdata(agu_wdata), .wstrb(agu_wstrb)
  );

  if (ENABLE_M) begin : g_m
    mul_unit #(.MUL_TYPE(MUL_TYPE)) u_mul (
      .clk, .rst, .valid_in(e_go && idex.dec.mul_op), .funct3(idex.dec.funct3),
      .rs1(opa), .rs2(opb), .stall_out(mul_stall), .valid_out(mul_valid),
      .product_L, .product_H
    );

    div_unit u_div (
      .clk, .rst, .valid_in(e_go && idex.dec.div_op), .signed_div(~idex.dec.funct3[0]),
      .rs1(opa), .rs2(opb), .stall_out(div_stall), .valid_out(div_valid),
      .quotient, .reminder
    );
  end else begin : g_no_m
    // without the M extension the execute stage has only its ALU path
    assign mul_stall = 1'b0;
    assign mul_valid = 1'b0;
    assign div_stall = 1'b0;
    assign div_valid = 1'b0;
    assign product_L = '0;
    assign product_H = '0;
    assign quotient  = '0;
    assign reminder  = '0;
  end

  fork_join_control u_fj (
    .clk, .rst, .flush(redirect), .id_valid(idex.valid),
    .mul_op(idex.dec.mul_op), .div_op(idex.dec.div_op),
    .mul_valid, .div_valid, .ex_valid, .ex_from_md
  );

  // bookkeeping of the multi-cycle operation in execute
  always_ff @(posedge clk) begin
    if (rst) begin
      md_busy <= 1'b0;
      md_rd   <= '0;
      md_sel  <= RES_ALU;
      md_pc   <= '0;
      md_mispredict <= 1'b0;
    end else if (e_go && (idex.dec.mul_op || idex.dec.div_op)) begin
      md_busy <= 1'b1;
      md_rd   <= idex.dec.rd_we ? idex.dec.rd : 5'd0;
      md_pc   <= idex.pc;
      md_mispredict <= mispredict;   // a stale prediction on a mul/div pc
      if (idex.dec.mul_op) md_sel <= (idex.dec.funct3 == 3'b000) ? RES_MUL_L : RES_MUL_H;
      else                 md_sel <= idex.dec.funct3[1] ? RES_DIV_R : RES_DIV_Q;
    end else if (mul_valid || div_valid) begin
      md_busy <= 1'b0;
    end
  end

  // prediction check
  always_comb begin
    actual_next = br_taken ? tkn_pc : seq_pc;
    pred_next   = idex.pred.taken ? idex.pred.target : seq_pc;
    mispredict  = (actual_next != pred_next);
  end

  // data bus (synchronous memory: address and write in execute)
  assign d_req   = e_go && (idex.dec.is_load || idex.dec.is_store);
  assign d_we    = e_go && idex.dec.is_store;
  assign d_addr  = agu_addr;
  assign d_wdata = agu_wdata;
  assign d_wstrb = e_go ? agu_wstrb : 4'b0000;

  // EX/MEM register (its valid bit is ex_valid from fork_join_control)
  always_ff @(posedge clk) begin
    if (mul_valid || div_valid) begin
      exmem            <= '0;
      exmem.pc         <= md_pc;
      exmem.rd         <= md_rd;
      exmem.rd_we      <= (md_rd != 5'd0);
      exmem.res_sel    <= md_sel;
      exmem.mispredict <= md_mispredict;
      exmem.seq_pc     <= md_pc + 32'd4;
    end else begin
      exmem.pc         <= idex.pc;
      exmem.rd         <= idex.dec.rd;
      exmem.rd_we      <= idex.dec.rd_we;
      exmem.is_load    <= idex.dec.is_load;
      exmem.funct3     <= idex.dec.funct3;
      exmem.addr_lo    <= agu_addr[1:0];
      exmem.alu_result <= (idex.dec.is_jal || idex.dec.is_jalr) ? seq_pc : alu_y;
      exmem.res_sel    <= RES_ALU;
      exmem.mispredict <= mispredict;
      exmem.is_branch  <= idex.dec.is_branch;
      exmem.is_jump    <= idex.dec.is_jal || idex.dec.is_jalr;
      exmem.taken      <= br_taken;
      exmem.tkn_pc     <= tkn_pc;
      exmem.seq_pc     <= seq_pc;
      exmem.pht_idx    <= idex.pred.pht_idx;
    end
  end

  // ------------------------------------------------------------------ M
  assign redirect    = ex_valid && exmem.mispredict;
  assign redirect_pc = exmem.taken ? exmem.tkn_pc : exmem.seq_pc;

  data_aligner u_align (.rdata(d_rdata), .addr(exmem.addr_lo), .funct3(exmem.funct3),
                        .load_data(m_load_data));

  always_comb begin
    unique case (exmem.res_sel)
      RES_MUL_L: m_result = product_L;
      RES_MUL_H: m_result = product_H;
      RES_DIV_Q: m_result = quotient;
      RES_DIV_R: m_result = reminder;
      default:   m_result = exmem.alu_result;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) memwb.valid <= 1'b0;
    else     memwb.valid <= ex_valid;
    memwb.pc        <= exmem.pc;
    memwb.rd        <= exmem.rd;
    memwb.rd_we     <= exmem.rd_we;
    memwb.is_load   <= exmem.is_load;
    memwb.load_data <= m_load_data;
    memwb.result    <= m_result;
  end

  // ------------------------------------------------------------------ W
  assign w_we   = memwb.valid && memwb.rd_we;
  assign w_data = memwb.is_load ? memwb.load_data : memwb.result;

  assign retire_valid = memwb.valid;
  assign retire_pc    = memwb.pc;
endmodule
