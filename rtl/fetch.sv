// fetch: instruction fetch stage.
// Holds the pc of the instruction in fetch and computes pc_next, which
// addresses the synchronous instruction memory and the branch predictor, so
// that the instruction word and its prediction arrive while pc holds that
// address. Priority of pc_next: reset -> RESET_PC; redirect from the memory
// stage (mispredicted branch/jump) -> redirect_pc; stall from decode -> pc
// (the same word is read again); else the predicted target or pc+4.
// The paper gives fetch with gshare prediction and the stall/redirect
// connections; the single-cycle next-pc loop is this design's choice.
module fetch
  import rv_pkg::*;
#(
  parameter logic [31:0] RESET_PC    = 32'h0000_0000,
  parameter int          PHT_ENTRIES = 8192,
  parameter int          BTB_ENTRIES = 512
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        stall,
  input  logic        redirect,
  input  logic [31:0] redirect_pc,
  output logic [31:0] pc_next,
  output logic [31:0] f_pc,
  output logic        f_valid,
  output pred_t       f_pred,
  // predictor update from the memory stage
  input  logic        upd_valid,
  input  logic        upd_is_cond,
  input  logic        upd_taken,
  input  logic [31:0] upd_pc,
  input  logic [31:0] upd_target,
  input  logic [15:0] upd_pht_idx
);
  pred_t pred;

  gshare_bp #(.PHT_ENTRIES(PHT_ENTRIES), .BTB_ENTRIES(BTB_ENTRIES)) u_bp (
    .clk, .rst, .lookup_pc(pc_next), .f_pc, .pred,
    .upd_valid, .upd_is_cond, .upd_taken, .upd_pc, .upd_target, .upd_pht_idx
  );

  always_comb begin
    if (rst)           pc_next = RESET_PC;
    else if (redirect) pc_next = redirect_pc;
    else if (stall)    pc_next = f_pc;
    else if (pred.taken) pc_next = pred.target;
    else               pc_next = f_pc + 32'd4;
  end

  // pc_next is RESET_PC during reset, so the word at RESET_PC is already
  // read when reset is released: the fetch slot is valid from that cycle on.
  always_ff @(posedge clk) f_pc <= pc_next;
  assign f_valid = ~rst;

  assign f_pred = pred;
endmodule
