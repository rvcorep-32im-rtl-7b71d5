// gshare_bp: gshare branch predictor with a branch target buffer.
// Lookup: the address of the next fetch (lookup_pc) indexes the pattern
// history table (PHT) as pc[IDX+1:2] XOR global history, and the
// direct-mapped BTB by pc[BTB_IDX+1:2]; both are read synchronously, so the
// prediction for the instruction now in fetch (f_pc) is ready in the fetch
// cycle. A BTB hit with a matching tag predicts taken for a jump, and for a
// conditional branch when the 2-bit PHT counter is 2 or 3.
// Update (from the memory stage): the counter at the PHT index used for the
// prediction moves toward the outcome, the global history shifts in the
// outcome of each conditional branch, and taken branches/jumps write the BTB.
// Sizes follow the paper (8192 PHT entries, 512 BTB entries); the paper's
// pipelined organisation of the predictor is not reproduced, and the counter,
// history and BTB formats are this design's choices. Tables are given
// initial contents (counters weakly not-taken, BTB empty), as FPGA block RAM.
module gshare_bp
  import rv_pkg::*;
#(
  parameter int PHT_ENTRIES = 8192,
  parameter int BTB_ENTRIES = 512
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] lookup_pc,
  input  logic [31:0] f_pc,
  output pred_t       pred,
  input  logic        upd_valid,
  input  logic        upd_is_cond,
  input  logic        upd_taken,
  input  logic [31:0] upd_pc,
  input  logic [31:0] upd_target,
  input  logic [15:0] upd_pht_idx
);
  localparam int PI = $clog2(PHT_ENTRIES);
  localparam int BI = $clog2(BTB_ENTRIES);
  localparam int TW = 30 - BI;

  typedef struct packed {
    logic          valid;
    logic          is_cond;
    logic [TW-1:0] tag;
    logic [31:0]   target;
  } btb_t;

  logic [1:0]    pht [PHT_ENTRIES];
  btb_t          btb [BTB_ENTRIES];
  logic [PI-1:0] ghr;
  logic [PI-1:0] lookup_idx, pht_idx_q;
  logic [1:0]    ctr_q;
  btb_t          btb_q;
  logic [PI-1:0] upd_idx;
  logic [1:0]    upd_ctr;

  initial begin
    for (int i = 0; i < PHT_ENTRIES; i++) pht[i] = 2'b01;
    for (int i = 0; i < BTB_ENTRIES; i++) btb[i] = '0;
  end

  assign lookup_idx = lookup_pc[PI+1:2] ^ ghr;

  // PHT: synchronous read at lookup, read-modify-write of the counter at update
  assign upd_idx = upd_pht_idx[PI-1:0];
  always_comb begin
    upd_ctr = pht[upd_idx];
    if (upd_taken && upd_ctr != 2'b11)       upd_ctr = upd_ctr + 2'd1;
    else if (!upd_taken && upd_ctr != 2'b00) upd_ctr = upd_ctr - 2'd1;
  end

  always_ff @(posedge clk) begin
    ctr_q     <= pht[lookup_idx];
    pht_idx_q <= lookup_idx;
    if (upd_valid && upd_is_cond) pht[upd_idx] <= upd_ctr;
  end

  always_ff @(posedge clk) begin
    btb_q <= btb[lookup_pc[BI+1:2]];
    if (upd_valid && upd_taken)
      btb[upd_pc[BI+1:2]] <= '{valid: 1'b1, is_cond: upd_is_cond,
                               tag: upd_pc[31:BI+2], target: upd_target};
  end

  always_ff @(posedge clk) begin
    if (rst)                           ghr <= '0;
    else if (upd_valid && upd_is_cond) ghr <= {ghr[PI-2:0], upd_taken};
  end

  always_comb begin
    pred.taken   = btb_q.valid && btb_q.tag == f_pc[31:BI+2] && (!btb_q.is_cond || ctr_q[1]);
    pred.target  = btb_q.target;
    pred.pht_idx = 16'(pht_idx_q);
  end
endmodule
