// hazard_unit: stall and forwarding control of the RVCoreP-32IM pipeline.
// Stalls (hold fetch and decode, insert a bubble into execute):
//  * mul_stall / div_stall while a multi-cycle operation runs in execute;
//  * load-use: the decode instruction reads the rd of a load in execute or in
//    memory. Load data is not forwarded, so a dependent instruction directly
//    behind a load waits two cycles and reads the register file, which writes
//    through, while the load is in write back;
//  * mul/div dependency: the decode instruction reads the rd of a
//    multiplication/division still in execute. Those results are not on the
//    memory-stage forwarding path, so one extra cycle is spent and the value is
//    forwarded from write back.
// Forwarding into execute: from the memory stage only for single-cycle (ALU)
// results, from write back for any non-load result; otherwise the register
// value read in decode. The rules are the paper's; their encoding is this
// design's. Combinational.
module hazard_unit (
  // decode stage
  input  logic       d_valid,
  input  logic [4:0] d_rs1,
  input  logic [4:0] d_rs2,
  input  logic       d_rs1_used,
  input  logic       d_rs2_used,
  // execute stage (instruction in ID/EX) and pending mul/div
  input  logic       e_valid,
  input  logic       e_is_load,
  input  logic [4:0] e_rd,
  input  logic [4:0] e_rs1,
  input  logic [4:0] e_rs2,
  input  logic       md_pending,
  input  logic [4:0] md_rd,
  input  logic       mul_stall,
  input  logic       div_stall,
  // memory stage
  input  logic       m_valid,
  input  logic       m_rd_we,
  input  logic [4:0] m_rd,
  input  logic       m_is_load,
  input  logic       m_from_md,
  // write-back stage
  input  logic       w_valid,
  input  logic       w_rd_we,
  input  logic [4:0] w_rd,
  input  logic       w_is_load,
  // outputs
  output logic       stall,
  output logic       load_use,
  output logic       md_dep,
  output logic [1:0] fwd_a,      // 0: register file, 1: memory stage, 2: write back
  output logic [1:0] fwd_b
);
  function automatic logic reads(input logic [4:0] rd);
    return (rd != 5'd0) && ((d_rs1_used && d_rs1 == rd) || (d_rs2_used && d_rs2 == rd));
  endfunction

  function automatic logic [1:0] fwd(input logic [4:0] rs);
    if (rs != 5'd0 && m_valid && m_rd_we && !m_is_load && !m_from_md && m_rd == rs)
      return 2'd1;
    else if (rs != 5'd0 && w_valid && w_rd_we && !w_is_load && w_rd == rs)
      return 2'd2;
    else
      return 2'd0;
  endfunction

  always_comb begin
    load_use = d_valid && ((e_valid && e_is_load && reads(e_rd)) ||
                           (m_valid && m_is_load && m_rd_we && reads(m_rd)));
    md_dep   = d_valid && md_pending && reads(md_rd);
    stall    = mul_stall || div_stall || load_use || md_dep;
    fwd_a    = fwd(e_rs1);
    fwd_b    = fwd(e_rs2);
  end
endmodule
