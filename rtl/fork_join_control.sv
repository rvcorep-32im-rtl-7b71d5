// fork_join_control: join point of the execute stage.
// The decode stage forks an instruction either to the single-cycle path
// (ALU/BRU/AGU) or, with mul_op/div_op, to the multi-cycle multiplier or
// divider. This block decides when a result is ready for the memory stage and
// registers that as ex_valid: one cycle after id_valid for a single-cycle
// instruction, and one cycle after mul_valid/div_valid for a multiplication or
// division (never one cycle after id_valid when mul_op/div_op is set).
// It also records which path produced the entry (ex_from_md) so the memory
// stage can pick the multiplier/divider output. A flush (memory-stage
// redirect) clears the entry; the flush input is this design's addition.
module fork_join_control (
  input  logic clk,
  input  logic rst,
  input  logic flush,
  input  logic id_valid,
  input  logic mul_op,
  input  logic div_op,
  input  logic mul_valid,
  input  logic div_valid,
  output logic ex_valid,
  output logic ex_from_md
);
  logic alu_done, md_done;
  assign alu_done = id_valid & ~mul_op & ~div_op;
  assign md_done  = mul_valid | div_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      ex_valid   <= 1'b0;
      ex_from_md <= 1'b0;
    end else begin
      ex_valid   <= ~flush & (alu_done | md_done);
      ex_from_md <= ~flush & md_done;
    end
  end

  // The single-cycle path and a finishing mul/div never join in one cycle:
  // decode is stalled while a multi-cycle operation is in execute.
  a_one_join: assert property (@(posedge clk) disable iff (rst) !(alu_done && md_done));
endmodule
