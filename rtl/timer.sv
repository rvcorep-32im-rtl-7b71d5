// timer: free-running 64-bit cycle counter of the evaluation SoC, cleared by
// reset and incremented every clock. Software reads it over the data bus to
// time benchmark runs. The paper only names a timer device; its width and
// register layout are this design's choices.
module timer (
  input  logic        clk,
  input  logic        rst,
  output logic [63:0] count
);
  always_ff @(posedge clk) begin
    if (rst) count <= '0;
    else     count <= count + 64'd1;
  end
endmodule
