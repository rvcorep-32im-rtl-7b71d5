// mul_dsp: DSP-block multiplier (32x32 -> 64 bits) with the same interface as
// the radix-4 Booth multiplier.
// On valid_in, rs1 and rs2 are sign- or zero-extended to 33 bits (signed_rs1,
// signed_rs2) and registered into the multiplicand and multiplier registers;
// these input registers keep the forwarding paths out of the DSP. In the next
// cycle the 33x33 product is formed (a '*' that FPGA tools map onto DSP
// blocks) and stored into the PP register.
// Timing (as stated by the paper): stall_out is high for one cycle, the one
// in which valid_in is seen; valid_out is high in the second cycle, at the end
// of which PP is written. product_L/product_H hold PP until the next product.
module mul_dsp (
  input  logic        clk,
  input  logic        rst,
  input  logic        valid_in,
  input  logic        signed_rs1,
  input  logic        signed_rs2,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  output logic        stall_out,
  output logic        valid_out,
  output logic [31:0] product_L,
  output logic [31:0] product_H
);
  typedef enum logic {S_IDLE, S_CALC} state_e;
  state_e             state;
  logic signed [32:0] multiplicand;
  logic signed [32:0] multiplier;
  logic [63:0]        pp;
  logic signed [65:0] prod;

  assign prod = multiplicand * multiplier;

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= S_IDLE;
      multiplicand <= '0;
      multiplier   <= '0;
      pp           <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (valid_in) begin
          multiplicand <= {signed_rs1 & rs1[31], rs1};
          multiplier   <= {signed_rs2 & rs2[31], rs2};
          state        <= S_CALC;
        end
        S_CALC: begin
          pp    <= prod[63:0];
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign stall_out = (state == S_IDLE) && valid_in;
  assign valid_out = (state == S_CALC);
  assign product_L = pp[31:0];
  assign product_H = pp[63:32];
endmodule
