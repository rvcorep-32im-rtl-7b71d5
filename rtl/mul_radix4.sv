// mul_radix4: iterative radix-4 Booth multiplier (32x32 -> 64 bits).
// On valid_in the rs1 value is loaded into the multiplicand register (sign-
// or zero-extended to 33 bits by signed_rs1) and rs2 into the low half of the
// partial-product register PP. In each of the next 16 cycles Booth recoding
// of PP[1:0] and the previously shifted-out bit selects 0, +-multiplicand or
// +-2*multiplicand, the adder adds it to the upper half PP[63:32] and the
// whole PP register shifts right by two bits. One more cycle performs the
// sign correction: when rs2 is unsigned and its MSB is set, the signed Booth
// product is short by multiplicand*2^32, which is added here.
// Timing (as stated by the paper): stall_out is high for 17 cycles starting
// in the cycle valid_in is seen, valid_out is high in the 18th cycle, in which
// the final product is written; product_L/product_H then hold it until the
// next multiplication is loaded. The correction cycle is always spent, so the
// latency does not depend on the operands (the paper leaves that open).
// The upper accumulator is two bits wider than PP[63:32] so that Booth sums
// never overflow; this width is this design's choice.
module mul_radix4 (
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
  typedef enum logic [1:0] {S_IDLE, S_ITER, S_CORR} state_e;
  state_e             state;
  logic [3:0]         cnt;
  logic signed [35:0] multiplicand;   // 33-bit operand, sign-extended
  logic signed [35:0] pp_hi;          // PP[63:32] plus guard bits
  logic [31:0]        pp_lo;          // PP[31:0], holds the unused rs2 bits
  logic               prev;           // bit shifted out last (Booth "-1" bit)
  logic               corr;           // unsigned rs2 with MSB set
  logic signed [35:0] booth_pp;
  logic signed [35:0] sum;
  logic [63:0]        corrected;

  // Booth recoding of {PP[1], PP[0], prev}
  always_comb begin
    unique case ({pp_lo[1:0], prev})
      3'b001, 3'b010: booth_pp =  multiplicand;
      3'b011:         booth_pp =  multiplicand <<< 1;
      3'b100:         booth_pp = -(multiplicand <<< 1);
      3'b101, 3'b110: booth_pp = -multiplicand;
      default:        booth_pp = '0;
    endcase
    sum       = pp_hi + booth_pp;
    corrected = {pp_hi[31:0], pp_lo} + (corr ? {multiplicand[31:0], 32'd0} : 64'd0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      cnt   <= '0;
      pp_hi <= '0;
      pp_lo <= '0;
      prev  <= 1'b0;
      corr  <= 1'b0;
      multiplicand <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (valid_in) begin
          multiplicand <= 36'(signed'({signed_rs1 & rs1[31], rs1}));
          pp_hi        <= '0;
          pp_lo        <= rs2;
          prev         <= 1'b0;
          corr         <= ~signed_rs2 & rs2[31];
          cnt          <= '0;
          state        <= S_ITER;
        end
        S_ITER: begin
          pp_hi <= sum >>> 2;
          pp_lo <= {sum[1:0], pp_lo[31:2]};
          prev  <= pp_lo[1];
          cnt   <= cnt + 4'd1;
          if (cnt == 4'd15) state <= S_CORR;
        end
        S_CORR: begin
          pp_hi <= 36'(signed'(corrected[63:32]));
          pp_lo <= corrected[31:0];
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign stall_out = (state == S_IDLE && valid_in) || state == S_ITER;
  assign valid_out = (state == S_CORR);
  assign product_L = pp_lo;
  assign product_H = pp_hi[31:0];
endmodule
