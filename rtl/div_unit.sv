// div_unit: iterative radix-2 non-restoring divider for DIV, DIVU, REM, REMU.
// On valid_in the dividend (rs1) and divisor (rs2) are loaded as magnitudes
// (2's complement of negative operands when signed_div is set) and the signs
// of quotient and remainder are remembered. Each of the next 32 cycles shifts
// one dividend bit into the partial remainder and adds or subtracts the
// divisor depending on the sign of the partial remainder, shifting one bit
// into the partial quotient. The closing step restores a negative remainder
// and, for signed results, takes the 2's complement of quotient/remainder.
// Timing (as stated by the paper): with a zero dividend or divisor stall_out
// is high 2 cycles; otherwise 33 cycles, or 34 when a result must be negated.
// valid_out is high in the cycle after the last stall cycle, at the end of
// which quotient and reminder are written; they hold until the next division.
// Divide-by-zero and overflow follow the RISC-V M specification
// (quotient = all ones, remainder = dividend; -2^31/-1 = -2^31 rem 0).
module div_unit (
  input  logic        clk,
  input  logic        rst,
  input  logic        valid_in,
  input  logic        signed_div,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  output logic        stall_out,
  output logic        valid_out,
  output logic [31:0] quotient,
  output logic [31:0] reminder
);
  typedef enum logic [2:0] {S_IDLE, S_ITER, S_SIGN, S_ZERO, S_OUT} state_e;
  state_e             state;
  logic [4:0]         cnt;
  logic [31:0]        divisor;
  logic [31:0]        dividend;     // shifts left; receives quotient bits
  logic signed [33:0] part_rem;     // partial remainder
  logic               q_neg, r_neg;
  logic               fixed;        // results already final (sign or zero path)
  logic signed [33:0] shifted, next_rem, restored;
  logic [31:0]        rs1_mag, rs2_mag;

  always_comb begin
    rs1_mag  = (signed_div && rs1[31]) ? -rs1 : rs1;
    rs2_mag  = (signed_div && rs2[31]) ? -rs2 : rs2;
    shifted  = {part_rem[32:0], dividend[31]};
    next_rem = part_rem[33] ? shifted + 34'(divisor) : shifted - 34'(divisor);
    restored = part_rem[33] ? part_rem + 34'(divisor) : part_rem;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      cnt      <= '0;
      divisor  <= '0;
      dividend <= '0;
      part_rem <= '0;
      q_neg    <= 1'b0;
      r_neg    <= 1'b0;
      fixed    <= 1'b0;
      quotient <= '0;
      reminder <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (valid_in) begin
          divisor  <= rs2_mag;
          dividend <= rs1_mag;
          part_rem <= '0;
          q_neg    <= signed_div & (rs1[31] ^ rs2[31]);
          r_neg    <= signed_div & rs1[31];
          cnt      <= '0;
          fixed    <= 1'b0;
          if (rs2 == 32'd0) begin
            dividend <= '1;              // quotient all ones
            part_rem <= 34'(rs1);        // remainder = dividend
            state    <= S_ZERO;
          end else if (rs1 == 32'd0) begin
            dividend <= '0;
            part_rem <= '0;
            state    <= S_ZERO;
          end else begin
            state    <= S_ITER;
          end
        end
        S_ITER: begin
          part_rem <= next_rem;
          dividend <= {dividend[30:0], ~next_rem[33]};
          cnt      <= cnt + 5'd1;
          if (cnt == 5'd31) state <= (q_neg || r_neg) ? S_SIGN : S_OUT;
        end
        S_SIGN: begin
          dividend <= q_neg ? -dividend : dividend;
          part_rem <= r_neg ? -restored : restored;
          fixed    <= 1'b1;
          state    <= S_OUT;
        end
        S_ZERO: begin
          fixed <= 1'b1;
          state <= S_OUT;
        end
        S_OUT: begin
          quotient <= dividend;
          reminder <= fixed ? part_rem[31:0] : restored[31:0];
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign stall_out = (state == S_IDLE && valid_in) || state == S_ITER ||
                     state == S_SIGN || state == S_ZERO;
  assign valid_out = (state == S_OUT);
endmodule
