// rv_tb_pkg: testbench support for the RV32IM pipeline: instruction encoders
// (a tiny assembler) and an instruction-set reference model (ISS) that runs
// a program on an architectural register file and memory, independently of
// the RTL, to produce the expected final state.
package rv_tb_pkg;

  // ---- encoders
  function automatic logic [31:0] r_type(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3, logic [4:0] rd, logic [6:0] op = 7'b0110011);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] i_type(int imm, logic [4:0] rs1, logic [2:0] f3, logic [4:0] rd, logic [6:0] op = 7'b0010011);
    return {12'(imm), rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] s_type(int imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], rs2, rs1, f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(int off, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], rs2, rs1, f3, i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] u_type(int imm20, logic [4:0] rd, logic [6:0] op);
    return {20'(imm20), rd, op};
  endfunction
  function automatic logic [31:0] j_type(int off, logic [4:0] rd);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [31:0] ADD (logic [4:0] rd, rs1, rs2); return r_type(0, rs2, rs1, 0, rd); endfunction
  function automatic logic [31:0] SUB (logic [4:0] rd, rs1, rs2); return r_type(7'h20, rs2, rs1, 0, rd); endfunction
  function automatic logic [31:0] AND_(logic [4:0] rd, rs1, rs2); return r_type(0, rs2, rs1, 7, rd); endfunction
  function automatic logic [31:0] MUL (logic [4:0] rd, rs1, rs2); return r_type(1, rs2, rs1, 0, rd); endfunction
  function automatic logic [31:0] DIV (logic [4:0] rd, rs1, rs2); return r_type(1, rs2, rs1, 4, rd); endfunction
  function automatic logic [31:0] ADDI(logic [4:0] rd, rs1, int imm); return i_type(imm, rs1, 0, rd); endfunction
  function automatic logic [31:0] LW  (logic [4:0] rd, rs1, int imm); return i_type(imm, rs1, 2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SW  (logic [4:0] rs2, rs1, int imm); return s_type(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] BNE (logic [4:0] rs1, rs2, int off); return b_type(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] JAL (logic [4:0] rd, int off); return j_type(off, rd); endfunction
  function automatic logic [31:0] LUI (logic [4:0] rd, int imm20); return u_type(imm20, rd, 7'b0110111); endfunction
  localparam logic [31:0] NOP = 32'h0000_0013;

  // ---- reference model
  class iss;
    logic [31:0] x [32];
    logic [31:0] pc;
    logic [31:0] imem [int];
    logic [7:0]  dmem [int];
    int unsigned n_mul, n_div, n_load, n_branch, n_retired;
    logic [31:0] dmem_mask;
    bit          no_m;        // model a core built without the M extension

    function new(logic [31:0] mask);
      foreach (x[i]) x[i] = 0;
      pc = 0; dmem_mask = mask; no_m = 0;
    endfunction

    function logic [31:0] rd32(logic [31:0] a);
      logic [31:0] v;
      for (int k = 0; k < 4; k++) begin
        int ad = int'((a & dmem_mask & ~32'd3) + 32'(k));
        v[8*k +: 8] = dmem.exists(ad) ? dmem[ad] : 8'h00;
      end
      return v;
    endfunction

    // Executes one instruction; returns 0 when the instruction jumps to itself.
    function bit step();
      logic [31:0] in, a, b, res, ni, imm_i, imm_s, imm_b, imm_j;
      logic [6:0] op; logic [2:0] f3; logic [4:0] rd; logic we;
      in = imem.exists(int'(pc >> 2)) ? imem[int'(pc >> 2)] : 32'h13;
      op = in[6:0]; f3 = in[14:12]; rd = in[11:7];
      a = x[in[19:15]]; b = x[in[24:20]];
      imm_i = {{20{in[31]}}, in[31:20]};
      imm_s = {{20{in[31]}}, in[31:25], in[11:7]};
      imm_b = {{19{in[31]}}, in[31], in[7], in[30:25], in[11:8], 1'b0};
      imm_j = {{11{in[31]}}, in[31], in[19:12], in[20], in[30:21], 1'b0};
      ni = pc + 4; we = 0; res = 0;
      case (op)
        7'b0110111: begin we = 1; res = {in[31:12], 12'd0}; end
        7'b0010111: begin we = 1; res = pc + {in[31:12], 12'd0}; end
        7'b1101111: begin we = 1; res = pc + 4; ni = pc + imm_j; n_branch++; end
        7'b1100111: begin we = 1; res = pc + 4; ni = (a + imm_i) & ~32'd1; n_branch++; end
        7'b1100011: begin
          bit t;
          case (f3)
            0: t = a == b; 1: t = a != b; 4: t = $signed(a) < $signed(b);
            5: t = $signed(a) >= $signed(b); 6: t = a < b; 7: t = a >= b; default: t = 0;
          endcase
          if (t) ni = pc + imm_b;
          n_branch++;
        end
        7'b0000011: begin
          logic [31:0] ad, w, sh; ad = a + imm_i; w = rd32(ad); sh = w >> (8 * ad[1:0]);
          we = 1; n_load++;
          if (ad[31]) w = 0;              // I/O space reads as idle devices
          sh = w >> (8 * ad[1:0]);
          case (f3)
            0: res = {{24{sh[7]}}, sh[7:0]}; 1: res = {{16{sh[15]}}, sh[15:0]};
            4: res = {24'd0, sh[7:0]}; 5: res = {16'd0, sh[15:0]}; default: res = w;
          endcase
        end
        7'b0100011: begin
          logic [31:0] ad; int nb, base; ad = a + imm_s;
          nb = (ad[31]) ? 0 : (f3 == 0) ? 1 : (f3 == 1) ? 2 : 4;   // I/O writes not kept
          base = int'(ad & dmem_mask & ~32'(nb - 1));
          for (int k = 0; k < nb; k++) dmem[base + k] = b[8*k +: 8];
        end
        7'b0010011, 7'b0110011: begin
          logic [31:0] o2; logic alt;
          o2 = (op == 7'b0010011) ? imm_i : b;
          alt = in[30] && (op == 7'b0110011 || f3 == 5);
          we = 1;
          if (op == 7'b0110011 && in[31:25] == 7'd1) begin
            logic signed [65:0] sa, sb; logic [63:0] p;
            case (f3)
              0, 1: begin sa = 66'(signed'(a)); sb = 66'(signed'(b)); end
              2: begin sa = 66'(signed'(a)); sb = 66'(b); end
              default: begin sa = 66'(a); sb = 66'(b); end
            endcase
            p = 64'(sa * sb);
            case (f3)
              0: res = p[31:0]; 1, 2, 3: res = p[63:32];
              4: res = (b == 0) ? '1 : (a == 32'h8000_0000 && b == '1) ? a : 32'($signed(a) / $signed(b));
              5: res = (b == 0) ? '1 : a / b;
              6: res = (b == 0) ? a : (a == 32'h8000_0000 && b == '1) ? 0 : 32'($signed(a) % $signed(b));
              default: res = (b == 0) ? a : a % b;
            endcase
            if (f3 < 4) n_mul++; else n_div++;
            if (no_m) we = 0;   // RV32I build: executes as a no-op
          end else begin
            case (f3)
              0: res = (alt && op == 7'b0110011) ? a - o2 : a + o2;
              1: res = a << o2[4:0];
              2: res = ($signed(a) < $signed(o2)) ? 1 : 0;
              3: res = (a < o2) ? 1 : 0;
              4: res = a ^ o2;
              5: res = alt ? 32'($signed(a) >>> o2[4:0]) : a >> o2[4:0];
              6: res = a | o2;
              default: res = a & o2;
            endcase
          end
        end
        default: ;
      endcase
      if (we && rd != 0) x[rd] = res;
      n_retired++;
      if (ni == pc) return 0;
      pc = ni;
      return 1;
    endfunction
  endclass

  // ---- random program generator
  // Builds a program of blocks of random ALU, M-extension, load/store and
  // forward-branch instructions with dense register dependencies, plus a
  // counted loop, ending in a jump-to-self. Memory accesses use x31 as a base
  // pointing into DMEM.
  function automatic void gen_program(ref logic [31:0] prog [$], input int n_blocks, input int seed);
    int s = seed;
    void'($urandom(s));
    prog.delete();
    prog.push_back(LUI(31, 1));            // x31 = 0x1000, data base
    for (int r = 1; r < 8; r++) prog.push_back(ADDI(5'(r), 0, $urandom_range(0, 4095) - 2048));
    prog.push_back(LUI(8, 32'h80000));     // x8 = 0x8000_0000
    prog.push_back(ADDI(9, 0, -1));
    for (int blk = 0; blk < n_blocks; blk++) begin
      int kind = $urandom_range(0, 9);
      logic [4:0] rd = 5'($urandom_range(1, 12)), r1 = 5'($urandom_range(0, 12)), r2 = 5'($urandom_range(0, 12));
      logic [2:0] f3 = 3'($urandom_range(0, 7));
      case (kind)
        0, 1: prog.push_back(r_type((f3 == 0 || f3 == 5) && $urandom_range(0, 1) ? 7'h20 : 7'h0, r2, r1, f3, rd));
        2:    prog.push_back(i_type(f3 == 5 ? ($urandom_range(0, 31) | ($urandom_range(0, 1) << 10)) :
                                    f3 == 1 ? $urandom_range(0, 31) : $urandom_range(0, 4095) - 2048, r1, f3, rd));
        3, 4: prog.push_back(r_type(7'd1, r2, r1, f3, rd));                        // M extension
        5: begin                                                                    // store then load
          int off = 4 * $urandom_range(0, 63);
          logic [2:0] sf = 3'($urandom_range(0, 2));
          logic [2:0] lf = 3'(($urandom_range(0, 4) + 0));
          if (lf == 3) lf = 2;
          prog.push_back(s_type(off + (sf == 0 ? $urandom_range(0, 3) : sf == 1 ? 2 * $urandom_range(0, 1) : 0), r2, 31, sf));
          prog.push_back(i_type(off + (lf[1:0] == 0 ? $urandom_range(0, 3) : lf[1:0] == 1 ? 2 * $urandom_range(0, 1) : 0), 31, lf, rd, 7'b0000011));
          if ($urandom_range(0, 1)) prog.push_back(ADD(5'($urandom_range(1, 12)), rd, r1));   // load-use
        end
        6: begin                                                                    // forward branch
          logic [2:0] bf; int skip = $urandom_range(1, 3);
          bf = 3'($urandom_range(0, 5)); if (bf >= 2) bf = bf + 2;
          prog.push_back(b_type(4 * (skip + 1), r2, r1, bf));
          for (int k = 0; k < skip; k++) prog.push_back(ADDI(5'($urandom_range(1, 12)), r1, $urandom_range(0, 100)));
        end
        7: begin                                                                    // counted loop with mul/div
          int n = $urandom_range(2, 6);
          prog.push_back(ADDI(13, 0, n));
          prog.push_back(r_type(7'd1, r2, r1, f3, rd));
          prog.push_back(ADD(r1 == 0 ? 5'd1 : r1, rd, r1));
          prog.push_back(ADDI(13, 13, -1));
          prog.push_back(BNE(13, 0, -12));
        end
        8: begin                                                                    // jal over one instruction, jalr
          prog.push_back(JAL(rd, 8));
          prog.push_back(ADDI(rd, rd, 1));
          prog.push_back(u_type($urandom_range(0, 1048575), 5'($urandom_range(1, 12)), $urandom_range(0, 1) ? 7'b0110111 : 7'b0010111));
        end
        default: begin                                                              // dependent M pair
          prog.push_back(r_type(7'd1, r2, r1, f3, rd));
          prog.push_back(r_type(7'd1, rd, rd, 3'($urandom_range(0, 7)), 5'($urandom_range(1, 12))));
        end
      endcase
    end
    prog.push_back(32'h0000_006f);          // jal x0, 0
  endfunction

endpackage
