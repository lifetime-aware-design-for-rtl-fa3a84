// rv_tb_pkg: testbench support for the FlexiBits core and SoC.
//
// Holds (1) a tiny RV32E assembler (functions returning instruction words),
// (2) rv_iss, an instruction-set reference model written from the RISC-V
// specification, independent of the RTL, that executes one instruction per
// call of step(), and (3) the reference cycle count of one instruction on
// the FlexiBits state machine with a memory that acknowledges one cycle
// after a request, and (4) a random program generator used by the core and
// SoC testbenches.
package rv_tb_pkg;

  // ---------------- assembler ----------------
  function automatic logic [31:0] r_type(int f7, int rs2, int rs1, int f3, int rd, int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] i_type(int imm, int rs1, int f3, int rd, int opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] s_type(int imm, int rs2, int rs1, int f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(int off, int rs2, int rs1, int f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] u_type(int imm20, int rd, int opc);
    return {20'(imm20), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] j_type(int off, int rd);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction

  function automatic logic [31:0] ADDI(int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 7'h13); endfunction
  function automatic logic [31:0] ANDI(int rd, int rs1, int imm); return i_type(imm, rs1, 7, rd, 7'h13); endfunction
  function automatic logic [31:0] SLLI(int rd, int rs1, int sh);  return i_type(sh, rs1, 1, rd, 7'h13); endfunction
  function automatic logic [31:0] SRLI(int rd, int rs1, int sh);  return i_type(sh, rs1, 5, rd, 7'h13); endfunction
  function automatic logic [31:0] ADD(int rd, int rs1, int rs2);  return r_type(0, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic logic [31:0] SUB(int rd, int rs1, int rs2);  return r_type(32, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic logic [31:0] SLT(int rd, int rs1, int rs2);  return r_type(0, rs2, rs1, 2, rd, 7'h33); endfunction
  function automatic logic [31:0] LUI(int rd, int imm20);         return u_type(imm20, rd, 7'h37); endfunction
  function automatic logic [31:0] AUIPC(int rd, int imm20);       return u_type(imm20, rd, 7'h17); endfunction
  function automatic logic [31:0] LW(int rd, int rs1, int imm);   return i_type(imm, rs1, 2, rd, 7'h03); endfunction
  function automatic logic [31:0] LBU(int rd, int rs1, int imm);  return i_type(imm, rs1, 4, rd, 7'h03); endfunction
  function automatic logic [31:0] SW(int rs2, int rs1, int imm);  return s_type(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] SB(int rs2, int rs1, int imm);  return s_type(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] BEQ(int rs1, int rs2, int off); return b_type(off, rs2, rs1, 0); endfunction
  function automatic logic [31:0] BNE(int rs1, int rs2, int off); return b_type(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] BLT(int rs1, int rs2, int off); return b_type(off, rs2, rs1, 4); endfunction
  function automatic logic [31:0] BGE(int rs1, int rs2, int off); return b_type(off, rs2, rs1, 5); endfunction
  function automatic logic [31:0] BLTU(int rs1, int rs2, int off); return b_type(off, rs2, rs1, 6); endfunction
  function automatic logic [31:0] JAL(int rd, int off);           return j_type(off, rd); endfunction
  function automatic logic [31:0] JALR(int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 7'h67); endfunction
  function automatic logic [31:0] CSRRW(int rd, int csr, int rs1); return i_type(csr, rs1, 1, rd, 7'h73); endfunction
  function automatic logic [31:0] CSRRS(int rd, int csr, int rs1); return i_type(csr, rs1, 2, rd, 7'h73); endfunction
  function automatic logic [31:0] CSRRC(int rd, int csr, int rs1); return i_type(csr, rs1, 3, rd, 7'h73); endfunction
  function automatic logic [31:0] CSRRWI(int rd, int csr, int u);  return i_type(csr, u, 5, rd, 7'h73); endfunction
  function automatic logic [31:0] ECALL();  return 32'h0000_0073; endfunction
  function automatic logic [31:0] EBREAK(); return 32'h0010_0073; endfunction
  function automatic logic [31:0] MRET();   return 32'h3020_0073; endfunction

  // ---------------- reference model ----------------
  class rv_iss;
    logic [31:0] x[16];
    logic [31:0] pc;
    logic [31:0] mem[int unsigned];   // word-addressed (byte address >> 2)
    logic [31:0] mscratch, mtvec, mepc, mcause;
    // classification of the last executed instruction
    bit two_stage, mem_op, is_shift;
    int unsigned shamt;

    function new();
      foreach (x[i]) x[i] = '0;
      pc = 0; mscratch = 0; mtvec = 0; mepc = 0; mcause = 0;
    endfunction

    function logic [31:0] rd_word(logic [31:0] a);
      if (mem.exists(a >> 2)) return mem[a >> 2];
      return '0;
    endfunction

    function void wr_word(logic [31:0] a, logic [31:0] d, logic [3:0] sel);
      logic [31:0] w = rd_word(a);
      for (int b = 0; b < 4; b++) if (sel[b]) w[8*b +: 8] = d[8*b +: 8];
      mem[a >> 2] = w;
    endfunction

    function logic [31:0] csr_rd(logic [11:0] a);
      case (a)
        12'h340: return mscratch;
        12'h305: return mtvec;
        12'h341: return mepc;
        12'h342: return mcause;
        default: return '0;
      endcase
    endfunction

    function void csr_wr(logic [11:0] a, logic [31:0] v);
      case (a)
        12'h340: mscratch = v;
        12'h305: mtvec = v;
        12'h341: mepc = v;
        12'h342: mcause = v;
        default: ;
      endcase
    endfunction

    function void step();
      logic [31:0] ins = rd_word(pc);
      logic [6:0]  opc = ins[6:0];
      logic [2:0]  f3 = ins[14:12];
      int          rd = ins[10:7], rs1 = ins[18:15], rs2 = ins[23:20];
      logic [31:0] a = x[rs1], b = x[rs2];
      logic [31:0] ii = {{20{ins[31]}}, ins[31:20]};
      logic [31:0] si = {{20{ins[31]}}, ins[31:25], ins[11:7]};
      logic [31:0] bi = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
      logic [31:0] ui = {ins[31:12], 12'b0};
      logic [31:0] ji = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};
      logic [31:0] res = '0, npc = pc + 4, op2, ea, w;
      bit          wr = 0;
      two_stage = 0; mem_op = 0; is_shift = 0; shamt = 0;
      case (opc)
        7'h37: begin res = ui; wr = 1; end
        7'h17: begin res = pc + ui; wr = 1; end
        7'h6f: begin res = pc + 4; wr = 1; npc = pc + ji; two_stage = 1; end
        7'h67: begin res = pc + 4; wr = 1; npc = (a + ii) & ~32'd1; two_stage = 1; end
        7'h63: begin
          bit t;
          case (f3)
            0: t = (a == b);
            1: t = (a != b);
            4: t = ($signed(a) < $signed(b));
            5: t = ($signed(a) >= $signed(b));
            6: t = (a < b);
            7: t = (a >= b);
            default: t = 0;
          endcase
          if (t) npc = pc + bi;
          two_stage = 1;
        end
        7'h03: begin
          ea = a + ii; w = rd_word(ea) >> (8 * ea[1:0]);
          case (f3)
            0: res = {{24{w[7]}}, w[7:0]};
            1: res = {{16{w[15]}}, w[15:0]};
            4: res = {24'd0, w[7:0]};
            5: res = {16'd0, w[15:0]};
            default: res = rd_word(ea);
          endcase
          wr = 1; two_stage = 1; mem_op = 1;
        end
        7'h23: begin
          ea = a + si;
          case (f3)
            0: wr_word(ea, {4{b[7:0]}}, 4'b0001 << ea[1:0]);
            1: wr_word(ea, {2{b[15:0]}}, ea[1] ? 4'b1100 : 4'b0011);
            default: wr_word(ea, b, 4'b1111);
          endcase
          two_stage = 1; mem_op = 1;
        end
        7'h13, 7'h33: begin
          op2 = (opc == 7'h13) ? ii : b;
          wr = 1;
          case (f3)
            0: res = (opc == 7'h33 && ins[30]) ? a - op2 : a + op2;
            1: begin res = a << op2[4:0]; two_stage = 1; is_shift = 1; shamt = op2[4:0]; end
            2: begin res = {31'd0, $signed(a) < $signed(op2)}; two_stage = 1; end
            3: begin res = {31'd0, a < op2}; two_stage = 1; end
            4: res = a ^ op2;
            5: begin
              res = ins[30] ? 32'($signed(a) >>> op2[4:0]) : a >> op2[4:0];
              two_stage = 1; is_shift = 1; shamt = op2[4:0];
            end
            6: res = a | op2;
            7: res = a & op2;
          endcase
        end
        7'h73: begin
          if (f3 == 0) begin
            if (ins[31:20] == 12'h000 || ins[31:20] == 12'h001) begin
              mepc = pc; mcause = (ins[31:20] == 12'h000) ? 32'd11 : 32'd3; npc = mtvec;
            end else if (ins[31:20] == 12'h302) npc = mepc;
          end else begin
            logic [31:0] old = csr_rd(ins[31:20]);
            logic [31:0] src = f3[2] ? {27'd0, ins[19:15]} : a;
            res = old; wr = 1;
            case (f3[1:0])
              1: csr_wr(ins[31:20], src);
              2: csr_wr(ins[31:20], old | src);
              3: csr_wr(ins[31:20], old & ~src);
              default: ;
            endcase
          end
        end
        default: ;
      endcase
      if (wr && rd != 0) x[rd] = res;
      pc = npc;
    endfunction
  endclass

  // Cycles from one retirement to the next on the FlexiBits state machine,
  // with a memory that acknowledges one cycle after the request.
  function automatic int unsigned ref_cycles(int unsigned w, bit two_stage, bit mem_op,
                                             bit is_shift, int unsigned shamt);
    int unsigned beats = 32 / w;
    int unsigned c = 2 + beats;          // fetch request + acknowledge, STAGE1
    int unsigned steps;
    if (two_stage) c += beats;           // STAGE2
    if (mem_op) c += 2;                  // data request + acknowledge
    if (is_shift) begin
      steps = (w == 1) ? shamt : (shamt / w + shamt % w);
      c += steps + 1;                    // shifting, then one cycle to leave SHIFT
    end
    return c;
  endfunction

  // ---------------- random program generator ----------------
  // Writes a random program to the word array p starting at word 0 and
  // returns the word index of the final self-loop. x15 holds ram_base and
  // is never overwritten; a trap handler that skips the trapping instruction
  // is placed at the end.
  function automatic int unsigned gen_program(ref logic [31:0] p[], input int unsigned n,
                                              input logic [31:0] ram_base);
    int unsigned k = 0;
    int unsigned handler;
    int unsigned csrs[4] = '{12'h340, 12'h305, 12'h341, 12'h342};
    bit          tgt[int unsigned];   // word indexes some branch or jump lands on
    // x15 = ram_base ; mtvec = handler (patched below)
    p[k++] = LUI(15, int'(ram_base[31:12]));
    p[k++] = ADDI(15, 15, int'(ram_base[11:0]));
    p[k++] = LUI(14, 0);        // patched: x14 = handler address
    p[k++] = ADDI(14, 14, 0);   // patched
    p[k++] = CSRRW(0, 12'h305, 14);
    for (int j = 0; j < 64; j++) p[k++] = SW(0, 15, 4 * j);    // clear the RAM window
    for (int j = 1; j < 15; j++) p[k++] = LUI(j, $urandom());
    for (int j = 1; j < 15; j++) p[k++] = ADDI(j, j, $urandom_range(0, 4095));
    for (int i = 0; i < n; i++) begin
      int rd  = $urandom_range(1, 14);
      int rs1 = $urandom_range(0, 14);
      int rs2 = $urandom_range(0, 14);
      int kind = $urandom_range(0, 15);
      case (kind)
        0, 1: p[k++] = i_type($urandom(), rs1, $urandom_range(0, 7) == 1 ? 0 :
                              $urandom_range(0, 7), rd, 7'h13);
        2:    p[k++] = i_type({$urandom_range(0, 1), 5'd0, 5'($urandom())}, rs1,
                              $urandom_range(0, 1) ? 1 : 5, rd, 7'h13);   // slli/srli/srai
        3, 4: begin
          int f3 = $urandom_range(0, 7);
          int f7 = ((f3 == 0 || f3 == 5) && $urandom_range(0, 1)) ? 32 : 0;
          p[k++] = r_type(f7, rs2, rs1, f3, rd, 7'h33);
        end
        5:    p[k++] = LUI(rd, $urandom());
        6:    p[k++] = AUIPC(rd, $urandom_range(0, 255));
        7, 8: begin  // load from the RAM window addressed by x15
          int f3 = $urandom_range(0, 5);
          int off;
          if (f3 == 3) f3 = 2;
          off = (f3 == 2) ? 4 * $urandom_range(0, 63) :
                (f3 == 1 || f3 == 5) ? 2 * $urandom_range(0, 127) : $urandom_range(0, 255);
          p[k++] = i_type(off, 15, f3, rd, 7'h03);
        end
        9, 10: begin
          int f3 = $urandom_range(0, 2);
          int off = (f3 == 2) ? 4 * $urandom_range(0, 63) :
                    (f3 == 1) ? 2 * $urandom_range(0, 127) : $urandom_range(0, 255);
          p[k++] = s_type(off, rs2, 15, f3);
        end
        11, 12: begin
          int f3s[6] = '{0, 1, 4, 5, 6, 7};
          int o = $urandom_range(1, 3);
          tgt[k + o] = 1;
          p[k++] = b_type(4 * o, rs2, rs1, f3s[$urandom_range(0, 5)]);
        end
        13: begin
          int o = $urandom_range(1, 3);
          tgt[k + o] = 1;
          p[k++] = JAL(rd, 4 * o);
        end
        14: begin
          // no branch may land on the JALR and skip the AUIPC that sets its base
          while (tgt.exists(k + 1)) p[k++] = ADDI(0, 0, 0);
          p[k++] = AUIPC(rd, 0);
          p[k++] = JALR($urandom_range(0, 14), rd, 8 + $urandom_range(0, 1));
          p[k++] = ADDI(rd, rd, 1);
        end
        default: begin
          case ($urandom_range(0, 3))
            0: p[k++] = ECALL();
            1: p[k++] = EBREAK();
            2: p[k++] = CSRRWI(rd, csrs[$urandom_range(0, 3) == 1 ? 0 : 0] , $urandom_range(0, 31));
            default: p[k++] = i_type(csrs[$urandom_range(0, 3) == 1 ? 2 : 0],
                                     rs1, $urandom_range(1, 3), rd, 7'h73);
          endcase
        end
      endcase
    end
    // pad so that forward branches/jumps at the end stay in the program
    for (int j = 0; j < 4; j++) p[k++] = ADDI(0, 0, 0);
    p[k] = JAL(0, 0);                           // final self-loop
    handler = k + 1;
    p[handler]     = CSRRS(13, 12'h341, 0);     // x13 = mepc
    p[handler + 1] = ADDI(13, 13, 4);
    p[handler + 2] = CSRRW(0, 12'h341, 13);     // mepc += 4
    p[handler + 3] = MRET();
    p[2] = LUI(14, int'((handler * 4 + 32'h800) >> 12));
    p[3] = ADDI(14, 14, int'(handler * 4) & 12'hfff);
    return k;
  endfunction

endpackage
