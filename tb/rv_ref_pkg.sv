// rv_ref_pkg: testbench-side RV32E encoder and reference model.
//
// encode() builds the 32-bit word of any of the 37 base instructions from
// its fields. ref_exec() executes one instruction word on given register
// values and data memory word, written straight from the RISC-V
// unprivileged specification and independent of the RTL: it returns the next
// PC, the destination register and value (rd = 0 when nothing is written),
// and the data memory access (word address, byte masks, lane-placed write
// data). rand_insn() draws a random legal instruction of a given kind with
// random fields, keeping register numbers inside RV32E (x0-x15).
package rv_ref_pkg;
  import rissp_pkg::insn_e;
  import rissp_pkg::NUM_INSN;

  typedef logic [31:0] w32;

  typedef struct {
    bit         legal;
    w32         next_pc;
    logic [4:0] rd;
    w32         rd_data;
    logic [4:0] rs1;
    logic [4:0] rs2;
    w32         mem_addr;   // full byte address
    logic [3:0] rmask;
    logic [3:0] wmask;
    w32         wdata;
  } ref_res_t;

  function automatic w32 enc_r(int f7, int rs2, int rs1, int f3, int rd, int op);
    return {f7[6:0], rs2[4:0], rs1[4:0], f3[2:0], rd[4:0], op[6:0]};
  endfunction
  function automatic w32 enc_i(int imm, int rs1, int f3, int rd, int op);
    return {imm[11:0], rs1[4:0], f3[2:0], rd[4:0], op[6:0]};
  endfunction
  function automatic w32 enc_s(int imm, int rs2, int rs1, int f3, int op);
    return {imm[11:5], rs2[4:0], rs1[4:0], f3[2:0], imm[4:0], op[6:0]};
  endfunction
  function automatic w32 enc_b(int imm, int rs2, int rs1, int f3);
    return {imm[12], imm[10:5], rs2[4:0], rs1[4:0], f3[2:0], imm[4:1], imm[11], 7'h63};
  endfunction
  function automatic w32 enc_u(int imm20, int rd, int op);
    return {imm20[19:0], rd[4:0], op[6:0]};
  endfunction
  function automatic w32 enc_j(int imm, int rd);
    return {imm[20], imm[10:1], imm[11], imm[19:12], rd[4:0], 7'h6f};
  endfunction

  // imm: I/S immediate (12 bit signed), B offset (13 bit, even), J offset
  // (21 bit, even), U upper 20 bits, or the shift amount for slli/srli/srai.
  function automatic w32 encode(insn_e id, int rd, int rs1, int rs2, int imm);
    case (id)
      rissp_pkg::I_LUI:   return enc_u(imm, rd, 'h37);
      rissp_pkg::I_AUIPC: return enc_u(imm, rd, 'h17);
      rissp_pkg::I_JAL:   return enc_j(imm, rd);
      rissp_pkg::I_JALR:  return enc_i(imm, rs1, 0, rd, 'h67);
      rissp_pkg::I_BEQ:   return enc_b(imm, rs2, rs1, 0);
      rissp_pkg::I_BNE:   return enc_b(imm, rs2, rs1, 1);
      rissp_pkg::I_BLT:   return enc_b(imm, rs2, rs1, 4);
      rissp_pkg::I_BGE:   return enc_b(imm, rs2, rs1, 5);
      rissp_pkg::I_BLTU:  return enc_b(imm, rs2, rs1, 6);
      rissp_pkg::I_BGEU:  return enc_b(imm, rs2, rs1, 7);
      rissp_pkg::I_LB:    return enc_i(imm, rs1, 0, rd, 'h03);
      rissp_pkg::I_LH:    return enc_i(imm, rs1, 1, rd, 'h03);
      rissp_pkg::I_LW:    return enc_i(imm, rs1, 2, rd, 'h03);
      rissp_pkg::I_LBU:   return enc_i(imm, rs1, 4, rd, 'h03);
      rissp_pkg::I_LHU:   return enc_i(imm, rs1, 5, rd, 'h03);
      rissp_pkg::I_SB:    return enc_s(imm, rs2, rs1, 0, 'h23);
      rissp_pkg::I_SH:    return enc_s(imm, rs2, rs1, 1, 'h23);
      rissp_pkg::I_SW:    return enc_s(imm, rs2, rs1, 2, 'h23);
      rissp_pkg::I_ADDI:  return enc_i(imm, rs1, 0, rd, 'h13);
      rissp_pkg::I_SLTI:  return enc_i(imm, rs1, 2, rd, 'h13);
      rissp_pkg::I_SLTIU: return enc_i(imm, rs1, 3, rd, 'h13);
      rissp_pkg::I_XORI:  return enc_i(imm, rs1, 4, rd, 'h13);
      rissp_pkg::I_ORI:   return enc_i(imm, rs1, 6, rd, 'h13);
      rissp_pkg::I_ANDI:  return enc_i(imm, rs1, 7, rd, 'h13);
      rissp_pkg::I_SLLI:  return enc_i(imm & 31, rs1, 1, rd, 'h13);
      rissp_pkg::I_SRLI:  return enc_i(imm & 31, rs1, 5, rd, 'h13);
      rissp_pkg::I_SRAI:  return enc_i((imm & 31) | 'h400, rs1, 5, rd, 'h13);
      rissp_pkg::I_ADD:   return enc_r(0,    rs2, rs1, 0, rd, 'h33);
      rissp_pkg::I_SUB:   return enc_r('h20, rs2, rs1, 0, rd, 'h33);
      rissp_pkg::I_SLL:   return enc_r(0,    rs2, rs1, 1, rd, 'h33);
      rissp_pkg::I_SLT:   return enc_r(0,    rs2, rs1, 2, rd, 'h33);
      rissp_pkg::I_SLTU:  return enc_r(0,    rs2, rs1, 3, rd, 'h33);
      rissp_pkg::I_XOR:   return enc_r(0,    rs2, rs1, 4, rd, 'h33);
      rissp_pkg::I_SRL:   return enc_r(0,    rs2, rs1, 5, rd, 'h33);
      rissp_pkg::I_SRA:   return enc_r('h20, rs2, rs1, 5, rd, 'h33);
      rissp_pkg::I_OR:    return enc_r(0,    rs2, rs1, 6, rd, 'h33);
      default:            return enc_r(0,    rs2, rs1, 7, rd, 'h33);  // and
    endcase
  endfunction

  function automatic w32 sext(w32 v, int bits);
    return w32'($signed(v << (32 - bits)) >>> (32 - bits));
  endfunction

  // Reference semantics of one instruction word.
  function automatic ref_res_t ref_exec(w32 insn, w32 pc, w32 x1v, w32 x2v, w32 memword);
    ref_res_t   r;
    logic [6:0] op  = insn[6:0];
    logic [2:0] f3  = insn[14:12];
    logic [6:0] f7  = insn[31:25];
    w32 ii = sext({20'b0, insn[31:20]}, 12);
    w32 is = sext({20'b0, insn[31:25], insn[11:7]}, 12);
    w32 ib = sext({19'b0, insn[31], insn[7], insn[30:25], insn[11:8], 1'b0}, 13);
    w32 ij = sext({11'b0, insn[31], insn[19:12], insn[20], insn[30:21], 1'b0}, 21);
    w32 iu = {insn[31:12], 12'b0};
    w32 a, sh;
    int off;
    r = '{legal: 1'b1, next_pc: pc + 4, rd: 5'd0, rd_data: 0, rs1: 5'd0, rs2: 5'd0,
          mem_addr: 0, rmask: 4'd0, wmask: 4'd0, wdata: 0};
    case (op)
      7'h37: begin r.rd = insn[11:7]; r.rd_data = iu; end
      7'h17: begin r.rd = insn[11:7]; r.rd_data = pc + iu; end
      7'h6f: begin r.rd = insn[11:7]; r.rd_data = pc + 4; r.next_pc = pc + ij; end
      7'h67: begin
        r.legal = (f3 == 0);
        r.rs1 = insn[19:15]; r.rd = insn[11:7]; r.rd_data = pc + 4;
        r.next_pc = (x1v + ii) & ~32'd1;
      end
      7'h63: begin
        bit t;
        r.rs1 = insn[19:15]; r.rs2 = insn[24:20];
        case (f3)
          0: t = (x1v == x2v);
          1: t = (x1v != x2v);
          4: t = ($signed(x1v) < $signed(x2v));
          5: t = ($signed(x1v) >= $signed(x2v));
          6: t = (x1v < x2v);
          7: t = (x1v >= x2v);
          default: begin t = 0; r.legal = 0; end
        endcase
        if (t) r.next_pc = pc + ib;
      end
      7'h03: begin
        r.rs1 = insn[19:15]; r.rd = insn[11:7];
        a = x1v + ii; r.mem_addr = a; off = int'(a[1:0]);
        sh = memword >> (8 * off);
        case (f3)
          0: begin r.rmask = 4'b0001 << off; r.rd_data = sext(sh & 'hff, 8); end
          1: begin r.rmask = 4'b0011 << off; r.rd_data = sext(sh & 'hffff, 16); end
          2: begin r.rmask = 4'b1111 << off; r.rd_data = sh; end
          4: begin r.rmask = 4'b0001 << off; r.rd_data = sh & 'hff; end
          5: begin r.rmask = 4'b0011 << off; r.rd_data = sh & 'hffff; end
          default: r.legal = 0;
        endcase
      end
      7'h23: begin
        r.rs1 = insn[19:15]; r.rs2 = insn[24:20];
        a = x1v + is; r.mem_addr = a; off = int'(a[1:0]);
        r.wdata = x2v << (8 * off);
        case (f3)
          0: r.wmask = 4'b0001 << off;
          1: r.wmask = 4'b0011 << off;
          2: r.wmask = 4'b1111 << off;
          default: r.legal = 0;
        endcase
      end
      7'h13: begin
        r.rs1 = insn[19:15]; r.rd = insn[11:7];
        case (f3)
          0: r.rd_data = x1v + ii;
          2: r.rd_data = ($signed(x1v) < $signed(ii)) ? 1 : 0;
          3: r.rd_data = (x1v < ii) ? 1 : 0;
          4: r.rd_data = x1v ^ ii;
          6: r.rd_data = x1v | ii;
          7: r.rd_data = x1v & ii;
          1: begin r.legal = (f7 == 0); r.rd_data = x1v << insn[24:20]; end
          default: begin
            if (f7 == 0)          r.rd_data = x1v >> insn[24:20];
            else if (f7 == 'h20)  r.rd_data = w32'($signed(x1v) >>> insn[24:20]);
            else                  r.legal = 0;
          end
        endcase
      end
      7'h33: begin
        r.rs1 = insn[19:15]; r.rs2 = insn[24:20]; r.rd = insn[11:7];
        case ({f7, f3})
          {7'h00, 3'd0}: r.rd_data = x1v + x2v;
          {7'h20, 3'd0}: r.rd_data = x1v - x2v;
          {7'h00, 3'd1}: r.rd_data = x1v << x2v[4:0];
          {7'h00, 3'd2}: r.rd_data = ($signed(x1v) < $signed(x2v)) ? 1 : 0;
          {7'h00, 3'd3}: r.rd_data = (x1v < x2v) ? 1 : 0;
          {7'h00, 3'd4}: r.rd_data = x1v ^ x2v;
          {7'h00, 3'd5}: r.rd_data = x1v >> x2v[4:0];
          {7'h20, 3'd5}: r.rd_data = w32'($signed(x1v) >>> x2v[4:0]);
          {7'h00, 3'd6}: r.rd_data = x1v | x2v;
          {7'h00, 3'd7}: r.rd_data = x1v & x2v;
          default:       r.legal = 0;
        endcase
      end
      default: r.legal = 0;
    endcase
    if (!r.legal) begin
      r.next_pc = pc + 4; r.rd = 0; r.rd_data = 0; r.rmask = 0; r.wmask = 0;
    end
    if (r.rd == 0) r.rd_data = 0;
    return r;
  endfunction

  function automatic w32 rand_word();
    case ($urandom_range(0, 5))
      0: return 32'd0;
      1: return 32'hffff_ffff;
      2: return 32'h8000_0000 | ($urandom & 32'h7);
      3: return $urandom_range(0, 40);
      default: return $urandom;
    endcase
  endfunction

  // Random legal word of instruction id with registers from x0-x15.
  function automatic w32 rand_insn(insn_e id);
    int rd  = $urandom_range(0, 15);
    int rs1 = $urandom_range(0, 15);
    int rs2 = $urandom_range(0, 15);
    int imm;
    case (id)
      rissp_pkg::I_LUI, rissp_pkg::I_AUIPC: imm = int'($urandom & 'hfffff);
      rissp_pkg::I_JAL:  imm = int'($urandom & 'h1ffffe);
      rissp_pkg::I_BEQ, rissp_pkg::I_BNE, rissp_pkg::I_BLT, rissp_pkg::I_BGE,
      rissp_pkg::I_BLTU, rissp_pkg::I_BGEU: imm = int'($urandom & 'h1ffe);
      default: imm = int'($urandom & 'hfff);
    endcase
    return encode(id, rd, rs1, rs2, imm);
  endfunction

  // Which of the 37 instructions a word encodes, or -1 if none.
  function automatic int ref_which(w32 w);
    logic [2:0] f3 = w[14:12];
    logic [6:0] f7 = w[31:25];
    case (w[6:0])
      7'h37: return int'(rissp_pkg::I_LUI);
      7'h17: return int'(rissp_pkg::I_AUIPC);
      7'h6f: return int'(rissp_pkg::I_JAL);
      7'h67: return (f3 == 0) ? int'(rissp_pkg::I_JALR) : -1;
      7'h63: case (f3)
               0: return int'(rissp_pkg::I_BEQ);
               1: return int'(rissp_pkg::I_BNE);
               4: return int'(rissp_pkg::I_BLT);
               5: return int'(rissp_pkg::I_BGE);
               6: return int'(rissp_pkg::I_BLTU);
               7: return int'(rissp_pkg::I_BGEU);
               default: return -1;
             endcase
      7'h03: case (f3)
               0: return int'(rissp_pkg::I_LB);
               1: return int'(rissp_pkg::I_LH);
               2: return int'(rissp_pkg::I_LW);
               4: return int'(rissp_pkg::I_LBU);
               5: return int'(rissp_pkg::I_LHU);
               default: return -1;
             endcase
      7'h23: case (f3)
               0: return int'(rissp_pkg::I_SB);
               1: return int'(rissp_pkg::I_SH);
               2: return int'(rissp_pkg::I_SW);
               default: return -1;
             endcase
      7'h13: case (f3)
               0: return int'(rissp_pkg::I_ADDI);
               2: return int'(rissp_pkg::I_SLTI);
               3: return int'(rissp_pkg::I_SLTIU);
               4: return int'(rissp_pkg::I_XORI);
               6: return int'(rissp_pkg::I_ORI);
               7: return int'(rissp_pkg::I_ANDI);
               1: return (f7 == 0) ? int'(rissp_pkg::I_SLLI) : -1;
               default: return (f7 == 0) ? int'(rissp_pkg::I_SRLI) :
                                (f7 == 'h20) ? int'(rissp_pkg::I_SRAI) : -1;
             endcase
      7'h33: case ({f7, f3})
               {7'h00, 3'd0}: return int'(rissp_pkg::I_ADD);
               {7'h20, 3'd0}: return int'(rissp_pkg::I_SUB);
               {7'h00, 3'd1}: return int'(rissp_pkg::I_SLL);
               {7'h00, 3'd2}: return int'(rissp_pkg::I_SLT);
               {7'h00, 3'd3}: return int'(rissp_pkg::I_SLTU);
               {7'h00, 3'd4}: return int'(rissp_pkg::I_XOR);
               {7'h00, 3'd5}: return int'(rissp_pkg::I_SRL);
               {7'h20, 3'd5}: return int'(rissp_pkg::I_SRA);
               {7'h00, 3'd6}: return int'(rissp_pkg::I_OR);
               {7'h00, 3'd7}: return int'(rissp_pkg::I_AND);
               default:       return -1;
             endcase
      default: return -1;
    endcase
  endfunction

  // A word that is probably some other (or no) instruction: a random legal
  // word of a random instruction with, at times, one random bit flipped.
  function automatic w32 rand_other();
    w32 w = rand_insn(insn_e'($urandom_range(0, NUM_INSN - 1)));
    if ($urandom_range(0, 2) == 0) w[$urandom_range(0, 31)] ^= 1'b1;
    return w;
  endfunction

  // Instruction-set simulator of an RV32E core that supports only the
  // instructions in 'subset': any other word retires as a no-op, as the
  // processor under test is meant to do. Memories wrap at their sizes the
  // same way tb_memory does.
  class rv_iss;
    w32         regs [16];
    w32         pc;
    w32         imem [];
    w32         dmem [];
    logic [NUM_INSN-1:0] subset;

    function new(int imem_words, int dmem_words, logic [NUM_INSN-1:0] s);
      imem = new[imem_words];
      dmem = new[dmem_words];
      subset = s;
      reset();
    endfunction

    function void reset();
      foreach (regs[i]) regs[i] = 0;
      pc = 0;
    endfunction

    function int iidx(w32 a); return int'((a >> 2) % imem.size()); endfunction
    function int didx(w32 a); return int'((a >> 2) % dmem.size()); endfunction

    // Execute one instruction; returns what it did (legal = 0 for a word the
    // subset leaves out).
    function ref_res_t step();
      w32       insn = imem[iidx(pc)];
      int       which = ref_which(insn);
      w32       a, b, m;
      ref_res_t r;
      a = regs[insn[18:15]] & {32{insn[19:15] < 16}};
      b = regs[insn[23:20]] & {32{insn[24:20] < 16}};
      if (insn[19:15] == 0) a = 0;
      if (insn[24:20] == 0) b = 0;
      m = dmem[didx(a + ((insn[6:0] == 7'h03) ? sext({20'b0, insn[31:20]}, 12) : 0))];
      r = ref_exec(insn, pc, a, b, m);
      if (which < 0 || !subset[which]) begin
        r.legal = 0; r.next_pc = pc + 4; r.rd = 0; r.rd_data = 0; r.rmask = 0; r.wmask = 0;
      end
      if (r.rd != 0 && r.rd < 16) regs[r.rd[3:0]] = r.rd_data;
      for (int k = 0; k < 4; k++)
        if (r.wmask[k]) dmem[didx(r.mem_addr)][8*k +: 8] = r.wdata[8*k +: 8];
      pc = r.next_pc;
      return r;
    endfunction
  endclass

endpackage
