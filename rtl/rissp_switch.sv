// rissp_switch: the switch of the modular execution unit (ModularEX).
//
// ModularEX holds one instruction hardware block per instruction of the
// subset SUBSET; block k implements the k-th set bit of SUBSET. The switch
// is a partial decoder: from the opcode, funct3 and instruction bit 30 alone
// it names the one instruction the word can be, and one comparison per
// built-in instruction (a loop standing for an N-item case statement)
// turns that into the block index 'sel' (log2 of the number of blocks wide). The outputs of the selected block -
// next_pc, the register file request and the data memory request - become
// the outputs of ModularEX. The three bundles a block hands over (decode,
// memory request, results) are selected by three separate multiplexers, so
// that the register file and data memory read paths (request out, data back
// in the same cycle) do not pass through one multiplexer twice, which would
// look like a loop.
// Full decoding is left to the blocks: the word is legal only when the
// partial decode names a built-in instruction and that block's own 'hit' is
// high. For anything else (this design's choice; the paper does not say
// what an unsupported instruction does) 'illegal' is raised and the word
// acts as a no-op: no register or memory write, next_pc = pc + 4.
// An immediate assertion checks that the partial and the full decodes
// agree. Purely combinational.
module rissp_switch
  import rissp_pkg::*;
#(
  parameter subset_t SUBSET = rissp_subsets_pkg::AF_DETECT,
  localparam int unsigned NBLK  = subset_size(SUBSET),
  localparam int unsigned SEL_W = (NBLK > 1) ? $clog2(NBLK) : 1
) (
  input  word_t             pc,
  input  word_t             insn,
  input  blk_dec_t          blk_dec [NBLK],
  input  dmem_req_t         blk_mem [NBLK],
  input  blk_out_t          blk_out [NBLK],
  output reg_addr_t         rs1_addr,
  output reg_addr_t         rs2_addr,
  output word_t             next_pc,
  output reg_addr_t         rd_addr,
  output word_t             rd_data,
  output dmem_req_t         dmem_req,
  output logic [SEL_W-1:0]  sel,
  output logic              illegal
);

  // Partial decode: which of the 37 instructions the word would be.
  function automatic logic pdecode(word_t w, output insn_e id);
    logic [2:0] f3 = f_funct3(w);
    logic       b30 = w[30];
    id = I_ADDI;
    case (f_opcode(w))
      OP_LUI:    id = I_LUI;
      OP_AUIPC:  id = I_AUIPC;
      OP_JAL:    id = I_JAL;
      OP_JALR:   id = I_JALR;
      OP_BRANCH: case (f3)
                   3'b000: id = I_BEQ;
                   3'b001: id = I_BNE;
                   3'b100: id = I_BLT;
                   3'b101: id = I_BGE;
                   3'b110: id = I_BLTU;
                   3'b111: id = I_BGEU;
                   default: return 1'b0;
                 endcase
      OP_LOAD:   case (f3)
                   3'b000: id = I_LB;
                   3'b001: id = I_LH;
                   3'b010: id = I_LW;
                   3'b100: id = I_LBU;
                   3'b101: id = I_LHU;
                   default: return 1'b0;
                 endcase
      OP_STORE:  case (f3)
                   3'b000: id = I_SB;
                   3'b001: id = I_SH;
                   3'b010: id = I_SW;
                   default: return 1'b0;
                 endcase
      OP_IMM:    case (f3)
                   3'b000: id = I_ADDI;
                   3'b001: id = I_SLLI;
                   3'b010: id = I_SLTI;
                   3'b011: id = I_SLTIU;
                   3'b100: id = I_XORI;
                   3'b101: id = b30 ? I_SRAI : I_SRLI;
                   3'b110: id = I_ORI;
                   default: id = I_ANDI;
                 endcase
      OP_REG:    case (f3)
                   3'b000: id = b30 ? I_SUB : I_ADD;
                   3'b001: id = I_SLL;
                   3'b010: id = I_SLT;
                   3'b011: id = I_SLTU;
                   3'b100: id = I_XOR;
                   3'b101: id = b30 ? I_SRA : I_SRL;
                   3'b110: id = I_OR;
                   default: id = I_AND;
                 endcase
      default:   return 1'b0;
    endcase
    return 1'b1;
  endfunction

  insn_e id;
  logic  known;
  logic  found;

  always_comb begin
    known = pdecode(insn, id);
    found = 1'b0;
    sel   = '0;
    for (int unsigned k = 0; k < NBLK; k++) begin
      if (known && (id == subset_nth(SUBSET, k))) begin
        found = 1'b1;
        sel   = SEL_W'(k);
      end
    end
  end

  always_comb begin
    illegal  = !(found && blk_dec[sel].hit);
    rs1_addr = found ? blk_dec[sel].rs1_addr : '0;
    rs2_addr = found ? blk_dec[sel].rs2_addr : '0;
  end

  // The switch's partial decode and the blocks' full decodes must agree: a
  // block may recognise a word only if the switch gives that word to it.
  // (So at most one block recognises any word.)
  always_comb begin
    for (int unsigned k = 0; k < NBLK; k++)
      if (blk_dec[k].hit)
        assert (found && (sel == SEL_W'(k)))
          else $error("rissp_switch: block %0d recognises a word decoded for another block", k);
  end

  assign dmem_req = illegal ? '0 : blk_mem[sel];

  always_comb begin
    next_pc = pc + 32'd4;
    rd_addr = '0;
    rd_data = '0;
    if (!illegal) begin
      next_pc = blk_out[sel].next_pc;
      rd_addr = blk_out[sel].rd_addr;
      rd_data = blk_out[sel].rd_data;
    end
  end

endmodule
