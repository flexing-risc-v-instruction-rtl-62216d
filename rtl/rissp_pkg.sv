// rissp_pkg: types and constants shared by every part of the RISC-V
// instruction subset processor (RISSP).
//
// The processor executes a chosen subset of the 37 RV32I/E base instructions
// listed by type in the instruction-block table: B-type (6), R-type (10),
// I-type (15), S-type (3), U-type (2) and J-type (1). Each instruction has an
// identifier in insn_e; a subset is a bit mask over those identifiers
// (subset_t, bit n set = instruction n is built in).
//
// Bundles that every instruction block drives towards the rest of the core:
//   rf_req_t   - register file request: two read addresses, one destination
//                address and its data. A block that writes no register
//                drives rd_addr = x0; since x0 is hardwired to zero this
//                needs no separate write enable (this design's choice).
//   dmem_req_t - data memory request: byte address, write data already
//                placed in its byte lanes, write byte mask, read byte mask.
//   blk_dec_t  - what one block derives from the instruction word alone:
//                'hit' (its own full decode) and its source register numbers.
//   blk_out_t  - the results one block produces: next PC and register write.
//   A block's data memory request travels as a plain dmem_req_t. The three
//   are kept apart because they come from different stages of the same
//   cycle (word -> register read -> memory request -> memory data -> result);
//   one bundle for all of them would look like a combinational loop.
//   rvfi_t     - one retired instruction on the RISC-V Formal Interface.
// The field extraction and immediate helpers below follow the RISC-V
// unprivileged specification.
package rissp_pkg;

  localparam int unsigned XLEN     = 32;
  localparam int unsigned NUM_REGS = 16;   // RV32E
  localparam int unsigned NUM_INSN = 37;

  typedef logic [XLEN-1:0] word_t;
  typedef logic [4:0]      reg_addr_t;

  typedef enum logic [5:0] {
    I_LUI, I_AUIPC, I_JAL, I_JALR,
    I_BEQ, I_BNE, I_BLT, I_BGE, I_BLTU, I_BGEU,
    I_LB, I_LH, I_LW, I_LBU, I_LHU,
    I_SB, I_SH, I_SW,
    I_ADDI, I_SLTI, I_SLTIU, I_XORI, I_ORI, I_ANDI, I_SLLI, I_SRLI, I_SRAI,
    I_ADD, I_SUB, I_SLL, I_SLT, I_SLTU, I_XOR, I_SRL, I_SRA, I_OR, I_AND
  } insn_e;

  typedef logic [NUM_INSN-1:0] subset_t;

  typedef enum logic [2:0] {
    T_R, T_I, T_S, T_B, T_U, T_J
  } insn_type_e;

  // Major opcodes (instruction bits [6:0])
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;

  typedef struct packed {
    reg_addr_t rs1_addr;
    reg_addr_t rs2_addr;
    reg_addr_t rd_addr;
    word_t     rd_data;
  } rf_req_t;

  typedef struct packed {
    word_t      addr;
    word_t      wdata;
    logic [3:0] wmask;
    logic [3:0] rmask;
  } dmem_req_t;

  // Decode side of a block: depends on the instruction word only.
  typedef struct packed {
    logic      hit;
    reg_addr_t rs1_addr;
    reg_addr_t rs2_addr;
  } blk_dec_t;

  // Result side of a block.
  typedef struct packed {
    word_t     next_pc;
    reg_addr_t rd_addr;
    word_t     rd_data;
  } blk_out_t;

  // RISC-V Formal Interface (RVFI) record of one retired instruction.
  typedef struct packed {
    logic        valid;
    logic [63:0] order;
    word_t       insn;
    logic        trap;
    logic        halt;
    logic        intr;
    logic [1:0]  mode;
    logic [1:0]  ixl;
    reg_addr_t   rs1_addr;
    reg_addr_t   rs2_addr;
    word_t       rs1_rdata;
    word_t       rs2_rdata;
    reg_addr_t   rd_addr;
    word_t       rd_wdata;
    word_t       pc_rdata;
    word_t       pc_wdata;
    word_t       mem_addr;
    logic [3:0]  mem_rmask;
    logic [3:0]  mem_wmask;
    word_t       mem_rdata;
    word_t       mem_wdata;
  } rvfi_t;

  // Which block type (Table of instruction hardware blocks) implements an instruction.
  function automatic insn_type_e type_of(insn_e i);
    case (i)
      I_BEQ, I_BNE, I_BLT, I_BGE, I_BLTU, I_BGEU:                  return T_B;
      I_ADD, I_SUB, I_SLL, I_SLT, I_SLTU, I_XOR, I_SRL, I_SRA,
      I_OR, I_AND:                                                 return T_R;
      I_SB, I_SH, I_SW:                                            return T_S;
      I_LUI, I_AUIPC:                                              return T_U;
      I_JAL:                                                       return T_J;
      default:                                                     return T_I;
    endcase
  endfunction

  // Subset helpers: number of instructions built in, and the k-th one
  // (block k of ModularEX implements the k-th set bit of the subset).
  function automatic int unsigned subset_size(subset_t s);
    int unsigned n = 0;
    for (int i = 0; i < NUM_INSN; i++) if (s[i]) n++;
    return n;
  endfunction

  function automatic insn_e subset_nth(subset_t s, int unsigned k);
    int unsigned n = 0;
    for (int i = 0; i < NUM_INSN; i++) begin
      if (s[i]) begin
        if (n == k) return insn_e'(i);
        n++;
      end
    end
    return I_LUI;
  endfunction

  // Instruction word fields
  function automatic logic [6:0] f_opcode(word_t w); return w[6:0];   endfunction
  function automatic logic [2:0] f_funct3(word_t w); return w[14:12]; endfunction
  function automatic logic [6:0] f_funct7(word_t w); return w[31:25]; endfunction
  function automatic reg_addr_t  f_rd    (word_t w); return w[11:7];  endfunction
  function automatic reg_addr_t  f_rs1   (word_t w); return w[19:15]; endfunction
  function automatic reg_addr_t  f_rs2   (word_t w); return w[24:20]; endfunction

  // Immediates, sign extended
  function automatic word_t imm_i(word_t w); return {{20{w[31]}}, w[31:20]}; endfunction
  function automatic word_t imm_s(word_t w); return {{20{w[31]}}, w[31:25], w[11:7]}; endfunction
  function automatic word_t imm_b(word_t w);
    return {{19{w[31]}}, w[31], w[7], w[30:25], w[11:8], 1'b0};
  endfunction
  function automatic word_t imm_u(word_t w); return {w[31:12], 12'b0}; endfunction
  function automatic word_t imm_j(word_t w);
    return {{11{w[31]}}, w[31], w[19:12], w[20], w[30:21], 1'b0};
  endfunction

endpackage
