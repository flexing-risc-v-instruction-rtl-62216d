// rissp_subsets_pkg: the instruction subsets that configure a RISSP.
//
// Each constant is a subset_t mask with one bit per instruction of
// rissp_pkg::insn_e. The application subsets are the distinct RV32E
// instructions each program uses when compiled at -O2 (Embench suite plus the
// three extreme-edge programs armpit, xgboost and af_detect). RV32E_FULL holds
// all 37 base instructions (the full-ISA reference core) and MINIMAL12 the
// twelve-instruction set from which the others can be rebuilt in software.
// A constant is written as the OR of one-hot terms, one per instruction.
package rissp_subsets_pkg;
  import rissp_pkg::*;

  function automatic subset_t b(insn_e i);
    return subset_t'(1) << i;
  endfunction

  // aha_mont64: 23 instructions
  localparam subset_t AHA_MONT64 =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_SLLI) | b(I_SLTIU) | b(I_SLTU) | b(I_SRAI) | b(I_SRLI) | b(I_SUB) | b(I_SW) | b(I_XOR) | b(I_XORI);

  // crc32: 16 instructions
  localparam subset_t CRC32 =
    b(I_ADD) | b(I_ADDI) | b(I_ANDI) | b(I_BGE) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_SLLI) | b(I_SLTIU) | b(I_SRLI) | b(I_SUB) | b(I_SW) | b(I_XOR) | b(I_XORI);

  // cubic: 15 instructions
  localparam subset_t CUBIC =
    b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BLT) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_SLTI) | b(I_SLTIU) | b(I_SW) | b(I_XOR);

  // edn: 20 instructions
  localparam subset_t EDN =
    b(I_ADD) | b(I_ADDI) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LH) | b(I_LHU) | b(I_LUI) | b(I_LW) | b(I_SH) | b(I_SLLI) | b(I_SLTIU) | b(I_SRA) | b(I_SRAI) | b(I_SRLI) | b(I_SUB) | b(I_SW);

  // huffbench: 25 instructions
  localparam subset_t HUFFBENCH =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLT) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_ORI) | b(I_SB) | b(I_SLL) | b(I_SLLI) | b(I_SLTIU) | b(I_SRAI) | b(I_SRLI) | b(I_SUB) | b(I_SW);

  // matmult_int: 11 instructions
  localparam subset_t MATMULT_INT =
    b(I_ADD) | b(I_ADDI) | b(I_BGE) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_SLLI) | b(I_SLTIU) | b(I_SW);

  // md5sum: 25 instructions
  localparam subset_t MD5SUM =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLT) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_SB) | b(I_SLL) | b(I_SLLI) | b(I_SLTIU) | b(I_SRL) | b(I_SRLI) | b(I_SUB) | b(I_SW) | b(I_XOR) | b(I_XORI);

  // minver: 16 instructions
  localparam subset_t MINVER =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_BEQ) | b(I_BGE) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_SLLI) | b(I_SLTI) | b(I_SLTIU) | b(I_SUB) | b(I_SW) | b(I_XOR);

  // nbody: 16 instructions
  localparam subset_t NBODY =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_SLLI) | b(I_SLTI) | b(I_SLTIU) | b(I_SRLI) | b(I_SW);

  // nettle_aes: 22 instructions
  localparam subset_t NETTLE_AES =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_SB) | b(I_SLLI) | b(I_SLTIU) | b(I_SRLI) | b(I_SUB) | b(I_SW) | b(I_XOR);

  // nettle_sha256: 24 instructions
  localparam subset_t NETTLE_SHA256 =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LHU) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_SB) | b(I_SLLI) | b(I_SLTIU) | b(I_SLTU) | b(I_SRLI) | b(I_SUB) | b(I_SW) | b(I_XOR);

  // nsichneu: 14 instructions
  localparam subset_t NSICHNEU =
    b(I_ADD) | b(I_ADDI) | b(I_BEQ) | b(I_BGE) | b(I_BLT) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_SLLI) | b(I_SLTIU) | b(I_SUB) | b(I_SW);

  // picojpeg: 31 instructions
  localparam subset_t PICOJPEG =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLT) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LB) | b(I_LBU) | b(I_LH) | b(I_LHU) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_SB) | b(I_SH) | b(I_SLL) | b(I_SLLI) | b(I_SLTIU) | b(I_SLTU) | b(I_SRA) | b(I_SRAI) | b(I_SRLI) | b(I_SUB) | b(I_SW) | b(I_XORI);

  // primecount: 13 instructions
  localparam subset_t PRIMECOUNT =
    b(I_ADD) | b(I_ADDI) | b(I_BEQ) | b(I_BGE) | b(I_BLT) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_SLLI) | b(I_SLTIU) | b(I_SW);

  // qrduino: 31 instructions
  localparam subset_t QRDUINO =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLT) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LHU) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_ORI) | b(I_SB) | b(I_SH) | b(I_SLLI) | b(I_SLTIU) | b(I_SLTU) | b(I_SRA) | b(I_SRAI) | b(I_SRL) | b(I_SRLI) | b(I_SUB) | b(I_SW) | b(I_XOR) | b(I_XORI);

  // sglib_combined: 24 instructions
  localparam subset_t SGLIB_COMBINED =
    b(I_ADD) | b(I_ADDI) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLT) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LH) | b(I_LUI) | b(I_LW) | b(I_SB) | b(I_SH) | b(I_SLLI) | b(I_SLTIU) | b(I_SLTU) | b(I_SRAI) | b(I_SUB) | b(I_SW) | b(I_XORI);

  // slre: 24 instructions
  localparam subset_t SLRE =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLT) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_SLLI) | b(I_SLT) | b(I_SLTIU) | b(I_SLTU) | b(I_SRAI) | b(I_SUB) | b(I_SW) | b(I_XORI);

  // st: 14 instructions
  localparam subset_t ST =
    b(I_ADD) | b(I_ADDI) | b(I_AND) | b(I_BGE) | b(I_BLT) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_SLLI) | b(I_SLTI) | b(I_SLTIU) | b(I_SW);

  // statemate: 16 instructions
  localparam subset_t STATEMATE =
    b(I_ADDI) | b(I_BEQ) | b(I_BGE) | b(I_BLT) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_SB) | b(I_SH) | b(I_SLTIU) | b(I_SUB) | b(I_SW);

  // tarfind: 19 instructions
  localparam subset_t TARFIND =
    b(I_ADD) | b(I_ADDI) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LUI) | b(I_LW) | b(I_SB) | b(I_SLLI) | b(I_SLTIU) | b(I_SRLI) | b(I_SUB) | b(I_SW);

  // ud: 15 instructions
  localparam subset_t UD =
    b(I_ADD) | b(I_ADDI) | b(I_BEQ) | b(I_BGE) | b(I_BLT) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_SLLI) | b(I_SLTIU) | b(I_SUB) | b(I_SW);

  // wikisort: 20 instructions
  localparam subset_t WIKISORT =
    b(I_ADD) | b(I_ADDI) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BLT) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_OR) | b(I_SLLI) | b(I_SLT) | b(I_SLTIU) | b(I_SLTU) | b(I_SRAI) | b(I_SRLI) | b(I_SUB) | b(I_SW);

  // armpit: 15 instructions
  localparam subset_t ARMPIT =
    b(I_ADD) | b(I_ADDI) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BLT) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LUI) | b(I_LW) | b(I_SLLI) | b(I_SLTIU) | b(I_SW);

  // xgboost: 12 instructions
  localparam subset_t XGBOOST =
    b(I_ADDI) | b(I_ANDI) | b(I_BGE) | b(I_BLT) | b(I_JAL) | b(I_JALR) | b(I_LUI) | b(I_LW) | b(I_SRLI) | b(I_SW) | b(I_XOR) | b(I_XORI);

  // af_detect: 23 instructions
  localparam subset_t AF_DETECT =
    b(I_ADD) | b(I_ADDI) | b(I_ANDI) | b(I_BEQ) | b(I_BGE) | b(I_BGEU) | b(I_BLT) | b(I_BLTU) | b(I_BNE) | b(I_JAL) | b(I_JALR) | b(I_LBU) | b(I_LUI) | b(I_LW) | b(I_SB) | b(I_SH) | b(I_SLLI) | b(I_SLTIU) | b(I_SRAI) | b(I_SRLI) | b(I_SUB) | b(I_SW) | b(I_XOR);

  // rv32e_full: 37 instructions
  localparam subset_t RV32E_FULL =
    b(I_LUI) | b(I_AUIPC) | b(I_JAL) | b(I_JALR) | b(I_BEQ) | b(I_BNE) | b(I_BLT) | b(I_BGE) | b(I_BLTU) | b(I_BGEU) | b(I_LB) | b(I_LH) | b(I_LW) | b(I_LBU) | b(I_LHU) | b(I_SB) | b(I_SH) | b(I_SW) | b(I_ADDI) | b(I_SLTI) | b(I_SLTIU) | b(I_XORI) | b(I_ORI) | b(I_ANDI) | b(I_SLLI) | b(I_SRLI) | b(I_SRAI) | b(I_ADD) | b(I_SUB) | b(I_SLL) | b(I_SLT) | b(I_SLTU) | b(I_XOR) | b(I_SRL) | b(I_SRA) | b(I_OR) | b(I_AND);

  // minimal12: 12 instructions
  localparam subset_t MINIMAL12 =
    b(I_ADDI) | b(I_ADD) | b(I_AND) | b(I_XORI) | b(I_SLL) | b(I_SRA) | b(I_JAL) | b(I_JALR) | b(I_BLT) | b(I_BLTU) | b(I_LW) | b(I_SW);

endpackage
