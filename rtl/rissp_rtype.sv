// rissp_rtype: instruction hardware block for one register-register ALU
// instruction (add, sub, sll, slt, sltu, xor, srl, sra, or or and, chosen by
// the parameter INSN).
//
// 'hit' is the block's own full decode: OP opcode, this instruction's funct3
// and funct7. The block addresses rs1 and rs2, computes the result from the
// returned values (shift amount = rs2_data[4:0]) and hands the register file
// rdest_addr = rd and rdest_data = result; next_pc is pc + 4.
// Ports follow the R-type block drawing; 'hit' is this design's addition.
// Purely combinational.
module rissp_rtype
  import rissp_pkg::*;
#(
  parameter insn_e INSN = I_ADD
) (
  input  word_t     pc,
  input  word_t     insn,
  input  word_t     rs1_data,
  input  word_t     rs2_data,
  output word_t     next_pc,
  output reg_addr_t rs1_addr,
  output reg_addr_t rs2_addr,
  output reg_addr_t rdest_addr,
  output word_t     rdest_data,
  output logic      hit
);

  if (type_of(INSN) != T_R) begin : g_bad_param
    $error("rissp_rtype: INSN is not an R-type instruction");
  end

  localparam logic [2:0] F3 = (INSN == I_ADD || INSN == I_SUB) ? 3'b000 :
                              (INSN == I_SLL)                  ? 3'b001 :
                              (INSN == I_SLT)                  ? 3'b010 :
                              (INSN == I_SLTU)                 ? 3'b011 :
                              (INSN == I_XOR)                  ? 3'b100 :
                              (INSN == I_SRL || INSN == I_SRA) ? 3'b101 :
                              (INSN == I_OR)                   ? 3'b110 : 3'b111;
  localparam logic [6:0] F7 = (INSN == I_SUB || INSN == I_SRA) ? 7'b0100000 : 7'b0000000;

  logic [4:0] shamt;

  assign rs1_addr = f_rs1(insn);
  assign rs2_addr = f_rs2(insn);

  always_comb begin
    rdest_addr = f_rd(insn);
    hit        = (f_opcode(insn) == OP_REG) && (f_funct3(insn) == F3) &&
                 (f_funct7(insn) == F7);
    shamt      = rs2_data[4:0];
    case (INSN)
      I_ADD:   rdest_data = rs1_data + rs2_data;
      I_SUB:   rdest_data = rs1_data - rs2_data;
      I_SLL:   rdest_data = rs1_data << shamt;
      I_SLT:   rdest_data = {31'b0, $signed(rs1_data) < $signed(rs2_data)};
      I_SLTU:  rdest_data = {31'b0, rs1_data < rs2_data};
      I_XOR:   rdest_data = rs1_data ^ rs2_data;
      I_SRL:   rdest_data = rs1_data >> shamt;
      I_SRA:   rdest_data = word_t'($signed(rs1_data) >>> shamt);
      I_OR:    rdest_data = rs1_data | rs2_data;
      default: rdest_data = rs1_data & rs2_data;
    endcase
    next_pc = pc + 32'd4;
  end

endmodule
