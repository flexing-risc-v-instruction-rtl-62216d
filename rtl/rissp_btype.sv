// rissp_btype: instruction hardware block for one conditional branch
// (beq, bne, blt, bge, bltu or bgeu, chosen by the parameter INSN).
//
// The block fully decodes the instruction word itself: 'hit' is high when
// the word carries the BRANCH opcode and this branch's funct3. It drives the
// two source register addresses to the register file, compares the values
// that come back (signed for blt/bge, unsigned for bltu/bgeu) and computes
// next_pc = pc + B-immediate when the branch is taken, pc + 4 otherwise.
// Ports follow the B-type block drawing: pc, insn, rs1_data, rs2_data in;
// next_pc, rs1_addr, rs2_addr out; 'hit' is this design's addition.
// Purely combinational: the result is used in the cycle the word is fetched.
// A taken branch to a target that is not word aligned is not trapped (the
// paper names no exceptions); the target is used as computed.
module rissp_btype
  import rissp_pkg::*;
#(
  parameter insn_e INSN = I_BEQ
) (
  input  word_t     pc,
  input  word_t     insn,
  input  word_t     rs1_data,
  input  word_t     rs2_data,
  output word_t     next_pc,
  output reg_addr_t rs1_addr,
  output reg_addr_t rs2_addr,
  output logic      hit
);

  if (type_of(INSN) != T_B) begin : g_bad_param
    $error("rissp_btype: INSN is not a B-type instruction");
  end

  localparam logic [2:0] F3 = (INSN == I_BEQ)  ? 3'b000 :
                              (INSN == I_BNE)  ? 3'b001 :
                              (INSN == I_BLT)  ? 3'b100 :
                              (INSN == I_BGE)  ? 3'b101 :
                              (INSN == I_BLTU) ? 3'b110 : 3'b111;

  logic taken;

  assign rs1_addr = f_rs1(insn);
  assign rs2_addr = f_rs2(insn);

  always_comb begin
    hit      = (f_opcode(insn) == OP_BRANCH) && (f_funct3(insn) == F3);
    case (INSN)
      I_BEQ:   taken = (rs1_data == rs2_data);
      I_BNE:   taken = (rs1_data != rs2_data);
      I_BLT:   taken = ($signed(rs1_data) <  $signed(rs2_data));
      I_BGE:   taken = ($signed(rs1_data) >= $signed(rs2_data));
      I_BLTU:  taken = (rs1_data <  rs2_data);
      default: taken = (rs1_data >= rs2_data);
    endcase
    next_pc = taken ? pc + imm_b(insn) : pc + 32'd4;
  end

endmodule
