// rissp_jtype: instruction hardware block for jal.
//
// 'hit' is the block's full decode of the JAL opcode. The block writes the
// return address pc + 4 to rd and jumps to pc + J-immediate. Ports follow
// the J-type block drawing (pc, insn in; next_pc, rdest_data, rdest_addr
// out) plus 'hit'. Purely combinational. A jump target that is not word
// aligned is not trapped (no exceptions are described for the core).
module rissp_jtype
  import rissp_pkg::*;
#(
  parameter insn_e INSN = I_JAL
) (
  input  word_t     pc,
  input  word_t     insn,
  output word_t     next_pc,
  output reg_addr_t rdest_addr,
  output word_t     rdest_data,
  output logic      hit
);

  if (INSN != I_JAL) begin : g_bad_param
    $error("rissp_jtype: INSN is not jal");
  end

  always_comb begin
    hit        = (f_opcode(insn) == OP_JAL);
    rdest_addr = f_rd(insn);
    rdest_data = pc + 32'd4;
    next_pc    = pc + imm_j(insn);
  end

endmodule
