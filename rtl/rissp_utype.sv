// rissp_utype: instruction hardware block for lui or auipc (parameter INSN).
//
// 'hit' is the block's full decode of the opcode. lui writes the U-immediate
// (instruction bits [31:12], low 12 bits zero) to rd; auipc writes
// pc + U-immediate. next_pc is pc + 4. Ports follow the U-type block
// drawing (pc, insn in; next_pc, rdest_data, rdest_addr out) plus 'hit'.
// Purely combinational.
module rissp_utype
  import rissp_pkg::*;
#(
  parameter insn_e INSN = I_LUI
) (
  input  word_t     pc,
  input  word_t     insn,
  output word_t     next_pc,
  output reg_addr_t rdest_addr,
  output word_t     rdest_data,
  output logic      hit
);

  if (type_of(INSN) != T_U) begin : g_bad_param
    $error("rissp_utype: INSN is not a U-type instruction");
  end

  localparam logic [6:0] OPC = (INSN == I_LUI) ? OP_LUI : OP_AUIPC;

  always_comb begin
    hit        = (f_opcode(insn) == OPC);
    rdest_addr = f_rd(insn);
    rdest_data = (INSN == I_LUI) ? imm_u(insn) : pc + imm_u(insn);
    next_pc    = pc + 32'd4;
  end

endmodule
