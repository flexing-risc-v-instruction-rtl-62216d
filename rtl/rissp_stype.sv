// rissp_stype: instruction hardware block for one store (sb, sh or sw,
// chosen by the parameter INSN).
//
// 'hit' is the block's full decode (STORE opcode and funct3). The block
// addresses rs1 and rs2, forms the byte address rs1 + S-immediate, shifts
// the store data into its byte lanes (by addr[1:0] bytes) and raises the
// matching write byte mask (1, 2 or 4 lanes). The memory writes at the end
// of the cycle. The S-type drawing also gives the block rdest_addr and
// rdest_data outputs: a store writes no register, so they carry x0 and 0,
// which the register file ignores. next_pc is pc + 4. Purely combinational.
// Misaligned stores are not split or trapped (not described): lanes past
// byte 3 are dropped.
module rissp_stype
  import rissp_pkg::*;
#(
  parameter insn_e INSN = I_SW
) (
  input  word_t     pc,
  input  word_t     insn,
  input  word_t     rs1_data,
  input  word_t     rs2_data,
  output dmem_req_t dmem_req,
  output word_t     next_pc,
  output reg_addr_t rs1_addr,
  output reg_addr_t rs2_addr,
  output reg_addr_t rdest_addr,
  output word_t     rdest_data,
  output logic      hit
);

  if (type_of(INSN) != T_S) begin : g_bad_param
    $error("rissp_stype: INSN is not an S-type instruction");
  end

  localparam logic [2:0] F3 = (INSN == I_SB) ? 3'b000 : (INSN == I_SH) ? 3'b001 : 3'b010;

  word_t addr;

  assign rs1_addr = f_rs1(insn);
  assign rs2_addr = f_rs2(insn);

  always_comb begin
    addr       = rs1_data + imm_s(insn);
    rdest_addr = '0;
    rdest_data = '0;
    hit        = (f_opcode(insn) == OP_STORE) && (f_funct3(insn) == F3);
    next_pc    = pc + 32'd4;

    dmem_req       = '0;
    dmem_req.addr  = addr;
    dmem_req.wdata = rs2_data << {addr[1:0], 3'b000};
    case (INSN)
      I_SB:    dmem_req.wmask = 4'b0001 << addr[1:0];
      I_SH:    dmem_req.wmask = 4'b0011 << addr[1:0];
      default: dmem_req.wmask = 4'b1111 << addr[1:0];
    endcase
  end

endmodule
