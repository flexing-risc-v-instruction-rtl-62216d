// rissp_itype: instruction hardware block for one I-type instruction, chosen
// by the parameter INSN: a load (lb, lh, lw, lbu, lhu), a register-immediate
// ALU operation (addi, slti, sltiu, xori, ori, andi, slli, srli, srai) or
// jalr.
//
// 'hit' is the block's own full decode (opcode, funct3 and, for the shifts,
// funct7). The block addresses rs1 and writes rd:
//   loads  - address = rs1 + I-immediate, sent on the data memory request
//            with a read byte mask (1, 2 or 4 lanes starting at addr[1:0]);
//            the returned 32-bit word is shifted down by addr[1:0] bytes and
//            sign or zero extended. The memory answers in the same cycle.
//   ALU    - rd = rs1 op immediate (shift amount = instruction bits [24:20]).
//   jalr   - rd = pc + 4, next_pc = (rs1 + immediate) with bit 0 cleared.
// next_pc is pc + 4 except for jalr. Ports follow the I-type block drawing
// (pc, insn, rs1_data and the data memory port in; next_pc, rdest_data,
// rdest_addr, rs1_addr out) plus 'hit'. Purely combinational. Misaligned
// accesses are not split or trapped (not described): lanes that would fall
// past byte 3 of the word are dropped.
module rissp_itype
  import rissp_pkg::*;
#(
  parameter insn_e INSN = I_ADDI
) (
  input  word_t     pc,
  input  word_t     insn,
  input  word_t     rs1_data,
  input  word_t     dmem_rdata,
  output dmem_req_t dmem_req,
  output word_t     next_pc,
  output reg_addr_t rs1_addr,
  output reg_addr_t rdest_addr,
  output word_t     rdest_data,
  output logic      hit
);

  if (type_of(INSN) != T_I) begin : g_bad_param
    $error("rissp_itype: INSN is not an I-type instruction");
  end

  localparam bit IS_LOAD = (INSN == I_LB) || (INSN == I_LH) || (INSN == I_LW) ||
                           (INSN == I_LBU) || (INSN == I_LHU);
  localparam logic [6:0] OPC = IS_LOAD ? OP_LOAD : (INSN == I_JALR) ? OP_JALR : OP_IMM;
  localparam logic [2:0] F3 =
    (INSN == I_LB  || INSN == I_ADDI || INSN == I_JALR) ? 3'b000 :
    (INSN == I_LH  || INSN == I_SLLI)                   ? 3'b001 :
    (INSN == I_LW  || INSN == I_SLTI)                   ? 3'b010 :
    (INSN == I_SLTIU)                                   ? 3'b011 :
    (INSN == I_LBU || INSN == I_XORI)                   ? 3'b100 :
    (INSN == I_LHU || INSN == I_SRLI || INSN == I_SRAI) ? 3'b101 :
    (INSN == I_ORI)                                     ? 3'b110 : 3'b111;
  localparam bit IS_SHIFT = (INSN == I_SLLI) || (INSN == I_SRLI) || (INSN == I_SRAI);
  localparam logic [6:0] F7 = (INSN == I_SRAI) ? 7'b0100000 : 7'b0000000;

  word_t      imm;
  word_t      sum;
  word_t      lane;
  logic [4:0] shamt;

  assign rs1_addr   = f_rs1(insn);
  assign rdest_addr = f_rd(insn);
  assign hit        = (f_opcode(insn) == OPC) && (f_funct3(insn) == F3) &&
                      (!IS_SHIFT || (f_funct7(insn) == F7));
  assign imm        = imm_i(insn);
  assign sum        = rs1_data + imm;
  assign shamt      = insn[24:20];

  // Memory request: depends on the register value only, not on the data
  // that comes back, so request and answer form no loop.
  always_comb begin
    dmem_req      = '0;
    dmem_req.addr = sum;
    if (IS_LOAD) begin
      case (INSN)
        I_LB, I_LBU: dmem_req.rmask = 4'b0001 << sum[1:0];
        I_LH, I_LHU: dmem_req.rmask = 4'b0011 << sum[1:0];
        default:     dmem_req.rmask = 4'b1111 << sum[1:0];
      endcase
    end
  end

  always_comb begin
    next_pc = pc + 32'd4;
    lane    = dmem_rdata >> {sum[1:0], 3'b000};
    case (INSN)
      I_LB:    rdest_data = {{24{lane[7]}}, lane[7:0]};
      I_LH:    rdest_data = {{16{lane[15]}}, lane[15:0]};
      I_LW:    rdest_data = lane;
      I_LBU:   rdest_data = {24'b0, lane[7:0]};
      I_LHU:   rdest_data = {16'b0, lane[15:0]};
      I_ADDI:  rdest_data = sum;
      I_SLTI:  rdest_data = {31'b0, $signed(rs1_data) < $signed(imm)};
      I_SLTIU: rdest_data = {31'b0, rs1_data < imm};
      I_XORI:  rdest_data = rs1_data ^ imm;
      I_ORI:   rdest_data = rs1_data | imm;
      I_ANDI:  rdest_data = rs1_data & imm;
      I_SLLI:  rdest_data = rs1_data << shamt;
      I_SRLI:  rdest_data = rs1_data >> shamt;
      I_SRAI:  rdest_data = word_t'($signed(rs1_data) >>> shamt);
      default: begin  // jalr
        rdest_data = pc + 32'd4;
        next_pc    = {sum[31:1], 1'b0};
      end
    endcase
  end

endmodule
