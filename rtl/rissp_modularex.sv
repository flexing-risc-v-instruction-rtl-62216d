// rissp_modularex: the modular execution unit (ModularEX) of a RISSP.
//
// For every instruction in SUBSET the unit instantiates that instruction's
// hardware block (B, R, I, S, U or J type, each configured for the one
// instruction), in the order of the bits of SUBSET, and puts the switch
// behind them. Every block sees the same pc, instruction word, register
// values and data memory read word; the switch forwards the outputs of the
// block the instruction belongs to. Blocks that lack a port in their
// drawing (for example a U-type block has no rs1_addr, a B-type block no
// rdest_addr) drive the matching field with zero, so an unused register
// address reads as x0 and an unused destination writes nothing.
// The unit is fully combinational: register and memory reads come back in
// the same cycle and the results are taken by the register file, data
// memory and PC at the next clock edge. Synthesis is expected to share logic
// between blocks (for example one adder for add, addi and the address sums).
module rissp_modularex
  import rissp_pkg::*;
#(
  parameter subset_t SUBSET = rissp_subsets_pkg::AF_DETECT,
  localparam int unsigned NBLK  = subset_size(SUBSET),
  localparam int unsigned SEL_W = (NBLK > 1) ? $clog2(NBLK) : 1
) (
  input  word_t            pc,
  input  word_t            insn,
  input  word_t            rs1_data,
  input  word_t            rs2_data,
  input  word_t            dmem_rdata,
  output reg_addr_t        rs1_addr,
  output reg_addr_t        rs2_addr,
  output word_t            next_pc,
  output reg_addr_t        rd_addr,
  output word_t            rd_data,
  output dmem_req_t        dmem_req,
  output logic [SEL_W-1:0] sel,
  output logic             illegal
);

  blk_dec_t  blk_dec [NBLK];
  dmem_req_t blk_mem [NBLK];
  blk_out_t  blk_out [NBLK];

  for (genvar k = 0; k < NBLK; k++) begin : g_blk
    localparam insn_e ID = subset_nth(SUBSET, k);

    word_t     b_next_pc;
    reg_addr_t b_rs1, b_rs2, b_rd;
    word_t     b_rd_data;
    dmem_req_t b_dmem;
    logic      b_hit;

    if (type_of(ID) == T_B) begin : g_b
      rissp_btype #(.INSN(ID)) u_blk (
        .pc, .insn, .rs1_data, .rs2_data,
        .next_pc(b_next_pc), .rs1_addr(b_rs1), .rs2_addr(b_rs2), .hit(b_hit));
      assign b_rd      = '0;
      assign b_rd_data = '0;
      assign b_dmem    = '0;
    end else if (type_of(ID) == T_R) begin : g_r
      rissp_rtype #(.INSN(ID)) u_blk (
        .pc, .insn, .rs1_data, .rs2_data,
        .next_pc(b_next_pc), .rs1_addr(b_rs1), .rs2_addr(b_rs2),
        .rdest_addr(b_rd), .rdest_data(b_rd_data), .hit(b_hit));
      assign b_dmem = '0;
    end else if (type_of(ID) == T_I) begin : g_i
      rissp_itype #(.INSN(ID)) u_blk (
        .pc, .insn, .rs1_data, .dmem_rdata, .dmem_req(b_dmem),
        .next_pc(b_next_pc), .rs1_addr(b_rs1),
        .rdest_addr(b_rd), .rdest_data(b_rd_data), .hit(b_hit));
      assign b_rs2 = '0;
    end else if (type_of(ID) == T_S) begin : g_s
      rissp_stype #(.INSN(ID)) u_blk (
        .pc, .insn, .rs1_data, .rs2_data, .dmem_req(b_dmem),
        .next_pc(b_next_pc), .rs1_addr(b_rs1), .rs2_addr(b_rs2),
        .rdest_addr(b_rd), .rdest_data(b_rd_data), .hit(b_hit));
    end else if (type_of(ID) == T_U) begin : g_u
      rissp_utype #(.INSN(ID)) u_blk (
        .pc, .insn,
        .next_pc(b_next_pc), .rdest_addr(b_rd), .rdest_data(b_rd_data), .hit(b_hit));
      assign b_rs1  = '0;
      assign b_rs2  = '0;
      assign b_dmem = '0;
    end else begin : g_j
      rissp_jtype #(.INSN(ID)) u_blk (
        .pc, .insn,
        .next_pc(b_next_pc), .rdest_addr(b_rd), .rdest_data(b_rd_data), .hit(b_hit));
      assign b_rs1  = '0;
      assign b_rs2  = '0;
      assign b_dmem = '0;
    end

    assign blk_dec[k] = '{hit: b_hit, rs1_addr: b_rs1, rs2_addr: b_rs2};
    assign blk_mem[k] = b_dmem;
    assign blk_out[k] = '{next_pc: b_next_pc, rd_addr: b_rd, rd_data: b_rd_data};
  end

  rissp_switch #(.SUBSET(SUBSET)) u_switch (
    .pc, .insn, .blk_dec, .blk_mem, .blk_out,
    .rs1_addr, .rs2_addr, .next_pc, .rd_addr, .rd_data, .dmem_req,
    .sel, .illegal);

endmodule
