// rissp: a single-cycle RISC-V instruction subset processor (RISSP).
//
// The core executes only the RV32E base instructions named in SUBSET (one
// bit per instruction, see rissp_pkg::insn_e; the default is the subset of
// the af_detect atrial-fibrillation program). It is built from:
//   rissp_fetch      - PC register and instruction memory port
//   rissp_modularex  - one hardware block per supported instruction and the
//                      switch that selects the block of the current word
//   rissp_regfile    - 16 x 32-bit registers, x0 hardwired to zero
//   rissp_rvfi       - RISC-V Formal Interface record of each instruction
// Every instruction takes one clock cycle: the PC addresses instruction
// memory, the word goes to ModularEX, the register file and data memory are
// read combinationally, and at the rising edge the PC, the destination
// register and any data memory write are updated together.
//
// Memory ports (both memories lie outside the core):
//   imem_addr  - byte address of the instruction (= PC); imem_rdata must
//                return the 32-bit word at imem_addr in the same cycle.
//   dmem_addr  - byte address of a load or store; the memory must return
//                the 32-bit word holding it (address bits [31:2]) on
//                dmem_rdata in the same cycle, and at the rising edge write
//                the byte lanes set in dmem_wmask from dmem_wdata, whose
//                data is already shifted into those lanes. dmem_rmask shows
//                the lanes a load uses.
// illegal_insn is high while the current word is not in SUBSET (or not a
// valid encoding of it); such a word retires as a no-op. rvfi carries one
// record per retired instruction, one cycle after it executed.
// Reset: rst_ni asynchronous, active low; PC = RESET_PC, registers = 0.
module rissp
  import rissp_pkg::*;
#(
  parameter subset_t SUBSET   = rissp_subsets_pkg::AF_DETECT,
  parameter word_t   RESET_PC = 32'h0000_0000
) (
  input  logic       clk,
  input  logic       rst_ni,
  output word_t      imem_addr,
  input  word_t      imem_rdata,
  output word_t      dmem_addr,
  output word_t      dmem_wdata,
  output logic [3:0] dmem_wmask,
  output logic [3:0] dmem_rmask,
  input  word_t      dmem_rdata,
  output logic       illegal_insn,
  output rvfi_t      rvfi
);

  localparam int unsigned NBLK  = subset_size(SUBSET);
  localparam int unsigned SEL_W = (NBLK > 1) ? $clog2(NBLK) : 1;

  word_t            pc, next_pc, insn;
  reg_addr_t        rs1_addr, rs2_addr, rd_addr;
  word_t            rs1_data, rs2_data, rd_data;
  dmem_req_t        dmem_req;
  logic [SEL_W-1:0] sel;
  logic             illegal;

  rissp_fetch #(.RESET_PC(RESET_PC)) u_fetch (
    .clk, .rst_ni, .next_pc, .pc, .imem_addr, .imem_rdata, .insn);

  rissp_modularex #(.SUBSET(SUBSET)) u_modularex (
    .pc, .insn, .rs1_data, .rs2_data, .dmem_rdata,
    .rs1_addr, .rs2_addr, .next_pc, .rd_addr, .rd_data, .dmem_req,
    .sel, .illegal);

  rissp_regfile u_regfile (
    .clk, .rst_ni, .rs1_addr, .rs2_addr, .rs1_data, .rs2_data,
    .we(1'b1), .rd_addr, .rd_data);

  rissp_rvfi u_rvfi (
    .clk, .rst_ni, .pc, .next_pc, .insn, .illegal,
    .rs1_addr, .rs2_addr, .rs1_data, .rs2_data, .rd_addr, .rd_data,
    .dmem_req, .dmem_rdata, .rvfi);

  assign dmem_addr    = dmem_req.addr;
  assign dmem_wdata   = dmem_req.wdata;
  assign dmem_wmask   = dmem_req.wmask;
  assign dmem_rmask   = dmem_req.rmask;
  assign illegal_insn = illegal;

endmodule
