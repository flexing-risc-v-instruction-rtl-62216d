// rissp_rvfi: RISC-V Formal Interface (RVFI) port of a RISSP.
//
// Records every instruction the core executes so that an external checker
// (riscv-formal, or a reference simulator in a testbench) can compare it
// with the ISA. The core is single cycle, so everything the record needs is
// present in the cycle the instruction executes; this unit captures it at
// the clock edge that retires the instruction and presents it for one cycle
// with rvfi.valid high. The record therefore appears one cycle after the
// instruction executed. rvfi.order counts retired instructions from 0.
// rvfi.trap marks an instruction the core does not support (it retired as
// a no-op). The memory fields give the word-aligned address and the byte
// masks and data of the access as they appear on the data memory port.
// rd_wdata is forced to zero when rd is x0, as RVFI requires. mode reads 3
// (machine mode) and ixl 1 (32 bit); halt and intr are always zero.
module rissp_rvfi
  import rissp_pkg::*;
(
  input  logic      clk,
  input  logic      rst_ni,
  input  word_t     pc,
  input  word_t     next_pc,
  input  word_t     insn,
  input  logic      illegal,
  input  reg_addr_t rs1_addr,
  input  reg_addr_t rs2_addr,
  input  word_t     rs1_data,
  input  word_t     rs2_data,
  input  reg_addr_t rd_addr,
  input  word_t     rd_data,
  input  dmem_req_t dmem_req,
  input  word_t     dmem_rdata,
  output rvfi_t     rvfi
);

  logic [63:0] order_q;

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) begin
      rvfi    <= '0;
      order_q <= '0;
    end else begin
      order_q         <= order_q + 64'd1;
      rvfi.valid      <= 1'b1;
      rvfi.order      <= order_q;
      rvfi.insn       <= insn;
      rvfi.trap       <= illegal;
      rvfi.halt       <= 1'b0;
      rvfi.intr       <= 1'b0;
      rvfi.mode       <= 2'd3;
      rvfi.ixl        <= 2'd1;
      rvfi.rs1_addr   <= rs1_addr;
      rvfi.rs2_addr   <= rs2_addr;
      rvfi.rs1_rdata  <= rs1_data;
      rvfi.rs2_rdata  <= rs2_data;
      rvfi.rd_addr    <= rd_addr;
      rvfi.rd_wdata   <= (rd_addr == '0) ? '0 : rd_data;
      rvfi.pc_rdata   <= pc;
      rvfi.pc_wdata   <= next_pc;
      rvfi.mem_addr   <= {dmem_req.addr[31:2], 2'b00};
      rvfi.mem_rmask  <= dmem_req.rmask;
      rvfi.mem_wmask  <= dmem_req.wmask;
      rvfi.mem_rdata  <= (dmem_req.rmask != '0) ? dmem_rdata : '0;
      rvfi.mem_wdata  <= dmem_req.wdata;
    end
  end

endmodule
