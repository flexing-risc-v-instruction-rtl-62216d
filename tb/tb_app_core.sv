// tb_app_core: one RISSP built for the instruction subset SUBSET, with its
// own instruction and data memories (tb_memory) and retirement counters, for
// the application-kernel testbench.
//
// The parent loads the memories through put_imem/put_dmem, pulses rst_ni
// and waits for 'halted': the core has retired a legal instruction that
// jumps to itself (the usual end-of-program idiom 'j .'). Counters restart
// at reset. They are sampled at the falling clock edge:
//   cycles  - rising edges since reset was released
//   retired - RVFI records seen (valid)
//   traps   - of those, records with trap set (word outside the subset)
// With one instruction per clock and the RVFI record one cycle behind the
// instruction, retired = cycles - 1 at any falling edge.
module tb_app_core
  import rissp_pkg::*;
#(
  parameter subset_t     SUBSET    = rissp_subsets_pkg::AF_DETECT,
  parameter int unsigned MEM_WORDS = 4096
) (
  input  logic clk,
  input  logic rst_ni,
  output int   cycles,
  output int   retired,
  output int   traps,
  output logic halted
);
  word_t      imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata;
  logic [3:0] dmem_wmask, dmem_rmask;
  logic       illegal_insn;
  rvfi_t      rvfi;

  rissp #(.SUBSET(SUBSET)) u_core (
    .clk, .rst_ni, .imem_addr, .imem_rdata,
    .dmem_addr, .dmem_wdata, .dmem_wmask, .dmem_rmask, .dmem_rdata,
    .illegal_insn, .rvfi);

  tb_memory #(.WORDS(MEM_WORDS)) u_imem (
    .clk, .addr(imem_addr), .rdata(imem_rdata), .wmask(4'b0), .wdata(32'b0));
  tb_memory #(.WORDS(MEM_WORDS)) u_dmem (
    .clk, .addr(dmem_addr), .rdata(dmem_rdata), .wmask(dmem_wmask), .wdata(dmem_wdata));

  function automatic void put_imem(int idx, word_t w);
    u_imem.mem[idx] = w;
  endfunction
  function automatic void put_dmem(int idx, word_t w);
    u_dmem.mem[idx] = w;
  endfunction
  function automatic word_t get_dmem(int idx);
    return u_dmem.mem[idx];
  endfunction

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) begin
      cycles  <= 0;
      retired <= 0;
      traps   <= 0;
      halted  <= 1'b0;
    end else begin
      cycles <= cycles + 1;
      if (rvfi.valid) begin
        retired <= retired + 1;
        if (rvfi.trap) traps <= traps + 1;
        if (!rvfi.trap && rvfi.pc_wdata == rvfi.pc_rdata) halted <= 1'b1;
      end
    end
  end
endmodule
