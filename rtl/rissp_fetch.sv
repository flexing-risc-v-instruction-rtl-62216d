// rissp_fetch: the fetch unit of a RISSP.
//
// Holds the 32-bit program counter. The PC is the instruction memory
// address; the memory returns the instruction word in the same cycle and it
// goes straight to ModularEX, which computes next_pc. Every rising clock
// edge loads next_pc, so one instruction completes per cycle. Reset is
// asynchronous and active low and sets the PC to RESET_PC; both are this
// design's choices, the paper gives no reset behaviour.
module rissp_fetch
  import rissp_pkg::*;
#(
  parameter word_t RESET_PC = 32'h0000_0000
) (
  input  logic  clk,
  input  logic  rst_ni,
  input  word_t next_pc,
  output word_t pc,
  output word_t imem_addr,
  input  word_t imem_rdata,
  output word_t insn
);

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) pc <= RESET_PC;
    else         pc <= next_pc;
  end

  assign imem_addr = pc;
  assign insn      = imem_rdata;

endmodule
