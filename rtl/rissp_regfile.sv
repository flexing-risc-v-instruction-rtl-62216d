// rissp_regfile: the RV32E register file of a RISSP.
//
// NREGS 32-bit registers (16 for RV32E) with two combinational read
// ports and one write port written at the rising clock edge. x0 always
// reads as zero and writes to it are dropped, which is how an instruction
// that writes no register is told apart: its block drives rd = x0. Register
// numbers at or above NREGS (x16-x31, which RV32E leaves out) read as
// zero and are not written. Asynchronous active-low reset clears every
// register (this design's choice; the paper gives no reset behaviour).
// 'we' lets the core block writes, for instance while it is held.
module rissp_regfile
  import rissp_pkg::*;
#(
  parameter int unsigned NREGS = rissp_pkg::NUM_REGS
) (
  input  logic      clk,
  input  logic      rst_ni,
  input  reg_addr_t rs1_addr,
  input  reg_addr_t rs2_addr,
  output word_t     rs1_data,
  output word_t     rs2_data,
  input  logic      we,
  input  reg_addr_t rd_addr,
  input  word_t     rd_data
);

  localparam int unsigned AW = (NREGS > 1) ? $clog2(NREGS) : 1;

  word_t regs [NREGS];

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we && (rd_addr != '0) && (32'(rd_addr) < NREGS)) begin
      regs[rd_addr[AW-1:0]] <= rd_data;
    end
  end

  assign rs1_data = (rs1_addr != '0 && 32'(rs1_addr) < NREGS) ? regs[rs1_addr[AW-1:0]] : '0;
  assign rs2_data = (rs2_addr != '0 && 32'(rs2_addr) < NREGS) ? regs[rs2_addr[AW-1:0]] : '0;

endmodule
