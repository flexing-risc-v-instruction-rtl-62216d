// tb_memory: behavioural word memory used as instruction or data memory in
// the processor testbenches (the processor itself contains no memory).
//
// WORDS 32-bit words. Reads are combinational: rdata is the word holding
// byte address addr (address bits above the memory size wrap around).
// Writes happen at the rising clock edge into the byte lanes set in wmask,
// taking each lane from the same lane of wdata. Testbenches load contents
// through the 'mem' array directly.
module tb_memory #(
  parameter int unsigned WORDS = 4096
) (
  input  logic        clk,
  input  logic [31:0] addr,
  output logic [31:0] rdata,
  input  logic [3:0]  wmask,
  input  logic [31:0] wdata
);
  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];

  assign rdata = mem[addr[AW+1:2]];

  always_ff @(posedge clk) begin
    for (int b = 0; b < 4; b++)
      if (wmask[b]) mem[addr[AW+1:2]][8*b +: 8] <= wdata[8*b +: 8];
  end
endmodule
