// tb_rissp_fetch: self-checking testbench of the fetch unit.
//
// Checks that reset puts RESET_PC (overridden to a non-zero value) on the
// PC at once, that every rising edge loads next_pc (one new PC per cycle),
// that the instruction memory address is the PC and that the returned
// word is handed on unchanged. A reset applied in mid-run is checked too.
module tb_rissp_fetch;
  import rissp_pkg::*;

  localparam word_t RST_PC = 32'h0000_0100;
  localparam int    CYCLES = 2000;

  logic  clk = 1'b0;
  logic  rst_ni = 1'b1;
  word_t next_pc, pc, imem_addr, imem_rdata, insn;

  always #5 clk = ~clk;

  rissp_fetch #(.RESET_PC(RST_PC)) dut (
    .clk, .rst_ni, .next_pc, .pc, .imem_addr, .imem_rdata, .insn);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s pc=%h at %0t", what, pc, $time);
    end
  endtask

  initial begin : watchdog
    repeat (CYCLES + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t expect_pc;
    next_pc = $urandom;
    imem_rdata = $urandom;
    #2 rst_ni = 1'b0;
    #1 check(pc == RST_PC, "asynchronous reset value");
    @(negedge clk) rst_ni = 1'b1;
    expect_pc = RST_PC;
    for (int c = 0; c < CYCLES; c++) begin
      next_pc = $urandom;
      imem_rdata = $urandom;
      #1;
      check(pc == expect_pc, "pc");
      check(imem_addr == pc, "imem_addr");
      check(insn == imem_rdata, "insn");
      if (c == CYCLES / 2) begin
        rst_ni = 1'b0;
        #1 check(pc == RST_PC, "reset in mid-run");
        @(negedge clk) rst_ni = 1'b1;
        expect_pc = RST_PC;
      end else begin
        @(posedge clk);
        expect_pc = next_pc;
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
