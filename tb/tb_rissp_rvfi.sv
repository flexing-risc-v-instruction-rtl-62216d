// tb_rissp_rvfi: self-checking testbench of the RVFI port.
//
// Random execution-stage values are driven each cycle; one cycle later the
// RVFI record must hold exactly them, with valid high, order counting up
// from 0 after reset, trap equal to the 'illegal' input, rd_wdata zero for
// rd = x0, the memory address word aligned and mem_rdata zero when the
// access reads nothing. During reset valid must be low.
module tb_rissp_rvfi;
  import rissp_pkg::*;

  localparam int CYCLES = 3000;

  logic      clk = 1'b0;
  logic      rst_ni = 1'b1;
  word_t     pc, next_pc, insn, rs1_data, rs2_data, rd_data, dmem_rdata;
  logic      illegal;
  reg_addr_t rs1_addr, rs2_addr, rd_addr;
  dmem_req_t dmem_req;
  rvfi_t     rvfi;

  always #5 clk = ~clk;

  rissp_rvfi dut (.clk, .rst_ni, .pc, .next_pc, .insn, .illegal, .rs1_addr, .rs2_addr,
                  .rs1_data, .rs2_data, .rd_addr, .rd_data, .dmem_req, .dmem_rdata, .rvfi);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s order=%0d at %0t", what, rvfi.order, $time);
    end
  endtask

  initial begin : watchdog
    repeat (CYCLES + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive();
    pc = $urandom; next_pc = $urandom; insn = $urandom; illegal = ($urandom_range(0, 7) == 0);
    rs1_addr = 5'($urandom); rs2_addr = 5'($urandom); rd_addr = 5'($urandom_range(0, 3) == 0 ? 0 : $urandom);
    rs1_data = $urandom; rs2_data = $urandom; rd_data = $urandom; dmem_rdata = $urandom;
    dmem_req = '{addr: $urandom, wdata: $urandom, wmask: 4'($urandom), rmask: 4'($urandom)};
  endtask

  initial begin
    rvfi_t e;
    automatic longint n = 0;
    drive();
    #2 rst_ni = 1'b0;
    @(negedge clk);
    check(!rvfi.valid, "no record during reset");
    rst_ni = 1'b1;
    for (int c = 0; c < CYCLES; c++) begin
      drive();
      e = '{valid: 1'b1, order: 64'(n), insn: insn, trap: illegal, halt: 1'b0, intr: 1'b0,
            mode: 2'd3, ixl: 2'd1, rs1_addr: rs1_addr, rs2_addr: rs2_addr,
            rs1_rdata: rs1_data, rs2_rdata: rs2_data, rd_addr: rd_addr,
            rd_wdata: (rd_addr == 0) ? 32'd0 : rd_data, pc_rdata: pc, pc_wdata: next_pc,
            mem_addr: {dmem_req.addr[31:2], 2'b00}, mem_rmask: dmem_req.rmask,
            mem_wmask: dmem_req.wmask,
            mem_rdata: (dmem_req.rmask != 0) ? dmem_rdata : 32'd0, mem_wdata: dmem_req.wdata};
      @(negedge clk);
      n++;
      check(rvfi == e, "record");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
