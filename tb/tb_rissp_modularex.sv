// tb_rissp_modularex: self-checking testbench of the modular execution unit.
//
// Two units are built side by side: one with all 37 RV32E instructions and
// one with the af_detect subset. Both get the same random pc, instruction
// word, register values and memory word; their outputs are compared with
// the reference model in rv_ref_pkg. A word whose instruction a unit lacks
// must come out as 'illegal' with no register or memory effect and
// next_pc = pc + 4. Combinational: sampled 1 ns after the inputs change.
module tb_rissp_modularex;
  import rissp_pkg::*;
  import rissp_subsets_pkg::*;
  import rv_ref_pkg::*;

  localparam int STEPS = 20000;
  localparam subset_t SUBSETS [2] = '{RV32E_FULL, AF_DETECT};

  word_t     pc, insn, rs1_data, rs2_data, dmem_rdata;
  reg_addr_t rs1_addr [2], rs2_addr [2], rd_addr [2];
  word_t     next_pc [2], rd_data [2];
  dmem_req_t dmem_req [2];
  logic      illegal [2];

  for (genvar u = 0; u < 2; u++) begin : g_dut
    rissp_modularex #(.SUBSET(SUBSETS[u])) dut (
      .pc, .insn, .rs1_data, .rs2_data, .dmem_rdata,
      .rs1_addr(rs1_addr[u]), .rs2_addr(rs2_addr[u]), .next_pc(next_pc[u]),
      .rd_addr(rd_addr[u]), .rd_data(rd_data[u]), .dmem_req(dmem_req[u]),
      .sel(), .illegal(illegal[u]));
  end

  int checks = 0, failures = 0;
  int n_legal [2] = '{0, 0};
  int n_illegal [2] = '{0, 0};

  task automatic check(bit ok, int u, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL unit %0d %s insn=%h", u, what, insn);
    end
  endtask

  initial begin : watchdog
    #(STEPS * 10 + 1000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < STEPS; s++) begin
      ref_res_t r;
      int which;
      pc = $urandom & 32'hffff_fffc;
      insn = ($urandom_range(0, 4) != 0) ? rand_insn(insn_e'($urandom_range(0, NUM_INSN - 1)))
                                         : rand_other();
      rs1_data = rand_word();
      rs2_data = ($urandom_range(0, 3) == 0) ? rs1_data : rand_word();
      dmem_rdata = $urandom;
      #1;
      which = ref_which(insn);
      r = ref_exec(insn, pc, rs1_data, rs2_data, dmem_rdata);
      for (int u = 0; u < 2; u++) begin
        if (which >= 0 && SUBSETS[u][which]) begin
          n_legal[u]++;
          check(!illegal[u], u, "flagged illegal");
          check(next_pc[u] == r.next_pc, u, "next_pc");
          check(rs1_addr[u] == r.rs1 && rs2_addr[u] == r.rs2, u, "source addresses");
          check(rd_addr[u] == r.rd, u, "rd_addr");
          if (r.rd != 0) check(rd_data[u] == r.rd_data, u, "rd_data");
          check(dmem_req[u].rmask == r.rmask && dmem_req[u].wmask == r.wmask, u, "masks");
          if (r.rmask != 0 || r.wmask != 0) check(dmem_req[u].addr == r.mem_addr, u, "addr");
          if (r.wmask != 0) check(dmem_req[u].wdata == r.wdata, u, "wdata");
        end else begin
          n_illegal[u]++;
          check(illegal[u], u, "not flagged illegal");
          check(next_pc[u] == pc + 4, u, "no-op next_pc");
          check(rd_addr[u] == 0 && dmem_req[u].rmask == 0 && dmem_req[u].wmask == 0, u, "no-op");
        end
      end
      #9;
    end
    for (int u = 0; u < 2; u++) check(n_legal[u] > 0 && n_illegal[u] > 0, u, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
