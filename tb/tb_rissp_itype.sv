// tb_rissp_itype: self-checking testbench of the I-type instruction
// hardware block.
//
// One instance of the block is built for each of the five loads, nine register-immediate operations and jalr; loads see random addresses, so every byte offset is exercised. Every
// step drives each instance with a random pc, random operand values and an
// instruction word that is, three times in four, a random encoding of the
// instance's own instruction and otherwise some other instruction or a
// corrupted word. The block's 'hit' must match the reference decoder and,
// for its own instruction, every output must match the reference model in
// rv_ref_pkg. The blocks are combinational: outputs are sampled 1 ns after
// the inputs change. Every instance must have seen its own instruction.
module tb_rissp_itype;
  import rissp_pkg::*;
  import rv_ref_pkg::*;

  localparam int N = 15;
  localparam insn_e IDS [N] = '{I_LB, I_LH, I_LW, I_LBU, I_LHU, I_ADDI, I_SLTI, I_SLTIU, I_XORI, I_ORI, I_ANDI, I_SLLI, I_SRLI, I_SRAI, I_JALR};
  localparam int STEPS = 4000;

  word_t     pc_v [N];
  word_t     insn_v [N];
  logic      hit_v [N];
  word_t     rs1_data_v [N];
  word_t     dmem_rdata_v [N];
  word_t     next_pc_v [N];
  reg_addr_t rs1_addr_v [N];
  reg_addr_t rdest_addr_v [N];
  word_t     rdest_data_v [N];
  dmem_req_t dmem_req_v [N];

  for (genvar k = 0; k < N; k++) begin : g_dut
    rissp_itype #(.INSN(IDS[k])) dut (
      .pc(pc_v[k]),
      .insn(insn_v[k]),
      .rs1_data(rs1_data_v[k]),
      .dmem_rdata(dmem_rdata_v[k]),
      .next_pc(next_pc_v[k]),
      .rs1_addr(rs1_addr_v[k]),
      .rdest_addr(rdest_addr_v[k]),
      .rdest_data(rdest_data_v[k]),
      .dmem_req(dmem_req_v[k]),
      .hit(hit_v[k]));
  end

  int checks = 0;
  int failures = 0;
  int seen [N];

  task automatic check(bit ok, int k, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10)
        $display("FAIL %s %s insn=%h pc=%h", IDS[k].name(), what, insn_v[k], pc_v[k]);
    end
  endtask

  initial begin : watchdog
    #(STEPS * 20 + 1000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_res_t r;
    bit       exp_hit;
    for (int k = 0; k < N; k++) seen[k] = 0;
    for (int s = 0; s < STEPS; s++) begin
      for (int k = 0; k < N; k++) begin
        pc_v[k]   = $urandom & 32'hffff_fffc;
        insn_v[k] = ($urandom_range(0, 3) != 0) ? rand_insn(IDS[k]) : rand_other();
        rs1_data_v[k] = rand_word();
        dmem_rdata_v[k] = $urandom;
      end
      #1;
      for (int k = 0; k < N; k++) begin
        exp_hit = (ref_which(insn_v[k]) == int'(IDS[k]));
        r = ref_exec(insn_v[k], pc_v[k], rs1_data_v[k], 32'd0, dmem_rdata_v[k]);
        check(hit_v[k] == exp_hit, k, "hit");
        if (exp_hit) begin
          seen[k]++;
          check(next_pc_v[k] == r.next_pc, k, "next_pc");
          check(rs1_addr_v[k] == r.rs1, k, "rs1_addr");
          check(rdest_addr_v[k] == r.rd, k, "rdest_addr");
          if (r.rd != 0) check(rdest_data_v[k] == r.rd_data, k, "rdest_data");
          check(dmem_req_v[k].rmask == r.rmask, k, "rmask");
          check(dmem_req_v[k].wmask == r.wmask, k, "wmask");
          if (r.rmask != 0 || r.wmask != 0) check(dmem_req_v[k].addr == r.mem_addr, k, "addr");
          if (r.wmask != 0) check(dmem_req_v[k].wdata == r.wdata, k, "wdata");
        end
      end
      #9;
    end
    for (int k = 0; k < N; k++) check(seen[k] > 0, k, "never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
