// tb_rissp_jtype: self-checking testbench of the J-type instruction
// hardware block.
//
// One instance of the block is built for each of jal. Every
// step drives each instance with a random pc, random operand values and an
// instruction word that is, three times in four, a random encoding of the
// instance's own instruction and otherwise some other instruction or a
// corrupted word. The block's 'hit' must match the reference decoder and,
// for its own instruction, every output must match the reference model in
// rv_ref_pkg. The blocks are combinational: outputs are sampled 1 ns after
// the inputs change. Every instance must have seen its own instruction.
module tb_rissp_jtype;
  import rissp_pkg::*;
  import rv_ref_pkg::*;

  localparam int N = 1;
  localparam insn_e IDS [N] = '{I_JAL};
  localparam int STEPS = 4000;

  word_t     pc_v [N];
  word_t     insn_v [N];
  logic      hit_v [N];
  word_t     next_pc_v [N];
  reg_addr_t rdest_addr_v [N];
  word_t     rdest_data_v [N];

  for (genvar k = 0; k < N; k++) begin : g_dut
    rissp_jtype #(.INSN(IDS[k])) dut (
      .pc(pc_v[k]),
      .insn(insn_v[k]),
      .next_pc(next_pc_v[k]),
      .rdest_addr(rdest_addr_v[k]),
      .rdest_data(rdest_data_v[k]),
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
      end
      #1;
      for (int k = 0; k < N; k++) begin
        exp_hit = (ref_which(insn_v[k]) == int'(IDS[k]));
        r = ref_exec(insn_v[k], pc_v[k], 32'd0, 32'd0, 32'd0);
        check(hit_v[k] == exp_hit, k, "hit");
        if (exp_hit) begin
          seen[k]++;
          check(next_pc_v[k] == r.next_pc, k, "next_pc");
          check(rdest_addr_v[k] == r.rd, k, "rdest_addr");
          if (r.rd != 0) check(rdest_data_v[k] == r.rd_data, k, "rdest_data");
        end
      end
      #9;
    end
    for (int k = 0; k < N; k++) check(seen[k] > 0, k, "never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
