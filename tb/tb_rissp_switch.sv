// tb_rissp_switch: self-checking testbench of the ModularEX switch.
//
// The switch is built for the af_detect subset (23 blocks). Its block
// inputs are driven with made-up block outputs whose fields encode the
// block number, so the testbench can tell which block was forwarded; each
// made-up block reports 'hit' only for a word of its own instruction, as a
// real block does, and at times not even then. For a
// random instruction word the expected block is the position of the
// word's instruction (found by the reference decoder) within the subset;
// a word outside the subset, or one whose block reports no hit, must give
// 'illegal' and the no-op outputs (next_pc = pc + 4, rd = x0, no memory
// access). Combinational: outputs are sampled 1 ns after the inputs.
module tb_rissp_switch;
  import rissp_pkg::*;
  import rissp_subsets_pkg::*;
  import rv_ref_pkg::*;

  localparam subset_t SUBSET = AF_DETECT;
  localparam int      NBLK   = subset_size(SUBSET);
  localparam int      SEL_W  = $clog2(NBLK);
  localparam int      STEPS  = 20000;

  word_t            pc, insn;
  blk_dec_t         blk_dec [NBLK];
  dmem_req_t        blk_mem [NBLK];
  blk_out_t         blk_out [NBLK];
  reg_addr_t        rs1_addr, rs2_addr, rd_addr;
  word_t            next_pc, rd_data;
  dmem_req_t        dmem_req;
  logic [SEL_W-1:0] sel;
  logic             illegal;

  rissp_switch #(.SUBSET(SUBSET)) dut (
    .pc, .insn, .blk_dec, .blk_mem, .blk_out, .rs1_addr, .rs2_addr, .next_pc,
    .rd_addr, .rd_data, .dmem_req, .sel, .illegal);

  int checks = 0, failures = 0;
  int n_sel [NBLK];
  int n_illegal = 0, n_nohit = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s insn=%h sel=%0d", what, insn, sel);
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
    foreach (n_sel[k]) n_sel[k] = 0;
    for (int s = 0; s < STEPS; s++) begin
      int which, exp_k;
      bit nohit;
      pc   = $urandom;
      insn = ($urandom_range(0, 3) != 0) ? rand_insn(subset_nth(SUBSET, $urandom_range(0, NBLK - 1)))
                                         : rand_other();
      nohit = ($urandom_range(0, 15) == 0);
      for (int k = 0; k < NBLK; k++) begin
        blk_dec[k] = '{hit: !nohit && (ref_which(insn) == int'(subset_nth(SUBSET, k))),
                       rs1_addr: 5'(k), rs2_addr: 5'(k + 1)};
        blk_mem[k] = '{addr: 32'(k), wdata: ~32'(k), wmask: 4'(k), rmask: 4'(k + 1)};
        blk_out[k] = '{next_pc: 32'h1000 + 32'(k), rd_addr: 5'(k + 2), rd_data: 32'hd000 + 32'(k)};
      end
      #1;
      which = ref_which(insn);
      exp_k = -1;
      if (which >= 0 && SUBSET[which])
        for (int k = 0; k < NBLK; k++) if (int'(subset_nth(SUBSET, k)) == which) exp_k = k;
      if (exp_k >= 0) begin
        check(sel == SEL_W'(exp_k), "sel");
        check(rs1_addr == 5'(exp_k) && rs2_addr == 5'(exp_k + 1), "source addresses");
      end
      if (exp_k >= 0 && !nohit) begin
        n_sel[exp_k]++;
        check(!illegal, "legal word flagged");
        check(next_pc == 32'h1000 + 32'(exp_k), "next_pc");
        check(rd_addr == 5'(exp_k + 2) && rd_data == 32'hd000 + 32'(exp_k), "rd");
        check(dmem_req.addr == 32'(exp_k) && dmem_req.wdata == ~32'(exp_k) &&
              dmem_req.wmask == 4'(exp_k) && dmem_req.rmask == 4'(exp_k + 1), "dmem");
      end else begin
        if (exp_k >= 0) n_nohit++; else n_illegal++;
        check(illegal, "illegal");
        check(next_pc == pc + 4, "no-op next_pc");
        check(rd_addr == 0 && dmem_req.wmask == 0 && dmem_req.rmask == 0, "no-op has no effect");
      end
      #9;
    end
    for (int k = 0; k < NBLK; k++) check(n_sel[k] > 0, "every block selected");
    check(n_illegal > 0 && n_nohit > 0, "both kinds of illegal word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
