// tb_rissp_lockstep: reusable checking harness for one RISSP configuration.
//
// Builds a core with instruction subset SUBSET, its two behavioural
// memories and an instruction-set simulator (rv_ref_pkg::rv_iss) of the
// same subset. It runs RUNS random programs of RUN_CYCLES cycles each
// (reset between them); programs are drawn from SUBSET with about one word
// in twenty from outside it, and branch/jump offsets kept short so the
// programs loop through their own code. Every RVFI record is compared with
// the simulator. When finished it raises 'done' with its counts; 'checks'
// includes one check per subset instruction that it was executed at least
// once, and one that an unsupported word was met and retired as a no-op.
module tb_rissp_lockstep
  import rissp_pkg::*;
  import rv_ref_pkg::*;
#(
  parameter subset_t SUBSET     = rissp_subsets_pkg::AF_DETECT,
  parameter int      RUNS       = 40,
  parameter int      RUN_CYCLES = 200,
  parameter int      MEM_WORDS  = 1024
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic done
);
  logic       rst_ni;
  word_t      imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata;
  logic [3:0] dmem_wmask, dmem_rmask;
  logic       illegal_insn;
  rvfi_t      rvfi;

  rissp #(.SUBSET(SUBSET)) dut (
    .clk, .rst_ni, .imem_addr, .imem_rdata,
    .dmem_addr, .dmem_wdata, .dmem_wmask, .dmem_rmask, .dmem_rdata,
    .illegal_insn, .rvfi);

  tb_memory #(.WORDS(MEM_WORDS)) u_imem (
    .clk, .addr(imem_addr), .rdata(imem_rdata), .wmask(4'b0), .wdata(32'b0));
  tb_memory #(.WORDS(MEM_WORDS)) u_dmem (
    .clk, .addr(dmem_addr), .rdata(dmem_rdata), .wmask(dmem_wmask), .wdata(dmem_wdata));

  rv_iss iss = new(MEM_WORDS, MEM_WORDS, SUBSET);
  int    n_exec [NUM_INSN];
  int    n_trap;
  bit    compare_on;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 5)
        $display("FAIL %m %s: pc=%h insn=%h", what, rvfi.pc_rdata, rvfi.insn);
    end
  endtask

  always @(negedge clk) begin
    if (compare_on && rst_ni) begin
      ref_res_t r;
      int       which;
      word_t    ipc;
      ipc   = iss.pc;
      which = ref_which(iss.imem[iss.iidx(ipc)]);
      r     = iss.step();
      check(rvfi.valid && rvfi.pc_rdata == ipc && rvfi.pc_wdata == r.next_pc, "pc");
      check(rvfi.trap == !r.legal, "trap");
      check(rvfi.rd_addr == r.rd && rvfi.rd_wdata == r.rd_data, "rd");
      check(rvfi.mem_rmask == r.rmask && rvfi.mem_wmask == r.wmask, "memory masks");
      if (r.wmask != 0) check(rvfi.mem_wdata == r.wdata, "memory write data");
      if (r.legal) n_exec[which]++; else n_trap++;
    end
  end

  initial begin
    automatic int n = subset_size(SUBSET);
    checks = 0; failures = 0; done = 1'b0; n_trap = 0;
    compare_on = 1'b0;
    rst_ni = 1'b0;
    foreach (n_exec[i]) n_exec[i] = 0;
    for (int run = 0; run < RUNS; run++) begin
      #1;
      compare_on = 1'b0;
      rst_ni = 1'b0;
      for (int i = 0; i < MEM_WORDS; i++) begin
        word_t w;
        if ($urandom_range(0, 19) == 0) w = rand_other();
        else begin
          automatic insn_e id = subset_nth(SUBSET, $urandom_range(0, n - 1));
          // redraw control transfers half of the time so that straight-line
          // code dominates and programs rarely lock into a short loop
          if (id inside {I_JAL, I_JALR, I_BEQ, I_BNE, I_BLT, I_BGE, I_BLTU, I_BGEU} &&
              $urandom_range(0, 1) == 0)
            id = subset_nth(SUBSET, $urandom_range(0, n - 1));
          w = rand_insn(id);
          if (id inside {I_JAL, I_BEQ, I_BNE, I_BLT, I_BGE, I_BLTU, I_BGEU})
            w = encode(id, int'(w[11:7]), int'(w[19:15]), int'(w[24:20]), 4 * $urandom_range(0, 60) - 120);
        end
        u_imem.mem[i] = w;
        iss.imem[i] = w;
        u_dmem.mem[i] = (i % 3 == 0) ? $urandom_range(0, 64) : $urandom;
        iss.dmem[i] = u_dmem.mem[i];
      end
      repeat (2) @(negedge clk);
      #1;
      iss.reset();
      rst_ni = 1'b1;
      compare_on = 1'b1;
      repeat (RUN_CYCLES) @(negedge clk);
    end
    #1;
    compare_on = 1'b0;
    for (int i = 0; i < NUM_INSN; i++)
      if (SUBSET[i]) check(n_exec[i] > 0, "every subset instruction executed");
    check(n_trap > 0, "an unsupported word retired as a no-op");
    done = 1'b1;
  end
endmodule
