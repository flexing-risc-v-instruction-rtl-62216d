// tb_rissp: end-to-end testbench of the RISSP at its default configuration
// (the af_detect instruction subset, no parameter overrides).
//
// The core runs from two behavioural memories (tb_memory). Every record it
// emits on the RVFI port is compared with an instruction-set simulator
// (rv_ref_pkg::rv_iss) that runs the same program on its own copy of the
// memories, so registers, PC, memory traffic and traps are all checked one
// instruction at a time. Three parts:
//   1. A directed program: a loop sums eight words and tracks their maximum,
//      then stores the results with sw/sh/sb, reads a byte back, and ends in
//      a jump to itself. The stored words are also compared with values the
//      testbench computes from the input data.
//   2. Random programs drawn from the af_detect subset, with words outside
//      the subset mixed in, each run for a fixed number of cycles after a
//      reset.
//   3. Throughput: the core must retire exactly one instruction per clock
//      (the record order equals the cycle count).
// The mechanisms of the design are counted and each must occur: every
// instruction of the subset, taken and not-taken branches, unsupported words
// (trap, retired as no-op), writes to x0, loads and stores at a non-zero
// byte offset, and a register value read back from the register file.
module tb_rissp;
  import rissp_pkg::*;
  import rissp_subsets_pkg::*;
  import rv_ref_pkg::*;

  localparam int      MEM_WORDS = 4096;
  localparam subset_t SUBSET    = AF_DETECT;   // the core's default subset
  localparam int      RUNS      = 40;
  localparam int      RUN_CYCLES = 400;

  logic        clk = 1'b0;
  logic        rst_ni;
  word_t       imem_addr, imem_rdata;
  word_t       dmem_addr, dmem_wdata, dmem_rdata;
  logic [3:0]  dmem_wmask, dmem_rmask;
  logic        illegal_insn;
  rvfi_t       rvfi;

  always #5 clk = ~clk;

  rissp dut (
    .clk, .rst_ni, .imem_addr, .imem_rdata,
    .dmem_addr, .dmem_wdata, .dmem_wmask, .dmem_rmask, .dmem_rdata,
    .illegal_insn, .rvfi);

  tb_memory #(.WORDS(MEM_WORDS)) u_imem (
    .clk, .addr(imem_addr), .rdata(imem_rdata), .wmask(4'b0), .wdata(32'b0));
  tb_memory #(.WORDS(MEM_WORDS)) u_dmem (
    .clk, .addr(dmem_addr), .rdata(dmem_rdata), .wmask(dmem_wmask), .wdata(dmem_wdata));

  rv_iss iss = new(MEM_WORDS, MEM_WORDS, SUBSET);

  int checks = 0;
  int failures = 0;
  int n_exec [NUM_INSN];
  int n_taken = 0, n_not_taken = 0, n_trap = 0, n_x0_write = 0;
  int n_load_off = 0, n_store_off = 0, n_reg_read = 0;
  bit compare_on = 1'b0;
  longint cycles_since_reset = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10)
        $display("FAIL %s: pc=%h insn=%h order=%0d", what, rvfi.pc_rdata, rvfi.insn, rvfi.order);
    end
  endtask

  initial begin : watchdog
    repeat (RUNS * (RUN_CYCLES + 10) + 5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Lock-step comparison of every retired instruction with the ISS.
  always @(negedge clk) begin
    if (rst_ni) cycles_since_reset++;
    if (compare_on && rst_ni) begin
      check(rvfi.valid, "one instruction retired per cycle");
      if (rvfi.valid) begin
        ref_res_t r;
        int       which;
        word_t    ipc;
        ipc = iss.pc;
        which = ref_which(iss.imem[iss.iidx(ipc)]);
        r = iss.step();
        check(rvfi.order == 64'(cycles_since_reset - 1), "order = cycle count");
        check(rvfi.pc_rdata == ipc, "pc_rdata");
        check(rvfi.insn == iss.imem[iss.iidx(ipc)], "insn");
        check(rvfi.trap == !r.legal, "trap");
        check(rvfi.pc_wdata == r.next_pc, "pc_wdata");
        check(rvfi.rd_addr == r.rd, "rd_addr");
        check(rvfi.rd_wdata == r.rd_data, "rd_wdata");
        check(rvfi.mem_rmask == r.rmask, "mem_rmask");
        check(rvfi.mem_wmask == r.wmask, "mem_wmask");
        if (r.rmask != 0 || r.wmask != 0)
          check(rvfi.mem_addr == {r.mem_addr[31:2], 2'b00}, "mem_addr");
        if (r.wmask != 0) check(rvfi.mem_wdata == r.wdata, "mem_wdata");
        if (r.legal) begin
          check(rvfi.rs1_addr == r.rs1, "rs1_addr");
          check(rvfi.rs2_addr == r.rs2, "rs2_addr");
          n_exec[which]++;
          if (r.rs1 != 0 && rvfi.rs1_rdata != 0) n_reg_read++;
          if (r.rmask != 0 && r.mem_addr[1:0] != 0) n_load_off++;
          if (r.wmask != 0 && r.mem_addr[1:0] != 0) n_store_off++;
          if (rvfi.insn[6:0] == 7'h63) begin
            if (r.next_pc != ipc + 4) n_taken++; else n_not_taken++;
          end
          if (rvfi.insn[11:7] == 0 && rvfi.insn[6:0] inside {7'h13, 7'h33, 7'h37, 7'h03})
            n_x0_write++;
        end else begin
          n_trap++;
        end
      end
    end
  end

  // Reset changes are made 1 ns after a falling edge so that they never
  // race the comparison, which also runs at the falling edge.
  task automatic reset_core();
    #1;
    compare_on = 1'b0;
    rst_ni = 1'b0;
    repeat (2) @(negedge clk);
    #1;
    iss.reset();
    cycles_since_reset = 0;
    rst_ni = 1'b1;
    compare_on = 1'b1;
  endtask

  task automatic load_word(int idx, word_t w);
    u_imem.mem[idx] = w;
    iss.imem[idx] = w;
  endtask

  task automatic load_data(int idx, word_t w);
    u_dmem.mem[idx] = w;
    iss.dmem[idx] = w;
  endtask

  // Directed program (af_detect instructions only).
  task automatic directed();
    word_t data [8] = '{32'd812, 32'd790, 32'd1203, 32'd655, 32'd990, 32'd1187, 32'd702, 32'd845};
    word_t sum = 0, mx = 0;
    int p = 0;
    #1;
    compare_on = 1'b0;
    for (int i = 0; i < MEM_WORDS; i++) begin
      load_word(i, 32'h0000_006f);     // jal x0, 0 everywhere else
      load_data(i, 32'h0);
    end
    foreach (data[i]) begin
      load_data(1024 + i, data[i]);
      sum += data[i];
      if (data[i] > mx) mx = data[i];
    end
    load_word(p++, encode(I_LUI,  1, 0, 0, 1));        // x1 = 0x1000
    load_word(p++, encode(I_ADDI, 2, 0, 0, 8));        // x2 = 8
    load_word(p++, encode(I_ADDI, 3, 0, 0, 0));        // x3 = 0 (sum)
    load_word(p++, encode(I_ADDI, 4, 0, 0, 0));        // x4 = 0 (max)
    load_word(p++, encode(I_LW,   5, 1, 0, 0));        // loop: x5 = mem[x1]
    load_word(p++, encode(I_ADD,  3, 3, 5, 0));
    load_word(p++, encode(I_BGE,  0, 4, 5, 8));        // if max >= x5 skip
    load_word(p++, encode(I_ADDI, 4, 5, 0, 0));
    load_word(p++, encode(I_ADDI, 1, 1, 0, 4));
    load_word(p++, encode(I_ADDI, 2, 2, 0, -1));
    load_word(p++, encode(I_BNE,  0, 2, 0, -24));      // back to loop
    load_word(p++, encode(I_LUI,  6, 0, 0, 2));        // x6 = 0x2000
    load_word(p++, encode(I_SW,   0, 6, 3, 0));
    load_word(p++, encode(I_SH,   0, 6, 4, 4));
    load_word(p++, encode(I_LBU,  7, 6, 0, 1));
    load_word(p++, encode(I_SB,   0, 6, 7, 7));
    load_word(p++, encode(I_SRAI, 8, 3, 0, 2));
    load_word(p++, encode(I_SUB,  9, 3, 8, 0));
    load_word(p++, encode(I_XOR, 10, 9, 4, 0));
    load_word(p++, encode(I_SLTIU, 11, 10, 0, 100));
    load_word(p++, encode(I_SW,   0, 6, 10, 8));
    load_word(p++, encode(I_JAL, 12, 0, 0, 8));
    load_word(p++, encode(I_ADDI, 13, 0, 0, 1));       // skipped
    load_word(p++, 32'h0000_006f);                     // jal x0, 0: done
    reset_core();
    begin
      int c = 0;
      do begin
        @(negedge clk);
        c++;
      end while (!(rvfi.valid && rvfi.pc_wdata == rvfi.pc_rdata) && c < 500);
      check(c < 500, "directed program reaches its end");
    end
    @(negedge clk);
    check(u_dmem.mem[2048] == sum, "stored sum");
    check(u_dmem.mem[2049][15:0] == mx[15:0], "stored max (sh)");
    check(u_dmem.mem[2049][31:24] == sum[15:8], "stored byte (lbu/sb)");
    check(u_dmem.mem[2050] == ((sum - word_t'($signed(sum) >>> 2)) ^ mx), "stored xor");
    $display("directed: sum=%0d max=%0d", sum, mx);
  endtask

  // Random program from the subset, with some words outside it.
  task automatic random_run();
    int n = subset_size(SUBSET);
    #1;
    compare_on = 1'b0;
    for (int i = 0; i < MEM_WORDS; i++) begin
      word_t w;
      if ($urandom_range(0, 19) == 0) w = rand_other();
      else begin
        insn_e id = subset_nth(SUBSET, $urandom_range(0, n - 1));
        w = rand_insn(id);
        if (id inside {I_JAL, I_BEQ, I_BNE, I_BLT, I_BGE, I_BLTU, I_BGEU}) begin
          w = encode(id, int'(w[11:7]), int'(w[19:15]), int'(w[24:20]), 4 * $urandom_range(0, 60) - 120);
        end
      end
      load_word(i, w);
      load_data(i, (i % 3 == 0) ? $urandom_range(0, 64) : $urandom);
    end
    reset_core();
    repeat (RUN_CYCLES) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < NUM_INSN; i++) n_exec[i] = 0;
    rst_ni = 1'b0;
    directed();
    for (int k = 0; k < RUNS; k++) random_run();
    compare_on = 1'b0;
    for (int i = 0; i < NUM_INSN; i++)
      if (SUBSET[i]) begin
        checks++;
        if (n_exec[i] == 0) begin
          failures++;
          $display("FAIL %s never executed", insn_e'(i));
        end
      end
    $display("taken=%0d not_taken=%0d trap=%0d x0_write=%0d load_off=%0d store_off=%0d reg_read=%0d",
             n_taken, n_not_taken, n_trap, n_x0_write, n_load_off, n_store_off, n_reg_read);
    check(n_taken > 0, "a taken branch");
    check(n_not_taken > 0, "a not-taken branch");
    check(n_trap > 0, "an unsupported word");
    check(n_x0_write > 0, "a write to x0");
    check(n_load_off > 0, "a load at a byte offset");
    check(n_store_off > 0, "a store at a byte offset");
    check(n_reg_read > 0, "a register read back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
