// tb_rissp_apps: application kernels of the three extreme-edge programs,
// each run on a RISSP built for that program's instruction subset.
//
// The original programs are not reproduced here. Three small kernels of
// the same kind are hand-assembled, each using only instructions of its
// program's subset:
//   af_detect - RR intervals between R-peak times (sub, stored as halfwords
//               with sh), their successive differences, and a 16 x 16
//               byte map of (RR, delta RR) cells (srli/srai/andi/slli/add,
//               lbu/sb). The number of occupied cells against a threshold
//               (sltiu, xor) is the AF / non-AF decision. It is run on a
//               regular and an irregular rhythm.
//   armpit    - two decision trees (one per value of the sample's first
//               byte) over byte features (lbu), nodes indexed with slli/add,
//               the walk called as a subroutine (jal/jalr), the leaf score
//               thresholded with sltiu.
//   xgboost   - one decision tree over word features; node links are
//               addresses, the feature address is formed with xor on a
//               32-byte aligned sample, the leaf value unpacked with srli
//               and the class bit formed with andi/xori.
// The testbench computes every expected output itself from the same input
// data and compares the data memory after the program ends (jump to
// itself). It also checks one retired instruction per clock. Each kernel
// runs on its own subset core, on the full-ISA core, and (for armpit) on
// the default af_detect core, which contains armpit's subset. Two
// deliberate mismatches show that a core without an instruction the code
// needs does not run it: the xgboost kernel (xori) on the af_detect core
// and the af_detect kernel on the xgboost and minimal cores must produce
// traps. Code retargeting is shown on the af_detect kernel: rewritten with
// only the twelve instructions of the minimal set, it gives the same
// results on a core built for that set and on the full-ISA core.
// Mechanisms counted, each must occur: AF and non-AF decisions, both trees
// of armpit, both classes of xgboost, traps in the mismatched runs.
module tb_rissp_apps;
  import rissp_pkg::*;
  import rissp_subsets_pkg::*;
  import rv_ref_pkg::*;

  localparam int MEM_WORDS  = 4096;
  localparam int MAX_CYCLES = 20000;
  localparam int N_PEAKS    = 41;
  localparam int AF_TH      = 12;
  localparam int NS         = 24;

  logic clk = 1'b0;
  logic rst_ni = 1'b0;
  always #5 clk = ~clk;

  int   cyc   [5];
  int   ret   [5];
  int   trp   [5];
  logic halt  [5];

  // 0: af_detect (the default core), 1: armpit, 2: xgboost, 3: full ISA,
  // 4: the minimal twelve-instruction set
  tb_app_core #(.SUBSET(AF_DETECT),  .MEM_WORDS(MEM_WORDS)) h_af (
    .clk, .rst_ni, .cycles(cyc[0]), .retired(ret[0]), .traps(trp[0]), .halted(halt[0]));
  tb_app_core #(.SUBSET(ARMPIT),     .MEM_WORDS(MEM_WORDS)) h_arm (
    .clk, .rst_ni, .cycles(cyc[1]), .retired(ret[1]), .traps(trp[1]), .halted(halt[1]));
  tb_app_core #(.SUBSET(XGBOOST),    .MEM_WORDS(MEM_WORDS)) h_xg (
    .clk, .rst_ni, .cycles(cyc[2]), .retired(ret[2]), .traps(trp[2]), .halted(halt[2]));
  tb_app_core #(.SUBSET(RV32E_FULL), .MEM_WORDS(MEM_WORDS)) h_full (
    .clk, .rst_ni, .cycles(cyc[3]), .retired(ret[3]), .traps(trp[3]), .halted(halt[3]));
  tb_app_core #(.SUBSET(MINIMAL12),  .MEM_WORDS(MEM_WORDS)) h_min (
    .clk, .rst_ni, .cycles(cyc[4]), .retired(ret[4]), .traps(trp[4]), .halted(halt[4]));

  int checks = 0, failures = 0;
  int n_af = 0, n_nonaf = 0, n_tree0 = 0, n_tree1 = 0, n_cls0 = 0, n_cls1 = 0;
  int n_mismatch_traps = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (12 * (MAX_CYCLES + 20)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // A tiny assembler: instructions with optional label operands.
  typedef struct {
    insn_e id;
    int    rd, rs1, rs2, imm, lbl;
  } asm_t;

  asm_t  prog [$];
  int    lbl_at [16];
  word_t dmem_img [MEM_WORDS];

  function automatic void op(insn_e id, int rd, int rs1, int rs2, int imm);
    prog.push_back('{id: id, rd: rd, rs1: rs1, rs2: rs2, imm: imm, lbl: -1});
  endfunction
  function automatic void opl(insn_e id, int rd, int rs1, int rs2, int lbl);
    prog.push_back('{id: id, rd: rd, rs1: rs1, rs2: rs2, imm: 0, lbl: lbl});
  endfunction
  function automatic void label(int l);
    lbl_at[l] = prog.size();
  endfunction
  function automatic word_t assemble(int i);
    asm_t a = prog[i];
    int   imm = (a.lbl >= 0) ? 4 * (lbl_at[a.lbl] - i) : a.imm;
    return encode(a.id, a.rd, a.rs1, a.rs2, imm);
  endfunction

  function automatic void dset_byte(int addr, int v);
    dmem_img[addr / 4][8 * (addr % 4) +: 8] = 8'(v);
  endfunction

  // ------------------------------------------------------------------
  // Running a program on one of the cores.
  task automatic load_and_run(int c, output int cycles_used);
    #1;
    rst_ni = 1'b0;
    for (int i = 0; i < MEM_WORDS; i++) begin
      word_t w = (i < prog.size()) ? assemble(i) : 32'h0000_006f;
      case (c)
        0: begin h_af.put_imem(i, w);   h_af.put_dmem(i, dmem_img[i]);   end
        1: begin h_arm.put_imem(i, w);  h_arm.put_dmem(i, dmem_img[i]);  end
        2: begin h_xg.put_imem(i, w);   h_xg.put_dmem(i, dmem_img[i]);   end
        4: begin h_min.put_imem(i, w);  h_min.put_dmem(i, dmem_img[i]);  end
        default: begin h_full.put_imem(i, w); h_full.put_dmem(i, dmem_img[i]); end
      endcase
    end
    repeat (2) @(negedge clk);
    #1 rst_ni = 1'b1;
    cycles_used = 0;
    while (!halt[c] && cycles_used < MAX_CYCLES) begin
      @(negedge clk);
      cycles_used++;
    end
    check(ret[c] == cyc[c] - 1, "one instruction retired per clock");
  endtask

  function automatic word_t rd_mem(int c, int addr);
    case (c)
      0:       return h_af.get_dmem(addr / 4);
      1:       return h_arm.get_dmem(addr / 4);
      2:       return h_xg.get_dmem(addr / 4);
      4:       return h_min.get_dmem(addr / 4);
      default: return h_full.get_dmem(addr / 4);
    endcase
  endfunction

  // ------------------------------------------------------------------
  // af_detect kernel
  localparam int AF_PEAKS = 32'h1000, AF_RR = 32'h3000, AF_MAP = 32'h2400, AF_OUT = 32'h37f0;
  int    af_t [N_PEAKS];
  int    exp_cells;
  bit    exp_af;
  logic [15:0] exp_rr [N_PEAKS - 1];

  function automatic void af_program();
    prog.delete();
    op(I_LUI, 1, 0, 0, 1);               // x1 = peak times
    op(I_LUI, 2, 0, 0, 3);               // x2 = RR output (halfwords)
    op(I_LUI, 3, 0, 0, 2);
    op(I_ADDI, 3, 3, 0, 1024);           // x3 = cell map
    op(I_ADDI, 4, 0, 0, 256);
    op(I_ADDI, 5, 3, 0, 0);
    label(0);                            // clear the map
    op(I_SB, 0, 5, 0, 0);
    op(I_ADDI, 5, 5, 0, 1);
    op(I_ADDI, 4, 4, 0, -1);
    opl(I_BNE, 0, 4, 0, 0);
    op(I_LW, 6, 1, 0, 0);                // x6 = previous peak time
    op(I_ADDI, 7, 0, 0, 0);              // x7 = previous RR
    op(I_ADDI, 8, 0, 0, N_PEAKS - 1);
    op(I_ADDI, 9, 0, 0, 0);              // x9 = occupied cells
    label(1);
    op(I_ADDI, 1, 1, 0, 4);
    op(I_LW, 11, 1, 0, 0);
    op(I_SUB, 12, 11, 6, 0);             // RR
    op(I_ADDI, 6, 11, 0, 0);
    op(I_SH, 0, 2, 12, 0);
    op(I_ADDI, 2, 2, 0, 2);
    op(I_SUB, 13, 12, 7, 0);             // delta RR
    op(I_ADDI, 7, 12, 0, 0);
    opl(I_JAL, 10, 0, 0, 3);             // mark the cell
    op(I_ADDI, 8, 8, 0, -1);
    opl(I_BNE, 0, 8, 0, 1);
    op(I_LUI, 4, 0, 0, 3);
    op(I_ADDI, 4, 4, 0, 32'h7f0);
    op(I_SW, 0, 4, 9, 0);
    op(I_SLTIU, 5, 9, 0, AF_TH);
    op(I_ADDI, 6, 0, 0, 1);
    op(I_XOR, 5, 5, 6, 0);               // AF = cells >= threshold
    op(I_SW, 0, 4, 5, 4);
    label(2);
    opl(I_JAL, 0, 0, 0, 2);
    label(3);                            // cell subroutine
    op(I_SRLI, 14, 12, 0, 4);
    op(I_ANDI, 14, 14, 0, 15);
    op(I_SLLI, 14, 14, 0, 4);
    op(I_SRAI, 15, 13, 0, 3);
    op(I_ANDI, 15, 15, 0, 15);
    op(I_ADD, 14, 14, 15, 0);
    op(I_ADD, 14, 3, 14, 0);
    op(I_LBU, 15, 14, 0, 0);
    opl(I_BNE, 0, 15, 0, 4);
    op(I_ADDI, 9, 9, 0, 1);
    op(I_ADDI, 15, 0, 0, 1);
    op(I_SB, 0, 14, 15, 0);
    label(4);
    op(I_JALR, 0, 10, 0, 0);
  endfunction

  function automatic void af_data(bit irregular);
    bit map [256];
    int prev_rr = 0;
    foreach (dmem_img[i]) dmem_img[i] = $urandom;
    af_t[0] = $urandom_range(0, 100);
    for (int i = 1; i < N_PEAKS; i++)
      af_t[i] = af_t[i - 1] + (irregular ? $urandom_range(40, 260) : 150 + $urandom_range(0, 6) - 3);
    foreach (af_t[i]) dmem_img[AF_PEAKS / 4 + i] = af_t[i];
    exp_cells = 0;
    foreach (map[i]) map[i] = 1'b0;
    for (int i = 1; i < N_PEAKS; i++) begin
      int rr = af_t[i] - af_t[i - 1];
      int drr = rr - prev_rr;
      int idx = (((rr >> 4) & 15) << 4) + ((drr >>> 3) & 15);
      prev_rr = rr;
      exp_rr[i - 1] = 16'(rr);
      if (!map[idx]) begin
        map[idx] = 1'b1;
        exp_cells++;
      end
    end
    exp_af = (exp_cells >= AF_TH);
  endfunction

  // The same kernel retargeted to the minimal set {addi, add, and, xori,
  // sll, sra, jal, jalr, blt, bltu, lw, sw}: constants are built with
  // addi/add, sub becomes xori -1 / add / addi 1, srli and srai become sra
  // followed by the 4-bit mask, slli becomes sll, sh/lbu/sb become
  // read-modify-write sequences on the containing word, bne becomes blt
  // (the counters and flags are never negative) and sltiu becomes bltu.
  function automatic void af_program_min();
    prog.delete();
    op(I_ADDI, 1, 0, 0, 1024);
    op(I_ADD, 1, 1, 1, 0);
    op(I_ADD, 1, 1, 1, 0);               // x1 = 0x1000 peak times
    op(I_ADD, 2, 1, 1, 0);
    op(I_ADD, 2, 2, 1, 0);               // x2 = 0x3000 RR output
    op(I_ADD, 3, 1, 1, 0);
    op(I_ADDI, 3, 3, 0, 1024);           // x3 = 0x2400 cell map
    op(I_ADDI, 4, 0, 0, 64);
    op(I_ADDI, 5, 3, 0, 0);
    label(0);                            // clear the map, a word at a time
    op(I_SW, 0, 5, 0, 0);
    op(I_ADDI, 5, 5, 0, 4);
    op(I_ADDI, 4, 4, 0, -1);
    opl(I_BLT, 0, 0, 4, 0);
    op(I_LW, 6, 1, 0, 0);
    op(I_ADDI, 7, 0, 0, 0);
    op(I_ADDI, 8, 0, 0, N_PEAKS - 1);
    op(I_ADDI, 9, 0, 0, 0);
    label(1);
    op(I_ADDI, 1, 1, 0, 4);
    op(I_LW, 11, 1, 0, 0);
    op(I_XORI, 12, 6, 0, -1);            // x12 = x11 - x6
    op(I_ADD, 12, 12, 11, 0);
    op(I_ADDI, 12, 12, 0, 1);
    op(I_ADDI, 6, 11, 0, 0);
    // sh x12, 0(x2)
    op(I_ADDI, 4, 0, 0, -4);
    op(I_AND, 4, 2, 4, 0);               // word address
    op(I_ADDI, 5, 0, 0, 2);
    op(I_AND, 5, 2, 5, 0);
    op(I_ADD, 5, 5, 5, 0);
    op(I_ADD, 5, 5, 5, 0);
    op(I_ADD, 5, 5, 5, 0);               // lane shift, 0 or 16
    op(I_LW, 13, 4, 0, 0);
    op(I_ADDI, 14, 0, 0, 1);
    op(I_ADDI, 15, 0, 0, 16);
    op(I_SLL, 14, 14, 15, 0);
    op(I_ADDI, 14, 14, 0, -1);           // 0xffff
    op(I_AND, 15, 12, 14, 0);
    op(I_SLL, 15, 15, 5, 0);
    op(I_SLL, 14, 14, 5, 0);
    op(I_XORI, 14, 14, 0, -1);
    op(I_AND, 13, 13, 14, 0);
    op(I_ADD, 13, 13, 15, 0);
    op(I_SW, 0, 4, 13, 0);
    op(I_ADDI, 2, 2, 0, 2);
    op(I_XORI, 13, 7, 0, -1);            // x13 = x12 - x7
    op(I_ADD, 13, 13, 12, 0);
    op(I_ADDI, 13, 13, 0, 1);
    op(I_ADDI, 7, 12, 0, 0);
    opl(I_JAL, 10, 0, 0, 3);
    op(I_ADDI, 8, 8, 0, -1);
    opl(I_BLT, 0, 0, 8, 1);
    op(I_ADDI, 4, 0, 0, 1024);
    op(I_ADD, 4, 4, 4, 0);
    op(I_ADD, 4, 4, 4, 0);
    op(I_ADD, 5, 4, 4, 0);
    op(I_ADD, 4, 5, 4, 0);
    op(I_ADDI, 4, 4, 0, 32'h7f0);        // 0x37f0
    op(I_SW, 0, 4, 9, 0);
    op(I_ADDI, 5, 0, 0, AF_TH - 1);
    op(I_ADDI, 6, 0, 0, 1);
    opl(I_BLTU, 0, 5, 9, 5);             // cells > threshold - 1
    op(I_ADDI, 6, 0, 0, 0);
    label(5);
    op(I_SW, 0, 4, 6, 4);
    label(2);
    opl(I_JAL, 0, 0, 0, 2);
    label(3);                            // cell subroutine
    op(I_ADDI, 15, 0, 0, 4);
    op(I_SRA, 14, 12, 15, 0);
    op(I_ADDI, 15, 0, 0, 15);
    op(I_AND, 14, 14, 15, 0);
    op(I_ADDI, 15, 0, 0, 4);
    op(I_SLL, 14, 14, 15, 0);
    op(I_ADDI, 15, 0, 0, 3);
    op(I_SRA, 11, 13, 15, 0);
    op(I_ADDI, 15, 0, 0, 15);
    op(I_AND, 11, 11, 15, 0);
    op(I_ADD, 14, 14, 11, 0);
    op(I_ADD, 14, 3, 14, 0);             // byte address of the cell
    op(I_ADDI, 4, 0, 0, -4);
    op(I_AND, 4, 14, 4, 0);
    op(I_ADDI, 5, 0, 0, 3);
    op(I_AND, 5, 14, 5, 0);
    op(I_ADD, 5, 5, 5, 0);
    op(I_ADD, 5, 5, 5, 0);
    op(I_ADD, 5, 5, 5, 0);               // byte lane shift
    op(I_LW, 13, 4, 0, 0);
    op(I_SRA, 13, 13, 5, 0);
    op(I_ADDI, 15, 0, 0, 255);
    op(I_AND, 13, 13, 15, 0);            // lbu
    opl(I_BLT, 0, 0, 13, 4);
    op(I_ADDI, 9, 9, 0, 1);
    op(I_LW, 13, 4, 0, 0);               // sb 1
    op(I_ADDI, 11, 0, 0, 255);
    op(I_SLL, 11, 11, 5, 0);
    op(I_XORI, 11, 11, 0, -1);
    op(I_AND, 13, 13, 11, 0);
    op(I_ADDI, 15, 0, 0, 1);
    op(I_SLL, 15, 15, 5, 0);
    op(I_ADD, 13, 13, 15, 0);
    op(I_SW, 0, 4, 13, 0);
    label(4);
    op(I_JALR, 0, 10, 0, 0);
  endfunction

  task automatic af_run(int c, bit irregular, bit expect_ok, bit retargeted = 1'b0);
    int used;
    if (retargeted) af_program_min(); else af_program();
    af_data(irregular);
    load_and_run(c, used);
    if (!expect_ok) begin
      check(trp[c] > 0, "af_detect kernel traps on a core without its instructions");
      if (trp[c] > 0) n_mismatch_traps++;
      return;
    end
    check(halt[c], "af_detect kernel finishes");
    check(trp[c] == 0, "af_detect kernel: no unsupported instruction");
    for (int i = 0; i < N_PEAKS - 1; i++) begin
      word_t w = rd_mem(c, AF_RR + 2 * i);
      check(w[16 * (i % 2) +: 16] == exp_rr[i], "RR interval");
    end
    check(rd_mem(c, AF_OUT) == word_t'(exp_cells), "occupied cells");
    check(rd_mem(c, AF_OUT + 4) == word_t'(exp_af), "AF decision");
    if (exp_af) n_af++; else n_nonaf++;
    $display("af_detect on core %0d (retargeted=%0d): %0d cycles, %0d instructions, cells=%0d af=%0d",
             c, retargeted, used, prog.size(), exp_cells, exp_af);
  endtask

  // ------------------------------------------------------------------
  // armpit kernel: two trees of 31 nodes, 16 bytes per node:
  // {feature byte offset or -1, threshold or leaf score, left, right}
  localparam int AP_SMP = 32'h1000, AP_TREE0 = 32'h2000, AP_TREE1 = 32'h2400, AP_OUT = 32'h3000;
  int ap_feat [2][31], ap_thr [2][31];

  function automatic void armpit_program();
    prog.delete();
    op(I_LUI, 1, 0, 0, 1);
    op(I_LUI, 2, 0, 0, 3);
    op(I_ADDI, 3, 0, 0, NS);
    op(I_LUI, 14, 0, 0, 2);
    op(I_ADDI, 15, 14, 0, 1024);
    label(0);
    opl(I_JAL, 10, 0, 0, 2);
    op(I_SW, 0, 2, 9, 0);
    op(I_SLTIU, 8, 9, 0, 4);
    op(I_SW, 0, 2, 8, 4);
    op(I_ADDI, 2, 2, 0, 8);
    op(I_ADDI, 1, 1, 0, 16);
    op(I_ADDI, 3, 3, 0, -1);
    opl(I_BLT, 0, 0, 3, 0);
    label(1);
    opl(I_JAL, 0, 0, 0, 1);
    label(2);                            // classify the sample at x1
    op(I_LBU, 5, 1, 0, 0);
    op(I_ADDI, 4, 14, 0, 0);
    opl(I_BEQ, 0, 5, 0, 3);
    op(I_ADDI, 4, 15, 0, 0);
    label(3);
    op(I_ADDI, 11, 0, 0, 0);
    label(4);
    op(I_SLLI, 12, 11, 0, 4);
    op(I_ADD, 13, 4, 12, 0);
    op(I_LW, 5, 13, 0, 0);
    opl(I_BLT, 0, 5, 0, 6);
    op(I_ADD, 6, 1, 5, 0);
    op(I_LBU, 7, 6, 0, 0);
    op(I_LW, 8, 13, 0, 4);
    opl(I_BGE, 0, 7, 8, 5);
    op(I_LW, 11, 13, 0, 8);
    opl(I_JAL, 0, 0, 0, 4);
    label(5);
    op(I_LW, 11, 13, 0, 12);
    opl(I_JAL, 0, 0, 0, 4);
    label(6);
    op(I_LW, 9, 13, 0, 4);
    op(I_ANDI, 9, 9, 0, 255);
    op(I_JALR, 0, 10, 0, 0);
  endfunction

  task automatic armpit_run(int c);
    int used;
    armpit_program();
    foreach (dmem_img[i]) dmem_img[i] = $urandom;
    for (int t = 0; t < 2; t++)
      for (int n = 0; n < 31; n++) begin
        int base = (t == 0 ? AP_TREE0 : AP_TREE1) / 4 + 4 * n;
        ap_feat[t][n] = (n < 15) ? $urandom_range(1, 8) : -1;
        ap_thr[t][n]  = (n < 15) ? $urandom_range(0, 255) : $urandom_range(0, 7);
        dmem_img[base]     = ap_feat[t][n];
        dmem_img[base + 1] = (n < 15) ? ap_thr[t][n] : {($urandom_range(0, 1) != 0) ? 24'h5a5a5a : 24'h0, 8'(ap_thr[t][n])};
        dmem_img[base + 2] = 2 * n + 1;
        dmem_img[base + 3] = 2 * n + 2;
      end
    for (int s = 0; s < NS; s++) begin
      dset_byte(AP_SMP + 16 * s, $urandom_range(0, 1));
      for (int f = 1; f < 16; f++) dset_byte(AP_SMP + 16 * s + f, $urandom_range(0, 255));
    end
    load_and_run(c, used);
    check(halt[c], "armpit kernel finishes");
    check(trp[c] == 0, "armpit kernel: no unsupported instruction");
    for (int s = 0; s < NS; s++) begin
      int t = int'(dmem_img[(AP_SMP + 16 * s) / 4][7:0] != 0);
      int n = 0, score;
      while (ap_feat[t][n] >= 0) begin
        int a = AP_SMP + 16 * s + ap_feat[t][n];
        int v = int'(dmem_img[a / 4][8 * (a % 4) +: 8]);
        n = (v >= ap_thr[t][n]) ? 2 * n + 2 : 2 * n + 1;
      end
      score = ap_thr[t][n];
      check(rd_mem(c, AP_OUT + 8 * s) == word_t'(score), "armpit score");
      check(rd_mem(c, AP_OUT + 8 * s + 4) == word_t'(score < 4), "armpit class");
      if (t == 0) n_tree0++; else n_tree1++;
    end
    $display("armpit on core %0d: %0d cycles", c, used);
  endtask

  // ------------------------------------------------------------------
  // xgboost kernel: one tree of 31 nodes, links are node addresses, the
  // feature field is a byte offset into a 32-byte aligned sample.
  localparam int XG_SMP = 32'h1000, XG_TREE = 32'h2000, XG_OUT = 32'h3000;
  int xg_feat [31], xg_thr [31], xg_leaf [31];

  function automatic void xgboost_program();
    prog.delete();
    op(I_LUI, 1, 0, 0, 1);
    op(I_LUI, 2, 0, 0, 3);
    op(I_ADDI, 3, 0, 0, NS);
    label(0);
    opl(I_JAL, 10, 0, 0, 2);
    op(I_SW, 0, 2, 9, 0);
    op(I_ANDI, 8, 9, 0, 1);
    op(I_XORI, 8, 8, 0, 1);
    op(I_SW, 0, 2, 8, 4);
    op(I_ADDI, 2, 2, 0, 8);
    op(I_ADDI, 1, 1, 0, 32);
    op(I_ADDI, 3, 3, 0, -1);
    opl(I_BLT, 0, 0, 3, 0);
    label(1);
    opl(I_JAL, 0, 0, 0, 1);
    label(2);
    op(I_LUI, 4, 0, 0, 2);
    label(3);
    op(I_LW, 5, 4, 0, 0);
    opl(I_BLT, 0, 5, 0, 5);
    op(I_XOR, 6, 1, 5, 0);
    op(I_LW, 7, 6, 0, 0);
    op(I_LW, 8, 4, 0, 4);
    opl(I_BGE, 0, 7, 8, 4);
    op(I_LW, 4, 4, 0, 8);
    opl(I_JAL, 0, 0, 0, 3);
    label(4);
    op(I_LW, 4, 4, 0, 12);
    opl(I_JAL, 0, 0, 0, 3);
    label(5);
    op(I_LW, 9, 4, 0, 4);
    op(I_SRLI, 9, 9, 0, 1);
    op(I_JALR, 0, 10, 0, 0);
  endfunction

  task automatic xgboost_run(int c, bit expect_ok);
    int used;
    xgboost_program();
    foreach (dmem_img[i]) dmem_img[i] = $urandom;
    for (int n = 0; n < 31; n++) begin
      int base = XG_TREE / 4 + 4 * n;
      xg_feat[n] = (n < 15) ? 4 * $urandom_range(0, 7) : -1;
      xg_thr[n]  = $urandom_range(0, 2000) - 1000;
      xg_leaf[n] = $urandom_range(0, 100);
      dmem_img[base]     = xg_feat[n];
      dmem_img[base + 1] = (n < 15) ? xg_thr[n] : 2 * xg_leaf[n] + 1;
      dmem_img[base + 2] = XG_TREE + 16 * (2 * n + 1);
      dmem_img[base + 3] = XG_TREE + 16 * (2 * n + 2);
    end
    for (int s = 0; s < NS; s++)
      for (int f = 0; f < 8; f++) dmem_img[XG_SMP / 4 + 8 * s + f] = $urandom_range(0, 2000) - 1000;
    load_and_run(c, used);
    if (!expect_ok) begin
      check(trp[c] > 0, "xgboost kernel traps on a core without its instructions");
      if (trp[c] > 0) n_mismatch_traps++;
      return;
    end
    check(halt[c], "xgboost kernel finishes");
    check(trp[c] == 0, "xgboost kernel: no unsupported instruction");
    for (int s = 0; s < NS; s++) begin
      int n = 0;
      while (xg_feat[n] >= 0) begin
        int v = dmem_img[XG_SMP / 4 + 8 * s + xg_feat[n] / 4];
        n = (v >= xg_thr[n]) ? 2 * n + 2 : 2 * n + 1;
      end
      check(rd_mem(c, XG_OUT + 8 * s) == word_t'(xg_leaf[n]), "xgboost leaf");
      check(rd_mem(c, XG_OUT + 8 * s + 4) == word_t'(!xg_leaf[n][0]), "xgboost class");
      if (xg_leaf[n][0]) n_cls1++; else n_cls0++;
    end
    $display("xgboost on core %0d: %0d cycles", c, used);
  endtask

  // ------------------------------------------------------------------
  initial begin
    af_run(0, 1'b0, 1'b1);          // default core, regular rhythm
    af_run(0, 1'b1, 1'b1);          // default core, irregular rhythm
    af_run(3, 1'b1, 1'b1);          // full-ISA core
    af_run(2, 1'b1, 1'b0);          // xgboost core lacks sub, sh, ...
    af_run(4, 1'b1, 1'b0);          // so does the minimal core ...
    af_run(4, 1'b1, 1'b1, 1'b1);    // ... which runs the retargeted code
    af_run(4, 1'b0, 1'b1, 1'b1);
    af_run(3, 1'b1, 1'b1, 1'b1);    // and on the full-ISA core
    armpit_run(1);
    armpit_run(0);                  // armpit's subset is inside af_detect's
    armpit_run(3);
    xgboost_run(2, 1'b1);
    xgboost_run(3, 1'b1);
    xgboost_run(0, 1'b0);           // af_detect core lacks xori
    $display("af=%0d non_af=%0d tree0=%0d tree1=%0d class0=%0d class1=%0d mismatch_traps=%0d",
             n_af, n_nonaf, n_tree0, n_tree1, n_cls0, n_cls1, n_mismatch_traps);
    check(n_af > 0, "an AF decision");
    check(n_nonaf > 0, "a non-AF decision");
    check(n_tree0 > 0 && n_tree1 > 0, "both armpit trees used");
    check(n_cls0 > 0 && n_cls1 > 0, "both xgboost classes");
    check(n_mismatch_traps == 3, "mismatched cores trap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
