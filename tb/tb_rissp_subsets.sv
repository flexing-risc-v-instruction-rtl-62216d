// tb_rissp_subsets: runs every instruction-subset configuration of the
// RISSP that the evaluation uses - one core per program subset (the Embench
// programs and the three extreme-edge programs at -O2), the full RV32E core
// and the twelve-instruction minimal core - each inside a lock-step harness
// (tb_rissp_lockstep) that compares it instruction by instruction with a
// reference simulator of the same subset. The real programs are not
// available as binaries, so each core runs random programs drawn from its
// own subset, with unsupported words mixed in; every instruction of every
// subset must execute at least once.
module tb_rissp_subsets;
  import rissp_pkg::*;
  import rissp_subsets_pkg::*;

  localparam int N = 27;
  localparam subset_t SUBSETS [N] = '{AHA_MONT64, CRC32, CUBIC, EDN, HUFFBENCH, MATMULT_INT, MD5SUM, MINVER, NBODY, NETTLE_AES, NETTLE_SHA256, NSICHNEU, PICOJPEG, PRIMECOUNT, QRDUINO, SGLIB_COMBINED, SLRE, ST, STATEMATE, TARFIND, UD, WIKISORT, ARMPIT, XGBOOST, AF_DETECT, RV32E_FULL, MINIMAL12};
  localparam string   NAMES [N] = '{"aha_mont64", "crc32", "cubic", "edn", "huffbench", "matmult_int", "md5sum", "minver", "nbody", "nettle_aes", "nettle_sha256", "nsichneu", "picojpeg", "primecount", "qrduino", "sglib_combined", "slre", "st", "statemate", "tarfind", "ud", "wikisort", "armpit", "xgboost", "af_detect", "rv32e_full", "minimal12"};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int   checks_v [N];
  int   failures_v [N];
  logic done_v [N];

  for (genvar k = 0; k < N; k++) begin : g_cfg
    tb_rissp_lockstep #(.SUBSET(SUBSETS[k])) u_cfg (
      .clk, .checks(checks_v[k]), .failures(failures_v[k]), .done(done_v[k]));
  end

  initial begin : watchdog
    repeat (40 * 210 + 1000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

  initial begin
    automatic int checks = 0, failures = 0;
    bit all_done;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int k = 0; k < N; k++) all_done &= done_v[k];
    end while (!all_done);
    for (int k = 0; k < N; k++) begin
      $display("%-16s %2d instructions: checks=%0d failures=%0d", NAMES[k],
               subset_size(SUBSETS[k]), checks_v[k], failures_v[k]);
      checks += checks_v[k];
      failures += failures_v[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
