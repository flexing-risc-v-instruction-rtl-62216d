// tb_rissp_regfile: self-checking testbench of the register file.
//
// Random writes and reads are compared with a model array of 16 registers.
// Checked: reset clears every register; a write lands at the rising edge
// and is visible on both read ports the same cycle after; x0 reads zero
// whatever is written to it; register numbers x16-x31 read zero and do not
// alias onto x0-x15; nothing is written while 'we' is low.
module tb_rissp_regfile;
  import rissp_pkg::*;

  localparam int CYCLES = 5000;

  logic      clk = 1'b0;
  logic      rst_ni = 1'b1;
  reg_addr_t rs1_addr, rs2_addr, rd_addr;
  word_t     rs1_data, rs2_data, rd_data;
  logic      we;

  always #5 clk = ~clk;

  rissp_regfile dut (.clk, .rst_ni, .rs1_addr, .rs2_addr, .rs1_data, .rs2_data,
                     .we, .rd_addr, .rd_data);

  word_t model [16];
  int checks = 0, failures = 0;
  int n_hi = 0, n_x0 = 0, n_blocked = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s rs1=%0d rs2=%0d at %0t", what, rs1_addr, rs2_addr, $time);
    end
  endtask

  function automatic word_t expected(reg_addr_t a);
    return (a == 0 || a >= 16) ? 32'd0 : model[a[3:0]];
  endfunction

  initial begin : watchdog
    repeat (2 * CYCLES + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0;
    rd_addr = '0;
    rd_data = '0;
    #2 rst_ni = 1'b0;
    #2 rst_ni = 1'b1;
    foreach (model[i]) model[i] = 0;
    for (int i = 0; i < 32; i++) begin
      rs1_addr = 5'(i);
      rs2_addr = 5'(31 - i);
      #1 check(rs1_data == 0 && rs2_data == 0, "cleared by reset");
    end
    for (int c = 0; c < CYCLES; c++) begin
      @(negedge clk);
      we      = ($urandom_range(0, 7) != 0);
      rd_addr = 5'($urandom_range(0, 31));
      rd_data = $urandom;
      if (rd_addr >= 16) n_hi++;
      if (rd_addr == 0) n_x0++;
      if (!we) n_blocked++;
      @(posedge clk);
      if (we && rd_addr != 0 && rd_addr < 16) model[rd_addr[3:0]] = rd_data;
      #1;
      for (int j = 0; j < 4; j++) begin
        rs1_addr = 5'($urandom_range(0, 31));
        rs2_addr = (j == 0) ? rd_addr : 5'($urandom_range(0, 31));
        #1;
        check(rs1_data == expected(rs1_addr), "rs1 read");
        check(rs2_data == expected(rs2_addr), "rs2 read");
      end
    end
    check(n_hi > 0 && n_x0 > 0 && n_blocked > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
