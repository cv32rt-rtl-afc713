// tb_fastirq_regfile -- self-checking test of the banked register file.
//
// A shadow model of both banks is kept in the testbench. For 3000 random
// cycles the test writes through W0/W1 (same-address collisions included),
// toggles BANKSEL now and then and raises sp_switch_i, and checks every
// cycle: the three read ports return the active bank, the save port the
// inactive bank, x0 and the registers above x15 read zero, W1 wins over W0, and a stack-pointer
// hand-over writes the inactive bank's sp with the active sp minus 36.
module tb_fastirq_regfile;
  import cv32rt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic bs, we0, we1, spsw;
  logic [4:0] wa0, wa1, ra0, ra1, ra2, sra;
  word_t wd0, wd1, rd0, rd1, rd2, srd, spn;
  int checks = 0, failures = 0;
  word_t m [2][32];
  localparam int NR = 16;   // registers per bank of the default configuration

  fastirq_regfile dut (.clk_i(clk), .rst_ni(rst_n), .banksel_i(bs),
    .we0_i(we0), .waddr0_i(wa0), .wdata0_i(wd0), .we1_i(we1), .waddr1_i(wa1), .wdata1_i(wd1),
    .raddr0_i(ra0), .rdata0_o(rd0), .raddr1_i(ra1), .rdata1_o(rd1), .raddr2_i(ra2), .rdata2_o(rd2),
    .save_raddr_i(sra), .save_rdata_o(srd), .sp_switch_i(spsw), .sp_new_o(spn));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic word_t mr(input logic b, input logic [4:0] a);
    return (a == 0 || a >= NR) ? '0 : m[b][a];
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bs = 0; we0 = 0; we1 = 0; spsw = 0; wa0 = 0; wa1 = 0; wd0 = 0; wd1 = 0;
    ra0 = 0; ra1 = 0; ra2 = 0; sra = 0;
    for (int b = 0; b < 2; b++) for (int i = 0; i < 32; i++) m[b][i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // directed: hand over sp
    @(negedge clk); we0 = 1; wa0 = 2; wd0 = 32'h0000_1000;
    @(posedge clk); #1; we0 = 0; m[0][2] = 32'h1000;
    @(negedge clk); spsw = 1;
    #1 check(spn == 32'h0000_1000 - 36, "sp adder: sp - STACKSIZE");
    @(posedge clk); #1; spsw = 0; m[1][2] = 32'h1000 - 36;
    @(negedge clk); bs = 1; ra0 = 2; sra = 2;
    #1 check(rd0 == 32'h1000 - 36 && srd == 32'h1000, "new bank sees adjusted sp, save port the old");
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if ($urandom_range(0, 20) == 0) bs = ~bs;
      we0 = 1'($urandom); we1 = 1'($urandom);
      wa0 = 5'($urandom); wa1 = ($urandom_range(0, 3) == 0) ? wa0 : 5'($urandom);
      wd0 = $urandom; wd1 = $urandom;
      spsw = ($urandom_range(0, 15) == 0);
      ra0 = 5'($urandom); ra1 = 5'($urandom); ra2 = 5'($urandom); sra = 5'($urandom);
      #1;
      check(rd0 == mr(bs, ra0) && rd1 == mr(bs, ra1) && rd2 == mr(bs, ra2), "read ports");
      check(srd == mr(!bs, sra), "save port reads the inactive bank");
      check(spn == m[bs][2] - 36, "sp_new");
      @(posedge clk);
      if (we0 && wa0 != 0 && wa0 < NR) m[bs][wa0] = wd0;
      if (we1 && wa1 != 0 && wa1 < NR) m[bs][wa1] = wd1;
      if (spsw) m[!bs][2] = spn;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
