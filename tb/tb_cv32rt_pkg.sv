// tb_cv32rt_pkg -- checks the save-frame layout and constants of cv32rt_pkg.
//
// The frame written by the background save must match the software restore
// sequence of a fastirq handler: with the embedded ABI it reloads ra, t0,
// a0, a1, a2, a3, t1 from sp+4 .. sp+28 and mepc, mcause from sp+32 and
// sp+36, then moves sp up by 36 bytes. The integer-ABI option appends t2,
// a4-a7 and t3-t6 and moves sp by 72 bytes. The expected values below are
// written out by hand from that sequence, not derived from the package.
module tb_cv32rt_pkg;
  import cv32rt_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  localparam int E_REGS [7]  = '{1, 5, 10, 11, 12, 13, 6};
  localparam int I_REGS [16] = '{1, 5, 10, 11, 12, 13, 6, 7, 14, 15, 16, 17, 28, 29, 30, 31};

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    check(NSAVE == 9 && STACKSIZE == 36, "embedded frame: 9 words, 36 bytes");
    check(NSAVE_I == 18 && STACKSIZE_I == 72, "integer frame: 18 words, 72 bytes");
    check(nsave(1'b1) == 9 && nsave(1'b0) == 18, "nsave()");
    check(SLOT_MEPC == 7 && SLOT_MCAUSE == 8, "machine-state slots of the embedded frame");
    check(NREGS == 16 && NREGS_I == 32 && REG_SP == 5'd2, "bank sizes and sp index");
    for (int k = 0; k < 7; k++)
      check(save_slot_reg(k, 1'b1) == 5'(E_REGS[k]), $sformatf("embedded slot %0d", k));
    for (int k = 7; k < 9; k++)
      check(save_slot_reg(k, 1'b1) == 5'd0, $sformatf("embedded slot %0d is machine state", k));
    for (int k = 0; k < 16; k++)
      check(save_slot_reg(k, 1'b0) == 5'(I_REGS[k]), $sformatf("integer slot %0d", k));
    for (int k = 16; k < 18; k++)
      check(save_slot_reg(k, 1'b0) == 5'd0, $sformatf("integer slot %0d is machine state", k));
    check(CLICINT_BASE == 16'h1000, "clicint base");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
