// tb_fastirq_ctrl -- self-checking test of the fastirq saving FSM.
//
// The register file is replaced by a function of the save read address
// (word 0xA000_0000 + register number) and sp_new_i is a fixed value. For
// an entry with a memory that grants every cycle the test checks: the
// stack-pointer hand-over strobe and BANKSEL toggle, busy for exactly
// NSAVE = 9 cycles, one store per cycle to frame + 4*k (k = 1..9) with the
// registers ra, t0, a0, a1, a2, a3, t1 and then mepc and mcause as they
// were in the first save cycle (the inputs are changed afterwards), the
// progress count, and the bank-restore flag, which an emret switch clears
// while toggling BANKSEL back. A second entry runs against a memory that
// grants at random and checks the same 9 words arrive in order.
module tb_fastirq_ctrl;
  import cv32rt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic entry, esw, bs, spsw, busy, rok, gnt;
  word_t mepc, mcause, spn, srd, fb;
  logic [4:0] sra, wdone;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  int checks = 0, failures = 0;

  fastirq_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .entry_i(entry), .emret_switch_i(esw),
    .mepc_i(mepc), .mcause_i(mcause), .banksel_o(bs), .sp_switch_o(spsw), .sp_new_i(spn),
    .save_raddr_o(sra), .save_rdata_i(srd), .mem_req_o(mreq), .mem_rsp_i(mrsp),
    .busy_o(busy), .bank_restore_ok_o(rok), .frame_base_o(fb), .words_done_o(wdone), .restore_mepc_o(), .restore_mcause_o());

  always #5 clk = ~clk;
  assign srd = 32'hA000_0000 | word_t'(sra);
  assign mrsp = '{gnt: gnt, rvalid: 1'b0, rdata: '0};

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  word_t exp_data [9];
  initial begin
    int regs [7] = '{1, 5, 10, 11, 12, 13, 6};
    for (int k = 0; k < 7; k++) exp_data[k] = 32'hA000_0000 | regs[k];
    exp_data[7] = 32'h0000_0200;
    exp_data[8] = 32'h8000_0005;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, cyc;
    entry = 0; esw = 0; mepc = 0; mcause = 0; spn = 32'h0000_1000 - 36; gnt = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(!bs && !busy && !rok, "reset state");
    @(negedge clk); entry = 1;
    #1 check(spsw, "sp hand-over strobe on entry");
    @(posedge clk); #1; entry = 0;
    mepc = 32'h200; mcause = 32'h8000_0005;  // values the CSRs hold after entry
    check(bs && busy && rok && fb == 32'h1000 - 36, "bank switched, saving, frame base");
    n = 0; cyc = 0;
    while (busy && cyc < 30) begin
      #1;
      check(mreq.req && mreq.we && mreq.be == 4'hF, "store request");
      check(wdone == 5'(n), "progress count");
      check(mreq.addr == 32'h1000 - 36 + 4*(n+1), "frame address");
      check(mreq.wdata == exp_data[n], "frame word");
      if (n == 1) begin mepc = 32'hDEAD; mcause = 32'hBEEF; end // must be latched already
      @(posedge clk); #1; n++; cyc++;
    end
    check(n == 9 && cyc == 9, "nine words in nine cycles");
    check(!mreq.req && wdone == 5'd9, "idle after save");
    // emret switch back
    @(negedge clk); esw = 1;
    @(posedge clk); #1; esw = 0;
    check(!bs && !rok, "emret switch toggles back and clears restore flag");
    // second entry with random grants
    mepc = 32'h200; mcause = 32'h8000_0005;
    @(negedge clk); entry = 1;
    @(posedge clk); #1; entry = 0;
    n = 0; cyc = 0;
    while (busy && cyc < 100) begin
      word_t a, d;
      @(negedge clk);
      gnt = 1'($urandom);
      a = mreq.addr; d = mreq.wdata;
      if (gnt) begin
        check(a == 32'h1000 - 36 + 4*(n+1) && d == exp_data[n], "word under random grants");
        n++;
      end
      @(posedge clk); #1; cyc++;
    end
    check(n == 9, "all nine words under random grants");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
