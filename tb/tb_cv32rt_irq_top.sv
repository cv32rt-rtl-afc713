// tb_cv32rt_irq_top -- end-to-end test of the CV32RT fastirq interrupt subsystem.
//
// The subsystem runs at its default size (256 interrupt sources). The
// testbench plays the part of the base pipeline: it writes and reads the
// register file through the pipeline ports, issues CSR accesses, mret and
// emret, follows the pc redirects (loading vector-table entries from its
// memory model), and answers the dedicated save port and the LSU with a
// zero-wait memory. It walks through the scenario of a nested interrupt
// followed by tail-chaining:
//   1. a task runs on bank 0 with known register values and sp = 0x1000;
//   2. source 1 (level 0x3F, vectored) fires: entry two clocks after the
//      line, bank switch, sp - 36 in the new bank, a 9-cycle background
//      save whose frame is checked word by word; a load to a frame word not
//      yet written is stalled; a higher-level source 3 raised at once has to
//      wait for the save, then preempts (nested entry, second save);
//   3. source 3's handler returns with emret by switching banks back;
//   4. meanwhile source 2 (same level as 1, lower priority) became pending;
//      source 1's emret tail-chains into it without any save or restore;
//   5. source 2's emret falls through (the task bank was reused), and the
//      software restore sequence of the handler listing reloads the
//      registers from the frame, moves sp back and executes mret; the task
//      registers are checked;
//   6. a short handler returns with emret at once: it is held until the
//      save is over, then returns by bank switch with the task intact;
//   7. a software-triggered interrupt (pending bit written over the CLIC
//      bus, as a context switch does), a kill of an offer that the core
//      did not take in time, mnxti claiming a non-vectored interrupt, and
//      the threshold masking a low-level source.
// Every mechanism is counted; one that never happened is a failure.
module tb_cv32rt_irq_top;
  import cv32rt_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [255:0] irq;
  reg_req_t creq;
  reg_rsp_t crsp;
  logic we0, we1;
  logic [4:0] wa0, wa1, ra0, ra1, ra2;
  word_t wd0, wd1, rd0, rd1, rd2;
  logic csr_en; csr_op_e csr_op; logic [11:0] csr_addr; word_t csr_wd, csr_rd; logic csr_err;
  priv_t priv; word_t pc;
  logic allowed, mret, emret, vfd;
  logic pc_set, vec_tab, take, e_stall, e_chain, e_switch, e_fall;
  word_t pc_tgt;
  logic lsu_req, lsu_stall;
  word_t lsu_addr;
  mem_req_t sreq;
  mem_rsp_t srsp;
  logic busy, bs, mie;
  irq_lvl_t mil;

  cv32rt_irq_top dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .clic_req_i(creq), .clic_rsp_o(crsp),
    .we0_i(we0), .waddr0_i(wa0), .wdata0_i(wd0), .we1_i(we1), .waddr1_i(wa1), .wdata1_i(wd1),
    .raddr0_i(ra0), .rdata0_o(rd0), .raddr1_i(ra1), .rdata1_o(rd1), .raddr2_i(ra2), .rdata2_o(rd2),
    .csr_en_i(csr_en), .csr_op_i(csr_op), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wd),
    .csr_rdata_o(csr_rd), .csr_err_o(csr_err),
    .cur_priv_i(priv), .pc_i(pc), .irq_allowed_i(allowed), .mret_i(mret), .emret_i(emret),
    .vec_fetch_done_i(vfd), .pc_set_o(pc_set), .pc_target_o(pc_tgt), .vec_table_o(vec_tab),
    .irq_take_o(take), .emret_stall_o(e_stall), .emret_chain_o(e_chain),
    .emret_switch_o(e_switch), .emret_fall_o(e_fall),
    .lsu_req_i(lsu_req), .lsu_addr_i(lsu_addr), .lsu_stall_o(lsu_stall),
    .save_mem_req_o(sreq), .save_mem_rsp_i(srsp), .lsu_mem_req_i('0), .lsu_mem_rsp_o(),
    .save_busy_o(busy), .banksel_o(bs), .mie_o(mie), .mil_o(mil));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ------------------------------------------------------ memory model
  // 16 KiB zero-wait scratchpad: the save port is granted every cycle.
  word_t mem [4096];
  assign srsp = '{gnt: sreq.req, rvalid: 1'b0, rdata: '0};
  always @(posedge clk) if (sreq.req && sreq.we) mem[sreq.addr[13:2]] <= sreq.wdata;

  // ------------------------------------------------------ pipeline model
  // Follows redirects; a vectored entry loads the handler address from the
  // table and reports the load one cycle later.
  word_t fetch_pc;
  always @(posedge clk) begin
    vfd <= 1'b0;
    if (pc_set) begin
      if (vec_tab) begin
        fetch_pc <= mem[pc_tgt[13:2]];
        vfd      <= 1'b1;
      end else begin
        fetch_pc <= pc_tgt;
      end
    end
  end

  // ------------------------------------------------------ mechanism counters
  int n_entry, n_nested, n_wait, n_save_cyc, n_lsu_stall, n_chain, n_switch, n_fall;
  int n_emret_stall, n_kill, n_mnxti, n_thresh, n_swirq;
  always @(posedge clk) if (rst_n) begin
    if (take) n_entry++;
    if (take && dut.i_csr.mil_q != 0) n_nested++;
    if (busy && dut.irq.valid && dut.i_csr.preempts && !dut.irq.kill_req) n_wait++;
    if (busy) n_save_cyc++;
    if (lsu_stall) n_lsu_stall++;
    if (e_chain) n_chain++;
    if (e_switch) n_switch++;
    if (e_fall) n_fall++;
    if (e_stall) n_emret_stall++;
    if (dut.ack.kill_ack) n_kill++;
    if (dut.i_csr.mnxti_hit) n_mnxti++;
  end

  // ------------------------------------------------------ helpers
  task automatic tick(); @(posedge clk); #1; endtask

  task automatic clic_wr(input logic [15:0] a, input word_t d);
    @(negedge clk);
    creq = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: 4'hF};
    tick();
    creq = '0;
  endtask

  // clicint word: ctl, mode M, edge-triggered, shv, ie, ip
  function automatic word_t clicint(input logic [7:0] ctl, input logic shv, input logic ip);
    return {ctl, 2'b11, 3'b000, 2'b01, shv, 7'd0, 1'b1, 7'd0, ip};
  endfunction

  task automatic csr(input csr_op_e op, input logic [11:0] a, input word_t d, output word_t r);
    @(negedge clk);
    csr_en = 1; csr_op = op; csr_addr = a; csr_wd = d;
    #1 r = csr_rd;
    tick();
    csr_en = 0;
  endtask

  task automatic reg_wr(input logic [4:0] a, input word_t d);
    @(negedge clk);
    we0 = 1; wa0 = a; wd0 = d;
    tick();
    we0 = 0;
  endtask

  function automatic word_t reg_rd(input logic [4:0] a);
    return (a == 0) ? '0 : dut.i_rf.mem_q[bs][a];
  endfunction

  task automatic do_emret();
    @(negedge clk); emret = 1;
    #1;
    while (e_stall) begin tick(); #0; end
    tick();
    emret = 0;
  endtask

  task automatic do_mret();
    @(negedge clk); mret = 1; tick(); mret = 0;
  endtask

  // cycles from now until irq_take, at most limit
  task automatic wait_take(input int limit, output int cyc);
    cyc = 0;
    while (!take && cyc < limit) begin @(posedge clk); #1; cyc++; end
    if (!take) cyc = -1;
  endtask

  // task register values
  localparam logic [4:0] RA = 1, SP = 2, T0 = 5, T1 = 6, A0 = 10, A1 = 11, A2 = 12, A3 = 13, S0 = 8;
  word_t task_val [16];
  localparam word_t TASK_SP = 32'h0000_1000;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t r, frame1;
    int cyc, lat;
    irq = '0; creq = '0; we0 = 0; we1 = 0; wa0 = 0; wa1 = 0; wd0 = 0; wd1 = 0;
    ra0 = 0; ra1 = 0; ra2 = 0; csr_en = 0; csr_op = CSR_OP_READ; csr_addr = 0; csr_wd = 0;
    priv = PRIV_M; pc = 32'h0000_0400; allowed = 1; mret = 0; emret = 0; vfd = 0;
    lsu_req = 0; lsu_addr = 0; fetch_pc = 0;
    n_entry = 0; n_nested = 0; n_wait = 0; n_save_cyc = 0; n_lsu_stall = 0; n_chain = 0;
    n_switch = 0; n_fall = 0; n_emret_stall = 0; n_kill = 0; n_mnxti = 0; n_thresh = 0; n_swirq = 0;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    // vector table at 0x3000: handler of source i at 0x8000 + 0x100*i
    for (int i = 0; i < 16; i++) mem[(32'h3000 >> 2) + i] = 32'h8000 + 32'h100 * i;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---------------------------------------------------- configuration
    clic_wr(16'h0000, {27'd0, 4'd4, 1'b0});        // nlbits = 4
    clic_wr(16'h1000 + 4*1, clicint(8'h3A, 1, 0)); // level 0x3F prio A, vectored
    clic_wr(16'h1000 + 4*2, clicint(8'h35, 1, 0)); // level 0x3F prio 5, vectored
    clic_wr(16'h1000 + 4*3, clicint(8'h7F, 1, 0)); // level 0x7F, vectored
    clic_wr(16'h1000 + 4*4, clicint(8'h1F, 0, 0)); // level 0x1F, non-vectored
    clic_wr(16'h1000 + 4*5, clicint(8'hBF, 0, 0)); // level 0xBF, non-vectored
    clic_wr(16'h1000 + 4*6, clicint(8'hCF, 1, 0)); // level 0xCF, vectored
    csr(CSR_OP_WRITE, CSR_MTVEC, 32'h0000_2003, r);
    csr(CSR_OP_WRITE, CSR_MTVT, 32'h0000_3000, r);
    csr(CSR_OP_SET, CSR_MSTATUS, 32'h8, r);

    // ---------------------------------------------------- 1. task context
    for (int i = 1; i < 16; i++) begin
      task_val[i] = (i == 2) ? TASK_SP : (32'h1111_0000 + 32'(i));
      reg_wr(5'(i), task_val[i]);
    end
    check(!bs && reg_rd(SP) == TASK_SP, "task runs on bank 0");

    // ---------------------------------------------------- 2. entry + save
    @(negedge clk); irq[1] = 1;
    wait_take(20, lat);
    check(lat == 2, "source 1 taken two clocks after its line");
    check(vec_tab && pc_tgt == 32'h3004, "vectored entry reads mtvt + 4");
    tick();                                    // entry takes effect
    irq[1] = 0; irq[3] = 1;                    // higher-level source arrives at once
    pc = 32'h0000_8100;                        // handler 1 now runs
    check(bs && busy, "bank switched, background save running");
    check(reg_rd(SP) == TASK_SP - 36, "handler bank sp = task sp - 36");
    check(fetch_pc == 32'h8100, "handler address loaded from the vector table");
    frame1 = TASK_SP - 36;
    // first handler instruction: re-enable interrupts (nesting handler)
    csr(CSR_OP_SET, CSR_MSTATUS, 32'h8, r);
    // a load to the last frame word (mcause) must stall while it is unsaved
    lsu_req = 1; lsu_addr = frame1 + 36;
    #0 check(lsu_stall, "load of an unsaved frame word stalls");
    cyc = 0;
    while (lsu_stall && cyc < 20) begin tick(); cyc++; end
    lsu_req = 0;
    check(cyc == 8, "stall lasts until the word is written (8 more cycles)");
    check(!busy, "save finished");
    check(mem[(frame1 >> 2) + 1] == task_val[RA] && mem[(frame1 >> 2) + 2] == task_val[T0] &&
          mem[(frame1 >> 2) + 3] == task_val[A0] && mem[(frame1 >> 2) + 4] == task_val[A1] &&
          mem[(frame1 >> 2) + 5] == task_val[A2] && mem[(frame1 >> 2) + 6] == task_val[A3] &&
          mem[(frame1 >> 2) + 7] == task_val[T1], "frame holds ra t0 a0 a1 a2 a3 t1");
    check(mem[(frame1 >> 2) + 8] == 32'h0000_0400, "frame holds mepc");
    check(mem[(frame1 >> 2) + 9] == {1'b1, 1'b1, 2'b11, 1'b1, 3'd0, 8'h00, 4'd0, 12'd1},
          "frame holds mcause of the entry");
    // source 3 has waited during the save and preempts now
    irq[2] = 1;                                // same-level source for later
    wait_take(10, cyc);
    if (pc_tgt != 32'h300C) $display("nested: pc_tgt=%h id=%0d", pc_tgt, dut.irq.id);
    check(cyc >= 0, "source 3 preempts handler 1 after the save");
    check(pc_tgt == 32'h300C, "nested entry vector");
    tick();
    irq[3] = 0;
    pc = 32'h0000_8300;
    check(!bs && reg_rd(SP) == frame1 - 36, "nested entry back on bank 0, sp moved again");
    // handler 3 clobbers registers in its bank
    reg_wr(A0, 32'hBAD0_000A);
    reg_wr(RA, 32'hBAD0_0001);
    while (busy) tick();

    // ---------------------------------------------------- 3. emret switch-back
    do_emret();
    check(n_switch == 1, "handler 3 returns by bank switch");
    check(bs && fetch_pc == 32'h0000_8100 && mil == 8'h3F, "back in handler 1 at level 0x3F");
    check(reg_rd(SP) == frame1, "handler 1 sp restored by the switch");

    // ---------------------------------------------------- 4. emret tail-chain
    repeat (3) tick();
    check(!take, "same-level source 2 does not preempt handler 1");
    do_emret();
    check(n_chain == 1, "emret of handler 1 chains into source 2");
    check(fetch_pc == 32'h8200 && dut.i_csr.mepc_q == 32'h400, "chain keeps mepc of the task");
    check(!busy, "no save on a tail-chain");
    irq[2] = 0;
    repeat (2) tick();

    // ---------------------------------------------------- 5. fall-through + software restore
    do_emret();
    check(n_fall == 1, "emret of handler 2 falls through (bank reused)");
    // restore sequence of the handler listing: loads in frame order
    begin
      logic [4:0] slot_reg [7] = '{RA, T0, A0, A1, A2, A3, T1};
      word_t sp_now;
      sp_now = reg_rd(SP);
      check(sp_now == frame1, "sp points at the frame");
      for (int k = 0; k < 7; k++) begin
        @(negedge clk);
        lsu_req = 1; lsu_addr = sp_now + 4*(k+1);
        #1 check(!lsu_stall, "restore load not stalled");
        we1 = 1; wa1 = slot_reg[k]; wd1 = mem[lsu_addr[13:2]];
        tick();
        we1 = 0; lsu_req = 0;
      end
      csr(CSR_OP_CLEAR, CSR_MSTATUS, 32'h8, r);
      csr(CSR_OP_WRITE, CSR_MEPC, mem[(sp_now >> 2) + 8], r);
      csr(CSR_OP_WRITE, CSR_MCAUSE, mem[(sp_now >> 2) + 9], r);
      reg_wr(SP, sp_now + 36);
      do_mret();
    end
    check(fetch_pc == 32'h400 && mil == 0 && mie, "mret back to the task at level 0");
    pc = 32'h0000_0400;                        // the task runs again
    check(reg_rd(SP) == TASK_SP && reg_rd(RA) == task_val[RA] && reg_rd(T0) == task_val[T0] &&
          reg_rd(A0) == task_val[A0] && reg_rd(A3) == task_val[A3] && reg_rd(T1) == task_val[T1],
          "task caller-saved registers and sp restored from the frame");

    // ---------------------------------------------------- 6. short handler
    for (int i = 1; i < 16; i++) reg_wr(5'(i), task_val[i]);
    @(negedge clk); irq[1] = 1;
    wait_take(10, cyc);
    tick(); irq[1] = 0;
    do_emret();
    check(n_emret_stall >= 1, "emret held while the save runs");
    check(!busy && reg_rd(SP) == TASK_SP && reg_rd(S0) == task_val[S0] && reg_rd(A2) == task_val[A2],
          "quick return by bank switch keeps the whole task context");

    // ---------------------------------------------------- 7a. software interrupt
    clic_wr(16'h1000 + 4*6, clicint(8'hCF, 1, 1));   // set pending bit
    wait_take(10, cyc);
    check(cyc >= 0 && pc_tgt == 32'h3018, "software-set pending bit raises an interrupt");
    if (cyc >= 0) n_swirq++;
    tick();
    while (busy) tick();
    do_emret();

    // ---------------------------------------------------- 7b. kill
    @(negedge clk); allowed = 0; irq[4] = 1;
    repeat (3) tick();
    irq[5] = 1;                                   // more important, arrives during the offer
    repeat (4) tick();
    check(n_kill >= 1, "offer killed for a more important interrupt");
    check(dut.irq.valid && dut.irq.id == 5, "more important interrupt offered after kill");
    @(negedge clk); allowed = 1; #1;
    wait_take(5, cyc);
    check(cyc >= 0 && pc_tgt == 32'h2000, "non-vectored entry to mtvec base");
    tick(); irq[5] = 0;
    while (busy) tick();

    // ---------------------------------------------------- 7c. mnxti
    // handler of source 5 (level 0xBF, mpil 0): source 4 (level 0x1F) is pending
    repeat (3) tick();
    csr(CSR_OP_SET, CSR_MNXTI, 32'h8, r);
    check(r == 32'h3010, "mnxti returns the table entry of source 4");
    check(mil == 8'h1F, "mnxti raised mil to source 4's level");
    irq[4] = 0;
    repeat (3) tick();
    do_emret();   // nothing pending, restore flag set: switch back
    check(fetch_pc == 32'h400 && mil == 0, "returned to the task");

    // ---------------------------------------------------- 7d. threshold
    csr(CSR_OP_WRITE, CSR_MINTTHRESH, 32'h40, r);
    @(negedge clk); irq[4] = 1;
    wait_take(6, cyc);
    check(cyc < 0, "level 0x1F masked by threshold 0x40");
    if (cyc < 0) n_thresh++;
    csr(CSR_OP_WRITE, CSR_MINTTHRESH, 32'h00, r);
    wait_take(6, cyc);
    check(cyc >= 0, "taken once the threshold is lowered");
    tick(); irq[4] = 0;
    while (busy) tick();
    do_emret();

    // ---------------------------------------------------- mechanism coverage
    $display("entries=%0d nested=%0d waits=%0d save_cycles=%0d lsu_stalls=%0d chain=%0d switch=%0d fall=%0d emret_stall=%0d kill=%0d mnxti=%0d thresh=%0d swirq=%0d",
             n_entry, n_nested, n_wait, n_save_cyc, n_lsu_stall, n_chain, n_switch, n_fall,
             n_emret_stall, n_kill, n_mnxti, n_thresh, n_swirq);
    check(n_entry > 0, "interrupt entry happened");
    check(n_nested > 0, "nested preemption happened");
    check(n_wait > 0, "preemption waited for the background save");
    check(n_save_cyc == 9 * n_entry, "each entry saved 9 words in 9 cycles");
    check(n_lsu_stall > 0, "LSU stall happened");
    check(n_chain > 0, "emret tail-chain happened");
    check(n_switch > 0, "emret bank switch happened");
    check(n_fall > 0, "emret fall-through happened");
    check(n_emret_stall > 0, "emret stall happened");
    check(n_kill > 0, "kill handshake happened");
    check(n_mnxti > 0, "mnxti claim happened");
    check(n_thresh > 0, "threshold masking happened");
    check(n_swirq > 0, "software interrupt happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
