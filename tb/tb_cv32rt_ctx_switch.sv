// tb_cv32rt_ctx_switch -- RTOS task context switch through the fastirq save.
//
// Two tasks, A and B, are switched twice (A -> B -> A) the way an RTOS port
// for fastirq does it. The testbench plays the pipeline and the software:
//   * the yield code of the running task stores its callee-saved registers
//     (s0, s1) to its stack in software, then writes the pending bit of a
//     software-interrupt source over the CLIC bus;
//   * the entry switches banks and the hardware saves the task's
//     caller-saved frame (ra, t0, a0-a3, t1, mepc, mcause) in the background,
//     while the scheduler already runs on the fresh bank: it records the old
//     task's sp, picks the other task and loads its whole context from that
//     task's stack with ordinary loads (none of which touches the frame being
//     saved, so none stalls), writes mepc and mcause, moves sp above the frame
//     and executes mret;
//   * the resumed task runs on the bank the scheduler used; the other bank
//     is free for the next switch.
// Checked: each switch saved the outgoing task's frame correctly, the
// incoming task resumes at its pc with every register it had, the loads
// overlapped the background save, and the bank alternates.
// 16 sources, embedded-ABI default banks.
module tb_cv32rt_ctx_switch;
  import cv32rt_pkg::*;

  localparam int N = 16;
  localparam int SWI = 7;                  // software-interrupt source
  logic clk = 0, rst_n = 0;
  logic [N-1:0] irq;
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

  cv32rt_irq_top #(.N_SOURCE(N)) dut (
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

  // zero-wait memory shared by the save port and the testbench's LSU
  word_t mem [4096];
  assign srsp = '{gnt: sreq.req, rvalid: 1'b0, rdata: '0};
  always @(posedge clk) if (sreq.req && sreq.we) mem[sreq.addr[13:2]] <= sreq.wdata;

  word_t fetch_pc;
  always @(posedge clk) begin
    vfd <= 1'b0;
    if (pc_set) begin
      if (vec_tab) begin fetch_pc <= mem[pc_tgt[13:2]]; vfd <= 1'b1; end
      else fetch_pc <= pc_tgt;
    end
  end

  int n_overlap, n_stall, n_entry;
  always @(posedge clk) if (rst_n) begin
    if (busy && lsu_req && !lsu_stall) n_overlap++;
    if (lsu_stall) n_stall++;
    if (take) n_entry++;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  task automatic clic_wr(input logic [15:0] a, input word_t d);
    @(negedge clk);
    creq = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: 4'hF};
    @(posedge clk); #1; creq = '0;
  endtask

  task automatic csr_write(input logic [11:0] a, input word_t d);
    @(negedge clk); csr_en = 1; csr_op = CSR_OP_WRITE; csr_addr = a; csr_wd = d;
    @(posedge clk); #1; csr_en = 0;
  endtask

  task automatic reg_wr(input logic [4:0] a, input word_t d);
    @(negedge clk); we0 = 1; wa0 = a; wd0 = d;
    @(posedge clk); #1; we0 = 0;
  endtask

  function automatic word_t reg_rd(input logic [4:0] a);
    return (a == 0) ? '0 : dut.i_rf.mem_q[bs][a];
  endfunction

  // load a word through the guarded LSU into register rd
  task automatic ld(input logic [4:0] rd, input word_t addr);
    @(negedge clk); lsu_req = 1; lsu_addr = addr;
    #1 while (lsu_stall) begin @(negedge clk); #1; end
    we0 = 1; wa0 = rd; wd0 = mem[addr[13:2]];
    @(posedge clk); #1; we0 = 0; lsu_req = 0;
  endtask

  // software store of a register to memory (the task's own bank)
  task automatic st(input logic [4:0] rs, input word_t addr);
    @(negedge clk); mem[addr[13:2]] = reg_rd(rs);
  endtask

  localparam logic [4:0] FRAME_REGS [7] = '{5'd1, 5'd5, 5'd10, 5'd11, 5'd12, 5'd13, 5'd6};
  localparam logic [4:0] S0 = 5'd8, S1 = 5'd9, SP = 5'd2;

  // Context of a task as the scheduler keeps it: tcb_sp points to the base
  // of its caller-saved frame (frame words at tcb_sp+4 .. +36); the yield
  // code stores s0 and s1 just below it, at tcb_sp-8 and tcb_sp-4.
  // Registers x3, x4 (gp, tp, global) and x7 (t2, outside the embedded
  // frame) are not part of the switched context; a4 and a5 serve the
  // scheduler as temporaries.
  word_t tcb_sp [2];
  word_t task_pc [2];
  word_t val [2][16];

  // one context switch from task 'from' to task 'to'
  task automatic switch_task(input int from, input int to);
    word_t fb, nsp;
    int cyc;
    // yield code of 'from': store s0, s1 just below the frame area
    st(S0, reg_rd(SP) - 32'd44);
    st(S1, reg_rd(SP) - 32'd40);
    pc = task_pc[from];
    clic_wr(16'h1000 + 4*SWI, {8'hFF, 8'h03, 8'h01, 8'h01});  // set ip
    cyc = 0;
    while (!take && cyc < 10) begin tick(); cyc++; end
    check(take, "software interrupt taken");
    tick();
    fb = reg_rd(SP);
    check(fb == val[from][SP] - 32'd36, "scheduler starts with sp below the frame");
    tcb_sp[from] = fb;
    // scheduler: load the other task's context while the save runs
    nsp = tcb_sp[to];
    ld(S0, nsp - 32'd8);
    ld(S1, nsp - 32'd4);
    for (int k = 0; k < 7; k++) ld(FRAME_REGS[k], nsp + 4 * (k + 1));
    ld(5'd14, nsp + 32'd32);                       // a4 <- saved mepc
    ld(5'd15, nsp + 32'd36);                       // a5 <- saved mcause
    while (busy) tick();
    csr_write(CSR_MEPC, reg_rd(5'd14));
    csr_write(CSR_MCAUSE, reg_rd(5'd15));
    reg_wr(SP, nsp + 32'd36);
    @(negedge clk); mret = 1; tick(); mret = 0;
    // frame of 'from' as saved by the hardware
    for (int k = 0; k < 7; k++)
      check(mem[(fb >> 2) + k + 1] == val[from][FRAME_REGS[k]], "outgoing frame register");
    check(mem[(fb >> 2) + 8] == task_pc[from], "outgoing frame mepc");
    check(mem[(fb >> 2) + 9][11:0] == 12'(SWI), "outgoing frame mcause");
    check(fetch_pc == task_pc[to], "incoming task resumes at its pc");
    check(mie && mil == 0, "incoming task runs with interrupts enabled at level 0");
    for (int r = 1; r < 16; r++)
      if (r != 14 && r != 15 && r != 3 && r != 4 && r != 7)
        check(reg_rd(5'(r)) == val[to][r], $sformatf("incoming task register x%0d", r));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    irq = '0; creq = '0; we0 = 0; we1 = 0; wa0 = 0; wa1 = 0; wd0 = 0; wd1 = 0;
    ra0 = 0; ra1 = 0; ra2 = 0; csr_en = 0; csr_op = CSR_OP_READ; csr_addr = 0; csr_wd = 0;
    priv = PRIV_M; pc = 0; allowed = 1; mret = 0; emret = 0;
    lsu_req = 0; lsu_addr = 0; fetch_pc = 0;
    n_overlap = 0; n_stall = 0; n_entry = 0;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    for (int i = 0; i < N; i++) mem[(32'h3000 >> 2) + i] = 32'h9000 + 32'h40 * i;
    task_pc[0] = 32'h0000_1100; task_pc[1] = 32'h0000_1200;
    for (int t = 0; t < 2; t++)
      for (int r = 0; r < 16; r++) val[t][r] = 32'hA000_0000 + 32'h0100_0000 * t + 32'(r);
    val[0][SP] = 32'h0000_2000;
    val[1][SP] = 32'h0000_2800;
    // Task B has never run: build its initial stack as the scheduler expects
    tcb_sp[1] = val[1][SP] - 32'd36;
    for (int k = 0; k < 7; k++) mem[(tcb_sp[1] >> 2) + k + 1] = val[1][FRAME_REGS[k]];
    mem[(tcb_sp[1] >> 2) + 8] = task_pc[1];
    mem[(tcb_sp[1] >> 2) + 9] = 32'h0800_0000;     // mpie = 1, mpil = 0
    mem[(tcb_sp[1] - 32'd8) >> 2] = val[1][S0];
    mem[(tcb_sp[1] - 32'd4) >> 2] = val[1][S1];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    clic_wr(16'h0000, {27'd0, 4'd8, 1'b0});
    // software-interrupt source: level 0xFF, vectored, edge-triggered, enabled
    clic_wr(16'h1000 + 4*SWI, {8'hFF, 8'h03, 8'h01, 8'h00});
    csr_write(CSR_MTVT, 32'h3000);
    csr_write(CSR_MSTATUS, 32'h8);
    for (int r = 1; r < 16; r++) reg_wr(5'(r), val[0][r]);

    // A -> B
    switch_task(0, 1);
    check(bs == 1'b1, "task B runs on bank 1");
    // B now runs; its sp is the top of its stack again
    check(reg_rd(SP) == val[1][SP], "task B sp");
    // B -> A: A's s0/s1 were stored by its yield code below its frame
    for (int r = 1; r < 16; r++) if (r != SP) reg_wr(5'(r), val[1][r]);
    switch_task(1, 0);
    check(bs == 1'b0, "task A runs on bank 0 again");
    check(reg_rd(SP) == val[0][SP], "task A sp");

    check(n_entry == 2, "two software-interrupt entries");
    check(n_overlap > 0, "scheduler loads overlapped the background save");
    check(n_stall == 0, "no scheduler load stalled");
    $display("entries=%0d overlapped_loads=%0d stalls=%0d", n_entry, n_overlap, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
