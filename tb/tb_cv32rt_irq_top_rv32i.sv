// tb_cv32rt_irq_top_rv32i -- the integer-ABI option of the interrupt subsystem.
//
// Runs cv32rt_irq_top with RVE = 0 (banks of 32 registers, 18-word frame)
// and 16 sources. The testbench acts as pipeline and zero-wait memory:
//   1. a task fills x1..x31 of bank 0, sp = 0x2000;
//   2. a vectored interrupt is taken; the new bank's sp is 0x2000 - 72 and
//      the background save takes 18 cycles; the frame holds ra, t0, a0-a3,
//      t1, t2, a4-a7, t3-t6, mepc, mcause at sp+4 .. sp+72;
//   3. a load of the topmost frame word (mcause) issued right after entry
//      is stalled until the save has written it, a load below the frame is
//      not;
//   4. the handler uses registers of its own bank, then emret returns by
//      switching banks: all 31 task registers are unchanged.
// The save port is shared with the LSU here (SHARE_PORT = 1): a load that
// the handler issues on the shared port during the save waits until the
// last frame word is granted and then returns its data. The memory answers
// every granted request, stores included, one cycle later.
// The same scenario with the embedded-ABI default is part of
// tb_cv32rt_irq_top; this one covers the integer-ABI workloads.
module tb_cv32rt_irq_top_rv32i;
  import cv32rt_pkg::*;

  localparam int N = 16;
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

  mem_req_t lmreq;
  mem_rsp_t lmrsp;

  cv32rt_irq_top #(.N_SOURCE(N), .RVE(1'b0), .SHARE_PORT(1'b1)) dut (
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
    .save_mem_req_o(sreq), .save_mem_rsp_i(srsp), .lsu_mem_req_i(lmreq), .lsu_mem_rsp_o(lmrsp),
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

  // memory, granted every cycle, response one cycle after the grant
  word_t mem [4096];
  logic  m_rvalid = 1'b0;
  word_t m_rdata = '0;
  assign srsp = '{gnt: sreq.req, rvalid: m_rvalid, rdata: m_rdata};
  always @(posedge clk) begin
    m_rvalid <= sreq.req;
    m_rdata  <= mem[sreq.addr[13:2]];
    if (sreq.req && sreq.we) mem[sreq.addr[13:2]] <= sreq.wdata;
  end

  // a handler load on the shared port, issued right after entry
  int  l_gnt_save_cyc = -1;
  logic l_gnt_busy = 1'b1, l_done = 1'b0;
  word_t l_data = '0;
  task automatic shared_load(input word_t a);
    @(negedge clk);
    lmreq = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: '0};
    do @(posedge clk); while (!lmrsp.gnt);
    l_gnt_save_cyc = n_save_cyc; l_gnt_busy = busy;
    #1 lmreq = '0;
    do @(posedge clk); while (!lmrsp.rvalid);
    l_data = lmrsp.rdata; l_done = 1'b1;
  endtask

  word_t fetch_pc;
  always @(posedge clk) begin
    vfd <= 1'b0;
    if (pc_set) begin
      if (vec_tab) begin fetch_pc <= mem[pc_tgt[13:2]]; vfd <= 1'b1; end
      else fetch_pc <= pc_tgt;
    end
  end

  int n_save_cyc, n_stall, n_switch;
  always @(posedge clk) if (rst_n) begin
    if (busy) n_save_cyc++;
    if (lsu_stall) n_stall++;
    if (e_switch) n_switch++;
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

  // expected frame order of the integer-ABI option
  localparam logic [4:0] FRAME_REGS [16] = '{5'd1, 5'd5, 5'd10, 5'd11, 5'd12, 5'd13, 5'd6,
    5'd7, 5'd14, 5'd15, 5'd16, 5'd17, 5'd28, 5'd29, 5'd30, 5'd31};
  localparam word_t TASK_SP = 32'h0000_2000;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t task_val [32];
    word_t fb;
    int cyc, stall_cycles;
    logic stalled_low;
    irq = '0; creq = '0; we0 = 0; we1 = 0; wa0 = 0; wa1 = 0; wd0 = 0; wd1 = 0;
    ra0 = 0; ra1 = 0; ra2 = 0; csr_en = 0; csr_op = CSR_OP_READ; csr_addr = 0; csr_wd = 0;
    priv = PRIV_M; pc = 32'h0000_0500; allowed = 1; mret = 0; emret = 0;
    lsu_req = 0; lsu_addr = 0; fetch_pc = 0; lmreq = '0;
    n_save_cyc = 0; n_stall = 0; n_switch = 0;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    for (int i = 0; i < N; i++) mem[(32'h3000 >> 2) + i] = 32'h9000 + 32'h40 * i;
    mem[32'h1000 >> 2] = 32'hBEEF_0001;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    clic_wr(16'h0000, {27'd0, 4'd8, 1'b0});          // nlbits = 8
    clic_wr(16'h1000 + 4*3, {8'h80, 8'h01, 8'h01, 8'h00}); // ctl 0x80, vectored, level-triggered, enabled
    csr_write(CSR_MTVT, 32'h3000);
    csr_write(CSR_MSTATUS, 32'h8);                   // mie

    // 1. task registers
    for (int i = 1; i < 32; i++) begin
      task_val[i] = (i == 2) ? TASK_SP : 32'hC0DE_0000 + 32'(i);
      reg_wr(5'(i), task_val[i]);
    end
    for (int i = 1; i < 32; i++) check(reg_rd(5'(i)) == task_val[i], "task register written");

    // 2. entry
    @(negedge clk); irq[3] = 1;
    cyc = 0;
    while (!take && cyc < 10) begin tick(); cyc++; end
    check(take && vec_tab && pc_tgt == 32'h300C, "vectored entry of source 3");
    check(cyc == 2, "two clocks from the line to the entry");
    tick();                                          // entry commits
    irq[3] = 0;
    fb = TASK_SP - 32'd72;
    check(bs && reg_rd(5'd2) == fb, "new bank, sp moved down by 72 bytes");
    check(busy, "background save running");
    fork shared_load(32'h1000); join_none

    // 3. load of the topmost word (mcause) stalls until it is written; one
    //    below the frame does not
    lsu_req = 1; lsu_addr = fb; #1;
    stalled_low = lsu_stall;
    lsu_addr = fb + 32'd72; #1;
    stall_cycles = 0;
    while (lsu_stall) begin tick(); stall_cycles++; end
    lsu_req = 0;
    check(!stalled_low, "access at the frame base is not stalled");
    check(stall_cycles == 18, "load of the last frame word held until it is written");

    // the handler writes its own registers meanwhile
    reg_wr(5'd10, 32'h1111_1111);
    reg_wr(5'd31, 32'h3131_3131);
    while (busy) tick();
    check(n_save_cyc == 18, "18-word frame saved in 18 cycles");
    for (int k = 0; k < 16; k++)
      check(mem[(fb >> 2) + k + 1] == task_val[FRAME_REGS[k]], "frame register slot");
    check(mem[(fb >> 2) + 17] == 32'h500, "frame mepc slot");
    check(mem[(fb >> 2) + 18][31] && mem[(fb >> 2) + 18][11:0] == 12'd3, "frame mcause slot");
    repeat (3) tick();
    check(l_done && l_data == 32'hBEEF_0001, "load on the shared port returns its data");
    check(l_gnt_save_cyc == 18 && !l_gnt_busy, "shared-port load granted after the last save word");

    // 4. emret: nothing pending, switch back
    @(negedge clk); emret = 1; #1;
    check(e_switch, "emret returns by bank switch");
    tick(); emret = 0;
    check(!bs && fetch_pc == 32'h500 && mil == 0 && mie, "back in the task");
    for (int i = 1; i < 32; i++) check(reg_rd(5'(i)) == task_val[i], "task register intact");

    check(n_stall > 0 && n_switch == 1, "stall and bank switch happened");
    $display("save_cycles=%0d lsu_stalls=%0d switch=%0d", n_save_cyc, n_stall, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
