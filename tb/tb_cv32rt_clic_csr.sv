// tb_cv32rt_clic_csr -- self-checking test of the core-side CLIC CSRs.
//
// The CLIC offer is driven directly. Checks: CSR write/read of mtvec, mtvt,
// mstatus, mintthresh and mepc; interrupt entry (ack, redirect to the
// vector table entry mtvt + 4*id for a vectored interrupt or to the mtvec
// base otherwise, mepc, the mcause fields, mie cleared, mil raised, the
// fastirq entry strobe); no entry with mie = 0, with a level not above mil
// or during a background save; vertical preemption from user mode; mret;
// the three emret outcomes (tail-chain to a pending interrupt keeping mepc,
// bank-switch return, fall-through) and the stall while saving; mnxti
// returning the table entry and claiming, or 0; kill_ack.
module tb_cv32rt_clic_csr;
  import cv32rt_pkg::*;
  logic clk = 0, rst_n = 0;
  clic_irq_t irq;
  core_irq_ack_t ack;
  irq_lvl_t thr;
  logic csr_en; csr_op_e csr_op; logic [11:0] csr_addr; word_t csr_wd, csr_rd; logic csr_err;
  priv_t priv; word_t pc;
  logic allowed, mret, emret, vfd, pc_set, vec_tab, take, e_stall, e_chain, e_switch, e_fall;
  word_t pc_tgt, mepc, mcause;
  logic busy, rok, entry, mie;
  irq_lvl_t mil;
  int checks = 0, failures = 0;

  cv32rt_clic_csr dut (.clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .ack_o(ack), .mintthresh_o(thr),
    .csr_en_i(csr_en), .csr_op_i(csr_op), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wd),
    .csr_rdata_o(csr_rd), .csr_err_o(csr_err), .cur_priv_i(priv), .pc_i(pc),
    .irq_allowed_i(allowed), .mret_i(mret), .emret_i(emret), .vec_fetch_done_i(vfd),
    .pc_set_o(pc_set), .pc_target_o(pc_tgt), .vec_table_o(vec_tab), .irq_take_o(take),
    .emret_stall_o(e_stall), .emret_chain_o(e_chain), .emret_switch_o(e_switch),
    .emret_fall_o(e_fall), .save_busy_i(busy), .bank_restore_ok_i(rok), .restore_mepc_i(32'h0), .restore_mcause_i(32'h0),
    .fastirq_entry_o(entry), .mepc_o(mepc), .mcause_o(mcause), .mie_o(mie), .mil_o(mil));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic csr(input csr_op_e op, input logic [11:0] a, input word_t d, output word_t r);
    @(negedge clk);
    csr_en = 1; csr_op = op; csr_addr = a; csr_wd = d;
    #1 r = csr_rd;
    @(posedge clk); #1;
    csr_en = 0;
  endtask

  task automatic offer(input int id, input int lvl, input logic shv);
    irq = '0; irq.valid = 1; irq.id = irq_id_t'(id); irq.level = irq_lvl_t'(lvl);
    irq.priv = PRIV_M; irq.shv = shv;
  endtask

  word_t r;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    irq = '0; csr_en = 0; csr_op = CSR_OP_READ; csr_addr = '0; csr_wd = '0;
    priv = PRIV_M; pc = 32'h100; allowed = 1; mret = 0; emret = 0; vfd = 0; busy = 0; rok = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    csr(CSR_OP_WRITE, CSR_MTVEC, 32'h0000_2013, r);
    csr(CSR_OP_READ,  CSR_MTVEC, 0, r);  check(r == 32'h0000_2003, "mtvec 64-byte aligned, mode kept");
    csr(CSR_OP_WRITE, CSR_MTVT, 32'h0000_3000, r);
    csr(CSR_OP_READ,  CSR_MTVT, 0, r);   check(r == 32'h0000_3000, "mtvt");
    csr(CSR_OP_WRITE, CSR_MINTTHRESH, 32'h0000_0011, r);
    check(thr == 8'h11, "mintthresh to the CLIC");
    csr(CSR_OP_WRITE, CSR_MEPC, 32'h0000_0457, r);
    csr(CSR_OP_READ,  CSR_MEPC, 0, r);   check(r == 32'h456, "mepc bit 0 cleared");
    // mie = 0: no entry
    @(negedge clk); offer(5, 8'h40, 1);
    #1 check(!take && !ack.ack, "no entry with mie = 0");
    irq = '0;
    csr(CSR_OP_SET, CSR_MSTATUS, 32'h8, r);
    check(mie, "mie set");
    // save busy blocks entry
    @(negedge clk); offer(5, 8'h40, 1); busy = 1;
    #1 check(!take, "no entry while background save busy");
    busy = 0;
    #1 check(take && ack.ack && entry && pc_set && vec_tab && pc_tgt == 32'h3014,
             "vectored entry to mtvt + 4*id");
    pc = 32'h0000_0200;
    @(posedge clk); #1; irq = '0;
    check(!mie && mil == 8'h40 && mepc == 32'h200, "entry updates mie, mil, mepc");
    check(mcause[31] && mcause[30] && mcause[27] && mcause[23:16] == 8'h00 && mcause[11:0] == 12'd5,
          "mcause: interrupt, minhv, mpie, mpil, exccode");
    @(negedge clk); vfd = 1; @(posedge clk); #1; vfd = 0;
    check(!mcause[30], "minhv cleared after the table load");
    // nesting: re-enable, equal level does not preempt, higher does
    csr(CSR_OP_SET, CSR_MSTATUS, 32'h8, r);
    @(negedge clk); offer(6, 8'h40, 0);
    #1 check(!take, "equal level does not preempt");
    offer(6, 8'h41, 0);
    #1 check(take && pc_tgt == 32'h2000 && !vec_tab, "higher level preempts, non-vectored to mtvec base");
    @(posedge clk); #1; irq = '0;
    check(mil == 8'h41 && mcause[23:16] == 8'h40, "nested mpil holds the outer level");
    // mret back to level 0x40
    @(negedge clk); mret = 1;
    #1 check(pc_set && pc_tgt == 32'h200, "mret jumps to mepc");
    @(posedge clk); #1; mret = 0;
    check(mil == 8'h40 && mie, "mret restores mil and mie");
    // build a handler context at level 0x40 over level 0 with mpie = 1
    csr(CSR_OP_WRITE, CSR_MCAUSE, {1'b1, 1'b0, 2'b11, 1'b1, 3'd0, 8'h00, 4'd0, 12'd5}, r);
    csr(CSR_OP_WRITE, CSR_MEPC, 32'h0000_0300, r);
    // emret while saving: stall
    @(negedge clk); emret = 1; busy = 1;
    #1 check(e_stall && !pc_set, "emret held while saving");
    busy = 0;
    // emret with a pending same-level interrupt: tail-chain
    offer(7, 8'h40, 0);
    #1 check(e_chain && ack.ack && pc_set && pc_tgt == 32'h2000 && !entry, "emret tail-chains");
    @(posedge clk); #1; emret = 0; irq = '0;
    check(mepc == 32'h300 && mcause[11:0] == 12'd7 && mil == 8'h40, "chain keeps mepc, new exccode");
    // emret, nothing pending, bank restore possible
    @(negedge clk); emret = 1; rok = 1;
    #1 check(e_switch && pc_set && pc_tgt == 32'h300 && !e_chain && !e_fall, "emret switch-return");
    @(posedge clk); #1; emret = 0;
    check(mil == 8'h00 && mie, "emret return restores level and mie");
    // emret fall-through
    @(negedge clk); emret = 1; rok = 0;
    #1 check(e_fall && !pc_set, "emret falls through");
    @(posedge clk); #1; emret = 0;
    // vertical preemption from user mode with mie = 0
    csr(CSR_OP_CLEAR, CSR_MSTATUS, 32'h8, r);
    @(negedge clk); priv = PRIV_U; offer(9, 8'h01, 0);
    #1 check(take, "machine interrupt preempts user mode regardless of mie");
    @(posedge clk); #1; irq = '0; priv = PRIV_M;
    check(mcause[29:28] == PRIV_U, "mpp records user mode");
    // mnxti (handler at mil 0x01, mpil 0x00)
    @(negedge clk); offer(11, 8'h20, 0);
    csr_en = 1; csr_op = CSR_OP_SET; csr_addr = CSR_MNXTI; csr_wd = 32'h8;
    #1 check(csr_rd == 32'h302C && ack.ack && !take, "mnxti returns mtvt + 4*id and claims");
    @(posedge clk); #1; csr_en = 0; irq = '0;
    check(mil == 8'h20 && mcause[11:0] == 12'd11 && mie, "mnxti updates mil, exccode, mstatus");
    @(negedge clk); offer(12, 8'h20, 1);
    csr_en = 1; csr_op = CSR_OP_READ; csr_addr = CSR_MNXTI;
    #1 check(csr_rd == 0 && !ack.ack, "mnxti ignores vectored interrupts");
    @(posedge clk); #1; csr_en = 0;
    // kill
    @(negedge clk); irq.kill_req = 1;
    #1 check(ack.kill_ack && !ack.ack, "kill_ack answers kill_req");
    @(posedge clk); #1; irq = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
