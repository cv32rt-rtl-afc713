// cv32rt_irq_top -- interrupt subsystem of CV32RT with the fastirq extension.
//
// Everything the fastirq core adds to or changes in its base pipeline, wired
// together: the CLIC (gateway, arbitration tree, threshold and handshake),
// the core-side CLIC CSRs with interrupt entry, mret, mnxti and emret, the
// banked register file with its save port and stack-pointer adder, the
// fastirq FSM that switches banks and drains the interrupted context to a
// dedicated memory port, and the LSU guard that stalls accesses to stack
// words not yet saved.
// The base pipeline (fetch, decode, ALU, multiplier, LSU) is not part of
// this module; its side of every connection is a port:
//   * register file: two write ports (W0/W1) and three read ports (R0-R2),
//     which always reach the active bank;
//   * CSR access port and the events mret_i / emret_i from the decoder;
//   * pc_i, the pc an interrupt would return to, and irq_allowed_i, high
//     when the pipeline can be flushed for an interrupt;
//   * pc_set_o/pc_target_o/vec_table_o, the redirect the pipeline must
//     follow (vec_table_o: load the handler address from pc_target_o first,
//     then report vec_fetch_done_i);
//   * lsu_req_i/lsu_addr_i with lsu_stall_o from the LSU guard;
//   * save_mem_req_o/save_mem_rsp_i, the dedicated memory port, or with
//     SHARE_PORT = 1 the one port the save shares with the LSU, whose
//     requests then enter at lsu_mem_req_i/lsu_mem_rsp_o (unused otherwise).
// Timing from an interrupt line to the core: two clocks to irq valid, the
// entry decision is combinational in the cycle after, and the background
// save of the 9-word frame follows in 9 cycles with a zero-wait memory.
module cv32rt_irq_top
  import cv32rt_pkg::*;
#(
  parameter int unsigned N_SOURCE = 256,
  // 1: RV32E banks of 16 registers and the 9-word embedded-ABI frame;
  // 0: the integer-ABI option, banks of 32 registers and an 18-word frame
  parameter bit          RVE      = 1'b1,
  // register stages after the CLIC arbitration tree (0: none)
  parameter int unsigned TREE_PIPE = 0,
  // 0: dedicated save port; 1: save and LSU share save_mem_req_o
  parameter bit          SHARE_PORT = 1'b0
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // interrupt sources and CLIC configuration bus
  input  logic [N_SOURCE-1:0] irq_i,
  input  reg_req_t           clic_req_i,
  output reg_rsp_t           clic_rsp_o,
  // register file ports of the pipeline
  input  logic               we0_i,
  input  logic [RADDR_W-1:0] waddr0_i,
  input  word_t              wdata0_i,
  input  logic               we1_i,
  input  logic [RADDR_W-1:0] waddr1_i,
  input  word_t              wdata1_i,
  input  logic [RADDR_W-1:0] raddr0_i,
  output word_t              rdata0_o,
  input  logic [RADDR_W-1:0] raddr1_i,
  output word_t              rdata1_o,
  input  logic [RADDR_W-1:0] raddr2_i,
  output word_t              rdata2_o,
  // CSR port
  input  logic               csr_en_i,
  input  csr_op_e            csr_op_i,
  input  logic [11:0]        csr_addr_i,
  input  word_t              csr_wdata_i,
  output word_t              csr_rdata_o,
  output logic               csr_err_o,
  // pipeline control
  input  priv_t              cur_priv_i,
  input  word_t              pc_i,
  input  logic               irq_allowed_i,
  input  logic               mret_i,
  input  logic               emret_i,
  input  logic               vec_fetch_done_i,
  output logic               pc_set_o,
  output word_t              pc_target_o,
  output logic               vec_table_o,
  output logic               irq_take_o,
  output logic               emret_stall_o,
  output logic               emret_chain_o,
  output logic               emret_switch_o,
  output logic               emret_fall_o,
  // load-store unit guard
  input  logic               lsu_req_i,
  input  word_t              lsu_addr_i,
  output logic               lsu_stall_o,
  // save memory port (shared with the LSU when SHARE_PORT = 1)
  output mem_req_t           save_mem_req_o,
  input  mem_rsp_t           save_mem_rsp_i,
  input  mem_req_t           lsu_mem_req_i,
  output mem_rsp_t           lsu_mem_rsp_o,
  // status
  output logic               save_busy_o,
  output logic               banksel_o,
  output logic               mie_o,
  output irq_lvl_t           mil_o
);

  clic_irq_t     irq;
  core_irq_ack_t ack;
  irq_lvl_t      mintthresh;

  clic #(.N_SOURCE(N_SOURCE), .TREE_PIPE(TREE_PIPE)) i_clic (
    .clk_i, .rst_ni,
    .irq_i,
    .reg_req_i    (clic_req_i),
    .reg_rsp_o    (clic_rsp_o),
    .mintthresh_i (mintthresh),
    .irq_o        (irq),
    .ack_i        (ack)
  );

  logic  busy, restore_ok, entry, emret_switch;
  word_t mepc, mcause, rst_mepc, rst_mcause;

  cv32rt_clic_csr i_csr (
    .clk_i, .rst_ni,
    .irq_i             (irq),
    .ack_o             (ack),
    .mintthresh_o      (mintthresh),
    .csr_en_i, .csr_op_i, .csr_addr_i, .csr_wdata_i, .csr_rdata_o, .csr_err_o,
    .cur_priv_i, .pc_i, .irq_allowed_i, .mret_i, .emret_i, .vec_fetch_done_i,
    .pc_set_o, .pc_target_o, .vec_table_o, .irq_take_o,
    .emret_stall_o, .emret_chain_o,
    .emret_switch_o    (emret_switch),
    .emret_fall_o,
    .save_busy_i       (busy),
    .bank_restore_ok_i (restore_ok),
    .restore_mepc_i    (rst_mepc),
    .restore_mcause_i  (rst_mcause),
    .fastirq_entry_o   (entry),
    .mepc_o            (mepc),
    .mcause_o          (mcause),
    .mie_o, .mil_o
  );
  assign emret_switch_o = emret_switch;

  logic               banksel, sp_switch;
  word_t              sp_new, save_rdata, frame_base;
  logic [RADDR_W-1:0] save_raddr;
  logic [WCNT_W-1:0]  words_done;
  mem_req_t           fsm_req;
  mem_rsp_t           fsm_rsp;

  fastirq_regfile #(
    .NREGS_P     (RVE ? NREGS : NREGS_I),
    .STACKSIZE_P (RVE ? STACKSIZE : STACKSIZE_I)
  ) i_rf (
    .clk_i, .rst_ni,
    .banksel_i    (banksel),
    .we0_i, .waddr0_i, .wdata0_i,
    .we1_i, .waddr1_i, .wdata1_i,
    .raddr0_i, .rdata0_o, .raddr1_i, .rdata1_o, .raddr2_i, .rdata2_o,
    .save_raddr_i (save_raddr),
    .save_rdata_o (save_rdata),
    .sp_switch_i  (sp_switch),
    .sp_new_o     (sp_new)
  );

  fastirq_ctrl #(.RVE(RVE)) i_fastirq (
    .clk_i, .rst_ni,
    .entry_i           (entry),
    .emret_switch_i    (emret_switch),
    .mepc_i            (mepc),
    .mcause_i          (mcause),
    .banksel_o         (banksel),
    .sp_switch_o       (sp_switch),
    .sp_new_i          (sp_new),
    .save_raddr_o      (save_raddr),
    .save_rdata_i      (save_rdata),
    .mem_req_o         (fsm_req),
    .mem_rsp_i         (fsm_rsp),
    .busy_o            (busy),
    .bank_restore_ok_o (restore_ok),
    .frame_base_o      (frame_base),
    .words_done_o      (words_done),
    .restore_mepc_o    (rst_mepc),
    .restore_mcause_o  (rst_mcause)
  );

  fastirq_lsu_guard #(.NSAVE_P(nsave(RVE))) i_guard (
    .busy_i       (busy),
    .frame_base_i (frame_base),
    .words_done_i (words_done),
    .lsu_req_i,
    .lsu_addr_i,
    .stall_o      (lsu_stall_o)
  );

  if (SHARE_PORT) begin : g_shared_port
    fastirq_port_share i_share (
      .clk_i, .rst_ni,
      .save_req_i (fsm_req),
      .save_rsp_o (fsm_rsp),
      .lsu_req_i  (lsu_mem_req_i),
      .lsu_rsp_o  (lsu_mem_rsp_o),
      .mem_req_o  (save_mem_req_o),
      .mem_rsp_i  (save_mem_rsp_i)
    );
  end else begin : g_dedicated_port
    assign save_mem_req_o = fsm_req;
    assign fsm_rsp        = save_mem_rsp_i;
    assign lsu_mem_rsp_o  = '0;
  end

  assign save_busy_o = busy;
  assign banksel_o   = banksel;

endmodule
