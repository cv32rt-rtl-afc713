// cv32rt_clic_csr -- core-side CLIC CSRs, interrupt entry and return.
//
// This is the part of the core's CSR unit and controller that the CLIC and
// the fastirq extension change. It holds mstatus (mie, mpie, mpp), mtvec,
// mtvt, mepc, mcause in its CLIC layout, mintstatus (mil) and mintthresh,
// implements the mnxti CSR, decides when the interrupt offered by the CLIC
// is taken, and carries out mret and the fastirq instruction emret.
//
// Taking an interrupt (the preemption rule of the CLIC):
//   offered, not being killed, machine-mode, no fastirq save in progress,
//   irq_allowed_i from the pipeline, no CSR access/mret/emret this cycle,
//   and either the hart runs below machine mode (vertical preemption) or
//   mstatus.mie = 1 and the level exceeds mintstatus.mil (horizontal).
//   The level-above-threshold part is checked in the CLIC.
//   On entry: mepc <= pc_i; mcause <= {1, minhv=shv, mpp, mpie=mie,
//   mpil=mil, exccode=id}; mie <= 0; mil <= level. The pipeline is sent to
//   mtvt + 4*id as a vector-table entry to load (shv = 1, vec_table_o = 1)
//   or to the 64-byte aligned mtvec base (shv = 0). fastirq_entry_o tells
//   the fastirq logic to switch banks and start the background save.
// mret: mie <= mpie, mpie <= 1, mil <= mpil, jump to mepc.
// emret (fastirq), one of three outcomes:
//   chain   an interrupt is offered that the interrupted context would take
//           (level > mpil and mpie = 1, or mpp below M): it is claimed and
//           the pipeline jumps to its handler; mepc, mpil and the banks are
//           kept, so no context is restored or saved again;
//   switch  otherwise, if the other bank still holds the interrupted
//           context (bank_restore_ok_i): mret plus a bank switch back;
//           mepc and mcause are then reloaded with the machine state that
//           was latched when the bank returned to was entered
//           (restore_mepc_i / restore_mcause_i), so that the outer handler
//           finds its own return state again after a nested handler;
//   fall    otherwise nothing happens and the software restore sequence
//           that follows emret runs.
//   emret is held (emret_stall_o) while the background save is still busy.
// mnxti: a CSR access returns mtvt + 4*id and claims the interrupt when a
//   non-vectored machine-mode interrupt with level > mpil is offered (mil
//   and exccode are updated), else 0; its write operand acts on mstatus.
// CSR port: one access per cycle; the read data is combinational and the
// write takes effect at the clock edge.
// Paper: the preemption rule, threshold, vectoring, mnxti and the emret
// behaviour (tail-chain to a pending handler, else mret plus bank switch)
// are from the paper; the emret fall-through case comes from the paper's
// fastirq handler listing, where a software restore sequence follows emret.
// Register layouts follow the RISC-V CLIC draft. Only machine-mode
// interrupts are handled; the jalmnxti CSR is not implemented.
module cv32rt_clic_csr
  import cv32rt_pkg::*;
(
  input  logic          clk_i,
  input  logic          rst_ni,
  // CLIC handshake
  input  clic_irq_t     irq_i,
  output core_irq_ack_t ack_o,
  output irq_lvl_t      mintthresh_o,
  // CSR access from the pipeline
  input  logic          csr_en_i,
  input  csr_op_e       csr_op_i,
  input  logic [11:0]   csr_addr_i,
  input  word_t         csr_wdata_i,
  output word_t         csr_rdata_o,
  output logic          csr_err_o,
  // pipeline state and events
  input  priv_t         cur_priv_i,
  input  word_t         pc_i,             // pc saved to mepc on entry
  input  logic          irq_allowed_i,
  input  logic          mret_i,
  input  logic          emret_i,
  input  logic          vec_fetch_done_i, // vector table entry loaded
  output logic          pc_set_o,
  output word_t         pc_target_o,
  output logic          vec_table_o,      // pc_target_o is a table entry address
  output logic          irq_take_o,
  output logic          emret_stall_o,
  output logic          emret_chain_o,
  output logic          emret_switch_o,
  output logic          emret_fall_o,
  // fastirq
  input  logic          save_busy_i,
  input  logic          bank_restore_ok_i,
  input  word_t         restore_mepc_i,   // outer handler's machine state,
  input  word_t         restore_mcause_i, // reloaded on an emret switch
  output logic          fastirq_entry_o,
  output word_t         mepc_o,
  output word_t         mcause_o,
  output logic          mie_o,
  output irq_lvl_t      mil_o
);

  // ------------------------------------------------------------ state
  logic        mie_q, mpie_q;
  priv_t       mpp_q;
  logic [31:6] mtvec_base_q;
  logic [1:0]  mtvec_mode_q;
  logic [31:6] mtvt_base_q;
  word_t       mepc_q;
  logic        mc_int_q, minhv_q;
  irq_lvl_t    mpil_q;
  logic [11:0] exccode_q;
  irq_lvl_t    mil_q, mintthresh_q;

  word_t mstatus_rd, mcause_rd;
  assign mstatus_rd = {19'd0, mpp_q, 3'd0, mpie_q, 3'd0, mie_q, 3'd0};
  assign mcause_rd  = {mc_int_q, minhv_q, mpp_q, mpie_q, 3'd0, mpil_q, 4'd0, exccode_q};

  // ------------------------------------------------------------ conditions
  logic offered, preempts, take, busy_cycle;
  logic chain_ok, emret_go, chain, do_switch, fall;
  logic mnxti_acc, mnxti_hit;
  word_t vec_addr, mtvec_addr;

  assign offered    = irq_i.valid && !irq_i.kill_req && (irq_i.priv == PRIV_M);
  assign preempts   = (cur_priv_i != PRIV_M) || (mie_q && (irq_i.level > mil_q));
  assign busy_cycle = csr_en_i || mret_i || emret_i;
  assign take       = offered && preempts && irq_allowed_i && !save_busy_i && !busy_cycle;

  assign vec_addr   = {mtvt_base_q, 6'd0} + {18'd0, irq_i.id, 2'b00};
  assign mtvec_addr = {mtvec_base_q, 6'd0};

  assign emret_go  = emret_i && !save_busy_i;
  assign chain_ok  = offered && ((mpp_q != PRIV_M) || (mpie_q && (irq_i.level > mpil_q)));
  assign chain     = emret_go && chain_ok;
  assign do_switch = emret_go && !chain_ok && bank_restore_ok_i;
  assign fall      = emret_go && !chain_ok && !bank_restore_ok_i;

  assign mnxti_acc = csr_en_i && (csr_addr_i == CSR_MNXTI);
  assign mnxti_hit = mnxti_acc && offered && !irq_i.shv && (irq_i.level > mpil_q);

  // ------------------------------------------------------------ outputs
  always_comb begin
    pc_set_o    = 1'b0;
    pc_target_o = '0;
    vec_table_o = 1'b0;
    if (take || chain) begin
      pc_set_o    = 1'b1;
      pc_target_o = irq_i.shv ? vec_addr : mtvec_addr;
      vec_table_o = irq_i.shv;
    end else if (mret_i || do_switch) begin
      pc_set_o    = 1'b1;
      pc_target_o = mepc_q;
    end
  end

  assign ack_o.ack      = take || chain || mnxti_hit;
  assign ack_o.kill_ack = irq_i.kill_req && !(take || chain || mnxti_hit);

  assign irq_take_o      = take;
  assign fastirq_entry_o = take;
  assign emret_stall_o   = emret_i && save_busy_i;
  assign emret_chain_o   = chain;
  assign emret_switch_o  = do_switch;
  assign emret_fall_o    = fall;

  assign mintthresh_o = mintthresh_q;
  assign mepc_o       = mepc_q;
  assign mcause_o     = mcause_rd;
  assign mie_o        = mie_q;
  assign mil_o        = mil_q;

  // ------------------------------------------------------------ CSR read
  always_comb begin
    csr_rdata_o = '0;
    csr_err_o   = 1'b0;
    unique case (csr_addr_i)
      CSR_MSTATUS:    csr_rdata_o = mstatus_rd;
      CSR_MTVEC:      csr_rdata_o = {mtvec_base_q, 4'd0, mtvec_mode_q};
      CSR_MTVT:       csr_rdata_o = {mtvt_base_q, 6'd0};
      CSR_MEPC:       csr_rdata_o = mepc_q;
      CSR_MCAUSE:     csr_rdata_o = mcause_rd;
      CSR_MNXTI:      csr_rdata_o = mnxti_hit ? vec_addr : '0;
      CSR_MINTSTATUS: csr_rdata_o = {mil_q, 24'd0};
      CSR_MINTTHRESH: csr_rdata_o = {24'd0, mintthresh_q};
      default:        csr_err_o   = csr_en_i;
    endcase
  end

  function automatic word_t apply_op(csr_op_e op, word_t old, word_t wd);
    unique case (op)
      CSR_OP_WRITE: return wd;
      CSR_OP_SET:   return old | wd;
      CSR_OP_CLEAR: return old & ~wd;
      default:      return old;
    endcase
  endfunction

  // ------------------------------------------------------------ update
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mie_q        <= 1'b0;
      mpie_q       <= 1'b0;
      mpp_q        <= PRIV_M;
      mtvec_base_q <= '0;
      mtvec_mode_q <= 2'b11;
      mtvt_base_q  <= '0;
      mepc_q       <= '0;
      mc_int_q     <= 1'b0;
      minhv_q      <= 1'b0;
      mpil_q       <= '0;
      exccode_q    <= '0;
      mil_q        <= '0;
      mintthresh_q <= '0;
    end else begin
      if (vec_fetch_done_i) minhv_q <= 1'b0;

      if (take) begin
        mepc_q    <= pc_i;
        mc_int_q  <= 1'b1;
        minhv_q   <= irq_i.shv;
        mpp_q     <= cur_priv_i;
        mpie_q    <= mie_q;
        mpil_q    <= mil_q;
        exccode_q <= irq_i.id;
        mie_q     <= 1'b0;
        mil_q     <= irq_i.level;
      end else if (chain) begin
        minhv_q   <= irq_i.shv;
        exccode_q <= irq_i.id;
        mil_q     <= irq_i.level;
      end else if (do_switch) begin
        mie_q     <= mpie_q;
        mil_q     <= mpil_q;
        mepc_q    <= restore_mepc_i;
        mc_int_q  <= restore_mcause_i[31];
        minhv_q   <= 1'b0;
        mpp_q     <= (restore_mcause_i[29:28] == PRIV_M) ? PRIV_M : PRIV_U;
        mpie_q    <= restore_mcause_i[27];
        mpil_q    <= restore_mcause_i[23:16];
        exccode_q <= restore_mcause_i[11:0];
      end else if (mret_i) begin
        mie_q  <= mpie_q;
        mpie_q <= 1'b1;
        mil_q  <= mpil_q;
        mpp_q  <= PRIV_M;
      end else if (csr_en_i && csr_op_i != CSR_OP_READ) begin
        unique case (csr_addr_i)
          CSR_MSTATUS, CSR_MNXTI: begin
            word_t v;
            v      = apply_op(csr_op_i, mstatus_rd, csr_wdata_i);
            mie_q  <= v[3];
            mpie_q <= v[7];
            mpp_q  <= (v[12:11] == PRIV_M) ? PRIV_M : PRIV_U;
          end
          CSR_MTVEC: begin
            word_t v;
            v            = apply_op(csr_op_i, {mtvec_base_q, 4'd0, mtvec_mode_q}, csr_wdata_i);
            mtvec_base_q <= v[31:6];
            mtvec_mode_q <= v[1:0];
          end
          CSR_MTVT: begin
            word_t v;
            v           = apply_op(csr_op_i, {mtvt_base_q, 6'd0}, csr_wdata_i);
            mtvt_base_q <= v[31:6];
          end
          CSR_MEPC: mepc_q <= apply_op(csr_op_i, mepc_q, csr_wdata_i) & ~32'd1;
          CSR_MCAUSE: begin
            word_t v;
            v         = apply_op(csr_op_i, mcause_rd, csr_wdata_i);
            mc_int_q  <= v[31];
            minhv_q   <= v[30];
            mpp_q     <= (v[29:28] == PRIV_M) ? PRIV_M : PRIV_U;
            mpie_q    <= v[27];
            mpil_q    <= v[23:16];
            exccode_q <= v[11:0];
          end
          CSR_MINTTHRESH: mintthresh_q <= irq_lvl_t'(apply_op(csr_op_i, {24'd0, mintthresh_q}, csr_wdata_i));
          default: ;
        endcase
        if (mnxti_hit) begin
          mil_q     <= irq_i.level;
          exccode_q <= irq_i.id;
        end
      end else if (mnxti_hit) begin
        mil_q     <= irq_i.level;
        exccode_q <= irq_i.id;
      end
    end
  end

  // An interrupt is never taken while the background save is running.
  a_no_take_while_saving: assert property (@(posedge clk_i) disable iff (!rst_ni)
    save_busy_i |-> !take);
  // The emret outcomes are exclusive.
  a_emret_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni)
    $onehot0({chain, do_switch, fall}));

endmodule
