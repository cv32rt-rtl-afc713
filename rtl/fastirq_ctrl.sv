// fastirq_ctrl -- bank switching and background saving FSM of fastirq.
//
// Owns BANKSEL and the state of the background save. On entry_i (an
// interrupt is taken by the core):
//   * the register file writes the inactive bank's sp with the active sp
//     minus STACKSIZE (sp_switch_o) and BANKSEL toggles, so the handler runs
//     on a fresh bank whose sp already points below the save frame;
//   * the FSM enters SAVE and, one word per granted request, stores the
//     frame to the dedicated memory port: slot k (k = 0..NSAVE-1) at
//     frame_base + 4*(k+1), slots 0..6 read from the now inactive bank
//     through the save read port, slots 7 and 8 from the machine-state
//     register (mepc, mcause), latched in the first SAVE cycle;
//   * bank_restore_ok_o is set: the inactive bank holds the interrupted
//     context, so a later emret may return by switching banks back.
// The machine state is also kept per bank (the bank the handler runs on):
// after a nested entry has overwritten mepc/mcause, an emret that switches
// back restores the outer handler's values from restore_mepc_o and
// restore_mcause_o, the entry of the bank being returned to.
// On emret_switch_i BANKSEL toggles back and bank_restore_ok_o clears (the
// bank that becomes inactive has been used by the handler).
// busy_o is high during SAVE; the core takes no new interrupt and holds an
// emret while it is high. frame_base_o and words_done_o tell the LSU guard
// how far the save has got.
// Memory port: OBI-like, req with stable addr/wdata until gnt; store
// responses are not waited for. With a memory that grants every cycle the
// save takes NSAVE = 9 cycles after the entry cycle (18 with RVE = 0, the
// integer-ABI option, whose frame appends t2, a4-a7 and t3-t6 to the
// registers of the embedded frame before mepc and mcause).
// Bank switch, stack-pointer update, word-by-word draining to a dedicated
// port and the machine-state register are the paper's; the frame layout is
// taken from the paper's fastirq handler listing; latching the machine
// state one cycle after entry and refusing entries while busy (the paper:
// the nested handler "has to wait") are this design's concrete choices.
module fastirq_ctrl
  import cv32rt_pkg::*;
#(
  parameter bit RVE = 1'b1   // 1: embedded-ABI frame (9 words), 0: integer ABI (18)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               entry_i,
  input  logic               emret_switch_i,
  input  word_t              mepc_i,
  input  word_t              mcause_i,
  // register file
  output logic               banksel_o,
  output logic               sp_switch_o,
  input  word_t              sp_new_i,
  output logic [RADDR_W-1:0] save_raddr_o,
  input  word_t              save_rdata_i,
  // dedicated memory port
  output mem_req_t           mem_req_o,
  input  mem_rsp_t           mem_rsp_i,
  // status
  output logic               busy_o,
  output logic               bank_restore_ok_o,
  output word_t              frame_base_o,
  output logic [WCNT_W-1:0]  words_done_o,
  // machine state of the bank an emret switch would return to
  output word_t              restore_mepc_o,
  output word_t              restore_mcause_o
);

  typedef enum logic {ST_IDLE, ST_SAVE} state_e;
  state_e     state_q;
  logic       banksel_q, restore_ok_q, first_q;
  word_t      frame_q, mepc_q, mcause_q;
  word_t      ms_mepc_q [2];   // machine state latched per bank
  word_t      ms_mcause_q [2];
  logic [WCNT_W-1:0] k_q;

  localparam int unsigned NS    = nsave(RVE);
  localparam int unsigned S_EPC = NS - 2;   // slot of mepc
  localparam int unsigned S_CAU = NS - 1;   // slot of mcause

  assign sp_switch_o  = entry_i && (state_q == ST_IDLE);
  assign save_raddr_o = save_slot_reg(int'(k_q), RVE);

  always_comb begin
    word_t md_mepc, md_mcause;
    md_mepc   = first_q ? mepc_i   : mepc_q;
    md_mcause = first_q ? mcause_i : mcause_q;
    mem_req_o       = '0;
    mem_req_o.req   = (state_q == ST_SAVE);
    mem_req_o.we    = 1'b1;
    mem_req_o.be    = 4'hF;
    mem_req_o.addr  = frame_q + {25'd0, k_q + 5'd1, 2'b00};
    if (int'(k_q) == S_EPC)      mem_req_o.wdata = md_mepc;
    else if (int'(k_q) == S_CAU) mem_req_o.wdata = md_mcause;
    else                         mem_req_o.wdata = save_rdata_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= ST_IDLE;
      banksel_q    <= 1'b0;
      restore_ok_q <= 1'b0;
      first_q      <= 1'b0;
      frame_q      <= '0;
      mepc_q       <= '0;
      mcause_q     <= '0;
      k_q          <= '0;
      ms_mepc_q    <= '{default: '0};
      ms_mcause_q  <= '{default: '0};
    end else begin
      first_q <= 1'b0;
      if (first_q) begin
        mepc_q                 <= mepc_i;
        mcause_q               <= mcause_i;
        ms_mepc_q[banksel_q]   <= mepc_i;
        ms_mcause_q[banksel_q] <= mcause_i;
      end
      unique case (state_q)
        ST_IDLE: begin
          if (entry_i) begin
            banksel_q    <= !banksel_q;
            restore_ok_q <= 1'b1;
            frame_q      <= sp_new_i;
            k_q          <= '0;
            first_q      <= 1'b1;
            state_q      <= ST_SAVE;
          end else if (emret_switch_i) begin
            banksel_q    <= !banksel_q;
            restore_ok_q <= 1'b0;
          end
        end
        ST_SAVE: begin
          if (mem_rsp_i.gnt) begin
            if (int'(k_q) == NS - 1) state_q <= ST_IDLE;
            else                     k_q     <= k_q + 5'd1;
          end
        end
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  assign banksel_o         = banksel_q;
  assign busy_o            = (state_q == ST_SAVE);
  assign bank_restore_ok_o = restore_ok_q;
  assign frame_base_o      = frame_q;
  assign words_done_o      = (state_q == ST_SAVE) ? k_q : WCNT_W'(NS);
  assign restore_mepc_o    = ms_mepc_q[!banksel_q];
  assign restore_mcause_o  = ms_mcause_q[!banksel_q];

  // Save requests keep address and data until granted.
  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (mem_req_o.req && !mem_rsp_i.gnt) |=> (mem_req_o.req && $stable(mem_req_o.addr)));
  // The core must not start a new entry or bank switch while saving.
  a_no_entry_when_busy: assert property (@(posedge clk_i) disable iff (!rst_ni)
    busy_o |-> !(entry_i || emret_switch_i));

endmodule
