// clic_target -- threshold check and core handshake of the CLIC.
//
// Takes the winner of the arbitration tree (id, privilege, level, vectoring
// flag), checks that a machine-mode winner's level exceeds the threshold
// mintthresh (lower-privilege winners are not thresholded here), and offers
// the interrupt to the core on a valid/ack handshake:
//   IDLE   a qualifying winner is registered onto irq_o; valid rises one
//          clock after the winner appears.
//   OFFER  irq_o is held stable. ack_i takes it: valid drops and claim_o
//          pulses with the taken id (the gateway clears an edge-triggered
//          pending bit). If the winner changes or stops qualifying before
//          ack, kill_req rises.
//   KILL   irq_o is still held, with kill_req high. kill_ack_i drops the
//          offer, after which the current winner is offered afresh; an ack_i
//          that crosses the kill still counts as taken.
// With HOLD > 0 (pipelined arbitration tree) no new offer is made for HOLD
// cycles after a claim.
// The threshold check, the handshake and the kill that restarts it are the
// paper's; the three-state machine and the one-cycle registration are this
// design's choice.
module clic_target
  import cv32rt_pkg::*;
#(
  // cycles to wait after a claim before offering again: the delay of any
  // pipeline stages after the arbitration tree, so that the claimed
  // interrupt, still seen as winner, is not offered twice (at most 15)
  parameter int unsigned HOLD = 0
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          win_valid_i,
  input  irq_id_t       win_id_i,
  input  priv_t         win_priv_i,
  input  irq_lvl_t      win_level_i,
  input  logic          win_shv_i,
  input  irq_lvl_t      mintthresh_i,
  output clic_irq_t     irq_o,
  input  core_irq_ack_t ack_i,
  output logic          claim_o,
  output irq_id_t       claim_id_o
);

  typedef enum logic [1:0] {ST_IDLE, ST_OFFER, ST_KILL} state_e;
  state_e    state_q, state_d;
  clic_irq_t irq_q, irq_d;

  logic qualifies, same_as_offer, hold;
  logic [3:0] hold_q;
  assign hold      = (hold_q != '0);
  assign qualifies = win_valid_i &&
                     ((win_priv_i != PRIV_M) || (win_level_i > mintthresh_i));
  assign same_as_offer = qualifies && (win_id_i == irq_q.id) &&
                         (win_level_i == irq_q.level) && (win_priv_i == irq_q.priv) &&
                         (win_shv_i == irq_q.shv);

  always_comb begin
    state_d    = state_q;
    irq_d      = irq_q;
    claim_o    = 1'b0;
    claim_id_o = irq_q.id;
    unique case (state_q)
      ST_IDLE: begin
        if (qualifies && !hold) begin
          irq_d.valid    = 1'b1;
          irq_d.id       = win_id_i;
          irq_d.level    = win_level_i;
          irq_d.priv     = win_priv_i;
          irq_d.shv      = win_shv_i;
          irq_d.kill_req = 1'b0;
          state_d        = ST_OFFER;
        end
      end
      ST_OFFER: begin
        if (ack_i.ack) begin
          claim_o     = 1'b1;
          irq_d.valid = 1'b0;
          state_d     = ST_IDLE;
        end else if (!same_as_offer) begin
          irq_d.kill_req = 1'b1;
          state_d        = ST_KILL;
        end
      end
      ST_KILL: begin
        if (ack_i.ack) begin
          claim_o        = 1'b1;
          irq_d.valid    = 1'b0;
          irq_d.kill_req = 1'b0;
          state_d        = ST_IDLE;
        end else if (ack_i.kill_ack) begin
          irq_d.valid    = 1'b0;
          irq_d.kill_req = 1'b0;
          state_d        = ST_IDLE;
        end
      end
      default: state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= ST_IDLE;
      irq_q   <= '0;
      hold_q  <= '0;
    end else begin
      state_q <= state_d;
      irq_q   <= irq_d;
      if (claim_o)   hold_q <= 4'(HOLD);
      else if (hold) hold_q <= hold_q - 4'd1;
    end
  end

  assign irq_o = irq_q;

  // While an offer is open and not answered, what is offered stays put.
  a_offer_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (irq_q.valid && !ack_i.ack && !ack_i.kill_ack) |=>
      (irq_q.valid && $stable(irq_q.id) && $stable(irq_q.level)));
  // A kill request is only raised while an interrupt is offered.
  a_kill_needs_valid: assert property (@(posedge clk_i) disable iff (!rst_ni)
    irq_q.kill_req |-> irq_q.valid);

endmodule
