// clic -- Core-Local Interrupt Controller of CV32RT.
//
// Incoming lines pass the gateway (pending logic per source), the pending
// and enabled sources are arbitrated by a binary tree on the key
// {privilege, clicintctl}, and the winner is offered to the core by the
// target stage after the threshold check. The clicintctl byte holds the
// level in its upper nlbits bits and the priority below them; comparing the
// whole byte therefore orders by level first and priority second. The level
// handed to the core is the upper nlbits bits with the lower bits filled
// with ones, as the CLIC draft specifies.
// Interface: reg_req_i/reg_rsp_o is the configuration bus (map in
// clic_regs), irq_o/ack_i the core handshake (see cv32rt_pkg), mintthresh_i
// the core's machine-mode threshold CSR.
// Timing: an interrupt line change reaches irq_o.valid two clocks later
// (one in the gateway, one in the target stage); arbitration is
// combinational in between. TREE_PIPE > 0 adds that many register stages
// after the tree, which the paper names as an option to relax timing; the
// latency grows by TREE_PIPE clocks and the target waits TREE_PIPE cycles
// after a claim before the next offer. The default is the combinational
// tree.
module clic
  import cv32rt_pkg::*;
#(
  parameter int unsigned N_SOURCE  = 256,
  // register stages after the arbitration tree (0: combinational tree)
  parameter int unsigned TREE_PIPE = 0
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [N_SOURCE-1:0] irq_i,
  input  reg_req_t            reg_req_i,
  output reg_rsp_t            reg_rsp_o,
  input  irq_lvl_t            mintthresh_i,
  output clic_irq_t           irq_o,
  input  core_irq_ack_t       ack_i
);

  localparam int unsigned KEY_W = 2 + CTL_W;

  logic     [N_SOURCE-1:0]      ip, pe, ie, shv;
  logic     [N_SOURCE-1:0][1:0] trig;
  priv_t    [N_SOURCE-1:0]      priv;
  irq_lvl_t [N_SOURCE-1:0]      ctl;
  logic     [3:0]               nlbits;
  logic                         sw_ip_we, sw_ip_val;
  irq_id_t                      sw_ip_idx;
  logic                         claim;
  irq_id_t                      claim_id;

  clic_regs #(.N_SOURCE(N_SOURCE)) i_regs (
    .clk_i, .rst_ni,
    .req_i       (reg_req_i),
    .rsp_o       (reg_rsp_o),
    .ip_i        (ip),
    .sw_ip_we_o  (sw_ip_we),
    .sw_ip_idx_o (sw_ip_idx),
    .sw_ip_val_o (sw_ip_val),
    .ie_o        (ie),
    .shv_o       (shv),
    .trig_o      (trig),
    .priv_o      (priv),
    .ctl_o       (ctl),
    .nlbits_o    (nlbits)
  );

  clic_gateway #(.N_SOURCE(N_SOURCE)) i_gateway (
    .clk_i, .rst_ni,
    .irq_i,
    .ie_i        (ie),
    .trig_i      (trig),
    .sw_ip_we_i  (sw_ip_we),
    .sw_ip_idx_i (sw_ip_idx),
    .sw_ip_val_i (sw_ip_val),
    .claim_i     (claim),
    .claim_id_i  (claim_id),
    .ip_o        (ip),
    .pe_o        (pe)
  );

  logic [N_SOURCE-1:0][KEY_W-1:0] key;
  always_comb begin
    for (int unsigned i = 0; i < N_SOURCE; i++) key[i] = {priv[i], ctl[i]};
  end

  logic             win_valid, tree_valid;
  logic [KEY_W-1:0] win_key, tree_key;
  irq_id_t          win_id, tree_id;

  clic_max_tree #(.N_SOURCE(N_SOURCE), .KEY_W(KEY_W)) i_tree (
    .pend_i  (pe),
    .key_i   (key),
    .valid_o (tree_valid),
    .key_o   (tree_key),
    .id_o    (tree_id)
  );

  // Optional pipeline stages on the tree result. Placed at the root here;
  // register retiming in synthesis can move them into the tree levels.
  if (TREE_PIPE == 0) begin : g_no_pipe
    assign win_valid = tree_valid;
    assign win_key   = tree_key;
    assign win_id    = tree_id;
  end else begin : g_pipe
    logic             valid_q [TREE_PIPE];
    logic [KEY_W-1:0] key_q   [TREE_PIPE];
    irq_id_t          id_q    [TREE_PIPE];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        for (int unsigned s = 0; s < TREE_PIPE; s++) begin
          valid_q[s] <= 1'b0;
          key_q[s]   <= '0;
          id_q[s]    <= '0;
        end
      end else begin
        valid_q[0] <= tree_valid;
        key_q[0]   <= tree_key;
        id_q[0]    <= tree_id;
        for (int unsigned s = 1; s < TREE_PIPE; s++) begin
          valid_q[s] <= valid_q[s-1];
          key_q[s]   <= key_q[s-1];
          id_q[s]    <= id_q[s-1];
        end
      end
    end
    assign win_valid = valid_q[TREE_PIPE-1];
    assign win_key   = key_q[TREE_PIPE-1];
    assign win_id    = id_q[TREE_PIPE-1];
  end

  // Level = upper nlbits of clicintctl, lower bits filled with ones.
  irq_lvl_t lvl_mask, win_level;
  logic     win_shv;
  assign lvl_mask  = (nlbits == 4'd0) ? '0 : irq_lvl_t'(8'hFF << (4'd8 - nlbits));
  assign win_level = (win_key[CTL_W-1:0] & lvl_mask) | ~lvl_mask;
  assign win_shv   = shv[win_id[$clog2(N_SOURCE > 1 ? N_SOURCE : 2)-1:0]];

  clic_target #(.HOLD(TREE_PIPE)) i_target (
    .clk_i, .rst_ni,
    .win_valid_i  (win_valid),
    .win_id_i     (win_id),
    .win_priv_i   (win_key[KEY_W-1 -: 2]),
    .win_level_i  (win_level),
    .win_shv_i    (win_shv),
    .mintthresh_i,
    .irq_o,
    .ack_i,
    .claim_o      (claim),
    .claim_id_o   (claim_id)
  );

endmodule
