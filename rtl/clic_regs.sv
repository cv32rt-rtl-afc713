// clic_regs -- memory-mapped configuration registers of the CLIC.
//
// Register map (byte addresses inside the CLIC window, 32-bit accesses):
//   0x0000  cliccfg   [0] nvbits (reads 1: selective hardware vectoring is
//                     supported), [4:1] nlbits (level bits of clicintctl,
//                     0..8), [6:5] nmbits (mode bits of clicintattr, 0..1)
//   0x0004  clicinfo  read-only: [12:0] number of sources, [24:21] number of
//                     clicintctl bits (8)
//   0x1000 + 4*i      clicint[i], one 32-bit word per source:
//                     [0] ip, [8] ie, [16] shv, [18:17] trig, [23:22] mode,
//                     [31:24] ctl (level in the upper nlbits, priority below)
// Byte strobes are honoured. Every access completes in the cycle it is
// presented (rsp.ready = req.valid); an address outside the map or a write
// to clicinfo returns error. The ip bit itself lives in the gateway: a write
// to byte 0 of clicint[i] is forwarded as a one-cycle strobe (sw_ip_*).
// Outputs per source: enable, vectoring flag, trigger type, effective
// privilege (M when nmbits = 0, else mode[1] ? M : U) and the raw control
// byte. One 32-bit register per source is what the paper's area breakdown
// describes; the field layout follows the RISC-V CLIC draft, the single-cycle
// bus and the M/U-only privilege mapping are this design's choices.
module clic_regs
  import cv32rt_pkg::*;
#(
  parameter int unsigned N_SOURCE = 256
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  reg_req_t                       req_i,
  output reg_rsp_t                       rsp_o,
  input  logic     [N_SOURCE-1:0]        ip_i,      // from the gateway
  output logic                           sw_ip_we_o,
  output irq_id_t                        sw_ip_idx_o,
  output logic                           sw_ip_val_o,
  output logic     [N_SOURCE-1:0]        ie_o,
  output logic     [N_SOURCE-1:0]        shv_o,
  output logic     [N_SOURCE-1:0][1:0]   trig_o,
  output priv_t    [N_SOURCE-1:0]        priv_o,
  output irq_lvl_t [N_SOURCE-1:0]        ctl_o,
  output logic     [3:0]                 nlbits_o
);

  logic [3:0] nlbits_q;
  logic [1:0] nmbits_q;
  logic [N_SOURCE-1:0]      ie_q, shv_q;
  logic [N_SOURCE-1:0][1:0] trig_q, mode_q;
  irq_lvl_t [N_SOURCE-1:0]  ctl_q;

  // ----------------------------------------------------------- decode
  logic        is_cfg, is_info, is_int;
  logic [15:0] int_off;
  irq_id_t     idx;

  always_comb begin
    is_cfg  = (req_i.addr[15:2] == CLICCFG_ADDR[15:2]);
    is_info = (req_i.addr[15:2] == CLICINFO_ADDR[15:2]);
    int_off = req_i.addr - CLICINT_BASE;
    idx     = irq_id_t'(int_off[15:2]);
    is_int  = (req_i.addr >= CLICINT_BASE) && (int_off[15:2] < 14'(N_SOURCE));
  end

  // ----------------------------------------------------------- read / response
  always_comb begin
    rsp_o       = '0;
    rsp_o.ready = req_i.valid;
    if (is_cfg) begin
      rsp_o.rdata = {25'd0, nmbits_q, nlbits_q, 1'b1};
    end else if (is_info) begin
      rsp_o.rdata = {7'd0, 4'(CTL_W), 8'd0, 13'(N_SOURCE)};
      rsp_o.error = req_i.valid && req_i.write;
    end else if (is_int) begin
      rsp_o.rdata = {ctl_q[idx], mode_q[idx], 3'd0, trig_q[idx], shv_q[idx],
                     7'd0, ie_q[idx], 7'd0, ip_i[idx]};
    end else begin
      rsp_o.error = req_i.valid;
    end
  end

  logic wr;
  assign wr = req_i.valid && req_i.write;

  assign sw_ip_we_o  = wr && is_int && req_i.wstrb[0];
  assign sw_ip_idx_o = idx;
  assign sw_ip_val_o = req_i.wdata[0];

  // ----------------------------------------------------------- write
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      nlbits_q <= 4'd8;
      nmbits_q <= 2'd0;
      ie_q     <= '0;
      shv_q    <= '0;
      trig_q   <= '0;
      mode_q   <= '0;
      ctl_q    <= '0;
    end else if (wr) begin
      if (is_cfg && req_i.wstrb[0]) begin
        nlbits_q <= (req_i.wdata[4:1] > 4'd8) ? 4'd8 : req_i.wdata[4:1];
        nmbits_q <= (req_i.wdata[6:5] > 2'd1) ? 2'd1 : req_i.wdata[6:5];
      end
      if (is_int) begin
        if (req_i.wstrb[1]) ie_q[idx] <= req_i.wdata[8];
        if (req_i.wstrb[2]) begin
          shv_q[idx]  <= req_i.wdata[16];
          trig_q[idx] <= req_i.wdata[18:17];
          mode_q[idx] <= req_i.wdata[23:22];
        end
        if (req_i.wstrb[3]) ctl_q[idx] <= req_i.wdata[31:24];
      end
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < N_SOURCE; i++) begin
      priv_o[i] = (nmbits_q == 2'd0 || mode_q[i][1]) ? PRIV_M : PRIV_U;
    end
  end

  assign ie_o     = ie_q;
  assign shv_o    = shv_q;
  assign trig_o   = trig_q;
  assign ctl_o    = ctl_q;
  assign nlbits_o = nlbits_q;

endmodule
