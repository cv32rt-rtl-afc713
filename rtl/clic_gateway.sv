// clic_gateway -- per-source interrupt pending logic of the CLIC.
//
// For every source i the gateway keeps the pending bit ip[i] and decides
// whether the source is pending and enabled (pe_o[i] = ip[i] & ie[i]).
// The sensitivity comes from the source's clicintattr.trig field:
//   trig[0] = 0  level-triggered: ip follows the (polarity-corrected) line,
//                one cycle late; software writes to ip are ignored.
//   trig[0] = 1  edge-triggered: ip is set on an active edge of the line,
//                set or cleared by a software write, and cleared when the
//                core claims the interrupt (claim_i with claim_id_i == i).
//   trig[1]      polarity: 0 = active high / rising edge, 1 = active low /
//                falling edge.
// A software write to an edge-triggered source wins over a claim of the
// same source in the same cycle; an edge arriving in the same cycle as a
// claim keeps the bit set so that the new request is not lost.
// Timing: a line change shows on ip_o/pe_o one clock later.
// That the gateway combines each line with enable and sensitivity is from
// the paper's CLIC overview; the trig encoding follows the RISC-V CLIC draft
// and the claim/software priority is this design's choice.
module clic_gateway #(
  parameter int unsigned N_SOURCE = 256
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic [N_SOURCE-1:0]         irq_i,        // raw interrupt lines
  input  logic [N_SOURCE-1:0]         ie_i,         // clicintie
  input  logic [N_SOURCE-1:0][1:0]    trig_i,       // clicintattr.trig
  input  logic                        sw_ip_we_i,   // software write of one ip bit
  input  logic [cv32rt_pkg::ID_W-1:0] sw_ip_idx_i,
  input  logic                        sw_ip_val_i,
  input  logic                        claim_i,      // core took interrupt claim_id_i
  input  logic [cv32rt_pkg::ID_W-1:0] claim_id_i,
  output logic [N_SOURCE-1:0]         ip_o,
  output logic [N_SOURCE-1:0]         pe_o
);

  logic [N_SOURCE-1:0] line_q;  // polarity-corrected line, previous cycle
  logic [N_SOURCE-1:0] ip_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      line_q <= '0;
      ip_q   <= '0;
    end else begin
      for (int unsigned i = 0; i < N_SOURCE; i++) begin
        logic line;
        line      = irq_i[i] ^ trig_i[i][1];
        line_q[i] <= line;
        if (!trig_i[i][0]) begin
          ip_q[i] <= line;
        end else if (sw_ip_we_i && (sw_ip_idx_i == cv32rt_pkg::ID_W'(i))) begin
          ip_q[i] <= sw_ip_val_i;
        end else if (line && !line_q[i]) begin
          ip_q[i] <= 1'b1;
        end else if (claim_i && (claim_id_i == cv32rt_pkg::ID_W'(i))) begin
          ip_q[i] <= 1'b0;
        end
      end
    end
  end

  assign ip_o = ip_q;
  assign pe_o = ip_q & ie_i;

endmodule
