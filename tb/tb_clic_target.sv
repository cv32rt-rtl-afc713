// tb_clic_target -- self-checking test of the CLIC threshold and handshake.
//
// Directed sequences: an offer appears one clock after a qualifying winner;
// an ack takes it (claim pulse with the id, valid drops); a machine-mode
// winner at or below mintthresh is not offered, one above it is, and a
// user-mode winner ignores the threshold; a change of winner during an
// open offer raises kill_req while the old offer is held, kill_ack drops
// it and the new winner is offered next; an ack that crosses a kill is a
// claim. Offers are checked to stay stable while unanswered.
module tb_clic_target;
  import cv32rt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wv, wshv;
  irq_id_t wid;
  priv_t wpriv;
  irq_lvl_t wlvl, thresh;
  clic_irq_t irq;
  core_irq_ack_t ack;
  logic claim;
  irq_id_t claim_id;
  int checks = 0, failures = 0;

  clic_target dut (.clk_i(clk), .rst_ni(rst_n), .win_valid_i(wv), .win_id_i(wid),
    .win_priv_i(wpriv), .win_level_i(wlvl), .win_shv_i(wshv), .mintthresh_i(thresh),
    .irq_o(irq), .ack_i(ack), .claim_o(claim), .claim_id_o(claim_id));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic win(input logic v, input int id, input priv_t p, input int l);
    wv = v; wid = irq_id_t'(id); wpriv = p; wlvl = irq_lvl_t'(l); wshv = id[0];
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    win(0, 0, PRIV_M, 0); thresh = 0; ack = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // basic offer and ack
    @(negedge clk); win(1, 5, PRIV_M, 8'h40);
    #1 check(!irq.valid, "no offer in the same cycle");
    @(posedge clk); #1;
    check(irq.valid && irq.id == 5 && irq.level == 8'h40 && irq.shv == 1, "offer one clock later");
    repeat (3) begin @(posedge clk); #1; check(irq.valid && irq.id == 5 && !irq.kill_req, "offer held"); end
    @(negedge clk); ack.ack = 1;
    #1 check(claim && claim_id == 5, "claim pulse on ack");
    @(posedge clk); #1; ack.ack = 0; win(0, 0, PRIV_M, 0);
    check(!irq.valid, "valid drops after ack");
    // threshold
    @(negedge clk); thresh = 8'h80; win(1, 3, PRIV_M, 8'h80);
    repeat (3) begin @(posedge clk); #1; check(!irq.valid, "level == threshold not offered"); end
    @(negedge clk); win(1, 3, PRIV_M, 8'h81);
    @(posedge clk); #1; check(irq.valid && irq.id == 3, "level above threshold offered");
    @(negedge clk); ack.ack = 1; @(posedge clk); #1; ack.ack = 0; win(0, 0, PRIV_M, 0);
    @(negedge clk); win(1, 4, PRIV_U, 8'h10);
    @(posedge clk); #1; check(irq.valid && irq.priv == PRIV_U, "user-mode winner ignores mintthresh");
    @(negedge clk); ack.ack = 1; @(posedge clk); #1; ack.ack = 0; win(0, 0, PRIV_M, 0);
    thresh = 0;
    // kill
    @(negedge clk); win(1, 7, PRIV_M, 8'h20);
    @(posedge clk); #1; check(irq.valid && irq.id == 7, "offer for kill test");
    @(negedge clk); win(1, 9, PRIV_M, 8'h90);
    @(posedge clk); #1; check(irq.valid && irq.kill_req && irq.id == 7, "kill_req with old offer held");
    @(posedge clk); #1; check(irq.kill_req && irq.id == 7, "kill_req held until kill_ack");
    @(negedge clk); ack.kill_ack = 1;
    #1 check(!claim, "no claim on kill_ack");
    @(posedge clk); #1; ack.kill_ack = 0;
    check(!irq.valid && !irq.kill_req, "offer dropped after kill_ack");
    @(posedge clk); #1; check(irq.valid && irq.id == 9 && irq.level == 8'h90, "new winner offered");
    // ack crossing a kill
    @(negedge clk); win(1, 2, PRIV_M, 8'hA0);
    @(posedge clk); #1; check(irq.kill_req, "second kill");
    @(negedge clk); ack.ack = 1;
    #1 check(claim && claim_id == 9, "ack during kill claims the offered id");
    @(posedge clk); #1; ack.ack = 0;
    check(!irq.valid, "dropped after crossing ack");
    @(posedge clk); #1; check(irq.valid && irq.id == 2, "next winner offered");
    // winner disappears: kill as well
    @(negedge clk); win(0, 0, PRIV_M, 0);
    @(posedge clk); #1; check(irq.kill_req, "kill when winner withdrawn");
    @(negedge clk); ack.kill_ack = 1; @(posedge clk); #1; ack.kill_ack = 0;
    repeat (2) begin @(posedge clk); #1; check(!irq.valid, "nothing offered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
