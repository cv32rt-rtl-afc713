// tb_clic -- self-checking test of the complete CLIC.
//
// 16 sources are configured over the register bus. Checks: the offered
// interrupt appears two clocks after its line rises; among several pending
// sources the highest level wins, then the highest priority, then the
// highest id; the level reported is the upper nlbits of clicintctl padded
// with ones; mintthresh masks a machine-mode interrupt at or below it;
// taking an edge-triggered interrupt clears its pending bit while a
// level-triggered one stays pending while its line is high; a software
// write of a pending bit (how a context switch is triggered) raises an
// interrupt; a more important arrival kills an open offer.
module tb_clic;
  import cv32rt_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] irq;
  reg_req_t req;
  reg_rsp_t rsp;
  irq_lvl_t thresh;
  clic_irq_t o;
  core_irq_ack_t ack;
  int checks = 0, failures = 0;

  clic #(.N_SOURCE(N)) dut (.clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .reg_req_i(req),
    .reg_rsp_o(rsp), .mintthresh_i(thresh), .irq_o(o), .ack_i(ack));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t (valid=%0d id=%0d lvl=%h)", what, $time, o.valid, o.id, o.level);
    end
  endtask

  task automatic wr(input logic [15:0] a, input word_t d);
    @(negedge clk);
    req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: 4'hF};
    @(posedge clk); #1;
    req = '0;
  endtask

  // clicint word: ctl, mode=M, trig, shv, ie, ip
  task automatic cfg(input int i, input logic [7:0] ctl, input logic edge_t, input logic ie);
    wr(16'h1000 + 16'(4*i), {ctl, 2'b11, 3'b000, 1'b0, edge_t, 1'b0, 7'd0, ie, 8'd0});
  endtask

  task automatic take();
    @(negedge clk); ack.ack = 1;
    @(posedge clk); #1; ack.ack = 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    irq = '0; req = '0; thresh = 0; ack = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    wr(16'h0000, {27'd0, 4'd4, 1'b0});       // nlbits = 4: ctl[7:4] level, ctl[3:0] priority
    cfg(1, 8'h3A, 1'b1, 1'b1);               // level 0x3F, prio A, edge
    cfg(2, 8'h3C, 1'b0, 1'b1);               // level 0x3F, prio C, level-triggered
    cfg(3, 8'h3C, 1'b1, 1'b1);               // same ctl as 2, higher id
    cfg(4, 8'h71, 1'b1, 1'b1);               // level 0x7F
    cfg(5, 8'hF0, 1'b1, 1'b0);               // disabled
    // latency: line rises at a clock edge, valid two clocks later
    @(negedge clk); irq[1] = 1;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!o.valid && lat < 10);
    check(lat == 2, "two-clock latency from line to offer");
    check(o.id == 1 && o.level == 8'h3F, "level padded with ones");
    take();
    @(negedge clk); irq[1] = 0;
    repeat (3) begin @(posedge clk); #1; check(!o.valid, "edge pending cleared by the claim"); end
    // priority and id tie-break
    @(negedge clk); irq[2] = 1; irq[3] = 1; irq[1] = 1; irq[5] = 1;
    repeat (3) @(posedge clk); #1;
    check(o.valid && o.id == 3, "equal level and priority: highest id wins");
    take();
    repeat (2) @(posedge clk); #1;
    check(o.valid && o.id == 2, "next: level-triggered source 2 (prio C over A)");
    take();
    repeat (2) @(posedge clk); #1;
    check(o.valid && o.id == 2, "level-triggered source stays pending while the line is high");
    @(negedge clk); irq[2] = 0;
    repeat (2) @(posedge clk); #1;
    check(o.kill_req, "offer withdrawn when the line drops: kill");
    @(negedge clk); ack.kill_ack = 1; @(posedge clk); #1; ack.kill_ack = 0;
    @(posedge clk); #1;
    check(o.valid && o.id == 1, "source 1 remains");
    // a more important interrupt arrives during the open offer
    @(negedge clk); irq[4] = 1;
    repeat (2) @(posedge clk); #1;
    check(o.kill_req && o.id == 1, "kill for the higher-level arrival");
    @(negedge clk); ack.kill_ack = 1; @(posedge clk); #1; ack.kill_ack = 0;
    @(posedge clk); #1;
    check(o.valid && o.id == 4 && o.level == 8'h7F, "higher level offered after kill");
    take();
    repeat (2) @(posedge clk); #1;
    check(o.valid && o.id == 1, "back to source 1");
    take();
    irq = '0;
    repeat (3) @(posedge clk); #1;
    check(!o.valid, "nothing pending; disabled source 5 never offered");
    // threshold
    thresh = 8'h3F;
    wr(16'h1000 + 16'(4*1), {8'h3A, 2'b11, 3'b000, 1'b0, 1'b1, 1'b0, 7'd0, 1'b1, 8'd1}); // sw set ip
    repeat (3) begin @(posedge clk); #1; check(!o.valid, "level at threshold masked"); end
    thresh = 8'h2F;
    repeat (2) @(posedge clk); #1;
    check(o.valid && o.id == 1, "software-set pending offered once threshold drops");
    take();
    repeat (2) @(posedge clk); #1;
    check(!o.valid, "software interrupt claimed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
