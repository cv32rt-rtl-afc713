// tb_clic_pipe -- self-checking test of the CLIC with a pipelined
// arbitration tree (TREE_PIPE = 2).
//
// 16 sources. Checks: the offer appears 2 + TREE_PIPE clocks after the line
// rises; the highest level still wins; after a claim the claimed interrupt,
// still at the pipeline output for TREE_PIPE cycles, is not offered again;
// every edge-triggered interrupt fired once is acknowledged exactly once;
// nothing is offered once all pending interrupts are claimed.
module tb_clic_pipe;
  import cv32rt_pkg::*;
  localparam int N  = 16;
  localparam int TP = 2;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] irq;
  reg_req_t req;
  reg_rsp_t rsp;
  irq_lvl_t thresh;
  clic_irq_t o;
  core_irq_ack_t ack;
  int checks = 0, failures = 0;
  int acks [N];

  clic #(.N_SOURCE(N), .TREE_PIPE(TP)) dut (.clk_i(clk), .rst_ni(rst_n), .irq_i(irq),
    .reg_req_i(req), .reg_rsp_o(rsp), .mintthresh_i(thresh), .irq_o(o), .ack_i(ack));

  always #5 clk = ~clk;

  // count acknowledges per id
  always @(posedge clk) if (rst_n && ack.ack && o.valid) acks[o.id]++;

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

  task automatic cfg(input int i, input logic [7:0] ctl, input logic edge_t, input logic ie);
    wr(16'h1000 + 16'(4*i), {ctl, 2'b11, 3'b000, 1'b0, edge_t, 1'b0, 7'd0, ie, 8'd0});
  endtask

  // wait for an offer (at most 10 clocks), then acknowledge it
  task automatic take_next(output int id, output int waited);
    waited = 0;
    while (!o.valid && waited < 10) begin @(posedge clk); #1; waited++; end
    id = o.id;
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
    int lat, id, w;
    irq = '0; req = '0; thresh = 0; ack = '0;
    foreach (acks[i]) acks[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    wr(16'h0000, {27'd0, 4'd4, 1'b0});       // nlbits = 4
    for (int i = 1; i <= 6; i++) cfg(i, {4'(i), 4'h0}, 1'b1, 1'b1);  // level rises with id, edge
    // latency
    @(negedge clk); irq[1] = 1;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!o.valid && lat < 10);
    check(lat == 2 + TP, "latency from line to offer is 2 + TREE_PIPE");
    check(o.id == 1, "source 1 offered");
    take_next(id, w);
    @(negedge clk); irq[1] = 0;
    repeat (2 * TP + 3) begin @(posedge clk); #1; check(!o.valid, "claimed interrupt not offered again"); end
    // several pending: served highest level first, each exactly once
    @(negedge clk); irq[6:2] = '1;
    @(negedge clk); irq[6:2] = '0;
    for (int n = 6; n >= 2; n--) begin
      take_next(id, w);
      check(id == n, $sformatf("pending served in level order (expected %0d got %0d)", n, id));
    end
    repeat (2 * TP + 3) begin @(posedge clk); #1; check(!o.valid, "nothing left after all claims"); end
    for (int i = 1; i <= 6; i++) check(acks[i] == 1, $sformatf("source %0d acknowledged once", i));
    // a higher level arriving during an open offer still preempts it by kill
    @(negedge clk); irq[2] = 1;
    repeat (2 + TP) @(posedge clk); #1;
    check(o.valid && o.id == 2, "source 2 offered");
    @(negedge clk); irq[5] = 1;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!o.kill_req && lat < 10);
    check(o.kill_req, "kill for the higher-level arrival");
    @(negedge clk); ack.kill_ack = 1; @(posedge clk); #1; ack.kill_ack = 0;
    take_next(id, w);
    check(id == 5, "higher level offered after kill");
    take_next(id, w);
    check(id == 2, "then source 2");
    repeat (2 * TP + 3) begin @(posedge clk); #1; check(!o.valid, "idle at the end"); end
    check(acks[2] == 2 && acks[5] == 2, "no duplicate acknowledge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
