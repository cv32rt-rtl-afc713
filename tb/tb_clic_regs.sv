// tb_clic_regs -- self-checking test of the CLIC configuration registers.
//
// With 8 sources: checks reset values, cliccfg write/read and clamping of
// nlbits/nmbits, the read-only clicinfo word, random writes with random
// byte strobes to every clicint word against a shadow copy kept in the
// testbench (read back over the bus and compared on the decoded outputs),
// the forwarding of ip writes as a strobe to the gateway, the privilege
// mapping from nmbits/mode, and the error response outside the map.
module tb_clic_regs;
  import cv32rt_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  reg_req_t req;
  reg_rsp_t rsp;
  logic [N-1:0] ip_in, ie, shv;
  logic [N-1:0][1:0] trig;
  priv_t [N-1:0] priv;
  irq_lvl_t [N-1:0] ctl;
  logic [3:0] nlbits;
  logic sw_we, sw_val;
  irq_id_t sw_idx;
  int checks = 0, failures = 0;

  clic_regs #(.N_SOURCE(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .ip_i(ip_in),
    .sw_ip_we_o(sw_we), .sw_ip_idx_o(sw_idx), .sw_ip_val_o(sw_val),
    .ie_o(ie), .shv_o(shv), .trig_o(trig), .priv_o(priv), .ctl_o(ctl), .nlbits_o(nlbits));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic wr(input logic [15:0] a, input word_t d, input logic [3:0] s);
    @(negedge clk);
    req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d, wstrb: s};
    @(posedge clk); #1;
    req = '0;
  endtask

  task automatic rd(input logic [15:0] a, output word_t d, output logic err);
    @(negedge clk);
    req = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0, wstrb: '0};
    #1 d = rsp.rdata; err = rsp.error;
    check(rsp.ready, "ready on read");
    @(posedge clk); #1;
    req = '0;
  endtask

  word_t shadow [N];
  word_t d;
  logic e;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; ip_in = 8'hA5;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    rd(16'h0000, d, e);
    check(d == 32'h0000_0011, "cliccfg reset: nlbits=8, nvbits=1");
    rd(16'h0004, d, e);
    check(d[12:0] == 13'(N) && d[24:21] == 4'd8, "clicinfo");
    wr(16'h0004, 32'hFFFF_FFFF, 4'hF);
    rd(16'h0004, d, e);
    check(d[12:0] == 13'(N), "clicinfo read-only");
    wr(16'h0000, {25'd0, 2'd3, 4'd15, 1'b0}, 4'h1);
    rd(16'h0000, d, e);
    check(d[4:1] == 4'd8 && d[6:5] == 2'd1 && nlbits == 4'd8, "cliccfg clamping");
    wr(16'h0000, {25'd0, 2'd0, 4'd3, 1'b0}, 4'h1);
    check(nlbits == 4'd3, "nlbits written");
    for (int i = 0; i < N; i++) shadow[i] = '0;
    for (int t = 0; t < 300; t++) begin
      int i;
      word_t w;
      logic [3:0] s;
      i = $urandom_range(0, N-1);
      w = $urandom;
      s = 4'($urandom);
      // check the ip forwarding strobe in the write cycle
      @(negedge clk);
      req = '{valid: 1'b1, write: 1'b1, addr: 16'h1000 + 16'(4*i), wdata: w, wstrb: s};
      #1;
      check(sw_we == s[0] && sw_idx == irq_id_t'(i) && sw_val == w[0], "ip write strobe");
      @(posedge clk); #1;
      req = '0;
      if (s[1]) shadow[i][8] = w[8];
      if (s[2]) begin shadow[i][16] = w[16]; shadow[i][18:17] = w[18:17]; shadow[i][23:22] = w[23:22]; end
      if (s[3]) shadow[i][31:24] = w[31:24];
      rd(16'h1000 + 16'(4*i), d, e);
      check(d == (shadow[i] | word_t'(ip_in[i])), "clicint readback");
      check(ie[i] == shadow[i][8] && shv[i] == shadow[i][16] &&
            trig[i] == shadow[i][18:17] && ctl[i] == shadow[i][31:24], "decoded outputs");
      check(priv[i] == PRIV_M, "nmbits=0 gives machine mode");
    end
    wr(16'h0000, {25'd0, 2'd1, 4'd3, 1'b0}, 4'h1);
    for (int i = 0; i < N; i++)
      check(priv[i] == (shadow[i][23] ? PRIV_M : PRIV_U), "nmbits=1 privilege mapping");
    rd(16'h1000 + 16'(4*N), d, e);
    check(e, "error beyond last source");
    rd(16'h0100, d, e);
    check(e, "error on hole in the map");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
