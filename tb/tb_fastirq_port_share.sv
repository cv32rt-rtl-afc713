// tb_fastirq_port_share -- self-checking test of the shared save/LSU port.
//
// A memory model grants at random and answers every granted request in
// order after a random delay. The save side writes a stream of words to its
// own region; the LSU side issues random reads and writes to another region
// and checks every read against a reference copy. Checks: no request is
// dropped or changed while waiting for gnt; every response reaches the
// requester that issued it; at most MAX_OUT requests are outstanding; the
// save wins the port whenever it is free and both request; all save words
// arrive in memory.
module tb_fastirq_port_share;
  import cv32rt_pkg::*;
  localparam int MO = 2;
  logic clk = 0, rst_n = 0;
  mem_req_t sreq, lreq, mreq;
  mem_rsp_t srsp, lrsp, mrsp;
  int checks = 0, failures = 0;

  fastirq_port_share #(.MAX_OUT(MO)) dut (.clk_i(clk), .rst_ni(rst_n),
    .save_req_i(sreq), .save_rsp_o(srsp), .lsu_req_i(lreq), .lsu_rsp_o(lrsp),
    .mem_req_o(mreq), .mem_rsp_i(mrsp));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // memory: 256 words, random gnt, in-order responses after 1..4 cycles
  word_t mem [256];
  word_t rq_data [$];
  int    rq_wait [$];
  logic  gnt_rand = 1'b0;
  always_comb begin
    mrsp.gnt = gnt_rand;
    mrsp.rvalid = (rq_wait.size() > 0) && (rq_wait[0] == 0);
    mrsp.rdata  = mrsp.rvalid ? rq_data[0] : '0;
  end
  always @(posedge clk) if (rst_n) begin
    if (mrsp.rvalid) begin void'(rq_data.pop_front()); void'(rq_wait.pop_front()); end
    foreach (rq_wait[i]) if (rq_wait[i] > 0) rq_wait[i]--;
    if (mreq.req && mrsp.gnt) begin
      rq_data.push_back(mem[mreq.addr[9:2]]);
      rq_wait.push_back($urandom_range(0, 3));
      if (mreq.we) mem[mreq.addr[9:2]] <= mreq.wdata;
    end
    check(rq_wait.size() <= MO, "at most MAX_OUT outstanding");
  end

  // request stability and priority on the shared port
  logic    prev_wait = 1'b0, prev_owner_save = 1'b0;
  int      contended = 0;
  mem_req_t prev_req;
  always @(posedge clk) if (rst_n) begin
    if (prev_wait) check(mreq == prev_req, "shared request stable until gnt");
    if (sreq.req && lreq.req && !prev_wait) contended++;
    if (sreq.req && lrsp.gnt)
      check(prev_wait && !prev_owner_save, "lsu granted over the save only when it held the port");
    prev_wait       <= mreq.req && !mrsp.gnt;
    prev_req        <= mreq;
    prev_owner_save <= (mreq.addr[9:8] == 2'b00);
  end

  // save requester: words 0..63, addr region 0x000-0x0FF
  int s_sent = 0, s_rsp = 0, s_gnt = 0;
  always @(posedge clk) if (rst_n) begin
    if (srsp.rvalid) s_rsp++;
    if (sreq.req && srsp.gnt) s_gnt++;
  end

  // lsu requester: region 0x100-0x3FF, expected read data queue
  word_t ref_mem [256];
  logic  exp_read [$];
  word_t exp_data [$];
  int    l_reads = 0;
  always @(posedge clk) if (rst_n && lrsp.rvalid) begin
    check(exp_read.size() > 0, "lsu response has a request");
    if (exp_read.size() > 0) begin
      if (exp_read[0]) begin
        check(lrsp.rdata == exp_data[0], "lsu read data");
        l_reads++;
      end
      void'(exp_read.pop_front()); void'(exp_data.pop_front());
    end
  end

  // memory grant pattern
  always @(negedge clk) gnt_rand <= ($urandom_range(0, 2) != 0);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (mem[i]) begin mem[i] = 32'hDEAD_0000 | i; ref_mem[i] = mem[i]; end
    sreq = '0; lreq = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    fork
      // save stream with random gaps
      begin
        while (s_sent < 64) begin
          @(negedge clk);
          if ($urandom_range(0, 3) == 0) begin
            sreq = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(4 * s_sent), wdata: 32'h5A00_0000 | s_sent};
            do @(posedge clk); while (!srsp.gnt);
            s_sent++;
            #1 sreq = '0;
          end
        end
      end
      // lsu random traffic
      begin
        repeat (400) begin
          logic [7:0] w;
          logic we;
          @(negedge clk);
          w = 8'($urandom_range(64, 255)); we = $urandom_range(0, 1);
          lreq = '{req: 1'b1, we: we, be: 4'hF, addr: {22'd0, w, 2'b00}, wdata: $urandom};
          do @(posedge clk); while (!lrsp.gnt);
          exp_read.push_back(!we);
          exp_data.push_back(ref_mem[w]);
          if (we) ref_mem[w] = lreq.wdata;
          #1 lreq = '0;
        end
      end
    join
    repeat (20) @(posedge clk);
    check(s_sent == 64 && s_gnt == 64, "all save words granted");
    check(s_rsp == s_gnt, "every save store response routed to the save side");
    for (int i = 0; i < 64; i++) check(mem[i] == (32'h5A00_0000 | i), "save word in memory");
    check(l_reads > 50, "enough lsu reads checked");
    check(contended > 5, "both sides requested a free port several times");
    check(exp_read.size() == 0, "every lsu request answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
