// tb_fastirq_lsu_guard -- self-checking test of the LSU stall comparator.
//
// For every save progress count 0..9 and every word address from two words
// below the frame to two words above it (with random byte offsets), the
// stall output is compared with the rule: stall only while a save runs and
// a request targets a frame word not yet written, i.e. word index
// words_done+1 .. 9 above the frame base. Random frame bases are used.
module tb_fastirq_lsu_guard;
  import cv32rt_pkg::*;
  logic busy, req, stall;
  word_t fb, addr;
  logic [4:0] done;
  int checks = 0, failures = 0;

  fastirq_lsu_guard dut (.busy_i(busy), .frame_base_i(fb), .words_done_i(done),
    .lsu_req_i(req), .lsu_addr_i(addr), .stall_o(stall));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s fb=%h done=%0d addr=%h", what, fb, done, addr);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      fb = {$urandom_range(16'h0100, 16'hFF00), 16'h0000} + word_t'($urandom_range(0, 1000) * 4);
      for (int d = 0; d <= 9; d++) begin
        for (int w = -2; w <= 11; w++) begin
          logic exp;
          done = 5'(d);
          addr = fb + word_t'(4 * w) + word_t'($urandom_range(0, 3));
          busy = 1; req = 1;
          exp = (w >= d + 1) && (w <= 9);
          #1 check(stall == exp, "stall rule");
          busy = 0;
          #1 check(!stall, "no stall without a save");
          busy = 1; req = 0;
          #1 check(!stall, "no stall without a request");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
