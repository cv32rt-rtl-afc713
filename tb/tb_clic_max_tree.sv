// tb_clic_max_tree -- self-checking test of the CLIC arbitration tree.
//
// A 13-source tree (not a power of two, so padding leaves are exercised)
// gets 4000 random patterns of pending bits and 10-bit keys, with keys
// drawn from a small set so that ties are frequent. A linear scan in the
// testbench finds the expected winner: the largest key among pending
// sources, the highest index on a tie. valid, key and id are compared.
module tb_clic_max_tree;
  localparam int N = 13;
  localparam int KW = 10;
  logic [N-1:0] pend;
  logic [N-1:0][KW-1:0] key;
  logic valid;
  logic [KW-1:0] wkey;
  logic [11:0] wid;
  int checks = 0, failures = 0;

  clic_max_tree #(.N_SOURCE(N), .KEY_W(KW)) dut (
    .pend_i(pend), .key_i(key), .valid_o(valid), .key_o(wkey), .id_o(wid));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      logic e_valid;
      logic [KW-1:0] e_key;
      int e_id;
      pend = N'($urandom);
      if (t % 7 == 0) pend = N'(1) << $urandom_range(0, N-1);
      if (t % 11 == 0) pend = '0;
      for (int i = 0; i < N; i++) key[i] = KW'($urandom_range(0, 3) * 200 + $urandom_range(0, 1));
      #1;
      e_valid = 0; e_key = '0; e_id = 0;
      for (int i = 0; i < N; i++) begin
        if (pend[i] && (!e_valid || key[i] >= e_key)) begin
          e_valid = 1; e_key = key[i]; e_id = i;
        end
      end
      check(valid == e_valid, "valid");
      if (e_valid) begin
        check(wkey == e_key, "winning key");
        check(wid == 12'(e_id), "winning id");
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
