// tb_clic_gateway -- self-checking test of the CLIC gateway.
//
// Eight sources are driven with random lines, enables, trigger types
// (level/edge, both polarities), software writes of pending bits and claims
// for 3000 cycles. A reference model kept in the testbench predicts every
// pending bit cycle by cycle: level sources follow the corrected line,
// edge sources are set by an active edge, by software and cleared by
// software or a claim, with software first, then the edge, then the claim.
// Both ip_o and pe_o are compared after every clock edge, and directed
// cases check the one-cycle latency from line to pending.
module tb_clic_gateway;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] irq, ie;
  logic [N-1:0][1:0] trig;
  logic sw_we, sw_val, claim;
  logic [11:0] sw_idx, claim_id;
  logic [N-1:0] ip, pe;
  int checks = 0, failures = 0;

  clic_gateway #(.N_SOURCE(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .ie_i(ie), .trig_i(trig),
    .sw_ip_we_i(sw_we), .sw_ip_idx_i(sw_idx), .sw_ip_val_i(sw_val),
    .claim_i(claim), .claim_id_i(claim_id), .ip_o(ip), .pe_o(pe));

  always #5 clk = ~clk;

  logic [N-1:0] m_ip, m_prev;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // reference model, updated on the same clock edge
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        logic ln;
        ln = irq[i] ^ trig[i][1];
        if (!trig[i][0])                        m_ip[i] <= ln;
        else if (sw_we && sw_idx == 12'(i))     m_ip[i] <= sw_val;
        else if (ln && !m_prev[i])              m_ip[i] <= 1'b1;
        else if (claim && claim_id == 12'(i))   m_ip[i] <= 1'b0;
        m_prev[i] <= ln;
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    irq = '0; ie = '0; trig = '0; sw_we = 0; sw_val = 0; claim = 0;
    sw_idx = '0; claim_id = '0; m_ip = '0; m_prev = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // directed: level source 0, one-cycle latency
    @(negedge clk); ie = 8'hFF; irq[0] = 1;
    @(posedge clk); #1;
    check(ip[0] == 1 && pe[0] == 1, "level pending one cycle after line");
    // directed: rising edge on source 1 keeps pending after the line drops
    @(negedge clk); trig[1] = 2'b01; irq[1] = 1;
    @(posedge clk); #1;
    @(negedge clk); irq[1] = 0;
    @(posedge clk); #1;
    check(ip[1] == 1, "edge pending held after line drop");
    @(negedge clk); claim = 1; claim_id = 1;
    @(posedge clk); #1;
    check(ip[1] == 0, "claim clears edge pending");
    @(negedge clk); claim = 0; irq = '0;
    repeat (2) @(posedge clk);
    // random phase
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      irq    = N'($urandom);
      if ($urandom_range(0, 15) == 0) ie   = N'($urandom);
      if ($urandom_range(0, 31) == 0) trig = (2*N)'({$urandom, $urandom});
      sw_we  = ($urandom_range(0, 3) == 0);
      sw_idx = 12'($urandom_range(0, N-1));
      sw_val = 1'($urandom);
      claim  = ($urandom_range(0, 2) == 0);
      claim_id = 12'($urandom_range(0, N-1));
      @(posedge clk); #1;
      check(ip == m_ip, "ip matches model");
      check(pe == (m_ip & ie), "pe matches model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
