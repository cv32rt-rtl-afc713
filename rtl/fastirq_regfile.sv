// fastirq_regfile -- banked register file of the fastirq extension.
//
// Two banks (RF0, RF1) of NREGS 32-bit registers each, x0 reading as zero
// in both. The pipeline sees only the active bank, chosen by banksel_i:
// the two write ports (W0, W1) and the three read ports (R0, R1, R2) are
// steered to it. A fourth, dedicated read port (save_raddr_i/save_rdata_o)
// reads the inactive bank, which is the one the background saving logic
// drains to memory after a bank switch.
// Stack pointer adder: in the cycle sp_switch_i is high (the cycle before
// banksel_i toggles), the inactive bank's sp (x2) is written with the
// active bank's sp minus STACKSIZE, so that the interrupt handler starts
// with a stack pointer below the frame being saved; sp_new_o shows that
// value combinationally. This write has priority over W0/W1, which in that
// cycle still go to the old (active) bank anyway. If both write ports hit
// the same register, W1 wins.
// Register addresses are 5 bits wide; with 16-register banks (RV32E, the
// default) x16..x31 read zero and ignore writes. NREGS_P = 32 gives the
// banks of the integer-ABI option.
// Timing: reads are combinational, writes take effect at the clock edge.
// Bank count, 16 registers per bank, two write and three read ports, the
// BANKSEL multiplexers, the extra save port and the stack-pointer adder are
// those of the paper's fastirq data path figure; the W1-over-W0 priority is
// this design's choice.
module fastirq_regfile
  import cv32rt_pkg::*;
#(
  parameter int unsigned NREGS_P   = NREGS,
  parameter int unsigned STACKSIZE_P = STACKSIZE
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               banksel_i,
  // write ports
  input  logic               we0_i,
  input  logic [RADDR_W-1:0] waddr0_i,
  input  word_t              wdata0_i,
  input  logic               we1_i,
  input  logic [RADDR_W-1:0] waddr1_i,
  input  word_t              wdata1_i,
  // read ports
  input  logic [RADDR_W-1:0] raddr0_i,
  output word_t              rdata0_o,
  input  logic [RADDR_W-1:0] raddr1_i,
  output word_t              rdata1_o,
  input  logic [RADDR_W-1:0] raddr2_i,
  output word_t              rdata2_o,
  // background save port (inactive bank)
  input  logic [RADDR_W-1:0] save_raddr_i,
  output word_t              save_rdata_o,
  // stack pointer hand-over on a bank switch
  input  logic               sp_switch_i,
  output word_t              sp_new_o
);

  word_t [1:0][NREGS_P-1:0] mem_q;

  localparam int unsigned IDX_W = $clog2(NREGS_P);

  // A register exists if it is not x0 and lies inside the bank (x16..x31 do
  // not exist with 16-register banks: they read zero and ignore writes).
  function automatic logic exists(input logic [RADDR_W-1:0] a);
    return (a != '0) && (int'(a) < int'(NREGS_P));
  endfunction

  function automatic word_t rd(input word_t [1:0][NREGS_P-1:0] m, input logic b,
                               input logic [RADDR_W-1:0] a);
    return exists(a) ? m[b][a[IDX_W-1:0]] : '0;
  endfunction

  assign rdata0_o     = rd(mem_q, banksel_i, raddr0_i);
  assign rdata1_o     = rd(mem_q, banksel_i, raddr1_i);
  assign rdata2_o     = rd(mem_q, banksel_i, raddr2_i);
  assign save_rdata_o = rd(mem_q, !banksel_i, save_raddr_i);
  assign sp_new_o     = mem_q[banksel_i][REG_SP[IDX_W-1:0]] - word_t'(STACKSIZE_P);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mem_q <= '0;
    end else begin
      if (we0_i && exists(waddr0_i)) mem_q[banksel_i][waddr0_i[IDX_W-1:0]] <= wdata0_i;
      if (we1_i && exists(waddr1_i)) mem_q[banksel_i][waddr1_i[IDX_W-1:0]] <= wdata1_i;
      if (sp_switch_i)               mem_q[!banksel_i][REG_SP[IDX_W-1:0]] <= sp_new_o;
    end
  end

endmodule
