// cv32rt_pkg -- types and constants shared by the CV32RT interrupt subsystem.
//
// Holds the structs of the three interfaces that recur between blocks:
//   * the CLIC-to-core interrupt handshake (clic_irq_t / core_irq_ack_t),
//   * the word-wide memory request/response used by the dedicated save port
//     (mem_req_t / mem_rsp_t, an OBI-like req/gnt/rvalid protocol),
//   * the CLIC configuration register bus (reg_req_t / reg_rsp_t).
// It also fixes the layout of the frame that the background saving logic
// pushes to the stack. The frame follows the restore code of the fastirq
// handler listing in the paper (embedded ABI): word k (k = 1..9) lives at
// sp + 4*k, holding ra, t0, a0, a1, a2, a3, t1, mepc, mcause, and the stack
// pointer moves by 9 words. The register-to-slot order is taken from that
// listing; the struct encodings and bus protocols are this design's own.
package cv32rt_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned XLEN       = 32;
  localparam int unsigned ID_W       = 12;  // up to 4096 interrupt sources
  localparam int unsigned CTL_W      = 8;   // CLICINTCTLBITS
  localparam int unsigned NREGS      = 16;  // registers per bank (RV32E)
  localparam int unsigned NREGS_I    = 32;  // registers per bank (RV32I option)
  localparam int unsigned RADDR_W    = 5;   // register address width (x0..x31)
  localparam int unsigned WCNT_W     = 5;   // width of the save word counter

  typedef logic [XLEN-1:0]  word_t;
  typedef logic [ID_W-1:0]  irq_id_t;
  typedef logic [CTL_W-1:0] irq_lvl_t;
  typedef logic [1:0]       priv_t;

  localparam priv_t PRIV_U = 2'b00;
  localparam priv_t PRIV_S = 2'b01;
  localparam priv_t PRIV_M = 2'b11;

  // -------------------------------------------------- CLIC <-> core handshake
  // valid stays high until the core answers with ack (interrupt taken) or
  // until a kill handshake completes (kill_req from the CLIC, kill_ack from
  // the core). id/level/priv/shv are stable while valid is high.
  typedef struct packed {
    logic     valid;
    irq_id_t  id;
    irq_lvl_t level;
    priv_t    priv;
    logic     shv;
    logic     kill_req;
  } clic_irq_t;

  typedef struct packed {
    logic ack;       // interrupt taken (hardware entry, mnxti claim, emret chain)
    logic kill_ack;  // core has dropped the offered interrupt
  } core_irq_ack_t;

  // ------------------------------------------------------ memory port (OBI)
  typedef struct packed {
    logic       req;
    logic       we;
    logic [3:0] be;
    word_t      addr;
    word_t      wdata;
  } mem_req_t;

  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    word_t rdata;
  } mem_rsp_t;

  // ------------------------------------------------- register bus (CLIC cfg)
  typedef struct packed {
    logic        valid;
    logic        write;
    logic [15:0] addr;   // byte address inside the CLIC window
    word_t       wdata;
    logic [3:0]  wstrb;
  } reg_req_t;

  typedef struct packed {
    logic  ready;
    word_t rdata;
    logic  error;
  } reg_rsp_t;

  // ------------------------------------------------------- CLIC memory map
  localparam logic [15:0] CLICCFG_ADDR  = 16'h0000;
  localparam logic [15:0] CLICINFO_ADDR = 16'h0004;
  localparam logic [15:0] CLICINT_BASE  = 16'h1000;  // clicint[i] at +4*i

  // --------------------------------------------------------- CSR addresses
  localparam logic [11:0] CSR_MSTATUS    = 12'h300;
  localparam logic [11:0] CSR_MTVEC      = 12'h305;
  localparam logic [11:0] CSR_MTVT       = 12'h307;
  localparam logic [11:0] CSR_MEPC       = 12'h341;
  localparam logic [11:0] CSR_MCAUSE     = 12'h342;
  localparam logic [11:0] CSR_MNXTI      = 12'h345;
  localparam logic [11:0] CSR_MINTSTATUS = 12'h346;
  localparam logic [11:0] CSR_MINTTHRESH = 12'h347;

  typedef enum logic [1:0] {
    CSR_OP_WRITE = 2'd0,
    CSR_OP_SET   = 2'd1,
    CSR_OP_CLEAR = 2'd2,
    CSR_OP_READ  = 2'd3
  } csr_op_e;

  // ------------------------------------------------ background save frame
  // Default (embedded ABI, 16-register banks): 7 registers + mepc + mcause.
  localparam int unsigned NSAVE     = 9;          // words in the frame
  localparam int unsigned STACKSIZE = 4 * NSAVE;  // bytes the sp moves by
  localparam int unsigned SLOT_MEPC   = 7;        // slot index (0-based)
  localparam int unsigned SLOT_MCAUSE = 8;
  // Integer-ABI option (32-register banks): the 16 caller-saved registers
  // ra, t0-t6, a0-a7, then mepc and mcause.
  localparam int unsigned NSAVE_I     = 18;
  localparam int unsigned STACKSIZE_I = 4 * NSAVE_I;

  // Words in the frame for the embedded (rve = 1) or integer ABI.
  function automatic int unsigned nsave(input bit rve);
    return rve ? NSAVE : NSAVE_I;
  endfunction

  // Register saved in frame slot k (0-based, stored at sp + 4*(k+1)). The
  // last two slots hold the latched machine state instead of a register
  // (0 is returned for them). The integer-ABI frame starts like the
  // embedded one and appends the remaining caller-saved registers.
  function automatic logic [RADDR_W-1:0] save_slot_reg(input int unsigned k,
                                                        input bit rve = 1'b1);
    case (k)
      0:       return 5'd1;   // ra
      1:       return 5'd5;   // t0
      2:       return 5'd10;  // a0
      3:       return 5'd11;  // a1
      4:       return 5'd12;  // a2
      5:       return 5'd13;  // a3
      6:       return 5'd6;   // t1
      7:       return rve ? 5'd0 : 5'd7;   // t2
      8:       return rve ? 5'd0 : 5'd14;  // a4
      9:       return rve ? 5'd0 : 5'd15;  // a5
      10:      return rve ? 5'd0 : 5'd16;  // a6
      11:      return rve ? 5'd0 : 5'd17;  // a7
      12:      return rve ? 5'd0 : 5'd28;  // t3
      13:      return rve ? 5'd0 : 5'd29;  // t4
      14:      return rve ? 5'd0 : 5'd30;  // t5
      15:      return rve ? 5'd0 : 5'd31;  // t6
      default: return 5'd0;
    endcase
  endfunction

  localparam logic [RADDR_W-1:0] REG_SP = 5'd2;

endpackage
