// fastirq_port_share -- optional sharing of one memory port between the
// background save and the load-store unit.
//
// The paper's main design gives the background save its own memory port and
// names sharing it with the load-store unit's port as an option; this module
// is that option. Two requesters, the save FSM and the LSU, each with an
// OBI-like port (req with stable addr/wdata until gnt, in-order rvalid), are
// merged onto one port towards memory:
//   * a requester that is waiting for gnt keeps the port, so the shared port
//     obeys the same stability rule;
//   * otherwise the save wins a free port. Its delay to the LSU is bounded by
//     the frame size, and LSU accesses to the frame are stalled by the LSU
//     guard until the save has passed them anyway;
//   * the owner of every granted request is queued (up to MAX_OUT requests
//     outstanding) and the in-order responses are routed back by it. The save
//     FSM ignores its store responses; they are routed to it only so that
//     the LSU never sees them.
// A new request is held back while the queue is full.
// Timing: combinational from request to the shared port, one register stage
// for the owner lock and the response queue.
// Save-first priority, the owner queue and its depth are this design's
// choices; the paper only states that the port can be shared.
module fastirq_port_share
  import cv32rt_pkg::*;
#(
  parameter int unsigned MAX_OUT = 2   // outstanding requests on the shared port
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t save_req_i,
  output mem_rsp_t save_rsp_o,
  input  mem_req_t lsu_req_i,
  output mem_rsp_t lsu_rsp_o,
  output mem_req_t mem_req_o,
  input  mem_rsp_t mem_rsp_i
);

  localparam int unsigned CNT_W = $clog2(MAX_OUT + 1);

  logic             lock_q, lock_owner_q;     // owner 1: save, 0: lsu
  logic [MAX_OUT-1:0] owner_q;                // queue of owners, head at bit 0
  logic [CNT_W-1:0] cnt_q;
  logic             full, sel_save, fire, pop;

  assign full     = (cnt_q == CNT_W'(MAX_OUT));
  assign sel_save = lock_q ? lock_owner_q : save_req_i.req;
  assign pop      = mem_rsp_i.rvalid && (cnt_q != '0);

  always_comb begin
    mem_req_o     = sel_save ? save_req_i : lsu_req_i;
    mem_req_o.req = (sel_save ? save_req_i.req : lsu_req_i.req) && (!full || lock_q);
    fire          = mem_req_o.req && mem_rsp_i.gnt;

    save_rsp_o        = '0;
    lsu_rsp_o         = '0;
    save_rsp_o.gnt    = sel_save && fire;
    lsu_rsp_o.gnt     = !sel_save && fire;
    save_rsp_o.rdata  = mem_rsp_i.rdata;
    lsu_rsp_o.rdata   = mem_rsp_i.rdata;
    save_rsp_o.rvalid = pop && owner_q[0];
    lsu_rsp_o.rvalid  = pop && !owner_q[0];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lock_q       <= 1'b0;
      lock_owner_q <= 1'b0;
      owner_q      <= '0;
      cnt_q        <= '0;
    end else begin
      lock_q       <= mem_req_o.req && !mem_rsp_i.gnt;
      lock_owner_q <= sel_save;
      // pop the head, then push the new owner behind the remaining entries
      unique case ({fire, pop})
        2'b01: begin
          owner_q <= owner_q >> 1;
          cnt_q   <= cnt_q - 1'b1;
        end
        2'b10: begin
          owner_q[cnt_q] <= sel_save;
          cnt_q          <= cnt_q + 1'b1;
        end
        2'b11: begin
          owner_q          <= owner_q >> 1;
          owner_q[cnt_q-1] <= sel_save;
        end
        default: ;
      endcase
    end
  end

  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (mem_req_o.req && !mem_rsp_i.gnt) |=> (mem_req_o.req && $stable(mem_req_o.addr)
                                           && $stable(mem_req_o.wdata)));
  a_no_orphan_rsp: assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_rsp_i.rvalid |-> (cnt_q != '0));

endmodule
