// fastirq_lsu_guard -- stalls loads and stores to stack words not yet saved.
//
// While the background save is running, the handler may already issue
// loads and stores. The save pushes the frame word by word upwards from
// frame_base + 4; words_done_i says how many words have been granted so
// far. A load/store unit request whose word address falls inside the part
// of the frame that is still to be written,
//     frame_base + 4*(words_done+1)  ..  frame_base + 4*NSAVE  (inclusive),
// is stalled (stall_o = 1) until the save has passed it; accesses below,
// above or to already written words go ahead. Without a running save
// nothing is stalled. Combinational; the comparison is on word addresses,
// so a sub-word access to a pending word stalls too.
// The paper compares the offset of the last word pushed against incoming
// loads and stores and stalls those that would touch unsaved data; this is
// that comparator. It does not forward data from the save path, which the
// paper names as the costlier alternative.
module fastirq_lsu_guard
  import cv32rt_pkg::*;
#(
  parameter int unsigned NSAVE_P = NSAVE   // words in the frame
) (
  input  logic       busy_i,
  input  word_t      frame_base_i,
  input  logic [WCNT_W-1:0] words_done_i,
  input  logic       lsu_req_i,
  input  word_t      lsu_addr_i,
  output logic       stall_o
);

  logic [29:0] lo_w, hi_w, a_w;

  assign lo_w = frame_base_i[31:2] + 30'(words_done_i) + 30'd1;
  assign hi_w = frame_base_i[31:2] + 30'(NSAVE_P);
  assign a_w  = lsu_addr_i[31:2];

  assign stall_o = busy_i && lsu_req_i && (a_w >= lo_w) && (a_w <= hi_w);

endmodule
