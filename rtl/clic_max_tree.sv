// clic_max_tree -- binary arbitration tree of the CLIC.
//
// Selects, among the sources whose pend_i bit is set, the one with the
// largest key_i, and reports its key, its index and whether any source is
// pending at all. As in the paper, three trees run in parallel, one for the
// key (privilege, level and priority), one for the id and one for the
// pending flag; every node compares its two children and forwards the
// winner, so area grows with N and delay with log2(N). On equal keys the
// higher-numbered source wins, which is the CLIC rule for equal level and
// priority.
// The tree is padded to the next power of two with never-pending leaves.
// It is purely combinational (no pipeline stages; the paper mentions those
// as an option only). Keys are compared as unsigned numbers: the caller
// packs privilege above level above priority.
module clic_max_tree #(
  parameter int unsigned N_SOURCE = 256,
  parameter int unsigned KEY_W    = 10
) (
  input  logic [N_SOURCE-1:0]            pend_i,
  input  logic [N_SOURCE-1:0][KEY_W-1:0] key_i,
  output logic                           valid_o,
  output logic [KEY_W-1:0]               key_o,
  output logic [cv32rt_pkg::ID_W-1:0]    id_o
);

  localparam int unsigned LOG_N = (N_SOURCE > 1) ? $clog2(N_SOURCE) : 1;
  localparam int unsigned NPOW  = 1 << LOG_N;

  // Heap-ordered nodes: node 1 is the root, node k has children 2k and 2k+1,
  // leaves are NPOW .. 2*NPOW-1.
  logic [2*NPOW-1:1]                        pend_t;
  logic [2*NPOW-1:1][KEY_W-1:0]             key_t;
  logic [2*NPOW-1:1][cv32rt_pkg::ID_W-1:0]  id_t;

  for (genvar l = 0; l < NPOW; l++) begin : g_leaf
    if (l < N_SOURCE) begin : g_real
      assign pend_t[NPOW+l] = pend_i[l];
      assign key_t[NPOW+l]  = key_i[l];
    end else begin : g_pad
      assign pend_t[NPOW+l] = 1'b0;
      assign key_t[NPOW+l]  = '0;
    end
    assign id_t[NPOW+l] = cv32rt_pkg::ID_W'(l);
  end

  for (genvar k = 1; k < NPOW; k++) begin : g_node
    logic sel_right;
    assign sel_right = pend_t[2*k+1] && (!pend_t[2*k] || (key_t[2*k+1] >= key_t[2*k]));
    assign pend_t[k] = pend_t[2*k] | pend_t[2*k+1];
    assign key_t[k]  = sel_right ? key_t[2*k+1] : key_t[2*k];
    assign id_t[k]   = sel_right ? id_t[2*k+1]  : id_t[2*k];
  end

  assign valid_o = pend_t[1];
  assign key_o   = key_t[1];
  assign id_o    = id_t[1];

endmodule
