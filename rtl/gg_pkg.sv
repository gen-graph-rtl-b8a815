// gg_pkg: types and constants shared by the GEN-Graph RTL.
//
// The numbers follow the paper's main configuration: 128-bit BPLU vectors,
// 64 PEs per processing unit in 16 groups of 4, 16 processing units, a
// 256 KB shared SRAM in 32 banks, 32-bit distances and 1024-vertex matrix
// blocks. The node-record layout, the job-command layout and the infinity
// encoding are this design's own choices; the paper does not give them.
package gg_pkg;

  // ---------------- traversal tile ----------------
  // (vector width, PE count and PU count are module parameters: W, NPE, NPU)

  // PE operand sources of the four-way input MUX.
  typedef enum logic [1:0] {
    SRC_SELF     = 2'd0,   // local feedback from the stream registers
    SRC_REPLAY   = 2'd1,   // traceback memory read-out
    SRC_HOP      = 2'd2,   // non-adjacent predecessor from shared SRAM
    SRC_NEIGHBOR = 2'd3    // state forwarded by the adjacent PE
  } pe_src_e;

  typedef enum logic { MODE_SHORT = 1'b0, MODE_LONG = 1'b1 } map_mode_e;

  // One linearised graph node, 32 bits in the input scratchpad.
  // base       : nucleotide of the node (A=0, C=1, G=2, T=3)
  // self_pred  : node v-1 is a predecessor (Self path)
  // hop_pred   : node v-hop_dist is a predecessor (Hop path via shared SRAM)
  // hop_src    : a later node reads this node's state over the Hop path
  // last       : final node of the (sub)graph; informational only, the job
  //              word gives the node count that the sequencer uses
  typedef struct packed {
    logic [15:0] rsvd;
    logic [6:0]  hop_dist;
    logic        last;
    logic        hop_src;
    logic        hop_pred;
    logic        self_pred;
    logic [2:0]  rsvd2;
    logic [1:0]  base;
  } node_rec_t;

  // Record travelling down a PE chain with the node it belongs to.
  typedef struct packed {
    logic       valid;
    logic [13:0] node;     // node index inside the job
    node_rec_t  rec;
  } node_tok_t;

  // ---------------- matrix tile ----------------
  localparam int unsigned DIST_W = 32;
  localparam logic [DIST_W-1:0] DIST_INF = '1;  // "no edge"

  // Saturating min-plus addition: infinity absorbs, overflow clamps to INF.
  function automatic logic [DIST_W-1:0] sat_add(logic [DIST_W-1:0] a, logic [DIST_W-1:0] b);
    logic [DIST_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (a == DIST_INF || b == DIST_INF || s[DIST_W]) return DIST_INF;
    return s[DIST_W-1:0];
  endfunction

endpackage
