// bplu: 128-bit bit-parallel logic unit of a traversal PE.
//
// It evaluates one step of the windowed bit-parallel sequence-to-graph
// recurrence for one graph node and one 128-bit query window:
//   s_new = ((d_in << 1) | c_in) & mask
// where d_in is the OR of the predecessors' state vectors, c_in the carry of
// the previous window (1 for the first window) and mask the match mask of
// the node's base. As in the paper's algorithm, the carry handed to the next
// window is the most significant bit of s_new. For score logging the unit
// also reports whether s_new is non-zero and the index of its highest set
// bit (the longest query prefix matched inside this window); that encoding
// of the score is this design's choice.
// Purely combinational; the PE registers the result.
module bplu #(
  parameter int unsigned W = 128
) (
  input  logic [W-1:0]         d_in,
  input  logic                 c_in,
  input  logic [W-1:0]         mask,
  output logic [W-1:0]         s_new,
  output logic                 c_out,
  output logic                 nonzero,
  output logic [$clog2(W)-1:0] msb_idx
);
  always_comb begin
    s_new   = ({d_in[W-2:0], 1'b0} | W'(c_in)) & mask;
    c_out   = s_new[W-1];
    nonzero = |s_new;
    msb_idx = '0;
    for (int unsigned i = 0; i < W; i++)
      if (s_new[i]) msb_idx = i[$clog2(W)-1:0];
  end
endmodule
