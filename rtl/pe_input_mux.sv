// pe_input_mux: the four-way operand selector at the entry of a traversal PE.
//
// Sources (paper names): Self = the PE's own stream registers (feedback of
// the previous node's state), Replay = traceback-memory read-out, Hop = a
// non-adjacent predecessor state fetched from the PU's shared SRAM,
// Neighbor = a vector forwarded by the adjacent PE. The select is a 2-bit
// enum (encoding chosen here). Combinational.
module pe_input_mux
  import gg_pkg::*;
#(
  parameter int unsigned W = 256
) (
  input  pe_src_e      sel,
  input  logic [W-1:0] self_in,
  input  logic [W-1:0] replay_in,
  input  logic [W-1:0] hop_in,
  input  logic [W-1:0] neighbor_in,
  output logic [W-1:0] dout
);
  always_comb begin
    unique case (sel)
      SRC_SELF:     dout = self_in;
      SRC_REPLAY:   dout = replay_in;
      SRC_HOP:      dout = hop_in;
      SRC_NEIGHBOR: dout = neighbor_in;
      default:      dout = self_in;
    endcase
  end
endmodule
