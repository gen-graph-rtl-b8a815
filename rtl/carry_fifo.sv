// carry_fifo: synchronous FIFO closing a PE chain.
//
// In the long-read mapping the last PE of the 64-PE pipeline pushes the
// per-node carry of its last window; on the next pass over the graph the
// first PE pops it as the carry-in of its first window. The depth (one
// entry per node of a PU's graph slice) and the first-word-fall-through
// read are this design's choices; the paper only draws the FIFO.
// push and pop may happen in the same cycle. rdata shows the head entry.
module carry_fifo #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned DEPTH = 8192
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign rdata = mem[rp];

  always_ff @(posedge clk)
    if (push && !full) mem[wp] <= wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clr) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full)  wp <= wp + AW'(1);
      if (pop && !empty)  rp <= rp + AW'(1);
      count <= count + ((AW+1)'(push && !full)) - ((AW+1)'(pop && !empty));
    end
  end

  // Handshake rules: never push into a full FIFO or pop an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
