// pattern_buffer: Tier-2 pattern-mask buffer of a traversal PE (256 bytes).
//
// 16 entries of 128 bits = 2 banks x 4 bases x 2 halves (low/high BPLU).
// The BPLUs read the 256-bit mask of one base from the active bank while the
// loader writes the other bank, so the masks of the next window are
// prefetched during the current one (the paper's stated purpose). The bank
// split and entry order are this design's. Read is combinational from the
// registered array; write is synchronous, one 128-bit entry per cycle.
module pattern_buffer #(
  parameter int unsigned W = 128
) (
  input  logic         clk,
  input  logic         we,
  input  logic         wbank,
  input  logic [1:0]   wbase,
  input  logic         whalf,     // 0 = low BPLU, 1 = high BPLU
  input  logic [W-1:0] wdata,
  input  logic         rbank,
  input  logic [1:0]   rbase,
  output logic [2*W-1:0] rmask
);
  logic [W-1:0] mem [16];

  always_ff @(posedge clk)
    if (we) mem[{wbank, wbase, whalf}] <= wdata;

  assign rmask = {mem[{rbank, rbase, 1'b1}], mem[{rbank, rbase, 1'b0}]};
endmodule
