// stream_regfile: Tier-1 stream register file of a traversal PE (384 bits).
//
// Three 128-bit entries hold the working set of the current node: the
// previous node's state (entries 0 and 1, low and high halves of the 256-bit
// dual-BPLU vector) and the dependency vector fetched over the Hop path
// (entry 2). The 384-bit size is the paper's; this assignment of entries is
// this design's choice. Two write ports (one 256-bit pair write to entries
// 0/1, one single-entry write) and three asynchronous read ports.
// Writes take effect on the next clock edge; reset clears all entries.
module stream_regfile #(
  parameter int unsigned W       = 128,
  parameter int unsigned ENTRIES = 3
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,        // synchronous clear (new job)
  input  logic                       we_pair,    // write entries 0 and 1
  input  logic [2*W-1:0]             wdata_pair,
  input  logic                       we,         // single-entry write port
  input  logic [$clog2(ENTRIES)-1:0] waddr,
  input  logic [W-1:0]               wdata,
  output logic [ENTRIES-1:0][W-1:0]  rdata
);
  logic [ENTRIES-1:0][W-1:0] regs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) regs <= '0;
    else if (clr) regs <= '0;
    else begin
      if (we) regs[waddr] <= wdata;
      if (we_pair) begin
        regs[0] <= wdata_pair[W-1:0];
        regs[1] <= wdata_pair[2*W-1:W];
      end
    end
  end
  assign rdata = regs;
endmodule
