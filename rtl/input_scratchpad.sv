// input_scratchpad: 32 KB input scratchpad of a processing unit.
//
// Holds the linearised reference graph (one 32-bit node record per word,
// including the per-node hop flags) for the PE groups. It is split into
// GROUPS slices of equal size with one read port each, so in short-read
// mode every 4-PE group streams its own subgraph from its own slice at one
// record per cycle. In long-read mode read port 0 addresses the whole
// scratchpad (slice = upper address bits) for the single 64-PE pipeline.
// One write port (from the HBM channel buffer) with a full word address.
// Reads are registered: data appears one cycle after the address.
// The slicing is this design's choice; the paper gives the size and the
// single-cycle streaming.
module input_scratchpad #(
  parameter int unsigned WORDS  = 8192,   // 32 KB of 32-bit words
  parameter int unsigned GROUPS = 16
) (
  input  logic                              clk,
  input  logic                              long_mode,
  input  logic                              we,
  input  logic [$clog2(WORDS)-1:0]          waddr,
  input  logic [31:0]                       wdata,
  input  logic [GROUPS-1:0][$clog2(WORDS)-1:0] raddr,
  output logic [GROUPS-1:0][31:0]           rdata
);
  localparam int unsigned SW  = WORDS / GROUPS;
  localparam int unsigned SAW = $clog2(SW);
  localparam int unsigned AW  = $clog2(WORDS);

  logic [31:0] mem [GROUPS][SW];

  always_ff @(posedge clk)
    if (we) mem[waddr[AW-1:SAW]][waddr[SAW-1:0]] <= wdata;

  always_ff @(posedge clk) begin
    for (int unsigned g = 0; g < GROUPS; g++) begin
      if (long_mode && g == 0)
        rdata[g] <= mem[raddr[0][AW-1:SAW]][raddr[0][SAW-1:0]];
      else
        rdata[g] <= mem[g][raddr[g][SAW-1:0]];
    end
  end
endmodule
