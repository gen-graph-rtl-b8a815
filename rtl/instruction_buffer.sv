// instruction_buffer: 1 KB job-command buffer of a processing unit.
//
// 256 words of 32 bits, written by the host side and read by the PU
// controller, one word per cycle with 1-cycle latency. The paper calls the
// contents "compact S2G microcode" but gives no encoding; here each word is
// one alignment job (see processing_unit for the layout).
module instruction_buffer #(
  parameter int unsigned WORDS = 256
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [31:0]              wdata,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [31:0]              rdata
);
  logic [31:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
