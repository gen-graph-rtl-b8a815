// pcm_fw_tile: the PCM-FW tile of the matrix tile (Floyd-Warshall in place).
//
// Holds one dense distance block of up to N x N 32-bit entries (N = 1024,
// the paper's component size) in an array and runs Floyd-Warshall on its
// leading n x n part: after the run, D[i][j] = min over paths of the sum of
// edge weights, with all-ones meaning "no path". The diagonal must be 0
// (the pivot element of the paper's remapping has distance 0).
// Inside: the array (PCM cells modelled as a digital memory, 1-cycle row
// read, masked row write), the permutation unit (pivot loop, row remapping,
// prefetch, pruning, 10-cycle DMA writes) and the bit-serial ALU.
// Host port: word writes and word reads (1-cycle) while the tile is idle,
// and whole-row writes from the stream engine (row_we). start/n begin a
// run; done pulses at its end. Cycle cost per pivot is roughly
// (n-1) * (2*DW + 4) for rows that are not pruned.
// The paper spreads a block over 130 1024x1024-cell units joined by an
// H-tree; here the block is one logical array and one row of N lanes is
// computed at a time.
module pcm_fw_tile #(
  parameter int unsigned N  = 1024,
  parameter int unsigned DW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host / stream-engine access (idle only)
  input  logic                 host_we,
  input  logic [$clog2(N)-1:0] host_row,
  input  logic [$clog2(N)-1:0] host_col,
  input  logic [DW-1:0]        host_wdata,
  input  logic                 row_we,
  input  logic [$clog2(N)-1:0] row_waddr,
  input  logic [N-1:0][DW-1:0] row_wdata,
  output logic [DW-1:0]        host_rdata,
  // run control
  input  logic                 start,
  input  logic [$clog2(N):0]   n,
  output logic                 busy,
  output logic                 done,
  output logic [31:0]          rows_pruned,
  output logic [31:0]          writes_skipped,
  output logic [31:0]          rows_written,
  output logic [31:0]          bursts
);
  localparam int unsigned AW = $clog2(N);

  logic [N-1:0][DW-1:0] dmat [N];

  logic                 rd_en, wr_en;
  logic [AW-1:0]        rd_addr, wr_addr;
  logic [N-1:0][DW-1:0] rd_data, wr_data;
  logic [N-1:0]         wr_mask;

  logic                 alu_start, alu_done, alu_busy;
  logic [N-1:0][DW-1:0] alu_a, alu_b, alu_old, alu_res;
  logic [N-1:0]         alu_en, alu_wmask;

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= dmat[rd_addr];
    host_rdata <= dmat[host_row][host_col];
    if (wr_en) begin
      for (int unsigned j = 0; j < N; j++)
        if (wr_mask[j]) dmat[wr_addr][j] <= wr_data[j];   // sign-gated write
    end else if (row_we && !busy) begin
      dmat[row_waddr] <= row_wdata;
    end else if (host_we && !busy) begin
      dmat[host_row][host_col] <= host_wdata;
    end
  end

  permutation_unit #(.N(N), .DW(DW)) u_perm (
    .clk, .rst_n, .start, .n, .busy, .done, .pivot(),
    .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data, .wr_mask,
    .alu_start, .alu_a, .alu_b, .alu_old, .alu_en, .alu_done, .alu_res, .alu_wmask,
    .rows_pruned, .writes_skipped, .rows_written, .bursts);

  felix_bitserial_alu #(.LANES(N), .DW(DW)) u_alu (
    .clk, .rst_n, .start(alu_start), .a_vec(alu_a), .b_vec(alu_b), .old_vec(alu_old),
    .lane_en(alu_en), .busy(alu_busy), .done(alu_done), .res(alu_res), .wmask(alu_wmask));

  a_alu_free: assert property (@(posedge clk) disable iff (!rst_n) alu_start |-> !alu_busy);
endmodule
