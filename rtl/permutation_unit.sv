// permutation_unit: the permutation macro and sequencer of the PCM-FW tile.
//
// Runs the Floyd-Warshall pivot loop over an n x n distance block held in
// the tile's array. For pivot k it
//   1. reads row k into Panel_Row (the pivot row),
//   2. walks the other rows in the remapped order r = (k+1+t) mod n,
//      t = 0..n-2 (the address remapper: the pivot row is extracted and the
//      rows are rotated behind it), and for each row moves through the
//      four-stage pipeline of the paper:
//        Prefetch   read the row (1-cycle read) into the row buffer; the
//                   next row is prefetched while the current one computes,
//        Permute    the reorder buffer takes Panel_Col = row[k], masks the
//                   panel (lane k and lanes >= n) and prunes the row when
//                   Panel_Col is infinity (no path through k can help),
//        Compute    the bit-serial ALU forms Panel_Col + Panel_Row and the
//                   sign bits against the row,
//        Write-back the DMA engine writes the row with the sign-bit mask
//                   (10 cycles); a row whose mask is empty is not written
//                   (futile write skipped). The write runs in the background
//                   while the next row computes.
//   3. waits for the DMA to drain and moves to pivot k+1.
// Rows are issued in 32-row burst windows (BURST); a counter reports them.
// The DMA latencies, the stages, panel masking, block pruning and write
// skipping are from the paper; handling one 1024-lane row per compute step
// (rather than the whole block at once across the tile's units) and the
// rotation as the remapping rule are this design's.
module permutation_unit #(
  parameter int unsigned N      = 1024,
  parameter int unsigned DW     = 32,
  parameter int unsigned BURST  = 32,
  parameter int unsigned WR_LAT = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [$clog2(N):0]    n,
  output logic                  busy,
  output logic                  done,
  output logic [$clog2(N):0]    pivot,
  // array access (1-cycle read)
  output logic                  rd_en,
  output logic [$clog2(N)-1:0]  rd_addr,
  input  logic [N-1:0][DW-1:0]  rd_data,
  output logic                  wr_en,      // commit of a DMA write
  output logic [$clog2(N)-1:0]  wr_addr,
  output logic [N-1:0][DW-1:0]  wr_data,
  output logic [N-1:0]          wr_mask,
  // bit-serial ALU
  output logic                  alu_start,
  output logic [N-1:0][DW-1:0]  alu_a,
  output logic [N-1:0][DW-1:0]  alu_b,
  output logic [N-1:0][DW-1:0]  alu_old,
  output logic [N-1:0]          alu_en,
  input  logic                  alu_done,
  input  logic [N-1:0][DW-1:0]  alu_res,
  input  logic [N-1:0]          alu_wmask,
  // statistics
  output logic [31:0]           rows_pruned,
  output logic [31:0]           writes_skipped,
  output logic [31:0]           rows_written,
  output logic [31:0]           bursts
);
  localparam int unsigned AW = $clog2(N);
  localparam logic [DW-1:0] INF = '1;

  typedef enum logic [2:0] {S_IDLE, S_PANEL, S_PANEL_CAP, S_PREFETCH, S_PERMUTE,
                            S_COMPUTE, S_WRITEBACK, S_NEXT_PIVOT} st_e;
  st_e st;

  logic [N-1:0][DW-1:0] panel_row, row_buf, pf_buf;
  logic [N-1:0][DW-1:0] row_cur;        // row in the Permute stage
  logic [DW-1:0]        panel_col;       // Panel_Col value of that row
  logic [AW:0]          t, pf_t;         // position in the remapped order
  logic                 pf_pending;
  logic [AW-1:0]        cur_row;

  // address remapper: t-th row after the pivot, wrapping at n
  function automatic logic [AW-1:0] remap(logic [AW:0] k, logic [AW:0] tt, logic [AW:0] nn);
    logic [AW+1:0] r;
    r = (AW+2)'(k) + (AW+2)'(tt) + 1;
    if (r >= (AW+2)'(nn)) r = r - (AW+2)'(nn);
    return r[AW-1:0];
  endfunction

  // DMA write engine
  logic [$clog2(WR_LAT+1)-1:0] dma_cnt;
  logic dma_busy, dma_launch;
  assign dma_busy = (dma_cnt != 0) || wr_en;   // busy until the commit cycle has passed

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dma_cnt <= '0;
      wr_en   <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      if (dma_launch) dma_cnt <= ($clog2(WR_LAT+1))'(WR_LAT);
      else if (dma_cnt != 0) begin
        dma_cnt <= dma_cnt - 1'b1;
        if (dma_cnt == 1) wr_en <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (dma_launch) begin
      wr_addr <= cur_row;
      wr_data <= alu_res;
      wr_mask <= alu_wmask;
    end

  // lane enables: inside the block and not the pivot column
  always_comb
    for (int unsigned j = 0; j < N; j++)
      alu_en[j] = (j < 32'(n)) && (j != 32'(pivot));

  assign panel_col = row_cur[pivot[AW-1:0]];
  always_comb
    for (int unsigned j = 0; j < N; j++) alu_a[j] = panel_col;
  assign alu_b   = panel_row;
  assign alu_old = row_cur;

  logic last_row;
  assign last_row = (t + 1 >= n - 1);

  always_comb begin
    rd_en = 1'b0; rd_addr = '0; alu_start = 1'b0; dma_launch = 1'b0;
    unique case (st)
      S_PANEL:    if (!dma_busy) begin rd_en = 1'b1; rd_addr = pivot[AW-1:0]; end
      S_PREFETCH: begin rd_en = 1'b1; rd_addr = remap(pivot, t, n); end
      S_PERMUTE:  if (panel_col != INF) alu_start = 1'b1;
      S_COMPUTE:  if (pf_pending) begin rd_en = 1'b1; rd_addr = remap(pivot, pf_t, n); end
      S_WRITEBACK: if (!dma_busy && (|alu_wmask)) dma_launch = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pivot <= '0; t <= '0; done <= 1'b0; pf_pending <= 1'b0;
      rows_pruned <= '0; writes_skipped <= '0; rows_written <= '0; bursts <= '0;
      pf_t <= '0; cur_row <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          pivot <= '0;
          st    <= (n == 0) ? S_IDLE : S_PANEL;
          done  <= (n == 0);
        end
        S_PANEL: if (!dma_busy) st <= S_PANEL_CAP;
        S_PANEL_CAP: begin
          t <= '0; pf_pending <= 1'b0;
          st <= (n > 1) ? S_PREFETCH : S_NEXT_PIVOT;
        end
        S_PREFETCH: begin
          if (32'(t) % BURST == 0) bursts <= bursts + 1;
          cur_row <= remap(pivot, t, n);
          st <= S_PERMUTE;
        end
        S_PERMUTE: begin
          if (panel_col == INF) begin
            // block pruning: nothing can improve through this row
            rows_pruned <= rows_pruned + 1;
            if (last_row) st <= S_NEXT_PIVOT;
            else begin t <= t + 1'b1; st <= S_PREFETCH; end
          end else begin
            st <= S_COMPUTE;
            pf_pending <= !last_row;
            pf_t <= t + 1'b1;
          end
        end
        S_COMPUTE: begin
          if (pf_pending) pf_pending <= 1'b0;
          if (alu_done) st <= S_WRITEBACK;
        end
        S_WRITEBACK: begin
          if (!(|alu_wmask)) writes_skipped <= writes_skipped + 1;
          if (!(|alu_wmask) || !dma_busy) begin
            if (|alu_wmask) rows_written <= rows_written + 1;
            if (last_row) st <= S_NEXT_PIVOT;
            else begin
              t  <= t + 1'b1;
              // the prefetched row is already in pf_buf
              if ((32'(t) + 1) % BURST == 0) bursts <= bursts + 1;
              cur_row <= remap(pivot, t + 1'b1, n);
              st <= S_PERMUTE;
            end
          end
        end
        S_NEXT_PIVOT: if (!dma_busy) begin
          if (pivot + 1'b1 >= n) begin st <= S_IDLE; done <= 1'b1; end
          else begin pivot <= pivot + 1'b1; st <= S_PANEL; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // data capture: panel row, row buffer (direct or from the prefetch buffer)
  logic rd_q;
  st_e  rd_st_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rd_q <= 1'b0; rd_st_q <= S_IDLE; end
    else begin rd_q <= rd_en; rd_st_q <= st; end
  end
  always_ff @(posedge clk) begin
    if (rd_q && rd_st_q == S_PANEL)    panel_row <= rd_data;
    if (rd_q && rd_st_q == S_PREFETCH) row_buf   <= rd_data;
    if (rd_q && rd_st_q == S_COMPUTE)  pf_buf    <= rd_data;
    if (st == S_WRITEBACK && (!(|alu_wmask) || !dma_busy) && !last_row) row_buf <= pf_buf;
  end

  assign row_cur = (rd_q && rd_st_q == S_PREFETCH) ? rd_data : row_buf;
  assign busy = (st != S_IDLE);
endmodule
