// stream_engine: CSR-to-dense expansion on the logic base die.
//
// Step 1 of the matrix-tile dataflow expands components stored in CSR form
// (row pointer, column index, value) in HBM into dense distance rows for
// the PCM-FW array. This engine takes the CSR entries of one component row
// by row as a stream of beats {col, val, last}; a row with no entries is
// sent as one beat with empty = 1. It builds the dense row in a row buffer
// that starts every row at infinity (all ones) with 0 on the diagonal,
// keeps the smallest weight when an edge repeats, and on the row's last beat
// emits the whole row (row_we, row_idx, row_data) to the tile, one cycle
// later. begin_comp restarts at row 0. in_ready is always 1: one beat per
// cycle. The paper gives the function and "dual 64 KB stream engines"; the
// beat format, the one-row buffer and the duplicate-edge rule are this
// design's. The reverse conversion (dense to CSR) and boundary extraction
// are not implemented.
module stream_engine
  import gg_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 begin_comp,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [$clog2(N)-1:0] in_col,
  input  logic [DIST_W-1:0]    in_val,
  input  logic                 in_last,
  input  logic                 in_empty,
  output logic                 row_we,
  output logic [$clog2(N)-1:0] row_idx,
  output logic [N-1:0][DIST_W-1:0] row_data,
  output logic [31:0]          rows_out
);
  localparam int unsigned AW = $clog2(N);
  logic [AW-1:0]               cur_row;
  logic [N-1:0][DIST_W-1:0]    rbuf, rbuf_next;

  assign in_ready = 1'b1;

  // row buffer with the current beat merged in
  always_comb begin
    rbuf_next = rbuf;
    if (in_valid && !in_empty && in_val < rbuf[in_col]) rbuf_next[in_col] = in_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_row <= '0; row_we <= 1'b0; row_idx <= '0; rows_out <= '0;
      rbuf    <= '1;
    end else begin
      row_we <= 1'b0;
      if (begin_comp) begin
        cur_row <= '0;
        rbuf    <= '1;
        rbuf[0] <= '0;
      end else if (in_valid) begin
        if (in_last) begin
          row_we   <= 1'b1;
          row_idx  <= cur_row;
          rows_out <= rows_out + 1;
          cur_row  <= cur_row + 1'b1;
          rbuf     <= '1;
          rbuf[cur_row + 1'b1] <= '0;        // diagonal of the next row
        end else begin
          rbuf <= rbuf_next;
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (in_valid && in_last && !begin_comp) row_data <= rbuf_next;
endmodule
