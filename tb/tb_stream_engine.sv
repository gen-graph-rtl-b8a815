// tb_stream_engine: checks the CSR-to-dense row expansion of the matrix
// tile's stream engine at 16 columns. For each of 16 rows it streams a
// random list of (column, weight) entries, repeated columns included, the
// last flagged; empty rows come as one entry with in_empty set. Each row must
// appear on the row port one cycle after its last entry, with the minimum
// weight per column, 0 on the diagonal and all ones (infinity) elsewhere,
// at the right row index; rows_out must count them.
module tb_stream_engine;
  import gg_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, begin_comp = 0, in_valid = 0, in_last = 0, in_empty = 0, in_ready;
  logic [3:0] in_col = 0;
  logic [DIST_W-1:0] in_val = 0;
  logic row_we;
  logic [3:0] row_idx;
  logic [N-1:0][DIST_W-1:0] row_data, exp_row;
  logic [31:0] rows_out;
  int checks = 0, failures = 0, nempty = 0;

  stream_engine #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int comp = 0; comp < 2; comp++) begin
      @(negedge clk); begin_comp = 1; @(negedge clk); begin_comp = 0;
      for (int r = 0; r < N; r++) begin
        int ne;
        exp_row = '1; exp_row[r] = '0;
        ne = $urandom_range(0, 6);
        if (ne == 0) begin
          nempty++;
          in_valid = 1; in_last = 1; in_empty = 1; in_col = 0; in_val = 0;
          @(negedge clk);
        end else for (int e = 0; e < ne; e++) begin
          in_valid = 1; in_empty = 0; in_last = (e == ne - 1);
          in_col = 4'($urandom_range(0, N - 1)); in_val = DIST_W'($urandom_range(1, 100));
          if (in_val < exp_row[in_col]) exp_row[in_col] = in_val;
          // random bubbles between entries
          @(negedge clk);
          if (!in_last && $urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        end
        in_valid = 0; in_last = 0; in_empty = 0;
        checks++;
        if (!row_we || row_idx != 4'(r) || row_data !== exp_row) begin failures++; $display("row %0d wrong (we %0d idx %0d)", r, row_we, row_idx); end
        checks++; if (in_ready !== 1'b1) failures++;
      end
      @(negedge clk);
      checks++; if (rows_out != 32'(N * (comp + 1))) failures++;
    end
    checks++; if (nempty == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
