// tb_pcm_fw_tile: end-to-end check of the PCM-FW tile at 16 x 16 cells of 16
// bits. Loads a random sparse distance block through the row port and a few
// single cells through the host port, runs in-place Floyd-Warshall on the
// first n = 13 vertices, and reads every cell back through the host port
// (one-cycle read). The result and the pruning / write-skip counters are
// compared with a reference computed here.
module tb_pcm_fw_tile;
  localparam int N = 16, DW = 16, NV = 13;
  localparam logic [DW-1:0] INF = '1;
  logic clk = 0, rst_n = 0, host_we = 0, row_we = 0, start = 0, busy, done;
  logic [3:0] host_row = 0, host_col = 0, row_waddr = 0;
  logic [DW-1:0] host_wdata = 0, host_rdata;
  logic [N-1:0][DW-1:0] row_wdata = '0;
  logic [4:0] n = 5'(NV);
  logic [31:0] rows_pruned, writes_skipped, rows_written, bursts;
  int ref_d [N][N];
  int checks = 0, failures = 0, e_pruned = 0, e_skipped = 0, e_written = 0;

  pcm_fw_tile #(.N(N), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin #20_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      if (i == j) ref_d[i][j] = 0;
      else if ($urandom_range(0, 4) == 0) ref_d[i][j] = $urandom_range(1, 90);
      else ref_d[i][j] = int'(INF);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); row_we = 1; row_waddr = 4'(i);
      for (int j = 0; j < N; j++) row_wdata[j] = DW'(ref_d[i][j]);
    end
    @(negedge clk); row_we = 0;
    for (int m = 0; m < 5; m++) begin
      int i, j;
      i = $urandom_range(0, NV - 1); j = (i + 1) % NV;
      ref_d[i][j] = $urandom_range(1, 30);
      @(negedge clk); host_we = 1; host_row = 4'(i); host_col = 4'(j); host_wdata = DW'(ref_d[i][j]);
    end
    @(negedge clk); host_we = 0;
    for (int k = 0; k < NV; k++)
      for (int t = 0; t < NV - 1; t++) begin
        int i; bit any;
        i = (k + 1 + t) % NV;
        if (ref_d[i][k] == int'(INF)) begin e_pruned++; continue; end
        any = 0;
        for (int j = 0; j < NV; j++) if (j != k && ref_d[k][j] != int'(INF)) begin
          int s; s = ref_d[i][k] + ref_d[k][j];
          if (s >= int'(INF)) s = int'(INF);
          if (s < ref_d[i][j]) begin ref_d[i][j] = s; any = 1; end
        end
        if (any) e_written++; else e_skipped++;
      end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    checks++; if (!busy) failures++;
    wait (done); @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      host_row = 4'(i); host_col = 4'(j);
      @(negedge clk);
      checks++;
      if (host_rdata !== DW'(ref_d[i][j])) begin failures++; $display("D[%0d][%0d]=%0d exp %0d", i, j, host_rdata, ref_d[i][j]); end
    end
    checks++; if (rows_pruned != 32'(e_pruned) || writes_skipped != 32'(e_skipped) || rows_written != 32'(e_written)) begin
      failures++; $display("counters %0d %0d %0d exp %0d %0d %0d", rows_pruned, writes_skipped, rows_written, e_pruned, e_skipped, e_written);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
