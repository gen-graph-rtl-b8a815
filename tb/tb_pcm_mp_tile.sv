// tb_pcm_mp_tile: checks the two-stage min-plus merge of the PCM-MP tile at
// 16 x 16 entries (4 groups of 4 in the comparator tree). Loads random D_C1
// (m x b1), DB (b1 x b2, written transposed), D_C2 (b2 x n, written
// transposed) and X (m x n), runs the merge and compares X with
// X[m][n] = min(X[m][n], min_j (min_i D_C1[m][i] + DB[i][j]) + D_C2[j][n])
// computed here with saturating sums, and counts the compare-and-swap
// updates. Run twice with different sizes.
module tb_pcm_mp_tile;
  import gg_pkg::*;
  localparam int N = 16, G = 4;
  logic clk = 0, rst_n = 0, host_we = 0, start = 0, busy, done;
  logic [1:0] host_sel = 0;
  logic [3:0] host_row = 0, host_col = 0;
  logic [DIST_W-1:0] host_wdata = 0, host_rdata;
  logic [4:0] nm = 0, nb1 = 0, nb2 = 0, nn = 0;
  logic [31:0] updates;
  longint c1 [N][N], db [N][N], c2 [N][N], x [N][N], tm [N];
  int checks = 0, failures = 0, eupd = 0;
  localparam longint INF = 64'(DIST_INF);

  pcm_mp_tile #(.N(N), .G(G)) dut (.*);
  always #5 clk = ~clk;

  initial begin #20_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic longint rnd();
    return ($urandom_range(0, 3) == 0) ? INF : longint'($urandom_range(0, 200));
  endfunction
  function automatic longint sadd(longint a, longint b);
    return (a == INF || b == INF || a + b >= INF) ? INF : a + b;
  endfunction
  task automatic hw(input int sel, input int r, input int c, input longint v);
    @(negedge clk); host_we = 1; host_sel = 2'(sel); host_row = 4'(r); host_col = 4'(c); host_wdata = DIST_W'(v);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int M, B1, B2, NN, u0;
      M = (run == 0) ? 3 : 16; B1 = (run == 0) ? 5 : 16; B2 = (run == 0) ? 4 : 13; NN = (run == 0) ? 6 : 16;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        c1[i][j] = rnd(); db[i][j] = rnd(); c2[i][j] = rnd(); x[i][j] = (run == 0) ? INF : longint'($urandom_range(50, 600));
        hw(0, i, j, c1[i][j]); hw(1, j, i, db[i][j]); hw(2, j, i, c2[i][j]); hw(3, i, j, x[i][j]);
      end
      @(negedge clk); host_we = 0;
      u0 = updates;
      for (int m = 0; m < M; m++) begin
        for (int j = 0; j < B2; j++) begin
          tm[j] = INF;
          for (int i = 0; i < B1; i++) if (sadd(c1[m][i], db[i][j]) < tm[j]) tm[j] = sadd(c1[m][i], db[i][j]);
        end
        for (int q = 0; q < NN; q++) begin
          longint best; best = INF;
          for (int j = 0; j < B2; j++) if (sadd(tm[j], c2[j][q]) < best) best = sadd(tm[j], c2[j][q]);
          if (best < x[m][q]) begin x[m][q] = best; eupd++; end
        end
      end
      nm = 5'(M); nb1 = 5'(B1); nb2 = 5'(B2); nn = 5'(NN);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      wait (done); @(negedge clk);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        host_row = 4'(i); host_col = 4'(j); @(negedge clk);
        checks++;
        if (longint'(host_rdata) != x[i][j]) begin failures++; $display("run %0d X[%0d][%0d]=%0d exp %0d", run, i, j, host_rdata, x[i][j]); end
      end
      checks++; if (updates != 32'(eupd)) begin failures++; $display("updates %0d exp %0d", updates, eupd); end
    end
    checks++; if (eupd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
