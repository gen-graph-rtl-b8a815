// tb_gen_graph_top_full: one complete operation of each tile on the
// accelerator at its full default size (1024 x 1024 PCM blocks, 16 PUs of
// 64 PEs), no parameter overrides.
//  * Matrix: an 8-vertex graph is streamed as CSR rows, Floyd-Warshall runs
//    on it in the 1024-column FW tile, the 8 x 8 result is checked; it then
//    serves as D_C1 of a min-plus merge in the MP tile (1024-way comparator
//    tree), whose X block is checked.
//  * Traversal: PU 0 aligns a 10,000-bp long read (79 windows of 128 bp,
//    one pass over the 64-PE chain) against a 200-node graph delivered over
//    the ring from channel 5; best_long must equal the reference score.
module tb_gen_graph_top_full;
  import gg_pkg::*;
  localparam int N = 1024, NPU = 16, NPE = 64, W = 128, NV = 8, NL = 200, NWIN = 79;
  localparam logic [DIST_W-1:0] INF = DIST_INF;

  logic clk = 0, rst_n = 0;
  logic csr_begin = 0, csr_valid = 0, csr_ready, csr_last = 0, csr_empty = 0;
  logic [9:0] csr_col = 0;
  logic [DIST_W-1:0] csr_val = 0;
  logic fw_host_we = 0, fw_start = 0, fw_busy, fw_done;
  logic [9:0] fw_host_row = 0, fw_host_col = 0;
  logic [DIST_W-1:0] fw_host_wdata = 0, fw_host_rdata;
  logic [10:0] fw_n = 0;
  logic [31:0] fw_rows_pruned, fw_writes_skipped, fw_rows_written, fw_bursts;
  logic mp_host_we = 0, mp_start = 0, mp_busy, mp_done;
  logic [1:0] mp_host_sel = 0;
  logic [9:0] mp_host_row = 0, mp_host_col = 0;
  logic [DIST_W-1:0] mp_host_wdata = 0, mp_host_rdata;
  logic [10:0] mp_nm = 0, mp_nb1 = 0, mp_nb2 = 0, mp_nn = 0;
  logic [31:0] mp_updates;
  logic [NPU-1:0] ch_valid = '0, ch_ready, tt_start = '0, tt_busy, tt_job_done;
  logic [NPU-1:0][3:0] ch_dst = '0;
  logic [NPU-1:0][145:0] ch_payload = '0;
  logic [NPU-1:0][15:0] tt_best_long;
  logic [3:0] tt_rd_pu = 0;
  logic [5:0] tt_rd_pe = 0;
  logic [15:0] tt_score_lo, tt_score_hi;
  logic [13:0] tt_replay_off = 0;
  logic [1:0] tt_replay_code;
  logic [NPU-1:0][31:0] tt_stall_cycles, tt_hop_count, tt_pass_count;
  logic [31:0] tt_ring_hops, se_rows_out;

  gen_graph_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int msb(logic [W-1:0] v);
    int m; m = -1;
    for (int i = 0; i < W; i++) if (v[i]) m = i;
    return m;
  endfunction
  function automatic longint sadd(longint a, longint b);
    return (a == longint'(INF) || b == longint'(INF) || a + b >= longint'(INF)) ? longint'(INF) : a + b;
  endfunction
  // one channel-5 packet to PU 0 (travels 11 ring stops)
  task automatic send(logic [1:0] tgt, logic [15:0] addr, logic [127:0] data);
    @(negedge clk);
    ch_valid[5] = 1; ch_dst[5] = 4'd0; ch_payload[5] = {tgt, addr, data};
    #1;
    while (!ch_ready[5]) begin @(negedge clk); #1; end
    @(negedge clk); ch_valid[5] = 0;
  endtask

  longint d [NV][NV], db [NV][NV], c2 [NV][NV], x [NV][NV], tm [NV];
  node_rec_t g [NL];
  logic [W-1:0] lmask [NWIN][4];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- FW ----------------
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) d[i][j] = (i == j) ? 0 : longint'(INF);
    @(negedge clk); csr_begin = 1; @(negedge clk); csr_begin = 0;
    for (int i = 0; i < NV; i++) begin
      int ne;
      ne = $urandom_range(1, 3);
      for (int e = 0; e < ne; e++) begin
        int j; longint w;
        j = $urandom_range(0, NV - 1); w = $urandom_range(1, 40);
        if (j != i && w < d[i][j]) d[i][j] = w;
        csr_valid = 1; csr_empty = 0; csr_last = (e == ne - 1); csr_col = 10'(j); csr_val = DIST_W'(w);
        @(negedge clk);
      end
      csr_valid = 0; csr_last = 0;
    end
    for (int k = 0; k < NV; k++) for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++)
      if (sadd(d[i][k], d[k][j]) < d[i][j]) d[i][j] = sadd(d[i][k], d[k][j]);
    fw_n = 11'(NV);
    @(negedge clk); fw_start = 1; @(negedge clk); fw_start = 0;
    wait (fw_done); @(negedge clk);
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) begin
      fw_host_row = 10'(i); fw_host_col = 10'(j); @(negedge clk);
      checks++;
      if (longint'(fw_host_rdata) != d[i][j]) begin failures++; $display("FW D[%0d][%0d]=%0d exp %0d", i, j, fw_host_rdata, d[i][j]); end
    end
    // ---------------- MP ----------------
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) begin
      db[i][j] = $urandom_range(0, 30); c2[i][j] = $urandom_range(0, 30); x[i][j] = $urandom_range(20, 200);
      mp_host_we = 1;
      mp_host_sel = 0; mp_host_row = 10'(i); mp_host_col = 10'(j); mp_host_wdata = DIST_W'(d[i][j]); @(negedge clk);
      mp_host_sel = 1; mp_host_row = 10'(j); mp_host_col = 10'(i); mp_host_wdata = DIST_W'(db[i][j]); @(negedge clk);
      mp_host_sel = 2; mp_host_row = 10'(j); mp_host_col = 10'(i); mp_host_wdata = DIST_W'(c2[i][j]); @(negedge clk);
      mp_host_sel = 3; mp_host_row = 10'(i); mp_host_col = 10'(j); mp_host_wdata = DIST_W'(x[i][j]); @(negedge clk);
    end
    mp_host_we = 0;
    for (int m = 0; m < NV; m++) begin
      for (int j = 0; j < NV; j++) begin
        tm[j] = longint'(INF);
        for (int i = 0; i < NV; i++) if (sadd(d[m][i], db[i][j]) < tm[j]) tm[j] = sadd(d[m][i], db[i][j]);
      end
      for (int n = 0; n < NV; n++) for (int j = 0; j < NV; j++) if (sadd(tm[j], c2[j][n]) < x[m][n]) x[m][n] = sadd(tm[j], c2[j][n]);
    end
    mp_nm = 11'(NV); mp_nb1 = 11'(NV); mp_nb2 = 11'(NV); mp_nn = 11'(NV);
    @(negedge clk); mp_start = 1; @(negedge clk); mp_start = 0;
    wait (mp_done); @(negedge clk);
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) begin
      mp_host_row = 10'(i); mp_host_col = 10'(j); @(negedge clk);
      checks++;
      if (longint'(mp_host_rdata) != x[i][j]) begin failures++; $display("MP X[%0d][%0d]=%0d exp %0d", i, j, mp_host_rdata, x[i][j]); end
    end
    // ---------------- long read on PU 0 ----------------
    for (int v = 0; v < NL; v++) begin
      g[v] = '0;
      g[v].base = 2'($urandom);
      g[v].self_pred = (v > 0) && ($urandom_range(0, 100) != 0);
      if (v >= 2 && $urandom_range(0, 3) == 0) begin g[v].hop_pred = 1; g[v].hop_dist = 7'($urandom_range(2, (v < 100) ? v : 100)); end
    end
    for (int v = 0; v < NL; v++) if (g[v].hop_pred) g[v - int'(g[v].hop_dist)].hop_src = 1;
    for (int v = 0; v < NL; v++) send(2'd0, 16'(v), 128'(32'(g[v])));
    for (int w = 0; w < NWIN; w++) for (int b = 0; b < 4; b++) begin
      lmask[w][b] = '1;
      if ($urandom_range(0, 1) == 0) lmask[w][b][$urandom_range(0, W - 1)] = 1'b0;
      send(2'd2, 16'({6'(w / 2), 1'b0, 2'(b), 1'(w % 2)}), lmask[w][b]);
    end
    send(2'd1, 16'd0, 128'({1'b0, 1'b1, 14'(NL), 10'(NWIN), 6'd0}));
    send(2'd1, 16'd1, 128'(32'h8000_0000));
    repeat (40) @(negedge clk);
    begin
      int exp_best;
      logic c [NL];
      logic [W-1:0] s [NL];
      exp_best = 0;
      for (int v = 0; v < NL; v++) c[v] = 1'b1;
      for (int w = 0; w < NWIN; w++)
        for (int v = 0; v < NL; v++) begin
          logic [W-1:0] dd;
          dd = '0;
          if (g[v].self_pred) dd |= s[v-1];
          if (g[v].hop_pred) dd |= s[v - int'(g[v].hop_dist)];
          s[v] = {dd[W-2:0], c[v]} & lmask[w][g[v].base];
          c[v] = s[v][W-1];
          if (s[v] != 0 && w * W + msb(s[v]) + 1 > exp_best) exp_best = w * W + msb(s[v]) + 1;
        end
      @(negedge clk); tt_start[0] = 1; @(negedge clk); tt_start[0] = 0;
      wait (!tt_busy[0]); @(negedge clk);
      checks++; if (tt_best_long[0] != 16'(exp_best)) begin failures++; $display("long best %0d exp %0d", tt_best_long[0], exp_best); end
      checks++; if (tt_pass_count[0] != 1 || tt_ring_hops != 32'((NL + 2 + NWIN * 4) * 11)) begin
        failures++; $display("passes %0d ring hops %0d", tt_pass_count[0], tt_ring_hops);
      end
      $display("long read: best %0d, stalls %0d, hops %0d", tt_best_long[0], tt_stall_cycles[0], tt_hop_count[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
