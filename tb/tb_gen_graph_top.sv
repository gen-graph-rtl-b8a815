// tb_gen_graph_top: end-to-end test of the accelerator at reduced size
// (16-vertex matrix blocks, 4 processing units of 8 PEs).
// Matrix path: a random sparse graph block is streamed as CSR rows into the
// stream engine, which expands it into the PCM-FW tile; Floyd-Warshall runs
// in place and the block is read back and compared with a reference. Rows of
// that result then feed the PCM-MP tile as D_C1, with random bridge (DB)
// and second-component (D_C2) blocks, and the merged X block is checked.
// Traversal path: graphs, programs and match masks arrive as channel
// packets (some over the ring, some local); all PUs run a short-read job,
// then PU 0 switches to long-read mode for a 20-window read that needs two
// passes. Scores are compared with the reference alignment.
// Each mechanism of the design is counted and must occur at least once:
// row pruning, write skipping, masked row writes, DMA bursts, MP
// compare-and-swap updates, shared-SRAM stalls, Hop reads, multi-pass runs
// with the carry FIFO, the short/long mode switch, ring hops and local
// channel delivery.
module tb_gen_graph_top;
  import gg_pkg::*;
  localparam int N = 16, NPU = 4, NPE = 8, W = 128, GROUP = 4, NG = NPE / GROUP;
  localparam int NV = 13, NN = 30, NL = 300;
  localparam logic [DIST_W-1:0] INF = DIST_INF;

  logic clk = 0, rst_n = 0;
  logic csr_begin = 0, csr_valid = 0, csr_ready, csr_last = 0, csr_empty = 0;
  logic [3:0] csr_col = 0;
  logic [DIST_W-1:0] csr_val = 0;
  logic fw_host_we = 0, fw_start = 0, fw_busy, fw_done;
  logic [3:0] fw_host_row = 0, fw_host_col = 0;
  logic [DIST_W-1:0] fw_host_wdata = 0, fw_host_rdata;
  logic [4:0] fw_n = 0;
  logic [31:0] fw_rows_pruned, fw_writes_skipped, fw_rows_written, fw_bursts;
  logic mp_host_we = 0, mp_start = 0, mp_busy, mp_done;
  logic [1:0] mp_host_sel = 0;
  logic [3:0] mp_host_row = 0, mp_host_col = 0;
  logic [DIST_W-1:0] mp_host_wdata = 0, mp_host_rdata;
  logic [4:0] mp_nm = 0, mp_nb1 = 0, mp_nb2 = 0, mp_nn = 0;
  logic [31:0] mp_updates;
  logic [NPU-1:0] ch_valid = '0, ch_ready, tt_start = '0, tt_busy, tt_job_done;
  logic [NPU-1:0][1:0] ch_dst = '0;
  logic [NPU-1:0][145:0] ch_payload = '0;
  logic [NPU-1:0][15:0] tt_best_long;
  logic [1:0] tt_rd_pu = 0;
  logic [2:0] tt_rd_pe = 0;
  logic [15:0] tt_score_lo, tt_score_hi;
  logic [13:0] tt_replay_off = 0;
  logic [1:0] tt_replay_code;
  logic [NPU-1:0][31:0] tt_stall_cycles, tt_hop_count, tt_pass_count;
  logic [31:0] tt_ring_hops, se_rows_out;

  gen_graph_top #(.N(N), .NPU(NPU), .NPE(NPE)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_local = 0, n_remote = 0, n_mode_switch = 0, n_long_pass = 0;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- channel packet drivers ----------------
  typedef struct { logic [1:0] dst; logic [145:0] pl; } pkt_t;
  pkt_t q [NPU][$];
  for (genvar c = 0; c < NPU; c++) begin : g_drv
    bit acc = 0;
    always @(posedge clk) begin
      acc = ch_valid[c] && ch_ready[c];
      if (acc) begin if (ch_dst[c] == 2'(c)) n_local++; else n_remote++; end
    end
    always @(negedge clk) if (rst_n) begin
      if (acc) void'(q[c].pop_front());
      #1;
      if (q[c].size() > 0) begin ch_valid[c] = 1; ch_dst[c] = q[c][0].dst; ch_payload[c] = q[c][0].pl; end
      else ch_valid[c] = 0;
    end
  end
  function automatic void send(int ch, int dst, logic [1:0] tgt, logic [15:0] addr, logic [127:0] data);
    pkt_t p;
    p.dst = 2'(dst); p.pl = {tgt, addr, data};
    q[ch].push_back(p);
  endfunction
  task automatic drain_channels();
    while (q[0].size() + q[1].size() + q[2].size() + q[3].size() != 0) @(negedge clk);
    repeat (2 * NPU + 4) @(negedge clk);
  endtask

  function automatic int msb(logic [W-1:0] v);
    int m; m = -1;
    for (int i = 0; i < W; i++) if (v[i]) m = i;
    return m;
  endfunction
  function automatic longint sadd(longint a, longint b);
    return (a == longint'(INF) || b == longint'(INF) || a + b >= longint'(INF)) ? longint'(INF) : a + b;
  endfunction

  longint d [N][N];
  longint db [N][N], c2 [N][N], x [N][N], tm [N];
  node_rec_t g [NPU][NG][NL];
  logic [W-1:0] masks [NPU][NPE][2][4];
  logic [W-1:0] lmask [32][4];

  function automatic node_rec_t rnd_node(int v, int brk);
    node_rec_t r;
    r = '0;
    r.base = 2'($urandom);
    r.self_pred = (v > 0) && ($urandom_range(0, brk) != 0);
    if (v >= 2 && $urandom_range(0, 2) == 0) begin r.hop_pred = 1; r.hop_dist = 7'($urandom_range(2, (v < 60) ? v : 60)); end
    return r;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ================= matrix tile: CSR -> FW =================
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) d[i][j] = (i == j) ? 0 : longint'(INF);
    @(negedge clk); csr_begin = 1; @(negedge clk); csr_begin = 0;
    for (int i = 0; i < N; i++) begin
      int ne;
      ne = (i < NV) ? $urandom_range(0, 3) : 0;
      if (ne == 0) begin
        csr_valid = 1; csr_last = 1; csr_empty = 1; @(negedge clk);
      end else for (int e = 0; e < ne; e++) begin
        int j; longint w;
        j = $urandom_range(0, NV - 1); w = $urandom_range(1, 40);
        if (j != i && w < d[i][j]) d[i][j] = w;
        csr_valid = 1; csr_empty = 0; csr_last = (e == ne - 1); csr_col = 4'(j); csr_val = DIST_W'(w);
        @(negedge clk);
      end
      csr_valid = 0; csr_last = 0; csr_empty = 0;
    end
    @(negedge clk);
    checks++; if (se_rows_out != 32'(N)) begin failures++; $display("stream rows %0d", se_rows_out); end
    for (int k = 0; k < NV; k++) for (int i = 0; i < NV; i++) if (i != k && d[i][k] != longint'(INF))
      for (int j = 0; j < NV; j++) if (sadd(d[i][k], d[k][j]) < d[i][j]) d[i][j] = sadd(d[i][k], d[k][j]);
    fw_n = 5'(NV);
    @(negedge clk); fw_start = 1; @(negedge clk); fw_start = 0;
    wait (fw_done); @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      fw_host_row = 4'(i); fw_host_col = 4'(j); @(negedge clk);
      checks++;
      if (longint'(fw_host_rdata) != d[i][j]) begin failures++; $display("FW D[%0d][%0d]=%0d exp %0d", i, j, fw_host_rdata, d[i][j]); end
    end

    // ================= matrix tile: MP merge =================
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      db[i][j] = ($urandom_range(0, 2) == 0) ? longint'(INF) : longint'($urandom_range(0, 30));
      c2[i][j] = ($urandom_range(0, 2) == 0) ? longint'(INF) : longint'($urandom_range(0, 30));
      x[i][j]  = $urandom_range(20, 200);
      mp_host_we = 1;
      mp_host_sel = 0; mp_host_row = 4'(i); mp_host_col = 4'(j); mp_host_wdata = DIST_W'(d[i][j]); @(negedge clk);
      mp_host_sel = 1; mp_host_row = 4'(j); mp_host_col = 4'(i); mp_host_wdata = DIST_W'(db[i][j]); @(negedge clk);
      mp_host_sel = 2; mp_host_row = 4'(j); mp_host_col = 4'(i); mp_host_wdata = DIST_W'(c2[i][j]); @(negedge clk);
      mp_host_sel = 3; mp_host_row = 4'(i); mp_host_col = 4'(j); mp_host_wdata = DIST_W'(x[i][j]); @(negedge clk);
    end
    mp_host_we = 0;
    for (int m = 0; m < NV; m++) begin
      for (int j = 0; j < 10; j++) begin
        tm[j] = longint'(INF);
        for (int i = 0; i < NV; i++) if (sadd(d[m][i], db[i][j]) < tm[j]) tm[j] = sadd(d[m][i], db[i][j]);
      end
      for (int n = 0; n < N; n++) for (int j = 0; j < 10; j++) if (sadd(tm[j], c2[j][n]) < x[m][n]) x[m][n] = sadd(tm[j], c2[j][n]);
    end
    mp_nm = 5'(NV); mp_nb1 = 5'(NV); mp_nb2 = 5'd10; mp_nn = 5'(N);
    @(negedge clk); mp_start = 1; @(negedge clk); mp_start = 0;
    wait (mp_done); @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      mp_host_row = 4'(i); mp_host_col = 4'(j); @(negedge clk);
      checks++;
      if (longint'(mp_host_rdata) != x[i][j]) begin failures++; $display("MP X[%0d][%0d]=%0d exp %0d", i, j, mp_host_rdata, x[i][j]); end
    end

    // ================= traversal tile: short reads on every PU =================
    for (int u = 0; u < NPU; u++) begin
      int src;
      src = (u + 1 + (u % 2)) % NPU;
      for (int gi = 0; gi < NG; gi++) begin
        for (int v = 0; v < NN; v++) g[u][gi][v] = rnd_node(v, 5);
        for (int v = 0; v < NN; v++) if (g[u][gi][v].hop_pred) g[u][gi][v - int'(g[u][gi][v].hop_dist)].hop_src = 1;
        for (int v = 0; v < NN; v++) send(src, u, 2'd0, 16'(gi * (8192 / NG) + v), 128'(32'(g[u][gi][v])));
      end
      send(src, u, 2'd1, 16'd0, 128'({1'b0, 1'b0, 14'(NN), 10'd1, 6'd0}));
      send(src, u, 2'd1, 16'd1, 128'(32'h8000_0000));
      for (int p = 0; p < NPE; p++) for (int h = 0; h < 2; h++) for (int b = 0; b < 4; b++) begin
        for (int k = 0; k < W / 32; k++) masks[u][p][h][b][k*32 +: 32] = $urandom | $urandom | $urandom;
        send(u, u, 2'd2, 16'({p[11:0], 1'b0, b[1:0], h[0]}), masks[u][p][h][b]);
      end
    end
    drain_channels();
    @(negedge clk); tt_start = '1; @(negedge clk); tt_start = '0;
    wait (tt_busy == '0); @(negedge clk);
    for (int u = 0; u < NPU; u++) for (int p = 0; p < NPE; p++) begin
      int best [2];
      for (int h = 0; h < 2; h++) begin
        logic [W-1:0] s [NN];
        best[h] = 0;
        for (int v = 0; v < NN; v++) begin
          logic [W-1:0] dd;
          node_rec_t r;
          r = g[u][p / GROUP][v]; dd = '0;
          if (r.self_pred) dd |= s[v-1];
          if (r.hop_pred) dd |= s[v - int'(r.hop_dist)];
          s[v] = {dd[W-2:0], 1'b1} & masks[u][p][h][r.base];
          if (s[v] != 0 && msb(s[v]) + 1 > best[h]) best[h] = msb(s[v]) + 1;
        end
      end
      tt_rd_pu = 2'(u); tt_rd_pe = 3'(p); #1;
      checks++;
      if (tt_score_lo != 16'(best[0]) || tt_score_hi != 16'(best[1])) begin
        failures++; $display("short PU %0d PE %0d: %0d %0d exp %0d %0d", u, p, tt_score_lo, tt_score_hi, best[0], best[1]);
      end
    end

    // ================= traversal tile: PU 0 switches to a long read =================
    begin
      int exp_best, p0;
      logic c [NL];
      logic [W-1:0] s [NL];
      for (int v = 0; v < NL; v++) g[0][0][v] = rnd_node(v, 300);
      for (int v = 0; v < NL; v++) if (g[0][0][v].hop_pred) g[0][0][v - int'(g[0][0][v].hop_dist)].hop_src = 1;
      for (int v = 0; v < NL; v++) send(2, 0, 2'd0, 16'(v), 128'(32'(g[0][0][v])));
      send(2, 0, 2'd1, 16'd0, 128'({1'b0, 1'b1, 14'(NL), 10'd20, 6'd0}));
      for (int w = 0; w < 32; w++) for (int b = 0; b < 4; b++) begin
        lmask[w][b] = '1;
        if ($urandom_range(0, 1) == 0) lmask[w][b][$urandom_range(0, W - 1)] = 1'b0;
        send(0, 0, 2'd2, 16'({4'(((w % 16) / 2)), 1'(w / 16), 2'(b), 1'(w % 2)}), lmask[w][b]);
      end
      drain_channels();
      exp_best = 0;
      for (int v = 0; v < NL; v++) c[v] = 1'b1;
      for (int w = 0; w < 20; w++)
        for (int v = 0; v < NL; v++) begin
          logic [W-1:0] dd;
          node_rec_t r;
          r = g[0][0][v]; dd = '0;
          if (r.self_pred) dd |= s[v-1];
          if (r.hop_pred) dd |= s[v - int'(r.hop_dist)];
          s[v] = {dd[W-2:0], c[v]} & lmask[w][r.base];
          c[v] = s[v][W-1];
          if (s[v] != 0 && w * W + msb(s[v]) + 1 > exp_best) exp_best = w * W + msb(s[v]) + 1;
        end
      p0 = tt_pass_count[0];
      @(negedge clk); tt_start = 4'b0001; @(negedge clk); tt_start = '0;
      n_mode_switch++;
      wait (tt_busy == '0); @(negedge clk);
      n_long_pass = tt_pass_count[0] - p0;
      checks++; if (tt_best_long[0] != 16'(exp_best)) begin failures++; $display("long best %0d exp %0d", tt_best_long[0], exp_best); end
      checks++; if (n_long_pass != 2) begin failures++; $display("long passes %0d", n_long_pass); end
    end

    // ================= mechanism coverage =================
    begin
      int stalls, hops;
      stalls = 0; hops = 0;
      for (int u = 0; u < NPU; u++) begin stalls += tt_stall_cycles[u]; hops += tt_hop_count[u]; end
      $display("mechanisms: pruned %0d skipped %0d written %0d bursts %0d mp_updates %0d stalls %0d hops %0d passes(long) %0d mode_switch %0d ring_hops %0d local %0d remote %0d",
               fw_rows_pruned, fw_writes_skipped, fw_rows_written, fw_bursts, mp_updates, stalls, hops,
               n_long_pass, n_mode_switch, tt_ring_hops, n_local, n_remote);
      checks++; if (fw_rows_pruned == 0)    begin failures++; $display("never pruned a row"); end
      checks++; if (fw_writes_skipped == 0) begin failures++; $display("never skipped a write"); end
      checks++; if (fw_rows_written == 0)   begin failures++; $display("never wrote a row"); end
      checks++; if (fw_bursts == 0)         begin failures++; $display("no DMA burst"); end
      checks++; if (mp_updates == 0)        begin failures++; $display("no MP update"); end
      checks++; if (stalls == 0)            begin failures++; $display("no stall"); end
      checks++; if (hops == 0)              begin failures++; $display("no Hop read"); end
      checks++; if (n_long_pass < 2)        begin failures++; $display("no multi-pass run"); end
      checks++; if (n_mode_switch == 0)     begin failures++; $display("no mode switch"); end
      checks++; if (tt_ring_hops == 0 || n_remote == 0) begin failures++; $display("no ring transfer"); end
      checks++; if (n_local == 0)           begin failures++; $display("no local delivery"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
