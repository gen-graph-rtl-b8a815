// tb_traversal_tile: checks the traversal tile at 4 processing units of 8
// PEs. All loading goes through the HBM channel ports as 146-bit packets
// ([145:144] target: 0 scratchpad, 1 instruction buffer, 2 pattern buffer;
// [143:128] address; [127:0] data). Each PU's graph and program arrive over
// the ring from the neighbouring channel, its match masks come on its own
// channel (local delivery, no ring hop). Every PU then runs a short-read job
// on its own graph; every PE's two scores, read back through the score
// port, must equal the reference alignment computed here. The ring hop
// counter must equal the sum of ring distances of the remote packets.
module tb_traversal_tile;
  import gg_pkg::*;
  localparam int W = 128, NPU = 4, NPE = 8, GROUP = 4, NG = NPE / GROUP, NN = 30;
  logic clk = 0, rst_n = 0;
  logic [NPU-1:0] ch_valid = '0, ch_ready, start = '0, busy, job_done;
  logic [NPU-1:0][1:0] ch_dst = '0;
  logic [NPU-1:0][145:0] ch_payload = '0;
  logic [NPU-1:0][15:0] best_long;
  logic [1:0] rd_pu = 0;
  logic [2:0] rd_pe = 0;
  logic [15:0] rd_score_lo, rd_score_hi;
  logic [7:0] replay_off = 0;
  logic [1:0] replay_code;
  logic [NPU-1:0][31:0] stall_cycles, hop_count, pass_count;
  logic [31:0] ring_hops;

  traversal_tile #(.NPU(NPU), .NPE(NPE), .TB_DEPTH(256)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, exp_hops = 0;
  initial begin #50_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  typedef struct { logic [1:0] dst; logic [145:0] pl; } pkt_t;
  pkt_t q [NPU][$];
  node_rec_t g [NPU][NG][NN];
  logic [W-1:0] masks [NPU][NPE][2][4];

  // channel drivers: one packet at a time per channel, held until accepted
  for (genvar c = 0; c < NPU; c++) begin : g_drv
    bit acc = 0;
    always @(posedge clk) acc = ch_valid[c] && ch_ready[c];   // pre-edge values
    always @(negedge clk) if (rst_n) begin
      if (acc) void'(q[c].pop_front());
      #1;
      if (q[c].size() > 0) begin ch_valid[c] = 1; ch_dst[c] = q[c][0].dst; ch_payload[c] = q[c][0].pl; end
      else ch_valid[c] = 0;
    end
  end

  function automatic int msb(logic [W-1:0] v);
    int m; m = -1;
    for (int i = 0; i < W; i++) if (v[i]) m = i;
    return m;
  endfunction

  function automatic void send(int ch, int dst, logic [1:0] tgt, logic [15:0] addr, logic [127:0] data);
    pkt_t p;
    p.dst = 2'(dst); p.pl = {tgt, addr, data};
    q[ch].push_back(p);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < NPU; u++) begin
      int src;
      src = (u + 1) % NPU;
      for (int gi = 0; gi < NG; gi++) for (int v = 0; v < NN; v++) begin
        node_rec_t r;
        r = '0;
        r.base = 2'($urandom);
        r.self_pred = (v > 0) && ($urandom_range(0, 5) != 0);
        if (v >= 2 && $urandom_range(0, 2) == 0) begin
          r.hop_pred = 1; r.hop_dist = 7'($urandom_range(2, v));
          g[u][gi][v - int'(r.hop_dist)].hop_src = 1;
        end
        g[u][gi][v] = r;
      end
      for (int gi = 0; gi < NG; gi++) for (int v = 0; v < NN; v++) begin
        // scratchpad slice of group gi starts at gi * 8192 / (NPE/GROUP)
        send(src, u, 2'd0, 16'(gi * (8192 / NG) + v), 128'(32'(g[u][gi][v])));
        exp_hops += (u - src + NPU) % NPU;
      end
      send(src, u, 2'd1, 16'd0, 128'({1'b0, 1'b0, 14'(NN), 10'd1, 6'd0}));
      send(src, u, 2'd1, 16'd1, 128'(32'h8000_0000));
      exp_hops += 2 * ((u - src + NPU) % NPU);
      for (int p = 0; p < NPE; p++) for (int h = 0; h < 2; h++) for (int b = 0; b < 4; b++) begin
        for (int k = 0; k < W / 32; k++) masks[u][p][h][b][k*32 +: 32] = $urandom | $urandom | $urandom;
        send(u, u, 2'd2, 16'({p[11:0], 1'b0, b[1:0], h[0]}), masks[u][p][h][b]);
      end
    end
    wait (q[0].size() == 0 && q[1].size() == 0 && q[2].size() == 0 && q[3].size() == 0);
    repeat (2 * NPU + 4) @(negedge clk);
    start = '1; @(negedge clk); start = '0;
    wait (busy == '0); @(negedge clk);
    for (int u = 0; u < NPU; u++) for (int p = 0; p < NPE; p++) begin
      int best [2];
      for (int h = 0; h < 2; h++) begin
        logic [W-1:0] s [NN];
        best[h] = 0;
        for (int v = 0; v < NN; v++) begin
          logic [W-1:0] d;
          d = '0;
          if (g[u][p / GROUP][v].self_pred) d |= s[v-1];
          if (g[u][p / GROUP][v].hop_pred) d |= s[v - int'(g[u][p / GROUP][v].hop_dist)];
          s[v] = {d[W-2:0], 1'b1} & masks[u][p][h][g[u][p / GROUP][v].base];
          if (s[v] != 0 && msb(s[v]) + 1 > best[h]) best[h] = msb(s[v]) + 1;
        end
      end
      rd_pu = 2'(u); rd_pe = 3'(p); #1;
      checks++;
      if (rd_score_lo != 16'(best[0]) || rd_score_hi != 16'(best[1])) begin
        failures++; $display("PU %0d PE %0d scores %0d %0d exp %0d %0d", u, p, rd_score_lo, rd_score_hi, best[0], best[1]);
      end
    end
    checks++; if (ring_hops != 32'(exp_hops)) begin failures++; $display("ring hops %0d exp %0d", ring_hops, exp_hops); end
    for (int u = 0; u < NPU; u++) begin checks++; if (pass_count[u] != 1) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
