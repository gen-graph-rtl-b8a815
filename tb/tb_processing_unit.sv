// tb_processing_unit: runs a reduced processing unit (8 PEs in 2 groups of
// 4, 4096-word scratchpad, 1024-entry shared SRAM in 32 banks) through two
// programs from its instruction buffer and checks them against an
// Algorithm-3 reference computed here.
//  1. Short-read mode: each 4-PE group streams its own 40-node graph slice;
//     every PE aligns two independent 128-bp reads (low and high BPLU) and
//     its two scores must equal the reference's longest matched prefix.
//  2. Long-read mode (mode switch): one 20-window read (2560 bp) over a
//     2200-node graph on the full 8-PE chain: 16 windows per pass, so two
//     passes, the second taking its first carries from the carry FIFO and
//     its masks from pattern-buffer bank 1; best_long must equal the
//     reference score over all 20 windows. Windows 20..31 get random masks
//     and must not count.
// Also checked: job_done pulses, pass and Hop counters, and that shared-SRAM
// bank conflicts stalled the unit at least once.
module tb_processing_unit;
  import gg_pkg::*;
  localparam int W = 128, NPE = 8, GROUP = 4, SPW = 4096, NG = NPE / GROUP, NL = 2200;
  localparam int SLICE = SPW / NG;
  logic clk = 0, rst_n = 0;
  logic ib_we = 0, sp_we = 0, pb_we = 0, pb_wbank = 0, pb_whalf = 0, start = 0;
  logic [3:0] ib_waddr = 0;
  logic [31:0] ib_wdata = 0, sp_wdata = 0;
  logic [11:0] sp_waddr = 0;
  logic [2:0] pb_pe = 0, replay_pe = 0;
  logic [1:0] pb_wbase = 0, replay_code;
  logic [W-1:0] pb_wdata = '0;
  logic busy, job_done;
  logic [NPE-1:0][15:0] score_lo, score_hi;
  logic [15:0] best_long;
  logic [7:0] replay_off = 0;
  logic [31:0] stall_cycles, hop_count, pass_count;

  processing_unit #(.W(W), .NPE(NPE), .GROUP(GROUP), .SP_WORDS(SPW), .SH_ENTRIES(1024),
                    .SH_BANKS(32), .IB_WORDS(16), .TB_DEPTH(256), .FIFO_DEPTH(4096)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, ndone = 0;
  always @(posedge clk) if (rst_n && job_done) ndone++;
  initial begin #50_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  node_rec_t g [NG][SLICE];
  logic [W-1:0] masks [32][4];        // [window or read][base]

  function automatic int msb(logic [W-1:0] v);
    int m; m = -1;
    for (int i = 0; i < W; i++) if (v[i]) m = i;
    return m;
  endfunction

  task automatic make_graph(input int gi, input int nn, input int brk);
    for (int v = 0; v < nn; v++) begin
      g[gi][v] = '0;
      g[gi][v].base = 2'($urandom);
      g[gi][v].self_pred = (v > 0) && ($urandom_range(0, brk) != 0);
      if (v >= 2 && $urandom_range(0, 2) == 0) begin
        g[gi][v].hop_pred = 1;
        g[gi][v].hop_dist = 7'($urandom_range(2, (v < 30) ? v : 30));
        g[gi][v - int'(g[gi][v].hop_dist)].hop_src = 1;
      end
      g[gi][v].last = (v == nn - 1);
    end
  endtask

  // one window over a graph with a per-node carry-in vector; returns states
  task automatic ref_window(input int gi, input int nn, input logic [W-1:0] m [4],
                            input logic cin [SLICE], output logic [W-1:0] s [SLICE]);
    for (int v = 0; v < nn; v++) begin
      logic [W-1:0] d;
      d = '0;
      if (g[gi][v].self_pred) d |= s[v-1];
      if (g[gi][v].hop_pred) d |= s[v - int'(g[gi][v].hop_dist)];
      s[v] = {d[W-2:0], cin[v]} & m[g[gi][v].base];
    end
  endtask

  function automatic logic [W-1:0] rmask();
    logic [W-1:0] r;
    for (int k = 0; k < W / 32; k++) r[k*32 +: 32] = $urandom | $urandom | $urandom;
    return r;
  endfunction

  task automatic load_pb(input int pe, input int bank, input int half, input logic [W-1:0] m [4]);
    for (int b = 0; b < 4; b++) begin
      @(negedge clk); pb_we = 1; pb_pe = 3'(pe); pb_wbank = 1'(bank); pb_wbase = 2'(b); pb_whalf = 1'(half); pb_wdata = m[b];
    end
    @(negedge clk); pb_we = 0;
  endtask

  task automatic run_prog(input logic [31:0] job);
    @(negedge clk); ib_we = 1; ib_waddr = 0; ib_wdata = job;
    @(negedge clk); ib_waddr = 1; ib_wdata = 32'h8000_0000;   // halt
    @(negedge clk); ib_we = 0; start = 1;
    @(negedge clk); start = 0;
    wait (!busy); @(negedge clk);
  endtask

  initial begin
    logic cin1 [SLICE];
    logic [W-1:0] s [SLICE], m4 [4];
    int hops0, p0, h0, nd0, exp_best, nhop_long;
    for (int v = 0; v < SLICE; v++) cin1[v] = 1'b1;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---------------- program 1: short reads ----------------
    for (int gi = 0; gi < NG; gi++) begin
      make_graph(gi, 40, 5);
      for (int v = 0; v < 40; v++) begin
        @(negedge clk); sp_we = 1; sp_waddr = 12'(gi * SLICE + v); sp_wdata = 32'(g[gi][v]);
      end
    end
    @(negedge clk); sp_we = 0;
    hops0 = 0;
    for (int gi = 0; gi < NG; gi++) for (int v = 0; v < 40; v++) if (g[gi][v].hop_pred) hops0 += GROUP;
    for (int p = 0; p < NPE; p++) for (int h = 0; h < 2; h++) begin
      for (int b = 0; b < 4; b++) m4[b] = rmask();
      masks[2 * p + h] = m4;
      load_pb(p, 0, h, m4);
    end
    run_prog({1'b0, 1'b0, 14'd40, 10'd1, 6'd0});
    for (int p = 0; p < NPE; p++) for (int h = 0; h < 2; h++) begin
      int best;
      ref_window(p / GROUP, 40, masks[2 * p + h], cin1, s);
      best = 0;
      for (int v = 0; v < 40; v++) if (s[v] != 0 && msb(s[v]) + 1 > best) best = msb(s[v]) + 1;
      checks++;
      if ((h == 0 ? score_lo[p] : score_hi[p]) != 16'(best)) begin
        failures++; $display("short PE %0d half %0d score %0d exp %0d", p, h, h == 0 ? score_lo[p] : score_hi[p], best);
      end
    end
    checks++; if (hop_count != 32'(hops0)) begin failures++; $display("short hops %0d exp %0d", hop_count, hops0); end
    checks++; if (pass_count != 1 || ndone != 1) begin failures++; $display("short pass/done %0d %0d", pass_count, ndone); end
    p0 = pass_count; h0 = hop_count; nd0 = ndone;

    // ---------------- program 2: one long read, two passes ----------------
    // long mode reads the graph of slice 0 through port 0 (global addresses)
    make_graph(0, NL, 300);
    for (int v = 0; v < NL; v++) begin
      @(negedge clk); sp_we = 1; sp_waddr = 12'(v); sp_wdata = 32'(g[0][v]);
    end
    @(negedge clk); sp_we = 0;
    nhop_long = 0;
    for (int v = 0; v < NL; v++) if (g[0][v].hop_pred) nhop_long++;
    // near-full masks so that matches run across window borders
    for (int w = 0; w < 32; w++) begin
      for (int b = 0; b < 4; b++) begin
        m4[b] = '1;
        if ($urandom_range(0, 1) == 0) m4[b][$urandom_range(0, W - 1)] = 1'b0;
      end
      masks[w] = m4;
      load_pb((w % 16) / 2, w / 16, w % 2, m4);
    end
    begin
      logic c [SLICE];
      exp_best = 0;
      for (int v = 0; v < SLICE; v++) c[v] = 1'b1;
      for (int w = 0; w < 20; w++) begin
        ref_window(0, NL, masks[w], c, s);
        for (int v = 0; v < NL; v++) begin
          if (s[v] != 0 && w * W + msb(s[v]) + 1 > exp_best) exp_best = w * W + msb(s[v]) + 1;
          c[v] = s[v][W-1];
        end
      end
    end
    run_prog({1'b0, 1'b1, 14'(NL), 10'd20, 6'd0});
    checks++; if (exp_best <= 16 * W) begin failures++; $display("test too weak: best %0d", exp_best); end
    checks++; if (best_long != 16'(exp_best)) begin failures++; $display("long best %0d exp %0d", best_long, exp_best); end
    checks++; if (pass_count - p0 != 2 || ndone - nd0 != 1) begin failures++; $display("long passes %0d", pass_count - p0); end
    checks++; if (hop_count - h0 != 32'(nhop_long * NPE * 2)) begin failures++; $display("long hops %0d exp %0d", hop_count - h0, nhop_long * NPE * 2); end
    checks++; if (stall_cycles == 0) begin failures++; $display("no stall happened"); end
    $display("stall cycles %0d, best_long %0d", stall_cycles, best_long);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
