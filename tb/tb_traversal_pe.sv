// tb_traversal_pe: checks one traversal PE in long mode on windows 0 and 1 of
// a read (256 query bits). The testbench plays the rest of the processing
// unit: it streams a random graph of 90 node records (base, Self and Hop
// predecessors with hop distances 2..40, hop sources marked), and models the
// shared SRAM with random, delayed grants, so the PE sees stalls while its
// Hop reads and state writes wait. Checked against Algorithm-3 style
// reference states computed here:
//  * every node leaves the PE exactly once, in order, with the right 256-bit
//    state and carry-out (MSB of the high window);
//  * score_lo / score_hi (longest matched prefix in window 0 / 1);
//  * one hop_used pulse per node with a Hop predecessor;
//  * traceback codes read back through the replay port.
module tb_traversal_pe;
  import gg_pkg::*;
  localparam int W = 128, NN = 90, TB_DEP = 256;
  logic clk = 0, rst_n = 0, job_clr = 0, pass_clr = 0, stall;
  map_mode_e mode = MODE_LONG;
  logic [9:0] win_lo = '0;
  logic [1:0] win_ok = 2'b11;
  logic pb_bank = 0;
  node_tok_t tok_in, tok_out;
  logic cin_in = 1, cout_out;
  logic [2*W-1:0] neighbor_vec = '0, state_out, rd_data, wr_data;
  logic pb_we = 0, pb_wbank = 0, pb_whalf = 0;
  logic [1:0] pb_wbase = 0;
  logic [W-1:0] pb_wdata = '0;
  logic rd_req, rd_done, rd_valid, wr_req, hop_used;
  logic [12:0] rd_addr, wr_addr;
  logic [7:0] replay_off = 0;
  logic [1:0] replay_code;
  logic [15:0] score_lo, score_hi;

  traversal_pe #(.W(W), .PE_ID(0), .SADDR_W(13), .TB_DEPTH(TB_DEP)) dut (.*);
  always #5 clk = ~clk;

  // ---- shared SRAM model with random grants ----
  logic [2*W-1:0] mem [8192];
  logic g_rd = 0, g_wr = 0, rd_srv = 0, wr_srv = 0, rd_gnt, wr_gnt;
  assign rd_gnt  = rd_req && !rd_srv && g_rd;
  assign wr_gnt  = wr_req && !wr_srv && g_wr;
  assign stall   = (rd_req && !rd_srv && !rd_gnt) || (wr_req && !wr_srv && !wr_gnt);
  assign rd_done = rd_srv || rd_gnt;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rd_valid <= 0; rd_srv <= 0; wr_srv <= 0; end
    else begin
      rd_valid <= rd_gnt;
      if (rd_gnt) rd_data <= mem[rd_addr];
      if (wr_gnt) mem[wr_addr] <= wr_data;
      rd_srv <= stall ? (rd_srv | rd_gnt) : 1'b0;
      wr_srv <= stall ? (wr_srv | wr_gnt) : 1'b0;
    end
  end

  node_rec_t rec [NN];
  logic [W-1:0] pm [2][4];           // [half][base]
  logic [2*W-1:0] S [NN];
  logic [1:0] code [NN];
  int checks = 0, failures = 0, nhop = 0, nhop_seen = 0, nout = 0, nstall = 0;
  int exp_lo = 0, exp_hi = 0;

  initial begin #20_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int msb(logic [W-1:0] v);
    int m; m = -1;
    for (int i = 0; i < W; i++) if (v[i]) m = i;
    return m;
  endfunction

  initial begin
    // graph and patterns
    for (int v = 0; v < NN; v++) begin
      rec[v] = '0;
      rec[v].base = 2'($urandom);
      rec[v].self_pred = (v > 0) && ($urandom_range(0, 5) != 0);
      if (v >= 2 && $urandom_range(0, 2) == 0) begin
        rec[v].hop_pred = 1;
        rec[v].hop_dist = 7'($urandom_range(2, (v < 40) ? v : 40));
        rec[v - int'(rec[v].hop_dist)].hop_src = 1;
        nhop++;
      end
    end
    for (int h = 0; h < 2; h++) for (int b = 0; b < 4; b++)
      for (int k = 0; k < W / 32; k++) pm[h][b][k*32 +: 32] = $urandom | $urandom | $urandom;
    // reference (Algorithm 3 on two chained windows)
    for (int v = 0; v < NN; v++) begin
      logic [2*W-1:0] d, s;
      logic pv_nz, hp_nz;
      d = '0; pv_nz = 0; hp_nz = 0;
      if (rec[v].self_pred) begin d |= S[v-1]; pv_nz = (S[v-1] != 0); end
      if (rec[v].hop_pred) begin d |= S[v - int'(rec[v].hop_dist)]; hp_nz = (S[v - int'(rec[v].hop_dist)] != 0); end
      s[W-1:0]   = ({d[W-2:0], 1'b1}) & pm[0][rec[v].base];
      s[2*W-1:W] = ({d[2*W-2:W], s[W-1]}) & pm[1][rec[v].base];
      S[v] = s;
      code[v] = {rec[v].hop_pred && hp_nz, rec[v].self_pred && pv_nz};
      if (s[W-1:0] != 0 && msb(s[W-1:0]) + 1 > exp_lo) exp_lo = msb(s[W-1:0]) + 1;
      if (s[2*W-1:W] != 0 && W + msb(s[2*W-1:W]) + 1 > exp_hi) exp_hi = W + msb(s[2*W-1:W]) + 1;
    end
    tok_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < 2; h++) for (int b = 0; b < 4; b++) begin
      @(negedge clk); pb_we = 1; pb_wbank = 0; pb_wbase = 2'(b); pb_whalf = 1'(h); pb_wdata = pm[h][b];
    end
    @(negedge clk); pb_we = 0; job_clr = 1;
    @(negedge clk); job_clr = 0;
    begin
      int idx, prev_ok;
      idx = 0; prev_ok = 0;
      for (int cyc = 0; cyc < 4000 && nout < NN; cyc++) begin
        @(negedge clk);
        // output of the previous advance
        if (prev_ok && tok_out.valid) begin
          int v;
          v = int'(tok_out.node);
          checks++;
          if (v != nout || state_out !== S[v] || cout_out !== S[v][2*W-1]) begin
            failures++; $display("node %0d (exp %0d) state/carry wrong", v, nout);
          end
          nout++;
        end
        g_rd = ($urandom_range(0, 2) != 0); g_wr = ($urandom_range(0, 2) != 0);
        if (idx < NN) tok_in = '{valid: 1'b1, node: 14'(idx), rec: rec[idx]}; else tok_in = '0;
        #1;
        if (hop_used) nhop_seen++;
        if (stall) nstall++;
        prev_ok = !stall;
        if (!stall && idx < NN) idx++;
      end
    end
    checks++; if (nout != NN) begin failures++; $display("only %0d nodes out", nout); end
    checks++; if (score_lo != 16'(exp_lo) || score_hi != 16'(exp_hi)) begin
      failures++; $display("scores %0d %0d exp %0d %0d", score_lo, score_hi, exp_lo, exp_hi);
    end
    checks++; if (nhop_seen != nhop) begin failures++; $display("hops %0d exp %0d", nhop_seen, nhop); end
    checks++; if (nstall == 0) failures++;
    for (int k = 0; k < 40; k++) begin
      @(negedge clk); replay_off = 8'(k);
      @(negedge clk);
      checks++; if (replay_code !== code[NN - 1 - k]) begin failures++; $display("replay %0d wrong", k); end
    end
    $display("stalls %0d hops %0d", nstall, nhop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
