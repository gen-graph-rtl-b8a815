// traversal_pe: processing element of the traversal tile.
//
// Each PE applies the windowed bit-parallel S2G update to one graph node per
// cycle for two 128-bit query windows (dual BPLU). Node records stream down
// the PE chain together with the inter-window carry, so the PE next in the
// chain works on the next two windows of the same node one cycle later.
//
// Two pipeline stages:
//   A  the node token (and its carry-in) is registered; if the node has a
//      non-adjacent predecessor the PE requests its state from the shared
//      SRAM (Hop path).
//   B  the operand D_in is formed: the Self path (state of node v-1 held in
//      the stream register file) OR-ed with the Hop data; the dual BPLU
//      computes the new state with the match mask of the node's base from the
//      pattern buffer; the state is written back to the stream registers, to
//      the shared SRAM if a later node hops to it (hop_src), a 2-bit
//      direction code is logged in the traceback memory and the best score
//      is updated. Token and carry-out go to the next PE.
// A global stall (shared-SRAM bank conflict anywhere in the PU) freezes both
// stages; a request that was already served keeps its data in hold
// registers. Shared-SRAM address of node u's state for this PE:
// {PE id, u[6:0]}, so a Hop reaches back at most 127 nodes and at least 2.
// Score of a non-zero state = window index * 128 + highest set bit + 1
// (length of the longest matched query prefix). Mode long: the BPLU pair is
// chained (windows 2p and 2p+1 of one read). Mode short: the high BPLU gets
// the constant carry 1 and runs a second, independent read.
// From the paper: the dual BPLU, the carry MUX, SRF/PB/TBM tiers, the
// Self/Hop/Neighbor/Replay input MUX and the algorithm. This design's own:
// the two-stage pipeline, the stall handshake, address and score encodings.
module traversal_pe
  import gg_pkg::*;
#(
  parameter int unsigned W       = 128,
  parameter int unsigned PE_ID   = 0,
  parameter int unsigned SADDR_W = 13,     // shared SRAM address width
  parameter int unsigned TB_DEPTH = 16384
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                job_clr,     // new job: clear scores and traceback log
  input  logic                pass_clr,    // new pass over the graph: clear Self state
  input  logic                stall,
  input  map_mode_e           mode,
  input  logic [9:0]          win_lo,      // query window index of the low BPLU
  input  logic [1:0]          win_ok,      // {high, low} window lies inside the query
  input  logic                pb_bank,     // pattern-buffer bank in use
  // chain input (from scratchpad or previous PE)
  input  node_tok_t           tok_in,
  input  logic                cin_in,
  input  logic [2*W-1:0]      neighbor_vec,
  // chain output
  output node_tok_t           tok_out,
  output logic                cout_out,
  output logic [2*W-1:0]      state_out,
  // pattern buffer load
  input  logic                pb_we,
  input  logic                pb_wbank,
  input  logic [1:0]          pb_wbase,
  input  logic                pb_whalf,
  input  logic [W-1:0]        pb_wdata,
  // shared SRAM, Hop read (stage A) and state write (stage B)
  output logic                rd_req,
  output logic [SADDR_W-1:0]  rd_addr,
  input  logic                rd_done,     // served this cycle or earlier in this stall
  input  logic                rd_valid,    // read data returned this cycle
  input  logic [2*W-1:0]      rd_data,
  output logic                wr_req,
  output logic [SADDR_W-1:0]  wr_addr,
  output logic [2*W-1:0]      wr_data,
  // traceback replay and results
  input  logic [$clog2(TB_DEPTH)-1:0] replay_off,
  output logic [1:0]          replay_code,
  output logic [15:0]         score_lo,
  output logic [15:0]         score_hi,
  output logic                hop_used     // a Hop operand was consumed this cycle
);
  localparam int unsigned IW = $clog2(W);

  // ---------------- stage A ----------------
  node_tok_t tok_a;
  logic      cin_a;
  node_tok_t tok_b;
  logic      cin_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_a <= '0; cin_a <= 1'b0;
      tok_b <= '0; cin_b <= 1'b0;
    end else if (pass_clr || job_clr) begin
      tok_a <= '0; tok_b <= '0;
    end else if (!stall) begin
      tok_a <= tok_in;  cin_a <= cin_in;
      tok_b <= tok_a;   cin_b <= cin_a;
    end
  end

  logic [6:0] hop_node;
  assign hop_node = tok_a.node[6:0] - tok_a.rec.hop_dist;
  assign rd_req   = tok_a.valid && tok_a.rec.hop_pred;
  assign rd_addr  = SADDR_W'({6'(PE_ID), hop_node});

  // Ownership of returning read data: it belongs to the node that issued
  // it, which is in stage B if it advanced in the grant cycle, else in A.
  logic          rd_adv_q;       // the request granted last cycle advanced A->B
  logic [2*W-1:0] hold_a, hold_b;
  logic          adv;
  assign adv = !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_adv_q <= 1'b0;
    else        rd_adv_q <= rd_req && rd_done && adv;
  end

  always_ff @(posedge clk) begin
    if (rd_valid && !rd_adv_q) hold_a <= rd_data;
    if (adv)
      hold_b <= (rd_valid && !rd_adv_q) ? rd_data : hold_a;
    else if (rd_valid && rd_adv_q)
      hold_b <= rd_data;
  end

  // ---------------- stage B ----------------
  logic [2:0][W-1:0] srf;
  logic [2*W-1:0]    prev_state, hop_b, mux_out, d_in, mask, s_new;
  logic              c_out, c_out_lo;
  logic [1:0]        nz;
  logic [IW-1:0]     msb_lo, msb_hi;
  pe_src_e           sel;

  assign prev_state = {srf[1], srf[0]};
  assign hop_b      = (rd_valid && rd_adv_q) ? rd_data : hold_b;

  // Input MUX: Hop when the node has a non-adjacent predecessor, Self when
  // only node v-1 precedes it.
  assign sel = tok_b.rec.hop_pred ? SRC_HOP : SRC_SELF;

  pe_input_mux #(.W(2*W)) u_mux (
    .sel(sel), .self_in(prev_state), .replay_in({{(2*W-2){1'b0}}, replay_code}),
    .hop_in(hop_b), .neighbor_in(neighbor_vec), .dout(mux_out));

  always_comb begin
    d_in = '0;
    if (tok_b.rec.hop_pred)  d_in = mux_out | (tok_b.rec.self_pred ? prev_state : '0);
    else if (tok_b.rec.self_pred) d_in = mux_out;
  end

  pattern_buffer #(.W(W)) u_pb (
    .clk, .we(pb_we), .wbank(pb_wbank), .wbase(pb_wbase), .whalf(pb_whalf), .wdata(pb_wdata),
    .rbank(pb_bank), .rbase(tok_b.rec.base), .rmask(mask));

  dual_bplu #(.W(W)) u_bplu (
    .mode, .d_in, .c_in_lo(cin_b), .const_c(1'b1), .mask, .s_new, .c_out, .c_out_lo,
    .nonzero(nz), .msb_lo, .msb_hi);

  logic fire;  // stage B holds a node and the pipeline advances
  assign fire = tok_b.valid && adv;

  stream_regfile #(.W(W), .ENTRIES(3)) u_srf (
    .clk, .rst_n, .clr(pass_clr || job_clr),
    .we_pair(fire), .wdata_pair(s_new),
    .we(fire && tok_b.rec.hop_pred), .waddr(2'd2), .wdata(hop_b[W-1:0]),
    .rdata(srf));

  assign wr_req  = tok_b.valid && tok_b.rec.hop_src;
  assign wr_addr = SADDR_W'({6'(PE_ID), tok_b.node[6:0]});
  assign wr_data = s_new;
  assign hop_used = fire && tok_b.rec.hop_pred;

  traceback_memory #(.DEPTH(TB_DEPTH), .CODE_W(2)) u_tbm (
    .clk, .rst_n, .clr(job_clr), .log_we(fire),
    .log_code({tok_b.rec.hop_pred && (|hop_b), tok_b.rec.self_pred && (|prev_state)}),
    .replay_off, .replay_code, .fill());

  // Score logging.
  logic [15:0] cand_lo, cand_hi;
  assign cand_lo = {win_lo, 6'd0} * 16'd2 + 16'(msb_lo) + 16'd1;
  assign cand_hi = (mode == MODE_LONG) ? ({win_lo, 6'd0} * 16'd2 + 16'(W) + 16'(msb_hi) + 16'd1)
                                       : (16'(msb_hi) + 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      score_lo <= '0; score_hi <= '0;
      tok_out <= '0; cout_out <= 1'b0; state_out <= '0;
    end else if (job_clr) begin
      score_lo <= '0; score_hi <= '0;
      tok_out <= '0; cout_out <= 1'b0;
    end else if (pass_clr) begin
      tok_out <= '0;
    end else if (adv) begin
      tok_out   <= tok_b;
      cout_out  <= c_out;
      state_out <= s_new;
      if (tok_b.valid && win_ok[0] && nz[0] && cand_lo > score_lo) score_lo <= cand_lo;
      if (tok_b.valid && win_ok[1] && nz[1] && cand_hi > score_hi) score_hi <= cand_hi;
    end
  end

  // The Self path covers distance 1; a Hop must reach back 2..127 nodes.
  a_hop_range: assert property (@(posedge clk) disable iff (!rst_n)
    (tok_a.valid && tok_a.rec.hop_pred) |-> (tok_a.rec.hop_dist >= 7'd2));
endmodule
