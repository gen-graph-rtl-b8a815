// processing_unit: one traversal-tile PU, attached to one HBM channel.
//
// Contents (paper): 64 PEs, a 32 KB input scratchpad, a 256 KB shared banked
// SRAM, a 1 KB instruction buffer and a controller; the PEs form 16 groups of
// 4 for short reads or one 64-PE pipeline for long reads, each chain closed
// by a FIFO.
//
// Operation. The host side fills the scratchpad with node records
// (gg_pkg::node_rec_t, topological order), the PEs' pattern buffers with
// match masks and the instruction buffer with job words, then pulses start.
// The controller executes job words from address 0 until one has the halt
// bit:  [31] halt  [30] mode (1 = long)  [29:16] number of nodes
//       [15:6] number of 128-bit query windows (long mode)  [5:0] unused.
//  * Short mode: group g streams the records of scratchpad slice g (at most
//    512 nodes) through PEs 4g..4g+3. Every PE aligns two reads of up to
//    128 bases (low and high BPLU) against that subgraph: 128 reads per job.
//  * Long mode: PE 0 streams the records of the whole scratchpad (at most
//    8192 nodes) through all 64 PEs; PE p evaluates windows 2p and 2p+1 of
//    the read, the carry passing PE to PE. A read with more than 128 windows
//    takes several passes; the last PE pushes its carries into the FIFO and
//    PE 0 pops them on the next pass, which uses the other pattern-buffer
//    bank (bank = pass number mod 2).
// One node enters a chain per cycle. Any shared-SRAM bank conflict stalls the
// whole PU for a cycle; requests already served are not repeated.
// Results: per-PE best scores (score_lo/score_hi) and, in long mode,
// best_long = the best score over all PEs (windows beyond the read are kept
// out of the PE scores by their win_ok flags).
// The job-word layout, the stall policy and the use of the dual BPLU for two
// short reads are this design's choices.
module processing_unit
  import gg_pkg::*;
#(
  parameter int unsigned W         = 128,
  parameter int unsigned NPE       = 64,
  parameter int unsigned GROUP     = 4,
  parameter int unsigned SP_WORDS  = 8192,   // 32 KB
  parameter int unsigned SH_ENTRIES = 8192,  // 256 KB of 256-bit states
  parameter int unsigned SH_BANKS  = 32,
  parameter int unsigned IB_WORDS  = 256,    // 1 KB
  parameter int unsigned TB_DEPTH  = 16384,  // 4 KB of 2-bit codes
  parameter int unsigned FIFO_DEPTH = 8192
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // host / channel side loading
  input  logic                           ib_we,
  input  logic [$clog2(IB_WORDS)-1:0]    ib_waddr,
  input  logic [31:0]                    ib_wdata,
  input  logic                           sp_we,
  input  logic [$clog2(SP_WORDS)-1:0]    sp_waddr,
  input  logic [31:0]                    sp_wdata,
  input  logic                           pb_we,
  input  logic [$clog2(NPE)-1:0]         pb_pe,
  input  logic                           pb_wbank,
  input  logic [1:0]                     pb_wbase,
  input  logic                           pb_whalf,
  input  logic [W-1:0]                   pb_wdata,
  input  logic                           start,
  output logic                           busy,
  output logic                           job_done,      // pulse per finished job
  // results
  output logic [NPE-1:0][15:0]           score_lo,
  output logic [NPE-1:0][15:0]           score_hi,
  output logic [15:0]                    best_long,
  input  logic [$clog2(NPE)-1:0]         replay_pe,
  input  logic [$clog2(TB_DEPTH)-1:0]    replay_off,
  output logic [1:0]                     replay_code,
  // activity counters
  output logic [31:0]                    stall_cycles,
  output logic [31:0]                    hop_count,
  output logic [31:0]                    pass_count
);
  localparam int unsigned NGROUPS = NPE / GROUP;
  localparam int unsigned SPAW    = $clog2(SP_WORDS);
  localparam int unsigned SHAW    = $clog2(SH_ENTRIES);
  localparam int unsigned NPORTS  = 2 * NPE;
  localparam int unsigned WPP     = 2 * NPE;   // windows per pass (long mode)

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_RUN, S_DRAIN, S_NEXT} st_e;
  st_e st;

  // ---------------- instruction buffer and job decode ----------------
  logic [$clog2(IB_WORDS)-1:0] pc;
  logic [31:0] ib_rdata;
  instruction_buffer #(.WORDS(IB_WORDS)) u_ib (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata), .raddr(pc), .rdata(ib_rdata));

  map_mode_e   mode;
  logic [13:0] nnodes;
  logic [9:0]  nwin;
  logic [9:0]  pass, npass;

  // ---------------- node streaming ----------------
  logic [13:0] rd_ptr, cur_addr;
  logic        cur_v;
  logic        stall;
  logic        adv_q;
  logic [NGROUPS-1:0][SPAW-1:0] sp_raddr;
  logic [NGROUPS-1:0][31:0]     sp_rdata;
  logic [13:0] raddr_sel;

  assign raddr_sel = stall ? cur_addr : rd_ptr;
  always_comb
    for (int unsigned g = 0; g < NGROUPS; g++) sp_raddr[g] = SPAW'(raddr_sel);

  input_scratchpad #(.WORDS(SP_WORDS), .GROUPS(NGROUPS)) u_sp (
    .clk, .long_mode(mode == MODE_LONG), .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata),
    .raddr(sp_raddr), .rdata(sp_rdata));

  // ---------------- PE array ----------------
  node_tok_t [NPE-1:0]        tok_in, tok_out;
  logic      [NPE-1:0]        cin_in, cout_out;
  logic      [NPE-1:0][2*W-1:0] state_out, nb_vec;
  logic      [NPE-1:0]        rd_req, wr_req, rd_done, rd_valid, hop_used;
  logic      [NPE-1:0][SHAW-1:0] rd_addr, wr_addr;
  logic      [NPE-1:0][2*W-1:0]  wr_data;
  logic      [NPE-1:0][1:0]   rcode;
  logic      [NPE-1:0][9:0]   win_lo;
  logic      [NPE-1:0][1:0]   win_ok;
  logic job_clr, pass_clr;

  logic fifo_pop, fifo_push, fifo_rdata, fifo_empty, fifo_full;

  always_comb begin
    for (int unsigned p = 0; p < NPE; p++) begin
      nb_vec[p] = (p == 0) ? '0 : state_out[(p + NPE - 1) % NPE];
      if (mode == MODE_LONG) begin
        win_lo[p] = 10'(pass * WPP + 2 * p);
        win_ok[p] = {32'(win_lo[p]) + 1 < 32'(nwin), 32'(win_lo[p]) < 32'(nwin)};
        if (p == 0) begin
          tok_in[p] = '{valid: cur_v, node: cur_addr, rec: node_rec_t'(sp_rdata[0])};
          cin_in[p] = (pass == 0) ? 1'b1 : fifo_rdata;
        end else begin
          tok_in[p] = tok_out[p-1];
          cin_in[p] = cout_out[p-1];
        end
      end else begin
        win_lo[p] = '0;
        win_ok[p] = 2'b11;
        cin_in[p] = 1'b1;
        if (p % GROUP == 0)
          tok_in[p] = '{valid: cur_v, node: cur_addr, rec: node_rec_t'(sp_rdata[p / GROUP])};
        else
          tok_in[p] = tok_out[p-1];
      end
    end
  end

  // Shared SRAM ports: 2p = Hop read of PE p, 2p+1 = state write of PE p.
  logic [NPORTS-1:0] req_raw, served, sh_req, sh_we, sh_gnt, sh_rvalid;
  logic [NPORTS-1:0][SHAW-1:0] sh_addr;
  logic [NPORTS-1:0][2*W-1:0]  sh_wdata, sh_rdata;

  always_comb begin
    for (int unsigned p = 0; p < NPE; p++) begin
      req_raw[2*p]    = rd_req[p];
      req_raw[2*p+1]  = wr_req[p];
      sh_we[2*p]      = 1'b0;
      sh_we[2*p+1]    = 1'b1;
      sh_addr[2*p]    = rd_addr[p];
      sh_addr[2*p+1]  = wr_addr[p];
      sh_wdata[2*p]   = '0;
      sh_wdata[2*p+1] = wr_data[p];
      rd_done[p]      = served[2*p] | sh_gnt[2*p];
      rd_valid[p]     = sh_rvalid[2*p];
    end
  end
  assign sh_req = req_raw & ~served;
  assign stall  = |(req_raw & ~served & ~sh_gnt);

  shared_banked_sram #(.NPORTS(NPORTS), .ENTRIES(SH_ENTRIES), .DW(2*W), .BANKS(SH_BANKS)) u_sh (
    .clk, .rst_n, .req(sh_req), .we(sh_we), .addr(sh_addr), .wdata(sh_wdata),
    .gnt(sh_gnt), .rvalid(sh_rvalid), .rdata(sh_rdata), .conflict());

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic [W-1:0] pb_d;
    assign pb_d = pb_wdata;
    traversal_pe #(.W(W), .PE_ID(p), .SADDR_W(SHAW), .TB_DEPTH(TB_DEPTH)) u_pe (
      .clk, .rst_n, .job_clr, .pass_clr, .stall, .mode, .win_lo(win_lo[p]), .win_ok(win_ok[p]), .pb_bank(pass[0]),
      .tok_in(tok_in[p]), .cin_in(cin_in[p]), .neighbor_vec(nb_vec[p]),
      .tok_out(tok_out[p]), .cout_out(cout_out[p]), .state_out(state_out[p]),
      .pb_we(pb_we && pb_pe == ($clog2(NPE))'(p)), .pb_wbank, .pb_wbase, .pb_whalf, .pb_wdata(pb_d),
      .rd_req(rd_req[p]), .rd_addr(rd_addr[p]), .rd_done(rd_done[p]), .rd_valid(rd_valid[p]),
      .rd_data(sh_rdata[2*p]),
      .wr_req(wr_req[p]), .wr_addr(wr_addr[p]), .wr_data(wr_data[p]),
      .replay_off, .replay_code(rcode[p]), .score_lo(score_lo[p]), .score_hi(score_hi[p]),
      .hop_used(hop_used[p]));
  end
  assign replay_code = rcode[replay_pe];

  // ---------------- chain FIFO (long mode, multi-pass) ----------------
  assign fifo_push = (st == S_RUN || st == S_DRAIN) && mode == MODE_LONG && adv_q &&
                     tok_out[NPE-1].valid && (pass + 10'd1 < npass);
  assign fifo_pop  = mode == MODE_LONG && pass != 0 && cur_v && !stall;

  carry_fifo #(.WIDTH(1), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clr(job_clr), .push(fifo_push), .wdata(cout_out[NPE-1]),
    .pop(fifo_pop), .rdata(fifo_rdata), .empty(fifo_empty), .full(fifo_full), .count());

  // ---------------- controller ----------------
  logic [$clog2(NPE)-1:0] end_pe;
  logic last_out;
  assign end_pe   = (mode == MODE_LONG) ? ($clog2(NPE))'(NPE - 1) : ($clog2(NPE))'(GROUP - 1);
  assign last_out = adv_q && tok_out[end_pe].valid && (tok_out[end_pe].node == nnodes - 14'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pc <= '0; mode <= MODE_SHORT; nnodes <= '0; nwin <= '0;
      pass <= '0; npass <= '0; rd_ptr <= '0; cur_addr <= '0; cur_v <= 1'b0;
      job_clr <= 1'b0; pass_clr <= 1'b0; job_done <= 1'b0; served <= '0; adv_q <= 1'b0;
      stall_cycles <= '0; hop_count <= '0; pass_count <= '0;
    end else begin
      job_clr  <= 1'b0;
      pass_clr <= 1'b0;
      job_done <= 1'b0;
      adv_q    <= !stall;
      served   <= stall ? (served | sh_gnt) : '0;
      if (stall) stall_cycles <= stall_cycles + 1;
      if (!stall) hop_count <= hop_count + 32'($countones(hop_used));
      unique case (st)
        S_IDLE: if (start) begin pc <= '0; st <= S_FETCH; end
        S_FETCH: st <= S_DECODE;       // instruction buffer read latency
        S_DECODE: begin
          if (ib_rdata[31]) st <= S_IDLE;
          else begin
            mode    <= map_mode_e'(ib_rdata[30]);
            nnodes  <= ib_rdata[29:16];
            nwin    <= ib_rdata[15:6];
            npass   <= ib_rdata[30] ? 10'((32'(ib_rdata[15:6]) + WPP - 1) / WPP) : 10'd1;
            pass    <= '0;
            job_clr <= 1'b1;
            rd_ptr  <= '0;
            cur_v   <= 1'b0;
            st      <= S_RUN;
          end
        end
        S_RUN: if (!stall) begin
          cur_addr <= rd_ptr;
          cur_v    <= (rd_ptr < nnodes);
          if (rd_ptr < nnodes) rd_ptr <= rd_ptr + 14'd1;
          else st <= S_DRAIN;
        end
        S_DRAIN: begin
          if (!stall) cur_v <= 1'b0;
          if (last_out) begin
            pass_count <= pass_count + 1;
            if (pass + 10'd1 < npass) begin
              pass     <= pass + 10'd1;
              pass_clr <= 1'b1;
              rd_ptr   <= '0;
              st       <= S_RUN;
            end else begin
              job_done <= 1'b1;
              st       <= S_NEXT;
            end
          end
        end
        S_NEXT: begin pc <= pc + 1'b1; st <= S_FETCH; end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign busy = (st != S_IDLE);

  // Long-mode best score over the windows that belong to the read.
  always_comb begin
    best_long = '0;
    for (int unsigned p = 0; p < NPE; p++) begin
      if (score_lo[p] > best_long) best_long = score_lo[p];
      if (score_hi[p] > best_long) best_long = score_hi[p];
    end
  end

  a_fifo_ok: assert property (@(posedge clk) disable iff (!rst_n) !(fifo_pop && fifo_empty));
  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) !(fifo_push && fifo_full));
endmodule
