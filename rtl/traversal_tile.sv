// traversal_tile: the S2G near-memory engine on the HBM3 logic base die.
//
// NPU processing units, one per HBM channel (16), plus the ring router that
// links them. Each channel port delivers load packets for the PUs:
//   payload[145:144] target: 0 = input scratchpad, 1 = instruction buffer,
//                            2 = pattern buffer
//   payload[143:128] address: scratchpad word / instruction word /
//                            {PE[5:0], bank, base[1:0], half} for masks
//   payload[127:0]   data (32 bits used for scratchpad and instructions)
// A packet for the channel's own PU is written directly; a packet for
// another PU (a subgraph spanning channels) travels over the ring. Ring
// deliveries have priority over direct writes, so ch_ready can drop for a
// cycle. start[p] launches PU p's job list; every PU runs independently.
// Results are read through a PU/PE select. The one-PU-per-channel mapping,
// the counts and the ring follow the paper; the packet format is this
// design's.
module traversal_tile
  import gg_pkg::*;
#(
  parameter int unsigned NPU = 16,
  parameter int unsigned NPE = 64,
  parameter int unsigned TB_DEPTH = 16384
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NPU-1:0]              ch_valid,
  input  logic [NPU-1:0][$clog2(NPU)-1:0] ch_dst,
  input  logic [NPU-1:0][145:0]       ch_payload,
  output logic [NPU-1:0]              ch_ready,
  input  logic [NPU-1:0]              start,
  output logic [NPU-1:0]              busy,
  output logic [NPU-1:0]              job_done,
  output logic [NPU-1:0][15:0]        best_long,
  input  logic [$clog2(NPU)-1:0]      rd_pu,
  input  logic [$clog2(NPE)-1:0]      rd_pe,
  output logic [15:0]                 rd_score_lo,
  output logic [15:0]                 rd_score_hi,
  input  logic [$clog2(TB_DEPTH)-1:0] replay_off,
  output logic [1:0]                  replay_code,
  output logic [NPU-1:0][31:0]        stall_cycles,
  output logic [NPU-1:0][31:0]        hop_count,
  output logic [NPU-1:0][31:0]        pass_count,
  output logic [31:0]                 ring_hops
);
  localparam int unsigned PW = 146;

  logic [NPU-1:0]          inj_valid, inj_ready, ej_valid, local_hit;
  logic [NPU-1:0][PW-1:0]  ej_data, wr_pkt;
  logic [NPU-1:0]          wr_v;

  always_comb begin
    for (int unsigned c = 0; c < NPU; c++) begin
      local_hit[c] = ch_valid[c] && (ch_dst[c] == ($clog2(NPU))'(c));
      inj_valid[c] = ch_valid[c] && !local_hit[c];
      ch_ready[c]  = local_hit[c] ? !ej_valid[c] : inj_ready[c];
      wr_v[c]      = ej_valid[c] || local_hit[c];
      wr_pkt[c]    = ej_valid[c] ? ej_data[c] : ch_payload[c];
    end
  end

  ring_router #(.NSTOP(NPU), .PW(PW)) u_ring (
    .clk, .rst_n, .inj_valid, .inj_dst(ch_dst), .inj_data(ch_payload), .inj_ready,
    .ej_valid, .ej_data, .hops(ring_hops));

  logic [NPU-1:0][NPE-1:0][15:0] s_lo, s_hi;
  logic [NPU-1:0][1:0]           rcode;

  for (genvar p = 0; p < NPU; p++) begin : g_pu
    logic [1:0]  tgt;
    logic [15:0] addr;
    assign tgt  = wr_pkt[p][145:144];
    assign addr = wr_pkt[p][143:128];
    processing_unit #(.NPE(NPE), .TB_DEPTH(TB_DEPTH)) u_pu (
      .clk, .rst_n,
      .ib_we(wr_v[p] && tgt == 2'd1), .ib_waddr(addr[7:0]), .ib_wdata(wr_pkt[p][31:0]),
      .sp_we(wr_v[p] && tgt == 2'd0), .sp_waddr(addr[12:0]), .sp_wdata(wr_pkt[p][31:0]),
      .pb_we(wr_v[p] && tgt == 2'd2), .pb_pe(addr[4 +: $clog2(NPE)]), .pb_wbank(addr[3]),
      .pb_wbase(addr[2:1]), .pb_whalf(addr[0]), .pb_wdata(wr_pkt[p][127:0]),
      .start(start[p]), .busy(busy[p]), .job_done(job_done[p]),
      .score_lo(s_lo[p]), .score_hi(s_hi[p]), .best_long(best_long[p]),
      .replay_pe(rd_pe), .replay_off, .replay_code(rcode[p]),
      .stall_cycles(stall_cycles[p]), .hop_count(hop_count[p]), .pass_count(pass_count[p]));
  end

  assign rd_score_lo = s_lo[rd_pu][rd_pe];
  assign rd_score_hi = s_hi[rd_pu][rd_pe];
  assign replay_code = rcode[rd_pu];
endmodule
