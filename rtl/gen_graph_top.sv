// gen_graph_top: the GEN-Graph heterogeneous accelerator, digital part.
//
// Two compute tiles share one package:
//  * Matrix tile (processing-using-memory on PCM) for all-pairs shortest
//    paths: the stream engine expands CSR components into dense rows of the
//    PCM-FW tile, which runs Floyd-Warshall in place; the PCM-MP tile runs
//    the two-stage min-plus merge of boundary paths.
//  * Traversal tile (processing-near-memory on the HBM3 logic base die) for
//    sequence-to-graph alignment: 16 processing units, one per HBM channel,
//    joined by a ring.
// HBM3 DRAM, PCM cell arrays with their analog periphery, FeNAND storage,
// the UCIe PHY and the host CPU are outside this RTL: their data arrive on
// the ports below (CSR stream, host word ports, per-channel load packets).
// Each port group keeps the timing of the block it reaches; see those
// modules. The tile sizes default to the paper's main configuration
// (1024-vertex blocks, 16 PUs of 64 PEs).
module gen_graph_top
  import gg_pkg::*;
#(
  parameter int unsigned N   = 1024,   // matrix block size (vertices)
  parameter int unsigned NPU = 16,
  parameter int unsigned NPE = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // ---- matrix tile: CSR stream into the stream engine ----
  input  logic                        csr_begin,
  input  logic                        csr_valid,
  output logic                        csr_ready,
  input  logic [$clog2(N)-1:0]        csr_col,
  input  logic [DIST_W-1:0]           csr_val,
  input  logic                        csr_last,
  input  logic                        csr_empty,
  // ---- PCM-FW tile ----
  input  logic                        fw_host_we,
  input  logic [$clog2(N)-1:0]        fw_host_row,
  input  logic [$clog2(N)-1:0]        fw_host_col,
  input  logic [DIST_W-1:0]           fw_host_wdata,
  output logic [DIST_W-1:0]           fw_host_rdata,
  input  logic                        fw_start,
  input  logic [$clog2(N):0]          fw_n,
  output logic                        fw_busy,
  output logic                        fw_done,
  output logic [31:0]                 fw_rows_pruned,
  output logic [31:0]                 fw_writes_skipped,
  output logic [31:0]                 fw_rows_written,
  output logic [31:0]                 fw_bursts,
  // ---- PCM-MP tile ----
  input  logic                        mp_host_we,
  input  logic [1:0]                  mp_host_sel,
  input  logic [$clog2(N)-1:0]        mp_host_row,
  input  logic [$clog2(N)-1:0]        mp_host_col,
  input  logic [DIST_W-1:0]           mp_host_wdata,
  output logic [DIST_W-1:0]           mp_host_rdata,
  input  logic                        mp_start,
  input  logic [$clog2(N):0]          mp_nm,
  input  logic [$clog2(N):0]          mp_nb1,
  input  logic [$clog2(N):0]          mp_nb2,
  input  logic [$clog2(N):0]          mp_nn,
  output logic                        mp_busy,
  output logic                        mp_done,
  output logic [31:0]                 mp_updates,
  // ---- traversal tile: HBM channel load packets and control ----
  input  logic [NPU-1:0]              ch_valid,
  input  logic [NPU-1:0][$clog2(NPU)-1:0] ch_dst,
  input  logic [NPU-1:0][145:0]       ch_payload,
  output logic [NPU-1:0]              ch_ready,
  input  logic [NPU-1:0]              tt_start,
  output logic [NPU-1:0]              tt_busy,
  output logic [NPU-1:0]              tt_job_done,
  output logic [NPU-1:0][15:0]        tt_best_long,
  input  logic [$clog2(NPU)-1:0]      tt_rd_pu,
  input  logic [$clog2(NPE)-1:0]      tt_rd_pe,
  output logic [15:0]                 tt_score_lo,
  output logic [15:0]                 tt_score_hi,
  input  logic [13:0]                 tt_replay_off,
  output logic [1:0]                  tt_replay_code,
  output logic [NPU-1:0][31:0]        tt_stall_cycles,
  output logic [NPU-1:0][31:0]        tt_hop_count,
  output logic [NPU-1:0][31:0]        tt_pass_count,
  output logic [31:0]                 tt_ring_hops,
  output logic [31:0]                 se_rows_out
);
  // ---------------- matrix tile ----------------
  logic                     se_row_we;
  logic [$clog2(N)-1:0]     se_row_idx;
  logic [N-1:0][DIST_W-1:0] se_row_data;

  stream_engine #(.N(N)) u_se (
    .clk, .rst_n, .begin_comp(csr_begin), .in_valid(csr_valid), .in_ready(csr_ready),
    .in_col(csr_col), .in_val(csr_val), .in_last(csr_last), .in_empty(csr_empty),
    .row_we(se_row_we), .row_idx(se_row_idx), .row_data(se_row_data), .rows_out(se_rows_out));

  pcm_fw_tile #(.N(N), .DW(DIST_W)) u_fw (
    .clk, .rst_n, .host_we(fw_host_we), .host_row(fw_host_row), .host_col(fw_host_col),
    .host_wdata(fw_host_wdata), .row_we(se_row_we), .row_waddr(se_row_idx), .row_wdata(se_row_data),
    .host_rdata(fw_host_rdata), .start(fw_start), .n(fw_n), .busy(fw_busy), .done(fw_done),
    .rows_pruned(fw_rows_pruned), .writes_skipped(fw_writes_skipped),
    .rows_written(fw_rows_written), .bursts(fw_bursts));

  // comparator tree: sqrt(N) groups of sqrt(N) (32 x 32 for N = 1024)
  localparam int unsigned MP_G = 1 << ($clog2(N) / 2);

  pcm_mp_tile #(.N(N), .G(MP_G)) u_mp (
    .clk, .rst_n, .host_we(mp_host_we), .host_sel(mp_host_sel), .host_row(mp_host_row),
    .host_col(mp_host_col), .host_wdata(mp_host_wdata), .host_rdata(mp_host_rdata),
    .start(mp_start), .nm(mp_nm), .nb1(mp_nb1), .nb2(mp_nb2), .nn(mp_nn),
    .busy(mp_busy), .done(mp_done), .updates(mp_updates));

  // ---------------- traversal tile ----------------
  traversal_tile #(.NPU(NPU), .NPE(NPE)) u_tt (
    .clk, .rst_n, .ch_valid, .ch_dst, .ch_payload, .ch_ready, .start(tt_start),
    .busy(tt_busy), .job_done(tt_job_done), .best_long(tt_best_long),
    .rd_pu(tt_rd_pu), .rd_pe(tt_rd_pe), .rd_score_lo(tt_score_lo), .rd_score_hi(tt_score_hi),
    .replay_off(tt_replay_off), .replay_code(tt_replay_code),
    .stall_cycles(tt_stall_cycles), .hop_count(tt_hop_count), .pass_count(tt_pass_count),
    .ring_hops(tt_ring_hops));
endmodule
