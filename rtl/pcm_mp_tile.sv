// pcm_mp_tile: the PCM-MP tile of the matrix tile (two-stage min-plus merge).
//
// Computes the cross-component update of the recursive partitioned APSP:
//   X[m][n] = min( X[m][n], min_{i,j} D_C1[m][i] + DB[i][j] + D_C2[j][n] )
// for m < nm, n < nn, with i < nb1 boundary vertices of C1 and j < nb2 of C2.
// Arrays (PCM modelled as digital memories, loaded by the host while idle):
//   sel 0  D_C1  row m, column i
//   sel 1  DB    stored transposed: row j holds column j of DB
//   sel 2  D_C2  stored transposed: row n holds column n of D_C2
//   sel 3  X     result, row m, column n (initial values loaded by the host)
// For each row m, two stages share one adder row and the min comparator tree:
//   stage 1: for each j, Temp_Add1[i] = D_C1[m][i] + DB[i][j] over all i at
//            once, reduced by the tree: Temp_Min1[j];
//   stage 2: for each n, Temp_Add2[j] = Temp_Min1[j] + D_C2[j][n], reduced by
//            the tree; when the minimum is smaller than X[m][n] (tree update
//            flag) X[m][n] is overwritten (compare-and-swap write).
// One 1024-wide vector enters the tree per cycle; each stage costs its
// length plus the tree's 13-cycle latency. Additions saturate at infinity
// (all ones). The stage split, the staging buffers and the sign-gated
// writes follow the paper; the transposed storage and the host interface
// are this design's, and the adders here are word-parallel rather than the
// FELIX bit-serial adders of the PCM array.
module pcm_mp_tile
  import gg_pkg::*;
#(
  parameter int unsigned N  = 1024,
  parameter int unsigned G  = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 host_we,
  input  logic [1:0]           host_sel,
  input  logic [$clog2(N)-1:0] host_row,
  input  logic [$clog2(N)-1:0] host_col,
  input  logic [DIST_W-1:0]    host_wdata,
  output logic [DIST_W-1:0]    host_rdata,   // X[host_row][host_col], 1-cycle
  input  logic                 start,
  input  logic [$clog2(N):0]   nm,
  input  logic [$clog2(N):0]   nb1,
  input  logic [$clog2(N):0]   nb2,
  input  logic [$clog2(N):0]   nn,
  output logic                 busy,
  output logic                 done,
  output logic [31:0]          updates
);
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned DW = DIST_W;

  logic [N-1:0][DW-1:0] dc1 [N];
  logic [N-1:0][DW-1:0] dbt [N];
  logic [N-1:0][DW-1:0] dc2t [N];
  logic [N-1:0][DW-1:0] dx [N];

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST1, S_ST1_WAIT, S_ST2, S_ST2_WAIT} st_e;
  st_e st;

  logic [AW:0]          m, issue, col_out;
  logic [N-1:0][DW-1:0] stage_a;     // staging buffer 1: row D_C1[m][*]
  logic [N-1:0][DW-1:0] temp_min1;   // staging buffer 2: Temp_Min1[j]
  logic [N-1:0][DW-1:0] vec;
  logic                 t_in_v, t_out_v, t_upd;
  logic [DW-1:0]        t_min, cur;
  logic [AW-1:0]        t_idx;

  // vector adder feeding the tree
  always_comb begin
    vec    = '0;
    t_in_v = 1'b0;
    cur    = DIST_INF;
    if (st == S_ST1 && issue < nb2) begin
      t_in_v = 1'b1;
      for (int unsigned i = 0; i < N; i++)
        vec[i] = (i < 32'(nb1)) ? sat_add(stage_a[i], dbt[issue[AW-1:0]][i]) : DIST_INF;
    end else if (st == S_ST2 && issue < nn) begin
      t_in_v = 1'b1;
      cur    = dx[m[AW-1:0]][issue[AW-1:0]];
      for (int unsigned j = 0; j < N; j++)
        vec[j] = (j < 32'(nb2)) ? sat_add(temp_min1[j], dc2t[issue[AW-1:0]][j]) : DIST_INF;
    end
  end

  min_comparator_tree #(.N(N), .DW(DW), .G(G)) u_tree (
    .clk, .rst_n, .in_valid(t_in_v), .in_vec(vec), .cur_in(cur),
    .out_valid(t_out_v), .min_val(t_min), .min_idx(t_idx), .update(t_upd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; m <= '0; issue <= '0; col_out <= '0; done <= 1'b0; updates <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          m <= '0;
          if (nm == 0 || nn == 0) done <= 1'b1; else st <= S_LOAD;
        end
        S_LOAD: begin issue <= '0; col_out <= '0; st <= S_ST1; end
        S_ST1: begin
          if (issue < nb2) issue <= issue + 1'b1;
          else st <= S_ST1_WAIT;
          if (t_out_v) col_out <= col_out + 1'b1;
        end
        S_ST1_WAIT: begin
          if (t_out_v) col_out <= col_out + 1'b1;
          if (col_out >= nb2 || (col_out + 1 == nb2 && t_out_v)) begin
            issue <= '0; col_out <= '0; st <= S_ST2;
          end
        end
        S_ST2: begin
          if (issue < nn) issue <= issue + 1'b1;
          else st <= S_ST2_WAIT;
          if (t_out_v) begin
            col_out <= col_out + 1'b1;
            if (t_upd) updates <= updates + 1;
          end
        end
        S_ST2_WAIT: begin
          if (t_out_v) begin
            col_out <= col_out + 1'b1;
            if (t_upd) updates <= updates + 1;
          end
          if (col_out >= nn || (col_out + 1 == nn && t_out_v)) begin
            if (m + 1 >= nm) begin st <= S_IDLE; done <= 1'b1; end
            else begin m <= m + 1'b1; st <= S_LOAD; end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign busy = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (st == S_LOAD) stage_a <= dc1[m[AW-1:0]];
    if ((st == S_ST1 || st == S_ST1_WAIT) && t_out_v) temp_min1[col_out[AW-1:0]] <= t_min;
    if (st == S_LOAD) temp_min1 <= {N{DIST_INF}};
    if ((st == S_ST2 || st == S_ST2_WAIT) && t_out_v && t_upd)
      dx[m[AW-1:0]][col_out[AW-1:0]] <= t_min;          // compare-and-swap write
    else if (host_we && !busy)
      unique case (host_sel)
        2'd0: dc1[host_row][host_col]  <= host_wdata;
        2'd1: dbt[host_row][host_col]  <= host_wdata;
        2'd2: dc2t[host_row][host_col] <= host_wdata;
        default: dx[host_row][host_col] <= host_wdata;
      endcase
    host_rdata <= dx[host_row][host_col];
  end
endmodule
