// min_comparator_tree: pipelined min-reduction tree of the PCM-MP unit.
//
// Reduces N = G*G values of DW bits (default 1024 x 32 bits) to their
// minimum and its index, accepting a new row every cycle:
//   cycle 1      the row is captured in the input buffer,
//   cycles 2-7   G parallel trees of log2(G) compare levels reduce each group
//                of G values to a block minimum (one level per cycle, plus
//                one output register),
//   cycles 8-13  a second tree of log2(G) levels reduces the G block minima
//                to the global minimum,
// so the result appears 13 cycles after the row (the paper's count for 1024
// inputs: 1 + 6 + 6). A reference value cur_in travels with the row; the
// output update flag (the "sign bit" of min - cur) is set when the minimum is
// strictly smaller, and gates the compare-and-swap write. Ties resolve to the
// lower index. The compare-level organisation per pipeline cycle is this
// design's; the paper gives the stage counts and cycle totals.
module min_comparator_tree #(
  parameter int unsigned N  = 1024,
  parameter int unsigned DW = 32,
  parameter int unsigned G  = 32          // group size = number of groups
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [N-1:0][DW-1:0] in_vec,
  input  logic [DW-1:0]        cur_in,
  output logic                 out_valid,
  output logic [DW-1:0]        min_val,
  output logic [$clog2(N)-1:0] min_idx,
  output logic                 update
);
  localparam int unsigned L  = $clog2(G);      // levels per tree
  localparam int unsigned IW = $clog2(N);
  localparam int unsigned LAT = 2 * (L + 1) + 1;

  // valid / reference pipeline
  logic [LAT-1:0]          v_pipe;
  logic [LAT-1:0][DW-1:0]  c_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_pipe <= '0;
    else        v_pipe <= {v_pipe[LAT-2:0], in_valid};
  end
  always_ff @(posedge clk) c_pipe <= {c_pipe[LAT-2:0], cur_in};

  // input buffer
  logic [N-1:0][DW-1:0] buf_q;
  always_ff @(posedge clk) buf_q <= in_vec;

  // first tree: G groups, level l holds N >> l candidates
  // (level l of the first tree holds N >> l candidates; level 0 is buf_q)
  logic [N-1:0][DW-1:0] v1 [1:L];
  logic [N-1:0][IW-1:0] i1 [1:L];
  for (genvar l = 0; l < L; l++) begin : g_t1
    logic [N-1:0][DW-1:0] src_v;
    logic [N-1:0][IW-1:0] src_i;
    if (l == 0) begin : g_first
      always_comb
        for (int unsigned e = 0; e < N; e++) begin
          src_v[e] = buf_q[e];
          src_i[e] = IW'(e);
        end
    end else begin : g_next
      assign src_v = v1[l];
      assign src_i = i1[l];
    end
    always_ff @(posedge clk) begin
      for (int unsigned e = 0; e < (N >> (l + 1)); e++) begin
        if (src_v[2*e+1] < src_v[2*e]) begin
          v1[l+1][e] <= src_v[2*e+1]; i1[l+1][e] <= src_i[2*e+1];
        end else begin
          v1[l+1][e] <= src_v[2*e];   i1[l+1][e] <= src_i[2*e];
        end
      end
      for (int unsigned e = (N >> (l + 1)); e < N; e++) begin
        v1[l+1][e] <= '0; i1[l+1][e] <= '0;
      end
    end
  end

  // block-minimum register (sixth cycle of the first stage)
  logic [G-1:0][DW-1:0] bm_v;
  logic [G-1:0][IW-1:0] bm_i;
  always_ff @(posedge clk)
    for (int unsigned g = 0; g < G; g++) begin
      bm_v[g] <= v1[L][g];
      bm_i[g] <= i1[L][g];
    end

  // second tree over the G block minima
  logic [G-1:0][DW-1:0] v2 [L+1];
  logic [G-1:0][IW-1:0] i2 [L+1];
  assign v2[0] = bm_v;
  assign i2[0] = bm_i;
  for (genvar l = 0; l < L; l++) begin : g_t2
    always_ff @(posedge clk) begin
      for (int unsigned e = 0; e < (G >> (l + 1)); e++) begin
        if (v2[l][2*e+1] < v2[l][2*e]) begin
          v2[l+1][e] <= v2[l][2*e+1]; i2[l+1][e] <= i2[l][2*e+1];
        end else begin
          v2[l+1][e] <= v2[l][2*e];   i2[l+1][e] <= i2[l][2*e];
        end
      end
      for (int unsigned e = (G >> (l + 1)); e < G; e++) begin
        v2[l+1][e] <= '0; i2[l+1][e] <= '0;
      end
    end
  end

  // output register
  always_ff @(posedge clk) begin
    min_val <= v2[L][0];
    min_idx <= i2[L][0];
    update  <= v2[L][0] < c_pipe[LAT-2];
  end
  assign out_valid = v_pipe[LAT-1];

  initial assert (N == G * G) else $error("min_comparator_tree: N must equal G*G");
endmodule
