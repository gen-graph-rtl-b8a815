// tb_permutation_unit: checks the Floyd-Warshall sequencer of the PCM-FW tile
// at 16 columns of 16 bits, with a problem of n = 11 vertices and bursts of
// 4 rows. The testbench plays the PCM array: a row memory with a one-cycle
// read and lane-masked writes, plus the real bit-serial ALU. A random sparse
// graph is loaded; after done, the matrix must equal a reference
// Floyd-Warshall run here, and the counters must match the reference: rows
// pruned (Panel_Col infinite), writes skipped (no lane improved), rows
// written, and bursts (ceil((n-1)/BURST) per pivot). A row write must never
// commit sooner than WR_LAT+2 cycles after the ALU
// finished it (one cycle to write-back, one to launch, WR_LAT in flight);
// an uncontended write must commit exactly then.
module tb_permutation_unit;
  localparam int N = 16, DW = 16, BURST = 4, WR_LAT = 10, NV = 11;
  localparam logic [DW-1:0] INF = '1;
  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] n = 5'(NV), pivot;
  logic busy, done, rd_en, wr_en, alu_start, alu_done, alu_busy;
  logic [3:0] rd_addr, wr_addr;
  logic [N-1:0][DW-1:0] rd_data, wr_data, alu_a, alu_b, alu_old, alu_res;
  logic [N-1:0] wr_mask, alu_en, alu_wmask;
  logic [31:0] rows_pruned, writes_skipped, rows_written, bursts;
  logic [N-1:0][DW-1:0] mem [N];
  int ref_d [NV][NV];
  int checks = 0, failures = 0, e_pruned = 0, e_skipped = 0, e_written = 0;
  int cyc = 0, last_alu_done = -1, nwr = 0, n_exact = 0;

  permutation_unit #(.N(N), .DW(DW), .BURST(BURST), .WR_LAT(WR_LAT)) dut (.*);
  felix_bitserial_alu #(.LANES(N), .DW(DW)) u_alu (
    .clk, .rst_n, .start(alu_start), .a_vec(alu_a), .b_vec(alu_b), .old_vec(alu_old),
    .lane_en(alu_en), .busy(alu_busy), .done(alu_done), .res(alu_res), .wmask(alu_wmask));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) for (int j = 0; j < N; j++) if (wr_mask[j]) mem[wr_addr][j] <= wr_data[j];
  end
  // write latency, measured from the ALU done pulse
  always @(posedge clk) if (rst_n) begin
    if (alu_done) last_alu_done = cyc;
    if (wr_en) begin
      nwr++;
      checks++;
      if (cyc - last_alu_done < WR_LAT + 2) begin failures++; $display("write too early %0d", cyc - last_alu_done); end
      if (cyc - last_alu_done == WR_LAT + 2) n_exact++;
    end
  end

  initial begin #20_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) mem[i][j] = INF;
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) begin
      if (i == j) ref_d[i][j] = 0;
      else if ($urandom_range(0, 3) == 0) ref_d[i][j] = $urandom_range(1, 50);
      else ref_d[i][j] = int'(INF);
      mem[i][j] = DW'(ref_d[i][j]);
    end
    // reference Floyd-Warshall with the same visiting order and counters
    for (int k = 0; k < NV; k++)
      for (int t = 0; t < NV - 1; t++) begin
        int i; bit any;
        i = (k + 1 + t) % NV;
        if (ref_d[i][k] == int'(INF)) begin e_pruned++; continue; end
        any = 0;
        for (int j = 0; j < NV; j++) if (j != k && ref_d[k][j] != int'(INF)) begin
          int s; s = ref_d[i][k] + ref_d[k][j];
          if (s >= int'(INF)) s = int'(INF);
          if (s < ref_d[i][j]) begin ref_d[i][j] = s; any = 1; end
        end
        if (any) e_written++; else e_skipped++;
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done); @(posedge clk); #1;
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) begin
      checks++;
      if (mem[i][j] !== DW'(ref_d[i][j])) begin failures++; $display("D[%0d][%0d]=%0d exp %0d", i, j, mem[i][j], ref_d[i][j]); end
    end
    checks++; if (rows_pruned != 32'(e_pruned)) begin failures++; $display("pruned %0d exp %0d", rows_pruned, e_pruned); end
    checks++; if (writes_skipped != 32'(e_skipped)) begin failures++; $display("skipped %0d exp %0d", writes_skipped, e_skipped); end
    checks++; if (rows_written != 32'(e_written) || nwr != e_written) begin failures++; $display("written %0d exp %0d", rows_written, e_written); end
    checks++; if (bursts != 32'(NV * ((NV - 2) / BURST + 1))) begin failures++; $display("bursts %0d", bursts); end
    checks++; if (n_exact == 0) begin failures++; $display("no write at exactly WR_LAT"); end
    checks++; if (e_pruned == 0 || e_skipped == 0 || e_written == 0) failures++;
    $display("pruned %0d skipped %0d written %0d", e_pruned, e_skipped, e_written);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
