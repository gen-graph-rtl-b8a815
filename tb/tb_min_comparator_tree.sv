// tb_min_comparator_tree: checks the two-stage pipelined minimum tree at a
// reduced size (16 inputs as 4 groups of 4, 8-bit values). A new random vector
// enters every cycle (with ties and infinities mixed in); each result must
// appear exactly 2*log2(G)+3 cycles later, as the smallest value with the
// lowest index among equal minima, and with update set when that minimum is
// below the current value given alongside the vector.
module tb_min_comparator_tree;
  localparam int N = 16, G = 4, DW = 8, LAT = 2 * 2 + 3;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [N-1:0][DW-1:0] in_vec = '0;
  logic [DW-1:0] cur_in = '0, min_val;
  logic [3:0] min_idx;
  logic out_valid, update;
  typedef struct { int v; int i; bit u; int t; } exp_t;
  exp_t q [$];
  int cyc = 0, checks = 0, failures = 0, nupd = 0;

  min_comparator_tree #(.N(N), .DW(DW), .G(G)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected out_valid"); end
      else begin
        e = q.pop_front();
        if (min_val !== DW'(e.v) || min_idx !== 4'(e.i) || update !== e.u || cyc - e.t != LAT) begin
          failures++; $display("got %0d@%0d u%0d lat %0d exp %0d@%0d u%0d", min_val, min_idx, update, cyc - e.t, e.v, e.i, e.u);
        end
        if (update) nupd++;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      exp_t e;
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      for (int k = 0; k < N; k++) begin
        in_vec[k] = DW'($urandom_range(0, 40));
        if ($urandom_range(0, 5) == 0) in_vec[k] = '1;
      end
      cur_in = DW'($urandom_range(0, 20));
      if (in_valid) begin
        e.v = 1 << DW; e.i = 0;
        for (int k = 0; k < N; k++) if (int'(in_vec[k]) < e.v) begin e.v = int'(in_vec[k]); e.i = k; end
        e.u = (e.v < int'(cur_in));
        e.t = cyc;
        q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++; if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    checks++; if (nupd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
