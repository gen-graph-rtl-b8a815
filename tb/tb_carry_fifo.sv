// tb_carry_fifo: checks the inter-pass carry FIFO (first-word fall-through) at
// a reduced depth of 16 against a reference queue: random pushes and pops that
// respect full and empty, simultaneous push and pop, count, and the full and
// empty flags, which both must be reached.
module tb_carry_fifo;
  localparam int WIDTH = 8, DEPTH = 16;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0;
  logic [WIDTH-1:0] wdata = 0, rdata;
  logic empty, full;
  logic [4:0] count;
  logic [WIDTH-1:0] q [$];
  int checks = 0, failures = 0, nfull = 0, nempty = 0;

  carry_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      checks++; if (empty !== (q.size() == 0) || full !== (q.size() == DEPTH) || count !== 5'(q.size())) begin
        failures++; $display("flags/count wrong at %0d: count %0d exp %0d", n, count, q.size());
      end
      if (q.size() > 0) begin checks++; if (rdata !== q[0]) begin failures++; $display("head wrong"); end end
      if (full) nfull++;
      if (empty) nempty++;
      // phases: mostly push, then mostly pop
      push = ((n / 200) % 2 == 0) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      pop  = !push || $urandom_range(0, 1) == 1;
      if (full) push = 0;
      if (q.size() == 0) pop = 0;
      wdata = WIDTH'($urandom);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    checks++; if (nfull == 0 || nempty == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
