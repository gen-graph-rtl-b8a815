// tb_traceback_memory: checks the circular traceback log of a PE at a reduced
// depth of 64. Random 2-bit codes are logged, some cycles idle; after every
// clock a random replay offset is read back (one-cycle registered read:
// offset 0 is the newest entry) and compared with a reference queue. The fill
// counter must count up and saturate at the depth after wrap-around, and a
// clear must empty it.
module tb_traceback_memory;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0, clr = 0, log_we = 0;
  logic [1:0] log_code = 0, replay_code;
  logic [5:0] replay_off = 0;
  logic [6:0] fill;
  logic [1:0] hist [$];
  int checks = 0, failures = 0, wraps = 0;

  traceback_memory #(.DEPTH(DEPTH), .CODE_W(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      log_we = ($urandom_range(0, 3) != 0);
      log_code = 2'($urandom);
      if (n == 400) clr = 1; else clr = 0;
      if (clr) begin hist.delete(); log_we = 0; end
      else if (log_we) begin hist.push_back(log_code); if (hist.size() > DEPTH) begin hist.pop_front(); wraps++; end end
      @(negedge clk);
      log_we = 0; clr = 0;
      if (hist.size() > 0) begin
        replay_off = 6'($urandom_range(0, hist.size() - 1));
        @(posedge clk); #1;
        checks++;
        if (replay_code !== hist[hist.size() - 1 - replay_off]) begin
          failures++; $display("replay off %0d got %0d exp %0d", replay_off, replay_code, hist[hist.size()-1-replay_off]);
        end
      end
      checks++; if (fill !== 7'(hist.size())) begin failures++; $display("fill %0d exp %0d", fill, hist.size()); end
    end
    checks++; if (wraps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
