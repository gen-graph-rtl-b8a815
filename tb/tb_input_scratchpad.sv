// tb_input_scratchpad: checks the PU input scratchpad at a reduced size (1024
// words in 4 group slices). In short mode each group's read port must see
// only its own slice (the low address bits index within the slice); in long
// mode port 0 must read the whole address space. Reads are registered (one
// cycle), all ports in parallel.
module tb_input_scratchpad;
  localparam int WORDS = 1024, GROUPS = 4, SW = WORDS / GROUPS;
  logic clk = 0, long_mode = 0, we = 0;
  logic [9:0] waddr = 0;
  logic [31:0] wdata = 0;
  logic [GROUPS-1:0][9:0] raddr = '0;
  logic [GROUPS-1:0][31:0] rdata;
  logic [31:0] shadow [WORDS];
  int checks = 0, failures = 0;

  input_scratchpad #(.WORDS(WORDS), .GROUPS(GROUPS)) dut (.*);
  always #5 clk = ~clk;

  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); we = 1; waddr = 10'(i); wdata = $urandom; shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      long_mode = (n >= 200);
      for (int g = 0; g < GROUPS; g++) raddr[g] = 10'($urandom);
      @(posedge clk); #1;
      for (int g = 0; g < GROUPS; g++) begin
        int a;
        if (long_mode && g == 0) a = raddr[0];
        else a = g * SW + (raddr[g] % SW);
        checks++;
        if (rdata[g] !== shadow[a]) begin failures++; $display("g %0d mode %0d wrong", g, long_mode); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
