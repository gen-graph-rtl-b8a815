// tb_instruction_buffer: writes all 256 job words with random data, reads
// them back in random order through the one-cycle registered read port and
// compares with a shadow array; a second pass overwrites half of them.
module tb_instruction_buffer;
  localparam int WORDS = 256;
  logic clk = 0, we = 0;
  logic [7:0] waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] shadow [WORDS];
  int checks = 0, failures = 0;

  instruction_buffer #(.WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;

  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < WORDS; i++) begin
        if (pass == 1 && i % 2 == 0) continue;
        @(negedge clk); we = 1; waddr = 8'(i); wdata = $urandom; shadow[i] = wdata;
      end
      @(negedge clk); we = 0;
      for (int n = 0; n < 300; n++) begin
        @(negedge clk); raddr = 8'($urandom);
        @(posedge clk); #1;
        checks++; if (rdata !== shadow[raddr]) begin failures++; $display("addr %0d wrong", raddr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
