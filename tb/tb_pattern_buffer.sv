// tb_pattern_buffer: checks the double-banked pattern (match-mask) buffer.
// Fills all 16 half-entries, then reads every {bank, base} and checks that the
// 256-bit mask holds the low-BPLU half in bits 127:0 and the high half in
// 255:128; then overwrites bank 1 only and checks bank 0 kept its contents.
module tb_pattern_buffer;
  localparam int W = 128;
  logic clk = 0, we = 0, wbank = 0, whalf = 0, rbank = 0;
  logic [1:0] wbase = 0, rbase = 0;
  logic [W-1:0] wdata = '0;
  logic [2*W-1:0] rmask;
  logic [W-1:0] shadow [16];
  int checks = 0, failures = 0;

  pattern_buffer #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input int idx);
    logic [W-1:0] d;
    for (int k = 0; k < W/32; k++) d[k*32 +: 32] = $urandom;
    @(negedge clk);
    we = 1; {wbank, wbase, whalf} = 4'(idx); wdata = d; shadow[idx] = d;
    @(negedge clk); we = 0;
  endtask

  task automatic rd_all();
    for (int b = 0; b < 2; b++) for (int s = 0; s < 4; s++) begin
      rbank = 1'(b); rbase = 2'(s); #1;
      checks++;
      if (rmask !== {shadow[{b[0], s[1:0], 1'b1}], shadow[{b[0], s[1:0], 1'b0}]}) begin
        failures++; $display("bank %0d base %0d wrong", b, s);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) wr(i);
    rd_all();
    for (int i = 8; i < 16; i++) wr(i);
    rd_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
