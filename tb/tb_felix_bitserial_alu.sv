// tb_felix_bitserial_alu: checks the bit-serial add-then-compare datapath at 8
// lanes of 8 bits. Each operation loads random a, b, old and lane enables
// (with infinities and sums that overflow mixed in); the ALU must finish with
// done exactly 2*DW+1 cycles after start (DW add cycles then DW compare
// cycles), res must be the saturating sum (all ones on overflow or an
// infinite operand), and wmask must mark the enabled lanes whose sum is
// strictly below old.
module tb_felix_bitserial_alu;
  localparam int L = 8, DW = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [L-1:0][DW-1:0] a_vec = '0, b_vec = '0, old_vec = '0, res;
  logic [L-1:0] lane_en = '0, wmask;
  int checks = 0, failures = 0, nsat = 0, nwr = 0;

  felix_bitserial_alu #(.LANES(L), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      logic [L-1:0][DW-1:0] er;
      logic [L-1:0] em;
      int cycles;
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        a_vec[l] = DW'($urandom); b_vec[l] = DW'($urandom_range(0, 60)); old_vec[l] = DW'($urandom);
        if ($urandom_range(0, 7) == 0) a_vec[l] = '1;
        if ($urandom_range(0, 7) == 0) b_vec[l] = '1;
        lane_en[l] = ($urandom_range(0, 4) != 0);
        begin
          int s;
          s = int'(a_vec[l]) + int'(b_vec[l]);
          if (a_vec[l] == '1 || b_vec[l] == '1 || s > 255) begin er[l] = '1; nsat++; end
          else er[l] = DW'(s);
        end
        em[l] = lane_en[l] && (er[l] < old_vec[l]);
      end
      start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done && cycles < 100) begin @(negedge clk); cycles++; end
      checks++; if (cycles != 2 * DW + 1) begin failures++; $display("latency %0d", cycles); end
      checks++; if (res !== er) begin failures++; $display("res wrong"); end
      checks++; if (wmask !== em) begin failures++; $display("wmask %b exp %b", wmask, em); end
      nwr += $countones(em);
      @(negedge clk);
      checks++; if (busy) failures++;
    end
    checks++; if (nsat == 0 || nwr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
