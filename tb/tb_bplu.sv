// tb_bplu: self-checking testbench for one bit-parallel logic unit.
// Drives random state words, carries and match masks through a W=128 unit and
// compares s_new, the carry-out, the non-zero flag and the highest-set-bit
// index against a bit-by-bit reference loop written here. Purely
// combinational, so each vector is checked after a 1 ns settle.
module tb_bplu;
  localparam int W = 128;
  logic [W-1:0] d_in, mask, s_new, exp_s;
  logic c_in, c_out, nonzero;
  logic [6:0] msb_idx;
  int checks = 0, failures = 0;
  int exp_msb;

  bplu #(.W(W)) dut (.*);

  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check_one();
    #1;
    exp_msb = 0;
    for (int i = 0; i < W; i++) begin
      exp_s[i] = ((i == 0) ? c_in : d_in[i-1]) & mask[i];
      if (exp_s[i]) exp_msb = i;
    end
    checks++; if (s_new !== exp_s) begin failures++; $display("s_new mismatch"); end
    checks++; if (c_out !== exp_s[W-1]) failures++;
    checks++; if (nonzero !== (exp_s != 0)) failures++;
    checks++; if (msb_idx !== 7'(exp_msb)) begin failures++; $display("msb %0d exp %0d", msb_idx, exp_msb); end
  endtask

  initial begin
    // directed: all ones propagate, carry enters bit 0 only
    d_in = '0; c_in = 1; mask = '1; check_one();
    d_in = '1; c_in = 0; mask = '1; check_one();
    d_in = {1'b1, {(W-1){1'b0}}}; c_in = 0; mask = '1; check_one();
    for (int n = 0; n < 500; n++) begin
      for (int k = 0; k < W/32; k++) begin
        d_in[k*32 +: 32] = $urandom; mask[k*32 +: 32] = $urandom;
      end
      if (n % 5 == 0) mask = mask & {W/32{$urandom}};
      c_in = 1'($urandom);
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
