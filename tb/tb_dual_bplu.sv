// tb_dual_bplu: self-checking testbench for the paired BPLU with its carry MUX.
// In long mode the high unit must take the low unit's carry-out, making one
// 256-bit shift across both windows; in short mode it must take the constant
// carry, so the two halves are independent 128-bit reads. A reference model
// computes both cases bit by bit.
module tb_dual_bplu;
  import gg_pkg::*;
  localparam int W = 128;
  map_mode_e mode;
  logic [2*W-1:0] d_in, mask, s_new, exp_s;
  logic c_in_lo, const_c, c_out, c_out_lo;
  logic [1:0] nonzero;
  logic [6:0] msb_lo, msb_hi;
  int checks = 0, failures = 0, nlong = 0, nshort = 0;

  dual_bplu #(.W(W)) dut (.*);

  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check_one();
    logic chi;
    int ml, mh;
    #1;
    for (int i = 0; i < W; i++) exp_s[i] = ((i == 0) ? c_in_lo : d_in[i-1]) & mask[i];
    chi = (mode == MODE_LONG) ? exp_s[W-1] : const_c;
    for (int i = W; i < 2*W; i++) exp_s[i] = ((i == W) ? chi : d_in[i-1]) & mask[i];
    ml = 0; mh = 0;
    for (int i = 0; i < W; i++) begin if (exp_s[i]) ml = i; if (exp_s[W+i]) mh = i; end
    checks++; if (s_new !== exp_s) begin failures++; $display("s_new mismatch mode %0d", mode); end
    checks++; if (c_out !== exp_s[2*W-1] || c_out_lo !== exp_s[W-1]) failures++;
    checks++; if (nonzero !== {exp_s[2*W-1:W] != 0, exp_s[W-1:0] != 0}) failures++;
    checks++; if (msb_lo !== 7'(ml) || msb_hi !== 7'(mh)) failures++;
    if (mode == MODE_LONG) nlong++; else nshort++;
  endtask

  initial begin
    // long mode: carry out of low unit must cross into high unit
    mode = MODE_LONG; d_in = '0; d_in[W-2] = 1; mask = '1; c_in_lo = 0; const_c = 0; check_one();
    checks++; if (s_new[W] !== 1'b1) failures++;
    // short mode: the same input must not cross
    mode = MODE_SHORT; d_in = '0; d_in[W-2] = 1; mask = '1; c_in_lo = 0; const_c = 0; check_one();
    checks++; if (s_new[W] !== 1'b0) failures++;
    for (int n = 0; n < 600; n++) begin
      for (int k = 0; k < 2*W/32; k++) begin d_in[k*32 +: 32] = $urandom; mask[k*32 +: 32] = $urandom | $urandom; end
      mode = map_mode_e'($urandom_range(0, 1));
      c_in_lo = 1'($urandom); const_c = 1'($urandom);
      check_one();
    end
    checks++; if (nlong == 0 || nshort == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
