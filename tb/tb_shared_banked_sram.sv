// tb_shared_banked_sram: checks the multi-port, XOR-hashed, banked state SRAM
// at a reduced size (8 ports, 256 entries of 32 bits, 8 banks). Each cycle
// every port makes a random read or write request. The reference works out
// the bank of each address (low bits XOR next bits), grants the lowest
// requesting port of each bank, applies the granted writes to a shadow memory
// and expects granted reads one cycle later with rvalid. The conflict flag
// of a bank must be set when two or more ports asked for it.
module tb_shared_banked_sram;
  localparam int NP = 8, ENT = 256, DW = 32, BANKS = 8;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] req = '0, we = '0, gnt, rvalid;
  logic [NP-1:0][7:0] addr = '0;
  logic [NP-1:0][DW-1:0] wdata = '0, rdata;
  logic [BANKS-1:0] conflict;
  logic [DW-1:0] shadow [ENT];
  logic [NP-1:0] exp_gnt, exp_rv;
  logic [NP-1:0][DW-1:0] exp_rd;
  logic [BANKS-1:0] exp_conf, used;
  int checks = 0, failures = 0, nconf = 0;

  shared_banked_sram #(.NPORTS(NP), .ENTRIES(ENT), .DW(DW), .BANKS(BANKS)) dut (.*);
  always #5 clk = ~clk;

  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int bank(logic [7:0] a); return int'(a[2:0] ^ a[5:3]); endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill every entry through port 0
    for (int i = 0; i < ENT; i++) begin
      @(negedge clk); req = 8'h1; we = 8'h1; addr[0] = 8'(i); wdata[0] = $urandom; shadow[i] = wdata[0];
    end
    @(negedge clk); req = '0; we = '0;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        req[p] = 1'($urandom); we[p] = ($urandom_range(0, 3) == 0);
        addr[p] = 8'($urandom); wdata[p] = $urandom;
      end
      // also make hot-spot cycles where several ports hit one bank
      if (n % 7 == 0) for (int p = 0; p < NP; p++) addr[p] = {addr[p][7:3], addr[p][5:3]};
      used = '0; exp_gnt = '0; exp_conf = '0;
      for (int p = 0; p < NP; p++) if (req[p]) begin
        if (used[bank(addr[p])]) exp_conf[bank(addr[p])] = 1; else begin used[bank(addr[p])] = 1; exp_gnt[p] = 1; end
      end
      #1;
      checks++; if (gnt !== exp_gnt) begin failures++; $display("gnt %b exp %b", gnt, exp_gnt); end
      checks++; if (conflict !== exp_conf) begin failures++; $display("conflict wrong"); end
      if (exp_conf != 0) nconf++;
      exp_rv = exp_gnt & ~we;
      for (int p = 0; p < NP; p++) exp_rd[p] = shadow[addr[p]];
      for (int p = 0; p < NP; p++) if (exp_gnt[p] && we[p]) shadow[addr[p]] = wdata[p];
      @(posedge clk); #1;
      checks++; if (rvalid !== exp_rv) begin failures++; $display("rvalid wrong"); end
      for (int p = 0; p < NP; p++) if (exp_rv[p]) begin
        checks++; if (rdata[p] !== exp_rd[p]) begin failures++; $display("port %0d rdata wrong", p); end
      end
    end
    checks++; if (nconf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
