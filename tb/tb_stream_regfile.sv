// tb_stream_regfile: checks the three-entry streaming register file of a PE:
// reset and clear empty it, the pair port loads entries 0 and 1 in one cycle,
// the single port loads any entry, and the pair port wins on entry 0/1 when
// both write it. A shadow copy kept here is compared after every clock.
module tb_stream_regfile;
  localparam int W = 128;
  logic clk = 0, rst_n = 0, clr = 0, we_pair = 0, we = 0;
  logic [2*W-1:0] wdata_pair = '0;
  logic [1:0] waddr = '0;
  logic [W-1:0] wdata = '0;
  logic [2:0][W-1:0] rdata, shadow;
  int checks = 0, failures = 0;

  stream_regfile #(.W(W), .ENTRIES(3)) dut (.*);
  always #5 clk = ~clk;

  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    shadow = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      clr = ($urandom_range(0, 30) == 0);
      we_pair = 1'($urandom); we = 1'($urandom);
      waddr = 2'($urandom_range(0, 2));
      for (int k = 0; k < 2*W/32; k++) wdata_pair[k*32 +: 32] = $urandom;
      for (int k = 0; k < W/32; k++) wdata[k*32 +: 32] = $urandom;
      if (clr) shadow = '0;
      else begin
        if (we) shadow[waddr] = wdata;
        if (we_pair) begin shadow[0] = wdata_pair[W-1:0]; shadow[1] = wdata_pair[2*W-1:W]; end
      end
      @(posedge clk); #1;
      checks++; if (rdata !== shadow) begin failures++; $display("mismatch at %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
