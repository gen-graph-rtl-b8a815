// tb_ring_router: checks the unidirectional ring between processing units at
// 8 stops. Stops inject random packets to random other stops whenever they
// are ready; each packet carries a unique tag. Every packet must eject
// exactly once, at its destination, with its payload intact, and the hop
// counter must equal the sum over packets of the stop distance (dst - src)
// mod 8, one hop per cycle on the ring. Injection must be refused (ready low)
// at least once while a passing packet occupies the stop.
module tb_ring_router;
  localparam int NS = 8, PW = 24;
  logic clk = 0, rst_n = 0;
  logic [NS-1:0] inj_valid = '0, inj_ready, ej_valid;
  logic [NS-1:0][2:0] inj_dst = '0;
  logic [NS-1:0][PW-1:0] inj_data = '0, ej_data;
  logic [31:0] hops;
  int expect_dst [int];
  int checks = 0, failures = 0, tag = 1, sent = 0, recv = 0, blocked = 0;
  longint exp_hops = 0;

  ring_router #(.NSTOP(NS), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ejection monitor
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) if (ej_valid[s]) begin
      int t;
      t = int'(ej_data[s][PW-1:3]);
      recv++;
      checks++;
      if (!expect_dst.exists(t) || expect_dst[t] != s || ej_data[s][2:0] != 3'(s)) begin
        failures++; $display("bad ejection tag %0d at %0d", t, s);
      end else expect_dst.delete(t);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 800; n++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) begin
        if (n < 700 && $urandom_range(0, 1) == 1) begin
          int d;
          d = (s + $urandom_range(1, NS - 1)) % NS;
          inj_valid[s] = 1; inj_dst[s] = 3'(d); inj_data[s] = {21'(tag + s), 3'(d)};
        end else inj_valid[s] = 0;
      end
      #1;
      for (int s = 0; s < NS; s++) if (inj_valid[s]) begin
        if (inj_ready[s]) begin
          expect_dst[int'(inj_data[s][PW-1:3])] = int'(inj_dst[s]);
          exp_hops += (int'(inj_dst[s]) - s + NS) % NS;
          sent++;
        end else blocked++;
      end
      tag += NS;
    end
    @(negedge clk); inj_valid = '0;
    repeat (2 * NS) @(posedge clk);
    #1;
    checks++; if (expect_dst.size() != 0) begin failures++; $display("%0d packets lost", expect_dst.size()); end
    checks++; if (sent != recv) failures++;
    checks++; if (longint'(hops) != exp_hops) begin failures++; $display("hops %0d exp %0d", hops, exp_hops); end
    checks++; if (blocked == 0) failures++;
    $display("sent %0d blocked %0d", sent, blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
