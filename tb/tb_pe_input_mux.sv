// tb_pe_input_mux: checks that the four-way PE input multiplexer forwards the
// self, replay, hop and neighbour vectors for the matching select code, with
// random 256-bit data on every input so a wrong leg cannot match by chance.
module tb_pe_input_mux;
  import gg_pkg::*;
  localparam int W = 256;
  pe_src_e sel;
  logic [W-1:0] self_in, replay_in, hop_in, neighbor_in, dout, exp_d;
  int checks = 0, failures = 0;
  int seen [4];

  pe_input_mux #(.W(W)) dut (.*);

  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < 4; i++) seen[i] = 0;
    for (int n = 0; n < 400; n++) begin
      for (int k = 0; k < W/32; k++) begin
        self_in[k*32 +: 32] = $urandom; replay_in[k*32 +: 32] = $urandom;
        hop_in[k*32 +: 32] = $urandom;  neighbor_in[k*32 +: 32] = $urandom;
      end
      sel = pe_src_e'($urandom_range(0, 3));
      #1;
      case (sel)
        SRC_SELF:     exp_d = self_in;
        SRC_REPLAY:   exp_d = replay_in;
        SRC_HOP:      exp_d = hop_in;
        default:      exp_d = neighbor_in;
      endcase
      seen[int'(sel)]++;
      checks++; if (dout !== exp_d) begin failures++; $display("sel %0d wrong", sel); end
    end
    for (int i = 0; i < 4; i++) begin checks++; if (seen[i] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
