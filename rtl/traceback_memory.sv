// traceback_memory: Tier-3 traceback memory of a traversal PE (4 KB).
//
// A circular log of 2-bit direction codes, one per processed node step
// (16384 entries x 2 bits = 4 KB, i.e. the "about 16 000 steps" of the
// paper). The PE writes a code on every step; once full the oldest entries
// are overwritten. Replay reads entries back newest-first: replay offset 0
// is the last step logged. The direction code ({hop predecessor active,
// self predecessor active}) is this design's choice; the paper only says
// "direction bits". Write: one entry per cycle when log_we. Replay: 1-cycle
// registered read.
module traceback_memory #(
  parameter int unsigned DEPTH  = 16384,
  parameter int unsigned CODE_W = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     log_we,
  input  logic [CODE_W-1:0]        log_code,
  input  logic [$clog2(DEPTH)-1:0] replay_off,
  output logic [CODE_W-1:0]        replay_code,
  output logic [$clog2(DEPTH):0]   fill          // valid entries, saturates at DEPTH
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [CODE_W-1:0] mem [DEPTH];
  logic [AW-1:0]     wp;

  always_ff @(posedge clk) begin
    if (log_we) mem[wp] <= log_code;
    replay_code <= mem[wp - AW'(1) - replay_off];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp   <= '0;
      fill <= '0;
    end else if (clr) begin
      wp   <= '0;
      fill <= '0;
    end else if (log_we) begin
      wp <= wp + AW'(1);
      if (fill != (AW+1)'(DEPTH)) fill <= fill + 1'b1;
    end
  end
endmodule
