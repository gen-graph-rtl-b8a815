// ring_router: lightweight unidirectional ring linking the PUs of the
// traversal tile.
//
// One ring slot per stop; every cycle each slot moves to the next stop. A
// packet {dst, data} leaves the ring at stop dst (ej_valid for one cycle).
// A stop may inject when the slot arriving at it is empty or is being
// ejected there; traffic already on the ring has priority, so inj_ready
// drops while a passing packet occupies the slot. A packet to stop s takes
// (s - source) mod NSTOP cycles. Local traffic (dst = own stop) must not be
// injected. The paper names the ring and its 128 GB/s links; slot width,
// flow control and priority are this design's.
module ring_router #(
  parameter int unsigned NSTOP = 16,
  parameter int unsigned PW    = 146
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [NSTOP-1:0]                 inj_valid,
  input  logic [NSTOP-1:0][$clog2(NSTOP)-1:0] inj_dst,
  input  logic [NSTOP-1:0][PW-1:0]         inj_data,
  output logic [NSTOP-1:0]                 inj_ready,
  output logic [NSTOP-1:0]                 ej_valid,
  output logic [NSTOP-1:0][PW-1:0]         ej_data,
  output logic [31:0]                      hops
);
  localparam int unsigned SW = $clog2(NSTOP);
  typedef struct packed {
    logic          valid;
    logic [SW-1:0] dst;
    logic [PW-1:0] data;
  } slot_t;

  slot_t [NSTOP-1:0] slot;      // slot[s] is the packet arriving at stop s
  slot_t [NSTOP-1:0] leave;     // what stop s passes on

  always_comb begin
    for (int unsigned s = 0; s < NSTOP; s++) begin
      ej_valid[s]  = slot[s].valid && (slot[s].dst == SW'(s));
      ej_data[s]   = slot[s].data;
      inj_ready[s] = !slot[s].valid || ej_valid[s];
      if (inj_valid[s] && inj_ready[s])
        leave[s] = '{valid: 1'b1, dst: inj_dst[s], data: inj_data[s]};
      else if (slot[s].valid && !ej_valid[s])
        leave[s] = slot[s];
      else
        leave[s] = '0;
    end
  end

  // packets moving one stop this cycle (link activity)
  logic [SW:0] nmove;
  always_comb begin
    nmove = '0;
    for (int unsigned s = 0; s < NSTOP; s++) nmove = nmove + (SW+1)'(leave[s].valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0;
      hops <= '0;
    end else begin
      for (int unsigned s = 0; s < NSTOP; s++) slot[(s + 1) % NSTOP] <= leave[s];
      hops <= hops + 32'(nmove);
    end
  end

  for (genvar s = 0; s < NSTOP; s++) begin : g_chk
    a_no_local: assert property (@(posedge clk) disable iff (!rst_n)
      inj_valid[s] |-> inj_dst[s] != SW'(s));
  end
endmodule
