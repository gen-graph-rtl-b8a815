// shared_banked_sram: the 256 KB shared banked SRAM of a processing unit.
//
// Stores node alignment states for the Hop path: 8192 entries of 256 bits
// (one dual-BPLU state vector) = 256 KB, in 32 banks of 256 entries. The
// bank of an address is hashed, bank = addr[4:0] ^ addr[9:5], and the row is
// addr[12:5]; the mapping is one-to-one. NPORTS requesters (a read port and
// a write port per PE) present requests every cycle; each bank serves one
// request per cycle, lowest port index first, and gnt tells each port
// whether it was served. A granted read returns data one cycle later with
// rvalid. Ungranted requests must be held by the requester (the PU stalls).
// The paper gives the size, the 32 banks and "hashed bank mapping"; the hash
// function, the port count and the fixed priority are this design's.
module shared_banked_sram #(
  parameter int unsigned NPORTS  = 128,
  parameter int unsigned ENTRIES = 8192,
  parameter int unsigned DW      = 256,
  parameter int unsigned BANKS   = 32
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic [NPORTS-1:0]                       req,
  input  logic [NPORTS-1:0]                       we,
  input  logic [NPORTS-1:0][$clog2(ENTRIES)-1:0]  addr,
  input  logic [NPORTS-1:0][DW-1:0]               wdata,
  output logic [NPORTS-1:0]                       gnt,
  output logic [NPORTS-1:0]                       rvalid,
  output logic [NPORTS-1:0][DW-1:0]               rdata,
  output logic [BANKS-1:0]                        conflict  // bank had >1 request this cycle
);
  localparam int unsigned AW  = $clog2(ENTRIES);
  localparam int unsigned BW  = $clog2(BANKS);
  localparam int unsigned RPB = ENTRIES / BANKS;
  localparam int unsigned RW  = $clog2(RPB);
  localparam int unsigned PW  = $clog2(NPORTS);

  function automatic logic [BW-1:0] bank_of(logic [AW-1:0] a);
    return a[BW-1:0] ^ a[2*BW-1:BW];
  endfunction

  logic [DW-1:0] mem [BANKS][RPB];

  logic [BANKS-1:0]         bank_act;
  logic [BANKS-1:0][PW-1:0] bank_win;

  always_comb begin
    bank_act = '0;
    bank_win = '0;
    conflict = '0;
    gnt      = '0;
    for (int p = NPORTS - 1; p >= 0; p--) begin
      if (req[p]) begin
        if (bank_act[bank_of(addr[p])]) conflict[bank_of(addr[p])] = 1'b1;
        bank_act[bank_of(addr[p])] = 1'b1;
        bank_win[bank_of(addr[p])] = PW'(p);
      end
    end
    for (int unsigned b = 0; b < BANKS; b++)
      if (bank_act[b]) gnt[bank_win[b]] = 1'b1;
  end

  always_ff @(posedge clk) begin
    for (int unsigned b = 0; b < BANKS; b++) begin
      if (bank_act[b] && we[bank_win[b]])
        mem[b][addr[bank_win[b]][AW-1:BW]] <= wdata[bank_win[b]];
    end
    for (int unsigned p = 0; p < NPORTS; p++)
      if (gnt[p] && !we[p])
        rdata[p] <= mem[bank_of(addr[p])][addr[p][AW-1:BW]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= '0;
    else        rvalid <= gnt & ~we;
  end
endmodule
