// dual_bplu: two 128-bit BPLUs joined by a mode-controlled carry MUX.
//
// Low unit = vector bits 0-127, high unit = bits 128-255. In long mode the
// carry MUX passes the low unit's carry-out into the high unit's carry-in,
// so the pair evaluates two consecutive query windows of one read for the
// same graph node in one cycle (a 256-bit unit). In short mode the carry is
// blocked and the high unit takes the constant carry const_c, so the pair
// works as two independent 128-bit units (two reads). The mode bit, the
// carry MUX and the constant input follow the paper's carry-chain figure;
// using the pair for two windows of one read (long) or two reads (short) is
// this design's reading of it. Combinational.
module dual_bplu
  import gg_pkg::*;
#(
  parameter int unsigned W = 128
) (
  input  map_mode_e            mode,
  input  logic [2*W-1:0]       d_in,
  input  logic                 c_in_lo,
  input  logic                 const_c,     // carry-in of the high unit in short mode
  input  logic [2*W-1:0]       mask,
  output logic [2*W-1:0]       s_new,
  output logic                 c_out,       // carry-out of the high unit
  output logic                 c_out_lo,
  output logic [1:0]           nonzero,     // {high, low}
  output logic [$clog2(W)-1:0] msb_lo,
  output logic [$clog2(W)-1:0] msb_hi
);
  logic c_in_hi;

  bplu #(.W(W)) u_lo (
    .d_in(d_in[W-1:0]), .c_in(c_in_lo), .mask(mask[W-1:0]),
    .s_new(s_new[W-1:0]), .c_out(c_out_lo), .nonzero(nonzero[0]), .msb_idx(msb_lo));

  // Carry MUX: long mode -> pass, short mode -> block (constant).
  assign c_in_hi = (mode == MODE_LONG) ? c_out_lo : const_c;

  bplu #(.W(W)) u_hi (
    .d_in(d_in[2*W-1:W]), .c_in(c_in_hi), .mask(mask[2*W-1:W]),
    .s_new(s_new[2*W-1:W]), .c_out(c_out), .nonzero(nonzero[1]), .msb_idx(msb_hi));
endmodule
