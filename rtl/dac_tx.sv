// dac_tx: digital part of the 8-bit single-ended SST transmitter.
// Clock path: the half-rate clock C2 is divided into the quadrature
// quarter-rate clocks C4I/C4Q (quad_div2), and C4I is divided further into
// C8, C16 and C32 (subrate_clkdiv).
// Data path: the 256-bit pattern (32 samples) is captured on C32 and encoded
// into nine weight words (dac_capture_encoder); nine 32:4 serializers clocked
// by C4I emit one 4-bit word per weight per C4 period, and nine 4:1
// multiplexers driven by C4I/C4Q turn those into nine full-rate bit streams,
// seg_bits, one per pre-driver/SST output stage (analog, outside this module).
// Timing: the serializers are trees of 2:1 stages on C16, C8 and C4I, so
// sample 0 of a pattern captured at a C32 rising edge reaches seg_bits seven
// C4 periods (28 unit intervals) after that edge, and the 32 samples follow at
// one per unit interval (half a C2 period), back to back with the next
// pattern. Sample rate = 2 x f(C2). The block structure is the published one;
// the bit orders are this design's choices.
module dac_tx
  import awg_pkg::*;
(
  input  logic              c2,
  input  logic              rst_n,
  input  logic [PAT_W-1:0]  pattern,
  output logic              c32,
  output logic [NSEG-1:0]   seg_bits
);
  logic c4i, c4q, c8, c16;
  logic [NSEG-1:0][31:0] seg;
  logic [NSEG-1:0][3:0]  qword;

  quad_div2      u_div2  (.c2, .rst_n, .c4i, .c4q);
  subrate_clkdiv u_subr  (.c4i, .rst_n, .c8, .c16, .c32);

  dac_capture_encoder u_cap (.c32, .rst_n, .pattern, .seg);

  for (genvar w = 0; w < int'(NSEG); w++) begin : g_seg
    ser32to4 u_ser (.c4i, .c8, .c16, .c32, .rst_n, .din(seg[w]), .dout(qword[w]));
    mux4_seg u_mux (.c4i, .c4q, .d(qword[w]), .q(seg_bits[w]));
  end
endmodule
