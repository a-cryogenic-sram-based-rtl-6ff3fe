// dac_capture_encoder: the transmitter's input register and segment encoder.
// On each rising edge of C32 it captures the 256-bit pattern, which holds 32
// eight-bit samples (sample j in bits [8j+7:8j], sample 0 first in time), and
// splits every sample into the nine DAC weights:
//   seg[0..5] : the binary bits LSB..MSB-2 (weights 1..32)
//   seg[6..8] : thermometer code of MSB:MSB-1, seg[6+i] = (MSB:MSB-1 > i),
//               each of weight 64
// so the weights sum to the 8-bit code (0..255). seg[w][j] is weight w of
// sample j, i.e. each seg word is one row of the 8 x 32 b interface after
// encoding. Capture on C32 and the 6 binary + thermometer MSB/MSB-1
// segmentation are published; the sample order and the bit positions are this
// design's choice. Outputs are registered (one C32 cycle of latency).
module dac_capture_encoder
  import awg_pkg::*;
(
  input  logic                     c32,
  input  logic                     rst_n,
  input  logic [PAT_W-1:0]         pattern,
  output logic [NSEG-1:0][31:0]    seg
);
  localparam int unsigned NS = PAT_W / SAMPLE_W; // 32 samples

  logic [NSEG-1:0][31:0] seg_d;

  always_comb begin
    for (int j = 0; j < int'(NS); j++) begin
      logic [7:0] s;
      s = pattern[j*8 +: 8];
      for (int b = 0; b < int'(NBIN); b++) seg_d[b][j] = s[b];
      for (int t = 0; t < int'(NTHERM); t++) seg_d[NBIN+t][j] = (s[7:6] > 2'(t));
    end
  end

  always_ff @(posedge c32 or negedge rst_n)
    if (!rst_n) seg <= '0;
    else        seg <= seg_d;
endmodule
