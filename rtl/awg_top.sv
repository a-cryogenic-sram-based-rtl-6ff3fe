// awg_top: digital core of the SRAM-based RF arbitrary waveform generator.
// Waveforms of up to 32K eight-bit samples are loaded over a three-wire serial
// interface into 32 KB of SRAM and played out as nine full-rate bit streams
// that drive the pre-drivers and SST output stages of an 8-bit single-ended
// DAC (six binary weights plus three thermometer-coded MSB weights).
// Clocking: the chip receives a half-rate clock C2; the sample rate is
// 2 x f(C2). The transmitter divides C2 into C4I/C4Q, C8, C16 and C32. C32
// captures each 256-bit pattern at the transmitter input, and its inverse
// (CK32) clocks the pattern generator, which divides it once more to CK64 for
// the controller, SRAM and data path, one 512-bit line per CK64 cycle.
// The analog parts (duty-cycle correctors, pre-drivers, SST output stages,
// clock receiver, ESD) are outside this module: c2 is the corrected clock and
// seg_bits are the inputs of the nine output weights (seg_bits[0..5] binary
// weights 1..32, seg_bits[6..8] thermometer weights of 64 each).
// The split into pattern generator and transmitter, the clock relations and
// the widths follow the published architecture; playing and wr_deferred are
// status outputs added by this design.
module awg_top
  import awg_pkg::*;
(
  input  logic            c2,
  input  logic            rst_n,
  input  logic            sck,
  input  logic            sdi,
  output logic            sdo,
  output logic [NSEG-1:0] seg_bits,
  output logic            playing,
  output logic            wr_deferred
);
  logic             c32, ck32;
  logic [PAT_W-1:0] pattern;

  // the pattern generator is clocked on the opposite phase of C32
  assign ck32 = ~c32;

  pattern_generator u_pg (.ck32, .rst_n, .sck, .sdi, .sdo, .pattern, .playing,
                          .wr_deferred);

  dac_tx u_tx (.c2, .rst_n, .pattern, .c32, .seg_bits);
endmodule
