// subrate_clkdiv: derives the sub-rate clocks C8, C16 and C32 from C4I by
// frequency division, as a ripple chain of three divide-by-two stages.
// C32 (one rising edge per 32 samples) captures the pattern at the
// transmitter input; inverted, it clocks the pattern generator.
// The chain of /2 stages is this design's choice for "frequency division".
module subrate_clkdiv (
  input  logic c4i,
  input  logic rst_n,
  output logic c8,
  output logic c16,
  output logic c32
);
  clk_div2 u_d8  (.clk_in(c4i), .rst_n, .clk_out(c8));
  clk_div2 u_d16 (.clk_in(c8),  .rst_n, .clk_out(c16));
  clk_div2 u_d32 (.clk_in(c16), .rst_n, .clk_out(c32));
endmodule
