// mux4_seg: the 4:1 multiplexer at the head of each DAC weight. It turns a
// quarter-rate 4-bit word into a full-rate bit stream by selecting one bit per
// quarter of the C4 period, using the levels of the quadrature clocks:
//   (C4I,C4Q) = (1,0) -> d[0], (1,1) -> d[1], (0,1) -> d[2], (0,0) -> d[3]
// With C4Q lagging C4I by a quarter period, d[0] is sent first after the
// C4I rising edge. Every weight has its own multiplexer so that all weights
// see the same load at the full rate; that is the published architecture.
// The slot order is this design's choice. The output is combinational in the
// clocks; the pre-driver and SST output stage that follow are analog.
module mux4_seg (
  input  logic       c4i,
  input  logic       c4q,
  input  logic [3:0] d,
  output logic       q
);
  always_comb begin
    unique case ({c4i, c4q})
      2'b10: q = d[0];
      2'b11: q = d[1];
      2'b01: q = d[2];
      default: q = d[3];
    endcase
  end
endmodule
