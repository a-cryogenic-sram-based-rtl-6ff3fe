// ser32to4: one 32:4 serializer of the transmitter. Nine of these, one per
// DAC weight, turn each weight's 32-bit word (one bit of each of the 32
// samples in a C32 period) into eight 4-bit words at quarter rate.
// It is a tree of three 2:1 stages, each clocked by its own sub-rate clock,
// which is how the published design feeds C4I, C8, C16 and C32 to the
// serializers:
//   stage 1 (C16): 32 -> 16 bits, stage 2 (C8): 16 -> 8, stage 3 (C4I): 8 -> 4.
// Each stage looks at the next slower clock just before its own edge: if that
// clock is high, the stage takes the lower half of the slower stage's word
// and keeps the upper half, which it sends on its following edge. So the
// 4-bit words leave in the order bits [3:0], [7:4], ... [31:28].
// Timing, counting C4I rising edges from the one where C32 rises (edge 0,
// where din is captured): stage 1 loads at edge 4, stage 2 at edge 6, and the
// first 4-bit word is on dout after edge 7; a new word follows every edge.
// The 32:4 ratio, the quarter-rate output and the clocks used are published;
// the half order and the stage structure are this design's choices.
module ser32to4 (
  input  logic        c4i,
  input  logic        c8,
  input  logic        c16,
  input  logic        c32,
  input  logic        rst_n,
  input  logic [31:0] din,
  output logic [3:0]  dout
);
  logic [15:0] s16, h16;
  logic [7:0]  s8,  h8;
  logic [3:0]  h4;

  // stage 1: C32 -> C16
  always_ff @(posedge c16 or negedge rst_n)
    if (!rst_n) begin
      s16 <= '0; h16 <= '0;
    end else if (c32) begin
      s16 <= din[15:0]; h16 <= din[31:16];
    end else begin
      s16 <= h16;
    end

  // stage 2: C16 -> C8
  always_ff @(posedge c8 or negedge rst_n)
    if (!rst_n) begin
      s8 <= '0; h8 <= '0;
    end else if (c16) begin
      s8 <= s16[7:0]; h8 <= s16[15:8];
    end else begin
      s8 <= h8;
    end

  // stage 3: C8 -> C4
  always_ff @(posedge c4i or negedge rst_n)
    if (!rst_n) begin
      dout <= '0; h4 <= '0;
    end else if (c8) begin
      dout <= s8[3:0]; h4 <= s8[7:4];
    end else begin
      dout <= h4;
    end
endmodule
