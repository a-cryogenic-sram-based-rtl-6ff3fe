// clk_div2: divide-by-two clock divider, a toggle flip-flop on the rising
// edge of clk_in. The pattern generator uses it to make CK64 from CK32, and the
// sub-rate clock path chains three of them to make C8, C16 and C32 from C4I.
// The output rises on the first rising input edge after reset is released,
// then on every second one. The /2 from CK32 to CK64 and the division of C4I
// into C8/C16/C32 are published; the toggle flip-flop is this design's choice.
module clk_div2 (
  input  logic clk_in,
  input  logic rst_n,
  output logic clk_out
);
  always_ff @(posedge clk_in or negedge rst_n)
    if (!rst_n) clk_out <= 1'b0;
    else        clk_out <= ~clk_out;
endmodule
