// pg_serializer: the pattern generator's 2:1 digital serializer from the CK64
// domain (512-bit lines) to the CK32 domain (256-bit patterns).
// CK64 is CK32 divided by two, so every CK64 edge coincides with a CK32 edge.
// ck64_phase is the CK64 level seen just before a CK32 edge: 0 means CK64 is
// about to rise, i.e. the line launched at the previous CK64 edge is stable.
// At that edge the lower half (samples 0..31) is sent and the upper half is
// kept; at the next CK32 edge the upper half (samples 32..63) is sent.
// One 256-bit pattern leaves per CK32 cycle. The 512-to-256 ratio and clocks
// are published; the half order is this design's choice.
module pg_serializer #(
  parameter int unsigned W = 256
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           ck64_phase,
  input  logic [2*W-1:0] din,
  output logic [W-1:0]   dout
);
  logic [W-1:0] upper;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upper <= '0;
      dout  <= '0;
    end else if (!ck64_phase) begin
      dout  <= din[W-1:0];
      upper <= din[2*W-1:W];
    end else begin
      dout  <= upper;
    end
  end
endmodule
