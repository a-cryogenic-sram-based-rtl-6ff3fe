// sram_512x16b: one waveform memory instance, 512 words of 16 bytes.
// Four of these give the 32 KB waveform store; they are read side by side so
// that one address returns a 512-bit line of 64 eight-bit samples.
// The array stands for a foundry single-port SRAM macro. The word count and
// width are the published ones; the port list (chip enable, write enable,
// per-byte write enables) and the one-cycle synchronous read are this
// design's assumptions about the macro.
// Timing: on a rising clk edge with ce=1, we=1 the enabled bytes of wdata are
// written to addr; with ce=1, we=0 the word at addr appears on rdata after the
// edge and is held until the next read.
module sram_512x16b #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned BYTES = 16
) (
  input  logic                       clk,
  input  logic                       ce,
  input  logic                       we,
  input  logic [$clog2(WORDS)-1:0]   addr,
  input  logic [BYTES-1:0]           bwe,
  input  logic [BYTES*8-1:0]         wdata,
  output logic [BYTES*8-1:0]         rdata
);
  logic [BYTES*8-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (ce) begin
      if (we) begin
        for (int b = 0; b < int'(BYTES); b++)
          if (bwe[b]) mem[addr][b*8 +: 8] <= wdata[b*8 +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
