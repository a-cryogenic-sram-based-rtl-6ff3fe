// datapath_rot: the pattern generator's data path with byte barrel shifter.
// It registers the 512-bit line read from the four SRAM instances and rotates
// it by rot whole bytes (samples): output byte k = input byte (k + rot) mod 64.
// When in_valid is low (no line being played) every output byte is idle_code.
// Latency is one CK64 cycle. Byte rotation on the 512-bit path is published;
// the rotation direction, the single register stage and the idle fill are
// this design's choices.
module datapath_rot #(
  parameter int unsigned NBYTES = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [NBYTES*8-1:0]     din,
  input  logic [$clog2(NBYTES)-1:0] rot,
  input  logic [7:0]              idle_code,
  output logic [NBYTES*8-1:0]     dout
);
  logic [NBYTES*8-1:0] rot_d;

  // logarithmic barrel shifter: stage s rotates by 2**s bytes when rot[s]
  always_comb begin
    logic [NBYTES*8-1:0] v;
    v = din;
    for (int s = 0; s < $clog2(NBYTES); s++)
      if (rot[s]) v = (v >> (8 * (1 << s))) | (v << (8 * (int'(NBYTES) - (1 << s))));
    rot_d = v;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        dout <= '0;
    else if (in_valid) dout <= rot_d;
    else               dout <= {NBYTES{idle_code}};
endmodule
