// pattern_generator: the digital pattern generator of the AWG with its serial
// interface. Blocks and widths follow the published block diagram:
//   serial interface <-> controller FSM -> 4 x SRAM 512x16B -(512 b)->
//   data path with byte barrel shifter -(512 b)-> serializer -(256 b)-> pattern
// The controller, SRAM and data path run on CK64, made here from CK32 by a
// divide-by-two; the serializer runs on CK32 and emits one 256-bit pattern
// (32 samples of 8 bits, sample j in bits [8j+7:8j]) per CK32 cycle.
// A line read at a CK64 edge reaches the data path register one CK64 cycle
// later and leaves the serializer as two patterns over the following CK64
// cycle. Placing the serial interface inside this wrapper is a convenience;
// its frame format and the register map are described in serial_if/ctrl_fsm.
module pattern_generator
  import awg_pkg::*;
(
  input  logic              ck32,
  input  logic              rst_n,
  input  logic              sck,
  input  logic              sdi,
  output logic              sdo,
  output logic [PAT_W-1:0]  pattern,
  output logic              playing,
  output logic              wr_deferred
);
  logic               ck64;
  reg_req_t           req;
  logic [REG_DW-1:0]  rdata;
  sram_cmd_t          cmd;
  logic               rd_valid;
  logic [ROT_W-1:0]   rot;
  logic [7:0]         idle_code;
  logic [LINE_W-1:0]  line, line_rot;

  clk_div2 u_div64 (.clk_in(ck32), .rst_n, .clk_out(ck64));

  serial_if u_sif (.clk(ck64), .rst_n, .sck, .sdi, .sdo, .req, .rdata);

  ctrl_fsm u_ctrl (.clk(ck64), .rst_n, .req, .rdata, .cmd, .rd_valid, .rot,
                   .idle_code, .playing, .wr_deferred);

  for (genvar i = 0; i < int'(NINST); i++) begin : g_sram
    sram_512x16b #(.WORDS(ROWS), .BYTES(WBYTES)) u_sram (
      .clk   (ck64),
      .ce    (cmd.ce),
      .we    (cmd.we),
      .addr  (cmd.row),
      .bwe   (cmd.bwe[i*WBYTES +: WBYTES]),
      .wdata (cmd.wdata[i*WBYTES*8 +: WBYTES*8]),
      .rdata (line[i*WBYTES*8 +: WBYTES*8])
    );
  end

  datapath_rot #(.NBYTES(LINE_BYTES)) u_dp (
    .clk(ck64), .rst_n, .in_valid(rd_valid), .din(line), .rot, .idle_code,
    .dout(line_rot));

  pg_serializer #(.W(PAT_W)) u_ser (
    .clk(ck32), .rst_n, .ck64_phase(ck64), .din(line_rot), .dout(pattern));
endmodule
