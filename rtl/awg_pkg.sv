// awg_pkg: constants and types shared by the SRAM-based arbitrary waveform
// generator. The memory organisation (four 512 x 16 B instances, 32 KB,
// 512-bit lines, 256-bit output pattern, 8-bit samples, nine DAC weights)
// follows the published architecture. The serial frame, the register map
// and the command structs are this design's own choices.
package awg_pkg;

  // ---- memory organisation -------------------------------------------
  localparam int unsigned SAMPLE_W   = 8;     // DAC resolution
  localparam int unsigned NINST      = 4;     // SRAM instances
  localparam int unsigned ROWS       = 512;   // words per instance
  localparam int unsigned WBYTES     = 16;    // bytes per word
  localparam int unsigned ROW_W      = $clog2(ROWS);
  localparam int unsigned LINE_BYTES = NINST * WBYTES;          // 64
  localparam int unsigned LINE_W     = LINE_BYTES * SAMPLE_W;   // 512
  localparam int unsigned PAT_W      = LINE_W / 2;              // 256
  localparam int unsigned ROT_W      = $clog2(LINE_BYTES);      // 6
  localparam int unsigned BADDR_W    = $clog2(ROWS * LINE_BYTES); // 15

  // ---- DAC segmentation ------------------------------------------------
  localparam int unsigned NBIN  = 6;   // binary weights LSB..MSB-2
  localparam int unsigned NTHERM = 3;  // thermometer weights from MSB, MSB-1
  localparam int unsigned NSEG  = NBIN + NTHERM; // 9

  // ---- serial register interface ----------------------------------------
  localparam int unsigned REG_AW = 6;
  localparam int unsigned REG_DW = 16;

  typedef struct packed {
    logic              valid;  // one-cycle strobe
    logic              write;  // 1 = write, 0 = read
    logic [REG_AW-1:0] addr;
    logic [REG_DW-1:0] wdata;
  } reg_req_t;

  // register map
  localparam logic [REG_AW-1:0] R_CTRL      = 6'h00; // W: b0 start, b1 stop (pulses); b2 loop (level)
  localparam logic [REG_AW-1:0] R_STATUS    = 6'h01; // R: b0 playing, b1 write pending, b2 write overflow (W1C)
  localparam logic [REG_AW-1:0] R_START_ROW = 6'h02;
  localparam logic [REG_AW-1:0] R_END_ROW   = 6'h03;
  localparam logic [REG_AW-1:0] R_ROT       = 6'h04;
  localparam logic [REG_AW-1:0] R_IDLE      = 6'h05;
  localparam logic [REG_AW-1:0] R_MEM_ADDR  = 6'h06; // byte pointer, bit 0 ignored
  localparam logic [REG_AW-1:0] R_MEM_DATA  = 6'h07; // W: two bytes at pointer, pointer += 2
  localparam logic [REG_AW-1:0] R_ID        = 6'h3F; // R: constant identification word

  localparam logic [REG_DW-1:0] ID_VALUE = 16'hA7C5;

  // command to the four SRAM instances (shared by all of them)
  typedef struct packed {
    logic                   ce;
    logic                   we;
    logic [ROW_W-1:0]       row;
    logic [NINST*WBYTES-1:0] bwe;    // byte enables over the whole line
    logic [LINE_W-1:0]      wdata;   // line-wide write data
  } sram_cmd_t;

endpackage
