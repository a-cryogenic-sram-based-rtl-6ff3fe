// ctrl_fsm: the pattern generator's controller state machine (CK64 domain).
// It holds the configuration registers written over the serial interface,
// loads waveform data into the SRAM and, during playback, reads one 512-bit
// line (64 samples, all four instances at the same row) per CK64 cycle.
// Playback: a CTRL write with bit 0 (start) latches START_ROW and ROT and
// reads rows START_ROW, START_ROW+1, ... END_ROW (wrapping at the last row).
// With CTRL bit 2 (loop) set it then restarts at START_ROW until a CTRL write
// with bit 1 (stop); otherwise it returns to idle. rd_valid and rot are
// registered so they line up with the SRAM read data one cycle after the read.
// Loading: a MEM_DATA write stores two bytes at the byte pointer MEM_ADDR
// (byte address = row*64 + sample; bit 0 ignored) and advances it by two.
// The SRAM is single-ported and read every cycle while playing, so a host
// write waits in a one-entry buffer and is performed in the first cycle with
// no playback read; a further write arriving meanwhile is dropped and sets the
// sticky overflow flag (STATUS bit 2, cleared by writing 1).
// Register reads return combinationally for the cycle the request is valid.
// Only the existence of a controller FSM is published: the register map,
// playback modes and write buffering are this design's choices.
module ctrl_fsm
  import awg_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  reg_req_t          req,
  output logic [REG_DW-1:0] rdata,
  output sram_cmd_t         cmd,
  output logic              rd_valid,
  output logic [ROT_W-1:0]  rot,
  output logic [7:0]        idle_code,
  output logic              playing,
  output logic              wr_deferred   // a pending write waited for playback this cycle
);
  typedef enum logic {S_IDLE, S_PLAY} state_t;
  state_t state;

  logic [ROW_W-1:0]   start_row, end_row, row;
  logic [ROT_W-1:0]   rot_reg, rot_play;
  logic               loop_en;
  logic [BADDR_W-1:0] mem_ptr;
  logic               wr_pend, wr_ovf;
  logic [ROW_W-1:0]   wr_row;
  logic [LINE_BYTES-1:0] wr_bwe;
  logic [REG_DW-1:0]  wr_data;

  logic wr_ctrl, wr_mem;
  assign wr_ctrl = req.valid && req.write && req.addr == R_CTRL;
  assign wr_mem  = req.valid && req.write && req.addr == R_MEM_DATA;

  assign playing     = (state == S_PLAY);
  assign wr_deferred = wr_pend && playing;

  // register read mux
  always_comb begin
    rdata = '0;
    unique case (req.addr)
      R_CTRL:      rdata = {13'b0, loop_en, 2'b00};
      R_STATUS:    rdata = {13'b0, wr_ovf, wr_pend, playing};
      R_START_ROW: rdata = 16'(start_row);
      R_END_ROW:   rdata = 16'(end_row);
      R_ROT:       rdata = 16'(rot_reg);
      R_IDLE:      rdata = 16'(idle_code);
      R_MEM_ADDR:  rdata = 16'(mem_ptr);
      R_ID:        rdata = ID_VALUE;
      default:     rdata = '0;
    endcase
  end

  // SRAM command: playback read has priority over a buffered write
  always_comb begin
    cmd = '0;
    if (state == S_PLAY) begin
      cmd.ce  = 1'b1;
      cmd.row = row;
    end else if (wr_pend) begin
      cmd.ce    = 1'b1;
      cmd.we    = 1'b1;
      cmd.row   = wr_row;
      cmd.bwe   = wr_bwe;
      cmd.wdata = {(LINE_W/REG_DW){wr_data}};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      start_row <= '0;
      end_row   <= '0;
      row       <= '0;
      rot_reg   <= '0;
      rot_play  <= '0;
      loop_en   <= 1'b0;
      idle_code <= 8'h80;
      mem_ptr   <= '0;
      wr_pend   <= 1'b0;
      wr_ovf    <= 1'b0;
      wr_row    <= '0;
      wr_bwe    <= '0;
      wr_data   <= '0;
      rd_valid  <= 1'b0;
      rot       <= '0;
    end else begin
      // alignment with the SRAM's one-cycle read latency
      rd_valid <= (state == S_PLAY);
      rot      <= rot_play;

      // buffered write is performed whenever the SRAM is not being played
      if (state != S_PLAY && wr_pend) wr_pend <= 1'b0;

      // register writes
      if (req.valid && req.write) begin
        unique case (req.addr)
          R_CTRL:      loop_en   <= req.wdata[2];
          R_STATUS:    if (req.wdata[2]) wr_ovf <= 1'b0;
          R_START_ROW: start_row <= req.wdata[ROW_W-1:0];
          R_END_ROW:   end_row   <= req.wdata[ROW_W-1:0];
          R_ROT:       rot_reg   <= req.wdata[ROT_W-1:0];
          R_IDLE:      idle_code <= req.wdata[7:0];
          R_MEM_ADDR:  mem_ptr   <= {req.wdata[BADDR_W-1:1], 1'b0};
          default: ;
        endcase
      end
      if (wr_mem) begin
        mem_ptr <= mem_ptr + BADDR_W'(2);
        if (wr_pend && (state == S_PLAY)) begin
          wr_ovf <= 1'b1;            // buffer still full: dropped
        end else begin
          wr_pend <= 1'b1;
          wr_row  <= mem_ptr[BADDR_W-1 -: ROW_W];
          wr_bwe  <= LINE_BYTES'(2'b11) << mem_ptr[ROT_W-1:0];
          wr_data <= req.wdata;
        end
      end

      // playback sequencing
      unique case (state)
        S_IDLE: if (wr_ctrl && req.wdata[0]) begin
          state    <= S_PLAY;
          row      <= start_row;
          rot_play <= rot_reg;
        end
        S_PLAY: begin
          if (wr_ctrl && req.wdata[1]) begin
            state <= S_IDLE;
          end else if (row == end_row) begin
            if (loop_en) row   <= start_row;
            else         state <= S_IDLE;
          end else begin
            row <= row + ROW_W'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the single SRAM port is never written while a line is being played
  a_no_write_in_play: assert property (@(posedge clk) disable iff (!rst_n)
    cmd.we |-> (cmd.ce && state != S_PLAY));
  // a buffered write never waits once playback has ended
  a_write_drains: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_pend && state == S_IDLE) |=> !wr_pend || $past(wr_mem));
endmodule
