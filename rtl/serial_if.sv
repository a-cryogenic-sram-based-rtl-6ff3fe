// serial_if: the chip's bidirectional serial interface (pins SCK, SDI, SDO)
// to the control processor, turned into register reads and writes for the
// controller.
// Frame (all fields MSB first, SDI sampled on SCK rising edges, SDI idle low):
//   start bit '1' | R/W (1 = write) | 6-bit register address | 16 data bits
// For a write the request is issued after the last data bit. For a read the
// request is issued after the address; the register value is driven on SDO
// during the 16 data-bit slots, changing on SCK falling edges, so the host
// samples it on the rising edges. SDO is low otherwise.
// SCK and SDI are oversampled with two-flop synchronisers in the controller
// clock domain (CK64), so f(SCK) must not exceed f(CK64)/8.
// The three pins are published; the frame format and the oversampling are
// this design's choices: the published description only names the interface.
module serial_if
  import awg_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sck,
  input  logic              sdi,
  output logic              sdo,
  output reg_req_t          req,
  input  logic [REG_DW-1:0] rdata
);
  localparam int unsigned HDR_BITS   = 1 + REG_AW;          // 7
  localparam int unsigned FRAME_BITS = HDR_BITS + REG_DW;   // 23 after the start bit

  logic [2:0] sck_s;
  logic [1:0] sdi_s;
  logic       sck_rise, sck_fall;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sck_s <= '0;
      sdi_s <= '0;
    end else begin
      sck_s <= {sck_s[1:0], sck};
      sdi_s <= {sdi_s[0], sdi};
    end

  assign sck_rise =  sck_s[1] & ~sck_s[2];
  assign sck_fall = ~sck_s[1] &  sck_s[2];

  typedef enum logic {S_IDLE, S_FRAME} state_t;
  state_t                   state;
  logic [4:0]               nbits;
  logic [FRAME_BITS-2:0]    shreg;
  logic [FRAME_BITS-1:0]    shreg_n;
  logic [REG_DW-1:0]        rd_shift;
  logic [4:0]               rd_left;

  assign shreg_n = {shreg, sdi_s[1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      nbits    <= '0;
      shreg    <= '0;
      req      <= '0;
      rd_shift <= '0;
      rd_left  <= '0;
      sdo      <= 1'b0;
    end else begin
      req.valid <= 1'b0;
      if (sck_rise) begin
        unique case (state)
          S_IDLE: if (sdi_s[1]) begin
            state <= S_FRAME;
            nbits <= '0;
          end
          S_FRAME: begin
            shreg <= shreg_n[FRAME_BITS-2:0];
            nbits <= nbits + 5'd1;
            // header complete: R/W bit and address are shreg_n[6:0]
            if (nbits == 5'(HDR_BITS - 1) && !shreg_n[HDR_BITS-1]) begin
              req.valid <= 1'b1;
              req.write <= 1'b0;
              req.addr  <= shreg_n[REG_AW-1:0];
              req.wdata <= '0;
            end
            if (nbits == 5'(FRAME_BITS - 1)) begin
              state <= S_IDLE;
              if (shreg_n[FRAME_BITS-1]) begin
                req.valid <= 1'b1;
                req.write <= 1'b1;
                req.addr  <= shreg_n[REG_DW +: REG_AW];
                req.wdata <= shreg_n[REG_DW-1:0];
              end
            end
          end
          default: state <= S_IDLE;
        endcase
      end
      // read data returns combinationally in the cycle the request is valid
      if (req.valid && !req.write) begin
        rd_shift <= rdata;
        rd_left  <= 5'(REG_DW);
      end else if (sck_fall) begin
        if (rd_left != 0) begin
          sdo      <= rd_shift[REG_DW-1];
          rd_shift <= {rd_shift[REG_DW-2:0], 1'b0};
          rd_left  <= rd_left - 5'd1;
        end else begin
          sdo <= 1'b0;
        end
      end
    end
  end

  // a request is a one-cycle strobe: a frame can never yield two in a row
  a_req_strobe: assert property (@(posedge clk) disable iff (!rst_n)
    req.valid |=> !req.valid);
endmodule
