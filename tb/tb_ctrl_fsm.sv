// tb_ctrl_fsm: drives register requests straight into the controller and
// records every SRAM command it issues. Checks: register write/read-back;
// a MEM_DATA write becomes one SRAM write with the right row, byte enables
// and bytes; a single playback reads START_ROW..END_ROW on consecutive cycles
// (one line per clock) with rd_valid and rot following one cycle later; a
// looped playback wraps from the last row to row 0 and back to START_ROW until
// stopped; a host write during playback is deferred until playback ends, a
// second one is dropped and flags overflow.
module tb_ctrl_fsm;
  import awg_pkg::*;
  logic clk = 0, rst_n = 1;
  reg_req_t req = '0;
  logic [REG_DW-1:0] rdata;
  sram_cmd_t cmd;
  logic rd_valid, playing, wr_deferred;
  logic [ROT_W-1:0] rot;
  logic [7:0] idle_code;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  int cyc = 0;
  // log of SRAM commands: cycle, we, row
  int log_cyc[$]; logic log_we[$]; int log_row[$]; sram_cmd_t log_cmd[$];
  int valid_cyc[$]; int n_deferred = 0;

  ctrl_fsm dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (cmd.ce) begin
      log_cyc.push_back(cyc); log_we.push_back(cmd.we); log_row.push_back(int'(cmd.row)); log_cmd.push_back(cmd);
    end
    if (rd_valid) begin
      valid_cyc.push_back(cyc);
      if (rot !== 6'd3) failures++;
    end
    if (wr_deferred) n_deferred++;
  end

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input logic [5:0] a, input logic [15:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd(input logic [5:0] a, output logic [15:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0};
    #1 d = rdata;
    @(negedge clk);
    req = '0;
  endtask

  task automatic expect_eq(input int got, input int exp_v, input string what);
    checks++;
    if (got != exp_v) begin failures++; $display("%s: got %0d exp %0d", what, got, exp_v); end
  endtask

  initial begin
    logic [15:0] d;
    int c0;
    #12 rst_n = 1;
    // registers
    wr(R_START_ROW, 5); wr(R_END_ROW, 8); wr(R_ROT, 3); wr(R_IDLE, 16'h11);
    rd(R_START_ROW, d); expect_eq(d, 5, "start_row");
    rd(R_END_ROW, d);   expect_eq(d, 8, "end_row");
    rd(R_ROT, d);       expect_eq(d, 3, "rot");
    rd(R_IDLE, d);      expect_eq(d, 16'h11, "idle");
    expect_eq(idle_code, 8'h11, "idle_code out");
    rd(R_ID, d);        expect_eq(d, ID_VALUE, "id");

    // one memory write
    wr(R_MEM_ADDR, 15'h01A2);
    log_cyc.delete(); log_we.delete(); log_row.delete(); log_cmd.delete();
    wr(R_MEM_DATA, 16'hBEEF);
    repeat (3) @(negedge clk);
    expect_eq(log_cmd.size(), 1, "write commands");
    if (log_cmd.size() == 1) begin
      expect_eq(log_we[0], 1, "we");
      expect_eq(log_row[0], 6, "write row");
      expect_eq(log_cmd[0].bwe == (64'h3 << 6'h22), 1, "bwe");
      expect_eq(log_cmd[0].wdata[8*'h22 +: 16], 16'hBEEF, "write bytes");
    end
    rd(R_MEM_ADDR, d); expect_eq(d, 16'h01A4, "pointer advance");

    // single playback rows 5..8
    log_cyc.delete(); log_we.delete(); log_row.delete(); log_cmd.delete(); valid_cyc.delete();
    wr(R_CTRL, 16'h0001);
    repeat (10) @(negedge clk);
    expect_eq(log_row.size(), 4, "lines read");
    for (int i = 0; i < log_row.size() && i < 4; i++) begin
      expect_eq(log_row[i], 5 + i, "play row");
      expect_eq(log_we[i], 0, "play read");
      if (i > 0) expect_eq(log_cyc[i] - log_cyc[i-1], 1, "one line per cycle");
    end
    expect_eq(valid_cyc.size(), 4, "rd_valid count");
    if (valid_cyc.size() == 4 && log_cyc.size() == 4)
      expect_eq(valid_cyc[0] - log_cyc[0], 1, "rd_valid latency");
    expect_eq(playing, 0, "back to idle");

    // looped playback over the wrap 510, 511, 0, 1
    wr(R_START_ROW, 510); wr(R_END_ROW, 1);
    log_row.delete(); log_cyc.delete(); log_we.delete(); log_cmd.delete();
    wr(R_CTRL, 16'h0005);
    // host write while playing: deferred; a second one overflows
    wr(R_MEM_ADDR, 16'h0010);
    wr(R_MEM_DATA, 16'h1234);
    wr(R_MEM_DATA, 16'h5678);
    rd(R_STATUS, d); expect_eq(d, 16'h7, "status playing+pending+overflow");
    repeat (6) @(negedge clk);
    wr(R_CTRL, 16'h0002);   // stop
    repeat (4) @(negedge clk);
    expect_eq(playing, 0, "stopped");
    c0 = 0;
    for (int i = 0; i < log_row.size(); i++) begin
      if (log_we[i]) begin
        c0++;
        expect_eq(i, log_row.size() - 1, "write after playback");
        expect_eq(log_row[i], 0, "deferred row");
        expect_eq(log_cmd[i].wdata[8*'h10 +: 16], 16'h1234, "deferred data");
      end else begin
        int e;
        e = (i % 4 == 0) ? 510 : (i % 4 == 1) ? 511 : (i % 4 == 2) ? 0 : 1;
        expect_eq(log_row[i], e, "loop row");
      end
    end
    expect_eq(c0, 1, "one deferred write performed");
    checks++; if (log_row.size() < 12) failures++;
    checks++; if (n_deferred == 0) failures++;
    wr(R_STATUS, 16'h4);
    rd(R_STATUS, d); expect_eq(d, 0, "overflow cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
