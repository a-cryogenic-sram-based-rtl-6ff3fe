// tb_awg_fullmem: fills the whole 32 KB waveform memory (32768 samples, all
// 512 rows of the four instances) through the serial pins with a
// pseudo-random pattern that also marks each row with its own number, plays
// rows 0..511 once and checks that all 32768 samples leave back to back in
// order, framed by the idle code. This is the longest waveform the AWG holds:
// about 2.3 us at 14 GS/s.
module tb_awg_fullmem;
  import awg_pkg::*;
  logic c2 = 0, rst_n = 1, sck = 0, sdi = 0, sdo, playing, wr_deferred;
  logic [NSEG-1:0] seg_bits;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  localparam int HALF_SCK = 1600;
  logic [7:0] mem [0:ROWS*LINE_BYTES-1];
  byte unsigned codes [$];
  bit capture = 0;

  awg_top dut (.*);

  always #5 c2 = ~c2;

  function automatic byte unsigned code_of(logic [NSEG-1:0] b);
    int s = 0;
    for (int i = 0; i < 6; i++) s += int'(b[i]) << i;
    for (int t = 0; t < 3; t++) s += 64 * int'(b[6+t]);
    return byte'(s);
  endfunction

  always @(c2) if (capture) begin
    #2 codes.push_back(code_of(seg_bits));
  end

  initial begin
    #2000000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic frame(input logic wr, input logic [5:0] a, input logic [15:0] d,
                       output logic [15:0] rd);
    logic [23:0] f;
    f = {1'b1, wr, a, d};
    rd = '0;
    for (int i = 23; i >= 0; i--) begin
      sdi = f[i];
      #HALF_SCK sck = 1;
      if (i < 16) rd[i] = sdo;
      #HALF_SCK sck = 0;
    end
    sdi = 0;
    #(2*HALF_SCK);
  endtask

  task automatic wreg(input logic [5:0] a, input logic [15:0] d);
    logic [15:0] rd;
    frame(1'b1, a, d, rd);
  endtask

  task automatic load_rows(input int r0, input int r1);
    wreg(R_MEM_ADDR, 16'(r0 * 64));
    for (int b = r0 * 64; b < (r1 + 1) * 64; b += 2) wreg(R_MEM_DATA, {mem[b+1], mem[b]});
  endtask

  task automatic find_run(input byte unsigned e[$], input string name);
    int at = -1;
    for (int i = 0; i + e.size() <= codes.size(); i++) begin
      bit ok = 1;
      for (int k = 0; k < e.size(); k++) if (codes[i+k] != e[k]) begin ok = 0; break; end
      if (ok) begin at = i; break; end
    end
    checks++;
    if (at < 0) begin failures++; $display("%s: %0d-sample run not found", name, e.size()); end
    else $display("%s: %0d samples reproduced", name, e.size());
  endtask

  task automatic play(input int r0, input int r1, input bit loop_en, input time dur);
    wreg(R_START_ROW, 16'(r0)); wreg(R_END_ROW, 16'(r1));
    codes.delete();
    capture = 1;
    wreg(R_CTRL, loop_en ? 16'h0005 : 16'h0001);
    #dur;
    if (loop_en) wreg(R_CTRL, 16'h0002);
    #5000;
    capture = 0;
  endtask

  initial begin
    byte unsigned e[$];
    #23 rst_n = 1;
    #2000;
    wreg(R_IDLE, 16'h80); wreg(R_ROT, 0);
    for (int n = 0; n < ROWS*LINE_BYTES; n++)
      mem[n] = (n % 64 == 0) ? 8'(n / 64) : 8'($urandom);
    load_rows(0, ROWS - 1);
    play(0, ROWS - 1, 0, 200000);
    e.delete(); for (int n = 0; n < ROWS*LINE_BYTES; n++) e.push_back(mem[n]);
    find_run(e, "full memory");
    checks++;
    if (codes.size() < ROWS*LINE_BYTES + 64 || codes[0] != 8'h80 || codes[codes.size()-1] != 8'h80) begin
      failures++; $display("idle code missing around the full-memory run");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
