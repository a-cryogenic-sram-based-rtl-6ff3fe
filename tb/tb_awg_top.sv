// tb_awg_top: end-to-end test of the AWG core at its full size. The host
// loads waveforms through the serial pins; the nine full-rate weight outputs
// are sampled in the middle of every unit interval (UI = half a C2 period),
// turned back into 8-bit codes (weights 1..32 and 3 x 64) and compared with
// what was loaded.
//   1. serial read of the ID register over SDO
//   2. a DC ramp through all 256 codes (rows 0..3), played once: the 256
//      codes must appear back to back, framed by the idle code
//   3. the same row 0 played with a byte rotation of 17
//   4. rows 1..2 looped; meanwhile the host rewrites bytes of row 2 (the write
//      is deferred until playback ends) and a second write overflows; stop
//   5. row 2 played once more shows the deferred bytes
// Each mechanism (single play, loop repeat, stop, rotation, deferred write,
// overflow flag, idle output, serial read) is counted and must occur.
module tb_awg_top;
  import awg_pkg::*;
  logic c2 = 0, rst_n = 1, sck = 0, sdi = 0, sdo, playing, wr_deferred;
  logic [NSEG-1:0] seg_bits;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  localparam int HALF_SCK = 1600;       // CK64 period is 320
  logic [7:0] mem [0:ROWS*LINE_BYTES-1];
  byte unsigned codes [$];
  int n_single = 0, n_loop_rep = 0, n_stop = 0, n_rot = 0, n_defer = 0,
      n_ovf = 0, n_idle = 0, n_read = 0;

  awg_top dut (.*);

  always #5 c2 = ~c2;   // UI = 5

  function automatic byte unsigned code_of(logic [NSEG-1:0] b);
    int s = 0;
    for (int i = 0; i < 6; i++) s += int'(b[i]) << i;
    for (int t = 0; t < 3; t++) s += 64 * int'(b[6+t]);
    return byte'(s);
  endfunction

  // sample the middle of every UI
  always @(c2) if (rst_n) begin
    #2 codes.push_back(code_of(seg_bits));
  end
  logic defer_seen = 0;
  always @(posedge c2) if (wr_deferred) defer_seen = 1;

  initial begin
    #400000000; failures++;
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

  task automatic load(input int b0, input int n);
    wreg(R_MEM_ADDR, 16'(b0));
    for (int b = b0; b < b0 + n; b += 2) wreg(R_MEM_DATA, {mem[b+1], mem[b]});
  endtask

  // expected code run must appear contiguously; returns its position
  task automatic find_run(input byte unsigned e[$], output int at);
    at = -1;
    for (int i = 0; i + e.size() <= codes.size(); i++) begin
      bit ok = 1;
      for (int k = 0; k < e.size(); k++) if (codes[i+k] != e[k]) begin ok = 0; break; end
      if (ok) begin at = i; break; end
    end
    checks++;
    if (at < 0) begin failures++; $display("expected run of %0d codes not found", e.size()); end
  endtask

  task automatic expect_idle_around(input int at, input int len);
    checks++;
    if (at < 16 || at + len + 16 > codes.size()) begin failures++; return; end
    for (int k = 1; k <= 16; k++)
      if (codes[at-k] != 8'h80 || codes[at+len-1+k] != 8'h80) begin
        failures++; $display("idle code missing around run at %0d k=%0d: %h %h", at, k, codes[at-k], codes[at+len-1+k]); return;
      end
    n_idle++;
  endtask

  initial begin
    logic [15:0] rd;
    byte unsigned e[$];
    int at, reps;
    #23 rst_n = 1;
    #2000;
    // 1. ID read
    frame(1'b0, R_ID, 16'h0, rd);
    checks++; if (rd !== ID_VALUE) begin failures++; $display("ID %h", rd); end else n_read++;

    // 2. DC ramp through all codes
    for (int b = 0; b < 256; b++) mem[b] = 8'(b);
    load(0, 256);
    wreg(R_START_ROW, 0); wreg(R_END_ROW, 3); wreg(R_ROT, 0);
    codes.delete();
    wreg(R_CTRL, 16'h0001);
    #20000;
    e.delete(); for (int b = 0; b < 256; b++) e.push_back(mem[b]);
    find_run(e, at);
    if (at >= 0) begin n_single++; expect_idle_around(at, 256); end

    // 3. rotation
    wreg(R_END_ROW, 0); wreg(R_ROT, 17);
    codes.delete();
    wreg(R_CTRL, 16'h0001);
    #20000;
    e.delete(); for (int k = 0; k < 64; k++) e.push_back(mem[(k + 17) % 64]);
    find_run(e, at);
    if (at >= 0) begin n_rot++; expect_idle_around(at, 64); end

    // 4. loop rows 1..2 with host writes during playback
    wreg(R_ROT, 0); wreg(R_START_ROW, 1); wreg(R_END_ROW, 2);
    codes.delete();
    wreg(R_CTRL, 16'h0005);
    wreg(R_MEM_ADDR, 16'(2*64 + 10));
    wreg(R_MEM_DATA, 16'h0302);
    wreg(R_MEM_DATA, 16'h0504);          // dropped: buffer still full
    frame(1'b0, R_STATUS, 16'h0, rd);
    checks++;
    if (rd !== 16'h7) begin failures++; $display("status %h", rd); end else n_ovf++;
    wreg(R_CTRL, 16'h0002);
    #20000;
    checks++; if (playing) failures++; else n_stop++;
    if (defer_seen) n_defer++;
    // the looped lines repeat back to back, unchanged while playing
    e.delete(); for (int b = 64; b < 192; b++) e.push_back(mem[b]);
    for (int r = 0; r < 3; r++) for (int b = 64; b < 192; b++) e.push_back(mem[b]);
    find_run(e, at);
    if (at >= 0) n_loop_rep++;
    // the codes end with the idle code after a stop
    checks++; if (codes[codes.size()-1] != 8'h80) failures++;

    // 5. deferred write landed, the overflowed one did not
    mem[2*64 + 10] = 8'h02; mem[2*64 + 11] = 8'h03;
    wreg(R_START_ROW, 2); wreg(R_END_ROW, 2);
    codes.delete();
    wreg(R_CTRL, 16'h0001);
    #20000;
    e.delete(); for (int b = 128; b < 192; b++) e.push_back(mem[b]);
    find_run(e, at);
    if (at >= 0) n_single++;

    $display("mechanisms: single=%0d loop=%0d stop=%0d rot=%0d defer=%0d ovf=%0d idle=%0d read=%0d",
             n_single, n_loop_rep, n_stop, n_rot, n_defer, n_ovf, n_idle, n_read);
    checks++; if (n_single == 0)   failures++;
    checks++; if (n_loop_rep == 0) failures++;
    checks++; if (n_stop == 0)     failures++;
    checks++; if (n_rot == 0)      failures++;
    checks++; if (n_defer == 0)    failures++;
    checks++; if (n_ovf == 0)      failures++;
    checks++; if (n_idle == 0)     failures++;
    checks++; if (n_read == 0)     failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
