// tb_awg_workloads: plays the kinds of waveforms the AWG is built for through
// the full-size core, loading each over the serial pins and checking every
// output sample (codes rebuilt from the nine weight bits in mid-UI).
// With the chip's half-rate clock at 7 GHz the sample rate is 14 GS/s; the
// waveforms below are sized for that rate (one sample per UI).
//   A. a two-tone raised-cosine pulse, 200 ns = 2800 samples, tones at
//      5.1 and 5.3 GHz, rows 130..173 (43.75 rows, the rest padded mid-scale)
//   B. three Gaussian-envelope RF pulses of different amplitude, duration and
//      spacing on a 5 GHz carrier, rows 180..185
//   C. a PRBS7 pattern pre-distorted by a 2-tap feed-forward equalizer
//      (+0.75 x[n] - 0.25 x[n-1]); the 127-bit sequence repeats 64 times so it
//      fills 127 rows exactly and loops seamlessly (rows 0..126, loop mode)
module tb_awg_workloads;
  import awg_pkg::*;
  logic c2 = 0, rst_n = 1, sck = 0, sdi = 0, sdo, playing, wr_deferred;
  logic [NSEG-1:0] seg_bits;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  localparam int HALF_SCK = 1600;
  localparam real PI = 3.141592653589793;
  localparam real FS = 14.0e9;
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

  function automatic logic [7:0] to_code(real v);   // v in [-1, 1]
    int c;
    c = int'($floor(127.5 + 127.0 * v + 0.5));
    if (c < 0) c = 0;
    if (c > 255) c = 255;
    return 8'(c);
  endfunction

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
    logic [6:0] lfsr;
    bit prbs [127];
    #23 rst_n = 1;
    #2000;
    wreg(R_IDLE, 16'h80); wreg(R_ROT, 0);

    // A. two-tone raised cosine, 2800 samples
    for (int n = 0; n < 44*64; n++) begin
      real w, v;
      if (n < 2800) begin
        w = 0.5 * (1.0 - $cos(2.0 * PI * n / 2800.0));
        v = 0.5 * w * ($cos(2.0 * PI * 5.1e9 * n / FS) + $cos(2.0 * PI * 5.3e9 * n / FS));
        mem[130*64 + n] = to_code(v);
      end else mem[130*64 + n] = 8'h80;
    end
    load_rows(130, 173);
    play(130, 173, 0, 30000);
    e.delete(); for (int n = 0; n < 2800; n++) e.push_back(mem[130*64 + n]);
    find_run(e, "two-tone raised cosine");

    // B. Gaussian pulses: (amplitude, sigma, length) with gaps between them
    begin
      real amp [3] = '{1.0, 0.5, 0.75};
      int  len [3] = '{64, 32, 48};
      int  gap [3] = '{20, 40, 180};
      int n = 0;
      for (int p = 0; p < 3; p++) begin
        for (int k = 0; k < len[p]; k++) begin
          real t, env;
          t = (k - (len[p] - 1) / 2.0) / (len[p] / 6.0);
          env = amp[p] * $exp(-0.5 * t * t);
          mem[180*64 + n] = to_code(env * $sin(2.0 * PI * 5.0e9 * k / FS));
          n++;
        end
        for (int k = 0; k < gap[p]; k++) begin mem[180*64 + n] = 8'h80; n++; end
      end
      for (; n < 6*64; n++) mem[180*64 + n] = 8'h80;
    end
    load_rows(180, 185);
    play(180, 185, 0, 10000);
    e.delete(); for (int n = 0; n < 6*64; n++) e.push_back(mem[180*64 + n]);
    find_run(e, "Gaussian pulse sequence");

    // C. PRBS7 with 2-tap FFE, looped
    lfsr = 7'h7F;
    for (int i = 0; i < 127; i++) begin
      prbs[i] = lfsr[6];
      lfsr = {lfsr[5:0], lfsr[6] ^ lfsr[5]};
    end
    for (int n = 0; n < 127*64; n++) begin
      real x0, x1;
      x0 = prbs[n % 127] ? 1.0 : -1.0;
      x1 = prbs[(n + 126) % 127] ? 1.0 : -1.0;
      mem[n] = to_code(0.75 * x0 - 0.25 * x1);
    end
    load_rows(0, 126);
    play(0, 126, 1, 160000);   // a little over two passes of 8128 samples
    e.delete();
    for (int n = 0; n < 127*64 + 1000; n++) e.push_back(mem[n % (127*64)]);
    find_run(e, "PRBS7 with FFE, looped");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
