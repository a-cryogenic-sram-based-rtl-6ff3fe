// tb_dac_tx: end-to-end check of the digital transmitter path. A half-rate
// clock C2 of period 20 gives a unit interval (UI) of 10. A new random
// 256-bit pattern is applied after every C32 falling edge. For every pattern
// captured at a C32 rising edge at time t, sample j must be present on the
// nine weight outputs during [t + 280 + 10j, t + 290 + 10j): seven C4 periods of
// latency, then one sample per UI. The code is rebuilt from the weight bits
// (1,2,4,..,32 and 3 x 64) and compared with the sample. C32 must have a period
// of 32 UI (one pattern of 32 samples per C32 period).
module tb_dac_tx;
  import awg_pkg::*;
  logic c2 = 0, rst_n = 1;
  logic [PAT_W-1:0] pattern = '0;
  logic c32;
  logic [NSEG-1:0] seg_bits;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  time rec_t[$];
  logic [PAT_W-1:0] rec_p[$];

  dac_tx dut (.*);

  always #10 c2 = ~c2;

  always @(posedge c32) begin
    rec_t.push_back($time);
    rec_p.push_back(pattern);
  end

  always @(negedge c32) begin
    logic [PAT_W-1:0] p;
    for (int i = 0; i < PAT_W/32; i++) p[i*32 +: 32] = $urandom;
    if (rec_t.size() == 2) p[31:0] = 32'h80FF_4000;   // codes 0x00, 0x40, 0xFF, 0x80
    pattern = p;
  end

  function automatic int code_of(logic [NSEG-1:0] b);
    int s = 0;
    for (int i = 0; i < 6; i++) s += int'(b[i]) << i;
    for (int t = 0; t < 3; t++) s += 64 * int'(b[6+t]);
    return s;
  endfunction

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < PAT_W/32; i++) pattern[i*32 +: 32] = $urandom;
    #35 rst_n = 1;
    for (int k = 1; k < 40; k++) begin
      wait (rec_t.size() > k);
      checks++;
      if (rec_t[k] - rec_t[k-1] != 320) begin failures++; $display("C32 period %0t", rec_t[k]-rec_t[k-1]); end
      for (int j = 0; j < 32; j++) begin
        time target;
        int got, exp_code;
        target = rec_t[k] + 285 + 10 * j;
        if (target > $time) #(target - $time);
        got = code_of(seg_bits);
        exp_code = int'(rec_p[k][j*8 +: 8]);
        checks++;
        if (got != exp_code) begin
          failures++;
          if (failures < 10) $display("pattern %0d sample %0d: got %0d exp %0d", k, j, got, exp_code);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
