// tb_dac_capture_encoder: drives random 256-bit patterns and checks, for each
// of the 32 samples, that the six binary weight bits equal the sample's bits
// 0..5, that the three thermometer bits form a thermometer code, and that the
// weighted sum 1,2,4,8,16,32,64,64,64 of the nine bits equals the sample.
// Also checks that the output changes only on the C32 edge.
module tb_dac_capture_encoder;
  import awg_pkg::*;
  logic c32 = 0, rst_n = 1;
  logic [PAT_W-1:0] pattern = '0;
  logic [NSEG-1:0][31:0] seg;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets

  dac_capture_encoder dut (.*);

  always #5 c32 = ~c32;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [PAT_W-1:0] p;
    #12 rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge c32);
      for (int i = 0; i < PAT_W/32; i++) p[i*32 +: 32] = $urandom;
      if (n == 0) p[7:0] = 8'hFF;
      if (n == 1) p[7:0] = 8'h00;
      pattern = p;
      @(posedge c32); #1;
      pattern = ~p;   // must not reach the outputs before the next edge
      #1;
      for (int j = 0; j < 32; j++) begin
        int sum;
        logic [7:0] s;
        s = p[j*8 +: 8];
        sum = 0;
        for (int b = 0; b < 6; b++) begin
          sum += seg[b][j] << b;
          checks++; if (seg[b][j] !== s[b]) failures++;
        end
        for (int t = 0; t < 3; t++) sum += seg[6+t][j] * 64;
        checks++;
        if (sum != int'(s)) begin failures++; $display("sample %h sum %0d", s, sum); end
        checks++;
        if (!(seg[6][j] >= seg[7][j] && seg[7][j] >= seg[8][j])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
