// tb_pg_serializer: drives the 2:1 serializer with a CK64 made by toggling on
// every CK32 edge and a new random 512-bit line after every CK64 rising edge.
// Each line must leave as its lower half and then its upper half on the two
// CK32 cycles that follow its first full CK64 cycle: one 256-bit pattern per
// CK32 cycle.
module tb_pg_serializer;
  localparam int W = 256;
  logic clk = 0, rst_n = 1, ck64 = 0;
  logic [2*W-1:0] din = '0;
  logic [W-1:0] dout;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  logic [2*W-1:0] hist [$];

  pg_serializer dut (.clk, .rst_n, .ck64_phase(ck64), .din, .dout);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) ck64 <= ~ck64;
  // a new line launched after each CK64 rising edge
  always @(posedge ck64) begin
    logic [2*W-1:0] v;
    for (int i = 0; i < 2*W/32; i++) v[i*32 +: 32] = $urandom;
    #1 din = v;
    hist.push_back(v);
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #12 rst_n = 1;
    repeat (3) @(posedge ck64);
    for (int n = 0; n < 100; n++) begin
      logic [2*W-1:0] exp_line;
      @(posedge ck64); #2;
      // line launched at the previous CK64 edge
      exp_line = hist[hist.size()-2];
      checks++;
      if (dout !== exp_line[W-1:0]) begin failures++; $display("lower half mismatch"); end
      @(posedge clk); #2;
      checks++;
      if (dout !== exp_line[2*W-1:W]) begin failures++; $display("upper half mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
