// tb_subrate_clkdiv: checks that C8, C16 and C32 have 2, 4 and 8 times the
// period of C4I, and that C32 rises on the first C4I edge after reset and then
// on every eighth one (the phase the transmitter's serializer load relies on).
module tb_subrate_clkdiv;
  logic c4i = 0, rst_n = 1, c8, c16, c32;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  time t8[$], t16[$], t32[$];
  int edge_n = 0;
  int c32_edges[$];

  subrate_clkdiv dut (.*);

  always #10 c4i = ~c4i;   // period 20
  always @(posedge c8)  t8.push_back($time);
  always @(posedge c16) t16.push_back($time);
  always @(posedge c32) begin t32.push_back($time); c32_edges.push_back(edge_n); end
  always @(posedge c4i) if (rst_n) edge_n++;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #25 rst_n = 1;
    repeat (200) @(posedge c4i);
    #1;
    for (int k = 1; k < 10; k++) begin
      checks++; if (t8[k]  - t8[k-1]  != 40)  failures++;
      checks++; if (t16[k] - t16[k-1] != 80)  failures++;
      checks++; if (t32[k] - t32[k-1] != 160) failures++;
      checks++; if (c32_edges[k] != 1 + 8*k) begin failures++; $display("c32 edge %0d", c32_edges[k]); end
    end
    checks++; if (c32_edges[0] != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
