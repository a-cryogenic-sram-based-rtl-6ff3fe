// tb_quad_div2: checks the DIV2 quadrature divider. With a half-rate clock C2
// of period 20 (one unit interval = 10), C4I must have period 40 and rise on
// C2 rising edges, and C4Q must be the same waveform delayed by exactly one
// unit interval (10), i.e. in quadrature.
module tb_quad_div2;
  logic c2 = 0, rst_n = 1, c4i, c4q;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  time ti[$], tq[$];

  quad_div2 dut (.*);

  always #10 c2 = ~c2;
  always @(posedge c4i) ti.push_back($time);
  always @(posedge c4q) tq.push_back($time);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #35 rst_n = 1;
    repeat (100) @(posedge c2);
    #1;
    checks++; if (ti.size() < 40 || tq.size() < 40) failures++;
    for (int k = 1; k < 40; k++) begin
      checks++; if (ti[k] - ti[k-1] != 40) begin failures++; $display("C4I period %0t", ti[k]-ti[k-1]); end
      checks++; if (tq[k] - ti[k] != 10)   begin failures++; $display("C4Q lag %0t", tq[k]-ti[k]); end
    end
    // level check inside the four quarters of one C4 period
    @(posedge c4i);
    #5  checks++; if ({c4i, c4q} !== 2'b10) failures++;
    #10 checks++; if ({c4i, c4q} !== 2'b11) failures++;
    #10 checks++; if ({c4i, c4q} !== 2'b01) failures++;
    #10 checks++; if ({c4i, c4q} !== 2'b00) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
