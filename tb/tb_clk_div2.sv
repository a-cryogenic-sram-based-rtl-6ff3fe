// tb_clk_div2: checks that the divide-by-two output is low in reset, rises on
// the first input edge after reset and toggles on every rising input edge,
// giving exactly half the input edge count.
module tb_clk_div2;
  logic clk_in = 0, rst_n = 1, clk_out;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  int n_in = 0, n_out = 0;

  clk_div2 dut (.*);

  always #5 clk_in = ~clk_in;
  always @(posedge clk_in) if (rst_n) n_in++;
  always @(posedge clk_out) n_out++;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic prev;
    #23; checks++; if (clk_out !== 1'b0) failures++;
    @(negedge clk_in); rst_n = 1;
    prev = clk_out;
    for (int i = 0; i < 100; i++) begin
      @(posedge clk_in); #1;
      checks++;
      if (clk_out !== ~prev) failures++;
      prev = clk_out;
    end
    checks++;
    if (n_out != n_in / 2) begin failures++; $display("edges in %0d out %0d", n_in, n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
