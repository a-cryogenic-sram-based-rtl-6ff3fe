// tb_ser32to4: checks one 32:4 serializer tree. The testbench makes its own
// C4I and derives C8, C16 and C32 by toggling on the rising edge of the next
// faster clock, as the transmitter's clock path does. A new random 32-bit word
// is presented at every C32 rising edge (as the C32 input register would).
// The word captured at C4I edge n must appear as bits [3:0], [7:4], ...
// [31:28] after edges n+7 ... n+14, one 4-bit group per quarter-rate cycle,
// with no gap between words.
module tb_ser32to4;
  logic c4i = 0, c8 = 0, c16 = 0, c32 = 0, rst_n = 1;
  logic [31:0] din = '0;
  logic [3:0] dout;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  int edge_n = 0;
  int cap_edge[$];
  logic [31:0] cap_word[$];

  ser32to4 dut (.*);

  always #5 c4i = ~c4i;
  always @(posedge c4i) if (rst_n) begin edge_n++; c8 <= ~c8; end
  always @(posedge c8)  c16 <= ~c16;
  always @(posedge c16) c32 <= ~c32;
  always @(posedge c32) begin
    logic [31:0] w;
    w = $urandom;
    din <= w;
    cap_edge.push_back(edge_n);
    cap_word.push_back(w);
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #12 rst_n = 1;
    for (int n = 1; n < 60; n++) begin
      wait (cap_word.size() > n);
      for (int k = 0; k < 8; k++) begin
        wait (edge_n == cap_edge[n] + 7 + k);
        #1;
        checks++;
        if (dout !== cap_word[n][4*k +: 4]) begin
          failures++; $display("word %0d group %0d got %h exp %h", n, k, dout, cap_word[n][4*k +: 4]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
