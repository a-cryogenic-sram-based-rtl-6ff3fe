// tb_mux4_seg: checks the 4:1 segment multiplexer for all clock phases and
// random data words: (C4I,C4Q) = 10,11,01,00 must select d[0],d[1],d[2],d[3].
module tb_mux4_seg;
  logic c4i = 0, c4q = 0, q;
  logic [3:0] d = '0;
  int checks = 0, failures = 0;

  mux4_seg dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] ph [4] = '{2'b10, 2'b11, 2'b01, 2'b00};
    for (int i = 0; i < 200; i++) begin
      d = 4'($urandom);
      for (int s = 0; s < 4; s++) begin
        {c4i, c4q} = ph[s];
        #1;
        checks++;
        if (q !== d[s]) begin failures++; $display("slot %0d d=%b q=%b", s, d, q); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
