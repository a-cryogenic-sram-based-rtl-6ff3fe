// tb_datapath_rot: checks the byte barrel shifter with random lines and all
// 64 rotation amounts (output byte k = input byte (k+rot) mod 64), the
// one-cycle latency, and the idle fill when in_valid is low.
module tb_datapath_rot;
  localparam int NB = 64;
  logic clk = 0, rst_n = 1, in_valid = 0;
  logic [NB*8-1:0] din = '0, dout;
  logic [5:0] rot = '0;
  logic [7:0] idle_code = 8'h80;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets

  datapath_rot dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [NB*8-1:0] v;
    #12 rst_n = 1;
    for (int n = 0; n < 256; n++) begin
      @(negedge clk);
      for (int i = 0; i < NB*8/32; i++) v[i*32 +: 32] = $urandom;
      din = v; rot = 6'(n); in_valid = (n % 5 != 4); idle_code = 8'($urandom);
      @(posedge clk); #1;
      for (int k = 0; k < NB; k++) begin
        logic [7:0] e;
        e = in_valid ? v[((k + int'(rot)) % NB)*8 +: 8] : idle_code;
        checks++;
        if (dout[k*8 +: 8] !== e) begin
          failures++;
          if (failures < 10) $display("rot %0d byte %0d got %h exp %h", rot, k, dout[k*8 +: 8], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
