// tb_sram_512x16b: self-checking test of one waveform SRAM instance.
// Writes random bytes with random byte enables to random rows while a
// reference model tracks the expected contents, then reads rows back and
// checks that the data appears exactly one clock after the read and is held
// while ce is low.
module tb_sram_512x16b;
  localparam int WORDS = 512, BYTES = 16;
  logic clk = 0;
  logic ce = 0, we = 0;
  logic [8:0] addr = '0;
  logic [BYTES-1:0] bwe = '0;
  logic [BYTES*8-1:0] wdata = '0, rdata;
  logic [BYTES*8-1:0] model [WORDS];
  int checks = 0, failures = 0;

  sram_512x16b dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input logic [BYTES-1:0] m, input logic [BYTES*8-1:0] d);
    @(negedge clk);
    ce = 1; we = 1; addr = 9'(a); bwe = m; wdata = d;
    for (int b = 0; b < BYTES; b++) if (m[b]) model[a][b*8 +: 8] = d[b*8 +: 8];
    @(negedge clk);
    ce = 0; we = 0;
  endtask

  task automatic rd_check(input int a);
    @(negedge clk);
    ce = 1; we = 0; addr = 9'(a);
    @(posedge clk); #1;
    ce = 0;
    checks++;
    if (rdata !== model[a]) begin
      failures++;
      $display("read row %0d: got %h exp %h", a, rdata, model[a]);
    end
    // held while idle
    @(posedge clk); #1;
    checks++;
    if (rdata !== model[a]) failures++;
  endtask

  initial begin
    // full initialisation so that every read has a known reference
    for (int a = 0; a < WORDS; a++) wr(a, '1, {$urandom, $urandom, $urandom, $urandom});
    for (int i = 0; i < 400; i++)
      wr($urandom_range(WORDS-1), 16'($urandom), {$urandom, $urandom, $urandom, $urandom});
    for (int i = 0; i < 300; i++) rd_check($urandom_range(WORDS-1));
    rd_check(0); rd_check(WORDS-1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
