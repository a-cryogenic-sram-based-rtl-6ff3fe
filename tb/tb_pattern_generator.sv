// tb_pattern_generator: programs the pattern generator through its serial
// pins and checks the 256-bit pattern stream. CK32 has a period of 10, so
// CK64 has 20 and SCK (period 160) is CK64/8. Four rows are filled with
// random samples, then played once with a byte rotation: the stream must show
// the idle code, then exactly eight consecutive patterns (two per line, one per
// CK32 cycle) equal to the rotated lines, then the idle code again. A second
// run in loop mode must repeat the lines until stopped. The ID register is
// read back over SDO.
module tb_pattern_generator;
  import awg_pkg::*;
  logic ck32 = 0, rst_n = 1, sck = 0, sdi = 0, sdo, playing, wr_deferred;
  logic [PAT_W-1:0] pattern;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  localparam int HALF = 80;
  logic [7:0] mem [0:ROWS*LINE_BYTES-1];
  logic [PAT_W-1:0] stream [$];

  pattern_generator dut (.*);

  always #5 ck32 = ~ck32;
  always @(posedge ck32) if (rst_n) stream.push_back(pattern);

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic frame(input logic wr, input logic [5:0] a, input logic [15:0] d,
                       output logic [15:0] rd);
    logic [23:0] f;
    f = {1'b1, wr, a, d};
    rd = '0;
    for (int i = 23; i >= 0; i--) begin
      sdi = f[i];
      #HALF sck = 1;
      if (i < 16) rd[i] = sdo;
      #HALF sck = 0;
    end
    sdi = 0;
    #(2*HALF);
  endtask

  task automatic wreg(input logic [5:0] a, input logic [15:0] d);
    logic [15:0] rd;
    frame(1'b1, a, d, rd);
  endtask

  function automatic logic [PAT_W-1:0] half_line(int row, int rot, int h);
    logic [PAT_W-1:0] p;
    for (int k = 0; k < 32; k++)
      p[k*8 +: 8] = mem[row*64 + ((h*32 + k + rot) % 64)];
    return p;
  endfunction

  // find exp[0] in the stream after 'from', then check the following ones
  task automatic check_run(input logic [PAT_W-1:0] exp_p[$], input int from, output int at);
    at = -1;
    for (int i = from; i < stream.size(); i++)
      if (stream[i] == exp_p[0]) begin at = i; break; end
    checks++;
    if (at < 0) begin failures++; $display("run not found"); return; end
    for (int i = 0; i < exp_p.size(); i++) begin
      checks++;
      if (at + i >= stream.size() || stream[at+i] != exp_p[i]) begin
        failures++; $display("pattern %0d of run differs", i);
      end
    end
  endtask

  initial begin
    logic [15:0] rd;
    logic [PAT_W-1:0] exp_p[$];
    logic [PAT_W-1:0] idle_p;
    int at, mark;
    #23 rst_n = 1;
    #200;
    frame(1'b0, R_ID, 16'h0, rd);
    checks++; if (rd !== ID_VALUE) begin failures++; $display("ID %h", rd); end
    // fill rows 3..6
    wreg(R_MEM_ADDR, 16'(3*64));
    for (int b = 3*64; b < 7*64; b += 2) begin
      mem[b] = 8'($urandom); mem[b+1] = 8'($urandom);
      wreg(R_MEM_DATA, {mem[b+1], mem[b]});
    end
    wreg(R_START_ROW, 3); wreg(R_END_ROW, 6); wreg(R_ROT, 5); wreg(R_IDLE, 16'h80);
    idle_p = {32{8'h80}};
    stream.delete();
    wreg(R_CTRL, 16'h0001);
    #2000;
    for (int r = 3; r <= 6; r++) begin
      exp_p.push_back(half_line(r, 5, 0));
      exp_p.push_back(half_line(r, 5, 1));
    end
    check_run(exp_p, 0, at);
    if (at > 0) begin
      checks++; if (stream[at-1] != idle_p) begin failures++; $display("no idle before run"); end
      checks++; if (stream[at+8] != idle_p) begin failures++; $display("no idle after run"); end
    end
    // loop mode, rotation 0, rows 5..6
    wreg(R_ROT, 0); wreg(R_START_ROW, 5); wreg(R_END_ROW, 6);
    stream.delete();
    wreg(R_CTRL, 16'h0005);
    #1000;
    wreg(R_CTRL, 16'h0006);
    #500;
    exp_p.delete();
    for (int rep = 0; rep < 10; rep++)
      for (int r = 5; r <= 6; r++) begin
        exp_p.push_back(half_line(r, 0, 0));
        exp_p.push_back(half_line(r, 0, 1));
      end
    check_run(exp_p, 0, at);
    checks++; if (stream[stream.size()-1] != idle_p || playing) begin failures++; $display("loop not stopped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
