// tb_serial_if: acts as the serial host. SCK has a period of 8 interface
// clocks. It sends random write frames and read frames (start bit, R/W,
// 6-bit address, 16 data bits, MSB first, SDI changed on SCK falling edges)
// and checks that each frame produces exactly one register request with the
// right direction, address and data, and that a read returns the value the
// register side supplies on SDO, sampled on SCK rising edges.
module tb_serial_if;
  import awg_pkg::*;
  logic clk = 0, rst_n = 1, sck = 0, sdi = 0, sdo;
  reg_req_t req;
  logic [REG_DW-1:0] rdata;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;  // reset edge for the asynchronous resets
  int n_req = 0;
  reg_req_t last_req;

  serial_if dut (.*);

  always #5 clk = ~clk;

  // register side: read value is a function of the address
  assign rdata = {req.addr, 10'h35A} ^ 16'h9C31;

  always @(posedge clk) if (req.valid) begin n_req++; last_req = req; end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic sck_cycle(input logic b, output logic so);
    sdi = b;
    #40 sck = 1; so = sdo;
    #40 sck = 0;
  endtask

  task automatic frame(input logic wr, input logic [5:0] a, input logic [15:0] d,
                       output logic [15:0] rd);
    logic [23:0] f;
    logic so;
    f = {1'b1, wr, a, d};
    for (int i = 23; i >= 0; i--) begin
      sck_cycle(f[i], so);
      if (i < 16) rd[i] = so;
    end
    sdi = 0;
    #200;
  endtask

  initial begin
    logic [15:0] rd;
    #23 rst_n = 1;
    #200;
    for (int n = 0; n < 60; n++) begin
      logic wr; logic [5:0] a; logic [15:0] d; int n0;
      wr = 1'($urandom); a = 6'($urandom); d = 16'($urandom);
      n0 = n_req;
      frame(wr, a, d, rd);
      checks++;
      if (n_req != n0 + 1) begin failures++; $display("frame %0d: %0d requests", n, n_req - n0); end
      checks++;
      if (last_req.write !== wr || last_req.addr !== a) begin failures++; $display("frame %0d: bad header", n); end
      if (wr) begin
        checks++; if (last_req.wdata !== d) begin failures++; $display("frame %0d: wdata %h exp %h", n, last_req.wdata, d); end
      end else begin
        checks++; if (rd !== ({a, 10'h35A} ^ 16'h9C31)) begin failures++; $display("frame %0d: read %h", n, rd); end
      end
      // idle line produces nothing
      n0 = n_req;
      #1000;
      checks++; if (n_req != n0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
