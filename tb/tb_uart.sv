// Self-checking testbench for uart with its tx looped back to rx: random
// bytes are sent and must arrive in DATA with RX_VALID; the bit time of the
// start bit on tx is DIV+1 clocks.
module tb_uart;
  import dtls_pkg::*;
  logic clk = 1'b0, rst_n;
  bus_req_t bus_req;
  bus_rsp_t bus_rsp;
  logic rx, tx;
  int checks = 0, failures = 0;

  uart dut (.*);
  assign rx = tx;
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(posedge clk);
    bus_req <= '{req: 1'b1, we: 1'b1, addr: a, wdata: d, be: 4'hf};
    @(posedge clk);
    bus_req.req <= 1'b0;
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    @(posedge clk);
    bus_req <= '{req: 1'b1, we: 1'b0, addr: a, wdata: '0, be: 4'hf};
    @(posedge clk);
    bus_req.req <= 1'b0;
    #1 d = bus_rsp.rdata;
  endtask

  logic [31:0] d;
  initial begin
    rst_n = 1'b0; bus_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wr(32'h8, 32'd7);
    for (int i = 0; i < 6; i++) begin
      automatic logic [7:0] b = 8'($urandom);
      int low = 0;
      wr(32'h0, {24'b0, b});
      // measure the start bit
      while (tx) @(posedge clk);
      while (!tx || low < 8) begin
        @(posedge clk);
        if (!tx) low++;
        if (low >= 8 && tx) break;
        if (low > 8) break;
      end
      do rd(32'h4, d); while (!d[1] || d[0]);
      rd(32'h0, d);
      checks++;
      if (d[7:0] !== b) begin failures++; $display("FAIL byte %h got %h", b, d[7:0]); end
      rd(32'h4, d);
      checks++;
      if (d[1]) begin failures++; $display("FAIL rx valid not cleared"); end
    end
    // start bit duration: 8 clocks for DIV = 7
    wr(32'h0, 32'h0000_00ff);
    begin
      int n = 0;
      while (tx) @(posedge clk);
      while (!tx) begin @(posedge clk); n++; end
      checks++;
      if (n != 8) begin failures++; $display("FAIL start bit %0d clocks", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
