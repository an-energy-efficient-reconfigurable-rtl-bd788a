// Self-checking testbench for gpio: OUT and OE registers drive the pins and
// read back, and IN returns the pin inputs two clocks after they change.
module tb_gpio;
  import dtls_pkg::*;
  logic clk = 1'b0, rst_n;
  bus_req_t bus_req;
  bus_rsp_t bus_rsp;
  logic [7:0] pin_in, pin_out, pin_oe;
  int checks = 0, failures = 0;

  gpio dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
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
  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  logic [31:0] d;
  initial begin
    rst_n = 1'b0; bus_req = '0; pin_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 8; i++) begin
      automatic logic [7:0] o = 8'($urandom), e = 8'($urandom), in = 8'($urandom);
      wr(32'h0, {24'b0, o});
      wr(32'h4, {24'b0, e});
      #1;
      chk("pin_out", {24'b0, pin_out}, {24'b0, o});
      chk("pin_oe", {24'b0, pin_oe}, {24'b0, e});
      rd(32'h0, d); chk("OUT", d, {24'b0, o});
      rd(32'h4, d); chk("OE", d, {24'b0, e});
      pin_in = in;
      repeat (3) @(posedge clk);
      rd(32'h8, d); chk("IN", d, {24'b0, in});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
