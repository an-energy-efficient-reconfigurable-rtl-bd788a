// Self-checking testbench for spi against a mode-0 slave model that shifts
// out its own byte on MISO: both bytes must arrive, MSB first, with MOSI
// stable at every rising SCLK edge, eight SCLK pulses per byte, and the chip
// select following its register.
module tb_spi;
  import dtls_pkg::*;
  logic clk = 1'b0, rst_n;
  bus_req_t bus_req;
  bus_rsp_t bus_rsp;
  logic sclk, mosi, miso, cs_n;
  int checks = 0, failures = 0;

  spi dut (.*);
  always #5 clk = ~clk;

  // slave model
  logic [7:0] s_tx, s_rx;
  int n_rise = 0;
  assign miso = s_tx[7];
  always @(posedge sclk) begin s_rx <= {s_rx[6:0], mosi}; n_rise++; end
  always @(negedge sclk) s_tx <= {s_tx[6:0], 1'b0};

  initial begin
    #1000000;
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
    rst_n = 1'b0; bus_req = '0; s_tx = '0; s_rx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wr(32'hc, 32'h0);
    #1;
    checks++;
    if (cs_n) begin failures++; $display("FAIL cs_n not asserted"); end
    for (int i = 0; i < 8; i++) begin
      automatic logic [7:0] m = 8'($urandom), sb = 8'($urandom);
      s_tx = sb;
      n_rise = 0;
      wr(32'h0, {24'b0, m});
      do rd(32'h4, d); while (d[0]);
      rd(32'h0, d);
      checks += 3;
      if (d[7:0] !== sb) begin failures++; $display("FAIL miso byte %h got %h", sb, d[7:0]); end
      if (s_rx !== m) begin failures++; $display("FAIL mosi byte %h got %h", m, s_rx); end
      if (n_rise != 8) begin failures++; $display("FAIL %0d sclk pulses", n_rise); end
    end
    wr(32'hc, 32'h1);
    #1;
    checks++;
    if (!cs_n) begin failures++; $display("FAIL cs_n not released"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
