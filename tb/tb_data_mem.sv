// Self-checking testbench for data_mem: random word and byte writes across
// the whole 64 KB, read back with the one-cycle rvalid latency against a
// model, including the first and last words.
module tb_data_mem;
  import dtls_pkg::*;
  logic clk = 1'b0, rst_n;
  bus_req_t bus_req;
  bus_rsp_t bus_rsp;
  logic [31:0] model [int];
  int checks = 0, failures = 0;

  data_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int w, input logic [31:0] d, input logic [3:0] be);
    @(posedge clk);
    bus_req <= '{req: 1'b1, we: 1'b1, addr: 32'(w) << 2, wdata: d, be: be};
    @(posedge clk);
    bus_req.req <= 1'b0;
  endtask
  task automatic rd(input int w, output logic [31:0] d);
    @(posedge clk);
    bus_req <= '{req: 1'b1, we: 1'b0, addr: 32'(w) << 2, wdata: '0, be: 4'hf};
    @(posedge clk);
    bus_req.req <= 1'b0;
    #1;
    checks++;
    if (!bus_rsp.rvalid) begin failures++; $display("FAIL no rvalid"); end
    d = bus_rsp.rdata;
  endtask

  int addrs [64];
  logic [31:0] d;
  initial begin
    rst_n = 1'b0; bus_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 64; i++) begin
      addrs[i] = (i == 0) ? 0 : (i == 1) ? 16383 : $urandom_range(16383);
      model[addrs[i]] = $urandom;
      wr(addrs[i], model[addrs[i]], 4'hf);
    end
    for (int i = 0; i < 16; i++) begin
      automatic logic [31:0] v = $urandom;
      automatic logic [3:0] be = 4'($urandom);
      for (int k = 0; k < 4; k++) if (be[k]) model[addrs[i]][8*k +: 8] = v[8*k +: 8];
      wr(addrs[i], v, be);
    end
    for (int i = 0; i < 64; i++) begin
      rd(addrs[i], d);
      checks++;
      if (d !== model[addrs[i]]) begin failures++; $display("FAIL word %0d", addrs[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
