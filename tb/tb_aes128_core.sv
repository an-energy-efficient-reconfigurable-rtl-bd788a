// Self-checking testbench for aes128_core: FIPS 197 appendix C.1 and the
// all-zero key/plaintext vector, back to back, and the 11-cycle latency.
module tb_aes128_core;
  logic clk = 1'b0, rst_n, start;
  logic [127:0] key, block, result;
  logic busy, done;
  int checks = 0, failures = 0;

  aes128_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic enc(input logic [127:0] k, input logic [127:0] p, input logic [127:0] exp);
    int cyc = 0;
    @(posedge clk);
    key <= k; block <= p; start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) begin @(posedge clk); cyc++; end
    checks += 2;
    if (result !== exp) begin failures++; $display("FAIL ct %h exp %h", result, exp); end
    if (cyc != 11) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; key = '0; block = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    enc(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    enc(128'h0, 128'h0, 128'h66e94bd4ef8a2c3b884cfa59ca342b2e);
    enc(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
        128'h3925841d02dc09fbdc118597196a0b32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
