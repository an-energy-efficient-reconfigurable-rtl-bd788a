// Self-checking testbench for sha256_core: hashes the FIPS 180-4 examples
// "abc" (one block) and the 448-bit "abcdbcde..." message (two blocks), and
// checks the block latency (done 66 clock edges after the edge that samples start).
module tb_sha256_core;
  logic clk = 0, rst_n = 0, start = 0, init = 0;
  logic [511:0] block;
  logic busy, done;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hash_block(input logic [511:0] b, input logic first, output int cycles);
    @(posedge clk);
    block <= b; init <= first; start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cycles = 0;
    while (!done) begin @(posedge clk); cycles++; end
  endtask

  task automatic check(input string what, input logic [255:0] got, input logic [255:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  int cyc;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // "abc" padded
    hash_block({24'h616263, 8'h80, 416'h0, 64'd24}, 1'b1, cyc);
    check("abc", digest, 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad);
    checks++;
    if (cyc != 66) begin failures++; $display("FAIL latency %0d", cyc); end
    // two-block message, 448 bits
    hash_block({"abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq", 8'h80, 56'h0}, 1'b1, cyc);
    hash_block({448'h0, 64'd448}, 1'b0, cyc);
    check("abcdbcde...", digest, 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1);
    // re-init gives "abc" again
    hash_block({24'h616263, 8'h80, 416'h0, 64'd24}, 1'b1, cyc);
    check("abc again", digest, 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
