// Self-checking testbench for sha_finish on a sha256_core. For messages of
// 0, 3, 55, 56, 63, 64, 119, 120, 200 and a random number of bytes, the
// testbench hashes the full 64-byte blocks itself on the SHA core and hands
// the remaining bytes (0..63) to sha_finish with the total bit length. The
// digest is compared with the reference SHA-256 of sha_ref, and the run
// time with one compression (at most 55 bytes left) or two (56..63 bytes
// left) of 68 clocks each, with one clock of slack.
module tb_sha_finish;
  import sha_ref::*;
  logic clk = 1'b0, rst_n;
  logic start, first, busy, done;
  logic [511:0] data;
  logic [5:0] nbytes;
  logic [63:0] len_bits;
  logic f_start, f_init, sha_done, sha_busy;
  logic [511:0] f_block;
  logic t_start, t_init;
  logic [511:0] t_block;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha_finish dut (.clk, .rst_n, .start, .first, .data, .nbytes, .len_bits, .busy, .done,
                  .sha_start(f_start), .sha_init(f_init), .sha_block(f_block), .sha_done);
  sha256_core u_sha (.clk, .rst_n, .start(busy ? f_start : t_start), .init(busy ? f_init : t_init),
                     .block(busy ? f_block : t_block), .busy(sha_busy), .done(sha_done), .digest);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hash_msg(input int len);
    bytes_t m;
    logic [255:0] exp;
    int nfull, rest, cyc;
    for (int i = 0; i < len; i++) m.push_back(8'($urandom));
    exp = sha256(m);
    nfull = len / 64;
    rest = len % 64;
    for (int b = 0; b < nfull; b++) begin
      for (int i = 0; i < 64; i++) t_block[511 - 8*i -: 8] = m[64*b + i];
      t_init = (b == 0);
      @(posedge clk); t_start <= 1'b1;
      @(posedge clk); t_start <= 1'b0;
      while (!sha_done) @(posedge clk);
    end
    data = {16{$urandom}};   // bytes beyond nbytes must not matter
    for (int i = 0; i < rest; i++) data[511 - 8*i -: 8] = m[64*nfull + i];
    @(posedge clk);
    nbytes <= 6'(rest); len_bits <= 64'(len) * 8; first <= (nfull == 0); start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (digest !== exp) begin failures++; $display("FAIL %0d bytes: %h\n   exp %h", len, digest, exp); end
    checks++;
    if (cyc < (rest > 55 ? 136 : 68) || cyc > (rest > 55 ? 137 : 69)) begin
      failures++; $display("FAIL %0d bytes took %0d cycles", len, cyc);
    end
  endtask

  int lens [10] = '{0, 3, 55, 56, 63, 64, 119, 120, 200, 0};
  initial begin
    rst_n = 1'b0; start = 1'b0; first = 1'b0; data = '0; nbytes = '0; len_bits = '0;
    t_start = 1'b0; t_init = 1'b0; t_block = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    lens[9] = 1 + ($urandom % 300);
    foreach (lens[i]) hash_msg(lens[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
