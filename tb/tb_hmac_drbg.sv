// Self-checking testbench for hmac_drbg on a sha256_core. Instantiates the
// generator with a random 256-bit seed, generates three outputs, reseeds,
// and generates twice more; every output and the cycle count of each
// operation are compared with the reference HMAC-DRBG of sha_ref, which
// hashes byte strings with its own SHA-256. Expected cycles: 18 compressions
// for instantiate and reseed, 12 for generate, 68 clocks each (one clock
// of slack for where the count starts relative to the start pulse).
module tb_hmac_drbg;
  import sha_ref::*;
  logic clk = 1'b0, rst_n, start, busy, done;
  logic [1:0] op;
  logic [255:0] seed, out;
  logic sha_start, sha_init, sha_done;
  logic [511:0] sha_block;
  logic [255:0] sha_digest;
  int checks = 0, failures = 0;

  hmac_drbg dut (.*);
  logic sha_busy;
  sha256_core u_sha (.clk, .rst_n, .start(sha_start), .init(sha_init), .block(sha_block),
                     .busy(sha_busy), .done(sha_done), .digest(sha_digest));
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [255:0] rk, rv;

  task automatic run(input logic [1:0] o, input logic [255:0] s, input int ncomp);
    int cyc = 0;
    @(posedge clk);
    op <= o; seed <= s; start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc < ncomp * 68 || cyc > ncomp * 68 + 1) begin failures++; $display("FAIL op %0d took %0d cycles, exp %0d", o, cyc, ncomp * 68); end
  endtask

  task automatic gen_check(input string what);
    logic [255:0] exp;
    run(2'd2, '0, 12);
    rv = hmac(rk, to_bytes(rv));
    exp = rv;
    drbg_update(rk, rv, 1'b0, '0);
    checks++;
    if (out !== exp) begin failures++; $display("FAIL %s: %h\n   exp %h", what, out, exp); end
  endtask

  logic [255:0] s0, s1, prev;
  initial begin
    rst_n = 1'b0; start = 1'b0; op = '0; seed = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // reference SHA-256 against the FIPS 180-4 "abc" example
    checks++;
    if (sha256('{8'h61, 8'h62, 8'h63}) !== 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad) begin
      failures++; $display("FAIL reference SHA-256");
    end
    s0 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    s1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    run(2'd0, s0, 18);
    rk = '0; rv = {32{8'h01}};
    drbg_update(rk, rv, 1'b1, s0);
    gen_check("generate 1");
    prev = out;
    gen_check("generate 2");
    checks++;
    if (out == prev) begin failures++; $display("FAIL repeated output"); end
    gen_check("generate 3");
    run(2'd1, s1, 18);
    drbg_update(rk, rv, 1'b1, s1);
    gen_check("generate after reseed 1");
    gen_check("generate after reseed 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
