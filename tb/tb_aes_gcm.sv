// Self-checking testbench for aes_gcm. Runs NIST GCM test cases 1-4 of the
// original GCM specification (McGrew and Viega): empty message, one zero
// block, four full blocks, and 60 bytes of plaintext with 20 bytes of AAD,
// which exercises the partial-block masking; decryption; and plain
// block encryption (GCM_ECB) with the FIPS 197 example.
module tb_aes_gcm;
  import dtls_pkg::*;
  logic clk = 1'b0, rst_n, start;
  gcm_op_e op;
  logic [127:0] din, dout;
  logic [4:0] nbytes;
  logic busy, done;
  int checks = 0, failures = 0;

  aes_gcm dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    // plain block encryption through the same AES core (FIPS 197 C.1)
    run(GCM_KEY, 128'h000102030405060708090a0b0c0d0e0f, 16, r);
    run(GCM_ECB, 128'h00112233445566778899aabbccddeeff, 16, r);
    check("ecb", r, 128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input gcm_op_e o, input logic [127:0] d, input int nb, output logic [127:0] r);
    @(posedge clk);
    op <= o; din <= d; nbytes <= 5'(nb); start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    r = dout;
  endtask

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  localparam logic [127:0] K3 = 128'hfeffe9928665731c6d6a8f9467308308;
  localparam logic [95:0]  IV3 = 96'hcafebabefacedbaddecaf888;
  localparam logic [511:0] P3 = {
    128'hd9313225f88406e5a55909c5aff5269a, 128'h86a7a9531534f7da2e4c303d8a318a72,
    128'h1c3c0c95956809532fcf0e2449a6b525, 128'hb16aedf5aa0de657ba637b391aafd255};
  localparam logic [511:0] C3 = {
    128'h42831ec2217774244b7221b784d0d49c, 128'he3aa212f2c02a4e035c17e2329aca12e,
    128'h21d514b25466931c7d8f6a5aac84aa05, 128'h1ba30b396a0aac973d58e091473f5985};
  localparam logic [255:0] A4 = {128'hfeedfacedeadbeeffeedfacedeadbeef, 128'habaddad2000000000000000000000000};

  logic [127:0] r;
  initial begin
    rst_n = 1'b0; start = 1'b0; op = GCM_KEY; din = '0; nbytes = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // Test case 1: K = 0, IV = 0, no data
    run(GCM_KEY, 128'h0, 16, r);
    run(GCM_IV, 128'h0, 16, r);
    run(GCM_TAG, 128'h0, 16, r);
    check("tc1 tag", r, 128'h58e2fccefa7e3061367f1d57a4e7455a);
    // Test case 2: one zero block
    run(GCM_IV, 128'h0, 16, r);
    run(GCM_ENC, 128'h0, 16, r);
    check("tc2 ct", r, 128'h0388dace60b6a392f328c2b971b2fe78);
    run(GCM_TAG, 128'h0, 16, r);
    check("tc2 tag", r, 128'hab6e47d42cec13bdf53a67b21257bddf);
    // Test case 3: four blocks
    run(GCM_KEY, K3, 16, r);
    run(GCM_IV, {IV3, 32'h0}, 16, r);
    for (int i = 0; i < 4; i++) begin
      run(GCM_ENC, P3[511 - 128*i -: 128], 16, r);
      check("tc3 ct", r, C3[511 - 128*i -: 128]);
    end
    run(GCM_TAG, 128'h0, 16, r);
    check("tc3 tag", r, 128'h4d5c2af327cd64a62cf35abd2ba6fab4);
    // Test case 4: 20 bytes AAD, 60 bytes plaintext
    run(GCM_IV, {IV3, 32'h0}, 16, r);
    run(GCM_AAD, A4[255:128], 16, r);
    run(GCM_AAD, A4[127:0], 4, r);
    for (int i = 0; i < 4; i++) begin
      run(GCM_ENC, P3[511 - 128*i -: 128], (i == 3) ? 12 : 16, r);
      check("tc4 ct", r, (i == 3) ? (C3[127:0] & {{96{1'b1}}, 32'h0}) : C3[511 - 128*i -: 128]);
    end
    run(GCM_TAG, 128'h0, 16, r);
    check("tc4 tag", r, 128'h5bc94fbc3221a5db94fae95ae7121a47);
    // Decrypt test case 3 back
    run(GCM_IV, {IV3, 32'h0}, 16, r);
    for (int i = 0; i < 4; i++) begin
      run(GCM_DEC, C3[511 - 128*i -: 128], 16, r);
      check("tc3 pt", r, P3[511 - 128*i -: 128]);
    end
    run(GCM_TAG, 128'h0, 16, r);
    check("tc3 dec tag", r, 128'h4d5c2af327cd64a62cf35abd2ba6fab4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
