// Self-checking testbench for dtls_engine, clocked at CLK/3 through the
// clock divider. As a processor would, it writes operands into the
// accelerator configuration region of the DTLS RAM, starts a command, waits
// for the interrupt and reads the results. Checks: SHA-256 of "abc", AES-GCM
// test case 2 (ciphertext and tag), SHA-256 of "abc" padded by the
// session-hash finisher, HMAC-DRBG instantiate and generate
// against the reference generator of sha_ref followed by a SHA command on
// the shared SHA core, a P-256 field multiplication against
// integer arithmetic, micro-stack words surviving the commands, the RAM
// being refused (no grant) while a command runs, and the interrupt clearing.
module tb_dtls_engine;
  import dtls_pkg::*;
  import sha_ref::*;
  logic clk = 1'b0, rst_n;
  logic crypto_clk, crypto_tick;
  bus_req_t bus_req;
  bus_rsp_t bus_rsp;
  logic irq, busy;
  logic [31:0] ecc_dbl_count, ecc_add_count;
  int checks = 0, failures = 0;
  int stalls = 0;

  clock_div u_div (.clk, .rst_n, .en(1'b1), .div_cfg(4'd2), .tick(crypto_tick), .crypto_clk);
  dtls_engine dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input logic we, input logic [31:0] a, input logic [31:0] wd,
                        output logic [31:0] rd);
    int w = 0;
    @(posedge clk);
    bus_req <= '{req: 1'b1, we: we, addr: a, wdata: wd, be: 4'hf};
    #1;
    while (!bus_rsp.gnt) begin @(posedge clk); #1; w++; end
    if (w > 3) stalls++;
    @(posedge clk);
    bus_req.req <= 1'b0;
    #1;
    if (!we) begin
      while (!bus_rsp.rvalid) begin @(posedge clk); #1; end
      rd = bus_rsp.rdata;
    end
  endtask
  task automatic wr_acfg(input int off, input logic [31:0] d);
    logic [31:0] nu;
    access(1'b1, 32'((ACFG_BASE + off) * 4), d, nu);
  endtask
  task automatic rd_acfg(input int off, output logic [31:0] d);
    access(1'b0, 32'((ACFG_BASE + off) * 4), 0, d);
  endtask
  task automatic command(input logic [31:0] c);
    logic [31:0] nu;
    access(1'b1, 32'(DE_REG_CMD), c, nu);
    while (!irq) @(posedge clk);
    access(1'b1, 32'(DE_REG_STATUS), 32'h2, nu);
  endtask
  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  localparam logic [255:0] P256 = 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff;
  localparam logic [255:0] ABC_DIGEST = 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad;
  logic [31:0] d, nu;
  logic [511:0] blk;
  logic [255:0] va, vb, prod, seed, rk, rv;
  initial begin
    rst_n = 1'b0; bus_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    access(1'b1, 32'(DE_REG_IRQ_EN), 32'h1, nu);
    // a micro-stack word that commands must not touch
    access(1'b1, 32'h0000_0010, 32'hdead_beef, nu);

    // SHA-256("abc")
    blk = {24'h616263, 8'h80, 416'h0, 64'd24};
    for (int i = 0; i < 16; i++) wr_acfg(i, blk[511 - 32*i -: 32]);
    command({25'b0, 3'd0, CMD_SHA_INIT});
    for (int i = 0; i < 8; i++) begin
      rd_acfg(16 + i, d);
      chk("sha digest", d, ABC_DIGEST[255 - 32*i -: 32]);
    end
    checks++;
    if (irq) begin failures++; $display("FAIL irq not cleared"); end

    // AES-GCM test case 2
    for (int i = 0; i < 5; i++) wr_acfg(i, (i == 4) ? 32'd16 : 32'd0);
    command({25'b0, GCM_KEY, CMD_GCM});
    command({25'b0, GCM_IV, CMD_GCM});
    command({25'b0, GCM_ENC, CMD_GCM});
    for (int i = 0; i < 4; i++) begin
      rd_acfg(8 + i, d);
      chk("gcm ct", d, 128'h0388dace60b6a392f328c2b971b2fe78 >> (96 - 32*i));
    end
    command({25'b0, GCM_TAG, CMD_GCM});
    for (int i = 0; i < 4; i++) begin
      rd_acfg(8 + i, d);
      chk("gcm tag", d, 128'hab6e47d42cec13bdf53a67b21257bddf >> (96 - 32*i));
    end

    // session-hash finish: "abc" padded in hardware
    for (int i = 0; i < 16; i++) wr_acfg(i, (i == 0) ? 32'h6162_6300 : 32'h0);
    wr_acfg(24, 32'd3);
    wr_acfg(25, 32'd0);
    wr_acfg(26, 32'd24);
    command({25'b0, 3'd1, CMD_SHA_LAST});
    for (int i = 0; i < 8; i++) begin
      rd_acfg(16 + i, d);
      chk("sha last digest", d, ABC_DIGEST[255 - 32*i -: 32]);
    end

    // HMAC-DRBG: instantiate with a seed, generate twice, then SHA again
    seed = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 8; i++) wr_acfg(i, seed[255 - 32*i -: 32]);
    command({25'b0, 3'd0, CMD_DRBG});
    rk = '0; rv = {32{8'h01}};
    drbg_update(rk, rv, 1'b1, seed);
    for (int g = 0; g < 2; g++) begin
      command({25'b0, 3'd2, CMD_DRBG});
      rv = hmac(rk, to_bytes(rv));
      for (int i = 0; i < 8; i++) begin
        rd_acfg(16 + i, d);
        chk("drbg output", d, rv[255 - 32*i -: 32]);
      end
      drbg_update(rk, rv, 1'b0, '0);
    end
    for (int i = 0; i < 16; i++) wr_acfg(i, blk[511 - 32*i -: 32]);
    command({25'b0, 3'd0, CMD_SHA_INIT});
    for (int i = 0; i < 8; i++) begin
      rd_acfg(16 + i, d);
      chk("sha after drbg", d, ABC_DIGEST[255 - 32*i -: 32]);
    end

    // P-256 field multiplication, with a RAM access attempted while busy
    va = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % P256;
    vb = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % P256;
    for (int i = 0; i < 8; i++) begin
      wr_acfg(8 + i, va[32*i +: 32]);
      wr_acfg(16 + i, vb[32*i +: 32]);
      wr_acfg(24 + i, P256[32*i +: 32]);
    end
    wr_acfg(40, 32'd256);
    access(1'b1, 32'(DE_REG_CMD), {25'b0, ECC_MODMUL, CMD_ECC}, nu);
    access(1'b0, 32'h0000_0010, 0, d);          // waits for the engine
    checks++;
    if (busy) begin failures++; $display("FAIL RAM granted while busy"); end
    chk("stack word", d, 32'hdead_beef);
    while (!irq) @(posedge clk);
    access(1'b1, 32'(DE_REG_STATUS), 32'h2, nu);
    prod = 256'(({256'b0, va} * {256'b0, vb}) % {256'b0, P256});
    for (int i = 0; i < 8; i++) begin
      rd_acfg(41 + i, d);
      chk("modmul", d, prod[32*i +: 32]);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
