// End-to-end testbench of dtls_soc at its default sizes. The testbench plays
// the processor (data bus, fetch port, WFI) and the SD controller (refill
// port), and runs the cryptographic work of a DTLS handshake and record on
// the engine:
//   - instruction fetches through the cache (misses with refill, then hits);
//   - engine clock at CLK/2 via DIV_CFG, later switched to CLK/1;
//   - ECC: comb pre-computation of the P-256 generator into a cache slot,
//     then an ephemeral k*G (ECDHE key generation) with the core asleep
//     (WFI) until the completion interrupt wakes it, checked against an
//     independent double-and-add model;
//   - SHA-256 of "abc" (transcript hash step), and a 100-byte transcript
//     hashed as one full block plus a hardware-padded final block;
//   - AES-GCM test case 2 (record protection);
//   - HMAC-DRBG instantiate and generate (handshake random values),
//     checked against an independent HMAC-DRBG model;
//   - a DTLS RAM access while the engine is busy (stall);
//   - the re-transmission timer expiring and interrupting;
//   - GPIO, UART and SPI register writes reaching the pins.
// Every mechanism is counted and a failure is counted for one that never
// happened.
module tb_dtls_soc;
  import dtls_pkg::*;
  import sha_ref::*;
  import ec_ref::*;
  logic clk = 1'b0, rst_n;
  bus_req_t d_req;
  bus_rsp_t d_rsp;
  logic if_req, if_ready, if_valid, ic_flush;
  logic [31:0] if_addr, if_instr;
  logic wfi, irq, core_clk, sleeping;
  logic rf_req, rf_valid;
  logic [31:0] rf_addr, rf_data;
  logic [7:0] gpio_in, gpio_out, gpio_oe;
  logic uart_rx, uart_tx, spi_sclk, spi_mosi, spi_miso, spi_cs_n;
  logic de_busy, crypto_clk;
  logic [31:0] ecc_dbl_count, ecc_add_count, ic_hits, ic_misses;
  int checks = 0, failures = 0;

  dtls_soc dut (.*);
  always #5 clk = ~clk;
  assign uart_rx = uart_tx;
  assign spi_miso = spi_mosi;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_stall = 0, n_sleep_cycles = 0, n_wake = 0, n_div_switch = 0, n_timer_irq = 0;
  int n_drbg = 0, n_sha_last = 0, n_core_edges_asleep = 0, n_uart_edges = 0, n_sclk = 0;
  always @(posedge clk) if (sleeping) n_sleep_cycles++;
  always @(posedge core_clk) if (sleeping) n_core_edges_asleep++;
  always @(negedge uart_tx) n_uart_edges++;
  always @(posedge spi_sclk) n_sclk++;

  // SD controller model: word at byte address a is ~a
  int rf_i;
  always_ff @(posedge core_clk) begin
    rf_valid <= 1'b0;
    if (!rf_req) rf_i <= 0;
    else if (!rf_valid && rf_i < 4) begin
      rf_valid <= 1'b1; rf_data <= ~(rf_addr + 32'(4 * rf_i)); rf_i <= rf_i + 1;
    end
  end

  task automatic access(input logic we, input logic [31:0] a, input logic [31:0] wd,
                        output logic [31:0] rd);
    int w = 0;
    @(posedge clk);
    d_req <= '{req: 1'b1, we: we, addr: a, wdata: wd, be: 4'hf};
    #1;
    while (!d_rsp.gnt) begin @(posedge clk); #1; w++; end
    if (w > 4) n_stall++;
    @(posedge clk);
    d_req.req <= 1'b0;
    #1;
    if (!we) begin
      while (!d_rsp.rvalid) begin @(posedge clk); #1; end
      rd = d_rsp.rdata;
    end
  endtask
  localparam logic [31:0] DE = 32'h1000_0000;
  task automatic wr_acfg(input int off, input logic [31:0] d);
    logic [31:0] nu;
    access(1'b1, DE + 32'((ACFG_BASE + off) * 4), d, nu);
  endtask
  task automatic rd_acfg(input int off, output logic [31:0] d);
    access(1'b0, DE + 32'((ACFG_BASE + off) * 4), 0, d);
  endtask
  // start a command, sleep with WFI until the interrupt, clear it
  task automatic command(input logic [31:0] c, input bit sleep);
    logic [31:0] nu;
    access(1'b1, DE + 32'(DE_REG_CMD), c, nu);
    if (sleep) begin
      @(posedge clk); wfi <= 1'b1;
      @(posedge clk); wfi <= 1'b0;
      #1;
      while (sleeping) @(posedge clk);
      n_wake++;
    end else begin
      while (!irq) @(posedge clk);
    end
    access(1'b1, DE + 32'(DE_REG_STATUS), 32'h2, nu);
  endtask
  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask
  task automatic fetch(input logic [31:0] a);
    @(posedge core_clk);
    if_req <= 1'b1; if_addr <= a;
    @(posedge core_clk);
    #1;
    if_req <= 1'b0;
    while (!if_valid) begin @(posedge core_clk); #1; end
    chk("fetch", if_instr, ~a);
  endtask
  task automatic ecc_operands(input logic [255:0] k, input logic [255:0] x, input logic [255:0] y,
                              input logic [255:0] p, input logic [255:0] a, input int nbits, input int slot);
    for (int i = 0; i < 8; i++) begin
      wr_acfg(i, k[32*i +: 32]);
      wr_acfg(8 + i, x[32*i +: 32]);
      wr_acfg(16 + i, y[32*i +: 32]);
      wr_acfg(24 + i, p[32*i +: 32]);
      wr_acfg(32 + i, a[32*i +: 32]);
    end
    wr_acfg(40, 32'(nbits) | (32'(slot) << 9));
  endtask

  localparam logic [255:0] P256 = 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff;
  localparam logic [255:0] N256 = 256'hffffffff00000000ffffffffffffffffbce6faada7179e84f3b9cac2fc632551;
  localparam logic [255:0] GX = 256'h6b17d1f2e12c4247f8bce6e563a440f277037d812deb33a0f4a13945d898c296;
  localparam logic [255:0] GY = 256'h4fe342e2fe1a7f9b8ee7eb4a7c0f9e162bce33576b315ececbb6406837bf51f5;

  logic [31:0] d, nu;
  logic [255:0] k;
  big_t ex, ey;
  bit einf;
  initial begin
    rst_n = 1'b0; d_req = '0; if_req = 1'b0; if_addr = '0; ic_flush = 1'b0; wfi = 1'b0;
    gpio_in = 8'h5a;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // program fetch: 8 words over 2 lines, twice
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < 8; i++) fetch(32'h0000_0200 + 4 * i);
    checks++;
    if (ic_misses != 2 || ic_hits < 14) begin
      failures++; $display("FAIL cache misses %0d hits %0d", ic_misses, ic_hits);
    end

    // engine clock CLK/2, interrupts on completion and timer
    access(1'b1, 32'h2000_0000, 32'h0000_0011, nu);
    n_div_switch++;
    access(1'b1, DE + 32'(DE_REG_IRQ_EN), 32'h3, nu);

    // data memory
    access(1'b1, 32'h0000_fffc, 32'h0bad_cafe, nu);
    access(1'b0, 32'h0000_fffc, 0, d);
    chk("dmem", d, 32'h0bad_cafe);

    // ECC: generator pre-computation and ECDHE key generation while asleep
    ecc_operands('0, GX, GY, P256, P256 - 3, 256, 0);
    command({25'b0, ECC_PRECOMP, CMD_ECC}, 1'b1);
    k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % N256;
    ecc_operands(k, GX, GY, P256, P256 - 3, 256, 0);
    command({25'b0, ECC_ECSM, CMD_ECC}, 1'b1);
    smul(big_t'(k), big_t'(GX), big_t'(GY), big_t'(P256 - 3), big_t'(P256), ex, ey, einf);
    for (int i = 0; i < 8; i++) begin
      rd_acfg(41 + i, d); chk("kG x", d, ex[32*i +: 32]);
      rd_acfg(49 + i, d); chk("kG y", d, ey[32*i +: 32]);
    end
    $display("ECC doublings %0d additions %0d", ecc_dbl_count, ecc_add_count);

    // switch the engine clock to CLK/1
    access(1'b1, 32'h2000_0000, 32'h0000_0001, nu);
    n_div_switch++;

    // SHA-256("abc")
    begin
      logic [511:0] blk = {24'h616263, 8'h80, 416'h0, 64'd24};
      for (int i = 0; i < 16; i++) wr_acfg(i, blk[511 - 32*i -: 32]);
      // touch the RAM while the engine runs: must stall
      access(1'b1, DE + 32'(DE_REG_CMD), {25'b0, 3'd0, CMD_SHA_INIT}, nu);
      access(1'b0, DE + 32'h0, 0, d);
      while (!irq) @(posedge clk);
      access(1'b1, DE + 32'(DE_REG_STATUS), 32'h2, nu);
      for (int i = 0; i < 8; i++) begin
        rd_acfg(16 + i, d);
        chk("sha", d, 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad >> (224 - 32*i));
      end
    end

    // 100-byte transcript: one full block, then 36 bytes padded by the engine
    begin
      bytes_t m;
      logic [255:0] exp;
      for (int i = 0; i < 100; i++) m.push_back(8'($urandom));
      exp = sha256(m);
      for (int i = 0; i < 16; i++) wr_acfg(i, {m[4*i], m[4*i+1], m[4*i+2], m[4*i+3]});
      command({25'b0, 3'd0, CMD_SHA_INIT}, 1'b0);
      for (int i = 0; i < 9; i++) wr_acfg(i, {m[64+4*i], m[65+4*i], m[66+4*i], m[67+4*i]});
      wr_acfg(24, 32'd36);
      wr_acfg(25, 32'd0);
      wr_acfg(26, 32'd800);
      command({25'b0, 3'd0, CMD_SHA_LAST}, 1'b1);
      n_sha_last++;
      for (int i = 0; i < 8; i++) begin
        rd_acfg(16 + i, d); chk("transcript hash", d, exp[255 - 32*i -: 32]);
      end
    end

    // AES-GCM test case 2
    for (int i = 0; i < 5; i++) wr_acfg(i, (i == 4) ? 32'd16 : 32'd0);
    command({25'b0, GCM_KEY, CMD_GCM}, 1'b0);
    command({25'b0, GCM_IV, CMD_GCM}, 1'b0);
    command({25'b0, GCM_ENC, CMD_GCM}, 1'b1);
    for (int i = 0; i < 4; i++) begin
      rd_acfg(8 + i, d); chk("gcm ct", d, 128'h0388dace60b6a392f328c2b971b2fe78 >> (96 - 32*i));
    end
    command({25'b0, GCM_TAG, CMD_GCM}, 1'b0);
    for (int i = 0; i < 4; i++) begin
      rd_acfg(8 + i, d); chk("gcm tag", d, 128'hab6e47d42cec13bdf53a67b21257bddf >> (96 - 32*i));
    end

    // HMAC-DRBG: instantiate, then one generate with the core asleep
    begin
      logic [255:0] seed, rk, rv;
      seed = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < 8; i++) wr_acfg(i, seed[255 - 32*i -: 32]);
      command({25'b0, 3'd0, CMD_DRBG}, 1'b0);
      n_drbg++;
      command({25'b0, 3'd2, CMD_DRBG}, 1'b1);
      n_drbg++;
      rk = '0; rv = {32{8'h01}};
      drbg_update(rk, rv, 1'b1, seed);
      rv = hmac(rk, to_bytes(rv));
      for (int i = 0; i < 8; i++) begin
        rd_acfg(16 + i, d); chk("drbg", d, rv[255 - 32*i -: 32]);
      end
    end

    // re-transmission timer: 10 ticks of 8 clocks, sleep until it fires
    access(1'b1, DE + 32'(DE_REG_TPRESC), 32'd7, nu);
    access(1'b1, DE + 32'(DE_REG_TIMER), 32'd10, nu);
    @(posedge clk); wfi <= 1'b1;
    @(posedge clk); wfi <= 1'b0;
    #1;
    while (sleeping) @(posedge clk);
    n_wake++;
    access(1'b0, DE + 32'(DE_REG_STATUS), 0, d);
    if (d[4]) n_timer_irq++;
    else $display("status after timer wake %h", d);
    access(1'b1, DE + 32'(DE_REG_STATUS), 32'h10, nu);

    // peripherals
    access(1'b1, 32'h3000_0000, 32'h0000_00c3, nu);
    access(1'b1, 32'h3000_0004, 32'h0000_00ff, nu);
    #1;
    chk("gpio out", {24'b0, gpio_out}, 32'hc3);
    access(1'b0, 32'h3000_0008, 0, d);
    chk("gpio in", d, 32'h5a);
    access(1'b1, 32'h3000_1008, 32'd3, nu);
    access(1'b1, 32'h3000_1000, 32'h0000_0055, nu);
    begin
      automatic int polls = 0;
      do begin access(1'b0, 32'h3000_1004, 0, d); polls++; end while (!d[1] && polls < 1000);
      checks++;
      if (!d[1]) begin failures++; $display("FAIL uart byte never received"); end
    end
    access(1'b0, 32'h3000_1000, 0, d);
    chk("uart loopback", d, 32'h55);
    access(1'b1, 32'h3000_200c, 32'h0, nu);
    access(1'b1, 32'h3000_2000, 32'h0000_00a7, nu);
    begin
      automatic int polls = 0;
      do begin access(1'b0, 32'h3000_2004, 0, d); polls++; end while (d[0] && polls < 1000);
      checks++;
      if (d[0]) begin failures++; $display("FAIL spi transfer never ended"); end
    end
    access(1'b0, 32'h3000_2000, 0, d);
    chk("spi loopback", d, 32'ha7);

    // every mechanism must have happened
    $display("stalls %0d sleep cycles %0d wakes %0d div switches %0d timer irqs %0d drbg %0d",
             n_stall, n_sleep_cycles, n_wake, n_div_switch, n_timer_irq, n_drbg);
    $display("cache hits %0d misses %0d, core edges while asleep %0d, uart %0d, sclk %0d",
             ic_hits, ic_misses, n_core_edges_asleep, n_uart_edges, n_sclk);
    checks += 10;
    if (n_sha_last != 1)     begin failures++; $display("FAIL session hash"); end
    if (n_drbg != 2)         begin failures++; $display("FAIL drbg"); end
    if (n_stall == 0)        begin failures++; $display("FAIL no stall"); end
    if (n_wake < 3)          begin failures++; $display("FAIL too few wake-ups"); end
    if (n_sleep_cycles < 100000) begin failures++; $display("FAIL short sleep"); end
    if (n_core_edges_asleep > n_wake) begin failures++; $display("FAIL core clock ran while asleep"); end
    if (n_timer_irq != 1)    begin failures++; $display("FAIL timer"); end
    if (ecc_dbl_count == 0 || ecc_add_count == 0) begin failures++; $display("FAIL no ECC work"); end
    if (n_uart_edges == 0)   begin failures++; $display("FAIL no uart"); end
    if (n_sclk != 8)         begin failures++; $display("FAIL sclk %0d", n_sclk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
