// Self-checking testbench for dtls_controller with a real dtls_ram and
// simple accelerator and random-generator models (each returns a known function of its operands
// after a few cycles). Checks: operand words travel from the accelerator
// configuration region into the operand buffer, results land at the right
// RAM offsets, the done flag and interrupt behave (enable, W1C clear), an
// unknown command sets err, and the re-transmission timer expires after
// (TPRESC+1)*TIMER clocks and interrupts.
module tb_dtls_controller;
  import dtls_pkg::*;
  logic clk = 1'b0, rst_n;
  logic reg_we;
  logic [11:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic ram_en, ram_we;
  logic [8:0] ram_addr;
  logic [31:0] ram_wdata, ram_rdata;
  logic [31:0] opbuf [OPBUF_WORDS];
  logic [6:4] subop;
  logic sha_start, sha_init, sha_done, gcm_start, gcm_done, ecc_start, ecc_done, ecc_err, ecc_inf;
  logic [255:0] sha_digest, ecc_rx, ecc_ry;
  logic [127:0] gcm_dout;
  logic drbg_start, drbg_done, fin_start, fin_done;
  logic [255:0] drbg_out;
  logic busy, irq;
  int checks = 0, failures = 0;

  dtls_controller dut (.*);
  always #5 clk = ~clk;

  // RAM shared between the test (when idle) and the controller
  logic t_en, t_we;
  logic [8:0] t_addr;
  logic [31:0] t_wdata;
  dtls_ram u_ram (.clk, .en(busy ? ram_en : t_en), .we(busy ? ram_we : t_we), .be(4'hf),
                  .addr(busy ? ram_addr : t_addr), .wdata(busy ? ram_wdata : t_wdata),
                  .rdata(ram_rdata));

  // accelerator models: done 4 cycles after start
  logic [3:0] sha_d, gcm_d, ecc_d, drbg_d, fin_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sha_d <= '0; gcm_d <= '0; ecc_d <= '0; drbg_d <= '0; fin_d <= '0;
    end else begin
      sha_d <= {sha_d[2:0], sha_start};
      gcm_d <= {gcm_d[2:0], gcm_start};
      ecc_d <= {ecc_d[2:0], ecc_start};
      drbg_d <= {drbg_d[2:0], drbg_start};
      fin_d <= {fin_d[2:0], fin_start};
    end
  end
  assign sha_done = sha_d[3];
  assign gcm_done = gcm_d[3];
  assign ecc_done = ecc_d[3];
  assign drbg_done = drbg_d[3];
  assign fin_done = fin_d[3];
  assign ecc_err  = 1'b0;
  assign ecc_inf  = 1'b1;
  always_comb begin
    for (int i = 0; i < 8; i++) sha_digest[255 - 32*i -: 32] = opbuf[i] + opbuf[15 - i];
    for (int i = 0; i < 8; i++) drbg_out[255 - 32*i -: 32] = opbuf[i] * 3;
    for (int i = 0; i < 4; i++) gcm_dout[127 - 32*i -: 32] = ~opbuf[i] ^ {27'b0, opbuf[4][4:0]};
    for (int i = 0; i < 8; i++) begin
      ecc_rx[32*i +: 32] = opbuf[i] ^ opbuf[8 + i];
      ecc_ry[32*i +: 32] = opbuf[24 + i] + opbuf[32 + i] + opbuf[40];
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] shadow [ACFG_WORDS];

  task automatic ram_wr(input int a, input logic [31:0] d);
    @(posedge clk);
    t_en <= 1'b1; t_we <= 1'b1; t_addr <= 9'(a); t_wdata <= d;
    @(posedge clk);
    t_en <= 1'b0; t_we <= 1'b0;
  endtask
  task automatic ram_rd(input int a, output logic [31:0] d);
    @(posedge clk);
    t_en <= 1'b1; t_we <= 1'b0; t_addr <= 9'(a);
    @(posedge clk);
    t_en <= 1'b0;
    #1 d = ram_rdata;
  endtask
  task automatic reg_wr(input logic [11:0] a, input logic [31:0] d);
    @(posedge clk);
    reg_we <= 1'b1; reg_addr <= a; reg_wdata <= d;
    @(posedge clk);
    reg_we <= 1'b0;
  endtask
  task automatic reg_rd(input logic [11:0] a, output logic [31:0] d);
    @(posedge clk);
    reg_addr <= a;
    @(posedge clk);
    @(posedge clk);
    #1 d = reg_rdata;
  endtask
  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask
  task automatic run_cmd(input logic [31:0] c);
    int n = 0;
    reg_wr(DE_REG_CMD, c);
    #1;
    while (busy) begin @(posedge clk); n++; end
  endtask

  logic [31:0] d;
  initial begin
    rst_n = 1'b0; reg_we = 1'b0; reg_addr = '0; reg_wdata = '0;
    t_en = 1'b0; t_we = 1'b0; t_addr = '0; t_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < ACFG_WORDS; i++) begin
      shadow[i] = $urandom;
      ram_wr(ACFG_BASE + i, shadow[i]);
    end
    reg_wr(DE_REG_IRQ_EN, 32'h1);

    // SHA command: digest word i = w[i] + w[15-i] at offset 16
    run_cmd({25'b0, 3'd0, CMD_SHA_INIT});
    checks++;
    if (!irq) begin failures++; $display("FAIL no irq after SHA"); end
    for (int i = 0; i < 8; i++) begin
      ram_rd(ACFG_BASE + 16 + i, d);
      chk("sha result", d, shadow[i] + shadow[15 - i]);
    end
    for (int i = 0; i < 16; i++) chk("sha operand", opbuf[i], shadow[i]);
    reg_rd(DE_REG_STATUS, d);
    chk("status after sha", d & 32'h1f, 32'h2);
    reg_wr(DE_REG_STATUS, 32'h2);
    #1;
    checks++;
    if (irq) begin failures++; $display("FAIL irq not cleared"); end

    // GCM command: result at offset 8
    run_cmd({25'b0, 3'd3, CMD_GCM});
    for (int i = 0; i < 4; i++) begin
      ram_rd(ACFG_BASE + 8 + i, d);
      chk("gcm result", d, ~shadow[i] ^ {27'b0, shadow[4][4:0]});
    end
    chk("gcm subop", 32'(subop), 32'd3);

    // ECC command: x to 41..48, y to 49..56; inf reported
    for (int i = 0; i < 41; i++) ram_wr(ACFG_BASE + i, shadow[i]);
    run_cmd({25'b0, 3'd1, CMD_ECC});
    for (int i = 0; i < 8; i++) begin
      ram_rd(ACFG_BASE + 41 + i, d);
      chk("ecc x", d, shadow[i] ^ shadow[8 + i]);
      ram_rd(ACFG_BASE + 49 + i, d);
      chk("ecc y", d, shadow[24 + i] + shadow[32 + i] + shadow[40]);
    end
    reg_rd(DE_REG_STATUS, d);
    chk("status inf", d & 32'h1f, 32'ha);

    // SHA finish command: 27 operand words, digest at offset 16
    for (int i = 0; i < 41; i++) ram_wr(ACFG_BASE + i, shadow[i]);
    run_cmd({25'b0, 3'd1, CMD_SHA_LAST});
    for (int i = 0; i < 8; i++) begin
      ram_rd(ACFG_BASE + 16 + i, d);
      chk("sha last result", d, shadow[i] + shadow[15 - i]);
    end
    for (int i = 24; i < 27; i++) chk("sha last operand", opbuf[i], shadow[i]);

    // DRBG command: seed from 0..7, output to 16..23
    run_cmd({25'b0, 3'd2, CMD_DRBG});
    for (int i = 0; i < 8; i++) begin
      ram_rd(ACFG_BASE + 16 + i, d);
      chk("drbg result", d, shadow[i] * 3);
    end
    chk("drbg subop", 32'(subop), 32'd2);

    // unknown command
    run_cmd(32'h0000_000f);
    reg_rd(DE_REG_STATUS, d);
    chk("status err", d & 32'h1f, 32'h6);

    // re-transmission timer: 5 ticks of 4 clocks
    reg_wr(DE_REG_STATUS, 32'h12);
    reg_wr(DE_REG_IRQ_EN, 32'h2);
    reg_wr(DE_REG_TPRESC, 32'd3);
    reg_wr(DE_REG_TIMER, 32'd5);
    begin
      automatic int n = 0;
      while (!irq && n < 1000) begin @(posedge clk); n++; end
      checks++;
      if (n < 19 || n > 21) begin failures++; $display("FAIL timer after %0d clocks", n); end
    end
    reg_rd(DE_REG_STATUS, d);
    chk("status timer", d & 32'h10, 32'h10);
    reg_rd(DE_REG_TIMER, d);
    chk("timer at zero", d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
