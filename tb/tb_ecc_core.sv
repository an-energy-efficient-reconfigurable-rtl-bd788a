// Self-checking testbench for ecc_core on NIST P-256 and SEC secp160r1.
// Checks: field multiply/divide/add/subtract against 512-bit integer
// arithmetic; comb pre-computation of the generator into a cache slot;
// k*G for k = 1, 2, 3, n-1 (gives -G) and random k against an independent
// double-and-add model; results lying on the curve; the point at infinity
// for k = n; the cycle count of a 256-bit multiplication (nbits+1 clocks in the
// multiplier plus four for operand hand-over and done);
// and a slot number beyond the six supported points being refused.
module tb_ecc_core;
  import dtls_pkg::*;
  import ec_ref::*;
  localparam int W = 256;
  logic clk = 1'b0, rst_n, start;
  ecc_op_e op;
  logic [2:0] slot;
  logic [8:0] nbits;
  logic [W-1:0] k, x, y, p, a, rx, ry;
  logic busy, done, err, inf;
  logic [31:0] n_dbl, n_add;
  int checks = 0, failures = 0;

  ecc_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [255:0] P256 = 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff;
  localparam logic [255:0] A256 = P256 - 3;
  localparam logic [255:0] B256 = 256'h5ac635d8aa3a93e7b3ebbd55769886bc651d06b0cc53b0f63bce3c3e27d2604b;
  localparam logic [255:0] N256 = 256'hffffffff00000000ffffffffffffffffbce6faada7179e84f3b9cac2fc632551;
  localparam logic [255:0] GX256 = 256'h6b17d1f2e12c4247f8bce6e563a440f277037d812deb33a0f4a13945d898c296;
  localparam logic [255:0] GY256 = 256'h4fe342e2fe1a7f9b8ee7eb4a7c0f9e162bce33576b315ececbb6406837bf51f5;
  localparam logic [255:0] P160 = 256'hffffffffffffffffffffffffffffffff7fffffff;
  localparam logic [255:0] GX160 = 256'h4a96b5688ef573284664698968c38bb913cbfc82;
  localparam logic [255:0] GY160 = 256'h23a628553168947d59dcc912042351377ac5fb32;

  task automatic run(input ecc_op_e o, input logic [2:0] s, input int nb,
                     input logic [W-1:0] kk, input logic [W-1:0] xx, input logic [W-1:0] yy,
                     input logic [W-1:0] pp, input logic [W-1:0] aa, output int cyc);
    @(posedge clk);
    op <= o; slot <= s; nbits <= 9'(nb); k <= kk; x <= xx; y <= yy; p <= pp; a <= aa;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
  endtask

  task automatic chk(input string what, input logic [W-1:0] got, input logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h\n      exp %h", what, got, exp); end
  endtask

  task automatic on_curve(input string what);
    big_t lhs, rhs;
    lhs = mulm(big_t'(ry), big_t'(ry), big_t'(P256));
    rhs = (mulm(mulm(big_t'(rx), big_t'(rx), big_t'(P256)), big_t'(rx), big_t'(P256)) +
           mulm(big_t'(A256), big_t'(rx), big_t'(P256)) + big_t'(B256)) % big_t'(P256);
    checks++;
    if (lhs != rhs) begin failures++; $display("FAIL %s not on curve", what); end
  endtask

  task automatic ecsm_check(input string what, input logic [W-1:0] kk, input int nb,
                            input logic [W-1:0] gx, input logic [W-1:0] gy,
                            input logic [W-1:0] pp, input logic [W-1:0] aa, output int cyc);
    big_t ex, ey;
    bit einf;
    run(ECC_ECSM, 3'd0, nb, kk, gx, gy, pp, aa, cyc);
    smul(big_t'(kk), big_t'(gx), big_t'(gy), big_t'(aa), big_t'(pp), ex, ey, einf);
    checks++;
    if (inf !== einf || err) begin failures++; $display("FAIL %s inf/err flags", what); end
    if (!einf) begin
      chk({what, " x"}, rx, ex[W-1:0]);
      chk({what, " y"}, ry, ey[W-1:0]);
    end
  endtask

  int cyc;
  logic [W-1:0] va, vb, rk;
  initial begin
    rst_n = 1'b0; start = 1'b0; op = ECC_MODMUL; slot = '0; nbits = 9'd256;
    k = '0; x = '0; y = '0; p = '0; a = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // field operations
    for (int i = 0; i < 4; i++) begin
      va = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % P256;
      vb = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % P256;
      run(ECC_MODMUL, 0, 256, 0, va, vb, P256, A256, cyc);
      chk("modmul", rx, W'(mulm(big_t'(va), big_t'(vb), big_t'(P256))));
      checks++;
      if (cyc != 256 + 5) begin failures++; $display("FAIL modmul cycles %0d", cyc); end
      run(ECC_MODDIV, 0, 256, 0, va, vb, P256, A256, cyc);
      chk("moddiv", W'(mulm(big_t'(rx), big_t'(vb), big_t'(P256))), va);
      run(ECC_MODADD, 0, 256, 0, va, vb, P256, A256, cyc);
      chk("modadd", rx, W'((big_t'(va) + big_t'(vb)) % big_t'(P256)));
      run(ECC_MODSUB, 0, 256, 0, va, vb, P256, A256, cyc);
      chk("modsub", rx, W'(subm(big_t'(va), big_t'(vb), big_t'(P256))));
    end
    run(ECC_MODDIV, 0, 256, 0, 1, 0, P256, A256, cyc);
    checks++;
    if (!err) begin failures++; $display("FAIL division by zero not flagged"); end

    // slot 6 is beyond the six cached points
    run(ECC_PRECOMP, 3'd6, 256, 0, GX256, GY256, P256, A256, cyc);
    checks++;
    if (!err) begin failures++; $display("FAIL slot 6 accepted"); end

    // P-256 generator into slot 0
    run(ECC_PRECOMP, 3'd0, 256, 0, GX256, GY256, P256, A256, cyc);
    $display("P-256 precompute: %0d cycles", cyc);
    on_curve("T[7]");
    ecsm_check("1G", 1, 256, GX256, GY256, P256, A256, cyc);
    chk("1G x", rx, GX256);
    ecsm_check("2G", 2, 256, GX256, GY256, P256, A256, cyc);
    on_curve("2G");
    ecsm_check("3G", 3, 256, GX256, GY256, P256, A256, cyc);
    ecsm_check("(n-1)G", N256 - 1, 256, GX256, GY256, P256, A256, cyc);
    chk("(n-1)G = -G", ry, P256 - GY256);
    rk = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} % N256;
    ecsm_check("kG random", rk, 256, GX256, GY256, P256, A256, cyc);
    on_curve("kG");
    $display("P-256 ECSM: %0d cycles", cyc);
    run(ECC_ECSM, 3'd0, 256, N256, GX256, GY256, P256, A256, cyc);
    checks++;
    if (!inf) begin failures++; $display("FAIL nG is not infinity"); end

    // secp160r1: 160-bit datapath, slot 1
    run(ECC_PRECOMP, 3'd1, 160, 0, GX160, GY160, P160, P160 - 3, cyc);
    rk = {$urandom, $urandom, $urandom, $urandom, $urandom};
    begin
      big_t ex, ey; bit einf;
      run(ECC_ECSM, 3'd1, 160, rk, GX160, GY160, P160, P160 - 3, cyc);
      smul(big_t'(rk), big_t'(GX160), big_t'(GY160), big_t'(P160 - 3), big_t'(P160), ex, ey, einf);
      chk("160 kG x", rx, ex[W-1:0]);
      chk("160 kG y", ry, ey[W-1:0]);
      $display("secp160r1 ECSM: %0d cycles", cyc);
    end
    $display("doublings=%0d additions=%0d", n_dbl, n_add);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
