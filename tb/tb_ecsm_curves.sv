// Workload testbench: elliptic-curve scalar multiplication on the four SEC
// prime curves secp160r1, secp192r1, secp224r1 and secp256r1, all run on
// one ecc_core at its default (256-bit) width with the field size set per
// curve by nbits. Each generator is pre-computed into its own cache slot
// (slots 0-3), then one random scalar k < 2^nbits is multiplied with it.
// The result is compared with an independent double-and-add model (ec_ref)
// and checked to lie on the curve. The clocks per ECSM are printed; the
// check on them is that the run time grows with the prime size, since the
// multiplier scans nbits bits per product and the comb has nbits/4 columns.
// Curve constants are the published SEC 2 domain parameters.
module tb_ecsm_curves;
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
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    string name;
    int nb;
    logic [W-1:0] p, b, gx, gy;
  } curve_t;

  curve_t curves [4];

  task automatic run(input ecc_op_e o, input logic [2:0] s, input int nb,
                     input logic [W-1:0] kk, input logic [W-1:0] xx, input logic [W-1:0] yy,
                     input logic [W-1:0] pp, output int cyc);
    @(posedge clk);
    op <= o; slot <= s; nbits <= 9'(nb); k <= kk; x <= xx; y <= yy; p <= pp; a <= pp - 3;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
  endtask

  function automatic bit is_on(curve_t c, big_t px, big_t py);
    big_t pp = big_t'(c.p);
    big_t lhs = mulm(py, py, pp);
    big_t rhs = (mulm(mulm(px, px, pp), px, pp) + mulm(pp - 3, px, pp) + big_t'(c.b)) % pp;
    return lhs == rhs;
  endfunction

  int cyc, prev;
  logic [W-1:0] rk;
  big_t ex, ey;
  bit einf;
  initial begin
    curves[0] = '{"secp160r1", 160,
      256'hffffffffffffffffffffffffffffffff7fffffff,
      256'h1c97befc54bd7a8b65acf89f81d4d4adc565fa45,
      256'h4a96b5688ef573284664698968c38bb913cbfc82,
      256'h23a628553168947d59dcc912042351377ac5fb32};
    curves[1] = '{"secp192r1", 192,
      256'hfffffffffffffffffffffffffffffffeffffffffffffffff,
      256'h64210519e59c80e70fa7e9ab72243049feb8deecc146b9b1,
      256'h188da80eb03090f67cbf20eb43a18800f4ff0afd82ff1012,
      256'h07192b95ffc8da78631011ed6b24cdd573f977a11e794811};
    curves[2] = '{"secp224r1", 224,
      256'hffffffffffffffffffffffffffffffff000000000000000000000001,
      256'hb4050a850c04b3abf54132565044b0b7d7bfd8ba270b39432355ffb4,
      256'hb70e0cbd6bb4bf7f321390b94a03c1d356c21122343280d6115c1d21,
      256'hbd376388b5f723fb4c22dfe6cd4375a05a07476444d5819985007e34};
    curves[3] = '{"secp256r1", 256,
      256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff,
      256'h5ac635d8aa3a93e7b3ebbd55769886bc651d06b0cc53b0f63bce3c3e27d2604b,
      256'h6b17d1f2e12c4247f8bce6e563a440f277037d812deb33a0f4a13945d898c296,
      256'h4fe342e2fe1a7f9b8ee7eb4a7c0f9e162bce33576b315ececbb6406837bf51f5};

    rst_n = 1'b0; start = 1'b0; op = ECC_MODMUL; slot = '0; nbits = 9'd256;
    k = '0; x = '0; y = '0; p = '0; a = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    prev = 0;
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (!is_on(curves[i], big_t'(curves[i].gx), big_t'(curves[i].gy))) begin
        failures++; $display("FAIL %s generator constant", curves[i].name);
      end
      run(ECC_PRECOMP, 3'(i), curves[i].nb, '0, curves[i].gx, curves[i].gy, curves[i].p, cyc);
      $display("%s precompute: %0d cycles", curves[i].name, cyc);
      rk = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      rk = rk & ((W'(1) << curves[i].nb) - 1);
      run(ECC_ECSM, 3'(i), curves[i].nb, rk, curves[i].gx, curves[i].gy, curves[i].p, cyc);
      smul(big_t'(rk), big_t'(curves[i].gx), big_t'(curves[i].gy), big_t'(curves[i].p) - 3,
           big_t'(curves[i].p), ex, ey, einf);
      checks++;
      if (rx !== W'(ex) || ry !== W'(ey) || inf !== einf || err) begin
        failures++; $display("FAIL %s kG mismatch", curves[i].name);
      end
      checks++;
      if (!is_on(curves[i], big_t'(rx), big_t'(ry))) begin
        failures++; $display("FAIL %s kG not on curve", curves[i].name);
      end
      $display("%s ECSM: %0d cycles", curves[i].name, cyc);
      checks++;
      if (cyc <= prev) begin failures++; $display("FAIL %s not slower than smaller curve", curves[i].name); end
      prev = cyc;
    end
    // the four cached generators must all still be intact: repeat 2G on slot 0
    run(ECC_ECSM, 3'd0, 160, 2, curves[0].gx, curves[0].gy, curves[0].p, cyc);
    smul(2, big_t'(curves[0].gx), big_t'(curves[0].gy), big_t'(curves[0].p) - 3,
         big_t'(curves[0].p), ex, ey, einf);
    checks++;
    if (rx !== W'(ex) || ry !== W'(ey)) begin failures++; $display("FAIL slot 0 overwritten"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
