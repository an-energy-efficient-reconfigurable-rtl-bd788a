// Self-checking testbench for mod_mul: random products modulo the P-256
// prime, a random odd 256-bit modulus and a 160-bit prime (fewer scanned
// bits), compared with 512-bit integer arithmetic; latency nbits+1 clocks.
module tb_mod_mul;
  localparam int W = 256;
  logic clk = 1'b0, rst_n, start, busy, done;
  logic [W-1:0] a, b, p, z;
  logic [8:0] nbits;
  int checks = 0, failures = 0;

  mod_mul dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic one(input logic [W-1:0] m, input int nb);
    logic [511:0] ref_z;
    int cyc = 0;
    @(posedge clk);
    a <= rnd() % m; b <= rnd() % m; p <= m; nbits <= 9'(nb); start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) begin @(posedge clk); cyc++; end
    ref_z = ({256'b0, a} * {256'b0, b}) % {256'b0, m};
    checks += 2;
    if (z !== ref_z[W-1:0]) begin failures++; $display("FAIL %h * %h mod %h = %h", a, b, m, z); end
    if (cyc != nb + 1) begin failures++; $display("FAIL latency %0d for %0d bits", cyc, nb); end
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; a = '0; b = '0; p = '1; nbits = 9'd256;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 8; i++) one(256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff, 256);
    for (int i = 0; i < 8; i++) one(rnd() | {1'b1, 255'b1}, 256);
    for (int i = 0; i < 8; i++) one(256'hffffffffffffffffffffffffffffffff7fffffff, 160);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
