// Self-checking testbench for mod_inv: random quotients x/y modulo the
// P-256 prime and the secp160r1 prime, checked by q*y = x (mod p) with
// 512-bit integer arithmetic; the inverse of 1 and of p-1; division by zero
// flagged; the step count bounded by 4*log2(p)+2.
module tb_mod_inv;
  localparam int W = 256;
  logic clk = 1'b0, rst_n, start, busy, done, err;
  logic [W-1:0] x, y, p, q;
  int checks = 0, failures = 0;

  mod_inv dut (.*);
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

  task automatic one(input logic [W-1:0] xx, input logic [W-1:0] yy, input logic [W-1:0] m, input int nb);
    logic [511:0] prod;
    int cyc = 0;
    @(posedge clk);
    x <= xx; y <= yy; p <= m; start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) begin @(posedge clk); cyc++; end
    prod = ({256'b0, q} * {256'b0, yy}) % {256'b0, m};
    checks += 3;
    if (prod[W-1:0] !== xx) begin failures++; $display("FAIL %h / %h -> %h", xx, yy, q); end
    if (err) begin failures++; $display("FAIL err set"); end
    if (cyc > 4 * nb + 2) begin failures++; $display("FAIL %0d steps", cyc); end
  endtask

  localparam logic [W-1:0] P256 = 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff;
  localparam logic [W-1:0] P160 = 256'hffffffffffffffffffffffffffffffff7fffffff;

  initial begin
    rst_n = 1'b0; start = 1'b0; x = '0; y = '0; p = P256;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 8; i++) one(rnd() % P256, (rnd() % (P256 - 1)) + 1, P256, 256);
    for (int i = 0; i < 8; i++) one(rnd() % P160, (rnd() % (P160 - 1)) + 1, P160, 160);
    one(1, 1, P256, 256);
    one(1, P256 - 1, P256, 256);
    one(5, 2, P256, 256);
    // division by zero
    @(posedge clk);
    x <= 1; y <= 0; p <= P256; start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    checks++;
    if (!err) begin failures++; $display("FAIL zero divisor not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
