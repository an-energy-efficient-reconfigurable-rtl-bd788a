// Self-checking testbench for clock_div: counts crypto_clk rising edges
// against CLK edges for divide ratios 1, 2, 3 and 5, checks that every
// crypto_clk edge coincides with a tick cycle, that the output stops while
// the gate is off, and that no edge appears between CLK edges.
module tb_clock_div;
  logic clk = 1'b0, rst_n, en;
  logic [3:0] div_cfg;
  logic tick, crypto_clk;
  int checks = 0, failures = 0;
  int n_clk = 0, n_cc = 0, bad = 0;

  clock_div dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) n_clk++;
  always @(posedge crypto_clk) begin
    n_cc++;
    if ($time % 10 != 5) bad++;         // must be at a CLK rising edge (t = 5 mod 10)
    if (!tick) bad++;                   // tick of the cycle that just ended
  end

  task automatic measure(input logic e, input int cfg, input int expect_per_60);
    @(posedge clk);
    en <= e; div_cfg <= 4'(cfg);
    repeat (12) @(posedge clk);         // let the new ratio settle
    #1;
    n_cc = 0;
    repeat (60) @(posedge clk);
    #1;
    checks++;
    if (n_cc != expect_per_60) begin
      failures++; $display("FAIL cfg %0d en %0b: %0d edges in 60 clocks, exp %0d", cfg, e, n_cc, expect_per_60);
    end
  endtask

  initial begin
    rst_n = 1'b0; en = 1'b1; div_cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    measure(1'b1, 0, 60);
    measure(1'b1, 1, 30);
    measure(1'b1, 2, 20);
    measure(1'b1, 4, 12);
    measure(1'b0, 1, 0);
    measure(1'b1, 5, 10);
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d misplaced crypto_clk edges", bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
