// Self-checking testbench for core_clock_ctrl: the core clock runs, stops
// after WFI (no core_clk edge while asleep), restarts when irq rises, and WFI
// with a pending interrupt does not stop it.
module tb_core_clock_ctrl;
  logic clk = 1'b0, rst_n, wfi, irq, sleeping, core_clk;
  int checks = 0, failures = 0;
  int n_core = 0;

  core_clock_ctrl dut (.*);
  always #5 clk = ~clk;
  always @(posedge core_clk) n_core++;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_edges(input string what, input int cycles, input int lo, input int hi);
    int start_n = n_core;
    repeat (cycles) @(posedge clk);
    #1;
    checks++;
    if (n_core - start_n < lo || n_core - start_n > hi) begin
      failures++; $display("FAIL %s: %0d core edges in %0d clocks", what, n_core - start_n, cycles);
    end
  endtask

  initial begin
    rst_n = 1'b0; wfi = 1'b0; irq = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    expect_edges("awake", 20, 19, 21);
    @(posedge clk); wfi <= 1'b1;
    @(posedge clk); wfi <= 1'b0;
    expect_edges("asleep", 30, 0, 1);
    checks++;
    if (!sleeping) begin failures++; $display("FAIL not sleeping"); end
    @(posedge clk); irq <= 1'b1;
    @(posedge clk); irq <= 1'b0;
    expect_edges("woken", 20, 19, 21);
    checks++;
    if (sleeping) begin failures++; $display("FAIL still sleeping"); end
    // WFI while the interrupt is pending
    @(posedge clk); irq <= 1'b1; wfi <= 1'b1;
    @(posedge clk); wfi <= 1'b0;
    expect_edges("pending irq", 20, 19, 21);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
