// Self-checking testbench for icache with a refill model standing in for
// the SD controller (memory word at byte address a holds a*3+1, delivered
// with a gap of 2 cycles between words). Checks: fetched words are right,
// the first fetch of a line misses and later ones hit, a conflicting line
// (same index, other tag) evicts, flush forces misses, and a hit returns in
// one cycle.
module tb_icache;
  logic clk = 1'b0, rst_n, flush;
  logic if_req, if_ready, if_valid;
  logic [31:0] if_addr, if_instr;
  logic rf_req, rf_valid;
  logic [31:0] rf_addr, rf_data, n_hit, n_miss;
  int checks = 0, failures = 0;

  icache dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // refill model
  int rf_i, rf_gap;
  always_ff @(posedge clk) begin
    rf_valid <= 1'b0;
    if (!rf_req) begin rf_i <= 0; rf_gap <= 0; end
    else if (rf_gap < 2) rf_gap <= rf_gap + 1;
    else if (!rf_valid && rf_i < 4) begin
      rf_valid <= 1'b1;
      rf_data  <= (rf_addr + 32'(4 * rf_i)) * 3 + 1;
      rf_i     <= rf_i + 1;
      rf_gap   <= 0;
    end
  end

  task automatic fetch(input logic [31:0] a, output int cyc);
    @(posedge clk);
    if_req <= 1'b1; if_addr <= a;
    @(posedge clk);                     // accepted: the cache was idle
    #1;
    if_req <= 1'b0;
    cyc = 1;
    while (!if_valid) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (if_instr !== a * 3 + 1) begin failures++; $display("FAIL fetch %h: %h", a, if_instr); end
  endtask

  int cyc;
  logic [31:0] h0, m0;
  initial begin
    rst_n = 1'b0; flush = 1'b0; if_req = 1'b0; if_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 16; i++) fetch(32'h100 + 4 * i, cyc);        // 4 lines
    checks++;
    if (n_miss != 4) begin failures++; $display("FAIL %0d misses for 4 lines", n_miss); end
    m0 = n_miss;
    for (int i = 0; i < 16; i++) begin
      fetch(32'h100 + 4 * i, cyc);
      checks++;
      if (cyc != 1) begin failures++; $display("FAIL hit took %0d", cyc); end
    end
    checks++;
    if (n_miss != m0) begin failures++; $display("FAIL misses on a warm cache"); end
    // conflicting line: +16 KB has the same index
    fetch(32'h100 + 32'h4000, cyc);
    fetch(32'h100, cyc);
    checks++;
    if (n_miss != m0 + 2) begin failures++; $display("FAIL conflict did not evict"); end
    // flush
    @(posedge clk); flush <= 1'b1;
    @(posedge clk); flush <= 1'b0;
    fetch(32'h104, cyc);
    checks++;
    if (n_miss != m0 + 3) begin failures++; $display("FAIL flush ignored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
