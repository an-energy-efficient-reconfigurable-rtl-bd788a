// Self-checking testbench for comb_cache: fills all 64 entries with
// distinct 512-bit patterns, reads them back in a shuffled order with the
// one-cycle read latency, and checks that a write does not disturb rdata.
module tb_comb_cache;
  logic clk = 1'b0, en, we;
  logic [5:0] addr;
  logic [511:0] wdata, rdata;
  int checks = 0, failures = 0;

  comb_cache dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [511:0] pat(input int i);
    return {16{32'(i) * 32'h9e3779b9 ^ 32'h5a5a0000}};
  endfunction

  initial begin
    en = 1'b0; we = 1'b0; addr = '0; wdata = '0;
    @(posedge clk);
    for (int i = 0; i < 64; i++) begin
      en <= 1'b1; we <= 1'b1; addr <= 6'(i); wdata <= pat(i);
      @(posedge clk);
    end
    for (int i = 0; i < 64; i++) begin
      automatic int j = (i * 37) % 64;
      en <= 1'b1; we <= 1'b0; addr <= 6'(j);
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== pat(j)) begin failures++; $display("FAIL entry %0d", j); end
    end
    // a write keeps the last read data
    en <= 1'b1; we <= 1'b1; addr <= 6'd3; wdata <= '0;
    @(posedge clk);
    #1;
    checks++;
    if (rdata !== pat((63 * 37) % 64)) begin failures++; $display("FAIL rdata changed on write %h", rdata[31:0]); end
    en <= 1'b1; we <= 1'b0; addr <= 6'd3;
    @(posedge clk);
    #1;
    checks++;
    if (rdata !== '0) begin failures++; $display("FAIL rewrite"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
