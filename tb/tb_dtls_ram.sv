// Self-checking testbench for dtls_ram: writes every word of the 2 KB with a
// pattern, reads it back against a model array, and checks byte enables.
module tb_dtls_ram;
  logic clk = 1'b0, en, we;
  logic [3:0] be;
  logic [8:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [512];
  int checks = 0, failures = 0;

  dtls_ram dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1'b0; we = 1'b0; be = 4'hf; addr = '0; wdata = '0;
    @(posedge clk);
    for (int i = 0; i < 512; i++) begin
      model[i] = $urandom;
      en <= 1'b1; we <= 1'b1; be <= 4'hf; addr <= 9'(i); wdata <= model[i];
      @(posedge clk);
    end
    // byte writes on a few words
    for (int i = 0; i < 32; i++) begin
      automatic logic [3:0] b = 4'($urandom);
      automatic logic [31:0] d = $urandom;
      automatic int a = $urandom_range(511);
      en <= 1'b1; we <= 1'b1; be <= b; addr <= 9'(a); wdata <= d;
      for (int k = 0; k < 4; k++) if (b[k]) model[a][8*k +: 8] = d[8*k +: 8];
      @(posedge clk);
    end
    for (int i = 0; i < 512; i++) begin
      en <= 1'b1; we <= 1'b0; addr <= 9'(i);
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== model[i]) begin failures++; $display("FAIL word %0d: %h exp %h", i, rdata, model[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
