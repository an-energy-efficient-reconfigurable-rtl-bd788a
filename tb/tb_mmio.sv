// Self-checking testbench for mmio with five slave models that each hold
// one register and may withhold their grant: writes and reads reach the
// slave of the address map, read data comes back from the slave that was
// granted, a withheld grant stalls the master, the system control register
// resets to GATE = 1, DIV_CFG = 0 and drives gate/div_cfg, and unmapped
// addresses read as zero.
module tb_mmio;
  import dtls_pkg::*;
  logic clk = 1'b0, rst_n;
  bus_req_t m_req;
  bus_rsp_t m_rsp;
  bus_req_t s_req [5];
  bus_rsp_t s_rsp [5];
  logic gate;
  logic [3:0] div_cfg;
  int checks = 0, failures = 0;

  mmio dut (.*);
  always #5 clk = ~clk;

  // slave models: register value 'hA0+i at reset, grant withheld if stall[i]
  logic [31:0] sreg [5];
  logic [4:0]  stall;
  int          nwr [5];
  for (genvar g = 0; g < 5; g++) begin : g_slv
    logic rv;
    logic [31:0] rd;
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin sreg[g] <= 32'ha0 + g; rv <= 1'b0; rd <= '0; end
      else begin
        rv <= s_req[g].req && !stall[g] && !s_req[g].we;
        if (s_req[g].req && !stall[g]) begin
          if (s_req[g].we) begin sreg[g] <= s_req[g].wdata; nwr[g]++; end
          else rd <= sreg[g] ^ s_req[g].addr;
        end
      end
    assign s_rsp[g] = '{gnt: s_req[g].req && !stall[g], rvalid: rv, rdata: rd};
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input logic we, input logic [31:0] a, input logic [31:0] wd,
                        output logic [31:0] rd, output int wait_cycles);
    wait_cycles = 0;
    @(posedge clk);
    m_req <= '{req: 1'b1, we: we, addr: a, wdata: wd, be: 4'hf};
    #1;
    while (!m_rsp.gnt) begin @(posedge clk); #1; wait_cycles++; end
    @(posedge clk);
    m_req.req <= 1'b0;
    #1;
    if (!we) begin
      while (!m_rsp.rvalid) begin @(posedge clk); #1; end
      rd = m_rsp.rdata;
    end
  endtask
  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  localparam logic [31:0] BASE [5] = '{32'h0000_0100, 32'h1000_0010, 32'h3000_0004, 32'h3000_1008, 32'h3000_200c};
  logic [31:0] d;
  int w;
  initial begin
    rst_n = 1'b0; m_req = '0; stall = '0;
    for (int i = 0; i < 5; i++) nwr[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    chk("gate reset", {31'b0, gate}, 1);
    chk("div reset", {28'b0, div_cfg}, 0);
    for (int i = 0; i < 5; i++) begin
      access(1'b0, BASE[i], 0, d, w);
      chk("read reset value", d, (32'ha0 + i) ^ BASE[i]);
      access(1'b1, BASE[i], 32'h1234_0000 + i, d, w);
      chk("one write", 32'(nwr[i]), 1);
    end
    for (int i = 0; i < 5; i++) begin
      access(1'b0, BASE[i], 0, d, w);
      chk("read back", d, (32'h1234_0000 + i) ^ BASE[i]);
    end
    // stall slave 1 for a while
    stall[1] = 1'b1;
    fork
      begin repeat (7) @(posedge clk); stall[1] = 1'b0; end
      access(1'b0, BASE[1], 0, d, w);
    join
    checks++;
    if (w < 5) begin failures++; $display("FAIL stall not seen (%0d)", w); end
    chk("read after stall", d, 32'h1234_0001 ^ BASE[1]);
    // system control register
    access(1'b1, 32'h2000_0000, 32'h0000_00a0, d, w);
    #1;
    chk("gate off", {31'b0, gate}, 0);
    chk("div cfg", {28'b0, div_cfg}, 4'ha);
    access(1'b0, 32'h2000_0000, 0, d, w);
    chk("sysctl read", d, 32'h0000_00a0);
    access(1'b0, 32'h7000_0000, 0, d, w);
    chk("unmapped", d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
