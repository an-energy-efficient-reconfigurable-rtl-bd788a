// 64 KB data memory of the processor, as a bus slave.
//
// WORDS x 32-bit words with byte enables. Every request is granted at once;
// a read returns its word with `rvalid` on the next clock. Written as an
// array with a registered read, the behaviour of the SRAM macro it stands
// for. The size is the paper's; the bus is this design's (dtls_pkg).
//
// Lint note: only the word-address bits of the request are decoded here.
module data_mem
  import dtls_pkg::*;
#(
  parameter int unsigned WORDS = 16384
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t bus_req,
  output bus_rsp_t bus_rsp
);
  logic [31:0] mem [WORDS];
  logic [31:0] rdata;
  logic        rvalid;
  logic [$clog2(WORDS)-1:0] waddr;
  assign waddr = bus_req.addr[$clog2(WORDS)+1:2];

  always_ff @(posedge clk) begin
    if (bus_req.req) begin
      if (bus_req.we) begin
        for (int b = 0; b < 4; b++)
          if (bus_req.be[b]) mem[waddr][8*b +: 8] <= bus_req.wdata[8*b +: 8];
      end else begin
        rdata <= mem[waddr];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= bus_req.req && !bus_req.we;

  assign bus_rsp.gnt    = bus_req.req;
  assign bus_rsp.rvalid = rvalid;
  assign bus_rsp.rdata  = rdata;

endmodule
