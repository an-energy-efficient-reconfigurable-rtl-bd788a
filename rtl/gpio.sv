// General-purpose I/O port, a bus slave with N pins.
//
// Registers (byte offsets): 0x0 OUT (RW), 0x4 OE, output enable per pin
// (RW), 0x8 IN (R), the pin inputs after a two-flop synchroniser. Requests
// are granted at once; reads return on the next clock. The paper only names
// the GPIO block; the register set is this design's.
//
// Lint note: the byte-offset bits addr[1:0] and the upper address bits of
// the request are not decoded here (word registers, decoded by mmio).
module gpio
  import dtls_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  bus_req_t     bus_req,
  output bus_rsp_t     bus_rsp,
  input  logic [N-1:0] pin_in,
  output logic [N-1:0] pin_out,
  output logic [N-1:0] pin_oe
);
  logic [N-1:0] sync1, sync2;
  logic [31:0]  rdata;
  logic         rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pin_out <= '0; pin_oe <= '0; sync1 <= '0; sync2 <= '0; rdata <= '0; rvalid <= 1'b0;
    end else begin
      sync1  <= pin_in;
      sync2  <= sync1;
      rvalid <= bus_req.req && !bus_req.we;
      if (bus_req.req) begin
        if (bus_req.we) begin
          unique case (bus_req.addr[3:2])
            2'd0: pin_out <= bus_req.wdata[N-1:0];
            2'd1: pin_oe  <= bus_req.wdata[N-1:0];
            default: ;
          endcase
        end else begin
          unique case (bus_req.addr[3:2])
            2'd0: rdata <= 32'(pin_out);
            2'd1: rdata <= 32'(pin_oe);
            2'd2: rdata <= 32'(sync2);
            default: rdata <= '0;
          endcase
        end
      end
    end
  end

  assign bus_rsp.gnt    = bus_req.req;
  assign bus_rsp.rvalid = rvalid;
  assign bus_rsp.rdata  = rdata;

endmodule
