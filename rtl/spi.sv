// SPI master, mode 0 (clock idles low, data sampled on the rising edge),
// one byte per transfer, MSB first, as a bus slave.
//
// Writing DATA while idle starts a transfer of 8 bits: MOSI changes on the
// falling SCLK edge (and before the first rising one), MISO is sampled on the
// rising edge. Each SCLK half-period lasts DIV+1 clocks. The chip select is a
// plain register bit, active low.
// Registers (byte offsets): 0x0 DATA (W: send, R: last byte received),
// 0x4 STATUS ([0] busy), 0x8 DIV, 0xC CS ([0] = cs_n). Requests are granted
// at once; reads return on the next clock. The paper only names the SPI
// block; all of this is this design's.
//
// Lint note: the byte-offset bits addr[1:0] and the upper address bits of
// the request are not decoded here (word registers, decoded by mmio).
module spi
  import dtls_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t bus_req,
  output bus_rsp_t bus_rsp,
  output logic     sclk,
  output logic     mosi,
  input  logic     miso,
  output logic     cs_n
);
  logic [15:0] div, cnt;
  logic [7:0]  sh, rx_sh, rx_byte;
  logic [3:0]  bits;
  logic        busy, rvalid;
  logic [31:0] rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= 16'd3; cnt <= '0; sh <= '0; rx_sh <= '0; rx_byte <= '0; bits <= '0; busy <= 1'b0;
      sclk <= 1'b0; cs_n <= 1'b1; rvalid <= 1'b0; rdata <= '0;
    end else begin
      rvalid <= bus_req.req && !bus_req.we;
      if (bus_req.req && bus_req.we) begin
        unique case (bus_req.addr[3:2])
          2'd2: div  <= bus_req.wdata[15:0];
          2'd3: cs_n <= bus_req.wdata[0];
          default: ;
        endcase
      end
      if (bus_req.req && !bus_req.we) begin
        unique case (bus_req.addr[3:2])
          2'd0: rdata <= {24'b0, rx_byte};
          2'd1: rdata <= {31'b0, busy};
          2'd2: rdata <= {16'b0, div};
          default: rdata <= {31'b0, cs_n};
        endcase
      end
      if (!busy) begin
        if (bus_req.req && bus_req.we && bus_req.addr[3:2] == 2'd0) begin
          sh <= bus_req.wdata[7:0]; bits <= 4'd8; cnt <= '0; busy <= 1'b1; sclk <= 1'b0;
        end
      end else if (cnt == div) begin
        cnt <= '0;
        if (!sclk) begin
          sclk <= 1'b1;
          rx_sh <= {rx_sh[6:0], miso};   // sample on the rising edge
        end else begin
          sclk <= 1'b0;
          sh   <= {sh[6:0], 1'b0};       // next bit on the falling edge
          bits <= bits - 1'b1;
          if (bits == 4'd1) begin busy <= 1'b0; rx_byte <= rx_sh; end
        end
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  assign mosi = sh[7];

  assign bus_rsp.gnt    = bus_req.req;
  assign bus_rsp.rvalid = rvalid;
  assign bus_rsp.rdata  = rdata;

endmodule
