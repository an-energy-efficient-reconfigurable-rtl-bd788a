// UART, 8 data bits, no parity, one stop bit, as a bus slave.
//
// One bit lasts DIV+1 clocks (DIV register). Transmit: writing DATA while the
// transmitter is idle sends the byte, LSB first, after a start bit. Receive:
// a falling edge on the synchronised rx line starts a frame; each bit is
// sampled in its middle, and a good stop bit latches the byte into DATA and
// sets RX_VALID, which a read of DATA clears.
// Registers (byte offsets): 0x0 DATA (W: send, R: received byte),
// 0x4 STATUS ([0] tx busy, [1] rx valid), 0x8 DIV. Requests are granted at
// once; reads return on the next clock. The paper only names the UART; all of
// this is this design's.
//
// Lint note: the byte-offset bits addr[1:0] and the upper address bits of
// the request are not decoded here (word registers, decoded by mmio).
module uart
  import dtls_pkg::*;
#(
  parameter logic [15:0] DIV_RESET = 16'd138   // 115200 baud at 16 MHz
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t bus_req,
  output bus_rsp_t bus_rsp,
  input  logic     rx,
  output logic     tx
);
  logic [15:0] div;
  logic [31:0] rdata;
  logic        rvalid;

  // transmitter
  logic [9:0]  tx_sh;
  logic [3:0]  tx_bits;
  logic [15:0] tx_cnt;
  logic        tx_busy;
  // receiver
  logic        rx_s1, rx_s2;
  logic [7:0]  rx_sh, rx_data;
  logic [3:0]  rx_bits;
  logic [15:0] rx_cnt;
  logic        rx_busy, rx_valid;

  logic wr_data, rd_data;
  assign wr_data = bus_req.req && bus_req.we && bus_req.addr[3:2] == 2'd0;
  assign rd_data = bus_req.req && !bus_req.we && bus_req.addr[3:2] == 2'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= DIV_RESET; rdata <= '0; rvalid <= 1'b0;
      tx_sh <= '1; tx_bits <= '0; tx_cnt <= '0; tx_busy <= 1'b0;
      rx_s1 <= 1'b1; rx_s2 <= 1'b1; rx_sh <= '0; rx_data <= '0; rx_bits <= '0;
      rx_cnt <= '0; rx_busy <= 1'b0; rx_valid <= 1'b0;
    end else begin
      // bus
      rvalid <= bus_req.req && !bus_req.we;
      if (bus_req.req && bus_req.we && bus_req.addr[3:2] == 2'd2) div <= bus_req.wdata[15:0];
      if (bus_req.req && !bus_req.we) begin
        unique case (bus_req.addr[3:2])
          2'd0: rdata <= {24'b0, rx_data};
          2'd1: rdata <= {30'b0, rx_valid, tx_busy};
          2'd2: rdata <= {16'b0, div};
          default: rdata <= '0;
        endcase
      end
      // transmit
      if (!tx_busy) begin
        if (wr_data) begin
          tx_sh <= {1'b1, bus_req.wdata[7:0], 1'b0};
          tx_bits <= 4'd10; tx_cnt <= '0; tx_busy <= 1'b1;
        end
      end else if (tx_cnt == div) begin
        tx_cnt <= '0;
        tx_sh  <= {1'b1, tx_sh[9:1]};
        tx_bits <= tx_bits - 1'b1;
        if (tx_bits == 4'd1) tx_busy <= 1'b0;
      end else begin
        tx_cnt <= tx_cnt + 1'b1;
      end
      // receive
      rx_s1 <= rx;
      rx_s2 <= rx_s1;
      if (rd_data) rx_valid <= 1'b0;
      if (!rx_busy) begin
        if (!rx_s2) begin
          rx_busy <= 1'b1; rx_cnt <= '0; rx_bits <= '0;
        end
      end else if (rx_cnt == (rx_bits == 4'd0 ? div >> 1 : div)) begin
        rx_cnt  <= '0;
        rx_bits <= rx_bits + 1'b1;
        if (rx_bits == 4'd0) begin
          if (rx_s2) rx_busy <= 1'b0;          // false start bit
        end else if (rx_bits <= 4'd8) begin
          rx_sh <= {rx_s2, rx_sh[7:1]};
        end else begin
          rx_busy <= 1'b0;
          if (rx_s2) begin rx_data <= rx_sh; rx_valid <= 1'b1; end
        end
      end else begin
        rx_cnt <= rx_cnt + 1'b1;
      end
    end
  end

  assign tx = tx_busy ? tx_sh[0] : 1'b1;

  assign bus_rsp.gnt    = bus_req.req;
  assign bus_rsp.rvalid = rvalid;
  assign bus_rsp.rdata  = rdata;

endmodule
