// Memory-mapped interface: routes the processor's data bus to its slaves and
// holds the system control register.
//
// Address map (this design's; the paper does not give one), by addr[31:28]:
//   0x0  data memory (64 KB)        0x1  DTLS engine (4 KB window)
//   0x2  system control register    0x3  peripherals: addr[13:12] selects
//                                         0 GPIO, 1 UART, 2 SPI
// The system control register (offset 0) holds GATE in bit 0, which enables
// the engine clock, and DIV_CFG in bits [7:4], the engine clock divide ratio
// minus one; it resets to GATE = 1, DIV_CFG = 0.
//
// Timing: a request goes to the decoded slave in the same cycle and its
// grant comes back combinationally; the slave that granted a read is
// remembered so that its `rvalid` and data are returned on the next cycle(s).
// One read may be outstanding; the master must wait for `rvalid` before the
// next read.
//
// Lint note: the bus-hold assertion is disabled during reset with
// `disable iff (!rst_n)`, so the asynchronous reset is also read in a
// clocked expression; this is intended and adds no logic.
module mmio
  import dtls_pkg::*;
#(
  parameter int unsigned NSLV = 5   // dmem, de, gpio, uart, spi
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req,
  output bus_rsp_t m_rsp,
  output bus_req_t s_req [NSLV],
  input  bus_rsp_t s_rsp [NSLV],
  output logic       gate,
  output logic [3:0] div_cfg
);
  typedef enum logic [2:0] {SEL_DMEM, SEL_DE, SEL_GPIO, SEL_UART, SEL_SPI, SEL_SYS, SEL_NONE} sel_e;
  sel_e sel, rsel;

  always_comb begin
    unique case (m_req.addr[31:28])
      4'h0: sel = SEL_DMEM;
      4'h1: sel = SEL_DE;
      4'h2: sel = SEL_SYS;
      4'h3: unique case (m_req.addr[13:12])
              2'd0: sel = SEL_GPIO;
              2'd1: sel = SEL_UART;
              2'd2: sel = SEL_SPI;
              default: sel = SEL_NONE;
            endcase
      default: sel = SEL_NONE;
    endcase
  end

  // system control register
  logic [31:0] sysctl, sys_rdata;
  logic        sys_rvalid, none_rvalid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sysctl <= 32'h1; sys_rdata <= '0; sys_rvalid <= 1'b0; none_rvalid <= 1'b0;
    end else begin
      sys_rvalid  <= m_req.req && !m_req.we && sel == SEL_SYS;
      none_rvalid <= m_req.req && !m_req.we && sel == SEL_NONE;
      if (m_req.req && sel == SEL_SYS) begin
        if (m_req.we) sysctl <= m_req.wdata & 32'h0000_00f1;
        else          sys_rdata <= sysctl;
      end
    end
  end
  assign gate    = sysctl[0];
  assign div_cfg = sysctl[7:4];

  always_comb begin
    for (int i = 0; i < NSLV; i++) begin
      s_req[i]     = m_req;
      s_req[i].req = m_req.req && (int'(sel) == i);
    end
  end

  // remember which slave owes read data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsel <= SEL_NONE;
    else if (m_req.req && !m_req.we && m_rsp.gnt) rsel <= sel;
  end

  always_comb begin
    m_rsp = '0;
    if (sel == SEL_SYS || sel == SEL_NONE) m_rsp.gnt = m_req.req;
    else                                   m_rsp.gnt = s_rsp[sel].gnt;
    if (sys_rvalid) begin
      m_rsp.rvalid = 1'b1; m_rsp.rdata = sys_rdata;
    end else if (none_rvalid) begin
      m_rsp.rvalid = 1'b1; m_rsp.rdata = '0;
    end else if (rsel != SEL_SYS && rsel != SEL_NONE) begin
      m_rsp.rvalid = s_rsp[rsel].rvalid;
      m_rsp.rdata  = s_rsp[rsel].rdata;
    end
  end

  // bus rule: a request is held, unchanged, until it is granted
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_req.req && !m_rsp.gnt |=> m_req.req && $stable(m_req.addr) && $stable(m_req.we));

endmodule
