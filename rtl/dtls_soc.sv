// Top level of the DTLS SoC: everything around the RISC-V core.
//
// The processor (a 3-stage RV32I core) and the SD card controller are not
// part of this RTL; their connections are ports. Inside are the 16 KB
// instruction cache, the memory-mapped interface with the system control
// register, the 64 KB data memory, the DTLS engine with its accelerators, the
// clock divider that makes the engine clock, the sleep-mode clock gate of the
// core, and the GPIO, UART and SPI peripherals.
//
// Clocks: everything but the engine runs on `clk`. The core must be clocked
// by `core_clk`, which stops while the core sleeps after WFI and restarts on
// the engine interrupt `irq`. The engine runs on CLK divided by DIV_CFG+1 of
// the system control register, and stops while its GATE bit is 0.
//
// Ports: the core's data bus (`d_req`/`d_rsp`, dtls_pkg bus rules) and fetch
// port, `wfi` and `irq`, the refill port towards the SD controller, and the
// peripheral pins. `ecc_*_count`, `ic_*` and `sleeping` are observation
// outputs.
module dtls_soc
  import dtls_pkg::*;
#(
  parameter int unsigned DMEM_WORDS   = 16384,  // 64 KB
  parameter int unsigned ICACHE_BYTES = 16384,  // 16 KB
  parameter int unsigned GPIO_N       = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // core data bus
  input  bus_req_t    d_req,
  output bus_rsp_t    d_rsp,
  // core fetch port
  input  logic        if_req,
  input  logic [31:0] if_addr,
  output logic        if_ready,
  output logic        if_valid,
  output logic [31:0] if_instr,
  input  logic        ic_flush,
  // sleep and interrupt
  input  logic        wfi,
  output logic        irq,
  output logic        core_clk,
  output logic        sleeping,
  // refill port to the SD controller
  output logic        rf_req,
  output logic [31:0] rf_addr,
  input  logic        rf_valid,
  input  logic [31:0] rf_data,
  // peripherals
  input  logic [GPIO_N-1:0] gpio_in,
  output logic [GPIO_N-1:0] gpio_out,
  output logic [GPIO_N-1:0] gpio_oe,
  input  logic        uart_rx,
  output logic        uart_tx,
  output logic        spi_sclk,
  output logic        spi_mosi,
  input  logic        spi_miso,
  output logic        spi_cs_n,
  // observation
  output logic        de_busy,
  output logic        crypto_clk,
  output logic [31:0] ecc_dbl_count,
  output logic [31:0] ecc_add_count,
  output logic [31:0] ic_hits,
  output logic [31:0] ic_misses
);
  localparam int unsigned NSLV = 5;
  bus_req_t s_req [NSLV];
  bus_rsp_t s_rsp [NSLV];
  logic       gate;
  logic [3:0] div_cfg;
  logic       crypto_tick;

  mmio #(.NSLV(NSLV)) u_mmio (
    .clk, .rst_n, .m_req(d_req), .m_rsp(d_rsp), .s_req, .s_rsp, .gate, .div_cfg
  );

  data_mem #(.WORDS(DMEM_WORDS)) u_dmem (
    .clk, .rst_n, .bus_req(s_req[0]), .bus_rsp(s_rsp[0])
  );

  clock_div u_div (
    .clk, .rst_n, .en(gate), .div_cfg, .tick(crypto_tick), .crypto_clk
  );

  dtls_engine u_de (
    .clk, .crypto_clk, .crypto_tick, .rst_n,
    .bus_req(s_req[1]), .bus_rsp(s_rsp[1]), .irq, .busy(de_busy),
    .ecc_dbl_count, .ecc_add_count
  );

  gpio #(.N(GPIO_N)) u_gpio (
    .clk, .rst_n, .bus_req(s_req[2]), .bus_rsp(s_rsp[2]),
    .pin_in(gpio_in), .pin_out(gpio_out), .pin_oe(gpio_oe)
  );

  uart u_uart (
    .clk, .rst_n, .bus_req(s_req[3]), .bus_rsp(s_rsp[3]), .rx(uart_rx), .tx(uart_tx)
  );

  spi u_spi (
    .clk, .rst_n, .bus_req(s_req[4]), .bus_rsp(s_rsp[4]),
    .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso), .cs_n(spi_cs_n)
  );

  core_clock_ctrl u_sleep (
    .clk, .rst_n, .wfi, .irq, .sleeping, .core_clk
  );

  icache #(.SIZE_BYTES(ICACHE_BYTES)) u_icache (
    .clk(core_clk), .rst_n, .flush(ic_flush),
    .if_req, .if_addr, .if_ready, .if_valid, .if_instr,
    .rf_req, .rf_addr, .rf_valid, .rf_data,
    .n_hit(ic_hits), .n_miss(ic_misses)
  );

endmodule
