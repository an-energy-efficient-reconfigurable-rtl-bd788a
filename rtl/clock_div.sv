// Software-controlled clock divider for the DTLS engine.
//
// CRYPTO_CLK runs at CLK/(div_cfg+1) while `en` (the GATE bit of the system
// control register) is high, and is stopped while it is low. It is made by
// removing clock pulses: a counter in the CLK domain raises `tick` in one
// cycle out of div_cfg+1, and a clock gate passes the CLK pulse that ends
// that cycle. Every
// crypto_clk rising edge therefore coincides with a CLK rising edge, which
// lets the bus cross into the engine without synchronisers (see
// dtls_engine). The duty cycle of the divided clock is that of one CLK pulse.
//
// Interface and timing: `tick` is high in the CLK cycle that ends with a
// crypto_clk edge. A new div_cfg applies from the next tick. The paper gives
// the divider and its DIV_CFG input; the pulse-removal scheme and the 4-bit
// width are this design's choice.
//
// Lint note: the one latch that synthesis reports here is the enable latch
// inside the clock_gate instance, and is intended.
module clock_div #(
  parameter int unsigned CFG_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [CFG_W-1:0] div_cfg,
  output logic             tick,
  output logic             crypto_clk
);
  logic [CFG_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              cnt <= '0;
    else if (!en || tick)    cnt <= '0;
    else                     cnt <= cnt + 1'b1;
  end

  assign tick = en && (cnt >= div_cfg);

  clock_gate u_cg (.clk, .en(tick), .gclk(crypto_clk));

endmodule
