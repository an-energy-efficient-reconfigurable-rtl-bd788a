// Glitch-free clock gate: the enable is captured by a latch that is open
// while the clock is low, and the clock passes only while that latched value
// is high, so the gated clock can only start or stop at a rising edge and
// never carries a short pulse. This is the standard integrated clock gate; a
// real chip uses the library's ICG cell here. The latch it infers is
// intended, and is the reason for the latch note the lint tools print.
module clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_l;
  always_latch
    if (!clk) en_l = en;
  assign gclk = clk & en_l;
endmodule
