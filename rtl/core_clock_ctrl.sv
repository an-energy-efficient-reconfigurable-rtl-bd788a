// Sleep-mode clock control of the RISC-V core.
//
// When the core executes WFI (`wfi` pulses or stays high), the `sleeping`
// flag is set and the core clock CORE_CLK is stopped by a clock gate. The
// interrupt of the DTLS engine clears the flag and re-opens the gate, so the
// core resumes on the next CLK edge. An interrupt that is already pending
// when WFI arrives keeps the core awake.
//
// Timing: `sleeping` is set on the CLK edge after `wfi` and CORE_CLK loses its
// next pulse; it is cleared on the CLK edge after `irq` rises. The mechanism
// (clock gating on WFI, wake-up by the DE interrupt) is the paper's; the flag
// register is this design's.
//
// Lint note: the one latch that synthesis reports here is the enable latch
// inside the clock_gate instance, and is intended.
module core_clock_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic wfi,
  input  logic irq,
  output logic sleeping,
  output logic core_clk
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   sleeping <= 1'b0;
    else if (irq) sleeping <= 1'b0;
    else if (wfi) sleeping <= 1'b1;
  end

  clock_gate u_cg (.clk, .en(!sleeping || irq), .gclk(core_clk));

endmodule
