// DTLS RAM: the 2 KB private memory of the DTLS engine.
//
// 512 words of 32 bits with byte write enables and one registered read port,
// the behaviour of a single-port SRAM macro. The paper splits it into a
// 1.25 KB micro stack for handshake temporaries, 0.45 KB of DTLS
// configuration and 0.3 KB of accelerator configuration (operands and results
// of the crypto accelerators); the region bounds are in dtls_pkg. The
// memory does not enforce them.
//
// Timing: on an edge with `en` high, a write stores the enabled bytes of
// `wdata`, a read loads `rdata` with the addressed word, visible after the
// edge. Contents are not reset.
module dtls_ram
  import dtls_pkg::*;
#(
  parameter int unsigned WORDS = RAM_WORDS
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [3:0]               be,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [31:0]              wdata,
  output logic [31:0]              rdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < 4; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
