// Comb point cache: single-port memory of pre-computed comb points.
//
// DEPTH entries of one affine point each, {x, y} = 2*W bits. With the
// defaults (64 entries x 512 bits) this is the 4 KB of the paper. The ECC core
// addresses it as {slot, u}: a slot holds the 2^(COMB_W-1) = 8 comb points of
// one base point (generator or cached public key), u selects the point.
// Written as an array with a registered read, as an SRAM macro behaves:
// `rdata` shows the entry addressed in the previous cycle. A write and a read
// to the same cycle are not both possible (single port); `we` wins.
module comb_cache #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [2*W-1:0]           wdata,
  output logic [2*W-1:0]           rdata
);
  logic [2*W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
