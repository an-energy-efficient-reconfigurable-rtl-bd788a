// Interleaved-reduction modular multiplier: z = a * b mod p for any odd or
// even modulus p < 2^W, with no special form required of p.
//
// The product is built most significant bit of `b` first. Each clock doubles
// the partial result (the "<<1" path of the paper's Fig. 3) and reduces it,
// then adds `a` if the current bit of `b` is set and reduces again (the
// "+/- mod p" adder), so the partial result z never leaves [0, p). Only the
// lowest `nbits` bits of `b` are scanned: a 160-bit prime takes 160 cycles,
// not 256, which is how this design gates the unused upper datapath.
//
// Interface and timing: `a`, `b` are sampled on the edge where `start` is
// high (both must be below p); `p` and `nbits` must stay stable while `busy`.
// `done` pulses and `z` is valid `nbits`+1 clock edges after that edge.
// The algorithm and the 256-bit width follow the paper; the handshake is this
// design's own.
//
// Lint note: the top bit of the reduced sum is zero by construction and
// is not read.
module mod_mul #(
  parameter int unsigned W = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [W-1:0]         a,
  input  logic [W-1:0]         b,
  input  logic [W-1:0]         p,
  input  logic [$clog2(W):0]   nbits,
  output logic                 busy,
  output logic                 done,
  output logic [W-1:0]         z
);
  logic [W-1:0] ra, rb;
  logic [$clog2(W):0] idx;
  logic running;
  logic [W:0] dbl, dbl_r, sum, sum_r;

  always_comb begin
    dbl   = {z, 1'b0};
    dbl_r = (dbl >= {1'b0, p}) ? dbl - {1'b0, p} : dbl;
    sum   = dbl_r + (rb[idx[$clog2(W)-1:0]] ? {1'b0, ra} : '0);
    sum_r = (sum >= {1'b0, p}) ? sum - {1'b0, p} : sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ra <= '0; rb <= '0; z <= '0; idx <= '0; running <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        ra <= a; rb <= b; z <= '0;
        idx <= nbits - 1'b1;
        running <= 1'b1;
      end else if (running) begin
        z <= sum_r[W-1:0];
        idx <= idx - 1'b1;
        if (idx == '0) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign busy = running;

endmodule
