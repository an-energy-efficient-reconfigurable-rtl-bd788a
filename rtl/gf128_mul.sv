// GF(2^128) multiplier of the GCM hash (NIST SP 800-38D, algorithm 1).
//
// Digit-serial: each clock consumes DIGIT bits of operand `b`, most
// significant (GCM bit 0) first, so a product takes 128/DIGIT cycles. The
// bit-reflected reduction polynomial R = 0xE1 || 0^120 of the standard is
// applied as V is shifted right.
//
// Interface and timing: `a`, `b` are sampled when `start` is high; `done`
// pulses and `p` holds a*b (128/DIGIT) clock edges later. The digit size is
// this design's choice; the paper does not describe its GHASH datapath.
module gf128_mul #(
  parameter int unsigned DIGIT = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] a,
  input  logic [127:0] b,
  output logic         done,
  output logic [127:0] p
);
  localparam int unsigned STEPS = 128 / DIGIT;
  localparam logic [127:0] R = {8'he1, 120'h0};

  logic [127:0] z, v, y;
  logic [$clog2(STEPS+1)-1:0] cnt;
  logic running;
  logic [127:0] z_n, v_n;

  always_comb begin
    z_n = z;
    v_n = v;
    for (int i = 0; i < DIGIT; i++) begin
      if (y[127 - i]) z_n ^= v_n;
      v_n = v_n[0] ? ((v_n >> 1) ^ R) : (v_n >> 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z <= '0; v <= '0; y <= '0; cnt <= '0; running <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        z <= '0; v <= a; y <= b; cnt <= '0; running <= 1'b1;
      end else if (running) begin
        z   <= z_n;
        v   <= v_n;
        y   <= y << DIGIT;
        cnt <= cnt + 1'b1;
        if (32'(cnt) == STEPS - 1) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign p = z;

  initial assert (128 % DIGIT == 0) else $error("DIGIT must divide 128");

endmodule
