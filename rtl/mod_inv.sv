// Modular divider/inverter by the binary extended Euclidean algorithm:
// q = x / y mod p for an odd modulus p (x = 1 gives the inverse of y).
//
// Registers u, v hold the Euclid pair (start: u = y, v = p) and x1, x2 their
// coefficients (start: x1 = x, x2 = 0), with the invariant x1*y = x*u and
// x2*y = x*v (mod p). Each clock does one step: halve an even u (or v) and
// its coefficient modulo p, or subtract the smaller of u, v from the larger
// and the coefficients modulo p. When u or v reaches 1, its coefficient is
// the quotient. Starting from x instead of 1 makes it a divider, so an affine
// point operation needs one division instead of an inversion plus a multiply.
//
// Interface and timing: `x`, `y` sampled on the edge where `start` is high;
// `p` must stay stable while `busy`. The step count is data dependent, about
// 2.1*log2(p) clocks on average and below 4*log2(p). `done` pulses with
// `q` valid; `err` is set with it when y = 0 mod p. The paper gives a
// dedicated Euclid inverter (31k gates) but not its insides; the binary variant and the divide form are this
// design's choices.
//
// Lint note: the halving function drops the low bit of the (even) sum by
// design, so that bit of its temporary is not read.
module mod_inv #(
  parameter int unsigned W = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] p,
  output logic         busy,
  output logic         done,
  output logic         err,
  output logic [W-1:0] q
);
  logic [W-1:0] u, v, x1, x2;
  logic running;

  function automatic logic [W-1:0] half(input logic [W-1:0] c, input logic [W-1:0] m);
    logic [W:0] s;
    s = c[0] ? ({1'b0, c} + {1'b0, m}) : {1'b0, c};
    return s[W:1];
  endfunction

  function automatic logic [W-1:0] sub_mod(input logic [W-1:0] c, input logic [W-1:0] d,
                                           input logic [W-1:0] m);
    return (c >= d) ? c - d : c - d + m;
  endfunction

  logic u_one, v_one;
  assign u_one = (u == W'(1));
  assign v_one = (v == W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; v <= '0; x1 <= '0; x2 <= '0; q <= '0;
      running <= 1'b0; done <= 1'b0; err <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        u <= y; v <= p; x1 <= x; x2 <= '0;
        running <= 1'b1;
        err <= 1'b0;
      end else if (running) begin
        if (u == '0 || v == '0) begin
          q <= '0; err <= 1'b1; done <= 1'b1; running <= 1'b0;
        end else if (u_one || v_one) begin
          q <= u_one ? x1 : x2; done <= 1'b1; running <= 1'b0;
        end else if (!u[0]) begin
          u  <= u >> 1;
          x1 <= half(x1, p);
        end else if (!v[0]) begin
          v  <= v >> 1;
          x2 <= half(x2, p);
        end else if (u >= v) begin
          u  <= u - v;
          x1 <= sub_mod(x1, x2, p);
        end else begin
          v  <= v - u;
          x2 <= sub_mod(x2, x1, p);
        end
      end
    end
  end

  assign busy = running;

endmodule
