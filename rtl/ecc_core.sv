// Prime-field elliptic curve engine: comb scalar multiplication in affine
// coordinates on any short Weierstrass curve y^2 = x^3 + a*x + b over a prime
// p < 2^W (b is never needed). Standalone field operations are also exposed.
//
// Scalar multiplication uses the fixed-base comb of the paper with COMB_W = 4
// teeth and zero-less signed digits. For a t = 4*d bit odd scalar k the
// digits s_j = +1/-1 are s_{t-1} = +1 and s_j = 2*k_{j+1} - 1 (their weighted
// sum is k, and no digit is zero, so every column costs one doubling and one
// addition regardless of k). Column i holds s_{i+r*d}, r = 0..3. With P_r =
// 2^(r*d) P, the comb table of a base point is
//     T[u] = P_3 + sum_{r<3} (u_r ? +1 : -1) P_r,  u = 0..7,
// and column i equals sign * T[u] with sign = s_{i+3d} and u_r = (s_{i+rd} ==
// sign); a negative sign negates y. Q starts at the top column, then d-1
// times Q = 2Q + column. An even k is run as k+1 and P is subtracted at the
// end.
//
// ECC_PRECOMP fills cache slot `slot` with T[0..7] for base point (x, y):
// 3*d doublings for P_1..P_3 then 3 additions per entry. ECC_ECSM computes
// k*(x, y) from the slot's table (x, y are needed only for an even k). Point
// additions and doublings use one division (mod_inv in divide form) and two
// or three multiplications (mod_mul). The point at infinity is tracked as a
// flag, so exceptional cases are handled; `inf` reports an infinite result.
// ECC_MODMUL/MODDIV/MODADD/MODSUB return x*y, x/y, x+y, x-y mod p in rx.
//
// Interface and timing: operands are sampled when `start` is high in IDLE;
// `busy` is high until `done` pulses with rx, ry valid. `nbits` is the bit
// length of p; the multiplier scans only that many bits and d = ceil(nbits/4).
// `err` reports a zero division in MODDIV or a slot number of NUM_SLOTS or
// more. From the paper: comb method with pre-computation, 4 KB cache for six
// points, affine coordinates with a dedicated inverter, interleaved modular
// multiplier, zero-less signed digits. This design's choices: COMB_W = 4,
// eight points per slot, the divide-form inverter, the operation sequencing.
//
// Lint note: the `busy` outputs of the multiplier and divider are left open
// on purpose, as the sequencer waits for their `done` pulses.
module ecc_core
  import dtls_pkg::*;
#(
  parameter int unsigned W         = ECC_W,
  parameter int unsigned NUM_SLOTS = 6,
  parameter int unsigned CACHE_DEPTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  ecc_op_e            op,
  input  logic [2:0]         slot,
  input  logic [$clog2(W):0] nbits,
  input  logic [W-1:0]       k,
  input  logic [W-1:0]       x,
  input  logic [W-1:0]       y,
  input  logic [W-1:0]       p,
  input  logic [W-1:0]       a,
  output logic               busy,
  output logic               done,
  output logic               err,
  output logic               inf,
  output logic [W-1:0]       rx,
  output logic [W-1:0]       ry,
  // event counters for observing the engine
  output logic [31:0]        n_dbl,
  output logic [31:0]        n_add
);
  localparam int unsigned NB = $clog2(W) + 1;

  typedef enum logic [4:0] {
    S_IDLE, S_FMUL, S_FDIV,
    S_PC_DBL, S_PC_USTART, S_PC_UADD, S_PC_UNEXT, S_PC_WRITE,
    S_EC_RD0, S_EC_FIRST, S_EC_DBL, S_EC_RD, S_EC_WAIT, S_EC_ADD, S_EC_NEXT, S_EC_FIX,
    S_ADD, S_DBL, S_DBL_SQ, S_PT_DIV, S_PT_L2, S_PT_Y, S_DONE
  } state_e;

  state_e state, ret;

  // operand registers
  logic [2:0]      slot_q;
  logic [NB-1:0]   nbits_q;
  logic [W:0]      kk;            // odd scalar (k or k+1)
  logic            k_even;
  logic [W-1:0]    px, py, pp, pa;
  logic [W-1:0]    qx, qy;        // accumulator Q
  logic            q_inf;
  logic [W-1:0]    tx, ty;        // second operand T
  logic [W-1:0]    lam, nx;
  logic [W-1:0]    prx [4];       // P_0..P_3 during pre-computation
  logic [W-1:0]    pry [4];
  logic [NB-1:0]   d_len;         // comb column count d
  logic [NB-1:0]   cnt;           // doubling counter / column index i
  logic [1:0]      r;
  logic [2:0]      u;

  // field arithmetic helpers, operands in [0, p)
  function automatic logic [W-1:0] fadd(input logic [W-1:0] x1, input logic [W-1:0] x2,
                                        input logic [W-1:0] m);
    logic [W:0] s;
    s = {1'b0, x1} + {1'b0, x2};
    return (s >= {1'b0, m}) ? W'(s - {1'b0, m}) : s[W-1:0];
  endfunction
  function automatic logic [W-1:0] fsub(input logic [W-1:0] x1, input logic [W-1:0] x2,
                                        input logic [W-1:0] m);
    return (x1 >= x2) ? x1 - x2 : x1 - x2 + m;
  endfunction
  function automatic logic [W-1:0] fneg(input logic [W-1:0] x1, input logic [W-1:0] m);
    return (x1 == '0) ? '0 : m - x1;
  endfunction

  // multiplier and divider
  logic mul_start, mul_done;
  logic [W-1:0] mul_a, mul_b, mul_z;
  logic div_start, div_done, div_err;
  logic [W-1:0] div_x, div_y, div_q;

  mod_mul #(.W(W)) u_mul (
    .clk, .rst_n, .start(mul_start), .a(mul_a), .b(mul_b), .p(pp), .nbits(nbits_q),
    .busy(), .done(mul_done), .z(mul_z)
  );
  mod_inv #(.W(W)) u_div (
    .clk, .rst_n, .start(div_start), .x(div_x), .y(div_y), .p(pp),
    .busy(), .done(div_done), .err(div_err), .q(div_q)
  );

  // comb cache
  logic          c_en, c_we;
  logic [$clog2(CACHE_DEPTH)-1:0] c_addr;
  logic [2*W-1:0] c_wdata, c_rdata;
  comb_cache #(.W(W), .DEPTH(CACHE_DEPTH)) u_cache (
    .clk, .en(c_en), .we(c_we), .addr(c_addr), .wdata(c_wdata), .rdata(c_rdata)
  );

  // comb select: signed digits of column cnt
  function automatic logic digit(input logic [W:0] kv, input logic [NB+1:0] j,
                                 input logic [NB+1:0] t);
    // +1 -> 1, -1 -> 0
    if (j == t - 1'b1) return 1'b1;
    return kv[$clog2(W+1)'(j + 1'b1)];
  endfunction

  logic [NB+1:0] t_len;
  logic          col_sign;
  logic [2:0]    col_u;
  always_comb begin
    t_len    = (NB+2)'(d_len) << 2;
    col_sign = digit(kk, (NB+2)'(cnt) + 3 * (NB+2)'(d_len), t_len);
    for (int rr = 0; rr < 3; rr++)
      col_u[rr] = (digit(kk, (NB+2)'(cnt) + (NB+2)'(rr) * (NB+2)'(d_len), t_len) == col_sign);
  end

  // 3*s + a and 2*y for the doubling slope
  logic [W-1:0] three_sq_a, two_y;
  assign three_sq_a = fadd(fadd(fadd(mul_z, mul_z, pp), mul_z, pp), pa, pp);
  assign two_y      = fadd(qy, qy, pp);
  logic [W-1:0] x3;
  assign x3 = fsub(fsub(mul_z, qx, pp), tx, pp);

  logic [$clog2(CACHE_DEPTH)-1:0] slot_base;
  assign slot_base = $clog2(CACHE_DEPTH)'({slot_q, 3'b000});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ret <= S_IDLE;
      slot_q <= '0; nbits_q <= NB'(W); kk <= '0; k_even <= 1'b0;
      px <= '0; py <= '0; pp <= '0; pa <= '0; qx <= '0; qy <= '0; q_inf <= 1'b0;
      tx <= '0; ty <= '0; lam <= '0; nx <= '0;
      for (int i = 0; i < 4; i++) begin prx[i] <= '0; pry[i] <= '0; end
      d_len <= '0; cnt <= '0; r <= '0; u <= '0;
      mul_start <= 1'b0; mul_a <= '0; mul_b <= '0;
      div_start <= 1'b0; div_x <= '0; div_y <= '0;
      c_en <= 1'b0; c_we <= 1'b0; c_addr <= '0; c_wdata <= '0;
      done <= 1'b0; err <= 1'b0; inf <= 1'b0; rx <= '0; ry <= '0;
      n_dbl <= '0; n_add <= '0;
    end else begin
      mul_start <= 1'b0;
      div_start <= 1'b0;
      c_en      <= 1'b0;
      c_we      <= 1'b0;
      done      <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          slot_q  <= slot;
          nbits_q <= nbits;
          px <= x; py <= y; pp <= p; pa <= a;
          kk      <= k[0] ? {1'b0, k} : {1'b0, k} + 1'b1;
          k_even  <= ~k[0];
          d_len   <= NB'((32'(nbits) + 3) >> 2);
          err     <= 1'b0;
          inf     <= 1'b0;
          case (op)
            ECC_MODMUL: begin mul_a <= x; mul_b <= y; mul_start <= 1'b1; state <= S_FMUL; end
            ECC_MODDIV: begin div_x <= x; div_y <= y; div_start <= 1'b1; state <= S_FDIV; end
            ECC_MODADD: begin rx <= fadd(x, y, p); ry <= '0; state <= S_DONE; end
            ECC_MODSUB: begin rx <= fsub(x, y, p); ry <= '0; state <= S_DONE; end
            ECC_PRECOMP, ECC_ECSM: begin
              if (32'(slot) >= NUM_SLOTS) begin
                err <= 1'b1; state <= S_DONE;
              end else if (op == ECC_PRECOMP) begin
                qx <= x; qy <= y; q_inf <= 1'b0;
                prx[0] <= x; pry[0] <= y;
                r <= 2'd1; cnt <= '0;
                state <= S_PC_DBL;
              end else begin
                cnt   <= NB'(((32'(nbits) + 3) >> 2) - 1);
                state <= S_EC_RD0;
              end
            end
            default: begin err <= 1'b1; state <= S_DONE; end
          endcase
        end

        // ---------------- standalone field operations ----------------
        S_FMUL: if (mul_done) begin rx <= mul_z; ry <= '0; state <= S_DONE; end
        S_FDIV: if (div_done) begin rx <= div_q; ry <= '0; err <= div_err; state <= S_DONE; end

        // ---------------- pre-computation ----------------
        S_PC_DBL: begin
          if (cnt != d_len) begin
            cnt <= cnt + 1'b1;
            ret <= S_PC_DBL;
            state <= S_DBL;
          end else begin
            prx[r] <= qx; pry[r] <= qy;
            if (r == 2'd3) begin
              u <= '0;
              state <= S_PC_USTART;
            end else begin
              r <= r + 1'b1;
              cnt <= '0;
            end
          end
        end
        S_PC_USTART: begin
          qx <= prx[3]; qy <= pry[3]; q_inf <= 1'b0;
          r <= 2'd2;
          state <= S_PC_UADD;
        end
        S_PC_UADD: begin
          tx <= prx[r];
          ty <= u[r] ? pry[r] : fneg(pry[r], pp);
          ret <= S_PC_UNEXT;
          state <= S_ADD;
        end
        S_PC_UNEXT: begin
          if (r == 2'd0) state <= S_PC_WRITE;
          else begin r <= r - 1'b1; state <= S_PC_UADD; end
        end
        S_PC_WRITE: begin
          c_en <= 1'b1; c_we <= 1'b1;
          c_addr <= slot_base | $clog2(CACHE_DEPTH)'(u);
          c_wdata <= {qx, qy};
          if (q_inf) inf <= 1'b1;
          if (u == 3'd7) begin
            rx <= qx; ry <= qy;
            state <= S_DONE;
          end else begin
            u <= u + 1'b1;
            state <= S_PC_USTART;
          end
        end

        // ---------------- comb scalar multiplication ----------------
        S_EC_RD0: begin
          c_en <= 1'b1; c_addr <= slot_base | $clog2(CACHE_DEPTH)'(col_u);
          ret  <= S_EC_FIRST;
          state <= S_EC_FIRST;
        end
        S_EC_FIRST: state <= S_EC_WAIT;
        S_EC_WAIT: begin
          // top column: its sign digit s_{t-1} is always +1
          if (ret == S_EC_ADD) begin
            tx <= c_rdata[2*W-1:W];
            ty <= col_sign ? c_rdata[W-1:0] : fneg(c_rdata[W-1:0], pp);
            ret <= S_EC_NEXT;
            state <= S_ADD;
          end else begin
            qx <= c_rdata[2*W-1:W]; qy <= c_rdata[W-1:0]; q_inf <= 1'b0;
            state <= S_EC_NEXT;
          end
        end
        S_EC_NEXT: begin
          if (cnt == '0) state <= S_EC_FIX;
          else begin
            cnt <= cnt - 1'b1;
            state <= S_EC_DBL;
          end
        end
        S_EC_DBL: begin
          ret <= S_EC_RD;
          state <= S_DBL;
        end
        S_EC_RD: begin
          c_en <= 1'b1; c_addr <= slot_base | $clog2(CACHE_DEPTH)'(col_u);
          ret <= S_EC_ADD;
          state <= S_EC_ADD;
        end
        S_EC_ADD: state <= S_EC_WAIT;   // cache read latency
        S_EC_FIX: begin
          if (k_even) begin
            k_even <= 1'b0;
            tx <= px; ty <= fneg(py, pp);
            ret <= S_EC_FIX;
            state <= S_ADD;
          end else begin
            rx <= qx; ry <= qy; inf <= q_inf;
            state <= S_DONE;
          end
        end

        // ---------------- point addition Q = Q + T ----------------
        S_ADD: begin
          n_add <= n_add + 1'b1;
          if (q_inf) begin
            qx <= tx; qy <= ty; q_inf <= 1'b0; state <= ret;
          end else if (tx == qx) begin
            if (ty == qy) state <= S_DBL;          // T = Q: double instead
            else begin q_inf <= 1'b1; state <= ret; end  // T = -Q
          end else begin
            div_x <= fsub(ty, qy, pp);
            div_y <= fsub(tx, qx, pp);
            div_start <= 1'b1;
            state <= S_PT_DIV;
          end
        end
        // ---------------- point doubling Q = 2Q ----------------
        S_DBL: begin
          n_dbl <= n_dbl + 1'b1;
          if (q_inf) state <= ret;
          else if (qy == '0) begin q_inf <= 1'b1; state <= ret; end
          else begin
            tx <= qx; ty <= qy;
            mul_a <= qx; mul_b <= qx; mul_start <= 1'b1;
            state <= S_DBL_SQ;
          end
        end
        S_DBL_SQ: if (mul_done) begin
          div_x <= three_sq_a;
          div_y <= two_y;
          div_start <= 1'b1;
          state <= S_PT_DIV;
        end
        S_PT_DIV: if (div_done) begin
          lam <= div_q;
          mul_a <= div_q; mul_b <= div_q; mul_start <= 1'b1;
          state <= S_PT_L2;
        end
        S_PT_L2: if (mul_done) begin
          nx <= x3;
          mul_a <= lam; mul_b <= fsub(qx, x3, pp); mul_start <= 1'b1;
          state <= S_PT_Y;
        end
        S_PT_Y: if (mul_done) begin
          qx <= nx;
          qy <= fsub(mul_z, qy, pp);
          state <= ret;
        end

        default: begin  // S_DONE
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
