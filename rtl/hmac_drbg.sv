// HMAC-DRBG with SHA-256 (NIST SP 800-90A), the pseudo-random number
// generator of the DTLS controller, driving the engine's shared SHA-256 core.
//
// State: key K and value V, 256 bits each. Operations (`op`):
//   0 instantiate  K = 0x00..00, V = 0x01..01, then update(seed)
//   1 reseed       update(seed)
//   2 generate     V = HMAC(K, V), out = V, then update() with no data
// where update(d) is K = HMAC(K, V || 0x00 || d), V = HMAC(K, V) and, only
// if d is present, K = HMAC(K, V || 0x01 || d), V = HMAC(K, V).
// Each HMAC(K, m) = SHA256((K ^ opad) || SHA256((K ^ ipad) || m)) is run as
// SHA-256 block compressions on the shared core: the inner hash takes two
// blocks (three when m carries the seed), the outer hash two. The message
// blocks, including the SHA-256 padding and length, are formed here, so no
// RAM is needed.
//
// Interface and timing: `seed` (256 bits of entropy input, or nonce and
// entropy already combined by software) and `op` are sampled on the edge
// where `start` is high. `busy` stays high until `done` pulses; `out` then
// holds the 32 generated bytes (byte 0 in [255:224]). While busy the module
// owns the SHA port (`sha_*`). One generate costs 12 compressions and an
// instantiate or reseed 18, at 66 clocks each plus two of hand-over.
//
// The paper lists HMAC-DRBG-based random number generation among the
// controller's jobs; the fixed 256-bit seed, the single 32-byte output per
// generate and the absence of a reseed counter and of additional input are
// this design's own simplifications.
//
// Lint note: the assertion at the end is disabled during reset with
// `disable iff (!rst_n)`, so the asynchronous reset is also read in a
// clocked expression; this is intended and adds no logic.
module hmac_drbg (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [1:0]   op,
  input  logic [255:0] seed,
  output logic         busy,
  output logic         done,
  output logic [255:0] out,
  // shared SHA-256 core
  output logic         sha_start,
  output logic         sha_init,
  output logic [511:0] sha_block,
  input  logic         sha_done,
  input  logic [255:0] sha_digest
);
  // message of one HMAC call: V, V||00, V||00||seed, V||01||seed
  typedef enum logic [1:0] {MT_V, MT_V0, MT_V0S, MT_V1S} msg_e;
  // block of an HMAC call: inner key, inner message, inner tail, outer key, outer digest
  typedef enum logic [2:0] {P_I1, P_I2, P_I3, P_O1, P_O2} phase_e;
  typedef enum logic [1:0] {D_IDLE, D_ISSUE, D_WAIT} state_e;

  localparam logic [511:0] IPAD = {64{8'h36}};
  localparam logic [511:0] OPAD = {64{8'h5c}};

  state_e       state;
  phase_e       phase;
  logic [1:0]   op_q;
  logic [2:0]   step;
  logic [255:0] k_q, v_q, seed_q, ih;

  // the program: HMAC calls per operation
  msg_e mt;
  logic to_key, capture, last;
  always_comb begin
    mt = MT_V; to_key = 1'b0; capture = 1'b0; last = 1'b0;
    if (op_q == 2'd2) begin
      unique case (step)
        3'd0:    begin mt = MT_V;  to_key = 1'b0; capture = 1'b1; end
        3'd1:    begin mt = MT_V0; to_key = 1'b1; end
        default: begin mt = MT_V;  to_key = 1'b0; last = 1'b1; end
      endcase
    end else begin
      unique case (step)
        3'd0:    begin mt = MT_V0S; to_key = 1'b1; end
        3'd1:    begin mt = MT_V;   to_key = 1'b0; end
        3'd2:    begin mt = MT_V1S; to_key = 1'b1; end
        default: begin mt = MT_V;   to_key = 1'b0; last = 1'b1; end
      endcase
    end
  end

  // SHA-256 message blocks with padding: the inner hash covers 64 key bytes
  // plus the message, the outer hash 64 key bytes plus 32 digest bytes
  always_comb begin
    unique case (phase)
      P_I1: sha_block = {k_q, 256'b0} ^ IPAD;
      P_I2: unique case (mt)
              MT_V:    sha_block = {v_q, 8'h80, 184'b0, 64'd768};
              MT_V0:   sha_block = {v_q, 8'h00, 8'h80, 176'b0, 64'd776};
              MT_V0S:  sha_block = {v_q, 8'h00, seed_q[255:8]};
              default: sha_block = {v_q, 8'h01, seed_q[255:8]};
            endcase
      P_I3: sha_block = {seed_q[7:0], 8'h80, 432'b0, 64'd1032};
      P_O1: sha_block = {k_q, 256'b0} ^ OPAD;
      default: sha_block = {ih, 8'h80, 184'b0, 64'd768};
    endcase
  end
  assign sha_init = (phase == P_I1) || (phase == P_O1);
  assign busy     = (state != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; phase <= P_I1; op_q <= '0; step <= '0;
      k_q <= '0; v_q <= '0; seed_q <= '0; ih <= '0; out <= '0;
      sha_start <= 1'b0; done <= 1'b0;
    end else begin
      sha_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        D_IDLE: if (start) begin
          op_q   <= op;
          seed_q <= seed;
          step   <= '0;
          phase  <= P_I1;
          if (op == 2'd0) begin
            k_q <= '0;
            v_q <= {32{8'h01}};
          end
          state <= D_ISSUE;
        end
        D_ISSUE: begin
          sha_start <= 1'b1;
          state     <= D_WAIT;
        end
        default: if (sha_done) begin  // D_WAIT
          state <= D_ISSUE;
          unique case (phase)
            P_I1: phase <= P_I2;
            P_I2: if (mt == MT_V0S || mt == MT_V1S) phase <= P_I3;
                  else begin ih <= sha_digest; phase <= P_O1; end
            P_I3: begin ih <= sha_digest; phase <= P_O1; end
            P_O1: phase <= P_O2;
            default: begin  // P_O2: HMAC result
              if (to_key) k_q <= sha_digest;
              else        v_q <= sha_digest;
              if (capture) out <= sha_digest;
              phase <= P_I1;
              step  <= step + 1'b1;
              if (last) begin
                done  <= 1'b1;
                state <= D_IDLE;
              end
            end
          endcase
        end
      endcase
    end
  end

  // the shared SHA core must only report completion of blocks issued here
  assert property (@(posedge clk) disable iff (!rst_n) sha_done |-> state == D_WAIT || !busy);
endmodule
