// AES-128 GCM engine (NIST SP 800-38D) built from aes128_core and gf128_mul.
//
// The engine holds the GCM session state: key, hash subkey H = E_K(0),
// counter block, E_K(J0), the running GHASH value Y and the bit lengths of
// additional data and ciphertext. Each `start` runs one operation (`op`,
// see dtls_pkg::gcm_op_e) on one 128-bit block:
//   GCM_KEY  din = key; computes H, clears Y and the lengths.
//   GCM_IV   din[127:32] = 96-bit IV; J0 = IV||0^31||1, computes E_K(J0).
//   GCM_AAD  Y = (Y ^ A) * H for one block of additional data.
//   GCM_ENC  counter+1, C = P ^ E_K(counter), Y = (Y ^ C) * H, dout = C.
//   GCM_DEC  counter+1, P = C ^ E_K(counter), Y = (Y ^ C) * H, dout = P.
//   GCM_TAG  Y = (Y ^ (len(A)||len(C))) * H, dout = tag = Y ^ E_K(J0).
//   GCM_ECB  dout = E_K(din), plain block encryption; GCM state untouched.
// `nbytes` (1..16) gives the valid bytes of a final partial AAD or data block;
// the rest of the block is masked to zero. Blocks are big-endian (byte 0 in
// [127:120]).
//
// Timing: an AES step takes 12 cycles and a GHASH step 128/DIGIT+1; `done`
// pulses once the operation has finished and `dout` is then valid. The mode
// follows the paper (AES-128 GCM); the operation split is this design's own.
module aes_gcm
  import dtls_pkg::*;
#(
  parameter int unsigned GHASH_DIGIT = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  gcm_op_e      op,
  input  logic [127:0] din,
  input  logic [4:0]   nbytes,
  output logic         busy,
  output logic         done,
  output logic [127:0] dout
);
  typedef enum logic [2:0] {S_IDLE, S_AES, S_GHASH, S_DONE} state_e;
  state_e state;

  logic [127:0] key, h, ctr, ej0, y, len_a, len_c;
  logic [127:0] data;       // masked input block
  gcm_op_e      cur_op;

  logic aes_start, aes_done, aes_busy;
  logic [127:0] aes_in, aes_key, aes_out;
  logic mul_start, mul_done;
  logic [127:0] mul_a, mul_p;

  aes128_core u_aes (
    .clk, .rst_n, .start(aes_start), .key(aes_key), .block(aes_in),
    .busy(aes_busy), .done(aes_done), .result(aes_out)
  );

  gf128_mul #(.DIGIT(GHASH_DIGIT)) u_mul (
    .clk, .rst_n, .start(mul_start), .a(mul_a), .b(h), .done(mul_done), .p(mul_p)
  );

  logic [127:0] mask;
  always_comb begin
    if (nbytes == 5'd0 || nbytes >= 5'd16) mask = '1;
    else mask = ~('1 >> (8 * nbytes));
  end

  logic [127:0] mask_q;
  logic [7:0]   bits_q;
  logic [127:0] ks_out;   // data XOR key stream, masked
  assign ks_out = (data ^ aes_out) & mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur_op <= GCM_KEY;
      key <= '0; h <= '0; ctr <= '0; ej0 <= '0; y <= '0; len_a <= '0; len_c <= '0;
      data <= '0; mask_q <= '1; bits_q <= '0; dout <= '0;
      aes_start <= 1'b0; aes_in <= '0; aes_key <= '0;
      mul_start <= 1'b0; mul_a <= '0; done <= 1'b0;
    end else begin
      aes_start <= 1'b0;
      mul_start <= 1'b0;
      done      <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cur_op <= op;
          data   <= din & mask;  // unused by GCM_ECB
          mask_q <= mask;
          bits_q <= (nbytes == 5'd0 || nbytes >= 5'd16) ? 8'd128 : 8'(8 * nbytes);
          case (op)
            GCM_KEY: begin
              key <= din; aes_key <= din; aes_in <= '0; aes_start <= 1'b1;
              y <= '0; len_a <= '0; len_c <= '0;
              state <= S_AES;
            end
            GCM_IV: begin
              ctr <= {din[127:32], 32'd1};
              aes_key <= key; aes_in <= {din[127:32], 32'd1}; aes_start <= 1'b1;
              y <= '0; len_a <= '0; len_c <= '0;
              state <= S_AES;
            end
            GCM_ENC, GCM_DEC: begin
              ctr <= {ctr[127:32], ctr[31:0] + 32'd1};
              aes_key <= key; aes_in <= {ctr[127:32], ctr[31:0] + 32'd1}; aes_start <= 1'b1;
              state <= S_AES;
            end
            GCM_ECB: begin
              aes_key <= key; aes_in <= din; aes_start <= 1'b1;
              state <= S_AES;
            end
            GCM_AAD: begin
              mul_a <= y ^ (din & mask); mul_start <= 1'b1;
              len_a <= len_a + 128'((nbytes == 5'd0 || nbytes >= 5'd16) ? 128 : 8 * nbytes);
              state <= S_GHASH;
            end
            default: begin  // GCM_TAG
              mul_a <= y ^ {len_a[63:0], len_c[63:0]}; mul_start <= 1'b1;
              state <= S_GHASH;
            end
          endcase
        end
        S_AES: if (aes_done) begin
          case (cur_op)
            GCM_KEY: begin h <= aes_out; state <= S_DONE; end
            GCM_IV:  begin ej0 <= aes_out; state <= S_DONE; end
            GCM_ECB: begin dout <= aes_out; state <= S_DONE; end
            GCM_ENC: begin
              dout  <= ks_out;
              mul_a <= y ^ ks_out; mul_start <= 1'b1;
              len_c <= len_c + 128'(bits_q);
              state <= S_GHASH;
            end
            default: begin  // GCM_DEC
              dout  <= ks_out;
              mul_a <= y ^ data; mul_start <= 1'b1;
              len_c <= len_c + 128'(bits_q);
              state <= S_GHASH;
            end
          endcase
        end
        S_GHASH: if (mul_done) begin
          y <= mul_p;
          if (cur_op == GCM_TAG) dout <= mul_p ^ ej0;
          state <= S_DONE;
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
