// Session-hash finisher: closes a SHA-256 message of any length in hardware.
//
// Software hashes the running handshake transcript block by block with the
// plain SHA commands; the last, partial block goes here together with the
// total message length. This module forms the FIPS 180-4 padding (a 0x80
// byte, zeros, and the 64-bit bit length) and runs the one or two final
// compressions on the engine's shared SHA-256 core: one when at most 55
// bytes remain, two otherwise.
//
// Interface and timing: `data` (big-endian, byte 0 in [511:504]; bytes at
// and after `nbytes` are ignored), `nbytes` (0..63), `len_bits` (total
// message length in bits) and `first` (no block of this message was hashed
// yet, so the initial value must be loaded) are sampled on the edge where
// `start` is high. `busy` stays high until `done` pulses; the SHA core's
// digest is then the hash of the whole message. While busy the module owns
// the SHA port (`sha_*`). Each compression takes 66 clocks plus two of
// hand-over.
//
// The paper lists the computation of the session transcript among the
// controller's jobs; splitting it into software-fed full blocks and this
// hardware finisher is this design's choice.
//
// Lint note: the assertion at the end is disabled during reset with
// `disable iff (!rst_n)`, so the asynchronous reset is also read in a
// clocked expression; this is intended and adds no logic.
module sha_finish (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         first,
  input  logic [511:0] data,
  input  logic [5:0]   nbytes,
  input  logic [63:0]  len_bits,
  output logic         busy,
  output logic         done,
  // shared SHA-256 core
  output logic         sha_start,
  output logic         sha_init,
  output logic [511:0] sha_block,
  input  logic         sha_done
);
  typedef enum logic [1:0] {F_IDLE, F_ISSUE, F_WAIT} state_e;
  state_e       state;
  logic         second;      // issuing the length-only second block
  logic         two;         // message needs two final blocks
  logic         first_q;
  logic [511:0] blk1;
  logic [63:0]  len_q;

  // the message bytes, the 0x80 marker right after them, and the length if
  // it still fits (at most 55 message bytes)
  function automatic logic [511:0] pad_block(logic [511:0] d, logic [5:0] n, logic [63:0] len);
    logic [511:0] keep, mark;
    keep = ~({512{1'b1}} >> (10'(n) * 10'd8));
    mark = 512'h80 << ((10'd63 - 10'(n)) * 10'd8);
    return (d & keep) | mark | ((n <= 6'd55) ? {448'b0, len} : 512'b0);
  endfunction

  assign sha_block = second ? {448'b0, len_q} : blk1;
  assign sha_init  = first_q && !second;
  assign busy      = (state != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= F_IDLE; second <= 1'b0; two <= 1'b0; first_q <= 1'b0;
      blk1 <= '0; len_q <= '0; sha_start <= 1'b0; done <= 1'b0;
    end else begin
      sha_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        F_IDLE: if (start) begin
          blk1    <= pad_block(data, nbytes, len_bits);
          len_q   <= len_bits;
          two     <= (nbytes > 6'd55);
          first_q <= first;
          second  <= 1'b0;
          state   <= F_ISSUE;
        end
        F_ISSUE: begin
          sha_start <= 1'b1;
          state     <= F_WAIT;
        end
        default: if (sha_done) begin  // F_WAIT
          if (two && !second) begin
            second <= 1'b1;
            state  <= F_ISSUE;
          end else begin
            done  <= 1'b1;
            state <= F_IDLE;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) sha_done |-> state == F_WAIT || !busy);
endmodule
