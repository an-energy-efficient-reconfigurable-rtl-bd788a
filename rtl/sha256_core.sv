// SHA-256 compression engine (FIPS 180-4).
//
// One 512-bit message block is compressed per `start` pulse. The engine keeps
// the chaining value H0..H7 between blocks, so a message of several blocks is
// hashed by pulsing `start` once per block, with `init` high on the first
// block to reload the standard initial value. Padding is the caller's job.
//
// Datapath: one round per clock. The 16-word message schedule is a shift
// register that produces W[t] on the fly, the eight working variables a..h are
// registers, and the round constants are a 64-entry constant table.
//
// Interface and timing: `block` is big-endian (W0 is block[511:480]); sample
// it in the cycle `start` is high. `busy` is high for 65 cycles: 64 rounds and
// one cycle to add the working variables into the chaining value. `done`
// pulses for one cycle 66 clock edges after the edge that samples `start`,
// when `digest` (H0 in [255:224]) is valid.
// `digest` then stays valid until the next start.
//
// The paper names a SHA-256 accelerator inside the DTLS engine but does not
// describe its architecture; the round-per-cycle structure is this design's
// choice.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         init,
  input  logic [511:0] block,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  localparam logic [31:0] K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2
  };
  localparam logic [255:0] H_INIT = {
    32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
    32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19
  };

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] h [8];     // chaining value H0..H7
  logic [31:0] v [8];     // working variables a..h
  logic [31:0] w [16];    // message schedule window, w[0] = W[t]
  logic [6:0]  round;
  logic        running, finishing;

  logic [31:0] t1, t2, s0, s1, ch, maj, w_next;

  always_comb begin
    s1     = rotr(v[4], 6) ^ rotr(v[4], 11) ^ rotr(v[4], 25);
    ch     = (v[4] & v[5]) ^ (~v[4] & v[6]);
    t1     = v[7] + s1 + ch + K[round[5:0]] + w[0];
    s0     = rotr(v[0], 2) ^ rotr(v[0], 13) ^ rotr(v[0], 22);
    maj    = (v[0] & v[1]) ^ (v[0] & v[2]) ^ (v[1] & v[2]);
    t2     = s0 + maj;
    // W[t+16] = sigma1(W[t+14]) + W[t+9] + sigma0(W[t+1]) + W[t]
    w_next = (rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10)) + w[9] +
             (rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3)) + w[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      finishing <= 1'b0;
      done      <= 1'b0;
      round     <= '0;
      for (int i = 0; i < 8; i++) begin
        h[i] <= H_INIT[255 - 32*i -: 32];
        v[i] <= '0;
      end
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running && !finishing) begin
        for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
        for (int i = 0; i < 8; i++) begin
          v[i] <= init ? H_INIT[255 - 32*i -: 32] : h[i];
          if (init) h[i] <= H_INIT[255 - 32*i -: 32];
        end
        round   <= '0;
        running <= 1'b1;
      end else if (running) begin
        v[0] <= t1 + t2;
        v[1] <= v[0];
        v[2] <= v[1];
        v[3] <= v[2];
        v[4] <= v[3] + t1;
        v[5] <= v[4];
        v[6] <= v[5];
        v[7] <= v[6];
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= w_next;
        round <= round + 7'd1;
        if (round == 7'd63) begin
          running   <= 1'b0;
          finishing <= 1'b1;
        end
      end else if (finishing) begin
        for (int i = 0; i < 8; i++) h[i] <= h[i] + v[i];
        finishing <= 1'b0;
        done      <= 1'b1;
      end
    end
  end

  assign busy = running | finishing;
  always_comb
    for (int i = 0; i < 8; i++) digest[255 - 32*i -: 32] = h[i];

endmodule
