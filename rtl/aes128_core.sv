// AES-128 block encryption engine (FIPS 197), encrypt direction only.
//
// One round per clock: the state and the round key are registers, and each
// cycle applies SubBytes, ShiftRows, MixColumns (skipped in the last round)
// and AddRoundKey while the key schedule derives the next round key on the
// fly. The S-box is not a pasted table: it is computed at elaboration as the
// GF(2^8) multiplicative inverse followed by the FIPS 197 affine map, and
// looked up from that constant.
//
// Interface and timing: `key` and `block` are big-endian byte strings (byte 0
// in [127:120]) sampled in the cycle `start` is high; the initial AddRoundKey
// happens on that edge. Ten rounds follow, one per clock; `done` pulses and
// `result` holds the ciphertext 11 clock edges after the edge that samples
// `start`. `result` stays valid until the next start.
//
// Only decryption is left out: GCM, the mode the paper uses, needs the
// forward cipher alone. The round-per-cycle structure is this design's
// choice; the paper names the AES-128 GCM accelerator but not its insides.
module aes128_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] block,
  output logic         busy,
  output logic         done,
  output logic [127:0] result
);
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p = '0, x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = xtime(x);
    end
    return p;
  endfunction

  // S-box table built by a constant function: inverse (x^254) then affine map.
  function automatic logic [2047:0] gen_sbox();
    logic [2047:0] t;
    for (int x = 0; x < 256; x++) begin
      logic [7:0] inv, sq, s;
      inv = 8'h01;
      sq  = 8'(x);
      // x^254 = x^(2+4+8+16+32+64+128)
      for (int e = 1; e < 8; e++) begin
        sq  = gmul(sq, sq);
        inv = gmul(inv, sq);
      end
      if (x == 0) inv = 8'h00;
      s = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^
          {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]} ^ 8'h63;
      t[8*x +: 8] = s;
    end
    return t;
  endfunction

  localparam logic [2047:0] SBOX = gen_sbox();

  function automatic logic [7:0] sbox(input logic [7:0] a);
    return SBOX[8*a +: 8];
  endfunction

  function automatic logic [127:0] round_fn(input logic [127:0] s, input logic last);
    logic [7:0] b [16];
    logic [7:0] r [16];
    logic [127:0] o;
    for (int i = 0; i < 16; i++) b[i] = sbox(s[127 - 8*i -: 8]);
    // ShiftRows: byte i is row i%4, column i/4
    for (int c = 0; c < 4; c++)
      for (int rw = 0; rw < 4; rw++)
        r[4*c + rw] = b[4*((c + rw) % 4) + rw];
    if (!last) begin
      for (int c = 0; c < 4; c++) begin
        logic [7:0] a0, a1, a2, a3;
        a0 = r[4*c]; a1 = r[4*c+1]; a2 = r[4*c+2]; a3 = r[4*c+3];
        r[4*c]   = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
        r[4*c+1] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
        r[4*c+2] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
        r[4*c+3] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
      end
    end
    for (int i = 0; i < 16; i++) o[127 - 8*i -: 8] = r[i];
    return o;
  endfunction

  function automatic logic [127:0] next_key(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = {sbox(w3[23:16]) ^ rcon, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  logic [127:0] state, rkey, rkey_next;
  logic [7:0]   rcon;
  logic [3:0]   round;
  logic         running;

  assign rkey_next = next_key(rkey, rcon);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= '0;
      rkey    <= '0;
      rcon    <= 8'h01;
      round   <= '0;
      running <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        state   <= block ^ key;
        rkey    <= key;
        rcon    <= 8'h01;
        round   <= 4'd1;
        running <= 1'b1;
      end else if (running) begin
        state <= round_fn(state, round == 4'd10) ^ rkey_next;
        rkey  <= rkey_next;
        rcon  <= xtime(rcon);
        round <= round + 4'd1;
        if (round == 4'd10) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign busy   = running;
  assign result = state;

endmodule
