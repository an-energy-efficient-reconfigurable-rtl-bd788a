// Reference SHA-256, HMAC-SHA256 and HMAC-DRBG for the testbenches, written
// from FIPS 180-4, FIPS 198-1 and SP 800-90A independently of the RTL: the
// message is a byte queue, padded and hashed here in plain software style.
package sha_ref;
  typedef byte unsigned bytes_t [$];

  function automatic logic [31:0] rotr(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [255:0] sha256(bytes_t m);
    logic [31:0] kc [64] = '{
      32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
      32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
      32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
      32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
      32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
      32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
      32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
      32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    logic [31:0] h [8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                           32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
    logic [31:0] w [64];
    logic [31:0] a, b, c, d, e, f, g, hh, t1, t2;
    logic [63:0] len = 64'(m.size()) * 8;
    logic [255:0] r;
    m.push_back(8'h80);
    while (m.size() % 64 != 56) m.push_back(8'h00);
    for (int i = 7; i >= 0; i--) m.push_back(len[8*i +: 8]);
    for (int blk = 0; blk < m.size() / 64; blk++) begin
      for (int t = 0; t < 16; t++)
        w[t] = {m[64*blk + 4*t], m[64*blk + 4*t + 1], m[64*blk + 4*t + 2], m[64*blk + 4*t + 3]};
      for (int t = 16; t < 64; t++)
        w[t] = (rotr(w[t-2], 17) ^ rotr(w[t-2], 19) ^ (w[t-2] >> 10)) + w[t-7] +
               (rotr(w[t-15], 7) ^ rotr(w[t-15], 18) ^ (w[t-15] >> 3)) + w[t-16];
      a = h[0]; b = h[1]; c = h[2]; d = h[3]; e = h[4]; f = h[5]; g = h[6]; hh = h[7];
      for (int t = 0; t < 64; t++) begin
        t1 = hh + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g)) + kc[t] + w[t];
        t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
        hh = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
      end
      h[0] += a; h[1] += b; h[2] += c; h[3] += d; h[4] += e; h[5] += f; h[6] += g; h[7] += hh;
    end
    for (int i = 0; i < 8; i++) r[255 - 32*i -: 32] = h[i];
    return r;
  endfunction

  function automatic bytes_t to_bytes(logic [255:0] v);
    bytes_t q;
    for (int i = 31; i >= 0; i--) q.push_back(v[8*i +: 8]);
    return q;
  endfunction

  function automatic logic [255:0] hmac(logic [255:0] key, bytes_t m);
    bytes_t inner, outer;
    bytes_t kb = to_bytes(key);
    for (int i = 0; i < 64; i++) inner.push_back((i < 32 ? kb[i] : 8'h00) ^ 8'h36);
    for (int i = 0; i < 64; i++) outer.push_back((i < 32 ? kb[i] : 8'h00) ^ 8'h5c);
    foreach (m[i]) inner.push_back(m[i]);
    outer = {outer, to_bytes(sha256(inner))};
    return sha256(outer);
  endfunction

  // HMAC_DRBG_Update (SP 800-90A 10.1.2.2); has_data selects provided_data
  task automatic drbg_update(inout logic [255:0] k, inout logic [255:0] v,
                             input bit has_data, input logic [255:0] data);
    bytes_t m;
    m = {to_bytes(v), 8'h00};
    if (has_data) m = {m, to_bytes(data)};
    k = hmac(k, m);
    v = hmac(k, to_bytes(v));
    if (!has_data) return;
    m = {to_bytes(v), 8'h01, to_bytes(data)};
    k = hmac(k, m);
    v = hmac(k, to_bytes(v));
  endtask
endpackage
