// ref_sha256_pkg: reference SHA-256 and HMAC-SHA256 for testbenches.
//
// Written straight from FIPS 180-4 and RFC 2104 as plain functions over byte
// arrays, independent of the RTL cores. hmac16 takes a 16-byte key and a
// message of at most 55 bytes (two compressions per hash suffice for the
// register-interface commands, which carry 32 bytes).
package ref_sha256_pkg;
  localparam logic [31:0] K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  // SHA-256 of msg[0..len-1], len <= 119
  function automatic logic [255:0] sha256(input logic [7:0] msg [256], input int len);
    logic [7:0]  b [128];
    logic [31:0] h [8] = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                           32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
    int nblk = (len + 9 + 63) / 64;
    logic [255:0] r;
    for (int i = 0; i < 128; i++) b[i] = 8'h0;
    for (int i = 0; i < len; i++) b[i] = msg[i];
    b[len] = 8'h80;
    for (int i = 0; i < 8; i++) b[nblk * 64 - 1 - i] = 8'(64'(len * 8) >> (8 * i));
    for (int blk = 0; blk < nblk; blk++) begin
      logic [31:0] w [64];
      logic [31:0] a, bb, c, d, e, f, g, hh, t1, t2;
      for (int t = 0; t < 16; t++)
        w[t] = {b[blk*64 + 4*t], b[blk*64 + 4*t + 1], b[blk*64 + 4*t + 2], b[blk*64 + 4*t + 3]};
      for (int t = 16; t < 64; t++)
        w[t] = (rotr(w[t-2], 17) ^ rotr(w[t-2], 19) ^ (w[t-2] >> 10)) + w[t-7] +
               (rotr(w[t-15], 7) ^ rotr(w[t-15], 18) ^ (w[t-15] >> 3)) + w[t-16];
      a = h[0]; bb = h[1]; c = h[2]; d = h[3]; e = h[4]; f = h[5]; g = h[6]; hh = h[7];
      for (int t = 0; t < 64; t++) begin
        t1 = hh + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g)) + K[t] + w[t];
        t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & bb) ^ (a & c) ^ (bb & c));
        hh = g; g = f; f = e; e = d + t1; d = c; c = bb; bb = a; a = t1 + t2;
      end
      h[0] += a; h[1] += bb; h[2] += c; h[3] += d; h[4] += e; h[5] += f; h[6] += g; h[7] += hh;
    end
    for (int i = 0; i < 8; i++) r[255 - 32*i -: 32] = h[i];
    return r;
  endfunction

  // HMAC-SHA256 with a 16-byte key over a len-byte message (len <= 55)
  function automatic logic [255:0] hmac16(input logic [127:0] key, input logic [7:0] msg [256], input int len);
    logic [7:0] m [256];
    logic [255:0] inner;
    for (int i = 0; i < 256; i++) m[i] = 8'h0;
    for (int i = 0; i < 64; i++) m[i] = ((i < 16) ? key[127 - 8*i -: 8] : 8'h0) ^ 8'h36;
    for (int i = 0; i < len; i++) m[64 + i] = msg[i];
    inner = sha256(m, 64 + len);
    for (int i = 0; i < 64; i++) m[i] = ((i < 16) ? key[127 - 8*i -: 8] : 8'h0) ^ 8'h5c;
    for (int i = 0; i < 32; i++) m[64 + i] = inner[255 - 8*i -: 8];
    return sha256(m, 96);
  endfunction
endpackage
