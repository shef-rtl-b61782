// ref_aes_pkg: reference AES-128 encryption for testbenches.
//
// A plain software model written from FIPS-197, independent of the RTL
// engine: the S-box is computed from its definition (inverse in GF(2^8)
// followed by the affine map) instead of being read from a table.
package ref_aes_pkg;
  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
      b = b >> 1;
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] a);
    logic [7:0] inv = 0, s;
    for (int c = 1; c < 256; c++) if (gmul(a, 8'(c)) == 8'h01) inv = 8'(c);
    s = inv;
    for (int i = 1; i < 5; i++) s ^= 8'((inv << i) | (inv >> (8 - i)));
    return s ^ 8'h63;
  endfunction

  function automatic logic [127:0] encrypt128(input logic [127:0] key, input logic [127:0] pt);
    logic [7:0] s [16], t [16], rk [176];
    logic [7:0] rc = 8'h01;
    logic [7:0] tmp [4];
    logic [127:0] o;
    for (int i = 0; i < 16; i++) rk[i] = key[127-8*i -: 8];
    for (int i = 4; i < 44; i++) begin
      for (int j = 0; j < 4; j++) tmp[j] = rk[4*(i-1)+j];
      if (i % 4 == 0) begin
        logic [7:0] t0 = tmp[0];
        tmp[0] = sbox(tmp[1]) ^ rc; tmp[1] = sbox(tmp[2]); tmp[2] = sbox(tmp[3]); tmp[3] = sbox(t0);
        rc = gmul(rc, 8'h02);
      end
      for (int j = 0; j < 4; j++) rk[4*i+j] = rk[4*(i-4)+j] ^ tmp[j];
    end
    for (int i = 0; i < 16; i++) s[i] = pt[127-8*i -: 8] ^ rk[i];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) s[i] = sbox(s[i]);
      for (int c = 0; c < 4; c++) for (int w = 0; w < 4; w++) t[4*c+w] = s[4*((c+w)%4)+w];
      for (int c = 0; c < 4; c++) begin
        if (r != 10) begin
          s[4*c+0] = gmul(t[4*c+0],2) ^ gmul(t[4*c+1],3) ^ t[4*c+2] ^ t[4*c+3];
          s[4*c+1] = t[4*c+0] ^ gmul(t[4*c+1],2) ^ gmul(t[4*c+2],3) ^ t[4*c+3];
          s[4*c+2] = t[4*c+0] ^ t[4*c+1] ^ gmul(t[4*c+2],2) ^ gmul(t[4*c+3],3);
          s[4*c+3] = gmul(t[4*c+0],3) ^ t[4*c+1] ^ t[4*c+2] ^ gmul(t[4*c+3],2);
        end else for (int w = 0; w < 4; w++) s[4*c+w] = t[4*c+w];
      end
      for (int i = 0; i < 16; i++) s[i] ^= rk[16*r+i];
    end
    for (int i = 0; i < 16; i++) o[127-8*i -: 8] = s[i];
    return o;
  endfunction
endpackage
