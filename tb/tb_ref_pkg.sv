// tb_ref_pkg: reference models used by the testbenches. A functional AES-128
// (written independently of the RTL core as a straight-line function over a
// byte array) and the reference line encryption / MAC that the engines must
// reproduce.
package tb_ref_pkg;
  import tee_pkg::*;

  function automatic logic [7:0] xt(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [127:0] aes_enc(input logic [127:0] key, input logic [127:0] pt);
    logic [7:0] s [16], t [16], k [16];
    logic [7:0] rc;
    for (int i = 0; i < 16; i++) begin
      k[i] = key[127-8*i -: 8];
      s[i] = pt[127-8*i -: 8] ^ k[i];
    end
    rc = 8'h01;
    for (int r = 1; r <= 10; r++) begin
      // key schedule
      logic [7:0] tk [4];
      tk[0] = sbox(k[13]) ^ rc; tk[1] = sbox(k[14]); tk[2] = sbox(k[15]); tk[3] = sbox(k[12]);
      for (int i = 0; i < 4; i++) k[i] = k[i] ^ tk[i];
      for (int i = 4; i < 16; i++) k[i] = k[i] ^ k[i-4];
      rc = xt(rc);
      // sub + shift
      for (int i = 0; i < 16; i++) t[i] = sbox(s[(i + 4*(i%4)) % 16]);
      if (r != 10)
        for (int c = 0; c < 4; c++) begin
          logic [7:0] a [4];
          for (int q = 0; q < 4; q++) a[q] = t[4*c+q];
          for (int q = 0; q < 4; q++)
            t[4*c+q] = xt(a[q]) ^ xt(a[(q+1)%4]) ^ a[(q+1)%4] ^ a[(q+2)%4] ^ a[(q+3)%4];
        end
      for (int i = 0; i < 16; i++) s[i] = t[i] ^ k[i];
    end
    for (int i = 0; i < 16; i++) aes_enc[127-8*i -: 8] = s[i];
  endfunction

  function automatic line_t line_crypt(input logic [127:0] key, input addr_t a, input vn_t v, input line_t d);
    for (int j = 0; j < 4; j++)
      line_crypt[LINE_W-1-128*j -: 128] = d[LINE_W-1-128*j -: 128] ^ aes_enc(key, ctr_block(a, v, 2'(j)));
  endfunction

  function automatic mac_t line_mac(input logic [127:0] kmac, input addr_t a, input vn_t v, input line_t c);
    logic [127:0] x, b;
    x = ctr_block(a, v, 2'd0);
    for (int j = 0; j < 4; j++) begin
      b = c[LINE_W-1-128*j -: 128];
      x = x ^ ((j == 0) ? b : ((b << (32*j)) | (b >> (128 - 32*j))));
    end
    b = aes_enc(kmac, x);
    return b[127 -: MAC_W];
  endfunction

  function automatic line_t rand_line();
    for (int i = 0; i < 16; i++) rand_line[32*i +: 32] = $urandom;
  endfunction
endpackage
