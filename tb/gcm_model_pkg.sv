// gcm_model_pkg: reference AES-128 and AES-GCM for the testbenches.
//
// Written byte by byte, like a software implementation, and independently of
// the RTL: the S-box comes from a brute-force search for inverses in
// GF(2^8), the state is an array of 16 bytes, and GHASH multiplies by
// carry-less polynomial multiplication of the bit-reflected operands
// followed by reduction modulo x^128 + x^7 + x^2 + x + 1. The tests of the
// AES blocks check this model against published known-answer vectors first.
package gcm_model_pkg;

  typedef logic [7:0] bytes16_t [16];

  function automatic logic [7:0] gmul8(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r = 0;
    logic [7:0] x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= x;
      x = (x << 1) ^ (x[7] ? 8'h1B : 8'h00);
    end
    return r;
  endfunction

  function automatic logic [7:0] sbox_ref(input logic [7:0] a);
    logic [7:0] inv = 0;
    logic [7:0] s;
    if (a != 0)
      for (int y = 1; y < 256; y++)
        if (gmul8(a, 8'(y)) == 8'h01) inv = 8'(y);
    s = inv;
    for (int i = 1; i <= 4; i++) s ^= (inv << i) | (inv >> (8 - i));
    return s ^ 8'h63;
  endfunction

  logic [7:0] SB [256];
  bit         sb_ready = 0;

  function automatic void init_sbox();
    if (!sb_ready) begin
      for (int i = 0; i < 256; i++) SB[i] = sbox_ref(8'(i));
      sb_ready = 1;
    end
  endfunction

  function automatic logic [127:0] aes_enc(input logic [127:0] key,
                                           input logic [127:0] blk);
    logic [7:0] st [16];
    logic [7:0] t  [16];
    logic [7:0] w  [176];
    logic [7:0] rc = 8'h01;
    logic [127:0] out;
    init_sbox();
    for (int i = 0; i < 16; i++) w[i] = key[127-8*i -: 8];
    for (int i = 16; i < 176; i += 4) begin
      logic [7:0] tmp [4];
      for (int j = 0; j < 4; j++) tmp[j] = w[i-4+j];
      if (i % 16 == 0) begin
        logic [7:0] f;
        f = tmp[0];
        tmp[0] = SB[tmp[1]] ^ rc; tmp[1] = SB[tmp[2]];
        tmp[2] = SB[tmp[3]];      tmp[3] = SB[f];
        rc = gmul8(rc, 8'h02);
      end
      for (int j = 0; j < 4; j++) w[i+j] = w[i-16+j] ^ tmp[j];
    end
    for (int i = 0; i < 16; i++) st[i] = blk[127-8*i -: 8] ^ w[i];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) st[i] = SB[st[i]];
      for (int c = 0; c < 4; c++)
        for (int rw = 0; rw < 4; rw++) t[4*c+rw] = st[4*((c+rw)%4)+rw];
      if (r != 10)
        for (int c = 0; c < 4; c++) begin
          st[4*c+0] = gmul8(t[4*c],2) ^ gmul8(t[4*c+1],3) ^ t[4*c+2] ^ t[4*c+3];
          st[4*c+1] = t[4*c] ^ gmul8(t[4*c+1],2) ^ gmul8(t[4*c+2],3) ^ t[4*c+3];
          st[4*c+2] = t[4*c] ^ t[4*c+1] ^ gmul8(t[4*c+2],2) ^ gmul8(t[4*c+3],3);
          st[4*c+3] = gmul8(t[4*c],3) ^ t[4*c+1] ^ t[4*c+2] ^ gmul8(t[4*c+3],2);
        end
      else
        for (int i = 0; i < 16; i++) st[i] = t[i];
      for (int i = 0; i < 16; i++) st[i] ^= w[16*r+i];
    end
    for (int i = 0; i < 16; i++) out[127-8*i -: 8] = st[i];
    return out;
  endfunction

  function automatic logic [127:0] reflect128(input logic [127:0] a);
    logic [127:0] r;
    for (int i = 0; i < 128; i++) r[i] = a[127-i];
    return r;
  endfunction

  // GHASH product: reflect, carry-less multiply, reduce, reflect back.
  function automatic logic [127:0] ghash_mul(input logic [127:0] x,
                                             input logic [127:0] y);
    logic [255:0] prod = 0;
    logic [127:0] a = reflect128(x);
    logic [127:0] b = reflect128(y);
    for (int i = 0; i < 128; i++) if (a[i]) prod ^= (256'(b) << i);
    for (int i = 255; i >= 128; i--)
      if (prod[i]) prod ^= (256'h87 << (i - 128)) | (256'h1 << i);
    return reflect128(prod[127:0]);
  endfunction

  // AES-GCM with a 96-bit IV and no additional data, over whole blocks.
  // data holds the input blocks; out receives the output blocks. When
  // decrypt is set, data is ciphertext and the tag covers it.
  function automatic logic [127:0] gcm(input logic [127:0] key,
                                       input logic [95:0]  iv,
                                       input bit           decrypt,
                                       input logic [127:0] data [],
                                       output logic [127:0] out []);
    logic [127:0] h   = aes_enc(key, 128'h0);
    logic [127:0] j0  = {iv, 32'h1};
    logic [127:0] x   = 0;
    logic [31:0]  ctr = 32'h1;
    out = new[data.size()];
    for (int i = 0; i < data.size(); i++) begin
      ctr++;
      out[i] = data[i] ^ aes_enc(key, {iv, ctr});
      x = ghash_mul(x ^ (decrypt ? data[i] : out[i]), h);
    end
    x = ghash_mul(x ^ {64'h0, 64'(data.size()) * 64'd128}, h);
    return x ^ aes_enc(key, j0);
  endfunction

endpackage
