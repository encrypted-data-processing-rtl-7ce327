// tb_ref_pkg: reference models for the testbenches, written independently
// of the RTL. AES works on byte arrays with S-box tables generated by the
// classic p/q walk over GF(2^8) (p multiplied by 3, q divided by 3);
// GF(2^128) products for GCM are formed by bit-reversal, a carry-less
// 256-bit product and reduction by x^128 + x^7 + x^2 + x + 1; the XTS alpha
// step works on a little-endian byte array. Call ref_init() once first.
package tb_ref_pkg;

  byte unsigned SB[256];
  byte unsigned ISB[256];

  function automatic byte unsigned rotl(byte unsigned x, int n);
    return byte'((x << n) | (x >> (8 - n)));
  endfunction

  function automatic void ref_init();
    byte unsigned p, q, x;
    p = 1; q = 1;
    do begin
      p = p ^ byte'(p << 1) ^ ((p & 8'h80) ? 8'h1b : 8'h00);
      q ^= byte'(q << 1); q ^= byte'(q << 2); q ^= byte'(q << 4);
      if (q & 8'h80) q ^= 8'h09;
      x = q ^ rotl(q, 1) ^ rotl(q, 2) ^ rotl(q, 3) ^ rotl(q, 4);
      SB[p] = x ^ 8'h63;
    end while (p != 1);
    SB[0] = 8'h63;
    for (int i = 0; i < 256; i++) ISB[SB[i]] = byte'(i);
  endfunction

  function automatic byte unsigned xt(byte unsigned b);
    return byte'(b << 1) ^ ((b & 8'h80) ? 8'h1b : 8'h00);
  endfunction

  function automatic byte unsigned mul(byte unsigned a, byte unsigned b);
    byte unsigned r = 0;
    while (b != 0) begin
      if (b & 1) r ^= a;
      a = xt(a);
      b >>= 1;
    end
    return r;
  endfunction

  typedef byte unsigned bytes16_t[16];

  function automatic bytes16_t to_bytes(logic [127:0] v);
    bytes16_t b;
    for (int i = 0; i < 16; i++) b[i] = v[127 - 8*i -: 8];
    return b;
  endfunction

  function automatic logic [127:0] from_bytes(bytes16_t b);
    logic [127:0] v;
    for (int i = 0; i < 16; i++) v[127 - 8*i -: 8] = b[i];
    return v;
  endfunction

  // Full key schedule, returned as 4*(nr+1) words packed in an array.
  typedef logic [31:0] words_t[60];

  function automatic words_t expand(logic [255:0] key, int nk);
    words_t w;
    logic [31:0] t;
    byte unsigned rc = 1;
    int nr = nk + 6;
    for (int i = 0; i < nk; i++) w[i] = key[255 - 32*i -: 32];
    for (int i = nk; i < 4*(nr+1); i++) begin
      t = w[i-1];
      if (i % nk == 0) begin
        t = {t[23:0], t[31:24]};
        t = {SB[t[31:24]], SB[t[23:16]], SB[t[15:8]], SB[t[7:0]]};
        t[31:24] ^= rc;
        rc = xt(rc);
      end else if (nk > 6 && i % nk == 4) begin
        t = {SB[t[31:24]], SB[t[23:16]], SB[t[15:8]], SB[t[7:0]]};
      end
      w[i] = w[i-nk] ^ t;
    end
    return w;
  endfunction

  function automatic logic [127:0] rk(words_t w, int r);
    return {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
  endfunction

  // key is left-aligned in 256 bits; nk = 4 or 8
  function automatic logic [127:0] aes_enc(logic [255:0] key, int nk, logic [127:0] pt);
    words_t w = expand(key, nk);
    int nr = nk + 6;
    bytes16_t s, t;
    s = to_bytes(pt ^ rk(w, 0));
    for (int r = 1; r <= nr; r++) begin
      for (int i = 0; i < 16; i++) t[i] = SB[s[(i + 4*(i % 4)) % 16]];
      if (r != nr)
        for (int c = 0; c < 4; c++) begin
          s[4*c]   = mul(t[4*c],2) ^ mul(t[4*c+1],3) ^ t[4*c+2] ^ t[4*c+3];
          s[4*c+1] = t[4*c] ^ mul(t[4*c+1],2) ^ mul(t[4*c+2],3) ^ t[4*c+3];
          s[4*c+2] = t[4*c] ^ t[4*c+1] ^ mul(t[4*c+2],2) ^ mul(t[4*c+3],3);
          s[4*c+3] = mul(t[4*c],3) ^ t[4*c+1] ^ t[4*c+2] ^ mul(t[4*c+3],2);
        end
      else s = t;
      s = to_bytes(from_bytes(s) ^ rk(w, r));
    end
    return from_bytes(s);
  endfunction

  function automatic logic [127:0] aes_dec(logic [255:0] key, int nk, logic [127:0] ct);
    words_t w = expand(key, nk);
    int nr = nk + 6;
    bytes16_t s, t;
    s = to_bytes(ct ^ rk(w, nr));
    for (int r = nr - 1; r >= 0; r--) begin
      for (int i = 0; i < 16; i++) t[(i + 4*(i % 4)) % 16] = ISB[s[i]];
      t = to_bytes(from_bytes(t) ^ rk(w, r));
      if (r != 0)
        for (int c = 0; c < 4; c++) begin
          s[4*c]   = mul(t[4*c],14) ^ mul(t[4*c+1],11) ^ mul(t[4*c+2],13) ^ mul(t[4*c+3],9);
          s[4*c+1] = mul(t[4*c],9) ^ mul(t[4*c+1],14) ^ mul(t[4*c+2],11) ^ mul(t[4*c+3],13);
          s[4*c+2] = mul(t[4*c],13) ^ mul(t[4*c+1],9) ^ mul(t[4*c+2],14) ^ mul(t[4*c+3],11);
          s[4*c+3] = mul(t[4*c],11) ^ mul(t[4*c+1],13) ^ mul(t[4*c+2],9) ^ mul(t[4*c+3],14);
        end
      else s = t;
    end
    return from_bytes(s);
  endfunction

  function automatic logic [127:0] bitrev128(logic [127:0] v);
    logic [127:0] r;
    for (int i = 0; i < 128; i++) r[i] = v[127 - i];
    return r;
  endfunction

  // GCM product: in GCM the leftmost bit is x^0, so reverse, multiply as
  // ordinary polynomials, reduce, and reverse back.
  function automatic logic [127:0] gcm_mul(logic [127:0] a, logic [127:0] b);
    logic [255:0] p = '0;
    logic [127:0] ra = bitrev128(a);
    logic [127:0] rb = bitrev128(b);
    for (int i = 0; i < 128; i++) if (rb[i]) p ^= ({128'h0, ra} << i);
    for (int i = 254; i >= 128; i--)
      if (p[i]) p ^= (256'h87 << (i - 128)) ^ (256'h1 << i);
    return bitrev128(p[127:0]);
  endfunction

  function automatic logic [127:0] alpha(logic [127:0] t);
    bytes16_t b = to_bytes(t);
    byte unsigned carry = 0, nc;
    for (int i = 0; i < 16; i++) begin
      nc = b[i] >> 7;
      b[i] = byte'(b[i] << 1) | carry;
      carry = nc;
    end
    if (carry) b[0] ^= 8'h87;
    return from_bytes(b);
  endfunction

  typedef logic [127:0] line8_t[8];

  // XTS over one line of eight sections with 128-bit K1 and K2 (nk = 4)
  // or 256-bit keys (nk = 8), keys left-aligned in 256 bits.
  function automatic line8_t xts(logic [255:0] k1, logic [255:0] k2, int nk,
                                 logic [127:0] x, line8_t din, bit decrypt);
    line8_t o;
    logic [127:0] t = aes_enc(k2, nk, x);
    for (int i = 0; i < 8; i++) begin
      o[i] = decrypt ? (aes_dec(k1, nk, din[i] ^ t) ^ t) : (aes_enc(k1, nk, din[i] ^ t) ^ t);
      t = alpha(t);
    end
    return o;
  endfunction

  // Digest of Fig. 11: Y = X*H, Y = (Y ^ C_i)*H for i = 0..7,
  // D = leading 64 bits of Y ^ E_K2(X).
  function automatic logic [63:0] digest(logic [255:0] k2, int nk, logic [127:0] x, line8_t c);
    logic [127:0] h = aes_enc(k2, nk, 128'h0);
    logic [127:0] y = gcm_mul(x, h);
    for (int i = 0; i < 8; i++) y = gcm_mul(y ^ c[i], h);
    y ^= aes_enc(k2, nk, x);
    return y[127:64];
  endfunction

  function automatic logic [1023:0] pack_line(line8_t l);
    logic [1023:0] v;
    for (int i = 0; i < 8; i++) v[1023 - 128*i -: 128] = l[i];
    return v;
  endfunction

  function automatic line8_t unpack_line(logic [1023:0] v);
    line8_t l;
    for (int i = 0; i < 8; i++) l[i] = v[1023 - 128*i -: 128];
    return l;
  endfunction

endpackage
