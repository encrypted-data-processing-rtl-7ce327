// aes_pkg: AES (FIPS-197) byte and column operations shared by the key
// schedule and the round datapath.
//
// The S-box is computed, not tabulated: the multiplicative inverse in
// GF(2^8) modulo x^8+x^4+x^3+x+1 is taken as b^254 (squarings and
// multiplications), followed by the FIPS-197 affine map
// s = b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63.
// The inverse S-box undoes the affine map first and then inverts.
//
// Byte order: a 128-bit block is held with byte 0 (the first byte of the
// FIPS-197 input array) in bits [127:120]; the AES state is column-major,
// so column c is bits [127-32c -: 32].
package aes_pkg;

  // Key length. The paper allows 128- or 256-bit XTS keys and sizes its
  // timing on 128-bit keys (10 rounds).
  parameter int KEY_BITS = 128;
  parameter int NK       = KEY_BITS / 32;   // key words
  parameter int NR       = NK + 6;          // rounds
  parameter int NW       = 4 * (NR + 1);    // round-key words

  typedef logic [127:0]       block_t;
  typedef logic [NR:0][127:0] round_keys_t;

  function automatic logic [7:0] xtime(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p;
    logic [7:0] x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = xtime(x);
    end
    return p;
  endfunction

  // b^254 = b^-1 in GF(2^8), 0 maps to 0.
  function automatic logic [7:0] ginv(input logic [7:0] b);
    logic [7:0] sq;
    logic [7:0] acc;
    sq  = gmul(b, b);        // b^2
    acc = sq;
    for (int i = 0; i < 6; i++) begin
      sq  = gmul(sq, sq);    // b^4 .. b^128
      acc = gmul(acc, sq);
    end
    return acc;
  endfunction

  function automatic logic [7:0] rotl8(input logic [7:0] b, input int n);
    return (b << n) | (b >> (8 - n));
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] b);
    logic [7:0] i;
    i = ginv(b);
    return i ^ rotl8(i, 1) ^ rotl8(i, 2) ^ rotl8(i, 3) ^ rotl8(i, 4) ^ 8'h63;
  endfunction

  function automatic logic [7:0] inv_sbox(input logic [7:0] s);
    logic [7:0] b;
    b = rotl8(s, 1) ^ rotl8(s, 3) ^ rotl8(s, 6) ^ 8'h05;
    return ginv(b);
  endfunction

  function automatic logic [7:0] get_byte(input block_t s, input int idx);
    return s[127 - 8*idx -: 8];
  endfunction

  function automatic block_t sub_shift(input block_t s);
    block_t r;
    // byte (row r, column c) is index 4c+r; ShiftRows takes it from column c+r
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127 - 8*(4*c + row) -: 8] = sbox(get_byte(s, 4*((c + row) % 4) + row));
    return r;
  endfunction

  function automatic block_t inv_shift_sub(input block_t s);
    block_t r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127 - 8*(4*((c + row) % 4) + row) -: 8] = inv_sbox(get_byte(s, 4*c + row));
    return r;
  endfunction

  function automatic block_t mix_columns(input block_t s);
    block_t r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c); a1 = get_byte(s, 4*c+1);
      a2 = get_byte(s, 4*c+2); a3 = get_byte(s, 4*c+3);
      r[127 - 32*c      -: 8] = xtime(a0) ^ xtime(a1) ^ a1 ^ a2 ^ a3;
      r[127 - 32*c - 8  -: 8] = a0 ^ xtime(a1) ^ xtime(a2) ^ a2 ^ a3;
      r[127 - 32*c - 16 -: 8] = a0 ^ a1 ^ xtime(a2) ^ xtime(a3) ^ a3;
      r[127 - 32*c - 24 -: 8] = xtime(a0) ^ a0 ^ a1 ^ a2 ^ xtime(a3);
    end
    return r;
  endfunction

  function automatic block_t inv_mix_columns(input block_t s);
    block_t r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(s, 4*c); a1 = get_byte(s, 4*c+1);
      a2 = get_byte(s, 4*c+2); a3 = get_byte(s, 4*c+3);
      r[127 - 32*c      -: 8] = gmul(a0, 8'h0e) ^ gmul(a1, 8'h0b) ^ gmul(a2, 8'h0d) ^ gmul(a3, 8'h09);
      r[127 - 32*c - 8  -: 8] = gmul(a0, 8'h09) ^ gmul(a1, 8'h0e) ^ gmul(a2, 8'h0b) ^ gmul(a3, 8'h0d);
      r[127 - 32*c - 16 -: 8] = gmul(a0, 8'h0d) ^ gmul(a1, 8'h09) ^ gmul(a2, 8'h0e) ^ gmul(a3, 8'h0b);
      r[127 - 32*c - 24 -: 8] = gmul(a0, 8'h0b) ^ gmul(a1, 8'h0d) ^ gmul(a2, 8'h09) ^ gmul(a3, 8'h0e);
    end
    return r;
  endfunction

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {sbox(w[31:24]), sbox(w[23:16]), sbox(w[15:8]), sbox(w[7:0])};
  endfunction

endpackage
