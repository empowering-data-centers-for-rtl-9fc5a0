// aes_pkg: arithmetic for AES-256 and the GHASH of GCM (FIPS-197, SP 800-38D).
//
// Blocks are 128-bit vectors with byte 0 in bits [127:120], as they appear
// on a bus. The AES state is column-major: state row r, column c is byte
// r + 4c. The S-box is computed, not tabulated: the multiplicative inverse
// in GF(2^8) (x^254) followed by the affine map with constant 0x63.
// gf128_mul follows the bit order of GCM, where bit 0 of a block is the
// most significant bit of byte 0 and the field polynomial is
// x^128 + x^7 + x^2 + x + 1.
package aes_pkg;

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf8_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0; x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] a);
    logic [7:0] a2, a3, a6, a12, a15, a30, a60, a120, a127, a254, b;
    // x^254 = x^-1 (and 0 -> 0) by an addition chain
    a2   = gf8_mul(a, a);
    a3   = gf8_mul(a2, a);
    a6   = gf8_mul(a3, a3);
    a12  = gf8_mul(a6, a6);
    a15  = gf8_mul(a12, a3);
    a30  = gf8_mul(a15, a15);
    a60  = gf8_mul(a30, a30);
    a120 = gf8_mul(a60, a60);
    a127 = gf8_mul(a120, gf8_mul(a6, a));
    a254 = gf8_mul(a127, a127);
    for (int i = 0; i < 8; i++)
      b[i] = a254[i] ^ a254[(i + 4) % 8] ^ a254[(i + 5) % 8] ^ a254[(i + 6) % 8] ^
             a254[(i + 7) % 8];
    return b ^ 8'h63;
  endfunction

  function automatic logic [7:0] byte_of(input logic [127:0] s, input int i);
    return s[127 - 8 * i -: 8];
  endfunction

  function automatic logic [127:0] sub_bytes(input logic [127:0] s);
    logic [127:0] o;
    for (int i = 0; i < 16; i++) o[127 - 8 * i -: 8] = sbox(byte_of(s, i));
    return o;
  endfunction

  function automatic logic [127:0] shift_rows(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8 * (r + 4 * c) -: 8] = byte_of(s, r + 4 * ((c + r) % 4));
    return o;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = byte_of(s, 4 * c); a1 = byte_of(s, 4 * c + 1);
      a2 = byte_of(s, 4 * c + 2); a3 = byte_of(s, 4 * c + 3);
      o[127 - 8 * (4 * c)     -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127 - 8 * (4 * c + 1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127 - 8 * (4 * c + 2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127 - 8 * (4 * c + 3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {sbox(w[31:24]), sbox(w[23:16]), sbox(w[15:8]), sbox(w[7:0])};
  endfunction

  // GF(2^128) product of GCM: shift-and-add over the 128 bits of x
  function automatic logic [127:0] gf128_mul(input logic [127:0] x, input logic [127:0] y);
    logic [127:0] z, v;
    z = '0; v = y;
    for (int i = 0; i < 128; i++) begin
      if (x[127 - i]) z = z ^ v;
      v = v[0] ? ((v >> 1) ^ {8'he1, 120'h0}) : (v >> 1);
    end
    return z;
  endfunction

endpackage
