// aes_pkg: types, tables and round functions shared by the AES-128 cipher and
// decipher cores.
//
// A 128-bit block is held as one vector with AES byte 0 (the first byte of the
// 16-byte array) in bits 127:120 and byte 15 in bits 7:0, so a block written as
// a hex literal reads in the same order as the FIPS-197 test vectors. Byte i of
// the block is state row (i mod 4), column (i div 4).
//
// The forward and inverse S-boxes are not pasted in as constants: gen_sbox()
// walks the multiplicative group of GF(2^8) with generator 3 (p = 3^k) while a
// second variable steps through 3^-k, and applies the AES affine map to the
// inverse. The result is a 256-entry constant table fixed at elaboration; in
// hardware each lookup is a 256 x 8 ROM.
//
// Everything else (ShiftRows, MixColumns and their inverses, and one step of
// the AES-128 key schedule forwards and backwards) is pure combinational logic
// in functions. The round structure is FIPS-197's; how the rounds are scheduled
// in time is up to the cores.
package aes_pkg;

  typedef logic [127:0]     block_t;
  typedef logic [255:0][7:0] sbox_table_t;

  function automatic logic [7:0] rotl8(input logic [7:0] x, input int unsigned n);
    return (x << n) | (x >> (8 - n));
  endfunction

  // Multiply by x (i.e. by 2) in GF(2^8) modulo x^8 + x^4 + x^3 + x + 1.
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1B : 8'h00);
  endfunction

  // Inverse of xtime, used to walk the round constant backwards.
  function automatic logic [7:0] xtime_inv(input logic [7:0] a);
    return {a[0], a[7:1] ^ (a[0] ? 7'h0D : 7'h00)};
  endfunction

  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r, aa;
    r  = '0;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r = r ^ aa;
      aa = xtime(aa);
    end
    return r;
  endfunction

  function automatic sbox_table_t gen_sbox();
    sbox_table_t t;
    logic [7:0] p, q, x;
    t = '0;
    p = 8'h01;
    q = 8'h01;
    for (int it = 0; it < 255; it++) begin
      p = p ^ {p[6:0], 1'b0} ^ (p[7] ? 8'h1B : 8'h00);   // p *= 3
      q = q ^ {q[6:0], 1'b0};                            // q /= 3
      q = q ^ {q[5:0], 2'b0};
      q = q ^ {q[3:0], 4'b0};
      if (q[7]) q = q ^ 8'h09;
      x = q ^ rotl8(q, 1) ^ rotl8(q, 2) ^ rotl8(q, 3) ^ rotl8(q, 4);
      t[p] = x ^ 8'h63;
    end
    t[0] = 8'h63;   // 0 has no inverse; affine map of 0
    return t;
  endfunction

  function automatic sbox_table_t gen_inv_sbox();
    sbox_table_t s, t;
    s = gen_sbox();
    t = '0;
    for (int i = 0; i < 256; i++) t[s[i]] = 8'(i);
    return t;
  endfunction

  localparam sbox_table_t SBOX     = gen_sbox();
  localparam sbox_table_t INV_SBOX = gen_inv_sbox();

  function automatic logic [7:0] get_byte(input block_t b, input int unsigned i);
    return b[127 - 8*i -: 8];
  endfunction

  function automatic block_t sub_bytes(input block_t b);
    block_t r;
    for (int i = 0; i < 16; i++) r[127 - 8*i -: 8] = SBOX[b[127 - 8*i -: 8]];
    return r;
  endfunction

  function automatic block_t inv_sub_bytes(input block_t b);
    block_t r;
    for (int i = 0; i < 16; i++) r[127 - 8*i -: 8] = INV_SBOX[b[127 - 8*i -: 8]];
    return r;
  endfunction

  // Row r is rotated left by r columns.
  function automatic block_t shift_rows(input block_t b);
    block_t r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127 - 8*(row + 4*c) -: 8] = get_byte(b, row + 4*((c + row) % 4));
    return r;
  endfunction

  function automatic block_t inv_shift_rows(input block_t b);
    block_t r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127 - 8*(row + 4*c) -: 8] = get_byte(b, row + 4*((c + 4 - row) % 4));
    return r;
  endfunction

  function automatic block_t mix_columns(input block_t b);
    block_t r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(b, 4*c);     a1 = get_byte(b, 4*c + 1);
      a2 = get_byte(b, 4*c + 2); a3 = get_byte(b, 4*c + 3);
      r[127 - 8*(4*c)     -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      r[127 - 8*(4*c + 1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      r[127 - 8*(4*c + 2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      r[127 - 8*(4*c + 3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return r;
  endfunction

  function automatic block_t inv_mix_columns(input block_t b);
    block_t r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_byte(b, 4*c);     a1 = get_byte(b, 4*c + 1);
      a2 = get_byte(b, 4*c + 2); a3 = get_byte(b, 4*c + 3);
      r[127 - 8*(4*c)     -: 8] = gf_mul(a0, 8'h0E) ^ gf_mul(a1, 8'h0B) ^ gf_mul(a2, 8'h0D) ^ gf_mul(a3, 8'h09);
      r[127 - 8*(4*c + 1) -: 8] = gf_mul(a0, 8'h09) ^ gf_mul(a1, 8'h0E) ^ gf_mul(a2, 8'h0B) ^ gf_mul(a3, 8'h0D);
      r[127 - 8*(4*c + 2) -: 8] = gf_mul(a0, 8'h0D) ^ gf_mul(a1, 8'h09) ^ gf_mul(a2, 8'h0E) ^ gf_mul(a3, 8'h0B);
      r[127 - 8*(4*c + 3) -: 8] = gf_mul(a0, 8'h0B) ^ gf_mul(a1, 8'h0D) ^ gf_mul(a2, 8'h09) ^ gf_mul(a3, 8'h0E);
    end
    return r;
  endfunction

  // SubWord(RotWord(w)) ^ {rcon, 0, 0, 0}
  function automatic logic [31:0] key_core(input logic [31:0] w, input logic [7:0] rcon);
    logic [31:0] rw;
    rw = {w[23:0], w[31:24]};
    return {SBOX[rw[31:24]] ^ rcon, SBOX[rw[23:16]], SBOX[rw[15:8]], SBOX[rw[7:0]]};
  endfunction

  // Round key r -> round key r+1; rcon is the constant of round r+1.
  function automatic block_t key_next(input block_t k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3;
    w0 = k[127:96] ^ key_core(k[31:0], rcon);
    w1 = k[95:64] ^ w0;
    w2 = k[63:32] ^ w1;
    w3 = k[31:0]  ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // Round key r -> round key r-1; rcon is the constant that made round key r.
  function automatic block_t key_prev(input block_t k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3;
    w3 = k[31:0]  ^ k[63:32];
    w2 = k[63:32] ^ k[95:64];
    w1 = k[95:64] ^ k[127:96];
    w0 = k[127:96] ^ key_core(w3, rcon);
    return {w0, w1, w2, w3};
  endfunction

  // One encryption round; the last round skips MixColumns.
  function automatic block_t enc_round(input block_t s, input block_t rk, input logic last);
    block_t t;
    t = shift_rows(sub_bytes(s));
    if (!last) t = mix_columns(t);
    return t ^ rk;
  endfunction

  // One round of the (straightforward) inverse cipher; the last round skips
  // InvMixColumns.
  function automatic block_t dec_round(input block_t s, input block_t rk, input logic last);
    block_t t;
    t = inv_sub_bytes(inv_shift_rows(s)) ^ rk;
    if (!last) t = inv_mix_columns(t);
    return t;
  endfunction

endpackage
