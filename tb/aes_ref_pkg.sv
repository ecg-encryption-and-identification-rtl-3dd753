// aes_ref_pkg: reference AES-128 model for the testbenches, written
// independently of the RTL: the S-box is found by brute-force search for the
// GF(2^8) inverse followed by the bitwise affine transform, the key schedule
// is expanded into all 44 words up front, and the state is a 4x4 byte array.
// Blocks use the same convention as the RTL (byte 0 in bits 127:120).
package aes_ref_pkg;

  typedef logic [7:0] st_t [4][4];   // [row][col]

  function automatic logic [7:0] mul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p = p ^ (16'(a) << i);
    for (int i = 15; i >= 8; i--) if (p[i]) p = p ^ (16'h011B << (i - 8));
    return p[7:0];
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] a);
    logic [7:0] inv, r;
    inv = 8'h00;
    for (int c = 1; c < 256; c++) if (mul(a, 8'(c)) == 8'h01) inv = 8'(c);
    for (int i = 0; i < 8; i++)
      r[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8] ^ ((8'h63 >> i) & 1);
    return r;
  endfunction

  logic [7:0] S [256];
  logic [7:0] SI [256];
  bit ready = 0;

  function automatic void init();
    if (ready) return;
    for (int i = 0; i < 256; i++) S[i] = sbox(8'(i));
    for (int i = 0; i < 256; i++) SI[S[i]] = 8'(i);
    ready = 1;
  endfunction

  function automatic void expand(input logic [127:0] key, output logic [31:0] w [44]);
    logic [31:0] t;
    logic [7:0] rc;
    rc = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127 - 32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      t = w[i-1];
      if (i % 4 == 0) begin
        t = {S[t[23:16]], S[t[15:8]], S[t[7:0]], S[t[31:24]]};
        t[31:24] = t[31:24] ^ rc;
        rc = mul(rc, 8'h02);
      end
      w[i] = w[i-4] ^ t;
    end
  endfunction

  function automatic void to_st(input logic [127:0] b, output st_t s);
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) s[r][c] = b[127 - 8*(4*c + r) -: 8];
  endfunction

  function automatic logic [127:0] from_st(input st_t s);
    logic [127:0] b;
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) b[127 - 8*(4*c + r) -: 8] = s[r][c];
    return b;
  endfunction

  function automatic void add_key(inout st_t s, input logic [31:0] w [44], input int rnd);
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++)
      s[r][c] = s[r][c] ^ w[4*rnd + c][31 - 8*r -: 8];
  endfunction

  function automatic logic [127:0] encrypt(input logic [127:0] key, input logic [127:0] pt);
    logic [31:0] w [44];
    st_t s, t;
    logic [7:0] m [4][4] = '{'{2,3,1,1}, '{1,2,3,1}, '{1,1,2,3}, '{3,1,1,2}};
    init();
    expand(key, w);
    to_st(pt, s);
    add_key(s, w, 0);
    for (int rnd = 1; rnd <= 10; rnd++) begin
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) t[r][c] = S[s[r][(c + r) % 4]];
      if (rnd != 10) begin
        for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) begin
          s[r][c] = 0;
          for (int k = 0; k < 4; k++) s[r][c] = s[r][c] ^ mul(m[r][k], t[k][c]);
        end
      end else s = t;
      add_key(s, w, rnd);
    end
    return from_st(s);
  endfunction

  function automatic logic [127:0] decrypt(input logic [127:0] key, input logic [127:0] ct);
    logic [31:0] w [44];
    st_t s, t;
    logic [7:0] m [4][4] = '{'{14,11,13,9}, '{9,14,11,13}, '{13,9,14,11}, '{11,13,9,14}};
    init();
    expand(key, w);
    to_st(ct, s);
    add_key(s, w, 10);
    for (int rnd = 9; rnd >= 0; rnd--) begin
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) t[r][(c + r) % 4] = SI[s[r][c]];
      s = t;
      add_key(s, w, rnd);
      if (rnd != 0) begin
        t = s;
        for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) begin
          s[r][c] = 0;
          for (int k = 0; k < 4; k++) s[r][c] = s[r][c] ^ mul(m[r][k], t[k][c]);
        end
      end
    end
    return from_st(s);
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
