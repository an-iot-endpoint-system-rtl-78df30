// aes_pkg: AES-128 building blocks (FIPS-197) shared by the HWCRYPT AES
// datapath and key generator.
//
// A 128-bit block is held with byte 0 of FIPS-197 in bits [127:120]; byte i
// of the state is row i%4 of column i/4. The S-box is not a lookup table but
// computed as in the standard: multiplicative inverse in GF(2^8) modulo
// x^8+x^4+x^3+x+1 (as x^254) followed by the affine map with constant 8'h63;
// the inverse S-box undoes the affine map first. All functions are pure
// combinational logic.
package aes_pkg;

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0; x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic logic [7:0] ginv(input logic [7:0] a);
    // a^254 = a^-1 (and 0 -> 0)
    logic [7:0] r, sq;
    r = 8'h01; sq = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gmul(r, sq);   // 254 = 0b11111110
      sq = gmul(sq, sq);
    end
    return r;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] a);
    logic [7:0] b, s;
    b = ginv(a);
    for (int i = 0; i < 8; i++)
      s[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  function automatic logic [7:0] inv_sbox(input logic [7:0] a);
    logic [7:0] b;
    for (int i = 0; i < 8; i++)
      b[i] = a[(i+2)%8] ^ a[(i+5)%8] ^ a[(i+7)%8];
    return ginv(b ^ 8'h05);
  endfunction

  function automatic logic [7:0] get_b(input logic [127:0] s, input int i);
    return s[127 - 8*i -: 8];
  endfunction

  function automatic logic [127:0] sub_bytes(input logic [127:0] s);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[127 - 8*i -: 8] = sbox(get_b(s, i));
    return r;
  endfunction

  function automatic logic [127:0] inv_sub_bytes(input logic [127:0] s);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[127 - 8*i -: 8] = inv_sbox(get_b(s, i));
    return r;
  endfunction

  // Row r is rotated left by r columns (right for the inverse).
  function automatic logic [127:0] shift_rows(input logic [127:0] s, input bit inv);
    logic [127:0] r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++) begin
        int src;
        src = inv ? ((c - row + 4) % 4) : ((c + row) % 4);
        r[127 - 8*(row + 4*c) -: 8] = get_b(s, row + 4*src);
      end
    return r;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s, input bit inv);
    logic [127:0] r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_b(s, 4*c); a1 = get_b(s, 4*c+1); a2 = get_b(s, 4*c+2); a3 = get_b(s, 4*c+3);
      if (!inv) begin
        r[127 - 8*(4*c)   -: 8] = gmul(a0,8'h02) ^ gmul(a1,8'h03) ^ a2 ^ a3;
        r[127 - 8*(4*c+1) -: 8] = a0 ^ gmul(a1,8'h02) ^ gmul(a2,8'h03) ^ a3;
        r[127 - 8*(4*c+2) -: 8] = a0 ^ a1 ^ gmul(a2,8'h02) ^ gmul(a3,8'h03);
        r[127 - 8*(4*c+3) -: 8] = gmul(a0,8'h03) ^ a1 ^ a2 ^ gmul(a3,8'h02);
      end else begin
        r[127 - 8*(4*c)   -: 8] = gmul(a0,8'h0e) ^ gmul(a1,8'h0b) ^ gmul(a2,8'h0d) ^ gmul(a3,8'h09);
        r[127 - 8*(4*c+1) -: 8] = gmul(a0,8'h09) ^ gmul(a1,8'h0e) ^ gmul(a2,8'h0b) ^ gmul(a3,8'h0d);
        r[127 - 8*(4*c+2) -: 8] = gmul(a0,8'h0d) ^ gmul(a1,8'h09) ^ gmul(a2,8'h0e) ^ gmul(a3,8'h0b);
        r[127 - 8*(4*c+3) -: 8] = gmul(a0,8'h0b) ^ gmul(a1,8'h0d) ^ gmul(a2,8'h09) ^ gmul(a3,8'h0e);
      end
    end
    return r;
  endfunction

  // One forward cipher round; the last round omits MixColumns.
  function automatic logic [127:0] enc_round(input logic [127:0] s, input logic [127:0] rk, input bit last);
    logic [127:0] t;
    t = shift_rows(sub_bytes(s), 1'b0);
    if (!last) t = mix_columns(t, 1'b0);
    return t ^ rk;
  endfunction

  // One inverse cipher round (FIPS-197 InvCipher order); the last omits
  // InvMixColumns.
  function automatic logic [127:0] dec_round(input logic [127:0] s, input logic [127:0] rk, input bit last);
    logic [127:0] t;
    t = inv_sub_bytes(shift_rows(s, 1'b1)) ^ rk;
    if (!last) t = mix_columns(t, 1'b1);
    return t;
  endfunction

  function automatic logic [7:0] rcon(input logic [3:0] r);  // r = 1..10
    logic [7:0] c;
    c = 8'h01;
    for (int i = 1; i < 10; i++) if (i < int'(r)) c = xtime(c);
    return c;
  endfunction

  function automatic logic [31:0] sub_rot(input logic [31:0] w);
    logic [31:0] t;
    t = {w[23:0], w[31:24]};
    return {sbox(t[31:24]), sbox(t[23:16]), sbox(t[15:8]), sbox(t[7:0])};
  endfunction

  // Round key r from round key r-1 (r = 1..10).
  function automatic logic [127:0] key_next(input logic [127:0] k, input logic [3:0] r);
    logic [31:0] w0, w1, w2, w3;
    w0 = k[127:96] ^ sub_rot(k[31:0]) ^ {rcon(r), 24'h0};
    w1 = k[95:64] ^ w0;
    w2 = k[63:32] ^ w1;
    w3 = k[31:0]  ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // Round key r-1 from round key r (r = 1..10).
  function automatic logic [127:0] key_prev(input logic [127:0] k, input logic [3:0] r);
    logic [31:0] p0, p1, p2, p3;
    p3 = k[31:0]  ^ k[63:32];
    p2 = k[63:32] ^ k[95:64];
    p1 = k[95:64] ^ k[127:96];
    p0 = k[127:96] ^ sub_rot(p3) ^ {rcon(r), 24'h0};
    return {p0, p1, p2, p3};
  endfunction

endpackage
