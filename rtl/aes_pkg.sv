// AES-128 helpers (FIPS-197) shared by the key expansion and the cipher
// pipeline. The S-box and its inverse are not typed in as tables: they are
// computed at elaboration from their definition, S(x) = A * x^-1 + 0x63 in
// GF(2^8) with the reduction polynomial x^8 + x^4 + x^3 + x + 1 (x^-1 taken as
// x^254, 0 mapping to 0), and stored in constant 2048-bit vectors. The state
// is a 128-bit vector with byte 0 of the block in bits [127:120]; column c
// holds bytes 4c..4c+3.
package aes_pkg;

  typedef logic [127:0] block_t;

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic logic [7:0] ginv(input logic [7:0] a);
    // a^254 by square and multiply: 254 = 0b11111110
    logic [7:0] r, sq;
    r  = 8'h01;
    sq = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gmul(r, sq);
      sq = gmul(sq, sq);
    end
    return r;
  endfunction

  function automatic logic [7:0] affine(input logic [7:0] b);
    logic [7:0] s;
    for (int i = 0; i < 8; i++)
      s[i] = b[i] ^ b[(i + 4) % 8] ^ b[(i + 5) % 8] ^ b[(i + 6) % 8] ^ b[(i + 7) % 8];
    return s ^ 8'h63;
  endfunction

  function automatic logic [2047:0] gen_sbox();
    logic [2047:0] t;
    for (int x = 0; x < 256; x++) t[x*8 +: 8] = affine(ginv(8'(x)));
    return t;
  endfunction

  function automatic logic [2047:0] gen_inv_sbox();
    logic [2047:0] t, s;
    s = gen_sbox();
    for (int x = 0; x < 256; x++) t[s[x*8 +: 8]*8 +: 8] = 8'(x);
    return t;
  endfunction

  localparam logic [2047:0] SBOX     = gen_sbox();
  localparam logic [2047:0] INV_SBOX = gen_inv_sbox();

  function automatic logic [7:0] sbox(input logic [7:0] x);
    return SBOX[x*8 +: 8];
  endfunction

  function automatic logic [7:0] inv_sbox(input logic [7:0] x);
    return INV_SBOX[x*8 +: 8];
  endfunction

  // byte i of the state (i = 0 is the first byte of the block)
  function automatic logic [7:0] sb(input block_t s, input int i);
    return s[127 - 8*i -: 8];
  endfunction

  function automatic block_t sub_bytes(input block_t s);
    block_t r;
    for (int i = 0; i < 16; i++) r[127 - 8*i -: 8] = sbox(sb(s, i));
    return r;
  endfunction

  function automatic block_t inv_sub_bytes(input block_t s);
    block_t r;
    for (int i = 0; i < 16; i++) r[127 - 8*i -: 8] = inv_sbox(sb(s, i));
    return r;
  endfunction

  // byte (row r, column c) is byte 4c + r; row r rotates left by r columns
  function automatic block_t shift_rows(input block_t s);
    block_t r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127 - 8*(4*c + row) -: 8] = sb(s, 4*((c + row) % 4) + row);
    return r;
  endfunction

  function automatic block_t inv_shift_rows(input block_t s);
    block_t r;
    for (int c = 0; c < 4; c++)
      for (int row = 0; row < 4; row++)
        r[127 - 8*(4*((c + row) % 4) + row) -: 8] = sb(s, 4*c + row);
    return r;
  endfunction

  function automatic block_t mix_columns(input block_t s);
    block_t r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = sb(s, 4*c); a1 = sb(s, 4*c+1); a2 = sb(s, 4*c+2); a3 = sb(s, 4*c+3);
      r[127 - 8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      r[127 - 8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      r[127 - 8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      r[127 - 8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return r;
  endfunction

  function automatic block_t inv_mix_columns(input block_t s);
    block_t r;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = sb(s, 4*c); a1 = sb(s, 4*c+1); a2 = sb(s, 4*c+2); a3 = sb(s, 4*c+3);
      r[127 - 8*(4*c)   -: 8] = gmul(a0, 8'h0e) ^ gmul(a1, 8'h0b) ^ gmul(a2, 8'h0d) ^ gmul(a3, 8'h09);
      r[127 - 8*(4*c+1) -: 8] = gmul(a0, 8'h09) ^ gmul(a1, 8'h0e) ^ gmul(a2, 8'h0b) ^ gmul(a3, 8'h0d);
      r[127 - 8*(4*c+2) -: 8] = gmul(a0, 8'h0d) ^ gmul(a1, 8'h09) ^ gmul(a2, 8'h0e) ^ gmul(a3, 8'h0b);
      r[127 - 8*(4*c+3) -: 8] = gmul(a0, 8'h0b) ^ gmul(a1, 8'h0d) ^ gmul(a2, 8'h09) ^ gmul(a3, 8'h0e);
    end
    return r;
  endfunction

  // one word of the key schedule: SubWord(RotWord(w)) ^ {rcon, 0, 0, 0}
  function automatic logic [31:0] sub_rot_word(input logic [31:0] w, input logic [7:0] rcon);
    return {sbox(w[23:16]) ^ rcon, sbox(w[15:8]), sbox(w[7:0]), sbox(w[31:24])};
  endfunction

endpackage
