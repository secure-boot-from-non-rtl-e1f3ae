// Reference models for the testbenches, written independently of the RTL:
// SHA-256 with its constants computed in floating point from the cube and
// square roots of the primes, AES-128 with the S-box built by the
// multiplicative-generator walk over GF(2^8) and byte-array round functions,
// and bit-serial CRC7/CRC16 over bit queues. Each is also checked against
// published test vectors in the unit testbenches.
package tb_ref_pkg;

  typedef byte unsigned bytes_t[$];

  // ------------------------------------------------------------------ SHA-256
  function automatic bit [31:0] frac32(real x);
    real f;
    f = x - $floor(x);
    return 32'(longint'($floor(f * 4294967296.0)));
  endfunction

  function automatic bit [31:0] ref_k(int i);
    int p, n;
    n = -1;
    p = 1;
    while (n < i) begin
      bit pr;
      p++;
      pr = 1;
      for (int d = 2; d < p; d++) if (p % d == 0) pr = 0;
      if (pr) n++;
    end
    return frac32($pow(real'(p), 1.0 / 3.0));
  endfunction

  function automatic bit [255:0] ref_sha_iv();
    int primes[8] = '{2, 3, 5, 7, 11, 13, 17, 19};
    bit [255:0] h;
    for (int i = 0; i < 8; i++) h[255 - 32*i -: 32] = frac32($sqrt(real'(primes[i])));
    return h;
  endfunction

  function automatic bit [31:0] rr(bit [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  bit [31:0] k_tab[64];
  bit        k_done = 0;

  function automatic bit [255:0] ref_sha_compress(bit [255:0] hin, bit [511:0] blk);
    bit [31:0] w[64], h[8], v[8], t1, t2;
    if (!k_done) begin
      for (int i = 0; i < 64; i++) k_tab[i] = ref_k(i);
      k_done = 1;
    end
    for (int i = 0; i < 8; i++) h[i] = hin[255 - 32*i -: 32];
    for (int i = 0; i < 16; i++) w[i] = blk[511 - 32*i -: 32];
    for (int i = 16; i < 64; i++)
      w[i] = (rr(w[i-2], 17) ^ rr(w[i-2], 19) ^ (w[i-2] >> 10)) + w[i-7] +
             (rr(w[i-15], 7) ^ rr(w[i-15], 18) ^ (w[i-15] >> 3)) + w[i-16];
    v = h;
    for (int i = 0; i < 64; i++) begin
      t1 = v[7] + (rr(v[4], 6) ^ rr(v[4], 11) ^ rr(v[4], 25)) + ((v[4] & v[5]) ^ (~v[4] & v[6])) +
           k_tab[i] + w[i];
      t2 = (rr(v[0], 2) ^ rr(v[0], 13) ^ rr(v[0], 22)) + ((v[0] & v[1]) ^ (v[0] & v[2]) ^ (v[1] & v[2]));
      v[7] = v[6]; v[6] = v[5]; v[5] = v[4]; v[4] = v[3] + t1;
      v[3] = v[2]; v[2] = v[1]; v[1] = v[0]; v[0] = t1 + t2;
    end
    for (int i = 0; i < 8; i++) hin[255 - 32*i -: 32] = h[i] + v[i];
    return hin;
  endfunction

  // SHA-256 of a byte string
  function automatic bit [255:0] ref_sha256(bytes_t m);
    bytes_t     q;
    bit [255:0] h;
    bit [511:0] blk;
    longint     bits;
    q    = m;
    bits = longint'(m.size()) * 8;
    q.push_back(8'h80);
    while (q.size() % 64 != 56) q.push_back(8'h00);
    for (int i = 7; i >= 0; i--) q.push_back(8'(bits >> (8*i)));
    h = ref_sha_iv();
    for (int b = 0; b < q.size() / 64; b++) begin
      for (int i = 0; i < 64; i++) blk[511 - 8*i -: 8] = q[64*b + i];
      h = ref_sha_compress(h, blk);
    end
    return h;
  endfunction

  // ------------------------------------------------------------------ AES-128
  function automatic bit [7:0] rotl8(bit [7:0] x, int n);
    return (x << n) | (x >> (8 - n));
  endfunction

  bit [7:0] sb_tab[256], sbi_tab[256];
  bit       sb_done = 0;

  function automatic void ref_sboxes(output bit [7:0] s[256], output bit [7:0] si[256]);
    bit [7:0] p, q, x;
    if (sb_done) begin
      s  = sb_tab;
      si = sbi_tab;
      return;
    end
    p = 1; q = 1;
    do begin
      p = p ^ (p << 1) ^ ((p & 8'h80) != 0 ? 8'h1b : 8'h00);
      q ^= q << 1;
      q ^= q << 2;
      q ^= q << 4;
      if ((q & 8'h80) != 0) q ^= 8'h09;
      x = q ^ rotl8(q, 1) ^ rotl8(q, 2) ^ rotl8(q, 3) ^ rotl8(q, 4);
      s[p] = x ^ 8'h63;
    end while (p != 1);
    s[0] = 8'h63;
    for (int i = 0; i < 256; i++) si[s[i]] = 8'(i);
    sb_tab  = s;
    sbi_tab = si;
    sb_done = 1;
  endfunction

  function automatic bit [7:0] gm(bit [7:0] a, bit [7:0] b);
    bit [7:0] r;
    r = 0;
    while (b != 0) begin
      if (b[0]) r ^= a;
      a = (a << 1) ^ (a[7] ? 8'h1b : 8'h00);
      b >>= 1;
    end
    return r;
  endfunction

  function automatic void ref_key_schedule(bit [127:0] key, output bit [7:0] rk[11][16]);
    bit [7:0] s[256], si[256], t[4], rc;
    ref_sboxes(s, si);
    for (int i = 0; i < 16; i++) rk[0][i] = key[127 - 8*i -: 8];
    rc = 1;
    for (int r = 1; r <= 10; r++) begin
      t[0] = s[rk[r-1][13]] ^ rc; t[1] = s[rk[r-1][14]]; t[2] = s[rk[r-1][15]]; t[3] = s[rk[r-1][12]];
      for (int i = 0; i < 16; i++) begin
        rk[r][i] = rk[r-1][i] ^ ((i < 4) ? t[i] : rk[r][i-4]);
      end
      rc = gm(rc, 8'h02);
    end
  endfunction

  function automatic bit [127:0] ref_aes(bit [127:0] key, bit [127:0] din, bit decrypt);
    bit [7:0] rk[11][16];
    ref_key_schedule(key, rk);
    return ref_aes_rk(rk, din, decrypt);
  endfunction

  function automatic bit [127:0] ref_aes_rk(bit [7:0] rk[11][16], bit [127:0] din, bit decrypt);
    bit [7:0] s[256], si[256], st[16], tmp[16];
    ref_sboxes(s, si);
    for (int i = 0; i < 16; i++) st[i] = din[127 - 8*i -: 8];
    if (!decrypt) begin
      for (int i = 0; i < 16; i++) st[i] ^= rk[0][i];
      for (int r = 1; r <= 10; r++) begin
        for (int i = 0; i < 16; i++) tmp[i] = s[st[(i + 4*(i % 4)) % 16]];
        if (r != 10)
          for (int c = 0; c < 4; c++) begin
            st[4*c]   = gm(tmp[4*c], 2) ^ gm(tmp[4*c+1], 3) ^ tmp[4*c+2] ^ tmp[4*c+3];
            st[4*c+1] = tmp[4*c] ^ gm(tmp[4*c+1], 2) ^ gm(tmp[4*c+2], 3) ^ tmp[4*c+3];
            st[4*c+2] = tmp[4*c] ^ tmp[4*c+1] ^ gm(tmp[4*c+2], 2) ^ gm(tmp[4*c+3], 3);
            st[4*c+3] = gm(tmp[4*c], 3) ^ tmp[4*c+1] ^ tmp[4*c+2] ^ gm(tmp[4*c+3], 2);
          end
        else st = tmp;
        for (int i = 0; i < 16; i++) st[i] ^= rk[r][i];
      end
    end else begin
      for (int i = 0; i < 16; i++) st[i] ^= rk[10][i];
      for (int r = 9; r >= 0; r--) begin
        // inverse shift rows and inverse S-box
        for (int i = 0; i < 16; i++) tmp[(i + 4*(i % 4)) % 16] = si[st[i]];
        for (int i = 0; i < 16; i++) tmp[i] ^= rk[r][i];
        if (r != 0)
          for (int c = 0; c < 4; c++) begin
            st[4*c]   = gm(tmp[4*c], 14) ^ gm(tmp[4*c+1], 11) ^ gm(tmp[4*c+2], 13) ^ gm(tmp[4*c+3], 9);
            st[4*c+1] = gm(tmp[4*c], 9)  ^ gm(tmp[4*c+1], 14) ^ gm(tmp[4*c+2], 11) ^ gm(tmp[4*c+3], 13);
            st[4*c+2] = gm(tmp[4*c], 13) ^ gm(tmp[4*c+1], 9)  ^ gm(tmp[4*c+2], 14) ^ gm(tmp[4*c+3], 11);
            st[4*c+3] = gm(tmp[4*c], 11) ^ gm(tmp[4*c+1], 13) ^ gm(tmp[4*c+2], 9)  ^ gm(tmp[4*c+3], 14);
          end
        else st = tmp;
      end
    end
    for (int i = 0; i < 16; i++) din[127 - 8*i -: 8] = st[i];
    return din;
  endfunction

  // a whole 512-byte sector, block by block (ECB)
  function automatic bit [4095:0] ref_aes_sector(bit [127:0] key, bit [4095:0] d, bit decrypt);
    bit [7:0] rk[11][16];
    ref_key_schedule(key, rk);
    for (int w = 0; w < 32; w++) d[4095 - 128*w -: 128] = ref_aes_rk(rk, d[4095 - 128*w -: 128], decrypt);
    return d;
  endfunction

  // ------------------------------------------------------------------ CRCs
  function automatic bit [6:0] ref_crc7(bit b[$]);
    bit [6:0] c;
    c = 0;
    foreach (b[i]) begin
      bit fb;
      fb = c[6] ^ b[i];
      c  = c << 1;
      if (fb) c ^= 7'h09;
    end
    return c;
  endfunction

  function automatic bit [15:0] ref_crc16(bit b[$]);
    bit [15:0] c;
    c = 0;
    foreach (b[i]) begin
      bit fb;
      fb = c[15] ^ b[i];
      c  = c << 1;
      if (fb) c ^= 16'h1021;
    end
    return c;
  endfunction

  // CRC16 of each DAT line for a sector sent high nibble first
  function automatic bit [63:0] ref_sector_crc(bit [4095:0] d);
    bit q[4][$];
    bit [63:0] r;
    for (int n = 0; n < 1024; n++)
      for (int j = 0; j < 4; j++) q[j].push_back(d[4095 - 4*n - (3 - j)]);
    for (int j = 0; j < 4; j++) r[16*j +: 16] = ref_crc16(q[j]);
    return r;
  endfunction

endpackage
