// SHA-256 constants and round functions (FIPS 180-4). The 64 round constants
// K and the 8 initial hash words are not typed in: they are computed at
// elaboration from their definition, the first 32 bits of the fractional
// parts of the cube roots (K) and square roots (H0) of the first primes,
// using exact integer roots of p * 2^96 and p * 2^64.
package sha256_pkg;

  function automatic logic [127:0] icbrt(input logic [127:0] n);
    logic [127:0] lo, hi, mid;
    lo = '0;
    hi = 128'd1 << 40;
    while (hi - lo > 1) begin
      mid = (lo + hi) >> 1;
      if (mid * mid * mid <= n) lo = mid;
      else                      hi = mid;
    end
    return lo;
  endfunction

  function automatic logic [127:0] isqrt(input logic [127:0] n);
    logic [127:0] lo, hi, mid;
    lo = '0;
    hi = 128'd1 << 40;
    while (hi - lo > 1) begin
      mid = (lo + hi) >> 1;
      if (mid * mid <= n) lo = mid;
      else                hi = mid;
    end
    return lo;
  endfunction

  function automatic int nth_prime(input int n);
    int cnt, p;
    bit is_p;
    cnt = 0;
    p   = 1;
    while (cnt <= n) begin
      p++;
      is_p = 1'b1;
      for (int d = 2; d * d <= p; d++) if (p % d == 0) is_p = 1'b0;
      if (is_p) cnt++;
    end
    return p;
  endfunction

  function automatic logic [2047:0] gen_k();
    logic [2047:0] t;
    logic [127:0]  r;
    for (int i = 0; i < 64; i++) begin
      r = icbrt(128'(nth_prime(i)) << 96);
      t[i*32 +: 32] = r[31:0];
    end
    return t;
  endfunction

  function automatic logic [255:0] gen_h0();
    logic [255:0] t;
    logic [127:0] r;
    for (int i = 0; i < 8; i++) begin
      r = isqrt(128'(nth_prime(i)) << 64);
      t[255 - 32*i -: 32] = r[31:0];
    end
    return t;
  endfunction

  localparam logic [2047:0] K_TABLE = gen_k();
  localparam logic [255:0]  H0      = gen_h0();   // {H0[0], ..., H0[7]}

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [31:0] bsig0(input logic [31:0] x);
    return rotr(x, 2) ^ rotr(x, 13) ^ rotr(x, 22);
  endfunction
  function automatic logic [31:0] bsig1(input logic [31:0] x);
    return rotr(x, 6) ^ rotr(x, 11) ^ rotr(x, 25);
  endfunction
  function automatic logic [31:0] ssig0(input logic [31:0] x);
    return rotr(x, 7) ^ rotr(x, 18) ^ (x >> 3);
  endfunction
  function automatic logic [31:0] ssig1(input logic [31:0] x);
    return rotr(x, 17) ^ rotr(x, 19) ^ (x >> 10);
  endfunction

endpackage
