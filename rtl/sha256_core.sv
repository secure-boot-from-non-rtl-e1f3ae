// SHA-256 compression function, one round per clock (FIPS 180-4).
//
// A pulse on `init` hashes `block` (512 bits, first message byte in bits
// [511:504]) starting from the standard initial value; a pulse on `next`
// hashes it on top of the digest left by the previous block. Message padding
// is the caller's job. `ready` is low while a block is processed: 64 round
// clocks plus one clock to add the working variables into the digest, so a
// block takes 65 clocks from the pulse to `ready` and `digest` being valid.
// `digest` is {H0, ..., H7} and stays valid until the next pulse. The unit is
// shared by the key generator (ID checks and key derivation) and the data
// controller (MBR and boot image digests), as the paper shares one SHA core
// between them; the one-round-per-clock structure is this design's choice.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         next,
  input  logic [511:0] block,
  output logic         ready,
  output logic [255:0] digest
);
  import sha256_pkg::*;

  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [6:0]  round;
  logic        busy;

  logic [31:0] t1, t2, wnew, k;
  assign k    = K_TABLE[round[5:0]*32 +: 32];
  assign t1   = h + bsig1(e) + ((e & f) ^ (~e & g)) + k + w[0];
  assign t2   = bsig0(a) + ((a & b) ^ (a & c) ^ (b & c));
  assign wnew = ssig1(w[14]) + w[9] + ssig0(w[1]) + w[0];

  assign ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      round  <= '0;
      digest <= H0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else if (!busy && (init || next)) begin
      logic [255:0] base;
      base = init ? H0 : digest;
      if (init) digest <= H0;
      {a, b, c, d, e, f, g, h} <= base;
      for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
      round <= '0;
      busy  <= 1'b1;
    end else if (busy) begin
      if (round == 7'd64) begin
        digest <= {digest[255:224] + a, digest[223:192] + b, digest[191:160] + c,
                   digest[159:128] + d, digest[127:96]  + e, digest[95:64]   + f,
                   digest[63:32]   + g, digest[31:0]    + h};
        busy   <= 1'b0;
      end else begin
        {a, b, c, d, e, f, g, h} <= {t1 + t2, a, b, c, d + t1, e, f, g};
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= wnew;
        round <= round + 7'd1;
      end
    end
  end
endmodule
