// AES-128 key schedule (FIPS-197 KeyExpansion), iterative. A pulse on `start`
// loads the cipher key as round key 0; each following clock derives one more
// round key, so all 11 round keys are held in registers 10 cycles later, when
// `ready` rises. The cipher pipeline reads all of them at once, which lets the
// encrypting and the decrypting direction share one set of keys. Reset (or a
// new `start`) clears `ready`; the keys exist only inside the unit.
module aes_key_expand (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [127:0]      key,
  output logic [10:0][127:0] rk,
  output logic              ready
);
  import aes_pkg::*;

  logic [3:0] round;
  logic       busy;
  logic [7:0] rcon;
  logic [127:0] prev, next;

  assign prev = rk[round];

  always_comb begin
    logic [31:0] w0, w1, w2, w3, t;
    t  = sub_rot_word(prev[31:0], rcon);
    w0 = prev[127:96] ^ t;
    w1 = prev[95:64]  ^ w0;
    w2 = prev[63:32]  ^ w1;
    w3 = prev[31:0]   ^ w2;
    next = {w0, w1, w2, w3};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rk    <= '0;
      round <= '0;
      busy  <= 1'b0;
      ready <= 1'b0;
      rcon  <= 8'h01;
    end else if (start) begin
      rk[0] <= key;
      round <= '0;
      busy  <= 1'b1;
      ready <= 1'b0;
      rcon  <= 8'h01;
    end else if (busy) begin
      rk[round + 4'd1] <= next;
      rcon  <= xtime(rcon);
      round <= round + 4'd1;
      if (round == 4'd9) begin
        busy  <= 1'b0;
        ready <= 1'b1;
      end
    end
  end
endmodule
