// AES-128 cipher and inverse cipher in one fully unrolled pipeline.
//
// One 128-bit block enters per clock when `in_valid` is high; `in_decrypt`
// selects, per block, the inverse cipher (used for sectors read from the card)
// or the cipher (sectors written to it). The first register stage applies the
// initial AddRoundKey, each of the ten next stages one round, so a block
// leaves 11 clocks after it entered and the pipeline accepts a new
// block every clock. A sideband `in_tag` travels with each block. The round
// keys come from aes_key_expand and must be stable while blocks are in flight.
// The paper gives AES-128 with both directions and sector-wise operation; the
// unrolled structure, the per-block mode bit and the ECB use of the cipher
// (each 16-byte block of a sector on its own) are this design's choices.
module aes_pipe #(
  parameter int unsigned TAG_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [10:0][127:0] rk,
  input  logic               in_valid,
  input  logic               in_decrypt,
  input  logic [127:0]       in_data,
  input  logic [TAG_W-1:0]   in_tag,
  output logic               out_valid,
  output logic [127:0]       out_data,
  output logic [TAG_W-1:0]   out_tag
);
  import aes_pkg::*;

  block_t             st  [0:10];
  logic [10:0]        vld;
  logic [10:0]        dec;
  logic [TAG_W-1:0]   tag [0:10];

  // stage 0: initial AddRoundKey
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld[0] <= 1'b0;
      dec[0] <= 1'b0;
      st[0]  <= '0;
      tag[0] <= '0;
    end else begin
      vld[0] <= in_valid;
      dec[0] <= in_decrypt;
      st[0]  <= in_data ^ (in_decrypt ? rk[10] : rk[0]);
      tag[0] <= in_tag;
    end
  end

  // stages 1..10: one round each
  for (genvar r = 1; r <= 10; r++) begin : g_round
    block_t nxt;
    always_comb begin
      if (dec[r-1]) begin
        nxt = inv_sub_bytes(inv_shift_rows(st[r-1])) ^ rk[10-r];
        if (r != 10) nxt = inv_mix_columns(nxt);
      end else begin
        nxt = shift_rows(sub_bytes(st[r-1]));
        if (r != 10) nxt = mix_columns(nxt);
        nxt = nxt ^ rk[r];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[r] <= 1'b0;
        dec[r] <= 1'b0;
        st[r]  <= '0;
        tag[r] <= '0;
      end else begin
        vld[r] <= vld[r-1];
        dec[r] <= dec[r-1];
        st[r]  <= nxt;
        tag[r] <= tag[r-1];
      end
    end
  end

  assign out_valid = vld[10];
  assign out_data  = st[10];
  assign out_tag   = tag[10];
endmodule
