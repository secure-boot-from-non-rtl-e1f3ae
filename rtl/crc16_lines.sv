// CRC16 of an SD data block on a 4-bit DAT bus. Each DAT line carries its own
// CRC16 (generator x^16 + x^12 + x^5 + 1, initial value 0, the CCITT code the
// SD standard uses), so four serial CRCs run side by side: bit j of the nibble
// presented with `en` is shifted into the sum of line j. `clr` restarts all
// four. `crc[j]` is the remainder of line j the cycle after the last nibble.
// The same block serves as the "CRC calc./check" of both sides of the data
// path: on the receiving side the remainder is compared with the 16 CRC bits
// that follow the block, on the sending side it is what gets appended.
module crc16_lines #(
  parameter int unsigned LINES = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   en,
  input  logic [LINES-1:0]       din,
  output logic [LINES-1:0][15:0] crc
);
  for (genvar j = 0; j < LINES; j++) begin : g_line
    logic [15:0] r;
    logic        fb;
    assign fb     = r[15] ^ din[j];
    assign crc[j] = r;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    r <= '0;
      else if (clr)  r <= '0;
      else if (en)   r <= {r[14:12], r[11] ^ fb, r[10:5], r[4] ^ fb, r[3:0], fb};
    end
  end
endmodule
