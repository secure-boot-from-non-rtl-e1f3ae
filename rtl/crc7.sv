// Bit-serial CRC7 of the SD command line (generator x^7 + x^3 + 1, initial
// value 0). One message bit is shifted in per clock while `en` is high;
// `clr` restarts the sum. `crc` is the remainder over all bits shifted in so
// far and is valid the cycle after the last bit. SD protects every command,
// every 48-bit response and the CID/CSD registers with this code; the
// generator polynomial is the SD standard's, the serial form is this design's.
module crc7 (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clr,
  input  logic       en,
  input  logic       din,
  output logic [6:0] crc
);
  logic fb;
  assign fb = crc[6] ^ din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      crc <= '0;
    else if (clr)    crc <= '0;
    else if (en)     crc <= {crc[5:3], crc[2] ^ fb, crc[1:0], fb};
  end
endmodule
