// Receiver for one SD data block on the 4-bit DAT bus (helper of the
// NVM_DATA controller). Once armed, it waits for the start bit (all four lines
// low while the far side drives them), then takes 1024 nibbles (512 bytes, the
// high nibble of each byte first), 16 CRC nibbles and the end nibble 4'hF.
// Every 32 nibbles it writes one 128-bit word to the sector buffer, byte 0 of
// the word in bits [127:120]. CRC16 per line is computed on the fly with
// crc16_lines; in the end-nibble clock `done` pulses with `crc_ok` (all four
// remainders match and the end bit is present) and the received CRC bits in
// `raw_crc`, so a faulty block can be passed on with its own CRC.
module sd_dat_rx (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 arm,
  input  logic                 flush,
  input  logic [3:0]           dat_i,
  input  logic                 drv,
  output logic                 wr_en,
  output logic [4:0]           wr_addr,
  output logic [127:0]         wr_data,
  output logic                 done,
  output logic                 crc_ok,
  output logic [3:0][15:0]     raw_crc,
  output logic                 busy
);
  typedef enum logic [1:0] {RX_IDLE, RX_DATA, RX_CRC, RX_END} rstate_e;
  rstate_e          st;
  logic [9:0]       cnt;
  logic [123:0]     acc;
  logic [3:0][15:0] calc;

  crc16_lines #(.LINES(4)) u_crc (
    .clk, .rst_n,
    .clr (st == RX_IDLE),
    .en  (st == RX_DATA),
    .din (dat_i),
    .crc (calc)
  );

  assign busy    = (st != RX_IDLE);
  assign wr_en   = (st == RX_DATA) && (cnt[4:0] == 5'd31);
  assign wr_addr = cnt[9:5];
  assign wr_data = {acc, dat_i};
  assign done    = (st == RX_END);
  assign crc_ok  = (calc == raw_crc) && (dat_i == 4'hF) && drv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= RX_IDLE;
      cnt     <= '0;
      acc     <= '0;
      raw_crc <= '0;
    end else if (flush) begin
      st <= RX_IDLE;
    end else begin
      unique case (st)
        RX_IDLE: if (arm && drv && dat_i == 4'h0) begin
          st  <= RX_DATA;
          cnt <= '0;
        end
        RX_DATA: begin
          acc <= {acc[119:0], dat_i};
          cnt <= cnt + 10'd1;
          if (cnt == 10'd1023) begin
            st  <= RX_CRC;
            cnt <= '0;
          end
        end
        RX_CRC: begin
          for (int j = 0; j < 4; j++) raw_crc[j] <= {raw_crc[j][14:0], dat_i[j]};
          cnt <= cnt + 10'd1;
          if (cnt == 10'd15) st <= RX_END;
        end
        RX_END: st <= RX_IDLE;
        default: st <= RX_IDLE;
      endcase
    end
  end
endmodule
