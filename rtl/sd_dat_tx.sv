// Transmitter for one SD data block on the 4-bit DAT bus (helper of the
// NVM_DATA controller). A pulse on `start` sends the start nibble 4'h0, the
// 32 words of a sector buffer as 1024 nibbles (bits [127:124] of word 0
// first), 16 CRC nibbles and the end nibble 4'hF, then keeps the bus released
// for GAP clocks before `busy` falls. A start accepted in the first idle
// clock gives 1043 + GAP clocks per block and GAP + 1 idle clocks between
// blocks; the default GAP = 1 gives the 2 idle clocks an SD card itself
// leaves between the blocks of a multi-block read, so the transmitter keeps
// exactly the card's pace (this design's choice). The CRC is
// either computed over the data sent (crc16_lines) or, with `use_raw_crc`,
// the CRC received with a faulty block, so the far side sees the fault too.
// With `corrupt_last` the two nibbles of the last byte are inverted on the
// wire while the CRC is still computed over the original byte: the receiver
// is then certain to see a CRC error. `done` pulses in the end-nibble clock.
module sd_dat_tx #(
  parameter int unsigned GAP = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             flush,
  input  logic             use_raw_crc,
  input  logic [3:0][15:0] raw_crc,
  input  logic             corrupt_last,
  output logic [4:0]       rd_addr,
  input  logic [127:0]     rd_data,
  output logic [3:0]       dat_o,
  output logic             oe,
  output logic             busy,
  output logic             done
);
  typedef enum logic [2:0] {TX_IDLE, TX_START, TX_DATA, TX_CRC, TX_END, TX_GAP} tstate_e;
  tstate_e          st;
  logic [9:0]       cnt;
  logic             raw_q, corrupt_q;
  logic [3:0]       nib, flip;
  logic [3:0][15:0] calc, crc_src;

  assign rd_addr = cnt[9:5];
  assign nib     = rd_data[127 - 4*cnt[4:0] -: 4];
  assign flip    = (corrupt_q && cnt >= 10'd1022) ? 4'hF : 4'h0;

  crc16_lines #(.LINES(4)) u_crc (
    .clk, .rst_n,
    .clr (st == TX_IDLE),
    .en  (st == TX_DATA),
    .din (nib),
    .crc (calc)
  );

  assign crc_src = raw_q ? raw_crc : calc;

  always_comb begin
    dat_o = 4'hF;
    oe    = 1'b1;
    unique case (st)
      TX_START: dat_o = 4'h0;
      TX_DATA:  dat_o = nib ^ flip;
      TX_CRC:   for (int j = 0; j < 4; j++) dat_o[j] = crc_src[j][15 - cnt[3:0]];
      TX_END:   dat_o = 4'hF;
      default:  oe = 1'b0;
    endcase
  end

  assign busy = (st != TX_IDLE);
  assign done = (st == TX_END);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= TX_IDLE;
      cnt       <= '0;
      raw_q     <= 1'b0;
      corrupt_q <= 1'b0;
    end else if (flush) begin
      st <= TX_IDLE;
    end else begin
      unique case (st)
        TX_IDLE: if (start) begin
          st        <= TX_START;
          cnt       <= '0;
          raw_q     <= use_raw_crc;
          corrupt_q <= corrupt_last;
        end
        TX_START: st <= TX_DATA;
        TX_DATA: begin
          cnt <= cnt + 10'd1;
          if (cnt == 10'd1023) begin
            st  <= TX_CRC;
            cnt <= '0;
          end
        end
        TX_CRC: begin
          cnt <= cnt + 10'd1;
          if (cnt == 10'd15) st <= TX_END;
        end
        TX_END: begin
          cnt <= '0;
          st  <= (GAP == 0) ? TX_IDLE : TX_GAP;
        end
        TX_GAP: begin
          cnt <= cnt + 10'd1;
          if (cnt == 10'(GAP - 1)) st <= TX_IDLE;
        end
        default: st <= TX_IDLE;
      endcase
    end
  end
endmodule
