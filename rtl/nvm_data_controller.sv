// NVM_DATA controller of the TMIU: the sector path on the SD DAT lines.
//
// Sectors pass through as store and forward. A block arriving from the card
// (read) or the host (write) is received into a 512-byte receive buffer while
// its CRC16 is checked (sd_dat_rx). If the CRC is right, the 32 words run
// through the AES pipeline, one per clock, decrypted on reads and encrypted on
// writes, into one of two transmit buffers; a faulty block is copied as it is
// and later sent with its own faulty CRC, so the far side asks for it again.
// From the end of a block to the last processed word in the transmit buffer
// takes 2 + 32 + 11 = 45 clocks (reported in `last_proc_cycles`). The
// transmit buffer is then sent on with a freshly computed CRC16 (sd_dat_tx).
// Two transmit buffers let block k go out while block k+1 comes in, so a
// multi-block read keeps the card's full line rate.
//
// While the boot content is being authenticated (stage 3), plaintext sectors
// read from the card are hashed with the shared SHA-256 core, in the order
// they were received, before they are sent on:
//   * sector 0 (the MBR with the partition table) must hash to MBR_REF_HASH;
//   * sectors BOOT_LBA .. BOOT_LBA+BOOT_SECTORS-1 (the boot image, read in
//     ascending order) are hashed as one message, padded as SHA-256 pads;
//   * sector BOOT_LBA+BOOT_SECTORS carries the token T_auth in its first 32
//     bytes, which must equal that digest.
// A failed check inverts the last byte of the sector concerned, so the host
// rejects it with a CRC error, and raises mbr_fail / img_fail; the command
// controller then locks the unit. Sector hashing takes 8 x 65 clocks, about
// half a block time, and a sector is only sent once its hash job is done.
//
// Writes: after the host's block the unit answers at once with the CRC status
// token ("010" good, "101" faulty) and holds DAT0 low (busy) until the block
// has been sent to the card and the card has released its own busy signal. A
// faulty block goes to the card unencrypted with its own faulty CRC, as on
// reads, so the card rejects it and leaves its receive state.
// Outside sector transfers the DAT lines are passed from card to host one
// clock late (bus-width switch, SCR and status reads, busy after R1b).
//
// From the paper: CRC check before de/encryption, unencrypted forwarding of a
// faulty block, CRC regeneration, AES in both directions chosen by the
// transfer direction, SHA-256 boot image check against an appended token,
// MBR authentication, the last-byte modification on a mismatch. This design's
// choices: the buffer organisation, ECB use of AES, the MBR reference digest,
// the token sector layout, the boot image position parameters, the write
// status handling and the restriction of hashing to stage 3.
module nvm_data_controller #(
  parameter logic [255:0] MBR_REF_HASH = 256'h795d7293ebd66f5d0f67190bfb3ff72fbf3a624a034a0f5f08c018f1f7438fa5,
  parameter logic [31:0]  BOOT_LBA     = 32'd2048,
  parameter int unsigned  BOOT_SECTORS = 2048
) (
  input  logic         clk,
  input  logic         rst_n,
  // host side of the DAT lines
  input  logic [3:0]   host_dat_i,
  input  logic         host_dat_drv,
  output logic [3:0]   host_dat_o,
  output logic         host_dat_oe,
  // card side of the DAT lines
  input  logic [3:0]   card_dat_i,
  input  logic         card_dat_drv,
  output logic [3:0]   card_dat_o,
  output logic         card_dat_oe,
  // command controller
  input  logic         op_valid,
  input  tmiu_pkg::data_op_t op,
  input  tmiu_pkg::stage_e   stage,
  output tmiu_pkg::auth_status_t auth_status,
  // key generator
  input  logic         key_valid,
  input  logic [127:0] key,
  output logic         keys_ready,
  // shared SHA-256 core
  output logic         sha_init,
  output logic         sha_next,
  output logic [511:0] sha_block,
  input  logic         sha_ready,
  input  logic [255:0] sha_digest,
  // observation
  output logic [7:0]   last_proc_cycles
);
  import tmiu_pkg::*;

  localparam logic [63:0] IMG_BITS = 64'(BOOT_SECTORS) * 64'd4096;

  // ------------------------------------------------------------ transfer mode
  typedef enum logic [1:0] {M_IDLE, M_READ, M_WRITE} mode_e;
  mode_e       mode;
  logic        multi;
  logic [31:0] rx_lba;     // sector number of the next block to be received
  logic        lockdown;
  assign lockdown = (stage == STAGE_LOCKDOWN);

  // ------------------------------------------------------------ round keys
  logic [10:0][127:0] rk;
  logic               key_valid_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) key_valid_q <= 1'b0;
    else        key_valid_q <= key_valid;
  end
  aes_key_expand u_keyexp (
    .clk, .rst_n,
    .start (key_valid && !key_valid_q),
    .key,
    .rk,
    .ready (keys_ready)
  );

  // ------------------------------------------------------------ buffers
  logic [127:0] rbuf [32];
  logic [127:0] tbuf [2][32];

  typedef struct packed {
    logic             full;       // holds a processed sector
    logic             hashed;     // its hash job (if any) has finished
    logic             raw_crc;    // faulty block: send with the received CRC
    logic             corrupt;    // failed authentication: invert the last byte
    logic [31:0]      lba;
    logic [3:0][15:0] crc;
  } tmeta_t;
  tmeta_t tmeta [2];

  // ------------------------------------------------------------ receiver
  logic             rx_arm, rx_abort, rx_wr, rx_done, rx_crc_ok, rx_busy;
  logic [4:0]       rx_addr;
  logic [127:0]     rx_data;
  logic [3:0][15:0] rx_raw_crc;
  logic [3:0]       rx_dat;
  logic             rx_drv;

  assign rx_dat = (mode == M_WRITE) ? host_dat_i   : card_dat_i;
  assign rx_drv = (mode == M_WRITE) ? host_dat_drv : card_dat_drv;

  sd_dat_rx u_rx (
    .clk, .rst_n,
    .arm     (rx_arm),
    .flush   (rx_abort),
    .dat_i   (rx_dat),
    .drv     (rx_drv),
    .wr_en   (rx_wr),
    .wr_addr (rx_addr),
    .wr_data (rx_data),
    .done    (rx_done),
    .crc_ok  (rx_crc_ok),
    .raw_crc (rx_raw_crc),
    .busy    (rx_busy)
  );

  always_ff @(posedge clk) if (rx_wr) rbuf[rx_addr] <= rx_data;

  // ------------------------------------------------------------ processing
  logic        p_busy, p_dec, p_raw;
  logic [5:0]  p_rd;            // words issued
  logic [5:0]  p_wr;            // words written
  logic        p_sel;           // transmit buffer being filled
  logic        fill_ptr;        // next transmit buffer to fill
  logic [31:0] p_lba;
  logic [3:0][15:0] p_crc;
  logic [7:0]  p_cycles;

  logic         a_in_valid, a_out_valid;
  logic [127:0] a_out;
  logic [4:0]   a_out_tag;

  assign a_in_valid = p_busy && !p_raw && (p_rd < 6'd32);

  aes_pipe #(.TAG_W(5)) u_aes (
    .clk, .rst_n,
    .rk,
    .in_valid   (a_in_valid),
    .in_decrypt (p_dec),
    .in_data    (rbuf[p_rd[4:0]]),
    .in_tag     (p_rd[4:0]),
    .out_valid  (a_out_valid),
    .out_data   (a_out),
    .out_tag    (a_out_tag)
  );

  // hash engine state (declared here, used by the buffer bookkeeping)
  logic        h_done_pulse;
  logic        h_buf;
  logic        h_corrupt;

  // transmitter bookkeeping
  logic        tx_ptr, tx_start, tx_done, tx_busy, tx_abort;
  logic        tx_active;      // tx engine is sending buffer tx_ptr

  // write handshake
  logic        w_wait_card;    // encrypted block sent, waiting for the card
  logic        w_card_done;    // card released busy after a write block

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_busy   <= 1'b0;
      p_dec    <= 1'b0;
      p_raw    <= 1'b0;
      p_rd     <= '0;
      p_wr     <= '0;
      p_sel    <= 1'b0;
      fill_ptr <= 1'b0;
      p_lba    <= '0;
      p_crc    <= '0;
      p_cycles <= '0;
      last_proc_cycles <= '0;
      for (int b = 0; b < 2; b++) tmeta[b] <= '0;
    end else begin
      if (rx_done && !p_busy && !tmeta[fill_ptr].full) begin
        p_busy   <= 1'b1;
        p_dec    <= (mode == M_READ);
        p_raw    <= !rx_crc_ok;
        p_rd     <= '0;
        p_wr     <= '0;
        p_sel    <= fill_ptr;
        p_lba    <= rx_lba;
        p_crc    <= rx_raw_crc;
        p_cycles <= 8'd1;
      end else if (p_busy) begin
        p_cycles <= p_cycles + 8'd1;
        if (p_rd < 6'd32) p_rd <= p_rd + 6'd1;
        if (p_wr == 6'd32) begin
          p_busy   <= 1'b0;
          fill_ptr <= ~fill_ptr;
          last_proc_cycles <= p_cycles;
          tmeta[p_sel].full    <= 1'b1;
          tmeta[p_sel].hashed  <= 1'b0;
          tmeta[p_sel].raw_crc <= p_raw;
          tmeta[p_sel].corrupt <= 1'b0;
          tmeta[p_sel].lba     <= p_lba;
          tmeta[p_sel].crc     <= p_crc;
        end else if (p_raw || a_out_valid) begin
          p_wr <= p_wr + 6'd1;
        end
      end
      if (h_done_pulse) begin
        tmeta[h_buf].hashed  <= 1'b1;
        tmeta[h_buf].corrupt <= h_corrupt;
      end
      if (tx_done) tmeta[tx_ptr].full <= 1'b0;
      if (rx_abort) begin
        p_busy <= 1'b0;
        for (int b = 0; b < 2; b++) tmeta[b].full <= 1'b0;
        fill_ptr <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (p_busy && p_raw && p_wr < 6'd32)
      tbuf[p_sel][p_wr[4:0]] <= rbuf[p_wr[4:0]];
    else if (p_busy && a_out_valid)
      tbuf[p_sel][a_out_tag] <= a_out;
  end

  // ------------------------------------------------------------ hash engine
  typedef enum logic [2:0] {H_IDLE, H_CLASSIFY, H_BLK, H_BLK_WAIT, H_PAD, H_PAD_WAIT, H_FINISH} hstate_e;
  hstate_e     hst;
  logic        hash_ptr;
  logic [2:0]  h_blk;
  logic        h_is_mbr;
  logic        h_first;
  logic [31:0] img_cnt;
  logic        img_final;     // image digest complete
  logic [255:0] img_digest;
  logic        auth_active;

  assign auth_active = (stage == STAGE_CONTENT);

  // the 4 words of the current 512-bit block of the buffer being hashed
  logic [511:0] h_data;
  assign h_data = {tbuf[hash_ptr][{h_blk, 2'd0}], tbuf[hash_ptr][{h_blk, 2'd1}],
                   tbuf[hash_ptr][{h_blk, 2'd2}], tbuf[hash_ptr][{h_blk, 2'd3}]};

  always_comb begin
    sha_init  = 1'b0;
    sha_next  = 1'b0;
    sha_block = h_data;
    if (hst == H_BLK) begin
      sha_init = h_first;
      sha_next = !h_first;
    end else if (hst == H_PAD) begin
      sha_next  = 1'b1;
      sha_block = h_is_mbr ? {8'h80, 440'b0, 64'd4096} : {8'h80, 440'b0, IMG_BITS};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hst          <= H_IDLE;
      hash_ptr     <= 1'b0;
      h_blk        <= '0;
      h_is_mbr     <= 1'b0;
      h_first      <= 1'b0;
      h_done_pulse <= 1'b0;
      h_buf        <= 1'b0;
      h_corrupt    <= 1'b0;
      img_cnt      <= '0;
      img_final    <= 1'b0;
      img_digest   <= '0;
      auth_status  <= '0;
    end else begin
      h_done_pulse <= 1'b0;
      unique case (hst)
        H_IDLE: if (tmeta[hash_ptr].full && !tmeta[hash_ptr].hashed && !h_done_pulse) hst <= H_CLASSIFY;
        H_CLASSIFY: begin
          h_blk     <= '0;
          h_corrupt <= 1'b0;
          if (!auth_active || mode != M_READ || tmeta[hash_ptr].raw_crc) begin
            hst <= H_FINISH;                                   // nothing to check
          end else if (tmeta[hash_ptr].lba == 32'd0 && !auth_status.mbr_ok) begin
            h_is_mbr <= 1'b1;
            h_first  <= 1'b1;
            hst      <= H_BLK;
          end else if (auth_status.mbr_ok && !img_final &&
                       tmeta[hash_ptr].lba == BOOT_LBA + img_cnt) begin
            h_is_mbr <= 1'b0;
            h_first  <= (img_cnt == 0);
            hst      <= H_BLK;
          end else if (auth_status.mbr_ok &&
                       tmeta[hash_ptr].lba == BOOT_LBA + 32'(BOOT_SECTORS)) begin
            // token sector: T_auth is its first 32 bytes
            if (img_final && {tbuf[hash_ptr][0], tbuf[hash_ptr][1]} == img_digest) begin
              auth_status.img_ok <= 1'b1;
            end else begin
              auth_status.img_fail <= 1'b1;
              h_corrupt            <= 1'b1;
            end
            hst <= H_FINISH;
          end else begin
            hst <= H_FINISH;
          end
        end
        H_BLK: if (sha_ready) begin
          h_first <= 1'b0;
          hst     <= H_BLK_WAIT;
        end
        H_BLK_WAIT: if (sha_ready) begin
          h_blk <= h_blk + 3'd1;
          if (h_blk == 3'd7) begin
            if (h_is_mbr) hst <= H_PAD;
            else begin
              img_cnt <= img_cnt + 32'd1;
              hst     <= (img_cnt + 32'd1 == 32'(BOOT_SECTORS)) ? H_PAD : H_FINISH;
            end
          end else hst <= H_BLK;
        end
        H_PAD: if (sha_ready) hst <= H_PAD_WAIT;
        H_PAD_WAIT: if (sha_ready) begin
          if (h_is_mbr) begin
            if (sha_digest == MBR_REF_HASH) auth_status.mbr_ok <= 1'b1;
            else begin
              auth_status.mbr_fail <= 1'b1;
              h_corrupt            <= 1'b1;
            end
          end else begin
            img_final  <= 1'b1;
            img_digest <= sha_digest;
          end
          hst <= H_FINISH;
        end
        H_FINISH: begin
          h_done_pulse <= 1'b1;
          h_buf        <= hash_ptr;
          hash_ptr     <= ~hash_ptr;
          hst          <= H_IDLE;
        end
        default: hst <= H_IDLE;
      endcase
      if (rx_abort) begin
        hst      <= H_IDLE;
        hash_ptr <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ transmitter
  logic [4:0]   tx_addr;
  logic [3:0]   tx_dat;
  logic         tx_oe;

  sd_dat_tx #(.GAP(1)) u_tx (
    .clk, .rst_n,
    .start        (tx_start),
    .flush        (tx_abort),
    .use_raw_crc  (tmeta[tx_ptr].raw_crc),
    .raw_crc      (tmeta[tx_ptr].crc),
    .corrupt_last (tmeta[tx_ptr].corrupt),
    .rd_addr      (tx_addr),
    .rd_data      (tbuf[tx_ptr][tx_addr]),
    .dat_o        (tx_dat),
    .oe           (tx_oe),
    .busy         (tx_busy),
    .done         (tx_done)
  );

  assign tx_start = !tx_busy && !tx_active && tmeta[tx_ptr].full && tmeta[tx_ptr].hashed &&
                    !h_done_pulse && !w_wait_card && mode != M_IDLE;

  // ------------------------------------------------------------ write status
  typedef enum logic [1:0] {W_IDLE, W_GAP, W_TOKEN, W_BUSY} wstate_e;
  wstate_e    wst;
  logic [2:0] wcnt;
  logic [4:0] wtoken;          // start bit, 3 status bits, end bit


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst    <= W_IDLE;
      wcnt   <= '0;
      wtoken <= 5'b11111;
    end else if (rx_abort) begin
      wst <= W_IDLE;
    end else begin
      unique case (wst)
        W_IDLE: if (mode == M_WRITE && rx_done) begin
          wtoken <= rx_crc_ok ? 5'b0_010_1 : 5'b0_101_1;
          wcnt   <= '0;
          wst    <= W_GAP;
        end
        W_GAP: wst <= W_TOKEN;
        W_TOKEN: begin
          wtoken <= {wtoken[3:0], 1'b1};
          wcnt   <= wcnt + 3'd1;
          if (wcnt == 3'd4) wst <= W_BUSY;
        end
        W_BUSY: if (w_card_done) wst <= W_IDLE;
        default: wst <= W_IDLE;
      endcase
    end
  end

  // card side of a write: after our block the card sends its CRC status token
  // on DAT0 (start bit, 3 bits, end bit) and then holds DAT0 low while busy
  typedef enum logic [1:0] {CB_WAIT, CB_TOKEN, CB_BUSY} cbstate_e;
  cbstate_e   cbst;
  logic [2:0] cbcnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cbst        <= CB_WAIT;
      cbcnt       <= '0;
      w_wait_card <= 1'b0;
    end else if (rx_abort) begin
      cbst        <= CB_WAIT;
      w_wait_card <= 1'b0;
    end else begin
      if (mode == M_WRITE && tx_done) w_wait_card <= 1'b1;
      if (w_card_done)                w_wait_card <= 1'b0;
      unique case (cbst)
        CB_WAIT:  if (w_wait_card && !tx_busy && card_dat_drv && !card_dat_i[0]) begin
          cbst  <= CB_TOKEN;
          cbcnt <= '0;
        end
        CB_TOKEN: begin
          cbcnt <= cbcnt + 3'd1;
          if (cbcnt == 3'd3) cbst <= CB_BUSY;        // 3 status bits and the end bit
        end
        CB_BUSY:  if (!card_dat_drv || card_dat_i[0]) cbst <= CB_WAIT;
        default:  cbst <= CB_WAIT;
      endcase
    end
  end
  assign w_card_done = (cbst == CB_BUSY) && (!card_dat_drv || card_dat_i[0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tx_active <= 1'b0;
    else if (tx_abort) tx_active <= 1'b0;
    else if (tx_start) tx_active <= 1'b1;
    else if (tx_done)  tx_active <= 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tx_ptr <= 1'b0;
    else if (rx_abort) tx_ptr <= 1'b0;
    else if (tx_done) tx_ptr <= ~tx_ptr;
  end

  // ------------------------------------------------------------ mode control
  logic rd_blocks_left;   // the single block of a CMD17 / CMD24 has been received
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode           <= M_IDLE;
      multi          <= 1'b0;
      rx_lba         <= '0;
      rd_blocks_left <= 1'b0;
    end else begin
      if (op_valid && !lockdown) begin
        unique case (op.kind)
          OP_READ:  mode <= M_READ;
          OP_WRITE: mode <= (stage == STAGE_GRANTED) ? M_WRITE : M_IDLE;
          default:  mode <= M_IDLE;
        endcase
        multi          <= op.multi;
        rx_lba         <= op.lba;
        rd_blocks_left <= 1'b1;
      end else begin
        if (rx_done) begin
          rx_lba <= rx_lba + 32'd1;
          if (!multi) rd_blocks_left <= 1'b0;
        end
        // a single-block transfer ends when its block has left the unit
        if (mode == M_READ && !multi && !rd_blocks_left && !rx_busy && !p_busy &&
            !tmeta[0].full && !tmeta[1].full && !tx_busy)
          mode <= M_IDLE;
        if (mode == M_WRITE && !multi && !rd_blocks_left && !rx_busy && !p_busy &&
            !tmeta[0].full && !tmeta[1].full && !tx_busy && wst == W_IDLE && !w_wait_card)
          mode <= M_IDLE;
      end
    end
  end

  assign rx_abort = op_valid && (op.kind == OP_STOP || mode != M_IDLE);
  assign tx_abort = rx_abort;
  // the receiver may take the next block while the previous one is still
  // being processed: processing reads word k of the receive buffer long
  // before the receiver overwrites it (one word per 32 clocks)
  assign rx_arm   = (mode != M_IDLE) && rd_blocks_left && !lockdown &&
                    !(mode == M_WRITE && (wst != W_IDLE || w_wait_card));

  // ------------------------------------------------------------ DAT outputs
  logic [3:0] pass_dat;
  logic       pass_oe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pass_dat <= 4'hF;
      pass_oe  <= 1'b0;
    end else begin
      pass_dat <= card_dat_i;
      pass_oe  <= card_dat_drv && !lockdown;
    end
  end

  always_comb begin
    host_dat_o  = 4'hF;
    host_dat_oe = 1'b0;
    card_dat_o  = 4'hF;
    card_dat_oe = 1'b0;
    unique case (mode)
      M_IDLE: begin
        host_dat_o  = pass_dat;
        host_dat_oe = pass_oe;
      end
      M_READ: begin
        host_dat_o  = tx_dat;
        host_dat_oe = tx_oe;
      end
      M_WRITE: begin
        card_dat_o  = tx_dat;
        card_dat_oe = tx_oe;
        if (wst == W_TOKEN) begin
          host_dat_o  = {3'b111, wtoken[4]};
          host_dat_oe = 1'b1;
        end else if (wst == W_BUSY) begin
          host_dat_o  = 4'b1110;
          host_dat_oe = 1'b1;
        end
      end
      default: ;
    endcase
  end

endmodule
