// End-to-end testbench of the TMIU with a 4-sector boot image.
//
// A host modelled by tasks (tmiu_bench.svh) boots through the unit from the
// SD card model while the DNA port model supplies the device identity. The
// run takes the unit through every mechanism it has and counts each one:
//   good boot  - DNA check, CID check and key derivation, MBR and boot-image
//                authentication through a multi-block read, grant of full
//                access (all four status LEDs on);
//   blocked    - a read before the key exists and a write before the grant
//                receive no response;
//   crc_fwd    - a transmission error on a read reaches the host as a CRC
//                error and the retry succeeds;
//   enc_write  - a write is stored encrypted on the card and reads back;
//   bad_write  - a write with a bad CRC gets the negative token and is dropped;
//   busy_pass  - R1b busy of the card after CMD7/CMD12 reaches the host;
//   lock_dev / lock_nvm / lock_mbr / lock_img - lockdown after a wrong DNA, a
//                foreign card, a modified MBR, a modified boot sector.
// Sector processing time (decryption or encryption of 32 AES blocks between
// buffers) is checked against the 52 cycles the unit is allowed per sector.
module tb_tmiu_top;
  localparam logic [31:0] BOOT_LBA     = 32'd2048;
  localparam int unsigned BOOT_SECTORS = 4;

  tmiu_top #(.BOOT_LBA(BOOT_LBA), .BOOT_SECTORS(BOOT_SECTORS)) dut (
    .clk, .rst_n,
    .host_cmd_i(h_cmd), .host_cmd_drv(h_cmd_drv), .host_cmd_o, .host_cmd_oe,
    .host_dat_i(h_dat), .host_dat_drv(h_dat_drv), .host_dat_o, .host_dat_oe,
    .card_cmd_i(c_cmd), .card_cmd_drv(c_cmd_drv), .card_cmd_o, .card_cmd_oe,
    .card_dat_i(c_dat), .card_dat_drv(c_dat_drv), .card_dat_o, .card_dat_oe,
    .dna_read, .dna_shift, .dna_dout,
    .status_led, .lockdown
  );

`include "tmiu_bench.svh"

  int m_boot = 0, m_blocked = 0, m_crc_fwd = 0, m_enc_write = 0, m_bad_write = 0;
  int m_lock_dev = 0, m_lock_nvm = 0, m_lock_mbr = 0, m_lock_img = 0;
  int max_proc = 0;

  always @(posedge clk) if (rst_n && dut.u_data.last_proc_cycles > 8'(max_proc)) max_proc = int'(dut.u_data.last_proc_cycles);

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [4095:0] d, p;
    bit good, mg, ig, got;
    bit [2:0] tok;
    int ce, w0;

    load_card();
    // ---------------------------------------------------------------- good boot
    do_reset();
    init_card(good);
    check(good, "initialisation");
    check(status_led[1:0] == 2'b11 && !lockdown, "device and NVM identity accepted");
    // a read before the key is ready and a write before the grant are blocked
    repeat (20) @(posedge clk);
    send_cmd(24, 32'd7000, 48, r, ok);
    check(!ok, "write before grant gets no response");
    if (!ok) m_blocked++;
    select_card(good);
    check(good, "select");
    read_sector(0, d, good, ce);
    check(good && d == mbr_plain(), "MBR read and decrypted");
    send_cmd(24, 32'd7000, 48, r, ok);
    check(!ok, "write before the boot image is authenticated gets no response");
    if (!ok) m_blocked++;
    begin
      int gb; bit bad;
      boot_read(gb, bad);
      check(gb == BOOT_SECTORS + 1 && !bad, "boot image and token decrypted");
    end
    repeat (50) @(posedge clk);
    check(status_led == 4'hF && !lockdown, $sformatf("access granted, leds=%b", status_led));
    check(dut.stage == STAGE_GRANTED, "stage GRANTED");
    if (status_led == 4'hF) m_boot++;

    // --------------------------------------------- transmission error forwarded
    p = boot_plain(5000);
    card.mem[5000] = ref_aes_sector(KEY, p, 0);
    card.flip_lba = 5000;
    read_sector(5000, d, good, ce);
    check(good && d == p, "sector read after retry");
    check(ce == 1, "corrupted transfer reached the host as a CRC error");
    if (ce == 1 && good) m_crc_fwd++;

    // ------------------------------------------------------- encrypted write
    p = boot_plain(6000) ^ {128{32'h0F0F_1234}};
    w0 = card.writes;
    send_cmd(24, 32'd6000, 48, r, ok);
    check(ok, "CMD24 answered");
    write_block(p, 0, tok, got);
    check(got && tok == 3'b010, $sformatf("positive CRC token (%b)", tok));
    repeat (40) @(posedge clk);
    check(card.writes == w0 + 1, "card received one block");
    check(card.mem.exists(6000) && card.mem[6000] == ref_aes_sector(KEY, p, 0), "block stored AES-encrypted");
    read_sector(6000, d, good, ce);
    check(good && d == p, "written block reads back");
    if (card.mem.exists(6000) && card.mem[6000] == ref_aes_sector(KEY, p, 0) && d == p) m_enc_write++;

    // ------------------------------------------------- write with a bad CRC
    w0 = card.writes;
    ce = card.write_crc_errors;
    send_cmd(24, 32'd6001, 48, r, ok);
    write_block(p, 1, tok, got);
    check(got && tok == 3'b101, $sformatf("negative CRC token (%b)", tok));
    repeat (40) @(posedge clk);
    check(card.writes == w0 && !card.mem.exists(6001), "faulty block not written");
    check(card.write_crc_errors == ce + 1, "faulty block reached the card with its faulty CRC");
    if (tok == 3'b101 && !card.mem.exists(6001)) m_bad_write++;
    check(max_proc > 0 && max_proc <= 52, $sformatf("sector processing %0d cycles (limit 52)", max_proc));
    $display("sector processing: %0d cycles", max_proc);

    // --------------------------------------------------------- wrong device
    u_dna.dna = 57'h0BAD_0BAD_0BAD_0BA;
    do_reset();
    init_card(good);
    check(!good, "no card access on a foreign device");
    check(lockdown && status_led == 4'h0, "lockdown on wrong DNA");
    if (lockdown) m_lock_dev++;
    u_dna.dna = 57'h1A2B3C4D5E6F701;

    // ----------------------------------------------------------- wrong card
    card.cid = other_cid(CID_OK);
    do_reset();
    init_card(good);
    repeat (400) @(posedge clk);
    check(lockdown && status_led == 4'b0000, "lockdown on foreign CID");
    if (lockdown) m_lock_nvm++;
    card.cid = CID_OK;

    // --------------------------------------------------------- modified MBR
    card.mem[0][100] = ~card.mem[0][100];
    do_reset();
    full_boot(mg, ig);
    check(!mg && lockdown, "lockdown on modified MBR");
    if (lockdown && !mg) m_lock_mbr++;
    card.mem[0][100] = ~card.mem[0][100];

    // -------------------------------------------------- modified boot sector
    card.mem[BOOT_LBA + 2][3000] = ~card.mem[BOOT_LBA + 2][3000];
    do_reset();
    full_boot(mg, ig);
    check(mg && !ig && lockdown, "lockdown on modified boot image");
    if (lockdown && mg) m_lock_img++;
    card.mem[BOOT_LBA + 2][3000] = ~card.mem[BOOT_LBA + 2][3000];

    // -------------------------------------------------------------- summary
    $display("mechanisms: boot=%0d blocked=%0d crc_fwd=%0d enc_write=%0d bad_write=%0d multi=%0d busy_pass=%0d",
             m_boot, m_blocked, m_crc_fwd, m_enc_write, m_bad_write, m_multi, busy_seen);
    $display("lockdowns: dev=%0d nvm=%0d mbr=%0d img=%0d", m_lock_dev, m_lock_nvm, m_lock_mbr, m_lock_img);
    check(m_boot > 0, "mechanism: granted boot");
    check(m_blocked > 0, "mechanism: blocked command");
    check(m_crc_fwd > 0, "mechanism: CRC error forwarded");
    check(m_enc_write > 0, "mechanism: encrypted write");
    check(m_bad_write > 0, "mechanism: faulty write dropped");
    check(m_multi > 0, "mechanism: multi-block read");
    check(busy_seen > 0, "mechanism: busy passed through");
    check(m_lock_dev > 0, "mechanism: lockdown on device");
    check(m_lock_nvm > 0, "mechanism: lockdown on NVM");
    check(m_lock_mbr > 0, "mechanism: lockdown on MBR");
    check(m_lock_img > 0, "mechanism: lockdown on image");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
