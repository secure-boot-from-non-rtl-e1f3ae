// Shared body of the TMIU system testbenches: an SD host modelled by tasks,
// the SD card model, the DNA port model and the reference data. Included
// inside a testbench module that has already declared BOOT_LBA, BOOT_SECTORS
// and instantiated the TMIU as `dut` with the signals declared below.
//
// Card content: sector 0 holds an MBR (FAT32 boot partition at sector 2048,
// 100 MB, Linux partition after it); boot sectors BOOT_LBA+i hold a pattern
// word_j = {lba[15:0], j[15:0]} ^ (j * 32'h9E3779B9); sector
// BOOT_LBA+BOOT_SECTORS holds T_auth = SHA-256 of all boot sectors in its
// first 32 bytes. Every sector is stored AES-128 (ECB) encrypted under the key
// the unit must derive, K = SHA-256(c || ID_dev || CID)[255:128].

  import tb_ref_pkg::*;
  import tmiu_pkg::*;

  localparam logic [127:0] KEY    = 128'h19315eb4449d80d0f633a181d8de6918;
  localparam logic [127:0] CID_OK = 128'h0353445355313647801234567800e5a9;
  localparam int TO_CMD = 400;

  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;   // 20 ns: 50 MHz SD clock

  // host side
  logic       h_cmd = 1, h_cmd_drv = 0;
  logic [3:0] h_dat = 4'hF;
  logic       h_dat_drv = 0;
  logic       host_cmd_o, host_cmd_oe, host_dat_oe;
  logic [3:0] host_dat_o;
  // card side
  logic       card_cmd_o, card_cmd_oe, card_dat_oe;
  logic [3:0] card_dat_o;
  logic       c_cmd, c_cmd_drv, c_dat_drv;
  logic [3:0] c_dat;
  logic       dna_read, dna_shift, dna_dout;
  logic [3:0] status_led;
  logic       lockdown;

  sd_card_model card (.clk, .cmd_i(card_cmd_o), .cmd_en(card_cmd_oe), .cmd_o(c_cmd), .cmd_drv(c_cmd_drv),
                      .dat_i(card_dat_o), .dat_en(card_dat_oe), .dat_o(c_dat), .dat_drv(c_dat_drv));
  dna_port_model u_dna (.clk, .read(dna_read), .shift(dna_shift), .dout(dna_dout));

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------- content
  function automatic bit [4095:0] boot_plain(int unsigned lba);
    bit [4095:0] d;
    for (int j = 0; j < 128; j++) d[4095 - 32*j -: 32] = {lba[15:0], 16'(j)} ^ (32'(j) * 32'h9E3779B9);
    return d;
  endfunction

  function automatic bit [4095:0] mbr_plain();
    bytes_t m;
    bit [4095:0] d;
    m = {};
    for (int i = 0; i < 512; i++) m.push_back(0);
    m[446] = 8'h80; m[446+4] = 8'h0C;
    {m[446+11], m[446+10], m[446+9], m[446+8]}     = 32'd2048;
    {m[446+15], m[446+14], m[446+13], m[446+12]}   = 32'd204800;
    m[462+4] = 8'h83;
    {m[462+11], m[462+10], m[462+9], m[462+8]}     = 32'd206848;
    {m[462+15], m[462+14], m[462+13], m[462+12]}   = 32'd31116288 - 32'd206848;
    m[510] = 8'h55; m[511] = 8'hAA;
    for (int i = 0; i < 512; i++) d[4095 - 8*i -: 8] = m[i];
    return d;
  endfunction

  function automatic bit [255:0] image_digest();
    bit [255:0] h;
    bit [4095:0] d;
    h = ref_sha_iv();
    for (int s = 0; s < BOOT_SECTORS; s++) begin
      d = boot_plain(BOOT_LBA + s);
      for (int b = 0; b < 8; b++) h = ref_sha_compress(h, d[4095 - 512*b -: 512]);
    end
    h = ref_sha_compress(h, {8'h80, 440'b0, 64'(BOOT_SECTORS) * 64'd4096});
    return h;
  endfunction

  function automatic bit [4095:0] token_plain();
    return {image_digest(), 3840'b0};
  endfunction

  // a card with another identity (valid CID with its own CRC7)
  function automatic bit [127:0] other_cid(bit [127:0] c);
    bit q[$];
    c[31:8] = ~c[31:8];                 // product serial number
    for (int i = 127; i >= 8; i--) q.push_back(c[i]);
    c[7:1] = ref_crc7(q);
    return c;
  endfunction

  bit [4095:0] token_sector;   // plaintext of the token sector

  task automatic load_card();
    token_sector = token_plain();
    card.mem.delete();
    card.mem[0] = ref_aes_sector(KEY, mbr_plain(), 0);
    for (int s = 0; s < BOOT_SECTORS; s++)
      card.mem[BOOT_LBA + s] = ref_aes_sector(KEY, boot_plain(BOOT_LBA + s), 0);
    card.mem[BOOT_LBA + BOOT_SECTORS] = ref_aes_sector(KEY, token_sector, 0);
  endtask

  // ------------------------------------------------------------- SD host
  task automatic send_cmd(input bit [5:0] idx, input bit [31:0] arg, input int rlen,
                          output bit [135:0] resp, output bit ok);
    bit [47:0] c;
    bit        q[$];
    int        t;
    c[47:8] = {2'b01, idx, arg};
    for (int i = 47; i >= 8; i--) q.push_back(c[i]);
    c[7:1] = ref_crc7(q);
    c[0]   = 1;
    for (int i = 47; i >= 0; i--) begin
      @(posedge clk); h_cmd_drv <= 1; h_cmd <= c[i];
    end
    @(posedge clk); h_cmd_drv <= 0; h_cmd <= 1;
    resp = '0;
    ok   = (rlen == 0);
    if (rlen == 0) begin repeat (80) @(posedge clk); return; end
    t = 0;
    while (!(host_cmd_oe && !host_cmd_o) && t < TO_CMD) begin @(posedge clk); t++; end
    if (debug) $display("%t CMD%0d arg=%h resp_wait=%0d stage=%0d cardcmds=%0d", $time, idx, arg, t, dut.stage, card.cmds);
    if (t >= TO_CMD) return;
    for (int i = 0; i < rlen; i++) begin
      resp = {resp[134:0], host_cmd_o};
      if (i != rlen - 1) @(posedge clk);
    end
    ok = 1;
    repeat (8) @(posedge clk);
  endtask
  bit debug = 0;

  // command with retries on a missing response; returns how many tries failed
  task automatic cmd_retry(input bit [5:0] idx, input bit [31:0] arg, input int rlen,
                           input int tries, output bit [135:0] resp, output bit ok);
    for (int i = 0; i < tries; i++) begin
      send_cmd(idx, arg, rlen, resp, ok);
      if (ok) return;
    end
  endtask

  int busy_seen = 0;   // R1b busy periods passed through to the host
  task automatic wait_dat_idle();
    int t;
    t = 0;
    // wait for busy (DAT0 low) passed through from the card to end
    repeat (4) @(posedge clk);
    if (host_dat_oe && !host_dat_o[0]) busy_seen++;
    while (host_dat_oe && !host_dat_o[0] && t < 1000) begin @(posedge clk); t++; end
  endtask

  // receive one data block; got = 0 on timeout
  task automatic read_block(input int timeout_clks, output bit [4095:0] d, output bit crc_ok, output bit got);
    int t;
    bit [63:0] crc;
    t = 0; got = 0; crc_ok = 0;
    while (!(host_dat_oe && host_dat_o == 4'h0) && t < timeout_clks) begin @(posedge clk); t++; end
    if (t >= timeout_clks) return;
    for (int n = 0; n < 1024; n++) begin @(posedge clk); d[4095 - 4*n -: 4] = host_dat_o; end
    for (int k = 0; k < 16; k++) begin
      @(posedge clk);
      for (int j = 0; j < 4; j++) crc[16*j + 15 - k] = host_dat_o[j];
    end
    @(posedge clk);
    crc_ok = (crc == ref_sector_crc(d)) && host_dat_o == 4'hF;
    got = 1;
    if (debug) $display("%t block: wait=%0d crc_ok=%b first=%h last=%h", $time, t, crc_ok, d[4095 -: 64], d[63:0]);
  endtask

  // send one data block; returns the 3-bit CRC status token
  task automatic write_block(input bit [4095:0] d, input bit bad_crc, output bit [2:0] tok, output bit got);
    bit [63:0] crc;
    int t;
    crc = ref_sector_crc(d);
    if (bad_crc) crc[0] = ~crc[0];
    repeat (2) @(posedge clk);
    @(posedge clk); h_dat_drv <= 1; h_dat <= 4'h0;
    for (int n = 0; n < 1024; n++) begin @(posedge clk); h_dat <= d[4095 - 4*n -: 4]; end
    for (int k = 0; k < 16; k++) begin
      @(posedge clk);
      for (int j = 0; j < 4; j++) h_dat[j] <= crc[16*j + 15 - k];
    end
    @(posedge clk); h_dat <= 4'hF;
    @(posedge clk); h_dat_drv <= 0;
    t = 0; got = 0;
    while (!(host_dat_oe && !host_dat_o[0]) && t < 20) begin @(posedge clk); t++; end
    if (t >= 20) return;
    for (int i = 0; i < 3; i++) begin @(posedge clk); tok[2 - i] = host_dat_o[0]; end
    @(posedge clk);   // end bit
    t = 0;
    @(posedge clk);
    while (host_dat_oe && !host_dat_o[0] && t < 5000) begin @(posedge clk); t++; end
    got = (t < 5000);
  endtask

  // ------------------------------------------------------------- boot steps
  bit [135:0] r;
  bit         ok;

  task automatic do_reset();
    h_cmd_drv = 0; h_dat_drv = 0;
    rst_n = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
  endtask

  // card initialisation up to 4-bit transfer mode; returns 0 if the unit
  // never let the card answer
  task automatic init_card(output bit good);
    good = 0;
    send_cmd(0, 0, 0, r, ok);
    cmd_retry(8, 32'h1AA, 48, 10, r, ok);
    if (!ok) return;
    for (int i = 0; i < 5; i++) begin
      send_cmd(55, 0, 48, r, ok);
      send_cmd(41, 32'h40FF8000, 48, r, ok);
      if (ok && r[39]) break;
    end
    cmd_retry(2, 0, 136, 3, r, ok);
    if (!ok) return;
    check(r[127:1] == card.cid[127:1], "CID passed to the host");
    cmd_retry(3, 0, 48, 3, r, ok);
    if (!ok) return;
    good = 1;
  endtask

  task automatic select_card(output bit good);
    good = 0;
    repeat (400) @(posedge clk);   // key derivation
    cmd_retry(7, 32'h12340000, 48, 3, r, ok);
    if (!ok) return;
    wait_dat_idle();
    send_cmd(55, 32'h12340000, 48, r, ok);
    cmd_retry(6, 32'h2, 48, 3, r, ok);
    good = ok;
  endtask

  // single-block read, retried on a CRC error; returns the number of CRC errors
  task automatic read_sector(input int unsigned lba, output bit [4095:0] d, output bit good, output int crc_errs);
    bit crc_ok, got;
    crc_errs = 0;
    good = 0;
    for (int i = 0; i < 3; i++) begin
      send_cmd(17, lba, 48, r, ok);
      if (!ok) return;
      read_block(5000, d, crc_ok, got);
      if (!got) return;
      if (crc_ok) begin good = 1; return; end
      crc_errs++;
      repeat (20) @(posedge clk);
    end
  endtask

  int m_multi = 0;   // multi-block reads

  // read the whole boot region plus the token sector with one CMD18;
  // returns how many blocks arrived intact with the expected plaintext
  task automatic boot_read(output int good_blocks, output bit any_bad);
    bit [4095:0] d;
    bit crc_ok, got;
    good_blocks = 0; any_bad = 0;
    send_cmd(18, BOOT_LBA, 48, r, ok);
    check(ok, "CMD18 answered");
    for (int s = 0; s <= BOOT_SECTORS; s++) begin
      read_block(5000, d, crc_ok, got);
      if (!got) begin any_bad = 1; break; end
      if (crc_ok && d == (s < BOOT_SECTORS ? boot_plain(BOOT_LBA + s) : token_sector)) good_blocks++;
      else any_bad = 1;
    end
    send_cmd(12, 0, 48, r, ok);
    wait_dat_idle();
    m_multi++;
  endtask

  task automatic full_boot(output bit mbr_good, output bit img_good);
    bit [4095:0] d;
    bit good;
    int ce, gb;
    bit bad;
    mbr_good = 0; img_good = 0;
    init_card(good);
    check(good, "card initialisation through the unit");
    if (!good) return;
    select_card(good);
    check(good, "card selected and set to 4-bit");
    read_sector(0, d, good, ce);
    mbr_good = good && d == mbr_plain();
    repeat (50) @(posedge clk);
    if (lockdown) return;
    boot_read(gb, bad);
    img_good = (gb == BOOT_SECTORS + 1) && !bad;
    repeat (50) @(posedge clk);
  endtask
