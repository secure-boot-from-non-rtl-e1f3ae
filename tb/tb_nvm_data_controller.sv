// Testbench of the NVM_DATA controller on its own (with a SHA-256 core, as in
// the unit). The command controller's outputs (sector operations, stage) and
// the key are driven directly; card and host are modelled by tasks on the
// two DAT buses. Reference results come from the testbench's own AES-128,
// SHA-256 and CRC16 models. Checked:
//   * idle: card DAT lines reach the host one clock late;
//   * read: an encrypted sector arrives at the host decrypted with a valid
//     CRC, and processing takes at most 52 clocks per sector;
//   * read with a transmission error: the block is passed on unencrypted
//     with its faulty CRC;
//   * write: the host gets the "010" token and busy, the card gets the block
//     encrypted with a valid CRC, busy ends when the card's busy ends;
//   * stage 3b: MBR and a 2-sector boot image with its token sector are
//     authenticated (mbr_ok, img_ok) during one single and one multi-block read;
//   * a modified MBR raises mbr_fail and the host sees its last byte inverted.
module tb_nvm_data_controller;
  import tmiu_pkg::*;
  import tb_ref_pkg::*;

  localparam logic [255:0] MBR_HASH = 256'ha863e21577e54cd763729803a621804da4b5030afa35bcf879ea3b3413488a66; // 512 x 8'h5A
  localparam logic [31:0]  BLBA = 32'd16;
  localparam int unsigned  BSEC = 2;
  localparam logic [127:0] KEY  = 128'h000102030405060708090a0b0c0d0e0f;

  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  logic [3:0] h_dat = 4'hF, c_dat = 4'hF;
  logic h_drv = 0, c_drv = 0;
  logic [3:0] host_dat_o, card_dat_o;
  logic host_dat_oe, card_dat_oe;
  logic op_valid = 0;
  data_op_t op = '0;
  stage_e stage = STAGE_GRANTED;
  auth_status_t au;
  logic key_valid = 0, keys_ready;
  logic sha_init, sha_next, sha_ready;
  logic [511:0] sha_block;
  logic [255:0] sha_digest;
  logic [7:0] last_proc_cycles;

  nvm_data_controller #(.MBR_REF_HASH(MBR_HASH), .BOOT_LBA(BLBA), .BOOT_SECTORS(BSEC)) dut (
    .clk, .rst_n,
    .host_dat_i(h_dat), .host_dat_drv(h_drv), .host_dat_o, .host_dat_oe,
    .card_dat_i(c_dat), .card_dat_drv(c_drv), .card_dat_o, .card_dat_oe,
    .op_valid, .op, .stage, .auth_status(au),
    .key_valid, .key(KEY), .keys_ready,
    .sha_init, .sha_next, .sha_block, .sha_ready, .sha_digest,
    .last_proc_cycles
  );
  sha256_core u_sha (.clk, .rst_n, .init(sha_init), .next(sha_next), .block(sha_block),
                     .ready(sha_ready), .digest(sha_digest));

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit [4095:0] pattern(int seed);
    bit [4095:0] d;
    for (int j = 0; j < 128; j++) d[32*j +: 32] = 32'(seed) * 32'h01000193 ^ (32'(j) * 32'h9E3779B9);
    return d;
  endfunction

  task automatic pulse_op(input op_kind_e k, input bit m, input int unsigned lba);
    @(posedge clk);
    op_valid <= 1; op.kind <= k; op.multi <= m; op.lba <= lba;
    @(posedge clk);
    op_valid <= 0;
  endtask

  // drive one block (start, data, CRC, end) on a DAT bus
  task automatic drive_block(input bit to_host_side, input bit [4095:0] d, input bit bad_crc);
    bit [63:0] crc;
    crc = ref_sector_crc(d);
    if (bad_crc) crc[5] = ~crc[5];
    @(posedge clk);
    if (to_host_side) begin h_drv <= 1; h_dat <= 4'h0; end else begin c_drv <= 1; c_dat <= 4'h0; end
    for (int n = 0; n < 1040; n++) begin
      bit [3:0] v;
      if (n < 1024) v = d[4095 - 4*n -: 4];
      else for (int j = 0; j < 4; j++) v[j] = crc[16*j + 15 - (n - 1024)];
      @(posedge clk);
      if (to_host_side) h_dat <= v; else c_dat <= v;
    end
    @(posedge clk);
    if (to_host_side) h_dat <= 4'hF; else c_dat <= 4'hF;
    @(posedge clk);
    if (to_host_side) h_drv <= 0; else c_drv <= 0;
  endtask

  // receive one block on a DAT bus driven by the unit
  task automatic take_block(input bit host_side, input int to, output bit [4095:0] d, output bit crc_ok, output bit got);
    bit [63:0] crc;
    int t;
    t = 0; got = 0; crc_ok = 0;
    @(negedge clk);
    while (!(host_side ? (host_dat_oe && host_dat_o == 0) : (card_dat_oe && card_dat_o == 0)) && t < to) begin @(negedge clk); t++; end
    if (t >= to) return;
    for (int n = 0; n < 1040; n++) begin
      bit [3:0] v;
      @(negedge clk);
      v = host_side ? host_dat_o : card_dat_o;
      if (n < 1024) d[4095 - 4*n -: 4] = v;
      else for (int j = 0; j < 4; j++) crc[16*j + 15 - (n - 1024)] = v[j];
    end
    @(negedge clk);
    crc_ok = (crc == ref_sector_crc(d)) && (host_side ? host_dat_o : card_dat_o) == 4'hF;
    got = 1;
  endtask

  bit [4095:0] plain, enc, d;
  bit crc_ok, got;

  initial begin
    int t, busy_clks;
    bit [2:0] tok;
    repeat (3) @(posedge clk); rst_n = 1;
    key_valid = 1;
    repeat (14) @(posedge clk);
    check(keys_ready, "round keys ready");

    // ---- idle pass-through
    @(posedge clk); c_drv <= 1; c_dat <= 4'b1110;
    @(posedge clk); c_drv <= 0; c_dat <= 4'hF;
    @(negedge clk);
    check(host_dat_oe && host_dat_o == 4'b1110, "idle: card DAT passed one clock late");

    // ---- read
    plain = pattern(1); enc = ref_aes_sector(KEY, plain, 0);
    pulse_op(OP_READ, 0, 100);
    fork
      drive_block(0, enc, 0);
      take_block(1, 3000, d, crc_ok, got);
    join
    check(got && crc_ok && d == plain, "read: decrypted sector with a valid CRC");
    check(last_proc_cycles > 0 && last_proc_cycles <= 52, $sformatf("processing %0d clocks per sector (52 allowed)", last_proc_cycles));
    repeat (20) @(posedge clk);

    // ---- read with a transmission error
    pulse_op(OP_READ, 0, 101);
    fork
      drive_block(0, enc, 1);
      take_block(1, 3000, d, crc_ok, got);
    join
    check(got && !crc_ok && d == enc, "faulty block passed on unencrypted with its CRC error");
    repeat (20) @(posedge clk);

    // ---- write
    plain = pattern(2);
    pulse_op(OP_WRITE, 0, 200);
    fork
      drive_block(1, plain, 0);
      begin
        take_block(0, 3000, d, crc_ok, got);
        check(got && crc_ok && d == ref_aes_sector(KEY, plain, 0), "write: card gets the sector encrypted with a valid CRC");
        // card: token "010" then 20 busy clocks
        repeat (2) @(posedge clk);
        for (int i = 0; i < 5; i++) begin c_drv <= 1; c_dat <= {3'b111, 5'b00101 >> (4 - i)}; @(posedge clk); end
        c_dat <= 4'b1110;
        repeat (20) @(posedge clk);
        c_dat <= 4'hF; @(posedge clk); c_drv <= 0;
      end
      begin
        // host: token from the unit, then busy until the card is done
        t = 0;
        @(negedge clk);
        while (!(host_dat_oe && !host_dat_o[0]) && t < 1200) begin @(negedge clk); t++; end
        for (int i = 0; i < 3; i++) begin @(negedge clk); tok[2 - i] = host_dat_o[0]; end
        @(negedge clk);
        check(tok == 3'b010, $sformatf("write: positive token to the host (%b)", tok));
        busy_clks = 0;
        @(negedge clk);
        while (host_dat_oe && !host_dat_o[0] && busy_clks < 5000) begin @(negedge clk); busy_clks++; end
      end
    join
    check(busy_clks > 1040 + 20, $sformatf("host kept busy until the card finished (%0d clocks)", busy_clks));
    repeat (20) @(posedge clk);

    // ---- stage 3b: MBR, boot image, token
    rst_n = 0; stage = STAGE_CONTENT; repeat (2) @(posedge clk); rst_n = 1;
    repeat (14) @(posedge clk);
    plain = {512{8'h5A}};
    pulse_op(OP_READ, 0, 0);
    fork
      drive_block(0, ref_aes_sector(KEY, plain, 0), 0);
      take_block(1, 3000, d, crc_ok, got);
    join
    check(got && crc_ok && d == plain, "MBR read");
    repeat (5) @(posedge clk);
    check(au.mbr_ok && !au.mbr_fail, "MBR authenticated");
    begin
      bit [255:0] h;
      bit [4095:0] s [3];
      s[0] = pattern(16); s[1] = pattern(17);
      h = ref_sha_iv();
      for (int k = 0; k < 2; k++) for (int b = 0; b < 8; b++) h = ref_sha_compress(h, s[k][4095 - 512*b -: 512]);
      h = ref_sha_compress(h, {8'h80, 440'b0, 64'd8192});
      s[2] = {h, 3840'b0};
      pulse_op(OP_READ, 1, BLBA);
      fork
        for (int k = 0; k < 3; k++) begin drive_block(0, ref_aes_sector(KEY, s[k], 0), 0); @(posedge clk); end
        for (int k = 0; k < 3; k++) begin
          take_block(1, 3000, d, crc_ok, got);
          check(got && crc_ok && d == s[k], $sformatf("multi-block read, block %0d", k));
        end
      join
      pulse_op(OP_STOP, 0, 0);
    end
    repeat (5) @(posedge clk);
    check(au.img_ok && !au.img_fail, "boot image authenticated by its token");

    // ---- modified MBR
    rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    repeat (14) @(posedge clk);
    plain = {512{8'h5A}}; plain[2000] = ~plain[2000];
    pulse_op(OP_READ, 0, 0);
    fork
      drive_block(0, ref_aes_sector(KEY, plain, 0), 0);
      take_block(1, 3000, d, crc_ok, got);
    join
    check(au.mbr_fail && !au.mbr_ok, "modified MBR detected");
    check(got && !crc_ok && d == (plain ^ 4096'hFF), "last byte inverted so the host sees a CRC error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
