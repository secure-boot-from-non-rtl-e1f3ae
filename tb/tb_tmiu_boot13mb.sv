// Boot-time workload testbench: a 13 MB boot (boot image, device tree and
// kernel), as in the measured Linux boot the design was made for, through the
// TMIU at its default parameters.
// After the secure boot of tb_tmiu_full (MBR, 2048-sector authenticated boot
// image, token sector) the host reads the rest of the 13 MB (13,000,000
// bytes = 25,391 sectors in all) with one CMD18 in stage 4, where every
// sector is still decrypted. The sectors after the token sector are left
// unwritten on the card model (all-zero ciphertext), so each must arrive as
// the AES-128 decryption of a zero block under the derived key. The run
// reports the time the whole boot read takes at a 50 MHz SD clock and the
// data rate, next to the card's 25 MB/s line rate.
module tb_tmiu_boot13mb;
  localparam logic [31:0] BOOT_LBA     = 32'd2048;
  localparam int unsigned BOOT_SECTORS = 2048;
  localparam int unsigned TOTAL_SECT   = (13_000_000 + 511) / 512;          // 25,391
  localparam int unsigned REST_SECT    = TOTAL_SECT - 1 - (BOOT_SECTORS + 1); // after MBR, image, token

  tmiu_top dut (
    .clk, .rst_n,
    .host_cmd_i(h_cmd), .host_cmd_drv(h_cmd_drv), .host_cmd_o, .host_cmd_oe,
    .host_dat_i(h_dat), .host_dat_drv(h_dat_drv), .host_dat_o, .host_dat_oe,
    .card_cmd_i(c_cmd), .card_cmd_drv(c_cmd_drv), .card_cmd_o, .card_cmd_oe,
    .card_dat_i(c_dat), .card_dat_drv(c_dat_drv), .card_dat_o, .card_dat_oe,
    .dna_read, .dna_shift, .dna_dout,
    .status_led, .lockdown
  );

`include "tmiu_bench.svh"

  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [4095:0] d, zero_plain;
    bit good, crc_ok, got, bad;
    int ce, gb, rest_ok;
    longint c0, c1, c2;

    zero_plain = ref_aes_sector(KEY, '0, 1);
    load_card();
    do_reset();
    init_card(good);
    check(good, "card initialisation through the unit");
    select_card(good);
    check(good, "card selected, 4-bit mode");
    c0 = cyc;
    read_sector(0, d, good, ce);
    check(good && d == mbr_plain(), "MBR decrypted");
    boot_read(gb, bad);
    check(gb == BOOT_SECTORS + 1 && !bad, $sformatf("boot image: %0d of %0d blocks intact", gb, BOOT_SECTORS + 1));
    repeat (20) @(posedge clk);
    check(status_led == 4'hF && !lockdown, $sformatf("access granted, leds=%b", status_led));

    c1 = cyc;
    send_cmd(18, BOOT_LBA + BOOT_SECTORS + 1, 48, r, ok);
    check(ok, "CMD18 for the kernel and device tree answered");
    rest_ok = 0;
    for (int unsigned s = 0; s < REST_SECT; s++) begin
      read_block(5000, d, crc_ok, got);
      if (!got) break;
      if (crc_ok && d == zero_plain) rest_ok++;
    end
    send_cmd(12, 0, 48, r, ok);
    wait_dat_idle();
    c2 = cyc;
    check(rest_ok == int'(REST_SECT), $sformatf("kernel region: %0d of %0d sectors decrypted", rest_ok, REST_SECT));
    $display("13 MB boot: %0d sectors, %0d clocks = %0d ms at 50 MHz, %0d kB/s (line rate 25,000 kB/s)",
             TOTAL_SECT, c2 - c0, (c2 - c0) / 50_000, 64'(TOTAL_SECT) * 512 * 50_000 / (c2 - c0));
    $display("stage-4 part alone: %0d kB/s", 64'(REST_SECT) * 512 * 50_000 / (c2 - c1));
    check((c2 - c0) / 50_000 < 560, "13 MB boot read within 560 ms at 50 MHz");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
