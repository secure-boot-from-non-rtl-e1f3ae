// Full-size system testbench of the TMIU: the unit at its default parameters
// (boot image of 2048 sectors = 1 MiB at sector 2048) boots a host from the
// SD card model, as in a real start-up:
//   card initialisation -> device and card identity checks -> key derivation
//   -> MBR read and authentication -> CMD18 over the whole boot image and
//   the token sector (2049 blocks) with on-the-fly hashing -> access granted
//   -> one encrypted sector write and its read-back.
// Every block the host receives is compared with the plaintext the card
// content was made from; the run reports the achieved read throughput in
// bytes per SD clock and the per-sector processing time.
module tb_tmiu_full;
  localparam logic [31:0] BOOT_LBA     = 32'd2048;
  localparam int unsigned BOOT_SECTORS = 2048;

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

  int max_proc = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && dut.u_data.last_proc_cycles > 8'(max_proc)) max_proc = int'(dut.u_data.last_proc_cycles);

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [4095:0] d, p;
    bit good, got;
    bit [2:0] tok;
    int ce, gb;
    bit bad;

    check(dut.BOOT_SECTORS == 2048 && dut.BOOT_LBA == 2048, "default boot image geometry");
    load_card();
    do_reset();
    init_card(good);
    check(good, "card initialisation through the unit");
    select_card(good);
    check(good, "card selected, 4-bit mode");
    read_sector(0, d, good, ce);
    check(good && d == mbr_plain(), "MBR decrypted");
    begin
      longint c0, c1;
      c0 = cyc;
      boot_read(gb, bad);
      c1 = cyc;
      check(gb == BOOT_SECTORS + 1 && !bad, $sformatf("boot image: %0d of %0d blocks intact", gb, BOOT_SECTORS + 1));
      $display("boot image read: %0d blocks in %0d clocks, %0d bytes per 1000 clocks",
               gb, c1 - c0, 64'(gb) * 512 * 1000 / (c1 - c0));
    end
    repeat (50) @(posedge clk);
    check(status_led == 4'hF && !lockdown, $sformatf("access granted, leds=%b", status_led));

    p = boot_plain(9000);
    send_cmd(24, 32'd9000, 48, r, ok);
    write_block(p, 0, tok, got);
    check(got && tok == 3'b010, "write accepted");
    repeat (40) @(posedge clk);
    check(card.mem.exists(9000) && card.mem[9000] == ref_aes_sector(KEY, p, 0), "sector stored encrypted");
    read_sector(9000, d, good, ce);
    check(good && d == p, "sector reads back");
    check(max_proc > 0 && max_proc <= 52, $sformatf("sector processing %0d cycles (limit 52)", max_proc));
    $display("sector processing: %0d cycles", max_proc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
