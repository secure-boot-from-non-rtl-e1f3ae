// Testbench of the NVM_CMD controller on its own. The key generator and data
// controller status inputs are driven directly; a host and a card are
// modelled by tasks that drive and watch the two sides of the CMD line.
// Checked: a permitted command reaches the card unchanged 49 clocks after its
// first bit (store and forward); commands in stage 1, sector commands before
// stage 3b, writes before stage 4, commands with a bad CRC7 and everything in
// lockdown are dropped; a card response reaches the host one clock later
// bit for bit; the CID inside an R2 response is handed on only with a valid
// CRC7; sector commands and CMD12 are announced with their sector number;
// the stage register follows the status inputs and drives the four LEDs.
module tb_nvm_cmd_controller;
  import tmiu_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  logic h_cmd = 1, h_drv = 0, c_cmd = 1, c_drv = 0;
  logic host_cmd_o, host_cmd_oe, card_cmd_o, card_cmd_oe;
  keygen_status_t kg = '0;
  auth_status_t   au = '0;
  logic keys_ready = 0;
  logic cid_valid, op_valid, lockdown;
  logic [127:0] cid;
  data_op_t op;
  stage_e stage;
  logic [3:0] stage_ok;

  nvm_cmd_controller dut (
    .clk, .rst_n,
    .host_cmd_i(h_cmd), .host_cmd_drv(h_drv), .host_cmd_o, .host_cmd_oe,
    .card_cmd_i(c_cmd), .card_cmd_drv(c_drv), .card_cmd_o, .card_cmd_oe,
    .kg_status(kg), .cid_valid, .cid, .keys_ready, .auth_status(au),
    .op_valid, .op, .stage, .stage_ok, .lockdown
  );

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // what the card side saw, captured by a monitor
  bit [47:0] seen;
  int        seen_n = 0;
  longint    cyc = 0, seen_at;
  always @(posedge clk) cyc++;
  initial begin
    forever begin
      @(posedge clk);
      if (card_cmd_oe && !card_cmd_o) begin
        seen_at = cyc;
        seen[47] = 0;
        for (int i = 46; i >= 0; i--) begin @(posedge clk); seen[i] = card_cmd_o; end
        seen_n++;
      end
    end
  end
  bit op_seen; data_op_t op_last;
  always @(posedge clk) if (op_valid) begin op_seen = 1; op_last = op; end

  function automatic bit [47:0] mk(input bit [5:0] idx, input bit [31:0] arg);
    bit q[$]; bit [47:0] c;
    c[47:8] = {2'b01, idx, arg};
    for (int i = 47; i >= 8; i--) q.push_back(c[i]);
    c[7:1] = ref_crc7(q); c[0] = 1;
    return c;
  endfunction

  // send a command; returns whether (and how many clocks after its first bit)
  // it appeared on the card side
  task automatic host_send(input bit [47:0] c, output bit fwd, output int lat);
    int n0; longint t0;
    n0 = seen_n; op_seen = 0;
    @(posedge clk); t0 = cyc;
    for (int i = 47; i >= 0; i--) begin h_drv <= 1; h_cmd <= c[i]; @(posedge clk); end
    h_drv <= 0; h_cmd <= 1;
    repeat (110) @(posedge clk);
    fwd = (seen_n == n0 + 1) && seen == c;
    lat = int'(seen_at - t0);
  endtask

  // the card answers with `bits`; the host side must show the same bits one clock later
  task automatic card_send(input bit b[$], output bit same);
    bit got[$];
    same = 1;
    fork
      begin
        foreach (b[i]) begin c_drv <= 1; c_cmd <= b[i]; @(posedge clk); end
        c_drv <= 0; c_cmd <= 1;
      end
      begin
        @(posedge clk); @(negedge clk);
        foreach (b[i]) begin
          if (!(host_cmd_oe && host_cmd_o == b[i])) same = 0;
          @(negedge clk);
        end
      end
    join
    repeat (4) @(posedge clk);
  endtask

  initial begin
    bit fwd, same; int lat;
    bit [47:0] c;
    bit q[$], r2[$];
    bit [127:0] cidv;

    repeat (3) @(posedge clk); rst_n = 1;
    check(stage == STAGE_DEV && stage_ok == 4'b0000, "reset stage");
    host_send(mk(8, 32'h1AA), fwd, lat);
    check(!fwd, "stage 1: nothing forwarded");
    kg.dev_ok = 1; @(posedge clk); @(negedge clk);
    check(stage == STAGE_NVM && stage_ok == 4'b0001, "device check passed -> stage 2");
    host_send(mk(8, 32'h1AA), fwd, lat);
    check(fwd, "CMD8 forwarded unchanged");
    // the monitor samples a bit one clock after it was driven
    check(lat - 1 == 49, $sformatf("store-and-forward latency %0d clocks (49)", lat - 1));
    c = mk(0, 0); c[20] = ~c[20];
    host_send(c, fwd, lat);
    check(!fwd, "command with a bad CRC7 dropped");
    host_send(mk(17, 0), fwd, lat);
    check(!fwd && !op_seen, "read before key derivation dropped");
    // R1 response passes through
    q = {};
    for (int i = 47; i >= 0; i--) q.push_back(mk(8, 32'h1AA)[i] ^ (i == 46));
    card_send(q, same);
    check(same, "48-bit response passed one clock late");
    // CMD2 and its R2 with the CID
    host_send(mk(2, 0), fwd, lat);
    check(fwd, "CMD2 forwarded");
    cidv = 128'h0353445355313647801234567800e5a9;
    r2 = {0, 0, 1, 1, 1, 1, 1, 1};
    for (int i = 127; i >= 1; i--) r2.push_back(cidv[i]);
    r2.push_back(1);
    fork
      card_send(r2, same);
      begin : w
        bit got;
        got = 0;
        repeat (160) begin @(posedge clk); if (cid_valid) begin got = 1; check(cid == cidv, "CID extracted"); end end
        check(got, "cid_valid after a good R2");
      end
    join
    check(same, "R2 passed one clock late");
    // a CID with a bad CRC7 is ignored
    host_send(mk(2, 0), fwd, lat);
    r2[130] = ~r2[130];
    fork
      card_send(r2, same);
      begin
        bit got; got = 0;
        repeat (160) begin @(posedge clk); if (cid_valid) got = 1; end
        check(!got, "CID with a bad CRC7 ignored");
      end
    join
    kg.nvm_ok = 1; @(posedge clk); @(negedge clk);
    check(stage == STAGE_KEY && stage_ok == 4'b0011, "card check passed -> stage 3a");
    kg.key_valid = 1; keys_ready = 1; @(posedge clk); @(negedge clk);
    check(stage == STAGE_CONTENT, "key ready -> stage 3b");
    host_send(mk(18, 32'd2048), fwd, lat);
    check(fwd && op_seen && op_last.kind == OP_READ && op_last.multi && op_last.lba == 2048, "CMD18 forwarded and announced");
    host_send(mk(24, 32'd5), fwd, lat);
    check(!fwd && !op_seen, "write before the grant dropped");
    host_send(mk(12, 0), fwd, lat);
    check(fwd && op_seen && op_last.kind == OP_STOP, "CMD12 forwarded and announced");
    au.mbr_ok = 1; au.img_ok = 1; @(posedge clk); @(negedge clk);
    check(stage == STAGE_GRANTED && stage_ok == 4'b1111, "content authenticated -> stage 4");
    host_send(mk(24, 32'd77), fwd, lat);
    check(fwd && op_seen && op_last.kind == OP_WRITE && !op_last.multi && op_last.lba == 77, "CMD24 forwarded after the grant");
    host_send(mk(55, 0), fwd, lat);
    host_send(mk(18, 1), fwd, lat);
    check(fwd, "ACMD18 (application command) forwarded");
    check(!op_seen, "ACMD18 is not a sector read");

    // tampering: lockdown
    rst_n = 0; kg = '0; au = '0; keys_ready = 0; repeat (2) @(posedge clk); rst_n = 1;
    kg.dev_ok = 1; kg.nvm_ok = 1; kg.key_valid = 1; keys_ready = 1;
    repeat (3) @(posedge clk);
    au.mbr_fail = 1; @(posedge clk); @(negedge clk);
    check(lockdown && stage_ok == 4'b0000, "MBR failure -> lockdown, LEDs off");
    host_send(mk(8, 32'h1AA), fwd, lat);
    check(!fwd, "nothing forwarded in lockdown");
    card_send(q, same);
    check(!host_cmd_oe, "no response passed in lockdown");
    rst_n = 0; kg = '0; au = '0; repeat (2) @(posedge clk); rst_n = 1;
    kg.dev_fail = 1; @(posedge clk); @(negedge clk);
    check(lockdown, "device failure -> lockdown");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
