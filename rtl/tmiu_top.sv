// Trusted memory-interface unit (TMIU), top level.
//
// The unit is placed in the programmable logic of a processor/FPGA SoC, on
// the SD bus between the processor's SD host controller and the SD card that
// holds the (fully encrypted) boot image and file system. Its only ports are
// the CMD and DAT lines of both sides, the device DNA port and the status
// outputs. Every bidirectional SD line appears as three signals per side:
// the value seen on the line and whether the far end drives it (`*_i`,
// `*_drv`), and the value and enable the TMIU drives (`*_o`, `*_oe`). One
// clock cycle is one SD clock cycle (50 MHz in high-speed mode); the unit
// samples and drives on the same edge.
//
// After reset it runs the boot flow: (1) the key generator reads and checks
// the device DNA; (2) the command controller forwards the card initialisation
// and passes the card's CID to the key generator, which checks it; (3) the
// key generator derives the AES key from both identifiers, and the data
// controller decrypts what the host reads and authenticates the MBR and the
// boot image; (4) the processor gets full read/write access, every sector
// still decrypted on reads and encrypted on writes. A failing check locks the
// unit down until the next reset. `status_led[i]` lights when stage i+1 has
// passed. One SHA-256 core serves the key generator until the key exists and
// the data controller afterwards.
module tmiu_top #(
  parameter logic [255:0] DEV_REF_HASH = 256'hc4735b78ca1a9c0782be0f7a745f7ccdd7b81ece1e1c65c9b1d4d7de61e85707,
  parameter logic [255:0] NVM_REF_HASH = 256'h559dff69b78bb2db09794e5e0fdc02b04d4af3c869b57d436867d2b57b648d14,
  parameter logic [31:0]  KDF_COUNTER  = 32'd1,
  parameter logic [255:0] MBR_REF_HASH = 256'h795d7293ebd66f5d0f67190bfb3ff72fbf3a624a034a0f5f08c018f1f7438fa5,
  parameter logic [31:0]  BOOT_LBA     = 32'd2048,
  parameter int unsigned  BOOT_SECTORS = 2048
) (
  input  logic       clk,
  input  logic       rst_n,
  // processor (SD host) side
  input  logic       host_cmd_i,
  input  logic       host_cmd_drv,
  output logic       host_cmd_o,
  output logic       host_cmd_oe,
  input  logic [3:0] host_dat_i,
  input  logic       host_dat_drv,
  output logic [3:0] host_dat_o,
  output logic       host_dat_oe,
  // NVM (SD card) side
  input  logic       card_cmd_i,
  input  logic       card_cmd_drv,
  output logic       card_cmd_o,
  output logic       card_cmd_oe,
  input  logic [3:0] card_dat_i,
  input  logic       card_dat_drv,
  output logic [3:0] card_dat_o,
  output logic       card_dat_oe,
  // device DNA port
  output logic       dna_read,
  output logic       dna_shift,
  input  logic       dna_dout,
  // status
  output logic [3:0] status_led,
  output logic       lockdown
);
  import tmiu_pkg::*;

  keygen_status_t kg_status;
  auth_status_t   auth_status;
  stage_e         stage;
  logic           cid_valid, keys_ready, op_valid;
  logic [127:0]   cid, key;
  data_op_t       op;

  // shared SHA-256 core
  logic         kg_sha_init, dc_sha_init, dc_sha_next;
  logic [511:0] kg_sha_block, dc_sha_block;
  logic         sha_init, sha_next, sha_ready;
  logic [511:0] sha_block;
  logic [255:0] sha_digest;

  always_comb begin
    if (kg_status.key_valid) begin
      sha_init  = dc_sha_init;
      sha_next  = dc_sha_next;
      sha_block = dc_sha_block;
    end else begin
      sha_init  = kg_sha_init;
      sha_next  = 1'b0;
      sha_block = kg_sha_block;
    end
  end

  sha256_core u_sha (
    .clk, .rst_n,
    .init   (sha_init),
    .next   (sha_next),
    .block  (sha_block),
    .ready  (sha_ready),
    .digest (sha_digest)
  );

  key_generator #(
    .DEV_REF_HASH (DEV_REF_HASH),
    .NVM_REF_HASH (NVM_REF_HASH),
    .KDF_COUNTER  (KDF_COUNTER)
  ) u_keygen (
    .clk, .rst_n,
    .dna_read, .dna_shift, .dna_dout,
    .cid_valid, .cid,
    .sha_init   (kg_sha_init),
    .sha_block  (kg_sha_block),
    .sha_ready  (sha_ready && !kg_status.key_valid),
    .sha_digest (sha_digest),
    .status     (kg_status),
    .key
  );

  nvm_cmd_controller u_cmd (
    .clk, .rst_n,
    .host_cmd_i, .host_cmd_drv, .host_cmd_o, .host_cmd_oe,
    .card_cmd_i, .card_cmd_drv, .card_cmd_o, .card_cmd_oe,
    .kg_status,
    .cid_valid, .cid,
    .keys_ready,
    .auth_status,
    .op_valid, .op,
    .stage,
    .stage_ok (status_led),
    .lockdown
  );

  nvm_data_controller #(
    .MBR_REF_HASH (MBR_REF_HASH),
    .BOOT_LBA     (BOOT_LBA),
    .BOOT_SECTORS (BOOT_SECTORS)
  ) u_data (
    .clk, .rst_n,
    .host_dat_i, .host_dat_drv, .host_dat_o, .host_dat_oe,
    .card_dat_i, .card_dat_drv, .card_dat_o, .card_dat_oe,
    .op_valid, .op,
    .stage,
    .auth_status,
    .key_valid  (kg_status.key_valid),
    .key,
    .keys_ready,
    .sha_init   (dc_sha_init),
    .sha_next   (dc_sha_next),
    .sha_block  (dc_sha_block),
    .sha_ready  (sha_ready && kg_status.key_valid),
    .sha_digest (sha_digest),
    .last_proc_cycles ()   // observation only (testbenches)
  );

endmodule
