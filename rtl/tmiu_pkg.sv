// Shared types and constants of the trusted memory-interface unit (TMIU).
//
// The TMIU runs a four-stage secure boot: (1) authenticate the device by its
// DNA, (2) authenticate the SD card by its CID, (3) derive the AES key and
// authenticate the card content (MBR and boot image), (4) grant the processor
// full access. Any failing stage ends in a secure lockdown. The stage type,
// the descriptor the command controller hands to the data controller, and the
// SD command indices the unit acts on are defined here.
package tmiu_pkg;

  // Boot stage of the unit. STAGE_DEV..STAGE_CONTENT are the stages in which an
  // authentication is pending; STAGE_GRANTED is stage 4 of the boot flow.
  typedef enum logic [2:0] {
    STAGE_DEV      = 3'd0,  // stage 1: device DNA check running
    STAGE_NVM      = 3'd1,  // stage 2: waiting for and checking the card CID
    STAGE_KEY      = 3'd2,  // stage 3a: key derivation running
    STAGE_CONTENT  = 3'd3,  // stage 3b: MBR and boot image authentication
    STAGE_GRANTED  = 3'd4,  // stage 4: system access granted
    STAGE_LOCKDOWN = 3'd7   // secure lockdown, left only by reset
  } stage_e;

  // Kind of DAT-line transfer announced by a forwarded command.
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,  // CMD17 / CMD18: card to host, decrypted
    OP_WRITE = 2'd1,  // CMD24 / CMD25: host to card, encrypted
    OP_STOP  = 2'd2   // CMD12: end of a multi-block transfer
  } op_kind_e;

  typedef struct packed {
    op_kind_e    kind;
    logic        multi;  // multi-block (CMD18 / CMD25)
    logic [31:0] lba;    // first sector (SDHC/SDXC block address)
  } data_op_t;

  // Status reported by the key generator (Fig. 3 "Key Gen. Status").
  typedef struct packed {
    logic dev_ok;
    logic dev_fail;
    logic nvm_ok;
    logic nvm_fail;
    logic key_valid;
  } keygen_status_t;

  // Status reported by the data controller (Fig. 3 "Auth. Status").
  typedef struct packed {
    logic mbr_ok;
    logic mbr_fail;
    logic img_ok;
    logic img_fail;
  } auth_status_t;

  // SD command indices used by the unit.
  localparam logic [5:0] CMD_GO_IDLE      = 6'd0;
  localparam logic [5:0] CMD_ALL_SEND_CID = 6'd2;
  localparam logic [5:0] CMD_SEND_CSD     = 6'd9;
  localparam logic [5:0] CMD_SEND_CID     = 6'd10;
  localparam logic [5:0] CMD_STOP         = 6'd12;
  localparam logic [5:0] CMD_READ_SINGLE  = 6'd17;
  localparam logic [5:0] CMD_READ_MULTI   = 6'd18;
  localparam logic [5:0] CMD_WRITE_SINGLE = 6'd24;
  localparam logic [5:0] CMD_WRITE_MULTI  = 6'd25;
  localparam logic [5:0] CMD_APP          = 6'd55;

endpackage
