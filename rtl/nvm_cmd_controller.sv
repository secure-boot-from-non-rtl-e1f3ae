// NVM_CMD controller of the TMIU: supervises the SD command line between the
// processor's SD host (host side) and the SD card (card side), and runs the
// boot stage sequence.
//
// Commands from the host are received completely (48 bits: start bit,
// transmission bit, 6-bit index, 32-bit argument, CRC7, end bit), checked for
// framing and CRC7, and only then re-sent to the card, so a command reaches
// the card 49 clocks after its first bit left the host. A command is dropped
// (the host sees no response, times out and retries) when its framing or CRC
// is wrong or when the current stage does not permit it:
//   stage 1 (device check pending) and lockdown: nothing is forwarded;
//   stages 2 and 3a (card check, key derivation): everything except the
//     sector commands CMD17/18/24/25;
//   stage 3b (content authentication): sector reads CMD17/18 as well;
//   stage 4 (granted): everything.
// Card responses are passed to the host one clock later, unchanged, except in
// lockdown. The controller parses them in parallel: the 136-bit R2 answer to
// CMD2/CMD10 carries the CID, whose own CRC7 is checked before it is handed
// to the key generator as ID_NVM. Each forwarded sector command or CMD12 is
// announced to the data controller with its sector number (block address).
// The stage register advances on the key generator's and data controller's
// status and drives four status outputs, one per completed boot stage.
//
// From the paper: the controller's role (observe commands, forward the CID,
// grant or block access, track sector numbers, terminate on tampering,
// lockdown) and the four status LEDs. This design's choices: store-and-forward
// of commands, the per-stage command filter above, dropping instead of
// answering blocked commands, and ignoring a CID whose CRC7 is wrong.
module nvm_cmd_controller (
  input  logic         clk,
  input  logic         rst_n,
  // host side of the CMD line
  input  logic         host_cmd_i,
  input  logic         host_cmd_drv,
  output logic         host_cmd_o,
  output logic         host_cmd_oe,
  // card side of the CMD line
  input  logic         card_cmd_i,
  input  logic         card_cmd_drv,
  output logic         card_cmd_o,
  output logic         card_cmd_oe,
  // key generator
  input  tmiu_pkg::keygen_status_t kg_status,
  output logic         cid_valid,
  output logic [127:0] cid,
  // data controller
  input  logic         keys_ready,
  input  tmiu_pkg::auth_status_t   auth_status,
  output logic         op_valid,
  output tmiu_pkg::data_op_t       op,
  // stage
  output tmiu_pkg::stage_e stage,
  output logic [3:0]   stage_ok,
  output logic         lockdown
);
  import tmiu_pkg::*;

  // ---------------------------------------------------------------- stages
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stage <= STAGE_DEV;
    else begin
      unique case (stage)
        STAGE_DEV:     if (kg_status.dev_fail) stage <= STAGE_LOCKDOWN;
                       else if (kg_status.dev_ok) stage <= STAGE_NVM;
        STAGE_NVM:     if (kg_status.nvm_fail) stage <= STAGE_LOCKDOWN;
                       else if (kg_status.nvm_ok) stage <= STAGE_KEY;
        STAGE_KEY:     if (kg_status.key_valid && keys_ready) stage <= STAGE_CONTENT;
        STAGE_CONTENT: if (auth_status.mbr_fail || auth_status.img_fail) stage <= STAGE_LOCKDOWN;
                       else if (auth_status.mbr_ok && auth_status.img_ok) stage <= STAGE_GRANTED;
        STAGE_GRANTED: ;
        STAGE_LOCKDOWN: ;
        default:       stage <= STAGE_LOCKDOWN;
      endcase
    end
  end

  assign lockdown    = (stage == STAGE_LOCKDOWN);
  assign stage_ok[0] = kg_status.dev_ok && !lockdown;
  assign stage_ok[1] = kg_status.nvm_ok && !lockdown;
  assign stage_ok[2] = auth_status.mbr_ok && auth_status.img_ok && !lockdown;
  assign stage_ok[3] = (stage == STAGE_GRANTED);

  // ------------------------------------------------- command from the host
  typedef enum logic [1:0] {C_IDLE, C_RECV, C_SEND} cstate_e;
  cstate_e     cst;
  logic [47:0] cmd_sr;
  logic [5:0]  ccnt;
  logic [6:0]  ccrc;
  logic        app_next;   // previous forwarded command was CMD55

  crc7 u_cmd_crc (
    .clk, .rst_n,
    .clr (cst == C_IDLE),
    .en  ((cst == C_IDLE && host_cmd_drv && !host_cmd_i) || (cst == C_RECV && ccnt < 6'd40)),
    .din (host_cmd_i),
    .crc (ccrc)
  );

  // the complete command, one clock after its end bit was shifted in
  logic [47:0] cmd_full;
  logic [5:0]  idx;
  logic        frame_ok, crc_ok, permit, sector_cmd, read_cmd;
  assign cmd_full   = {cmd_sr[46:0], host_cmd_i};
  assign idx        = cmd_full[45:40];
  assign frame_ok   = !cmd_full[47] && cmd_full[46] && cmd_full[0];
  assign crc_ok     = (cmd_full[7:1] == ccrc);
  assign sector_cmd = !app_next && (idx == CMD_READ_SINGLE || idx == CMD_READ_MULTI ||
                                    idx == CMD_WRITE_SINGLE || idx == CMD_WRITE_MULTI);
  assign read_cmd   = (idx == CMD_READ_SINGLE || idx == CMD_READ_MULTI);

  always_comb begin
    unique case (stage)
      STAGE_NVM, STAGE_KEY: permit = !sector_cmd;
      STAGE_CONTENT:        permit = !sector_cmd || read_cmd;
      STAGE_GRANTED:        permit = 1'b1;
      default:              permit = 1'b0;
    endcase
  end

  // expected response of the forwarded command: 0 none, 1 48-bit, 2 R2 with CID, 3 R2 other
  logic [1:0] resp_kind;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst       <= C_IDLE;
      cmd_sr    <= '0;
      ccnt      <= '0;
      app_next  <= 1'b0;
      op_valid  <= 1'b0;
      op        <= '0;
      resp_kind <= '0;
      card_cmd_o  <= 1'b1;
      card_cmd_oe <= 1'b0;
    end else begin
      op_valid <= 1'b0;
      unique case (cst)
        C_IDLE: begin
          card_cmd_oe <= 1'b0;
          card_cmd_o  <= 1'b1;
          if (host_cmd_drv && !host_cmd_i) begin
            cmd_sr <= {47'b0, host_cmd_i};
            ccnt   <= 6'd1;
            cst    <= C_RECV;
          end
        end
        C_RECV: begin
          cmd_sr <= cmd_full;
          ccnt   <= ccnt + 6'd1;
          if (ccnt == 6'd47) begin
            ccnt <= '0;
            if (frame_ok && crc_ok && permit) begin
              cst      <= C_SEND;
              app_next <= (idx == CMD_APP) && !app_next;
              unique case (idx)
                CMD_GO_IDLE:                resp_kind <= 2'd0;
                CMD_ALL_SEND_CID, CMD_SEND_CID: resp_kind <= app_next ? 2'd1 : 2'd2;
                CMD_SEND_CSD:               resp_kind <= app_next ? 2'd1 : 2'd3;
                default:                    resp_kind <= 2'd1;
              endcase
              if (sector_cmd || (idx == CMD_STOP && !app_next)) begin
                op_valid <= 1'b1;
                op.lba   <= cmd_full[39:8];
                op.multi <= (idx == CMD_READ_MULTI || idx == CMD_WRITE_MULTI);
                op.kind  <= (idx == CMD_STOP) ? OP_STOP : (read_cmd ? OP_READ : OP_WRITE);
              end
            end else begin
              cst <= C_IDLE;
            end
          end
        end
        C_SEND: begin
          card_cmd_oe <= 1'b1;
          card_cmd_o  <= cmd_sr[47];
          cmd_sr      <= {cmd_sr[46:0], 1'b1};
          ccnt        <= ccnt + 6'd1;
          if (ccnt == 6'd47) cst <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase
      if (lockdown) begin
        cst         <= C_IDLE;
        card_cmd_oe <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------- response from card
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_cmd_o  <= 1'b1;
      host_cmd_oe <= 1'b0;
    end else begin
      host_cmd_o  <= card_cmd_i;
      host_cmd_oe <= card_cmd_drv && !lockdown;
    end
  end

  logic         rbusy;
  logic [7:0]   rcnt;
  logic [135:0] rsp_sr;
  logic [6:0]   rcrc;
  logic         r2_cid;

  crc7 u_cid_crc (
    .clk, .rst_n,
    .clr (!rbusy),
    .en  (rbusy && rcnt >= 8'd8 && rcnt < 8'd128),
    .din (card_cmd_i),
    .crc (rcrc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbusy     <= 1'b0;
      rcnt      <= '0;
      rsp_sr    <= '0;
      r2_cid    <= 1'b0;
      cid_valid <= 1'b0;
      cid       <= '0;
    end else begin
      cid_valid <= 1'b0;
      if (!rbusy) begin
        // a response can only follow a forwarded command that expects one
        if (card_cmd_drv && !card_cmd_i && cst == C_IDLE && resp_kind != 2'd0 && !lockdown) begin
          rbusy  <= 1'b1;
          rcnt   <= 8'd1;
          r2_cid <= (resp_kind == 2'd2);
          rsp_sr <= '0;
        end
      end else begin
        rsp_sr <= {rsp_sr[134:0], card_cmd_i};
        rcnt   <= rcnt + 8'd1;
        if ((resp_kind[1] && rcnt == 8'd135) || (!resp_kind[1] && rcnt == 8'd47)) begin
          rbusy <= 1'b0;
          // R2 with CID: bits [127:1] are CID[127:1]; CID[7:1] is its CRC7
          if (r2_cid && rsp_sr[6:0] == rcrc && card_cmd_i && stage == STAGE_NVM) begin
            cid_valid <= 1'b1;
            cid       <= {rsp_sr[126:0], 1'b1};
          end
        end
      end
    end
  end

  // The start bit of a response is only searched for after the command was
  // sent completely; a new command must not begin while one is re-sent.
  assert property (@(posedge clk)
                   (cst == C_SEND) |-> !(card_cmd_drv && card_cmd_oe))
    else $error("card drove CMD while the TMIU was sending a command");

endmodule
