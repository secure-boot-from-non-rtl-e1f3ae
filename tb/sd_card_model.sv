// Behavioural model of an SDHC card in 4-bit high-speed mode, as far as a
// boot through the TMIU needs it. Not part of the design: it stands for the
// external non-volatile memory.
//
// CMD line: receives 48-bit commands (CRC7 checked, bad commands ignored) and
// answers 2 clocks after the end bit: CMD0 (no response), CMD8 (R7), CMD55,
// ACMD6, CMD13, CMD17/18/24/25 (R1), ACMD41 (R3, ready, CCS set), CMD2/CMD10
// (R2 with `cid`), CMD3 (R6), CMD7 and CMD12 (R1 plus 40 busy clocks on DAT0).
// DAT lines: CMD17/18 send sectors from `mem` (unwritten sectors read as
// zeros), the first 60 clocks after the command, with start bit, CRC16 per
// line and end bit, 2 clocks apart, until the
// single block is done or CMD12 arrives; CMD24/25 receive sectors, check their
// CRC, answer with the CRC status token and 16 busy clocks, and store good
// ones. `flip_lba` makes the next read of that sector go out with one data bit
// inverted (a transmission error); `reads`/`writes` count sectors.
module sd_card_model (
  input  logic       clk,
  input  logic       cmd_i,
  input  logic       cmd_en,
  output logic       cmd_o,
  output logic       cmd_drv,
  input  logic [3:0] dat_i,
  input  logic       dat_en,
  output logic [3:0] dat_o,
  output logic       dat_drv
);
  import tb_ref_pkg::*;

  logic [127:0]  cid = 128'h0353445355313647801234567800e5a9;
  bit [4095:0]   mem [int unsigned];
  longint        flip_lba = -1;
  int            reads = 0, writes = 0, write_crc_errors = 0, cmds = 0, bad_cmds = 0;

  bit            app = 0;
  bit            stop = 0;
  bit            rd_go = 0, wr_go = 0, rd_multi = 0, wr_multi = 0;
  int unsigned   cur_lba;
  bit            busy_req = 0;

  initial begin
    cmd_o = 1; cmd_drv = 0; dat_o = 4'hF; dat_drv = 0;
  end

  task automatic send_resp(input bit b[$]);
    repeat (2) @(posedge clk);
    foreach (b[i]) begin
      @(posedge clk); cmd_drv <= 1; cmd_o <= b[i];
    end
    @(posedge clk); cmd_drv <= 0; cmd_o <= 1;
  endtask

  function automatic void r48(input bit [5:0] idx, input bit [31:0] arg, ref bit q[$]);
    bit [39:0] v;
    bit        c[$];
    v = {2'b00, idx, arg};
    q = {};
    for (int i = 39; i >= 0; i--) q.push_back(v[i]);
    c = q;
    begin
      bit [6:0] crc;
      crc = ref_crc7(c);
      for (int i = 6; i >= 0; i--) q.push_back(crc[i]);
    end
    q.push_back(1);
  endfunction

  // command process
  initial begin
    bit [47:0] c;
    bit        q[$];
    forever begin
      @(posedge clk);
      if (cmd_en && !cmd_i) begin
        c[47] = 0;
        for (int i = 46; i >= 0; i--) begin
          @(posedge clk);
          c[i] = cmd_i;
        end
        begin
          bit b[$];
          b = {};
          for (int i = 47; i >= 8; i--) b.push_back(c[i]);
          if (c[46] !== 1 || c[0] !== 1 || ref_crc7(b) != c[7:1]) begin bad_cmds++; continue; end
        end
        cmds++;
        begin
          bit [5:0]  idx;
          bit [31:0] arg;
          bit        was_app;
          idx = c[45:40];
          arg = c[39:8];
          was_app = app;
          app = 0;
          if (was_app && idx == 41) begin
            q = {0, 0, 1, 1, 1, 1, 1, 1};
            for (int i = 31; i >= 0; i--) q.push_back(1'((32'hC0FF8000 >> i) & 1));
            for (int i = 0; i < 8; i++) q.push_back(1);
            send_resp(q);
          end else if (!was_app && (idx == 2 || idx == 10)) begin
            q = {0, 0, 1, 1, 1, 1, 1, 1};
            for (int i = 127; i >= 1; i--) q.push_back(cid[i]);
            q.push_back(1);
            send_resp(q);
          end else begin
            case (idx)
              0: ;
              8:  begin r48(idx, arg & 32'hFFF, q); send_resp(q); end
              55: begin app = 1; r48(idx, 32'h00000920, q); send_resp(q); end
              3:  begin r48(idx, 32'h12340500, q); send_resp(q); end
              7, 12: begin
                if (idx == 12) stop = 1;
                r48(idx, 32'h00000900, q); send_resp(q);
                busy_req = 1;
              end
              17, 18: begin
                r48(idx, 32'h00000900, q);
                stop = 0; cur_lba = arg; rd_multi = (idx == 18); rd_go = 1;
                send_resp(q);
              end
              24, 25: begin
                r48(idx, 32'h00000900, q);
                stop = 0; cur_lba = arg; wr_multi = (idx == 25); wr_go = 1;
                send_resp(q);
              end
              default: begin r48(idx, 32'h00000900, q); send_resp(q); end
            endcase
          end
        end
      end
    end
  end

  // data process
  initial begin
    forever begin
      @(posedge clk);
      if (busy_req) begin
        busy_req = 0;
        repeat (2) @(posedge clk);
        dat_drv <= 1; dat_o <= 4'b1110;
        repeat (40) @(posedge clk);
        dat_drv <= 0; dat_o <= 4'hF;
      end else if (rd_go) begin
        rd_go = 0;
        repeat (60) @(posedge clk);   // after the R1 response
        do begin
          bit [4095:0] d;
          bit [63:0]   crc;
          d   = mem.exists(cur_lba) ? mem[cur_lba] : '0;
          crc = ref_sector_crc(d);
          if (longint'(cur_lba) == flip_lba) begin
            d[100] = ~d[100];
            flip_lba = -1;
          end
          @(posedge clk); dat_drv <= 1; dat_o <= 4'h0;
          for (int n = 0; n < 1024 && !stop; n++) begin
            @(posedge clk); dat_o <= d[4095 - 4*n -: 4];
          end
          for (int k = 0; k < 16 && !stop; k++) begin
            @(posedge clk);
            for (int j = 0; j < 4; j++) dat_o[j] <= crc[16*j + 15 - k];
          end
          @(posedge clk); dat_o <= 4'hF;
          @(posedge clk); dat_drv <= 0;
          if (!stop) reads++;
          cur_lba++;
          @(posedge clk);
        end while (rd_multi && !stop);
        dat_drv <= 0;
      end else if (wr_go) begin
        wr_go = 0;
        do begin
          bit [4095:0] d;
          bit [63:0]   crc;
          bit          ok;
          while (!(dat_en && dat_i == 4'h0) && !stop) @(posedge clk);
          if (stop) break;
          for (int n = 0; n < 1024; n++) begin
            @(posedge clk); d[4095 - 4*n -: 4] = dat_i;
          end
          for (int k = 0; k < 16; k++) begin
            @(posedge clk);
            for (int j = 0; j < 4; j++) crc[16*j + 15 - k] = dat_i[j];
          end
          @(posedge clk);
          ok = (crc == ref_sector_crc(d)) && dat_i == 4'hF;
          repeat (2) @(posedge clk);
          begin
            bit tok[5];
            tok = ok ? '{0, 0, 1, 0, 1} : '{0, 1, 0, 1, 1};
            for (int i = 0; i < 5; i++) begin
              @(posedge clk); dat_drv <= 1; dat_o <= {3'b111, tok[i]};
            end
          end
          @(posedge clk); dat_o <= 4'b1110;
          repeat (16) @(posedge clk);
          dat_o <= 4'hF; dat_drv <= 0;
          if (ok) begin
            mem[cur_lba] = d;
            writes++;
          end else write_crc_errors++;
          cur_lba++;
        end while (wr_multi && !stop);
      end
    end
  end
endmodule
