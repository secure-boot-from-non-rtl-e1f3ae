// Key generator of the TMIU: device and card authentication and on-the-fly
// derivation of the AES key.
//
// After reset it reads the 57-bit device identifier ID_dev from the FPGA's
// DNA port (one `dna_read` clock, then 57 `dna_shift` clocks, most
// significant bit first) and hashes it with the shared SHA-256 core. The
// digest must equal DEV_REF_HASH, the reference compiled into the unit, or
// `status.dev_fail` is raised (stage 1 of the boot flow). It then waits for the
// card identifier ID_NVM (the 128-bit CID register) from the command
// controller, hashes it and compares the digest with NVM_REF_HASH (stage 2).
// Only when both match it derives the key with the concatenation KDF of
// NIST SP 800-56A, K_AES = H(c || ID_dev || OtherInfo), with c = KDF_COUNTER
// (32 bits), ID_dev as 8 bytes (zero-extended) and OtherInfo = ID_NVM, and
// keeps the first 128 bits of the digest as the AES-128 key (stage 3).
// Every hash is a single padded 512-bit block, 65 clocks on the SHA core.
// The identifiers are wiped once the key exists; reset clears everything.
//
// From the paper: the identifiers, their widths, the comparison with values
// compiled into the bitstream, equation (1) and the use of the TMIU's SHA
// core. This design's choices: comparing SHA-256 digests for both checks,
// the byte encoding of the KDF input, c = 1 and the truncation to the
// leftmost 128 bits.
module key_generator #(
  parameter logic [255:0] DEV_REF_HASH = 256'hc4735b78ca1a9c0782be0f7a745f7ccdd7b81ece1e1c65c9b1d4d7de61e85707,
  parameter logic [255:0] NVM_REF_HASH = 256'h559dff69b78bb2db09794e5e0fdc02b04d4af3c869b57d436867d2b57b648d14,
  parameter logic [31:0]  KDF_COUNTER  = 32'd1
) (
  input  logic         clk,
  input  logic         rst_n,
  // DNA port of the device
  output logic         dna_read,
  output logic         dna_shift,
  input  logic         dna_dout,
  // CID from the command controller
  input  logic         cid_valid,
  input  logic [127:0] cid,
  // shared SHA-256 core
  output logic         sha_init,
  output logic [511:0] sha_block,
  input  logic         sha_ready,
  input  logic [255:0] sha_digest,
  // results
  output tmiu_pkg::keygen_status_t status,
  output logic [127:0] key
);
  import tmiu_pkg::*;

  typedef enum logic [3:0] {
    K_LOAD, K_SHIFT, K_DEV_HASH, K_DEV_WAIT, K_WAIT_CID, K_NVM_HASH, K_NVM_WAIT,
    K_KDF, K_KDF_WAIT, K_DONE, K_FAIL
  } kstate_e;

  kstate_e      state;
  logic [5:0]   cnt;
  logic [56:0]  id_dev;
  logic [127:0] id_nvm;

  assign dna_read  = (state == K_LOAD);
  assign dna_shift = (state == K_SHIFT);

  always_comb begin
    sha_init  = 1'b0;
    sha_block = '0;
    unique case (state)
      K_DEV_HASH: begin
        sha_init  = 1'b1;
        sha_block = {7'b0, id_dev, 8'h80, 376'b0, 64'd64};
      end
      K_NVM_HASH: begin
        sha_init  = 1'b1;
        sha_block = {id_nvm, 8'h80, 312'b0, 64'd128};
      end
      K_KDF: begin
        sha_init  = 1'b1;
        sha_block = {KDF_COUNTER, 7'b0, id_dev, id_nvm, 8'h80, 216'b0, 64'd224};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= K_LOAD;
      cnt    <= '0;
      id_dev <= '0;
      id_nvm <= '0;
      status <= '0;
      key    <= '0;
    end else begin
      unique case (state)
        K_LOAD: begin
          cnt   <= '0;
          state <= K_SHIFT;
        end
        K_SHIFT: begin
          id_dev <= {id_dev[55:0], dna_dout};
          cnt    <= cnt + 6'd1;
          if (cnt == 6'd56) state <= K_DEV_HASH;
        end
        K_DEV_HASH: if (sha_ready) state <= K_DEV_WAIT;
        K_DEV_WAIT: if (sha_ready) begin
          if (sha_digest == DEV_REF_HASH) begin
            status.dev_ok <= 1'b1;
            state         <= K_WAIT_CID;
          end else begin
            status.dev_fail <= 1'b1;
            state           <= K_FAIL;
          end
        end
        K_WAIT_CID: if (cid_valid) begin
          id_nvm <= cid;
          state  <= K_NVM_HASH;
        end
        K_NVM_HASH: if (sha_ready) state <= K_NVM_WAIT;
        K_NVM_WAIT: if (sha_ready) begin
          if (sha_digest == NVM_REF_HASH) begin
            status.nvm_ok <= 1'b1;
            state         <= K_KDF;
          end else begin
            status.nvm_fail <= 1'b1;
            state           <= K_FAIL;
          end
        end
        K_KDF: if (sha_ready) state <= K_KDF_WAIT;
        K_KDF_WAIT: if (sha_ready) begin
          key              <= sha_digest[255:128];
          status.key_valid <= 1'b1;
          id_dev           <= '0;
          id_nvm           <= '0;
          state            <= K_DONE;
        end
        K_DONE, K_FAIL: ;
        default: state <= K_FAIL;
      endcase
    end
  end
endmodule
