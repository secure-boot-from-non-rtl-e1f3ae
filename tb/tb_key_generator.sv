// Self-checking testbench of key_generator with a real SHA-256 core and a
// DNA port model. Three runs, each after a reset: the reference device and
// card (key checked against the reference KDF and a precomputed value), a
// different device DNA (dev_fail, no key), a different card CID (nvm_fail, no
// key). Also checks the DNA read sequence length and that the key appears
// within the expected clock budget (58 DNA clocks + 3 hashes of 65 clocks
// plus handshakes).
module tb_key_generator;
  import tb_ref_pkg::*;
  import tmiu_pkg::*;
  localparam logic [56:0]  DNA_OK = 57'h1A2B3C4D5E6F701;
  localparam logic [127:0] CID_OK = 128'h0353445355313647801234567800e5a9;

  logic clk = 0, rst_n = 0;
  logic dna_read, dna_shift, dna_dout;
  logic cid_valid = 0;
  logic [127:0] cid = 0;
  logic sha_init, sha_ready;
  logic [511:0] sha_block;
  logic [255:0] sha_digest;
  keygen_status_t status;
  logic [127:0] key;
  int checks = 0, failures = 0;

  key_generator dut (.*);
  sha256_core u_sha (.clk, .rst_n, .init(sha_init), .next(1'b0), .block(sha_block),
                     .ready(sha_ready), .digest(sha_digest));
  dna_port_model u_dna (.clk, .read(dna_read), .shift(dna_shift), .dout(dna_dout));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  int shifts;
  always @(posedge clk) if (dna_shift) shifts++;

  function automatic logic [127:0] ref_key(logic [56:0] d, logic [127:0] c);
    bytes_t m;
    logic [255:0] h;
    logic [63:0] d64;
    d64 = {7'b0, d};
    for (int i = 3; i >= 0; i--) m.push_back(8'(32'd1 >> (8*i)));
    for (int i = 7; i >= 0; i--) m.push_back(d64[8*i +: 8]);
    for (int i = 15; i >= 0; i--) m.push_back(c[8*i +: 8]);
    h = ref_sha256(m);
    return h[255:128];
  endfunction

  task automatic run(input logic [56:0] d, input logic [127:0] c, input int expect_kind);
    int t;
    rst_n = 0;
    u_dna.dna = d;
    shifts = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = 0;
    while (!status.dev_ok && !status.dev_fail && t < 2000) begin @(posedge clk); t++; end
    check(shifts == 57, $sformatf("57 DNA shifts, saw %0d", shifts));
    if (expect_kind == 1) begin
      check(status.dev_fail && !status.dev_ok && !status.key_valid, "wrong DNA rejected");
      return;
    end
    check(status.dev_ok, "reference DNA accepted");
    check(t <= 58 + 70, $sformatf("device check took %0d clocks", t));
    repeat (10) @(posedge clk);
    check(!status.key_valid, "no key before the CID");
    @(posedge clk); cid <= c; cid_valid <= 1;
    @(posedge clk); cid_valid <= 0;
    t = 0;
    while (!status.key_valid && !status.nvm_fail && t < 2000) begin @(posedge clk); t++; end
    if (expect_kind == 2) begin
      check(status.nvm_fail && !status.key_valid, "wrong CID rejected");
      return;
    end
    check(status.nvm_ok && status.key_valid, "key derived");
    check(t <= 2 * 70, $sformatf("CID check and key derivation took %0d clocks", t));
    check(key == ref_key(d, c), $sformatf("key %h vs reference %h", key, ref_key(d, c)));
    check(key == 128'h19315eb4449d80d0f633a181d8de6918, "key equals precomputed value");
  endtask

  initial begin
    run(DNA_OK, CID_OK, 0);
    run(DNA_OK ^ 57'h100, CID_OK, 1);
    run(DNA_OK, CID_OK ^ (128'h1 << 40), 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
