// Self-checking testbench of sha256_core: the FIPS 180-4 examples "abc" (one
// block) and the 56-byte two-block message, the empty message, random
// multi-block messages against the reference model, and the 65-clock block
// time from the start pulse to `ready`.
module tb_sha256_core;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, next = 0, ready;
  logic [511:0] block = 0;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hash(input bytes_t m, input logic [255:0] expect_d, input string what);
    bytes_t q;
    longint bits;
    int cycles;
    q = m;
    bits = longint'(m.size()) * 8;
    q.push_back(8'h80);
    while (q.size() % 64 != 56) q.push_back(0);
    for (int i = 7; i >= 0; i--) q.push_back(8'(bits >> (8*i)));
    for (int b = 0; b < q.size() / 64; b++) begin
      logic [511:0] blk;
      for (int i = 0; i < 64; i++) blk[511 - 8*i -: 8] = q[64*b + i];
      @(posedge clk); block <= blk; init <= (b == 0); next <= (b != 0);
      @(posedge clk); init <= 0; next <= 0;
      @(negedge clk);
      cycles = 0;
      while (!ready) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != 65) begin failures++; $display("FAIL %s: block took %0d clocks", what, cycles); end
    end
    checks++;
    if (digest !== expect_d) begin
      failures++;
      $display("FAIL %s: %h expected %h", what, digest, expect_d);
    end
  endtask

  function automatic bytes_t str2b(string s);
    bytes_t q;
    for (int i = 0; i < s.len(); i++) q.push_back(s[i]);
    return q;
  endfunction

  initial begin
    bytes_t m;
    repeat (3) @(posedge clk);
    rst_n = 1;
    hash(str2b("abc"), 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "abc");
    hash(str2b("abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq"),
         256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1, "two-block");
    m = {};
    hash(m, 256'he3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855, "empty");
    checks++;
    if (ref_sha256(str2b("abc")) !== 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad) begin
      failures++; $display("FAIL reference model");
    end
    for (int t = 0; t < 8; t++) begin
      m = {};
      for (int i = 0; i < $urandom % 300; i++) m.push_back(8'($urandom));
      hash(m, ref_sha256(m), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
