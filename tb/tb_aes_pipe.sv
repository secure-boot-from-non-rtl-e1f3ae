// Self-checking testbench of aes_pipe (with aes_key_expand for the round
// keys): the FIPS-197 appendix C.1 example in both directions, then a burst
// of random blocks, encryptions and decryptions mixed, one per clock, checked
// against the reference model. It also checks the pipeline latency of 11
// clocks and that a block leaves on every clock of the burst.
module tb_aes_pipe;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, ready;
  logic [127:0] key;
  logic [10:0][127:0] rk;
  logic in_valid = 0, in_decrypt = 0;
  logic [127:0] in_data = 0;
  logic [7:0] in_tag = 0;
  logic out_valid;
  logic [127:0] out_data;
  logic [7:0] out_tag;
  int checks = 0, failures = 0;

  aes_key_expand u_ke (.clk, .rst_n, .start, .key, .rk, .ready);
  aes_pipe #(.TAG_W(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] exp_q[$];
  int unsigned  cyc = 0, issue_cyc[256], out_cnt = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [127:0] e;
    e = exp_q.pop_front();
    checks++;
    if (out_data !== e) begin
      failures++;
      $display("FAIL tag %0d: %h expected %h", out_tag, out_data, e);
    end
    checks++;
    if (cyc - issue_cyc[out_tag] != 11) begin
      failures++;
      $display("FAIL latency %0d", cyc - issue_cyc[out_tag]);
    end
    out_cnt++;
  end

  task automatic issue(input logic [127:0] d, input bit dec, input logic [7:0] tag);
    @(posedge clk);
    in_valid <= 1; in_decrypt <= dec; in_data <= d; in_tag <= tag;
    issue_cyc[tag] = cyc + 1;
    exp_q.push_back(ref_aes(key, d, dec));
  endtask

  initial begin
    key = 128'h000102030405060708090a0b0c0d0e0f;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    @(negedge clk);
    wait (ready);
    checks++;
    if (ref_aes(key, 128'h00112233445566778899aabbccddeeff, 0) !== 128'h69c4e0d86a7b0430d8cdb78070b4c55a) begin
      failures++; $display("FAIL reference model vector");
    end
    issue(128'h00112233445566778899aabbccddeeff, 0, 0);
    issue(128'h69c4e0d86a7b0430d8cdb78070b4c55a, 1, 1);
    for (int i = 2; i < 66; i++) issue({$urandom, $urandom, $urandom, $urandom}, 1'($urandom), 8'(i));
    @(posedge clk); in_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (out_cnt != 66) begin failures++; $display("FAIL %0d blocks out", out_cnt); end
    // new key
    key = {$urandom, $urandom, $urandom, $urandom};
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    @(negedge clk);
    wait (ready);
    for (int i = 0; i < 16; i++) issue({$urandom, $urandom, $urandom, $urandom}, 1'($urandom), 8'(i));
    @(posedge clk); in_valid <= 0;
    repeat (20) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
