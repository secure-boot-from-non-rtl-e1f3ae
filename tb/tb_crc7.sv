// Self-checking testbench of crc7: the SD standard's command examples (CMD0,
// CMD17, CMD8 with their documented CRC bytes 0x95, 0x55, 0x87) and random
// messages against the bit-serial reference; the remainder must be ready the
// clock after the last bit.
module tb_crc7;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, din = 0;
  logic [6:0] crc;
  int checks = 0, failures = 0;

  crc7 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit b[$], input bit [6:0] expect_crc, input string what);
    @(posedge clk); clr <= 1; en <= 0;
    foreach (b[i]) begin
      @(posedge clk); clr <= 0; en <= 1; din <= b[i];
    end
    @(posedge clk); en <= 0;
    @(negedge clk);
    checks++;
    if (crc !== expect_crc) begin
      failures++;
      $display("FAIL %s: crc %h expected %h", what, crc, expect_crc);
    end
  endtask

  function automatic void cmd_bits(input bit [5:0] idx, input bit [31:0] arg, ref bit q[$]);
    bit [39:0] v;
    v = {2'b01, idx, arg};
    q = {};
    for (int i = 39; i >= 0; i--) q.push_back(v[i]);
  endfunction

  initial begin
    bit q[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    cmd_bits(6'd0, 32'h0, q);        run(q, 7'h4A, "CMD0");
    cmd_bits(6'd17, 32'h0, q);       run(q, 7'h2A, "CMD17");
    cmd_bits(6'd8, 32'h1AA, q);      run(q, 7'h43, "CMD8");
    for (int t = 0; t < 200; t++) begin
      int n;
      n = 1 + ($urandom % 130);
      q = {};
      for (int i = 0; i < n; i++) q.push_back(1'($urandom));
      run(q, ref_crc7(q), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
