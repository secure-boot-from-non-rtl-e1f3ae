// Self-checking testbench of crc16_lines: the SD standard's example (512 bytes
// of 0xFF on one line give 0x7FA1), then random blocks whose four per-line
// remainders are compared with the bit-serial reference.
module tb_crc16_lines;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [3:0] din = 0;
  logic [3:0][15:0] crc;
  int checks = 0, failures = 0;

  crc16_lines #(.LINES(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit q[4][$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 4096 ones on line 0, zeros on the others
    @(posedge clk); clr <= 1;
    for (int n = 0; n < 4096; n++) begin
      @(posedge clk); clr <= 0; en <= 1; din <= 4'b0001;
    end
    @(posedge clk); en <= 0;
    @(negedge clk);
    checks++;
    if (crc[0] !== 16'h7FA1 || crc[1] !== 0 || crc[2] !== 0 || crc[3] !== 0) begin
      failures++;
      $display("FAIL all-ones: %h %h %h %h", crc[0], crc[1], crc[2], crc[3]);
    end
    for (int t = 0; t < 20; t++) begin
      int n;
      n = 1 + ($urandom % 1100);
      for (int j = 0; j < 4; j++) q[j] = {};
      @(posedge clk); clr <= 1; en <= 0;
      for (int i = 0; i < n; i++) begin
        logic [3:0] v;
        v = 4'($urandom);
        for (int j = 0; j < 4; j++) q[j].push_back(v[j]);
        @(posedge clk); clr <= 0; en <= 1; din <= v;
      end
      @(posedge clk); en <= 0;
      @(negedge clk);
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (crc[j] !== ref_crc16(q[j])) begin
          failures++;
          $display("FAIL line %0d: %h expected %h", j, crc[j], ref_crc16(q[j]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
