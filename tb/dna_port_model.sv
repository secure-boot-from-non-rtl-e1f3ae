// Behavioural model of the FPGA's device DNA port (Xilinx DNA_PORT style): a
// 57-bit shift register that `read` loads with the device identifier and
// `shift` moves one place towards `dout`, most significant bit first. The
// identifier is the variable `dna`, which a testbench may change to play a
// different device. Not synthesizable logic of the design: the real port is
// a vendor primitive backed by e-fuses.
module dna_port_model #(
  parameter logic [56:0] DNA = 57'h1A2B3C4D5E6F701
) (
  input  logic clk,
  input  logic read,
  input  logic shift,
  output logic dout
);
  logic [56:0] dna = DNA;
  logic [56:0] sr  = '0;
  assign dout = sr[56];
  always @(posedge clk) begin
    if (read)       sr <= dna;
    else if (shift) sr <= {sr[55:0], 1'b0};
  end
endmodule
