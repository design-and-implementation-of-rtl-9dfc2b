// Entropy buffer: a DEPTH x 1 bit single-port block RAM.
//
// The measurement system fills it with TRNG bits and then reads it back to
// send the bits to the PC. The paper fixes the size (16 Kbit, one Spartan-3E
// BlockRAM, 14-bit address) and the ports di, do, we, addr. The synchronous,
// read-before-write behaviour of the read port is this design's choice (it
// matches the FPGA block RAM in its default mode).
//
// Timing: on a rising clk edge the bit at addr is written with di if we is
// high, and dout takes the value that was stored at addr before the write.
module entropy_ram #(
  parameter int unsigned DEPTH = trng_pkg::RAM_BITS,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          di,
  input  logic          we,
  input  logic [AW-1:0] addr,
  output logic          dout
);
  timeunit 1ns;
  timeprecision 1ps;

  logic mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= di;
    dout <= mem[addr];
  end
endmodule
