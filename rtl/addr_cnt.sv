// RAM address counter of the measurement system (AddrCnt).
//
// An AW-bit binary counter shared by the fill and the read-out phases. It
// advances when ce is high and wraps from all ones to zero, which is how the
// controller recognises a full or a fully read RAM. clr (synchronous) sets it
// to zero in the PrepareFillRAM state. The paper gives the counter, its clock
// enable and its use; the synchronous clear and reset are this design's
// choice.
//
// Timing: addr changes on the rising clk edge after ce or clr; clr wins.
module addr_cnt #(
  parameter int unsigned AW = trng_pkg::RAM_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          ce,
  output logic [AW-1:0] addr
);
  timeunit 1ns;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  addr <= '0;
    else if (clr) addr <= '0;
    else if (ce)  addr <= addr + 1'b1;
  end
endmodule
