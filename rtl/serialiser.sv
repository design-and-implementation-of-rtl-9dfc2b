// Serialiser: collects bits read from the entropy RAM into bytes.
//
// Each clock with ce high shifts di into an 8-bit register from the top, so
// the first bit of a byte ends up in bit 0 and the serial line (which sends
// bit 0 first) repeats the RAM's bit order. A bit counter makes ready high
// once eight bits are in; the next ce starts a new byte. The paper gives the
// ports (di, ce, an 8-bit do, ready) and the function; the shift direction
// and the counter are this design's choice.
//
// Timing: dout and ready change on the rising clk edge that samples ce.
// ready stays high, with dout stable, until the next ce.
module serialiser #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         di,
  input  logic         ce,
  output logic [W-1:0] dout,
  output logic         ready
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [$clog2(W+1)-1:0] nbits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout  <= '0;
      nbits <= '0;
    end else if (ce) begin
      dout  <= {di, dout[W-1:1]};
      nbits <= (nbits == W[$bits(nbits)-1:0]) ? 1 : nbits + 1'b1;
    end
  end

  assign ready = (nbits == W[$bits(nbits)-1:0]);
endmodule
