// Acknowledge circuit of the TRNG: the BitReady flip-flop.
//
// A flip-flop with its D input tied to 1 is clocked by the resilience
// stage's bit_clk, so BitReady goes high each time a new random bit is
// complete. Raising ReadAck clears it asynchronously; the reader thereby
// tells the generator it has stored the bit. The flip-flop with a constant 1
// on D, clocked by the counter decode and reset by ReadAck, is the paper's
// circuit. The active-low reset, ORed into the asynchronous clear, is this
// design's own addition so that BitReady starts low.
//
// Timing: bit_ready rises just after a rising bit_clk edge and falls as soon
// as read_ack (or reset) is high. A bit_clk edge while read_ack is still
// high is lost, so the reader must drop read_ack within 2^(R+D) clk cycles.
module acknowledge_circuit (
  input  logic bit_clk,
  input  logic read_ack,
  input  logic rst_n,
  output logic bit_ready
);
  timeunit 1ns;
  timeprecision 1ps;

  logic clr;
  assign clr = read_ack | ~rst_n;

  always_ff @(posedge bit_clk or posedge clr) begin
    if (clr) bit_ready <= 1'b0;
    else     bit_ready <= 1'b1;
  end
endmodule
