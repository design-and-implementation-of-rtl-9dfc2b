// ReadAck generator of the measurement system (the "Ack" block).
//
// A single flip-flop on the system clock whose D is BitReady: ReadAck goes
// high on the first rising clk edge after BitReady rises, which is the same
// edge on which the entropy RAM stores RandomBit. The high ReadAck clears
// BitReady inside the TRNG, so one edge later ReadAck falls again. The paper
// gives the behaviour (ReadAck set to 1 at the very next rising clock edge);
// the one-flip-flop implementation and the reset are this design's choice.
//
// Timing: read_ack is a one-cycle pulse per random bit, one clk after
// bit_ready rises. BitReady is asynchronous to clk in general; with the TRNG
// clocked from the same clk it changes just after clk edges.
module read_ack_gen (
  input  logic clk,
  input  logic rst_n,
  input  logic bit_ready,
  output logic read_ack
);
  timeunit 1ns;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) read_ack <= 1'b0;
    else        read_ack <= bit_ready;
  end
endmodule
