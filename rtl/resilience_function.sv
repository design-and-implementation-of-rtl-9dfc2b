// Resilience function: XOR of 2^R consecutive samples.
//
// The sampled bits are folded into one flip-flop whose next value is its own
// value XOR the new sample (the flip-flop output is also the generator's
// RandomBit). An R-bit counter on the same sample clock counts the samples;
// the inverted AND of its bits (bit_clk) rises when the counter wraps from
// all ones to zero, i.e. once every 2^R samples, and clocks the BitReady
// flip-flop of the acknowledge circuit. At that moment the accumulator holds
// the XOR of all samples so far; two successive output bits differ by the XOR
// of the 2^R samples taken between them, which is the resilience function the
// paper specifies (a plain XOR of 2^r bits, with no shift-register code that
// could act as a pseudo-random generator).
//
// Structure, the XOR feedback and the counter decode follow the paper's
// scheme. The reset (accumulator and counter to zero) is this design's own
// addition. R = 0 (no counter) is accepted for the parallel-sampler
// variant: every sample is then an output bit and bit_clk is clk_s itself.
//
// Timing: random_bit changes on every rising clk_s edge; bit_clk rises on
// every 2^R-th edge, just after random_bit has taken the last sample of the
// group. random_bit keeps that value until the next clk_s edge.
module resilience_function #(
  parameter int unsigned R = 2          // 2^R samples per output bit
) (
  input  logic clk_s,
  input  logic rst_n,
  input  logic sample,
  output logic random_bit,
  output logic bit_clk
);
  timeunit 1ns;
  timeprecision 1ps;

  always_ff @(posedge clk_s or negedge rst_n) begin
    if (!rst_n) random_bit <= 1'b0;
    else        random_bit <= random_bit ^ sample;
  end

  if (R == 0) begin : g_nocnt
    assign bit_clk = clk_s;
  end else begin : g_cnt
    logic [R-1:0] cnt;
    always_ff @(posedge clk_s or negedge rst_n) begin
      if (!rst_n) cnt <= '0;
      else        cnt <= cnt + 1'b1;
    end
    assign bit_clk = ~&cnt;
  end
endmodule
