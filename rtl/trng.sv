// True random number generator (the paper's TRNG scheme).
//
// Chain: clock divisor (clk -> clk_s = clk/2^D), entropy sampler (N ring
// oscillators of length L, XORed and sampled on clk_s; S parallel samplers
// for the speed-up variant), resilience function (XOR of 2^R samples, with
// a counter marking each finished bit) and the acknowledge flip-flop that
// raises BitReady. The output rate is f / (2^R * 2^D) bits per second for
// an input clock f; with the default D = 0, R = 2, N = 20, L = 3 and a
// 50 MHz clock this is 12.5 Mbit/s, the fastest setting the paper reports
// as passing DieHard and TestU01.
//
// Interface (the paper's): random_bit holds the new bit while bit_ready is
// high; the reader raises read_ack once it has stored the bit, which clears
// bit_ready asynchronously. The three handshake signals are to be treated as
// asynchronous by the reader. rst_n is this design's addition.
//
// Timing: with D = 0 random_bit is valid for exactly one clk cycle after
// bit_ready rises (it takes a new sample on every clk_s edge), so the reader
// must capture it on the next clk edge, as the measurement system does.
module trng #(
  parameter int unsigned N = 20,        // ring oscillators (per sampler)
  parameter int unsigned L = 3,         // ring length in latches
  parameter int unsigned D = 0,         // sample clock = clk / 2^D
  parameter int unsigned R = 2,         // resilience input width = 2^R
  parameter int unsigned S = 1          // parallel samplers
) (
  input  logic clk,
  input  logic rst_n,
  output logic random_bit,
  output logic bit_ready,
  input  logic read_ack
);
  timeunit 1ns;
  timeprecision 1ps;

  logic clk_s, sample, bit_clk;

  clock_divisor #(.D(D)) u_div (
    .clk   (clk),
    .rst_n (rst_n),
    .clk_s (clk_s)
  );

  entropy_sampler #(.N(N), .L(L), .S(S)) u_smp (
    .clk_s  (clk_s),
    .sample (sample)
  );

  resilience_function #(.R(R)) u_res (
    .clk_s      (clk_s),
    .rst_n      (rst_n),
    .sample     (sample),
    .random_bit (random_bit),
    .bit_clk    (bit_clk)
  );

  acknowledge_circuit u_ack (
    .bit_clk   (bit_clk),
    .read_ack  (read_ack),
    .rst_n     (rst_n),
    .bit_ready (bit_ready)
  );
endmodule
