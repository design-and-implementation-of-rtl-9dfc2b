// Entropy sampler: ring oscillators, their XOR, and the sampling flip-flop.
//
// N free-running ring oscillators of length L are XORed together. Because no
// two rings run at exactly the same frequency, the XOR has many more edges,
// and so many more jittery regions, than one ring. A flip-flop on the sample
// clock samples it; samples that land in a jitter zone are random, the ones
// in flat zones are predictable, which is why a resilience stage follows.
//
// S > 1 builds the paper's speed-up variant: S such samplers, each with its
// own N rings and flip-flop, whose sampled bits are XORed into one bit per
// sample clock (8 samplers of 20 rings were the paper's validated setting).
// S = 1 is the single sampler of the main scheme.
//
// The rings are behavioural models; each gets a slightly different stage
// delay (this design's choice, standing in for placement differences).
//
// Timing: sample changes on rising clk_s only.
module entropy_sampler #(
  parameter int unsigned N = 20,        // ring oscillators per sampler
  parameter int unsigned L = 3,         // latches per ring
  parameter int unsigned S = 1          // number of samplers
) (
  input  logic clk_s,
  output logic sample
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [S-1:0] sampled;

  for (genvar s = 0; s < S; s++) begin : g_smp
    logic [N-1:0] ro_q;
    for (genvar i = 0; i < N; i++) begin : g_ro
      ring_oscillator #(
        .L        (L),
        .STAGE_PS (1000 + 13 * (s * N + i)),
        .JITTER_PS(40)
      ) u_ro (
        .q(ro_q[i])
      );
    end
    // Sampling flip-flop: D is the XOR of the rings, asynchronous to clk_s.
    always_ff @(posedge clk_s) sampled[s] <= ^ro_q;
  end

  assign sample = ^sampled;
endmodule
