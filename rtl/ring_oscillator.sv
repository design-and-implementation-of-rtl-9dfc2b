// Behavioural model (not synthesizable logic) of one ring oscillator.
//
// In the FPGA the ring is a single inverter followed by L transparent
// latches whose gates are tied to logic 1, the last latch output fed back to
// the inverter. With the gates open every latch is just a delay element, so
// the ring toggles its output once per trip around the loop: a half period
// is the sum of the L latch-plus-routing delays (the inverter shares the
// first latch's logic cell and adds next to nothing). Those delays are not
// constant. Supply and neighbourhood noise move every edge by a small random
// amount (jitter), and that jitter is the entropy the generator harvests.
//
// The model reproduces exactly that: every half period is the sum of L
// stage delays, each STAGE_PS picoseconds plus a uniformly distributed
// jitter of up to +/-JITTER_PS; the inverter is taken as delay-free. The
// ring structure (one inverter, L latches as delay elements) follows the
// paper; the delay and jitter figures are this model's own: about 1 ns per
// latch plus its routing, giving roughly 170 MHz for L = 3, the order of
// magnitude of a small FPGA. Different instances should get different
// STAGE_PS so that, as on silicon, no two rings run at exactly the same
// frequency. Being random-number based, the model gives the sampled stream
// real unpredictability in simulation, but says nothing about the quality
// of a real ring's jitter.
//
// Interface: a single output q, as the paper's ring oscillator component.
// Timing: free running, no clock and no reset; q starts low at time 0.
module ring_oscillator #(
  parameter int unsigned L         = 3,    // number of latches in the ring
  parameter int unsigned STAGE_PS  = 1000, // mean delay of one stage, ps
  parameter int unsigned JITTER_PS = 40    // peak jitter of one stage, ps
) (
  output logic q
);
  timeunit 1ns;
  timeprecision 1ps;

  // Only the ring's
  // output is modelled; the latches inside the loop are lumped into its delay.
  logic ring_out;

  initial begin
    int unsigned half_ps;
    ring_out = 1'b0;
    forever begin
      half_ps = 0;
      for (int unsigned i = 0; i < L; i++) begin
        half_ps += STAGE_PS - JITTER_PS + ($urandom % (2 * JITTER_PS + 1));
      end
      #(real'(half_ps) / 1000.0);
      ring_out = ~ring_out;
    end
  end

  assign q = ring_out;
endmodule
