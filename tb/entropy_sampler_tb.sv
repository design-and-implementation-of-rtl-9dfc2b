// Self-checking testbench of the entropy sampler.
//
// Two instances on a 50 MHz sample clock: the main configuration (one
// sampler of 20 rings of length 3) and a two-sampler bank of 5 rings each.
// The testbench reads the ring outputs itself, XORs them as the sampling
// flip-flops should, and checks every sample (one clock later for the bank,
// whose per-sampler bits are XORed after the flip-flops). It also checks
// that the samples are not stuck: both values must be frequent.
module entropy_sampler_tb;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic s1, s2;
  logic ref1, ref2;
  int unsigned ones1 = 0, ones2 = 0;
  localparam int CYCLES = 4000;

  always #10 clk = ~clk;

  entropy_sampler #(.N(20), .L(3), .S(1)) u1 (.clk_s(clk), .sample(s1));
  entropy_sampler #(.N(5),  .L(3), .S(2)) u2 (.clk_s(clk), .sample(s2));

  always @(posedge clk) begin
    ref1 <= ^u1.g_smp[0].ro_q;
    ref2 <= (^u2.g_smp[0].ro_q) ^ (^u2.g_smp[1].ro_q);
  end

  initial begin
    repeat (2) @(negedge clk);
    for (int k = 0; k < CYCLES; k++) begin
      @(negedge clk);
      checks += 2;
      if (s1 !== ref1) failures++;
      if (s2 !== ref2) failures++;
      ones1 += s1;
      ones2 += s2;
    end
    checks += 2;
    if (ones1 < CYCLES * 4 / 10 || ones1 > CYCLES * 6 / 10) begin
      failures++; $display("S=1: %0d ones of %0d", ones1, CYCLES);
    end
    if (ones2 < CYCLES * 4 / 10 || ones2 > CYCLES * 6 / 10) begin
      failures++; $display("S=2: %0d ones of %0d", ones2, CYCLES);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
