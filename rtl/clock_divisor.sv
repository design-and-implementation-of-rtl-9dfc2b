// Clock divisor: makes the sample clock clk_s = clk / 2^D.
//
// The sample clock drives the sampling flip-flop and the whole resilience
// stage, so D sets how far apart two samples of the oscillators are. A D-bit
// binary counter runs on clk and its most significant bit is the divided
// clock, which is square for every D >= 1. For D = 0 the input clock is
// passed on unchanged, since the paper's fastest setting samples at the full
// input frequency. The divide-by-2^D function is the paper's; using a
// counter bit as the clock (rather than a clock enable) follows the paper's
// scheme, where clkS is drawn as the clock of the sampler, the counter and
// the XOR flip-flop. The asynchronous active-low reset is this design's
// addition.
//
// Timing: for D >= 1 clk_s rises on the clk edge after which the counter
// reaches 2^(D-1), i.e. once every 2^D clk cycles.
module clock_divisor #(
  parameter int unsigned D = 0          // divide by 2^D
) (
  input  logic clk,
  input  logic rst_n,
  output logic clk_s
);
  timeunit 1ns;
  timeprecision 1ps;

  if (D == 0) begin : g_pass
    assign clk_s = clk;
  end else begin : g_div
    logic [D-1:0] cnt;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) cnt <= '0;
      else        cnt <= cnt + 1'b1;
    end
    assign clk_s = cnt[D-1];
  end
endmodule
