// Self-checking testbench of the complete TRNG, run with the four parameter
// sets of the paper's table of high-quality settings (d, r, n, l) =
// (0,2,20,3), (0,3,10,3), (2,2,10,3), (5,3,5,3), plus the speed-up variant
// with 8 samplers of 20 rings and no counter (r = 0).
//
// Each instance is read by its own reader that behaves like the measurement
// system: on the first clk edge that sees BitReady high it stores RandomBit
// and raises ReadAck for one cycle. Checks: every stored bit equals the XOR
// of all samples the sampler produced (the resilience accumulator, which the
// testbench rebuilds from the sampler output); the number of bits in the
// run equals the paper's rate f/(2^r * 2^d) (for the speed-up variant the
// handshake's one bit per three clocks); and the bits are not stuck.
module trng_tb;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int CYCLES = 8192;
  localparam int NI = 5;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NI-1:0] rb, rdy, ack;
  logic [NI-1:0] smp, clks;
  int unsigned nbits [NI];
  int unsigned ones  [NI];
  logic        acc   [NI];

  always #10 clk = ~clk;   // 50 MHz

  trng #(.D(0), .R(2), .N(20), .L(3))        u0 (.clk(clk), .rst_n(rst_n), .random_bit(rb[0]), .bit_ready(rdy[0]), .read_ack(ack[0]));
  trng #(.D(0), .R(3), .N(10), .L(3))        u1 (.clk(clk), .rst_n(rst_n), .random_bit(rb[1]), .bit_ready(rdy[1]), .read_ack(ack[1]));
  trng #(.D(2), .R(2), .N(10), .L(3))        u2 (.clk(clk), .rst_n(rst_n), .random_bit(rb[2]), .bit_ready(rdy[2]), .read_ack(ack[2]));
  trng #(.D(5), .R(3), .N(5),  .L(3))        u3 (.clk(clk), .rst_n(rst_n), .random_bit(rb[3]), .bit_ready(rdy[3]), .read_ack(ack[3]));
  trng #(.D(0), .R(0), .N(20), .L(3), .S(8)) u4 (.clk(clk), .rst_n(rst_n), .random_bit(rb[4]), .bit_ready(rdy[4]), .read_ack(ack[4]));

  assign smp  = {u4.sample, u3.sample, u2.sample, u1.sample, u0.sample};
  assign clks = {u4.clk_s,  u3.clk_s,  u2.clk_s,  u1.clk_s,  u0.clk_s};

  for (genvar i = 0; i < NI; i++) begin : g_rd
    // reference accumulator: XOR of every sample taken on the sample clock
    always @(posedge clks[i] or negedge rst_n)
      if (!rst_n) acc[i] <= 1'b0; else acc[i] <= acc[i] ^ smp[i];
    // reader: store on the clk edge after BitReady, acknowledge on that edge
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) ack[i] <= 1'b0;
      else begin
        ack[i] <= rdy[i];
        if (rdy[i]) begin
          checks++;
          nbits[i]++;
          ones[i] += rb[i];
          if (rb[i] !== acc[i]) begin
            failures++;
            $display("instance %0d: bit %0b, accumulated samples give %0b", i, rb[i], acc[i]);
          end
        end
      end
    end
  end

  function automatic void rate(input int i, input int expected);
    checks++;
    if (nbits[i] + 1 < expected || nbits[i] > expected + 1) begin
      failures++;
      $display("instance %0d: %0d bits in %0d clocks, expected %0d", i, nbits[i], CYCLES, expected);
    end
    checks++;
    if (ones[i] == 0 || ones[i] == nbits[i]) begin
      failures++;
      $display("instance %0d: output stuck", i);
    end
  endfunction

  initial begin
    for (int i = 0; i < NI; i++) begin nbits[i] = 0; ones[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (CYCLES) @(negedge clk);
    rate(0, CYCLES / 4);     // 12.5 Mbit/s at 50 MHz
    rate(1, CYCLES / 8);     // 6.25 Mbit/s
    rate(2, CYCLES / 16);    // 3.125 Mbit/s
    rate(3, CYCLES / 256);   // 195 kbit/s
    rate(4, CYCLES / 3);     // handshake-limited
    $display("bits: %0d %0d %0d %0d %0d", nbits[0], nbits[1], nbits[2], nbits[3], nbits[4]);
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
