// Self-checking testbench of the resilience function, R = 2 and R = 3.
//
// Random samples are fed on a sample clock. A reference XOR accumulator and
// sample counter predict random_bit after every edge; every rising edge of
// bit_clk must come exactly when 2^R samples have been taken since the last
// one, and the bits delivered there must equal the XOR of those 2^R samples
// with the previous delivered bit.
module resilience_function_tb;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, sample = 1'b0;
  logic rb2, bc2, rb3, bc3;
  logic acc = 1'b0;
  int unsigned nsmp = 0;
  int unsigned last2 = 0, last3 = 0, nb2 = 0, nb3 = 0;
  logic grp2 = 1'b0, grp3 = 1'b0, prev2 = 1'b0, prev3 = 1'b0;
  localparam int CYCLES = 2000;

  always #10 clk = ~clk;

  resilience_function #(.R(2)) u2 (.clk_s(clk), .rst_n(rst_n), .sample(sample),
                                   .random_bit(rb2), .bit_clk(bc2));
  resilience_function #(.R(3)) u3 (.clk_s(clk), .rst_n(rst_n), .sample(sample),
                                   .random_bit(rb3), .bit_clk(bc3));

  always @(posedge bc2) if (rst_n) begin
    #1;
    nb2++; checks += 2;
    if (nsmp - last2 != 4) begin failures++; $display("R=2 bit after %0d samples", nsmp - last2); end
    if (rb2 !== (prev2 ^ grp2)) begin failures++; $display("R=2 wrong bit"); end
    last2 = nsmp; prev2 = rb2; grp2 = 1'b0;
  end
  always @(posedge bc3) if (rst_n) begin
    #1;
    nb3++; checks += 2;
    if (nsmp - last3 != 8) begin failures++; $display("R=3 bit after %0d samples", nsmp - last3); end
    if (rb3 !== (prev3 ^ grp3)) begin failures++; $display("R=3 wrong bit"); end
    last3 = nsmp; prev3 = rb3; grp3 = 1'b0;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < CYCLES; k++) begin
      sample = 1'($urandom);
      @(posedge clk);
      acc ^= sample; grp2 ^= sample; grp3 ^= sample;
      nsmp++;
      @(negedge clk);
      checks += 2;
      if (rb2 !== acc) failures++;
      if (rb3 !== acc) failures++;
    end
    checks += 2;
    if (nb2 != CYCLES / 4) begin failures++; $display("R=2: %0d bits", nb2); end
    if (nb3 != CYCLES / 8) begin failures++; $display("R=3: %0d bits", nb3); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
