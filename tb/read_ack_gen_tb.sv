// Self-checking testbench of the ReadAck generator: read_ack must equal
// bit_ready as it was at the previous rising clock edge, and be low in reset.
module read_ack_gen_tb;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, bit_ready = 1'b0, read_ack;
  logic prev = 1'b0;

  always #10 clk = ~clk;

  read_ack_gen u_dut (.clk(clk), .rst_n(rst_n), .bit_ready(bit_ready), .read_ack(read_ack));

  initial begin
    bit_ready = 1'b1;
    @(negedge clk);
    checks++;
    if (read_ack !== 1'b0) failures++;
    rst_n = 1'b1;
    for (int k = 0; k < 500; k++) begin
      bit_ready = 1'($urandom);
      prev = bit_ready;
      @(negedge clk);
      checks++;
      if (read_ack !== prev) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
