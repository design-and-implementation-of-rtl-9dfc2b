// Self-checking testbench of the TRNG's acknowledge (BitReady) flip-flop.
//
// Random sequences of bit_clk rising edges and read_ack pulses are applied;
// a reference model says BitReady is set by a bit_clk edge while read_ack is
// low and cleared at once (without any clock) by read_ack.
module acknowledge_circuit_tb;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic bit_clk = 1'b1, read_ack = 1'b0, rst_n = 1'b0, bit_ready;
  logic expect_rdy = 1'b0;
  int unsigned nset = 0, nclr = 0;

  acknowledge_circuit u_dut (.bit_clk(bit_clk), .read_ack(read_ack),
                             .rst_n(rst_n), .bit_ready(bit_ready));

  task automatic check(input string what);
    #1;
    checks++;
    if (bit_ready !== expect_rdy) begin
      failures++;
      $display("%s: bit_ready=%0b expected %0b at %0t", what, bit_ready, expect_rdy, $time);
    end
  endtask

  initial begin
    #5 check("reset");
    rst_n = 1'b1;
    #5;
    for (int k = 0; k < 500; k++) begin
      case ($urandom % 3)
        0: begin
             bit_clk = 1'b0; #5 bit_clk = 1'b1;
             if (!read_ack) begin expect_rdy = 1'b1; nset++; end
             check("bit_clk edge");
           end
        1: begin
             read_ack = 1'b1; expect_rdy = 1'b0; nclr++;
             check("read_ack rise");
           end
        default: begin
             read_ack = 1'b0;
             check("read_ack fall");
           end
      endcase
      #5;
    end
    checks++;
    if (nset == 0 || nclr == 0) failures++;
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
