// Self-checking testbench of the serialiser. Random bits are shifted in with
// random gaps in ce; after every eighth bit ready must be high and dout must
// hold the last eight bits, the first one in bit 0, until the next ce.
// ready must be low while a byte is incomplete.
module serialiser_tb;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, di = 1'b0, ce = 1'b0, ready;
  logic [7:0] dout, ref_byte;
  int unsigned nb = 0, bytes = 0;

  always #10 clk = ~clk;

  serialiser u_dut (.clk(clk), .rst_n(rst_n), .di(di), .ce(ce), .dout(dout), .ready(ready));

  logic ref_ready = 1'b0;

  initial begin
    @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 4000; k++) begin
      ce = 1'($urandom);
      di = 1'($urandom);
      if (ce) begin
        if (ref_ready) begin
          ref_ready = 1'b0;
          nb = 0;
        end
        ref_byte[nb] = di;
        nb++;
        if (nb == 8) ref_ready = 1'b1;
      end
      @(negedge clk);
      checks++;
      if (ready !== ref_ready) begin failures++; $display("ready=%0b after %0d bits", ready, nb); end
      if (ref_ready) begin
        checks++;
        if (ce) bytes++;
        if (dout !== ref_byte) begin failures++; $display("byte %h expected %h", dout, ref_byte); end
      end
    end
    checks++;
    if (bytes < 100) failures++;
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
