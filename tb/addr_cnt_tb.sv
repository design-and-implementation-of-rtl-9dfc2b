// Self-checking testbench of the 14-bit address counter: random clock
// enables and clears against a reference counter, including several wraps
// from all ones to zero.
module addr_cnt_tb;
  timeunit 1ns;
  timeprecision 1ps;
  import trng_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, ce = 1'b0;
  logic [RAM_AW-1:0] addr, ref_addr = '0;
  int unsigned wraps = 0;

  always #10 clk = ~clk;

  addr_cnt u_dut (.clk(clk), .rst_n(rst_n), .clr(clr), .ce(ce), .addr(addr));

  initial begin
    @(negedge clk);
    checks++;
    if (addr !== '0) failures++;
    rst_n = 1'b1;
    for (int k = 0; k < 60000; k++) begin
      ce  = ($urandom % 8) != 0;
      clr = ($urandom % 20000) == 0;
      if (clr) ref_addr = '0;
      else if (ce) begin
        if (ref_addr == '1) wraps++;
        ref_addr = ref_addr + 1'b1;
      end
      @(negedge clk);
      checks++;
      if (addr !== ref_addr) begin
        failures++;
        if (failures < 10) $display("addr %0d expected %0d", addr, ref_addr);
      end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("counter never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
