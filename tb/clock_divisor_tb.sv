// Self-checking testbench of the clock divisor: D = 0, 1 and 3. The divided
// clock is compared every half cycle with a reference counter, and its
// rising edges are counted (one per 2^D input clocks).
module clock_divisor_tb;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cs0, cs1, cs3;
  int unsigned e0 = 0, e1 = 0, e3 = 0;
  logic [7:0] ref_cnt;
  localparam int CYCLES = 800;

  always #10 clk = ~clk;

  clock_divisor #(.D(0)) u0 (.clk(clk), .rst_n(rst_n), .clk_s(cs0));
  clock_divisor #(.D(1)) u1 (.clk(clk), .rst_n(rst_n), .clk_s(cs1));
  clock_divisor #(.D(3)) u3 (.clk(clk), .rst_n(rst_n), .clk_s(cs3));

  always @(posedge cs0) if (rst_n) e0++;
  always @(posedge cs1) if (rst_n) e1++;
  always @(posedge cs3) if (rst_n) e3++;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ref_cnt <= '0; else ref_cnt <= ref_cnt + 1'b1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < CYCLES; k++) begin
      @(negedge clk);
      checks += 2;
      if (cs1 !== ref_cnt[0]) begin failures++; $display("D=1 mismatch at %0d", k); end
      if (cs3 !== ref_cnt[2]) begin failures++; $display("D=3 mismatch at %0d", k); end
    end
    checks += 3;
    if (e0 != CYCLES)     begin failures++; $display("D=0: %0d edges", e0); end
    if (e1 != CYCLES / 2) begin failures++; $display("D=1: %0d edges", e1); end
    if (e3 != CYCLES / 8) begin failures++; $display("D=3: %0d edges", e3); end
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
