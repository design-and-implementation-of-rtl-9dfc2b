// Self-checking testbench of the entropy RAM at its full 16 Kbit size.
//
// Writes a random bit to every address, reads all back, then overwrites
// random addresses while checking the read-before-write output, all against
// a reference array in the testbench.
module entropy_ram_tb;
  timeunit 1ns;
  timeprecision 1ps;
  import trng_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, di = 1'b0, we = 1'b0, dout;
  logic [RAM_AW-1:0] addr = '0;
  logic ref_mem [RAM_BITS];

  always #10 clk = ~clk;

  entropy_ram u_dut (.clk(clk), .di(di), .we(we), .addr(addr), .dout(dout));

  initial begin
    @(negedge clk);
    for (int a = 0; a < RAM_BITS; a++) begin
      addr = RAM_AW'(a); di = 1'($urandom); we = 1'b1;
      ref_mem[a] = di;
      @(negedge clk);
    end
    we = 1'b0;
    for (int a = 0; a < RAM_BITS; a++) begin
      addr = RAM_AW'(a);
      @(negedge clk);
      checks++;
      if (dout !== ref_mem[a]) begin
        failures++;
        if (failures < 10) $display("addr %0d read %0b expected %0b", a, dout, ref_mem[a]);
      end
    end
    for (int k = 0; k < 4000; k++) begin
      logic old;
      addr = RAM_AW'($urandom); di = 1'($urandom); we = 1'($urandom);
      old = ref_mem[addr];
      if (we) ref_mem[addr] = di;
      @(negedge clk);
      checks++;
      if (dout !== old) failures++;
    end
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
