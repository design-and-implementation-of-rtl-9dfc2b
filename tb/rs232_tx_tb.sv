// Self-checking testbench of the RS232 transmitter at 10 clocks per bit.
//
// Random bytes are started whenever the transmitter is idle (and sometimes
// also while it is busy, which must be ignored). A receiver in the
// testbench finds each start bit, samples the middle of every bit and checks
// data, the stop bit, and the frame length (busy high for 10 bit times).
module rs232_tx_tb;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int CPB = 10;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, tx;
  logic [7:0] di = '0;
  logic [7:0] sent [$];
  int unsigned nrx = 0, busy_cycles = 0, frames = 0;

  always #10 clk = ~clk;

  rs232_tx #(.CLK_HZ(CPB * 1000), .BAUD(1000)) u_dut (
    .clk(clk), .rst_n(rst_n), .di(di), .start(start), .busy(busy), .tx_do(tx));

  // receiver
  initial begin
    logic [7:0] rx;
    forever begin
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      checks++;
      if (tx !== 1'b0) begin failures++; $display("bad start bit"); end
      for (int b = 0; b < 8; b++) begin
        repeat (CPB) @(posedge clk);
        rx[b] = tx;
      end
      repeat (CPB) @(posedge clk);
      checks += 2;
      if (tx !== 1'b1) begin failures++; $display("bad stop bit"); end
      if (sent.size() == 0) begin failures++; $display("unexpected frame"); end
      else begin
        logic [7:0] e;
        e = sent.pop_front();
        if (rx !== e) begin failures++; $display("received %h expected %h", rx, e); end
      end
      nrx++;
    end
  end

  // busy length per frame
  always @(posedge clk) if (busy) busy_cycles++;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (tx !== 1'b1 || busy !== 1'b0) failures++;
    for (int k = 0; k < 60; k++) begin
      while (busy) begin
        // a start while busy must be ignored
        start = ($urandom % 16) == 0;
        di = 8'($urandom);
        @(negedge clk);
      end
      start = 1'b0;
      repeat ($urandom % 4) @(negedge clk);
      di = 8'($urandom);
      start = 1'b1;
      sent.push_back(di);
      frames++;
      @(negedge clk);
      start = 1'b0;
      di = 8'($urandom);
    end
    while (busy) @(negedge clk);
    repeat (2 * CPB) @(negedge clk);
    checks += 2;
    if (nrx != frames) begin failures++; $display("%0d frames received of %0d", nrx, frames); end
    if (busy_cycles != frames * (10 * CPB + 1)) begin
      failures++;
      $display("busy for %0d cycles, expected %0d", busy_cycles, frames * (10 * CPB + 1));
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
