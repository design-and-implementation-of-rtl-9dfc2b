// Full-size testbench of the measurement system: every parameter of the
// top at its default (16 Kbit RAM, 20 rings of length 3, d = 0, r = 2,
// 50 MHz clock, 115200 baud). It runs one complete operation: the RAM is
// filled once (16384 bits, 65536 clocks) and all 2048 bytes are sent over
// the serial line (about 178 ms of simulated time), after which the
// controller starts the next fill. Every received byte is checked against
// the bits the TRNG wrote into the RAM, in order, and the same mechanisms as
// in the reduced end-to-end test are counted.
module trng_measure_top_full_tb;
  timeunit 1ns;
  timeprecision 1ps;
  import trng_pkg::*;

  localparam int RAM_BITS = trng_pkg::RAM_BITS;
  localparam int CPB      = 50_000_000 / 115_200;
  localparam int ROUNDS   = 1;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, tx;
  logic written [$];
  int unsigned nbytes = 0;
  int unsigned n_fill = 0, n_refill = 0, n_loop = 0, n_wait = 0, n_drop = 0;
  int unsigned fill_cycles = 0, wr_addr = 0;
  meas_state_t st, st_q;

  always #10 clk = ~clk;

  trng_measure_top u_dut (
    .clk(clk), .rst_n(rst_n), .tx(tx));

  assign st = u_dut.u_fsm.state;

  always @(posedge clk) if (rst_n) begin
    st_q <= st;
    if (u_dut.we) begin
      written.push_back(u_dut.random_bit);
      checks++;
      if (u_dut.addr != wr_addr[$clog2(RAM_BITS)-1:0]) begin
        failures++;
        $display("write to %0d, expected %0d", u_dut.addr, wr_addr);
      end
      wr_addr = (wr_addr + 1) % RAM_BITS;
    end
    if (u_dut.read_ack && st != ST_FILLRAM && st_q != ST_FILLRAM) n_drop++;
    if (st == ST_FILLRAM) fill_cycles++;
    if (st == ST_WAITUART && u_dut.uart_busy) n_wait++;
    if (st_q == ST_CHECKSR && st == ST_READRAM) n_loop++;
    if (st_q == ST_UARTSEND && st == ST_PREPARE_FILLRAM) n_refill++;
    if (st_q == ST_FILLRAM && st == ST_READRAM) begin
      n_fill++;
      checks++;
      // one bit per 4 clocks; allow the few clocks of entry and exit
      if (fill_cycles < RAM_BITS * 4 - 4 || fill_cycles > RAM_BITS * 4 + 4) begin
        failures++;
        $display("fill took %0d clocks, expected about %0d", fill_cycles, RAM_BITS * 4);
      end
      fill_cycles = 0;
    end
  end

  // serial receiver
  initial begin
    logic [7:0] rx;
    forever begin
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      for (int b = 0; b < 8; b++) begin
        repeat (CPB) @(posedge clk);
        rx[b] = tx;
      end
      repeat (CPB) @(posedge clk);
      checks += 2;
      if (tx !== 1'b1) begin failures++; $display("bad stop bit"); end
      if (written.size() < 8) begin
        failures++; $display("byte %0d received before its bits were written", nbytes);
      end else begin
        logic [7:0] e;
        for (int b = 0; b < 8; b++) e[b] = written.pop_front();
        if (rx !== e) begin
          failures++;
          if (failures < 10) $display("byte %0d: received %h, RAM held %h", nbytes, rx, e);
        end
      end
      nbytes++;
    end
  end

  task automatic need(input string what, input int unsigned n);
    checks++;
    $display("%-28s %0d", what, n);
    if (n == 0) begin failures++; $display("  never happened"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (nbytes == ROUNDS * RAM_BITS / 8);
    repeat (20) @(negedge clk);
    checks++;
    if (n_fill != ROUNDS + 1 && n_fill != ROUNDS) begin
      failures++; $display("%0d fills", n_fill);
    end
    need("RAM fills", n_fill);
    need("refills after last byte", n_refill);
    need("CheckSR->ReadRAM loops", n_loop);
    need("clocks waiting for UART", n_wait);
    need("bits dropped (not filling)", n_drop);
    $display("bytes received %0d", nbytes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #300ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
