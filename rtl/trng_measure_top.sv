// High-throughput measurement system around the TRNG (top level).
//
// To test the generator at full speed, without the serial link re-sampling
// a possibly non-random stream, the TRNG first fills a 16 Kbit block RAM in
// one burst at its own rate, and only then are the stored bits packed into
// bytes and sent to a PC over RS232; the RAM is refilled after the last byte.
// The same arrangement is an entropy buffer a cipher on the FPGA could draw
// from.
//
// Wiring (the paper's): RandomBit is the RAM data input. The RAM write enable
// is BitReady AND the controller's fill_en (high in FillRAM), and the address
// counter enable is that same write enable OR the controller's cnt_ce. The
// Ack block raises ReadAck one clk after BitReady, on the edge that stores
// the bit. RAM output -> serialiser -> RS232 transmitter, all sequenced by
// the controller. BitReady pulses outside FillRAM are acknowledged and the
// bits dropped.
//
// Interface: clk (50 MHz by default; 12.5 Mbit/s TRNG rate), rst_n
// (asynchronous, active low; this design's addition), tx (RS232 line, idle
// high, 8N1). Timing: one fill takes RAM_BITS * 2^(R+D) clocks, the
// read-out is bounded by the serial line, 10 bit times per byte.
module trng_measure_top #(
  parameter int unsigned N        = 20,
  parameter int unsigned L        = 3,
  parameter int unsigned D        = 0,
  parameter int unsigned R        = 2,
  parameter int unsigned S        = 1,
  parameter int unsigned RAM_BITS = trng_pkg::RAM_BITS,
  parameter int unsigned CLK_HZ   = 50_000_000,
  parameter int unsigned BAUD     = 115_200
) (
  input  logic clk,
  input  logic rst_n,
  output logic tx
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned AW = $clog2(RAM_BITS);

  logic          random_bit, bit_ready, read_ack;
  logic          fill_en, fsm_cnt_ce, cnt_clr, ser_ce, uart_start;
  logic          we, cnt_ce, ram_do, ser_ready, uart_busy;
  logic [AW-1:0] addr;
  logic [7:0]    ser_do;

  trng #(.N(N), .L(L), .D(D), .R(R), .S(S)) u_trng (
    .clk        (clk),
    .rst_n      (rst_n),
    .random_bit (random_bit),
    .bit_ready  (bit_ready),
    .read_ack   (read_ack)
  );

  read_ack_gen u_ack (
    .clk       (clk),
    .rst_n     (rst_n),
    .bit_ready (bit_ready),
    .read_ack  (read_ack)
  );

  assign we     = bit_ready & fill_en;
  assign cnt_ce = we | fsm_cnt_ce;

  entropy_ram #(.DEPTH(RAM_BITS), .AW(AW)) u_ram (
    .clk  (clk),
    .di   (random_bit),
    .we   (we),
    .addr (addr),
    .dout (ram_do)
  );

  addr_cnt #(.AW(AW)) u_cnt (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (cnt_clr),
    .ce    (cnt_ce),
    .addr  (addr)
  );

  serialiser #(.W(8)) u_ser (
    .clk   (clk),
    .rst_n (rst_n),
    .di    (ram_do),
    .ce    (ser_ce),
    .dout  (ser_do),
    .ready (ser_ready)
  );

  rs232_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_uart (
    .clk   (clk),
    .rst_n (rst_n),
    .di    (ser_do),
    .start (uart_start),
    .busy  (uart_busy),
    .tx_do (tx)
  );

  measure_fsm #(.AW(AW)) u_fsm (
    .clk        (clk),
    .rst_n      (rst_n),
    .addr       (addr),
    .ser_ready  (ser_ready),
    .uart_busy  (uart_busy),
    .fill_en    (fill_en),
    .cnt_ce     (fsm_cnt_ce),
    .cnt_clr    (cnt_clr),
    .ser_ce     (ser_ce),
    .uart_start (uart_start),
    .state      ()          // observable as u_fsm.state
  );

  // Handshake rule: each acknowledge is a one-clock pulse, i.e. BitReady has
  // been cleared by the time of the next edge. This holds when R + D >= 2; at
  // smaller settings the generator outruns the handshake and bits are lost.
  a_ack_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    read_ack |=> !read_ack);
endmodule
