// Controller of the high-throughput measurement system (8 states).
//
// Idle (after reset) -> PrepareFillRAM, which clears the address counter ->
// FillRAM, where every BitReady pulse of the TRNG writes RandomBit into the
// RAM and advances the counter; it stays there until the counter wraps. Then
// the read-out loop: ReadRAM presents the counter as RAM address, ShiftIn
// shifts the RAM output into the serialiser and advances the counter,
// CheckSR goes back to ReadRAM until the serialiser has a byte, WaitUART
// waits while the RS232 transmitter is busy and UARTSend starts it. After
// UARTSend the controller reads the next byte if the counter is non-zero,
// otherwise it refills the RAM from PrepareFillRAM. The states, their
// meaning and these transitions are the paper's.
//
// This design's own choices: the wrap in FillRAM is detected as the most
// significant address bit falling from 1 to 0 (the controller only sees the
// address bus), Idle lasts one clock, and the outputs are decoded from the
// state (Moore outputs).
//
// Outputs: fill_en gates BitReady into the RAM write enable and the counter
// enable (the AND gate of the paper's diagram); cnt_ce is ORed into the
// counter enable in ShiftIn; cnt_clr clears the counter; ser_ce shifts the
// serialiser; uart_start starts the transmitter.
module measure_fsm #(
  parameter int unsigned AW = trng_pkg::RAM_AW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [AW-1:0]        addr,
  input  logic                 ser_ready,
  input  logic                 uart_busy,
  output logic                 fill_en,
  output logic                 cnt_ce,
  output logic                 cnt_clr,
  output logic                 ser_ce,
  output logic                 uart_start,
  output trng_pkg::meas_state_t state
);
  timeunit 1ns;
  timeprecision 1ps;
  import trng_pkg::*;

  meas_state_t next;
  logic        msb_q;      // addr MSB one clock ago
  logic        wrapped;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      msb_q <= 1'b0;
    end else begin
      state <= next;
      msb_q <= addr[AW-1];
    end
  end

  assign wrapped = msb_q & ~addr[AW-1];

  always_comb begin
    next = state;
    unique case (state)
      ST_IDLE:            next = ST_PREPARE_FILLRAM;
      ST_PREPARE_FILLRAM: next = ST_FILLRAM;
      ST_FILLRAM:         if (wrapped) next = ST_READRAM;
      ST_READRAM:         next = ST_SHIFTIN;
      ST_SHIFTIN:         next = ST_CHECKSR;
      ST_CHECKSR:         next = ser_ready ? ST_WAITUART : ST_READRAM;
      ST_WAITUART:        if (!uart_busy) next = ST_UARTSEND;
      ST_UARTSEND:        next = (addr != '0) ? ST_READRAM : ST_PREPARE_FILLRAM;
      default:            next = ST_IDLE;
    endcase
  end

  assign fill_en    = (state == ST_FILLRAM);
  assign cnt_ce     = (state == ST_SHIFTIN);
  assign cnt_clr    = (state == ST_PREPARE_FILLRAM);
  assign ser_ce     = (state == ST_SHIFTIN);
  assign uart_start = (state == ST_UARTSEND);

  // The transmitter is only started when it is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    uart_start |-> !uart_busy);
endmodule
