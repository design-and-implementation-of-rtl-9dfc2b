// Self-checking testbench of the measurement controller, with a 5-bit
// address (a 32-bit RAM).
//
// The testbench models the rest of the datapath: the address counter (with
// the write enable = BitReady AND fill_en, ORed with cnt_ce, and cnt_clr),
// a bit-ready source that fires at random, a serialiser bit count and a
// transmitter that stays busy for a random time after each start. On every
// clock it checks the state against the transitions of the paper's state
// diagram, computed from the same inputs, and the outputs against the
// state. It counts each transition and fails if one never occurred.
module measure_fsm_tb;
  timeunit 1ns;
  timeprecision 1ps;
  import trng_pkg::*;

  localparam int AW = 5;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [AW-1:0] addr = '0;
  logic ser_ready = 1'b0, uart_busy = 1'b0, bit_ready = 1'b0;
  logic fill_en, cnt_ce, cnt_clr, ser_ce, uart_start;
  meas_state_t state, exp_state;
  logic msb_q = 1'b0;
  int unsigned nser = 0, busy_left = 0;
  int unsigned n_tr [8][8];

  always #10 clk = ~clk;

  measure_fsm #(.AW(AW)) u_dut (
    .clk(clk), .rst_n(rst_n), .addr(addr), .ser_ready(ser_ready), .uart_busy(uart_busy),
    .fill_en(fill_en), .cnt_ce(cnt_ce), .cnt_clr(cnt_clr), .ser_ce(ser_ce),
    .uart_start(uart_start), .state(state));

  function automatic meas_state_t next_of(meas_state_t s);
    case (s)
      ST_IDLE:            return ST_PREPARE_FILLRAM;
      ST_PREPARE_FILLRAM: return ST_FILLRAM;
      ST_FILLRAM:         return (msb_q && !addr[AW-1]) ? ST_READRAM : ST_FILLRAM;
      ST_READRAM:         return ST_SHIFTIN;
      ST_SHIFTIN:         return ST_CHECKSR;
      ST_CHECKSR:         return ser_ready ? ST_WAITUART : ST_READRAM;
      ST_WAITUART:        return uart_busy ? ST_WAITUART : ST_UARTSEND;
      default:            return (addr != 0) ? ST_READRAM : ST_PREPARE_FILLRAM;
    endcase
  endfunction

  initial begin
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) n_tr[i][j] = 0;
    exp_state = ST_IDLE;
    repeat (2) @(negedge clk);
    checks++;
    if (state !== ST_IDLE) failures++;
    rst_n = 1'b1;
    for (int k = 0; k < 20000; k++) begin
      meas_state_t nx;
      bit_ready = ($urandom % 3) == 0;
      // outputs decoded from the state
      checks++;
      if (fill_en !== (state == ST_FILLRAM) || cnt_ce !== (state == ST_SHIFTIN) ||
          ser_ce !== (state == ST_SHIFTIN) || cnt_clr !== (state == ST_PREPARE_FILLRAM) ||
          uart_start !== (state == ST_UARTSEND)) begin
        failures++; $display("outputs wrong in state %s", state.name());
      end
      nx = next_of(exp_state);
      @(posedge clk);
      // datapath model, from the values before the edge
      msb_q <= addr[AW-1];
      if (cnt_clr) addr <= '0;
      else if ((bit_ready && fill_en) || cnt_ce) addr <= addr + 1'b1;
      if (ser_ce) begin
        nser = ser_ready ? 1 : nser + 1;
      end
      if (uart_start) busy_left = 1 + $urandom % 40;
      else if (busy_left > 0) busy_left--;
      n_tr[exp_state][nx]++;
      exp_state = nx;
      @(negedge clk);
      ser_ready = (nser == 8);
      uart_busy = (busy_left > 0);
      checks++;
      if (state !== exp_state) begin
        failures++;
        if (failures < 10) $display("state %s, expected %s", state.name(), exp_state.name());
        exp_state = state;
      end
    end
    // every arc of the diagram must have been taken
    checks += 12;
    if (n_tr[ST_IDLE][ST_PREPARE_FILLRAM] == 0)        failures++;
    if (n_tr[ST_PREPARE_FILLRAM][ST_FILLRAM] == 0)     failures++;
    if (n_tr[ST_FILLRAM][ST_FILLRAM] == 0)             failures++;
    if (n_tr[ST_FILLRAM][ST_READRAM] == 0)             failures++;
    if (n_tr[ST_READRAM][ST_SHIFTIN] == 0)             failures++;
    if (n_tr[ST_SHIFTIN][ST_CHECKSR] == 0)             failures++;
    if (n_tr[ST_CHECKSR][ST_READRAM] == 0)             failures++;
    if (n_tr[ST_CHECKSR][ST_WAITUART] == 0)            failures++;
    if (n_tr[ST_WAITUART][ST_WAITUART] == 0)           failures++;
    if (n_tr[ST_WAITUART][ST_UARTSEND] == 0)           failures++;
    if (n_tr[ST_UARTSEND][ST_READRAM] == 0)            failures++;
    if (n_tr[ST_UARTSEND][ST_PREPARE_FILLRAM] == 0)    failures++;
    $display("fills %0d, bytes %0d", n_tr[ST_FILLRAM][ST_READRAM], n_tr[ST_WAITUART][ST_UARTSEND]);
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
