// Shared types and constants of the TRNG and of its high-throughput
// measurement system.
//
// The measurement controller has the eight states of the paper's state
// diagram, in the order the diagram draws them. RAM_BITS is the 16 Kbit
// entropy buffer of the measurement system; its address is 14 bits wide, as
// the address bus in the paper's block diagram. The binary state encoding is
// this design's own choice.
package trng_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned RAM_BITS = 16384;               // 16 Kbit BlockRAM
  localparam int unsigned RAM_AW   = $clog2(RAM_BITS);    // 14 address bits

  typedef enum logic [2:0] {
    ST_IDLE            = 3'd0,
    ST_PREPARE_FILLRAM = 3'd1,
    ST_FILLRAM         = 3'd2,
    ST_READRAM         = 3'd3,
    ST_SHIFTIN         = 3'd4,
    ST_CHECKSR         = 3'd5,
    ST_WAITUART        = 3'd6,
    ST_UARTSEND        = 3'd7
  } meas_state_t;
endpackage
