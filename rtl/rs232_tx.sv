// RS232 transmitter (UART, 8 data bits, no parity, 1 stop bit).
//
// Sends the serialised random bytes to the PC. start (one clock) loads di
// and starts a frame: a low start bit, the eight data bits LSB first and a
// high stop bit, each CLK_HZ/BAUD clocks long. busy is high from the clock
// after start until the stop bit has ended. The paper only names this block
// (RS232, with ports di, start, busy, do); frame format, baud rate and the
// 50 MHz clock are this design's choices (115200 baud is the common PC rate).
//
// Timing: tx_do is registered, idle high; a frame lasts 10*CLKS_PER_BIT
// clocks from the edge that samples start. start while busy is ignored.
module rs232_tx #(
  parameter int unsigned CLK_HZ       = 50_000_000,
  parameter int unsigned BAUD         = 115_200,
  parameter int unsigned CLKS_PER_BIT = CLK_HZ / BAUD
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] di,
  input  logic       start,
  output logic       busy,
  output logic       tx_do
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]    frame;   // stop, data[7:0], start; sent from bit 0
  logic [3:0]    nleft;   // bits of the frame still to send
  logic [CW-1:0] tick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame <= '1;
      nleft <= '0;
      tick  <= '0;
      busy  <= 1'b0;
      tx_do <= 1'b1;
    end else if (!busy) begin
      tx_do <= 1'b1;
      if (start) begin
        frame <= {1'b1, di, 1'b0};
        nleft <= 4'd10;
        tick  <= '0;
        busy  <= 1'b1;
      end
    end else begin
      if (tick == '0) begin
        if (nleft == '0) begin
          busy  <= 1'b0;
          tx_do <= 1'b1;
        end else begin
          tx_do <= frame[0];
          frame <= {1'b1, frame[9:1]};
          nleft <= nleft - 1'b1;
          tick  <= CW'(CLKS_PER_BIT - 1);
        end
      end else begin
        tick <= tick - 1'b1;
      end
    end
  end

endmodule
