// digit_to_seg: drives the board's eight-digit multiplexed 7-segment display.
//
// The eight digits share one set of segment lines, so they are lit one at a
// time: a counter holds each digit for SCAN_CYCLES clocks (1 ms at 100 MHz,
// a full sweep every 8 ms, fast enough to look steady), then moves to the
// next. For the lit digit the anode line goes low and its hex value is
// decoded to segments; anodes and segments are active low, as the Nexys A7
// wires them. digits[0] appears on the rightmost digit (an[0]). The original
// design took this driver from the board vendor's examples and gives only its
// ports; the scan rate, the polarity and this internal structure are this
// design's own. an and seg are registered: they change one cycle after the
// scan step.
module digit_to_seg
  import rng_pkg::*;
#(
  parameter int unsigned SCAN_CYCLES = rng_pkg::DEF_SCAN_CYCLES
) (
  input  logic            mclk,
  input  logic            rst,
  input  logic [7:0][3:0] digits,
  output logic [7:0]      an,
  output logic [6:0]      seg
);

  localparam int CW = (SCAN_CYCLES > 1) ? $clog2(SCAN_CYCLES) : 1;

  logic [CW-1:0] tick;
  logic [2:0]    sel;

  always_ff @(posedge mclk) begin
    if (rst) begin
      tick <= '0;
      sel  <= '0;
      an   <= '1;
      seg  <= '1;
    end else begin
      if (tick == CW'(SCAN_CYCLES - 1)) begin
        tick <= '0;
        sel  <= sel + 3'd1;
      end else begin
        tick <= tick + CW'(1);
      end
      an  <= ~(8'b1 << sel);
      seg <= ~hex_to_seg(digits[sel]);
    end
  end

endmodule
