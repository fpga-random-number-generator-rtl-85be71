// display_refresh: latches the random number for the 7-segment display.
//
// A new number is made every clock, far too fast to read, so the display
// shows a snapshot taken once every REFRESH_CYCLES cycles (10,000,000, i.e.
// 10 times a second at 100 MHz). The snapshot is cut into eight hex digits:
// digits[0] = bits 3:0 up to digits[7] = bits 31:28. The counter runs
// 1..REFRESH_CYCLES as in the original listing; after reset the first
// snapshot is taken in the REFRESH_CYCLES-th cycle. refresh pulses in the
// cycle after the digits change, i.e. with the new digits. The reset is this
// design's own.
module display_refresh
  import rng_pkg::*;
#(
  parameter int unsigned REFRESH_CYCLES = rng_pkg::DEF_DISPLAY_REFRESH_CYCLES
) (
  input  logic            clk,
  input  logic            rst,
  input  word_t           rand_in,
  output logic [7:0][3:0] digits,
  output logic            refresh
);

  localparam int CW = $clog2(REFRESH_CYCLES + 1);

  logic [CW-1:0] count;

  always_ff @(posedge clk) begin
    if (rst) begin
      count   <= CW'(1);
      digits  <= '0;
      refresh <= 1'b0;
    end else begin
      refresh <= 1'b0;
      if (count == CW'(REFRESH_CYCLES)) begin
        digits  <= rand_in;
        count   <= CW'(1);
        refresh <= 1'b1;
      end else begin
        count <= count + CW'(1);
      end
    end
  end

endmodule
