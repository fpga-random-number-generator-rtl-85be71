// rng_pkg: types and constants shared by the random number generator.
//
// The generator runs from the 100 MHz board clock. A random number is a
// 32-bit word. The algorithm that turns a seed into the next number is
// chosen at elaboration time (xorshift or middle-square). The UART runs at
// 115200 baud, which is 868 clock cycles per bit. The seed is refreshed from
// the ADC every 1000 cycles and the display every 10,000,000 cycles (10 Hz).
// These numbers are the ones the design was built around; the bit period is
// rounded from 100e6 / 115200 = 868.06. The 7-bit XADC address 0x13 selects
// auxiliary channel 3 (the VAUX3 pin pair on the board's XADC header).
// hex_to_seg() is this design's own segment table for digits 0-F.
package rng_pkg;

  localparam int unsigned WORD_W = 32;
  typedef logic [WORD_W-1:0] word_t;

  // Which feedback function the random processing unit uses.
  typedef enum logic {
    ALGO_XORSHIFT      = 1'b0,
    ALGO_MIDDLE_SQUARE = 1'b1
  } algo_e;

  localparam int unsigned CLK_HZ                     = 100_000_000;
  localparam int unsigned BAUD                       = 115_200;
  // clocks per UART bit, rounded: (100e6 + 57600) / 115200 = 868
  localparam int unsigned DEF_CLKS_PER_BIT           = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned DEF_RESEED_PERIOD          = 1000;
  localparam int unsigned DEF_DISPLAY_REFRESH_CYCLES = CLK_HZ / 10;
  localparam int unsigned DEF_SCAN_CYCLES            = CLK_HZ / 1000;
  localparam logic [6:0]  XADC_CHANNEL_ADDR          = 7'h13;

  // Hex digit to segment pattern {CG,CF,CE,CD,CC,CB,CA}, 1 = segment lit.
  function automatic logic [6:0] hex_to_seg(input logic [3:0] d);
    unique case (d)
      4'h0: return 7'b0111111;
      4'h1: return 7'b0000110;
      4'h2: return 7'b1011011;
      4'h3: return 7'b1001111;
      4'h4: return 7'b1100110;
      4'h5: return 7'b1101101;
      4'h6: return 7'b1111101;
      4'h7: return 7'b0000111;
      4'h8: return 7'b1111111;
      4'h9: return 7'b1101111;
      4'hA: return 7'b1110111;
      4'hB: return 7'b1111100;
      4'hC: return 7'b0111001;
      4'hD: return 7'b1011110;
      4'hE: return 7'b1111001;
      4'hF: return 7'b1110001;
    endcase
  endfunction

endpackage
