// display_refresh_tb: checks the display snapshot period and digit order.
//
// A fast instance (period 25) is fed a new random word every cycle; the test
// checks that refresh pulses exactly every 25 cycles and that digit i holds
// bits 4i+3:4i of the word present at that clock edge. A second instance at
// the full 10,000,000-cycle period checks that the first snapshot comes after
// exactly 10,000,000 clocks, i.e. 10 times a second at 100 MHz.
`include "tb_checks.svh"
module display_refresh_tb;
  import rng_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  word_t rand_in = 0;
  logic [7:0][3:0] digits, digits_full;
  logic refresh, refresh_full;

  display_refresh #(.REFRESH_CYCLES(25)) dut (.clk, .rst, .rand_in, .digits, .refresh);
  display_refresh dut_full (.clk, .rst, .rand_in, .digits(digits_full), .refresh(refresh_full));

  always #5 clk = ~clk;

  longint cycle = 0;           // rising edges since reset was released
  word_t  at_edge [longint];
  int     refreshes = 0;
  longint first_full = -1;
  word_t  full_word = 0;

  always @(posedge clk) if (!rst) begin
    cycle++;
    if (cycle % 25 == 0) at_edge[cycle] = rand_in;
    if (cycle == 10_000_000) full_word = rand_in;
  end

  always @(negedge clk) if (!rst) begin
    `CHECK(refresh == (cycle % 25 == 0 && cycle > 0), $sformatf("refresh at cycle %0d", cycle))
    if (refresh) begin
      refreshes++;
      for (int i = 0; i < 8; i++)
        `CHECK(digits[i] == at_edge[cycle][4*i +: 4], $sformatf("digit %0d", i))
      at_edge.delete(cycle);
    end
    if (refresh_full && first_full < 0) begin
      first_full = cycle;
      `CHECK(digits_full == full_word, "full-size snapshot")
    end
    rand_in = $urandom;
  end

  initial begin
    #200_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (10_000_010) @(negedge clk);
    `CHECK(refreshes == 400_000, $sformatf("refresh count %0d", refreshes))
    `CHECK(first_full == 10_000_000, $sformatf("full-size first refresh at %0d", first_full))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
