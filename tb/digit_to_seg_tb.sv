// digit_to_seg_tb: checks the multiplexed 7-segment driver.
//
// With a scan step of 5 cycles, the test checks at every cycle that exactly
// one anode is low, that the lit position steps 0,1,...,7,0 and stays on
// each digit for 5 cycles, and that the segments show the hex value of that
// digit. The expected patterns come from a table of lit segments written
// out as letters (a..g) for each hex digit, independent of the RTL's table.
`include "tb_checks.svh"
module digit_to_seg_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic [7:0][3:0] digits;
  logic [7:0] an;
  logic [6:0] seg;

  digit_to_seg #(.SCAN_CYCLES(5)) dut (.mclk(clk), .rst, .digits, .an, .seg);

  always #5 clk = ~clk;

  string lit [16] = '{"abcdef", "bc", "abdeg", "abcdg", "bcfg", "acdfg", "acdefg", "abc",
                      "abcdefg", "abcdfg", "abcefg", "cdefg", "adef", "bcdeg", "adefg", "aefg"};

  function automatic logic [6:0] expect_seg(input logic [3:0] d);
    logic [6:0] s = '1;          // active low, bit 0 = segment a
    for (int i = 0; i < lit[d].len(); i++) s[lit[d][i] - "a"] = 1'b0;
    return s;
  endfunction

  // an and seg are registered: they show the digits of the previous edge
  logic [7:0][3:0] shown;
  always @(posedge clk) shown <= digits;

  int pos = -1, run = 0, steps = 0, onehot_bad = 0;
  always @(negedge clk) if (!rst && an != 8'hFF) begin
    int p;
    p = -1;
    for (int i = 0; i < 8; i++) if (!an[i]) begin
      if (p >= 0) onehot_bad++;
      p = i;
    end
    `CHECK(p >= 0 && onehot_bad == 0, "exactly one anode low")
    `CHECK(seg == expect_seg(shown[p]), $sformatf("digit %0d value %h seg %b", p, shown[p], seg))
    if (p == pos) run++;
    else begin
      if (pos >= 0) begin
        `CHECK(p == (pos + 1) % 8, $sformatf("scan order %0d -> %0d", pos, p))
        if (steps > 0) `CHECK(run == 5, $sformatf("digit %0d lit for %0d cycles", pos, run))
        steps++;
      end
      pos = p; run = 1;
    end
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    digits = 32'h01234567;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (200) @(negedge clk);
    digits = 32'h89ABCDEF;
    repeat (200) @(negedge clk);
    digits = $urandom;
    repeat (200) @(negedge clk);
    `CHECK(steps > 100, $sformatf("scan steps %0d", steps))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
