// xadc_random_full_tb: the generator top at its real sizes, end to end.
//
// The top runs with every parameter at its default: xorshift, reseed every
// 1000 cycles, display refresh every 10,000,000 cycles (10 Hz at 100 MHz),
// 1 ms per display digit and 868 clocks per UART bit (115200 baud). The XADC
// model converts once every 100 cycles (1 MSPS). The run lasts 10,900,000
// cycles: long enough for the first display refresh plus a full sweep of the
// eight digits, and for about 310 words on the serial line. rng_top_checker
// checks every rand_out, every UART word and every lit digit. The test also
// checks that the first refresh comes after exactly 10,000,000 cycles and that
// a word takes 4 frames of 8680 cycles plus a few handshake cycles.
module xadc_random_full_tb;
  import rng_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  initial begin
    #200_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        eoc, drdy, den, txd;
  logic [15:0] do_out;
  logic [6:0]  daddr, seg;
  logic [7:0]  an;
  word_t       rand_out;
  int unsigned conv, bad;
  xadc_model #(.CONV_CYCLES(100)) adc (.dclk(clk), .daddr, .den,
    .eoc, .drdy, .do_out, .conversions(conv), .bad_reads(bad));
  xadc_random dut (
    .clk, .rst, .xadc_eoc(eoc), .xadc_drdy(drdy), .xadc_do(do_out),
    .xadc_daddr(daddr), .xadc_den(den), .an, .seg, .uart_txd(txd), .rand_out);
  int c, f, loads, steps, refreshes, words, waits, zeros, digits_seen;
  rng_top_checker chk (
    .clk, .rst, .xadc_drdy(drdy), .xadc_do(do_out), .rand_out, .an, .seg,
    .uart_txd(txd), .ev_reseed(dut.reseed), .ev_refresh(dut.refresh),
    .ev_word_start(dut.word_start), .uart_ready(dut.uart_ready),
    .checks(c), .failures(f), .n_loads(loads), .n_steps(steps), .n_refresh(refreshes),
    .n_words(words), .n_uart_wait(waits), .n_zero(zeros), .n_digits_seen(digits_seen));

  longint cycle = 0, first_refresh = -1, last_ws = -1, word_gap = -1;
  always @(posedge clk) if (!rst) cycle++;
  always @(negedge clk) if (!rst) begin
    if (dut.refresh && first_refresh < 0) first_refresh = cycle;
    if (dut.word_start) begin
      if (last_ws >= 0) word_gap = cycle - last_ws;
      last_ws = cycle;
    end
  end

  task automatic expect_true(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (10_900_000) @(negedge clk);
    $display("seed loads %0d, steps %0d, refreshes %0d, digits checked %0d, words %0d, word period %0d cycles",
             loads, steps, refreshes, digits_seen, words, word_gap);
    expect_true(first_refresh == 10_000_000, $sformatf("first refresh at cycle %0d", first_refresh));
    expect_true(refreshes == 1, "one refresh");
    expect_true(digits_seen > 700_000, "all digits shown after the refresh");
    expect_true(word_gap >= 4 * 8680 && word_gap <= 4 * 8680 + 20, $sformatf("word period %0d", word_gap));
    expect_true(words >= 300, $sformatf("words received %0d", words));
    expect_true(loads >= 10_000 && loads <= 10_900, $sformatf("seed loads %0d", loads));
    expect_true(bad == 0, "XADC channel");
    checks   += c;
    failures += f;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
