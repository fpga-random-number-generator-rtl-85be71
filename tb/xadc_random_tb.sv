// xadc_random_tb: end-to-end test of the generator top at reduced sizes.
//
// Two complete generators run from the same clock, one with xorshift and one
// with middle-square, each fed by its own behavioural XADC model. Periods are
// shortened so that everything happens many times in 60,000 cycles: reseed
// every 50 cycles, display refresh every 300, segment scan step 3, UART bit
// 8 clocks. rng_top_checker checks rand_out every cycle, every UART word and
// every lit display digit, and counts the mechanisms; each must have happened
// at least once: seed loads from the ADC, feedback steps, display refreshes,
// full words on the serial line, waits on a busy UART, and the lit digits.
module xadc_random_tb;
  import rng_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  localparam int RP = 50, DR = 300, CPB = 8, SC = 3;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- xorshift generator ----
  logic        eoc_x, drdy_x, den_x, txd_x;
  logic [15:0] do_x;
  logic [6:0]  daddr_x, seg_x;
  logic [7:0]  an_x;
  word_t       rand_x;
  int unsigned conv_x, bad_x;
  xadc_model #(.CONV_CYCLES(20)) adc_x (.dclk(clk), .daddr(daddr_x), .den(den_x),
    .eoc(eoc_x), .drdy(drdy_x), .do_out(do_x), .conversions(conv_x), .bad_reads(bad_x));
  xadc_random #(.ALGO(ALGO_XORSHIFT), .RESEED_PERIOD(RP), .DISPLAY_REFRESH_CYCLES(DR),
                .CLKS_PER_BIT(CPB), .SCAN_CYCLES(SC)) dut_x (
    .clk, .rst, .xadc_eoc(eoc_x), .xadc_drdy(drdy_x), .xadc_do(do_x),
    .xadc_daddr(daddr_x), .xadc_den(den_x), .an(an_x), .seg(seg_x), .uart_txd(txd_x),
    .rand_out(rand_x));
  int c_x, f_x, loads_x, steps_x, refresh_x, words_x, wait_x, zero_x, digits_x;
  rng_top_checker #(.ALGO(ALGO_XORSHIFT), .RESEED_PERIOD(RP), .CLKS_PER_BIT(CPB)) chk_x (
    .clk, .rst, .xadc_drdy(drdy_x), .xadc_do(do_x), .rand_out(rand_x), .an(an_x), .seg(seg_x),
    .uart_txd(txd_x), .ev_reseed(dut_x.reseed), .ev_refresh(dut_x.refresh),
    .ev_word_start(dut_x.word_start), .uart_ready(dut_x.uart_ready),
    .checks(c_x), .failures(f_x), .n_loads(loads_x), .n_steps(steps_x), .n_refresh(refresh_x),
    .n_words(words_x), .n_uart_wait(wait_x), .n_zero(zero_x), .n_digits_seen(digits_x));

  // ---- middle-square generator ----
  logic        eoc_m, drdy_m, den_m, txd_m;
  logic [15:0] do_m;
  logic [6:0]  daddr_m, seg_m;
  logic [7:0]  an_m;
  word_t       rand_m;
  int unsigned conv_m, bad_m;
  xadc_model #(.CONV_CYCLES(20)) adc_m (.dclk(clk), .daddr(daddr_m), .den(den_m),
    .eoc(eoc_m), .drdy(drdy_m), .do_out(do_m), .conversions(conv_m), .bad_reads(bad_m));
  xadc_random #(.ALGO(ALGO_MIDDLE_SQUARE), .RESEED_PERIOD(RP), .DISPLAY_REFRESH_CYCLES(DR),
                .CLKS_PER_BIT(CPB), .SCAN_CYCLES(SC)) dut_m (
    .clk, .rst, .xadc_eoc(eoc_m), .xadc_drdy(drdy_m), .xadc_do(do_m),
    .xadc_daddr(daddr_m), .xadc_den(den_m), .an(an_m), .seg(seg_m), .uart_txd(txd_m),
    .rand_out(rand_m));
  int c_m, f_m, loads_m, steps_m, refresh_m, words_m, wait_m, zero_m, digits_m;
  rng_top_checker #(.ALGO(ALGO_MIDDLE_SQUARE), .RESEED_PERIOD(RP), .CLKS_PER_BIT(CPB)) chk_m (
    .clk, .rst, .xadc_drdy(drdy_m), .xadc_do(do_m), .rand_out(rand_m), .an(an_m), .seg(seg_m),
    .uart_txd(txd_m), .ev_reseed(dut_m.reseed), .ev_refresh(dut_m.refresh),
    .ev_word_start(dut_m.word_start), .uart_ready(dut_m.uart_ready),
    .checks(c_m), .failures(f_m), .n_loads(loads_m), .n_steps(steps_m), .n_refresh(refresh_m),
    .n_words(words_m), .n_uart_wait(wait_m), .n_zero(zero_m), .n_digits_seen(digits_m));

  task automatic need(input int n, input string what);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n <= 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (60_000) @(negedge clk);
    $display("mechanism counts:");
    need(loads_x,   "xorshift: seed loads from the ADC");
    need(steps_x,   "xorshift: feedback steps");
    need(refresh_x, "xorshift: display refreshes");
    need(digits_x,  "xorshift: display digits checked");
    need(words_x,   "xorshift: UART words received");
    need(wait_x,    "xorshift: cycles waiting on UART");
    need(loads_m,   "middle-square: seed loads from ADC");
    need(steps_m,   "middle-square: feedback steps");
    need(refresh_m, "middle-square: display refreshes");
    need(words_m,   "middle-square: UART words received");
    $display("  %-34s %0d", "middle-square: zero outputs", zero_m);
    checks++;
    if (loads_x != 1 + (60_000 - 40) / RP && loads_x != (60_000 - 40) / RP) begin
      failures++;
      $display("FAIL reseed rate: %0d loads", loads_x);
    end
    checks++;
    if (bad_x != 0 || bad_m != 0) begin
      failures++;
      $display("FAIL XADC read of a wrong channel");
    end
    checks   += c_x + c_m;
    failures += f_x + f_m;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
