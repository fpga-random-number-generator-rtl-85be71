// workload_tb: the randomness experiments, run in simulation.
//
// Part 1, fixed seeds. A middle_square step closed through a register, as
// in a pure pseudo-random generator, runs 490,000 steps (one 700 x 700 image
// of black/white pixels) from seed 0x19238433 and from seed 0x20118433. From
// both seeds the sequence must fall into a repeating cycle, which is what
// makes stripes in the image. The original study reports that 0x20118433 ends
// in the zero trap; with this binary middle-square it does not (it enters a
// non-zero cycle), and the test prints what happens rather than requiring it.
// Part 2, the full generator. Two xadc_random tops at default sizes, one with
// xorshift and one with middle-square, each with a behavioural noisy XADC,
// run 490,000 cycles; every rand_out is a pixel (black if below 0.5, i.e. bit
// 31 clear). Expected: xorshift close to half black; middle-square clearly
// darker, because a square of a uniform 16-bit value is below 2^31 about
// 71% of the time and the zero trap, which lasts until the next reseed,
// adds more.
`include "tb_checks.svh"
module workload_tb;
  import rng_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 490_000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- part 1: fixed seeds through the middle-square step ----
  word_t ms_seed, ms_next;
  middle_square u_ms (.seed(ms_seed), .rand_out(ms_next));

  task automatic fixed_seed_run(input word_t seed0, output int black, output int zeros,
                                output int first_repeat, output int final_zero_run);
    int seen [word_t];
    black = 0; zeros = 0; first_repeat = -1; final_zero_run = 0;
    ms_seed = seed0;
    for (int i = 0; i < N; i++) begin
      #1;
      if (!ms_next[31]) black++;
      if (ms_next == 0) begin zeros++; final_zero_run++; end
      else final_zero_run = 0;
      if (first_repeat < 0) begin
        if (seen.exists(ms_next)) first_repeat = i;
        else seen[ms_next] = 1;
      end
      ms_seed = ms_next;
    end
  endtask

  // ---- part 2: the complete generator ----
  logic        eoc_x, drdy_x, den_x, eoc_m, drdy_m, den_m;
  logic [15:0] do_x, do_m;
  logic [6:0]  daddr_x, daddr_m;
  int unsigned conv_x, bad_x, conv_m, bad_m;
  word_t       rand_x, rand_m;
  xadc_model #(.CONV_CYCLES(100)) adc_x (.dclk(clk), .daddr(daddr_x), .den(den_x),
    .eoc(eoc_x), .drdy(drdy_x), .do_out(do_x), .conversions(conv_x), .bad_reads(bad_x));
  xadc_model #(.CONV_CYCLES(100)) adc_m (.dclk(clk), .daddr(daddr_m), .den(den_m),
    .eoc(eoc_m), .drdy(drdy_m), .do_out(do_m), .conversions(conv_m), .bad_reads(bad_m));
  xadc_random dut_x (.clk, .rst, .xadc_eoc(eoc_x), .xadc_drdy(drdy_x), .xadc_do(do_x),
    .xadc_daddr(daddr_x), .xadc_den(den_x), .an(), .seg(), .uart_txd(), .rand_out(rand_x));
  xadc_random #(.ALGO(ALGO_MIDDLE_SQUARE)) dut_m (.clk, .rst, .xadc_eoc(eoc_m), .xadc_drdy(drdy_m),
    .xadc_do(do_m), .xadc_daddr(daddr_m), .xadc_den(den_m), .an(), .seg(), .uart_txd(),
    .rand_out(rand_m));

  initial begin
    int b1, z1, r1, fz1, b2, z2, r2, fz2, bx, bm, zm, started;
    fixed_seed_run(32'h19238433, b1, z1, r1, fz1);
    $display("seed 19238433: black %0d of %0d, zeros %0d, first repeated value at step %0d", b1, N, z1, r1);
    `CHECK(r1 >= 0 && r1 < 65536 + 1, "fixed seed falls into a cycle within 2^16 steps")
    fixed_seed_run(32'h20118433, b2, z2, r2, fz2);
    $display("seed 20118433: black %0d of %0d, zeros %0d, first repeated value at step %0d, final run of zeros %0d",
             b2, N, z2, r2, fz2);
    `CHECK(r2 >= 0 && r2 < 65536 + 1, "second fixed seed falls into a cycle within 2^16 steps")

    bx = 0; bm = 0; zm = 0; started = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    while (!(dut_x.u_rpu.reseed && dut_m.u_rpu.reseed)) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      if (!rand_x[31]) bx++;
      if (!rand_m[31]) bm++;
      if (rand_m == 0) zm++;
    end
    $display("generator, xorshift:      black %0d of %0d (%0d per mille)", bx, N, bx * 1000 / N);
    $display("generator, middle-square: black %0d of %0d (%0d per mille), zeros %0d", bm, N, bm * 1000 / N, zm);
    `CHECK(bx > N * 48 / 100 && bx < N * 52 / 100, "xorshift image about half black")
    `CHECK(bm > N * 60 / 100, "middle-square image clearly darker")
    `CHECK(zm > 0, "middle-square generator hits the zero trap")
    `CHECK(bad_x == 0 && bad_m == 0, "XADC channel")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
