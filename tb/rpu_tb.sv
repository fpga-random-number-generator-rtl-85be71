// rpu_tb: checks the random processing unit against a cycle model.
//
// Two units run side by side, one with xorshift and one with middle-square,
// at the default reseed period of 1000 cycles. The test holds sample_valid low
// for a while (the seed must wait), then feeds a new random ADC sample every
// few cycles. A reference model, with its own copies of both step functions,
// predicts the seed register every cycle: sample squared at the first load,
// then the step function, and sample << 8 every 1000th cycle after the load.
// The test also checks the reseed pulse and the one-number-per-cycle rate.
`include "tb_checks.svh"
module rpu_tb;
  import rng_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic [15:0] sample = 16'h0;
  logic sample_valid = 0;
  word_t xs_rand, xs_seed, ms_rand, ms_seed;
  logic  xs_reseed, ms_reseed;

  rpu #(.ALGO(ALGO_XORSHIFT)) dut_xs (.clk, .rst, .sample, .sample_valid,
    .rand_out(xs_rand), .seed(xs_seed), .reseed(xs_reseed));
  rpu #(.ALGO(ALGO_MIDDLE_SQUARE)) dut_ms (.clk, .rst, .sample, .sample_valid,
    .rand_out(ms_rand), .seed(ms_seed), .reseed(ms_reseed));

  always #5 clk = ~clk;

  function automatic word_t ref_xs(input word_t s);
    word_t t;
    t = s ^ {7'b0, s[31:7]};
    t = t ^ {t[22:0], 9'b0};
    return t ^ {13'b0, t[31:13]};
  endfunction
  function automatic word_t ref_ms(input word_t s);
    return {16'b0, s[23:8]} * {16'b0, s[23:8]};
  endfunction

  word_t m_xs = 0, m_ms = 0;
  logic  m_loaded = 0, m_reseed = 0;
  int    since_load = 0;
  int    reseeds = 0, distinct = 0;

  always @(posedge clk) begin
    if (rst) begin
      m_xs <= 0; m_ms <= 0; m_loaded <= 0; since_load <= 0; m_reseed <= 0;
    end else begin
      m_reseed <= 0;
      if (!m_loaded) begin
        if (sample_valid) begin
          m_xs <= 32'(sample) * 32'(sample);
          m_ms <= 32'(sample) * 32'(sample);
          m_loaded <= 1; since_load <= 1; m_reseed <= 1;
        end
      end else if (since_load == 1000) begin
        m_xs <= {8'b0, sample, 8'b0};
        m_ms <= {8'b0, sample, 8'b0};
        since_load <= 1; m_reseed <= 1;
      end else begin
        m_xs <= ref_xs(m_xs);
        m_ms <= ref_ms(m_ms);
        since_load <= since_load + 1;
      end
    end
  end

  word_t prev_xs = 0;
  always @(negedge clk) if (!rst) begin
    `CHECK(xs_seed == m_xs, $sformatf("xorshift seed %h want %h", xs_seed, m_xs))
    `CHECK(ms_seed == m_ms, $sformatf("middle-square seed %h want %h", ms_seed, m_ms))
    `CHECK(xs_rand == ref_xs(m_xs), "xorshift rand_out")
    `CHECK(ms_rand == ref_ms(m_ms), "middle-square rand_out")
    `CHECK(xs_reseed == m_reseed && ms_reseed == m_reseed, "reseed pulse")
    if (xs_reseed) reseeds++;
    if (m_loaded && xs_rand != prev_xs) distinct++;
    prev_xs = xs_rand;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (20) @(negedge clk);
    `CHECK(xs_seed == 0, "seed waits for the first sample")
    sample = 16'h8A70; sample_valid = 1;
    for (int c = 0; c < 5300; c++) begin
      @(negedge clk);
      if (c % 7 == 0) sample = 16'($urandom);
    end
    `CHECK(reseeds == 6, $sformatf("first load + 5 reseeds in 5300 cycles, saw %0d", reseeds))
    `CHECK(distinct > 5200, $sformatf("a new number nearly every cycle, saw %0d", distinct))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
