// rng_top_checker: scoreboard for end-to-end tests of the xadc_random top.
//
// It watches the top's pins plus four internal event strobes and checks:
//  - rand_out every cycle against its own model of the seed register, which
//    captures the XADC answers itself (first seed = sample squared, step
//    function every clock, seed = sample << 8 every RESEED_PERIOD cycles);
//  - the UART line, decoded by a receiver model at CLKS_PER_BIT clocks per
//    bit, against the number the word sender captured (four bytes, LSB byte
//    first, 8N1 framing);
//  - the 7-segment pins, decoded back to hex, against the number taken at the
//    last display refresh.
// It counts how often each mechanism happened: seed loads from the ADC,
// feedback steps, display refreshes, complete words on the line, cycles the
// word sender had to wait for a busy UART, and middle-square zero traps.
module rng_top_checker
  import rng_pkg::*;
#(
  parameter algo_e       ALGO          = ALGO_XORSHIFT,
  parameter int unsigned RESEED_PERIOD = 1000,
  parameter int unsigned CLKS_PER_BIT  = 868
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            xadc_drdy,
  input  logic [15:0]     xadc_do,
  input  word_t           rand_out,
  input  logic [7:0]      an,
  input  logic [6:0]      seg,
  input  logic            uart_txd,
  input  logic            ev_reseed,
  input  logic            ev_refresh,
  input  logic            ev_word_start,
  input  logic            uart_ready,
  output int              checks,
  output int              failures,
  output int              n_loads,
  output int              n_steps,
  output int              n_refresh,
  output int              n_words,
  output int              n_uart_wait,
  output int              n_zero,
  output int              n_digits_seen
);

  initial begin
    checks = 0; failures = 0; n_loads = 0; n_steps = 0; n_refresh = 0;
    n_words = 0; n_uart_wait = 0; n_zero = 0; n_digits_seen = 0;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s (t=%0t)", msg, $time);
    end
  endtask

  function automatic word_t step(input word_t s);
    word_t t;
    if (ALGO == ALGO_XORSHIFT) begin
      t = s ^ {7'b0, s[31:7]};
      t = t ^ {t[22:0], 9'b0};
      return t ^ {13'b0, t[31:13]};
    end
    return {16'b0, s[23:8]} * {16'b0, s[23:8]};
  endfunction

  // ---- seed model ----
  logic [15:0] m_sample = 0;
  logic        m_valid = 0;
  word_t       m_seed = 0;
  int          since = 0;
  logic        m_reseed = 0;
  always @(posedge clk) begin
    if (rst) begin
      m_sample <= 0; m_valid <= 0; m_seed <= 0; since <= 0; m_reseed <= 0;
    end else begin
      if (xadc_drdy) begin m_sample <= xadc_do; m_valid <= 1; end
      m_reseed <= 0;
      if (since == 0) begin
        if (m_valid) begin m_seed <= 32'(m_sample) * 32'(m_sample); since <= 1; m_reseed <= 1; end
      end else if (since == RESEED_PERIOD) begin
        m_seed <= {8'b0, m_sample, 8'b0}; since <= 1; m_reseed <= 1;
      end else begin
        m_seed <= step(m_seed); since <= since + 1;
      end
    end
  end

  // ---- values at clock edges ----
  word_t rand_at_edge = 0;
  always @(posedge clk) rand_at_edge <= rand_out;

  word_t expect_words [$];
  word_t shown = 0;
  int    since_refresh = 0;

  // ---- segment decoding, from letters of lit segments ----
  string lit [16] = '{"abcdef", "bc", "abdeg", "abcdg", "bcfg", "acdfg", "acdefg", "abc",
                      "abcdefg", "abcdfg", "abcefg", "cdefg", "adef", "bcdeg", "adefg", "aefg"};
  function automatic int seg_to_hex(input logic [6:0] s);
    for (int d = 0; d < 16; d++) begin
      logic [6:0] e = '1;
      for (int i = 0; i < lit[d].len(); i++) e[lit[d][i] - "a"] = 1'b0;
      if (e == s) return d;
    end
    return -1;
  endfunction

  always @(negedge clk) if (!rst) begin
    check(ev_reseed == m_reseed, "seed load pulse");
    if (ev_reseed) n_loads++;
    if (since != 0) begin
      check(rand_out == step(m_seed), $sformatf("rand_out %h want %h", rand_out, step(m_seed)));
      if (!m_reseed) n_steps++;
      if (ALGO == ALGO_MIDDLE_SQUARE && rand_out == 0) n_zero++;
    end
    if (ev_word_start) expect_words.push_back(rand_at_edge);
    if (!uart_ready && !ev_word_start) n_uart_wait++;
    if (ev_refresh) begin
      shown = rand_at_edge;
      n_refresh++;
      since_refresh = 0;
    end else begin
      since_refresh++;
    end
    if (an != 8'hFF && since_refresh > 1 && n_refresh > 0) begin
      int p;
      p = -1;
      for (int i = 0; i < 8; i++) if (!an[i]) p = i;
      check($countones(~an) == 1, "one digit lit");
      check(seg_to_hex(seg) == int'(shown[4*p +: 4]), $sformatf("display digit %0d shows %0d want %h", p, seg_to_hex(seg), shown[4*p +: 4]));
      n_digits_seen++;
    end
  end

  // ---- UART receiver model ----
  initial begin
    logic [7:0] b;
    logic [31:0] w;
    forever begin
      for (int k = 0; k < 4; k++) begin
        @(negedge uart_txd);
        #1;
        repeat (CLKS_PER_BIT / 2) @(posedge clk);
        check(uart_txd == 1'b0, "start bit");
        for (int i = 0; i < 8; i++) begin
          repeat (CLKS_PER_BIT) @(posedge clk);
          b[i] = uart_txd;
        end
        repeat (CLKS_PER_BIT) @(posedge clk);
        check(uart_txd == 1'b1, "stop bit");
        w[8*k +: 8] = b;
      end
      check(expect_words.size() > 0, "a word was captured before it was sent");
      if (expect_words.size() > 0) begin
        word_t e;
        e = expect_words.pop_front();
        check(w == e, $sformatf("UART word %h want %h", w, e));
      end
      n_words++;
    end
  end

endmodule
