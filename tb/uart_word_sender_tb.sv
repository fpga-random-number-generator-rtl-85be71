// uart_word_sender_tb: checks the 4-byte word sequencing against a UART model.
//
// rand_in changes to a new random value every cycle. A small model of the
// UART's handshake drops ready in the cycle after a send and keeps it low for
// a random 3..40 cycles. The test records rand_in at every clock edge and,
// when word_start pulses, takes the value of the edge before as the expected
// snapshot. It checks that the next four sends carry bytes 0,1,2,3 of that
// snapshot, that send is a one-cycle pulse given only while ready is high,
// and that no send comes while a byte is in flight.
`include "tb_checks.svh"
module uart_word_sender_tb;
  import rng_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  word_t rand_in = 0, word;
  logic uart_ready, send, word_start;
  logic [7:0] data;

  uart_word_sender dut (.clk, .rst, .rand_in, .uart_ready, .send, .data, .word_start, .word);

  always #5 clk = ~clk;

  // handshake model of the UART transmitter
  int busy_left = 0;
  always @(posedge clk) begin
    if (rst) busy_left <= 0;
    else if (busy_left > 0) busy_left <= busy_left - 1;
    else if (send) busy_left <= 3 + $urandom % 38;
  end
  assign uart_ready = (busy_left == 0);

  word_t cur_edge_value = 0;
  logic  ready_at_edge  = 1;
  always @(posedge clk) begin
    cur_edge_value <= rand_in;
    ready_at_edge  <= uart_ready;
  end

  word_t expect_word = 0;
  int    byte_no = 4, words = 0, bytes = 0;
  logic  prev_send = 0;
  always @(negedge clk) if (!rst) begin
    if (word_start) begin
      `CHECK(byte_no == 4, "new word only after four bytes")
      expect_word = cur_edge_value;   // rand_in at the edge that captured it
      byte_no = 0;
      words++;
    end
    if (send) begin
      `CHECK(!prev_send, "send is a single-cycle pulse")
      `CHECK(byte_no < 4, "no fifth byte")
      `CHECK(data == expect_word[8*byte_no +: 8], $sformatf("byte %0d: %h want %h", byte_no, data, expect_word[8*byte_no +: 8]))
      byte_no++;
      bytes++;
    end
    if (send && !prev_send) `CHECK(ready_at_edge, "send raised only while ready")
    prev_send = send;
    rand_in = $urandom;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (20000) @(negedge clk);
    `CHECK(words > 50, $sformatf("words %0d", words))
    `CHECK(bytes >= 4 * (words - 1), "four bytes per word")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
