// uart_word_sender: sends 32-bit random numbers over the byte-wide UART.
//
// The generator makes a number every cycle but the UART takes thousands of
// cycles per byte, so this block samples: it captures the current number
// (word_start pulses), sends it as four bytes, rand[7:0] first and
// rand[31:24] last, and then captures the next one. Numbers made in between
// are not sent. For each byte it waits for the UART's ready, drives data and
// a one-cycle send pulse, waits for ready to drop (the UART took the byte)
// and then to rise again (the byte has left). With an 8680-cycle frame a word
// takes about 4 * 8683 cycles. The byte order and the one-snapshot-per-word
// rule follow the original design's description; the original listing
// re-read the number every cycle and mis-counted the byte index at the wrap,
// which this block does not repeat.
module uart_word_sender
  import rng_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  word_t      rand_in,
  input  logic       uart_ready,
  output logic       send,
  output logic [7:0] data,
  output logic       word_start,
  output word_t      word
);

  typedef enum logic [1:0] {
    WS_CAPTURE,    // take a snapshot of rand_in
    WS_SEND,       // wait for ready, pulse send with the next byte
    WS_WAIT_BUSY,  // wait for the UART to drop ready
    WS_WAIT_DONE   // wait for the UART to raise ready again
  } ws_state_e;

  ws_state_e  state;
  logic [1:0] byte_idx;

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= WS_CAPTURE;
      byte_idx   <= '0;
      word       <= '0;
      send       <= 1'b0;
      data       <= '0;
      word_start <= 1'b0;
    end else begin
      send       <= 1'b0;
      word_start <= 1'b0;
      unique case (state)
        WS_CAPTURE: begin
          word       <= rand_in;
          byte_idx   <= '0;
          word_start <= 1'b1;
          state      <= WS_SEND;
        end
        WS_SEND: begin
          if (uart_ready) begin
            data  <= word[8*byte_idx +: 8];
            send  <= 1'b1;
            state <= WS_WAIT_BUSY;
          end
        end
        WS_WAIT_BUSY: begin
          if (!uart_ready && !send) state <= WS_WAIT_DONE;
        end
        WS_WAIT_DONE: begin
          if (uart_ready) begin
            if (byte_idx == 2'd3) begin
              state <= WS_CAPTURE;
            end else begin
              byte_idx <= byte_idx + 2'd1;
              state    <= WS_SEND;
            end
          end
        end
      endcase
    end
  end

endmodule
