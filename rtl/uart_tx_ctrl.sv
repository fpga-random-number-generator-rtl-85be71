// uart_tx_ctrl: transmit-only UART, one byte per SEND pulse.
//
// Interface as in the original design: pulse send for one cycle while ready is
// high, with data valid in that cycle. ready drops in the next cycle and stays
// low until the byte has left. The frame is 8N1: a start bit (0), the eight
// data bits LSB first, and one stop bit (1); each bit lasts CLKS_PER_BIT
// clocks (868 = 100 MHz / 115200 baud). A frame therefore takes
// 10 * CLKS_PER_BIT = 8680 cycles, and ready comes back in the cycle after the
// stop bit ends. The line idles high. The original took this block from the
// board vendor's VHDL examples and gives only its ports and handshake; the
// shift-register structure here is this design's own. A send while ready is
// low is ignored, and an assertion reports it.
module uart_tx_ctrl
  import rng_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = rng_pkg::DEF_CLKS_PER_BIT
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       send,
  input  logic [7:0] data,
  output logic       ready,
  output logic       uart_tx
);

  localparam int TW = (CLKS_PER_BIT > 1) ? $clog2(CLKS_PER_BIT) : 1;

  typedef enum logic {TX_READY, TX_SEND} tx_state_e;

  tx_state_e     state;
  logic [9:0]    frame;     // {stop, data[7:0], start}, shifted out from bit 0
  logic [3:0]    bit_idx;
  logic [TW-1:0] timer;

  assign ready   = (state == TX_READY);
  assign uart_tx = (state == TX_SEND) ? frame[0] : 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= TX_READY;
      frame   <= '1;
      bit_idx <= '0;
      timer   <= '0;
    end else begin
      unique case (state)
        TX_READY: begin
          if (send) begin
            frame   <= {1'b1, data, 1'b0};
            bit_idx <= '0;
            timer   <= '0;
            state   <= TX_SEND;
          end
        end
        TX_SEND: begin
          if (timer == TW'(CLKS_PER_BIT - 1)) begin
            timer <= '0;
            if (bit_idx == 4'd9) begin
              state <= TX_READY;
            end else begin
              bit_idx <= bit_idx + 4'd1;
              frame   <= {1'b1, frame[9:1]};
            end
          end else begin
            timer <= timer + TW'(1);
          end
        end
      endcase
    end
  end

  // SEND should not be asserted unless READY is high.
  a_send_when_ready: assert property (@(posedge clk) disable iff (rst) send |-> ready)
    else $error("uart_tx_ctrl: send asserted while not ready");

endmodule
