// xadc_random: FPGA random number generator, top level.
//
// An analog input left floating picks up electrical noise. The FPGA's XADC
// digitises it (the XADC itself is vendor IP and sits outside this module; its
// DRP read port is wired to the xadc_* ports). xadc_sampler captures each
// conversion. The random processing unit (rpu) seeds itself from the first
// sample squared, then feeds its output back as the next seed every clock
// (xorshift by default), and takes a fresh seed from the ADC every
// RESEED_PERIOD cycles. The 32-bit number of each cycle is on rand_out. Two
// consumers sample it: display_refresh + digit_to_seg show one number in hex
// on the eight 7-segment digits ten times a second, and uart_word_sender +
// uart_tx_ctrl send numbers, four bytes each, LSB byte first, over the
// 115200-baud serial line to a host. The UART can carry one word in about
// 34,700 cycles, so the host sees roughly one number in 35,000.
// This structure follows the original design. The reset input, the sample
// register, the display driver's insides and the UART's insides are this
// design's own. The board wrapper ties the XADC's DRP write enable, write data
// and reset to 0, as the original instantiation did. The internal strobes
// (reseed, refresh, word_start, sample_stb) and the seed and word registers
// drive nothing here; they are kept as named observation points for
// simulation, which is why lint reports them as unused.
module xadc_random
  import rng_pkg::*;
#(
  parameter algo_e       ALGO                   = ALGO_XORSHIFT,
  parameter int unsigned RESEED_PERIOD          = rng_pkg::DEF_RESEED_PERIOD,
  parameter int unsigned DISPLAY_REFRESH_CYCLES = rng_pkg::DEF_DISPLAY_REFRESH_CYCLES,
  parameter int unsigned CLKS_PER_BIT           = rng_pkg::DEF_CLKS_PER_BIT,
  parameter int unsigned SCAN_CYCLES            = rng_pkg::DEF_SCAN_CYCLES
) (
  input  logic        clk,
  input  logic        rst,
  // XADC dynamic reconfiguration port
  input  logic        xadc_eoc,
  input  logic        xadc_drdy,
  input  logic [15:0] xadc_do,
  output logic [6:0]  xadc_daddr,
  output logic        xadc_den,
  // board outputs
  output logic [7:0]  an,
  output logic [6:0]  seg,
  output logic        uart_txd,
  // random number of this cycle, for use by other logic
  output word_t       rand_out
);

  logic [15:0]     sample;
  logic            sample_valid;
  logic            sample_stb;
  word_t           seed;
  logic            reseed;
  logic [7:0][3:0] digits;
  logic            refresh;
  logic            uart_send;
  logic            uart_ready;
  logic [7:0]      uart_byte;
  logic            word_start;
  word_t           word;

  xadc_sampler u_sample (
    .clk, .rst,
    .eoc(xadc_eoc), .drdy(xadc_drdy), .do_in(xadc_do),
    .daddr(xadc_daddr), .den(xadc_den),
    .sample, .sample_valid, .sample_stb
  );

  rpu #(.ALGO(ALGO), .RESEED_PERIOD(RESEED_PERIOD)) u_rpu (
    .clk, .rst, .sample, .sample_valid,
    .rand_out, .seed, .reseed
  );

  display_refresh #(.REFRESH_CYCLES(DISPLAY_REFRESH_CYCLES)) u_refresh (
    .clk, .rst, .rand_in(rand_out), .digits, .refresh
  );

  digit_to_seg #(.SCAN_CYCLES(SCAN_CYCLES)) u_segment (
    .mclk(clk), .rst, .digits, .an, .seg
  );

  uart_word_sender u_words (
    .clk, .rst, .rand_in(rand_out), .uart_ready,
    .send(uart_send), .data(uart_byte), .word_start, .word
  );

  uart_tx_ctrl #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst, .send(uart_send), .data(uart_byte),
    .ready(uart_ready), .uart_tx(uart_txd)
  );

endmodule
