// rpu: random processing unit. Holds the seed and feeds the random number back.
//
// Every clock the chosen algorithm (xorshift by default, middle-square by
// parameter) turns the seed register into rand_out, and rand_out is loaded
// back as the next seed, so a new 32-bit number appears each cycle.
// The ADC sample comes in twice. After reset the unit waits for the first
// conversion (sample_valid) and loads sample*sample as the first seed. From
// then on, every RESEED_PERIOD cycles the seed is replaced by sample << 8,
// which puts the 16-bit sample into bits 23:8. seed_count runs 1..RESEED_PERIOD
// exactly as in the original listing, so the reseed comes once every 1000
// cycles. reseed pulses in the cycle the ADC value is loaded.
// rand_out is combinational from the seed register: it changes one cycle
// after a reseed. The reset, and waiting for sample_valid, are this design's
// own; the squared first seed follows the intent stated in the original code
// (its listing overwrote that value in the same cycle).
module rpu
  import rng_pkg::*;
#(
  parameter algo_e       ALGO          = ALGO_XORSHIFT,
  parameter int unsigned RESEED_PERIOD = rng_pkg::DEF_RESEED_PERIOD
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] sample,
  input  logic        sample_valid,
  output word_t       rand_out,
  output word_t       seed,
  output logic        reseed
);

  localparam int CW = $clog2(RESEED_PERIOD + 1);

  logic [CW-1:0] seed_count;
  word_t         next_rand;

  generate
    if (ALGO == ALGO_XORSHIFT) begin : g_xs
      xorshift xs (.seed(seed), .rand_out(next_rand));
    end else begin : g_ms
      middle_square ms (.seed(seed), .rand_out(next_rand));
    end
  endgenerate

  assign rand_out = next_rand;

  always_ff @(posedge clk) begin
    if (rst) begin
      seed_count <= '0;
      seed       <= '0;
      reseed     <= 1'b0;
    end else begin
      reseed <= 1'b0;
      if (seed_count == '0) begin
        // first seed: the squared ADC sample
        if (sample_valid) begin
          seed       <= 32'(sample) * 32'(sample);
          seed_count <= CW'(1);
          reseed     <= 1'b1;
        end
      end else if (seed_count == CW'(RESEED_PERIOD)) begin
        seed       <= 32'(sample) << 8;
        seed_count <= CW'(1);
        reseed     <= 1'b1;
      end else begin
        seed       <= next_rand;
        seed_count <= seed_count + CW'(1);
      end
    end
  end

endmodule
