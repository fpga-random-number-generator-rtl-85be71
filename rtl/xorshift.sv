// xorshift: one step of a 32-bit Marsaglia XORshift generator.
//
// Purely combinational. The seed is XORed with a shifted copy of itself three
// times: right by 7, left by 9, right by 13. The result is both the random
// number of this cycle and, fed back through a register outside this module,
// the next seed. These three shifts are the published design's; the port is
// called rand_out rather than rand. Zero maps to zero, so the seed must not
// be zero. From seed 0x12345678 the sequence is 0x326c05b8, 0x23b2a62e,
// 0xc87544fa, 0x02b95db9.
module xorshift #(
  parameter int unsigned SHIFT_A = 7,
  parameter int unsigned SHIFT_B = 9,
  parameter int unsigned SHIFT_C = 13
) (
  input  logic [31:0] seed,
  output logic [31:0] rand_out
);

  logic [31:0] t1, t2;

  always_comb begin
    t1       = seed ^ (seed >> SHIFT_A);
    t2       = t1 ^ (t1 << SHIFT_B);
    rand_out = t2 ^ (t2 >> SHIFT_C);
  end

endmodule
