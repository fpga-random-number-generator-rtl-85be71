// middle_square: one step of von Neumann's middle-square generator, in binary.
//
// Purely combinational. The middle 16 bits of the 32-bit seed (bits 23:8) are
// squared; the 32-bit square is the random number and, fed back through a
// register outside this module, the next seed. This is the published design's
// form. Once bits 23:8 become zero the sequence stays at zero until the seed
// is reloaded from outside. From seed 0x12345678 the sequence is 0x0ab30ce4,
// 0x7d39c890, 0x0d0aac40, 0x0071e390.
module middle_square (
  input  logic [31:0] seed,
  output logic [31:0] rand_out
);

  logic [15:0] middle;

  always_comb begin
    middle   = seed[23:8];
    rand_out = 32'(middle) * 32'(middle);
  end

endmodule
