// middle_square_tb: checks the combinational middle-square step.
//
// First the four steps printed in the original simulation waveform, starting
// from seed 0x12345678, then 2000 random seeds against a reference that
// squares the middle bits by repeated addition, and the zero trap: a seed
// whose bits 23:8 are zero must give zero. A watchdog ends the run.
`include "tb_checks.svh"
module middle_square_tb;
  int checks = 0, failures = 0;
  logic [31:0] seed, rand_out;

  middle_square dut (.seed, .rand_out);

  function automatic logic [31:0] ref_step(input logic [31:0] s);
    longint unsigned m, acc;
    m = longint'(s) / 256 % 65536;
    acc = 0;
    for (longint unsigned b = 0; b < 16; b++)
      if ((m >> b) & 1) acc += m << b;
    return acc[31:0];
  endfunction

  logic [31:0] wave [5] = '{32'h12345678, 32'h0ab30ce4, 32'h7d39c890, 32'h0d0aac40, 32'h0071e390};

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      seed = wave[i];
      #1;
      `CHECK(rand_out == wave[i+1], $sformatf("waveform step %0d: got %h want %h", i, rand_out, wave[i+1]))
    end
    seed = 32'hAB0000CD;
    #1;
    `CHECK(rand_out == 32'h0, "middle bits zero give zero")
    seed = 32'h00FFFF00;
    #1;
    `CHECK(rand_out == 32'hFFFE0001, "largest middle value")
    for (int i = 0; i < 2000; i++) begin
      seed = $urandom;
      #1;
      `CHECK(rand_out == ref_step(seed), $sformatf("seed %h: got %h want %h", seed, rand_out, ref_step(seed)))
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
