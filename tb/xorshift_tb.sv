// xorshift_tb: checks the combinational XORshift step.
//
// First the four steps printed in the original simulation waveform, starting
// from seed 0x12345678, then 2000 random seeds against a bit-by-bit reference
// model written without shift operators (each output bit is the XOR of the
// input bits the three shifts bring to it). A watchdog ends the run.
`include "tb_checks.svh"
module xorshift_tb;
  int checks = 0, failures = 0;
  logic [31:0] seed, rand_out;

  xorshift dut (.seed, .rand_out);

  function automatic logic [31:0] ref_step(input logic [31:0] s);
    logic [31:0] a, b, c;
    for (int i = 0; i < 32; i++) a[i] = s[i] ^ ((i + 7 < 32) ? s[i + 7] : 1'b0);
    for (int i = 0; i < 32; i++) b[i] = a[i] ^ ((i >= 9) ? a[i - 9] : 1'b0);
    for (int i = 0; i < 32; i++) c[i] = b[i] ^ ((i + 13 < 32) ? b[i + 13] : 1'b0);
    return c;
  endfunction

  logic [31:0] wave [5] = '{32'h12345678, 32'h326c05b8, 32'h23b2a62e, 32'hc87544fa, 32'h02b95db9};

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
    seed = 32'h0;
    #1;
    `CHECK(rand_out == 32'h0, "zero seed stays zero")
    for (int i = 0; i < 2000; i++) begin
      seed = $urandom;
      #1;
      `CHECK(rand_out == ref_step(seed), $sformatf("seed %h: got %h want %h", seed, rand_out, ref_step(seed)))
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
