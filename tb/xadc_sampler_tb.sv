// xadc_sampler_tb: checks the XADC read path with the behavioural XADC model.
//
// The model converts every 40 cycles. The test checks that the DRP address is
// always 0x13, that den follows eoc in the same cycle, that sample_valid is low
// until the first answer, and that every drdy answer is in sample one cycle
// later with a one-cycle sample_stb.
`include "tb_checks.svh"
module xadc_sampler_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic eoc, drdy, den, sample_valid, sample_stb;
  logic [15:0] do_out, sample;
  logic [6:0] daddr;
  int unsigned conversions, bad_reads;
  int captured = 0;

  xadc_model #(.CONV_CYCLES(40), .DRP_LATENCY(4)) adc (.dclk(clk), .daddr, .den,
    .eoc, .drdy, .do_out, .conversions, .bad_reads);
  xadc_sampler dut (.clk, .rst, .eoc, .drdy, .do_in(do_out), .daddr, .den,
    .sample, .sample_valid, .sample_stb);

  always #5 clk = ~clk;

  logic        was_drdy = 0;
  logic [15:0] last_do  = 0;
  logic        seen     = 0;
  always @(negedge clk) if (!rst) begin
    `CHECK(daddr == 7'h13, "channel address 0x13")
    `CHECK(den == eoc, "den follows eoc")
    `CHECK(sample_stb == was_drdy, "strobe one cycle after drdy")
    if (was_drdy) seen = 1;
    `CHECK(sample_valid == seen, "valid after the first answer")
    if (was_drdy) begin
      `CHECK(sample == last_do, $sformatf("sample %h want %h", sample, last_do))
      captured++;
    end
    if (seen) `CHECK(sample == last_do, "sample held between answers")
    if (drdy) last_do = do_out;
    was_drdy = drdy;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (2000) @(negedge clk);
    `CHECK(captured >= 48, $sformatf("one capture per conversion, saw %0d", captured))
    `CHECK(bad_reads == 0, "no read of another channel")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
