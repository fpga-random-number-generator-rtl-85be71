// xadc_model: behavioural stand-in for the FPGA's XADC, for simulation only.
//
// Not synthesizable hardware: it models just the DRP read behaviour the
// generator relies on. Every CONV_CYCLES clocks it finishes a "conversion" of
// a noisy input and pulses eoc for one cycle. A DRP read (den high) is
// answered DRP_LATENCY cycles later with a one-cycle drdy and the latest
// result on do_out. Results are 12-bit values left-aligned in the 16-bit word
// (bits 3:0 zero), as the XADC reports them; the noise is $urandom around a
// mid-scale level. daddr is checked against the expected channel.
module xadc_model #(
  parameter int unsigned CONV_CYCLES = 100,
  parameter int unsigned DRP_LATENCY = 4
) (
  input  logic        dclk,
  input  logic [6:0]  daddr,
  input  logic        den,
  output logic        eoc,
  output logic        drdy,
  output logic [15:0] do_out,
  output int unsigned conversions,
  output int unsigned bad_reads
);

  int unsigned conv_timer   = 0;
  int unsigned read_timer   = 0;
  logic        read_pending = 1'b0;
  logic [15:0] result       = 16'h8000;

  initial begin
    eoc         = 1'b0;
    drdy        = 1'b0;
    do_out      = 16'h0;
    conversions = 0;
    bad_reads   = 0;
  end

  always @(posedge dclk) begin
    eoc  <= 1'b0;
    drdy <= 1'b0;
    if (conv_timer == CONV_CYCLES - 1) begin
      conv_timer  <= 0;
      result      <= {12'(12'h800 + 12'($urandom % 97) - 12'd48), 4'h0};
      eoc         <= 1'b1;
      conversions <= conversions + 1;
    end else begin
      conv_timer <= conv_timer + 1;
    end
    if (den) begin
      if (daddr != 7'h13) bad_reads <= bad_reads + 1;
      read_pending <= 1'b1;
      read_timer   <= 0;
    end else if (read_pending) begin
      if (read_timer == DRP_LATENCY - 1) begin
        read_pending <= 1'b0;
        drdy         <= 1'b1;
        do_out       <= result;
      end else begin
        read_timer <= read_timer + 1;
      end
    end
  end

endmodule
