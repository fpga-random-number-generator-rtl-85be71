// xadc_sampler: reads conversions from the FPGA's XADC over its DRP port.
//
// The XADC converts continuously and pulses eoc at the end of each conversion.
// As in the original wiring, eoc drives the DRP enable (den) directly, with
// the fixed address 0x13 (auxiliary channel VAUX3), so each conversion
// triggers a read. When the XADC answers with drdy, do_in is captured into
// sample, sample_stb pulses for one cycle and sample_valid stays high from
// then on. The capture register and the valid flag are this design's own:
// the original used do_out directly. Latency: sample changes one cycle after
// drdy. All 16 bits of do_out are kept; the converter's 12 significant bits
// are bits 15:4.
module xadc_sampler
  import rng_pkg::*;
#(
  parameter logic [6:0] CHANNEL_ADDR = XADC_CHANNEL_ADDR
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        eoc,
  input  logic        drdy,
  input  logic [15:0] do_in,
  output logic [6:0]  daddr,
  output logic        den,
  output logic [15:0] sample,
  output logic        sample_valid,
  output logic        sample_stb
);

  assign daddr = CHANNEL_ADDR;
  assign den   = eoc;

  always_ff @(posedge clk) begin
    if (rst) begin
      sample       <= '0;
      sample_valid <= 1'b0;
      sample_stb   <= 1'b0;
    end else begin
      sample_stb <= drdy;
      if (drdy) begin
        sample       <= do_in;
        sample_valid <= 1'b1;
      end
    end
  end

endmodule
