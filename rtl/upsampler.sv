// upsampler -- up-sampling by L (4) by zero insertion, and the chip-rate strobe.
//
// The transmitter runs on one clock at the DAC sample rate (30.72 MHz); chips
// arrive at 1/L of it (7.68 Mchip/s). A modulo-L phase counter makes chip_en,
// high on the last cycle of each L-cycle frame; the code generator loads its
// next chip on that edge. In the first cycle of the next frame the new chip is
// passed to samp_out, and in the other L-1 cycles samp_out is zero, which is
// the standard "insert L-1 zeros" up-sampler drawn as an up-arrow 4 in the
// block diagram. Zero stuffing (not sample repetition) is this design's reading
// of that symbol.
//
// Timing: samp_out is registered. With chip_in loaded on the chip_en edge,
// samp_out carries that chip one cycle later, for one cycle. Synchronous,
// active-low reset clears the counter and samp_out.
module upsampler
  import ls_tx_pkg::*;
#(
  parameter int unsigned L = ls_tx_pkg::UPSAMPLE
) (
  input  logic  clk,
  input  logic  rstn,
  input  chip_t chip_in,
  output logic  chip_en,
  output chip_t samp_out
);

  localparam int unsigned CW = (L > 1) ? $clog2(L) : 1;

  logic [CW-1:0] phase;

  assign chip_en = (phase == CW'(L - 1));

  always_ff @(posedge clk) begin
    if (!rstn)        phase <= '0;
    else if (chip_en) phase <= '0;
    else              phase <= phase + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rstn)              samp_out <= CHIP_ZERO;
    else if (phase == '0)   samp_out <= chip_in;
    else                    samp_out <= CHIP_ZERO;
  end

endmodule
