// nco -- quadrature carrier for the digital up-converter, quarter-cycle phase.
//
// The transmitter places its carrier at 7.68 MHz, one quarter of the
// 30.72 MHz sample rate: the DAC's image at 2*30.72 + 7.68 = 69.12 MHz is the
// one the 70 MHz SAW filter of the RF board keeps. At fs/4 an oscillator only
// ever visits the phases 0, 90, 180 and 270 degrees, so this NCO is a 2-bit
// phase accumulator, stepped by FCW each clock, whose phase selects
// cos = +1, 0, -1, 0 and sin = 0, +1, 0, -1 exactly. FCW = 1 (default) gives
// +fs/4, 3 gives -fs/4, 2 gives fs/2 and 0 gives DC. The frequency is the
// design's derivation from the spectrum plan; the original only names the
// block.
//
// Timing: cos_out and sin_out are combinational from the phase register,
// which advances every clock and starts at 0 after a synchronous active-low
// reset.
module nco
  import ls_tx_pkg::*;
#(
  parameter logic [1:0] FCW = 2'd1
) (
  input  logic       clk,
  input  logic       rstn,
  output chip_t      cos_out,
  output chip_t      sin_out
);

  logic [1:0] phase;

  always_ff @(posedge clk) begin
    if (!rstn) phase <= 2'd0;
    else       phase <= phase + FCW;
  end

  always_comb begin
    unique case (phase)
      2'd0: begin cos_out = CHIP_POS;  sin_out = CHIP_ZERO; end
      2'd1: begin cos_out = CHIP_ZERO; sin_out = CHIP_POS;  end
      2'd2: begin cos_out = CHIP_NEG;  sin_out = CHIP_ZERO; end
      default: begin cos_out = CHIP_ZERO; sin_out = CHIP_NEG; end
    endcase
  end

endmodule
