// rrc_filter -- root-raised-cosine pulse-shaping FIR filter, 11 taps.
//
// Structure follows the published filter netlist: the input runs down a chain
// of NTAPS registers, the output of register k is multiplied by the constant
// COEF[k], an adder tree sums the products and a convert stage (here a
// register of OUT_W bits) presents the result. The printed coefficients,
// 0.03808 0.06738 0.09766 0.124 0.1426 0.1484 0.1426 0.124 0.09766 0.06738
// 0.03808, are exactly 39 69 100 127 146 152 146 127 100 69 39 times 2^-10,
// so the filter works on integers and the output is in units of 2^-10 of the
// input. The filter runs at the up-sampled rate (30.72 MHz); roll-off 0.2 to
// 0.25 and the chip period of 4 samples are properties of these numbers, not
// of the logic.
//
// Timing: y after clock edge n = sum_k COEF[k] * (x sampled at edge n-1-k): an input
// sample first shows in y one edge after it is sampled (one register of
// the chain, one output register). Synchronous active-low reset clears every
// register. The output width needs no saturation: sum |COEF| * max|x| = 1115
// fits in 12 signed bits for 2-bit chips.
module rrc_filter
  import ls_tx_pkg::*;
#(
  parameter int unsigned NTAPS = ls_tx_pkg::RRC_TAPS,
  parameter int unsigned IN_W  = 2,
  parameter int unsigned OUT_W = ls_tx_pkg::RRC_OUT_W,
  parameter coef_t       COEF [NTAPS] = ls_tx_pkg::RRC_COEF
) (
  input  logic                    clk,
  input  logic                    rstn,
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y
);

  logic signed [IN_W-1:0]  taps [NTAPS];
  logic signed [OUT_W-1:0] acc;

  always_ff @(posedge clk) begin
    if (!rstn) begin
      for (int k = 0; k < int'(NTAPS); k++) taps[k] <= '0;
    end else begin
      taps[0] <= x;
      for (int k = 1; k < int'(NTAPS); k++) taps[k] <= taps[k-1];
    end
  end

  // constant multipliers and adder tree
  always_comb begin
    acc = '0;
    for (int k = 0; k < int'(NTAPS); k++)
      acc = acc + OUT_W'(COEF[k] * taps[k]);
  end

  always_ff @(posedge clk) begin
    if (!rstn) y <= '0;
    else       y <= acc;
  end

endmodule
