// bpsk_tx -- one BPSK transmitter channel driven by an LS code.
//
// Chain, as in the transmitter block diagram: the LS code generator feeds two
// branches, I and Q; each branch up-samples by 4 and pulse-shapes with the RRC
// filter; the DUC mixes the branches with the NCO's cosine and sine and adds
// them into the 16-bit DAC sample. Both branches carry the same code: the
// diagram splits the generator's single output into them, and a sounding
// signal needs no second data stream. The I and Q filter outputs are brought
// out (tx_i_filtered, tx_q_filtered) for observation, as in the published
// simulation waveforms.
//
// Clocking: one clock at the DAC rate (30.72 MHz); the I-branch up-sampler
// makes the chip strobe for the generator (every 4th cycle, 7.68 Mchip/s).
// Latency from the chip strobe that loads a chip to that chip's first effect on
// data_out_scaled: 1 (up-sampler) + 2 (RRC) + 1 (DUC) = 4 cycles after the
// chip appears on `chip`. Reset is synchronous and active low.
module bpsk_tx
  import ls_tx_pkg::*;
#(
  parameter int unsigned CODE_SEL    = 0,
  parameter int unsigned GOLAY_LOG2  = ls_tx_pkg::LS_GOLAY_LOG2,
  parameter int unsigned ZERO_LEN    = ls_tx_pkg::LS_ZERO_LEN,
  parameter int unsigned L           = ls_tx_pkg::UPSAMPLE,
  parameter int unsigned SCALE_SHIFT = 6,
  localparam int unsigned AW         = $clog2(2 * ((1 << GOLAY_LOG2) + ZERO_LEN))
) (
  input  logic                          clk,
  input  logic                          rstn,
  output logic signed [DAC_W-1:0]       data_out_scaled,
  output chip_t                         chip,
  output logic                          chip_en,
  output logic                          code_start,
  output logic [AW-1:0]                 code_addr,
  output logic signed [RRC_OUT_W-1:0]   tx_i_filtered,
  output logic signed [RRC_OUT_W-1:0]   tx_q_filtered
);

  logic  chip_en_q;
  chip_t up_i, up_q;
  chip_t nco_cos, nco_sin;

  ls_code_gen #(
    .CODE_SEL(CODE_SEL), .GOLAY_LOG2(GOLAY_LOG2), .ZERO_LEN(ZERO_LEN)
  ) u_gen (
    .clk(clk), .rstn(rstn), .chip_en(chip_en),
    .chip(chip), .addr(code_addr), .code_start(code_start)
  );

  upsampler #(.L(L)) u_up_i (
    .clk(clk), .rstn(rstn), .chip_in(chip), .chip_en(chip_en), .samp_out(up_i)
  );

  upsampler #(.L(L)) u_up_q (
    .clk(clk), .rstn(rstn), .chip_in(chip), .chip_en(chip_en_q), .samp_out(up_q)
  );

  rrc_filter u_rrc_i (.clk(clk), .rstn(rstn), .x(up_i), .y(tx_i_filtered));
  rrc_filter u_rrc_q (.clk(clk), .rstn(rstn), .x(up_q), .y(tx_q_filtered));

  nco u_nco (.clk(clk), .rstn(rstn), .cos_out(nco_cos), .sin_out(nco_sin));

  duc #(.SCALE_SHIFT(SCALE_SHIFT)) u_duc (
    .clk(clk), .rstn(rstn),
    .i_in(tx_i_filtered), .q_in(tx_q_filtered),
    .cos_in(nco_cos), .sin_in(nco_sin),
    .data_out_scaled(data_out_scaled)
  );

  // the two up-samplers run in lock step
  a_branches_aligned: assert property (@(posedge clk) disable iff (!rstn) chip_en_q == chip_en);

endmodule
