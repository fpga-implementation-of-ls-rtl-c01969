// ls_tx_top -- two-antenna LS-code transmitter for a CDM MIMO channel sounder.
//
// Two BPSK channels (TX1 and TX2) send, at the same time, the two LS codes of
// one node of the LS code tree: code 0 (C, S) on TX1 and its complementary
// mate on TX2. Both start from the same reset, so the codes stay aligned chip
// for chip, which is what gives them zero auto- and cross-correlation inside
// the interference-free window (IFW) of about 4000 chips around zero delay.
//
// Interface: clk is the 30.72 MHz DAC sample clock, resetn a synchronous
// active-low reset. tx1_data_out_scaled and tx2_data_out_scaled are the 16-bit
// two's-complement samples for DAC A and DAC B; dac_word packs them into the
// 32-bit word of the board's DAC channel, DAC A in bits 15:0 and DAC B in bits
// 31:16 (the half assignment is this design's choice). chip_en, the chips and
// code_start show the chip timing and the start of each 8190-chip code period.
// Timing: a new chip every 4 clocks, a new code period every 32760 clocks.
module ls_tx_top
  import ls_tx_pkg::*;
(
  input  logic                    clk,
  input  logic                    resetn,
  output logic signed [DAC_W-1:0] tx1_data_out_scaled,
  output logic signed [DAC_W-1:0] tx2_data_out_scaled,
  output logic [2*DAC_W-1:0]      dac_word,
  output logic                    chip_en,
  output chip_t                   tx1_chip,
  output chip_t                   tx2_chip,
  output logic                    code_start
);

  localparam int unsigned AW = $clog2(LS_CODE_LEN);

  logic          chip_en2, code_start2;
  logic [AW-1:0] addr1, addr2;
  logic signed [RRC_OUT_W-1:0] i1, q1, i2, q2;

  bpsk_tx #(.CODE_SEL(0)) u_tx1 (
    .clk(clk), .rstn(resetn),
    .data_out_scaled(tx1_data_out_scaled), .chip(tx1_chip), .chip_en(chip_en),
    .code_start(code_start), .code_addr(addr1),
    .tx_i_filtered(i1), .tx_q_filtered(q1)
  );

  bpsk_tx #(.CODE_SEL(1)) u_tx2 (
    .clk(clk), .rstn(resetn),
    .data_out_scaled(tx2_data_out_scaled), .chip(tx2_chip), .chip_en(chip_en2),
    .code_start(code_start2), .code_addr(addr2),
    .tx_i_filtered(i2), .tx_q_filtered(q2)
  );

  assign dac_word = {tx2_data_out_scaled, tx1_data_out_scaled};

  // both channels share one chip and code timing
  a_chip_aligned: assert property (@(posedge clk) disable iff (!resetn)
                                   chip_en2 == chip_en && addr2 == addr1 && code_start2 == code_start);
  a_branches_equal: assert property (@(posedge clk) disable iff (!resetn) i1 == q1 && i2 == q2);

endmodule
