// ls_code_rom -- lookup table holding one LS code, one 2-bit chip per word.
//
// The code is stored as ZEROS C ZEROS S (Golay half C, Golay half S, each
// preceded by a run of zeros), DEPTH = 2*(2^GOLAY_LOG2 + ZERO_LEN) words; with
// the defaults 8190 words of 2 bits. Chips are encoded 00 = 0, 01 = +1,
// 11 = -1. Like the original design the code sits in a ROM read by an address
// counter; here the contents are computed when the ROM is initialised, from
// the Golay recursion in ls_tx_pkg, instead of being pasted in as a table.
// CODE_SEL picks code 0 (C, S) or code 1, its complementary mate.
//
// Timing: synchronous read. On a rising clk with en = 1, dout takes the word
// at addr one cycle later; with en = 0 dout holds. A low rstn (synchronous)
// clears dout to the zero chip, as the FDR output register of the original.
module ls_code_rom
  import ls_tx_pkg::*;
#(
  parameter int unsigned CODE_SEL   = 0,
  parameter int unsigned GOLAY_LOG2 = ls_tx_pkg::LS_GOLAY_LOG2,
  parameter int unsigned ZERO_LEN   = ls_tx_pkg::LS_ZERO_LEN,
  localparam int unsigned DEPTH     = 2 * ((1 << GOLAY_LOG2) + ZERO_LEN),
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rstn,
  input  logic          en,
  input  logic [AW-1:0] addr,
  output chip_t         dout
);

  chip_t mem [DEPTH];

  initial begin
    for (int unsigned i = 0; i < DEPTH; i++)
      mem[i] = ls_chip(i, CODE_SEL, GOLAY_LOG2, ZERO_LEN);
  end

  always_ff @(posedge clk) begin
    if (!rstn)   dout <= CHIP_ZERO;
    else if (en) dout <= mem[addr];
  end

endmodule
