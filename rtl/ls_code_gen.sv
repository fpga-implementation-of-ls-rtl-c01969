// ls_code_gen -- LS code generator: the data source of one transmitter.
//
// An address counter walks the code ROM (ls_code_rom) and the ROM's
// registered output is the current chip. As in the original generator the
// counter has a clock enable and a synchronous clear: it advances by one on
// every cycle with chip_en = 1 and is cleared when it reaches the last address
// (DEPTH-1) so the code repeats without a gap, 8190 chips per period with the
// defaults. The counter and ROM output are cleared by a low rstn
// (synchronous).
//
// Interface: chip_en is the chip-rate strobe (one cycle every 4 clocks in the
// full transmitter). Timing: the rising clk that sees chip_en = 1 loads chip
// with code[addr] and advances addr; chip then holds until the next strobe.
// After reset the first strobe delivers chip 0. code_start is 1 while chip
// holds chip 0 of the code, which marks the start of each code period.
module ls_code_gen
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
  input  logic          chip_en,
  output chip_t         chip,
  output logic [AW-1:0] addr,
  output logic          code_start
);

  logic addr_last;
  assign addr_last = (addr == AW'(DEPTH - 1));

  always_ff @(posedge clk) begin
    if (!rstn)                       addr <= '0;
    else if (chip_en && addr_last)   addr <= '0;
    else if (chip_en)                addr <= addr + 1'b1;
  end

  // code_start follows the ROM word: set when address 0 is read
  always_ff @(posedge clk) begin
    if (!rstn)        code_start <= 1'b0;
    else if (chip_en) code_start <= (addr == '0);
  end

  ls_code_rom #(
    .CODE_SEL  (CODE_SEL),
    .GOLAY_LOG2(GOLAY_LOG2),
    .ZERO_LEN  (ZERO_LEN)
  ) u_rom (
    .clk (clk),
    .rstn(rstn),
    .en  (chip_en),
    .addr(addr),
    .dout(chip)
  );

  a_addr_in_range: assert property (@(posedge clk) disable iff (!rstn) addr < AW'(DEPTH));

endmodule
