// tb_ls_code_rom -- reads both LS code ROMs (default size, 8190 words) at every
// address and compares with the reference codes; checks enable-hold and the
// synchronous clear of the output.
module tb_ls_code_rom;
  import ls_tx_pkg::*;
  import ls_ref_pkg::*;

  localparam int unsigned DEPTH = 2 * ((1 << LS_GOLAY_LOG2) + LS_ZERO_LEN);
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 0, rstn = 0, en = 0;
  logic [AW-1:0] addr = '0;
  chip_t dout0, dout1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ls_code_rom #(.CODE_SEL(0)) dut0 (.clk, .rstn, .en, .addr, .dout(dout0));
  ls_code_rom #(.CODE_SEL(1)) dut1 (.clk, .rstn, .en, .addr, .dout(dout1));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seq_t c0, c1;
    c0 = ls_code(0, LS_GOLAY_LOG2, LS_ZERO_LEN);
    c1 = ls_code(1, LS_GOLAY_LOG2, LS_ZERO_LEN);
    check(c0.size() == 8190 && DEPTH == 8190, "code length 8190");
    @(posedge clk); @(posedge clk);
    #1 check(dout0 == CHIP_ZERO && dout1 == CHIP_ZERO, "reset clears output");
    rstn = 1;
    for (int i = 0; i < int'(DEPTH); i++) begin
      addr = AW'(i); en = 1;
      @(posedge clk); #1;
      check(dout0 == enc(c0[i]), $sformatf("code0[%0d] got %0d want %0d", i, dout0, c0[i]));
      check(dout1 == enc(c1[i]), $sformatf("code1[%0d] got %0d want %0d", i, dout1, c1[i]));
    end
    // enable low holds the last word
    en = 0; addr = AW'(LS_ZERO_LEN);
    @(posedge clk); #1;
    check(dout0 == enc(c0[DEPTH-1]) && dout1 == enc(c1[DEPTH-1]), "hold with en = 0");
    // synchronous clear
    en = 1; rstn = 0;
    @(posedge clk); #1;
    check(dout0 == CHIP_ZERO && dout1 == CHIP_ZERO, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
