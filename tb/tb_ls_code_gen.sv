// tb_ls_code_gen -- drives the chip strobe of both code generators (default
// size) with a random pattern for a little over two code periods and checks
// every delivered chip against the reference codes, the hold between strobes,
// the wrap from address 8189 to 0 and the code_start marker.
module tb_ls_code_gen;
  import ls_tx_pkg::*;
  import ls_ref_pkg::*;

  localparam int unsigned DEPTH = LS_CODE_LEN;

  logic clk = 0, rstn = 0, chip_en = 0;
  chip_t chip0, chip1;
  logic [12:0] addr0, addr1;
  logic start0, start1;
  int checks = 0, failures = 0, wraps = 0;

  always #5 clk = ~clk;

  ls_code_gen #(.CODE_SEL(0)) dut0 (.clk, .rstn, .chip_en, .chip(chip0), .addr(addr0), .code_start(start0));
  ls_code_gen #(.CODE_SEL(1)) dut1 (.clk, .rstn, .chip_en, .chip(chip1), .addr(addr1), .code_start(start1));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seq_t c0, c1;
    int k = 0;             // chips delivered so far
    chip_t last0, last1;
    c0 = ls_code(0, LS_GOLAY_LOG2, LS_ZERO_LEN);
    c1 = ls_code(1, LS_GOLAY_LOG2, LS_ZERO_LEN);
    repeat (2) @(posedge clk);
    #1 check(chip0 == CHIP_ZERO && addr0 == 0 && !start0, "reset state");
    rstn = 1;
    last0 = chip0; last1 = chip1;
    while (k < 2 * int'(DEPTH) + 50) begin
      chip_en = ($urandom_range(0, 2) != 0);
      @(posedge clk); #1;
      if (chip_en) begin
        check(chip0 == enc(c0[k % DEPTH]), $sformatf("chip0 #%0d", k));
        check(chip1 == enc(c1[k % DEPTH]), $sformatf("chip1 #%0d", k));
        check(start0 == ((k % DEPTH) == 0) && start1 == start0, $sformatf("code_start #%0d", k));
        check(addr0 == 13'(((k + 1) % DEPTH)), $sformatf("addr after #%0d = %0d", k, addr0));
        if (start0 && k > 0) wraps++;
        k++;
      end else begin
        check(chip0 == last0 && chip1 == last1, "hold without strobe");
      end
      last0 = chip0; last1 = chip1;
    end
    check(wraps == 2, $sformatf("two wraps seen (%0d)", wraps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
