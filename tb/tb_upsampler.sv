// tb_upsampler -- checks the up-by-4 zero-insertion up-sampler: chip_en every
// 4th cycle exactly, samp_out equal to the chip loaded on the strobe in the
// following cycle and zero in the other three, reset behaviour. A small
// register in the testbench plays the code generator. Also runs L = 2.
module tb_upsampler;
  import ls_tx_pkg::*;

  logic clk = 0, rstn = 0;
  chip_t chip_in, chip2_in, samp, samp2;
  logic chip_en, chip_en2;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  upsampler dut (.clk, .rstn, .chip_in, .chip_en, .samp_out(samp));
  upsampler #(.L(2)) dut2 (.clk, .rstn, .chip_in(chip2_in), .chip_en(chip_en2), .samp_out(samp2));

  // generator stand-in: new random chip on each strobe
  function automatic chip_t rnd_chip();
    int r = $urandom_range(0, 2);
    return (r == 0) ? CHIP_ZERO : (r == 1) ? CHIP_POS : CHIP_NEG;
  endfunction
  always_ff @(posedge clk) begin
    if (!rstn) begin chip_in <= CHIP_ZERO; chip2_in <= CHIP_ZERO; end
    else begin
      if (chip_en)  chip_in  <= rnd_chip();
      if (chip_en2) chip2_in <= rnd_chip();
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chip_t prev, prev2;
    int nonzero = 0;
    repeat (3) @(posedge clk);
    #1 check(samp == CHIP_ZERO && !chip_en, "reset");
    rstn = 1;
    for (int t = 0; t < 2000; t++) begin
      prev = chip_in; prev2 = chip2_in;
      // chip_en before edge t: phase == 3
      check(chip_en == ((t % 4) == 3), $sformatf("chip_en at %0d", t));
      check(chip_en2 == ((t % 2) == 1), $sformatf("chip_en (L=2) at %0d", t));
      @(posedge clk); #1;
      if ((t % 4) == 0) begin
        check(samp == prev, $sformatf("sample at %0d", t));
        if (samp != CHIP_ZERO) nonzero++;
      end else check(samp == CHIP_ZERO, $sformatf("inserted zero at %0d", t));
      if ((t % 2) == 0) check(samp2 == prev2, "L=2 sample");
      else              check(samp2 == CHIP_ZERO, "L=2 zero");
    end
    check(nonzero > 100, "non-zero chips passed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
