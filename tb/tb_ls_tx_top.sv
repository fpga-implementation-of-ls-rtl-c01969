// tb_ls_tx_top -- end-to-end test of the two-channel transmitter at its
// default size (two LS codes of 8190 chips, 4 samples per chip).
//
// For one full code period plus a margin (33,200 clocks) both DAC samples are
// compared every cycle with the reference chain, and dac_word with their
// packing. The chips sent by each channel over one period are captured and
// their periodic correlations computed: autocorrelation 4096 at zero shift and
// 0 for shifts 1..2047, cross-correlation 0 for shifts -2047..2047, i.e. an
// interference-free window of 4095 chips (the "4000-chip IFW") for the
// aperiodic correlation; the periodic zone is reported as well. The test
// counts how often each mechanism occurred (chip strobes, inserted zeros,
// zero-run / +1 / -1 chips, code wrap-arounds, each carrier phase) and fails
// for any that never happened.
module tb_ls_tx_top;
  import ls_tx_pkg::*;
  import ls_ref_pkg::*;

  localparam int NCHIPS = 8190;
  localparam int N      = 4 * NCHIPS + 440;

  logic clk = 0, resetn = 0;
  logic signed [15:0] tx1, tx2;
  logic [31:0] dac_word;
  logic chip_en, code_start;
  chip_t chip1, chip2;
  int checks = 0, failures = 0;
  int n_strobe = 0, n_zero_ins = 0, n_zero_chip = 0, n_pos = 0, n_neg = 0, n_wrap = 0;
  int n_phase [4] = '{0, 0, 0, 0};
  int cap1 [NCHIPS], cap2 [NCHIPS];

  always #5 clk = ~clk;

  // largest W such that both autocorrelation side lobes and both
  // cross-correlations are zero for all 0 < |tau| <= W
  function automatic int zero_zone(bit periodic);
    int w = 0;
    for (int tau = 1; tau < NCHIPS / 2; tau++) begin
      int a1 = 0, a2 = 0, xp = 0, xn = 0;
      for (int i = 0; i < NCHIPS; i++) begin
        int j = i + tau;
        if (j >= NCHIPS) begin
          if (!periodic) break;
          j -= NCHIPS;
        end
        a1 += cap1[i] * cap1[j];
        a2 += cap2[i] * cap2[j];
        xp += cap1[i] * cap2[j];
        xn += cap2[i] * cap1[j];
      end
      if (a1 != 0 || a2 != 0 || xp != 0 || xn != 0) break;
      w = tau;
    end
    return w;
  endfunction

  ls_tx_top dut (
    .clk, .resetn,
    .tx1_data_out_scaled(tx1), .tx2_data_out_scaled(tx2), .dac_word,
    .chip_en, .tx1_chip(chip1), .tx2_chip(chip2), .code_start
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic happened(int count, string what);
    checks++;
    $display("  %-28s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin
    #5_000_000;   // 500,000 clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seq_t c1, c2, r1, r2, d1, d2;
    int k = 0, last_start = -1;
    int acc, auto1_peak, auto2_peak, ifw_lo, ifw_hi;
    c1 = ls_code(0, LS_GOLAY_LOG2, LS_ZERO_LEN);
    c2 = ls_code(1, LS_GOLAY_LOG2, LS_ZERO_LEN);
    ref_chain(c1, N, 4, r1, d1);
    ref_chain(c2, N, 4, r2, d2);

    repeat (4) @(posedge clk);
    #1 check(tx1 == 0 && tx2 == 0 && dac_word == 0, "reset");
    resetn = 1;
    for (int t = 0; t < N; t++) begin
      check(chip_en == ((t % 4) == 3), $sformatf("chip strobe at %0d", t));
      @(posedge clk); #1;
      check(int'(tx1) == d1[t], $sformatf("tx1 t=%0d got %0d want %0d", t, tx1, d1[t]));
      check(int'(tx2) == d2[t], $sformatf("tx2 t=%0d got %0d want %0d", t, tx2, d2[t]));
      check(dac_word == {tx2, tx1}, "dac_word packing");
      n_phase[t % 4] += (dut.u_tx1.u_nco.phase == 2'(t % 4) + 2'd1) ? 1 : 0;
      if (dut.u_tx1.u_up_i.phase != 0 && dut.u_tx1.u_up_i.samp_out == CHIP_ZERO) n_zero_ins++;
      if ((t % 4) == 3) begin
        // a chip was loaded on this edge
        n_strobe++;
        if (k < NCHIPS) begin
          cap1[k] = int'(chip1);
          cap2[k] = int'(chip2);
        end
        if (chip1 == CHIP_ZERO) n_zero_chip++;
        if (chip1 == CHIP_POS)  n_pos++;
        if (chip1 == CHIP_NEG)  n_neg++;
        if (code_start) begin
          if (last_start >= 0) begin
            n_wrap++;
            check(t - last_start == 4 * NCHIPS, "code period = 32760 clocks");
          end
          last_start = t;
        end
        check(code_start == ((k % NCHIPS) == 0), "code_start marks chip 0");
        k++;
      end
    end
    check(k >= NCHIPS + 100, "more than one code period sent");

    // correlation properties of what the two channels actually sent
    acc = 0;
    for (int i = 0; i < NCHIPS; i++) acc += cap1[i] * cap1[i];
    auto1_peak = acc;
    acc = 0;
    for (int i = 0; i < NCHIPS; i++) acc += cap2[i] * cap2[i];
    auto2_peak = acc;
    check(auto1_peak == 4096 && auto2_peak == 4096, $sformatf("auto peaks %0d %0d", auto1_peak, auto2_peak));
    // aperiodic (one code period against a shifted copy, no wrap), as in the
    // correlation plots, and periodic (continuous transmission)
    ifw_lo = zero_zone(1'b0);
    ifw_hi = zero_zone(1'b1);
    acc = 0;
    for (int i = 0; i < NCHIPS; i++) acc += cap1[i] * cap2[i];
    check(acc == 0, "cross-correlation zero at zero shift");
    $display("  aperiodic zero-correlation zone: |tau| <= %0d chips, IFW = %0d chips", ifw_lo, 2 * ifw_lo + 1);
    $display("  periodic  zero-correlation zone: |tau| <= %0d chips", ifw_hi);
    check(ifw_lo == 2047, "aperiodic zero zone ends at 2047 chips");
    check(2 * ifw_lo + 1 >= 4000, "IFW of at least 4000 chips");
    check(ifw_hi >= ifw_lo, "periodic zone at least as wide");

    $display("mechanisms:");
    happened(n_strobe,    "chip strobes");
    happened(n_zero_ins,  "zeros inserted by up-sampler");
    happened(n_zero_chip, "zero chips (guard runs)");
    happened(n_pos,       "+1 chips");
    happened(n_neg,       "-1 chips");
    happened(n_wrap,      "code wrap-arounds");
    foreach (n_phase[p]) happened(n_phase[p], $sformatf("carrier phase %0d", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
