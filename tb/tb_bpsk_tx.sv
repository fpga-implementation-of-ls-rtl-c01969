// tb_bpsk_tx -- one transmitter channel, cycle by cycle, against the reference
// chain (LS code, zero-stuffing by 4, RRC convolution, fs/4 carrier, scaling).
// Uses short codes (Golay halves of 8 chips, zero runs of 3: 22 chips) so that
// several code periods pass; both code selections are run.
module tb_bpsk_tx;
  import ls_tx_pkg::*;
  import ls_ref_pkg::*;

  localparam int GL = 3, ZL = 3, NCHIPS = 2 * ((1 << GL) + ZL);

  logic clk = 0, rstn = 0;
  logic signed [15:0] out0, out1;
  chip_t chip0, chip1;
  logic en0, en1, st0, st1;
  logic [4:0] a0, a1;
  logic signed [11:0] i0, q0, i1, q1;
  int checks = 0, failures = 0, starts = 0, strobes = 0;

  always #5 clk = ~clk;

  bpsk_tx #(.CODE_SEL(0), .GOLAY_LOG2(GL), .ZERO_LEN(ZL)) dut0 (
    .clk, .rstn, .data_out_scaled(out0), .chip(chip0), .chip_en(en0), .code_start(st0),
    .code_addr(a0), .tx_i_filtered(i0), .tx_q_filtered(q0));
  bpsk_tx #(.CODE_SEL(1), .GOLAY_LOG2(GL), .ZERO_LEN(ZL)) dut1 (
    .clk, .rstn, .data_out_scaled(out1), .chip(chip1), .chip_en(en1), .code_start(st1),
    .code_addr(a1), .tx_i_filtered(i1), .tx_q_filtered(q1));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #200_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seq_t c0, c1, r0, r1, d0, d1;
    int last_start = -1;
    localparam int N = 4 * NCHIPS * 5;
    c0 = ls_code(0, GL, ZL);
    c1 = ls_code(1, GL, ZL);
    ref_chain(c0, N, 4, r0, d0);
    ref_chain(c1, N, 4, r1, d1);
    repeat (3) @(posedge clk);
    #1 check(out0 == 0 && out1 == 0, "reset");
    rstn = 1;
    for (int t = 0; t < N; t++) begin
      check(en0 == ((t % 4) == 3), "chip strobe every 4 clocks");
      if (en0) strobes++;
      @(posedge clk); #1;
      check(int'(i0) == r0[t] && int'(q0) == int'(i0), $sformatf("rrc0 t=%0d", t));
      check(int'(i1) == r1[t] && int'(q1) == int'(i1), $sformatf("rrc1 t=%0d", t));
      check(int'(out0) == d0[t], $sformatf("dac0 t=%0d got %0d want %0d", t, out0, d0[t]));
      check(int'(out1) == d1[t], $sformatf("dac1 t=%0d got %0d want %0d", t, out1, d1[t]));
      if (st0 && en0) begin
        // code period: NCHIPS chips of 4 clocks
        if (last_start >= 0) check(t - last_start == 4 * NCHIPS, "code period in clocks");
        last_start = t;
        starts++;
      end
    end
    check(starts == 5, $sformatf("code periods seen %0d", starts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
